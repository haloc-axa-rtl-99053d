// haloc_lsm: approximate least significant module of the HALOC-AxA adder.
//
// Computes the M low sum bits of the adder without a carry chain, in three
// sections from the bottom up:
//   * constant section, bits K-1..0: every sum bit is 1;
//   * OR section, bits M-3..K: sum bit i is a[i] | b[i];
//   * half-adder section, bits M-1..M-2: one half adder per bit pair. Sum bit
//     M-2 is the half-adder sum of pair M-2. Sum bit M-1 is the half-adder
//     sum of pair M-1 ORed with the carry of pair M-2, so a carry out of
//     bit M-2 still reaches S_{M-1}. The carry of pair M-1 leaves the module
//     as cout, the predicted carry-in of the exact upper part.
// Against an exact 2-bit addition of the top pairs the half-adder section is
// wrong in one of the ten distinct operand cases: both bits M-2 set and bits
// M-1 different, where it gives 010 instead of 100.
//
// The three sections, their bit ranges and the two half adders follow the
// published design. Combining S_{M-1} with an OR follows the published
// truth table for the top two bits (11 + 01 gives 010). Purely combinational.
//
// Interface: a, b (M bits) -> s (M bits), cout (1 bit).
// Legal sizes: M >= K + 2.
module haloc_lsm #(
  parameter int unsigned M = haloc_pkg::HALOC_M,
  parameter int unsigned K = haloc_pkg::HALOC_K
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] s,
  output logic         cout
);

  if (M < K + 2) begin : g_bad_size
    $error("haloc_lsm: M (%0d) must be at least K + 2 (%0d)", M, K + 2);
  end

  // Half-adder section on the two most significant bit pairs.
  logic hs_hi, hc_hi;   // pair M-1
  logic hs_lo, hc_lo;   // pair M-2

  half_adder u_ha_hi (.a(a[M-1]), .b(b[M-1]), .s(hs_hi), .c(hc_hi));
  half_adder u_ha_lo (.a(a[M-2]), .b(b[M-2]), .s(hs_lo), .c(hc_lo));

  always_comb begin
    // Constant section: tied to 1.
    for (int unsigned i = 0; i < K; i++) begin
      s[i] = 1'b1;
    end
    // OR section.
    for (int unsigned i = K; i < M - 2; i++) begin
      s[i] = a[i] | b[i];
    end
    // Half-adder section.
    s[M-2] = hs_lo;
    s[M-1] = hs_hi | hc_lo;
    cout   = hc_hi;
  end

endmodule
