// haloc_msm: exact most significant module of the HALOC-AxA adder.
//
// Adds the W upper bits of the two operands together with a carry-in that
// the approximate lower part predicts, and returns a W+1 bit result whose top
// bit is the carry out of the whole adder (sum bit S_N of the full adder).
// The design leaves the adder architecture open (a ripple-carry or a
// carry-lookahead adder both qualify); this module states the exact sum and
// lets synthesis pick the structure. Purely combinational, no clock.
//
// Interface: a, b (W bits), cin (1 bit) -> s (W+1 bits) = a + b + cin.
module haloc_msm #(
  parameter int unsigned W = haloc_pkg::HALOC_N - haloc_pkg::HALOC_M
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W:0]   s
);

  always_comb begin
    s = {1'b0, a} + {1'b0, b} + {{W{1'b0}}, cin};
  end

endmodule
