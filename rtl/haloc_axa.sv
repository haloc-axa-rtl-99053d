// haloc_axa: HALOC-AxA approximate adder (top).
//
// Adds two N-bit unsigned operands and returns an N+1 bit sum. The upper N-M
// bits go through an exact adder (haloc_msm); the lower M bits go through the
// approximate lower part (haloc_lsm), which has no carry chain and hands one
// predicted carry, the half-adder carry of bit pair M-1, to the exact part.
// The error is bounded by the lower part: at most a few times 2^(M-1), and
// with N = 32, M = 10, K = 5 the mean error distance over uniform random
// operands is about 124.
//
// Sizes N = 32, M = 10, K = 5 are the evaluated configuration of the
// published design. Treating the operands as unsigned and returning the carry
// out as bit N are this implementation's reading of the block diagram, which
// shows sum outputs up to S_N. Purely combinational: no clock or reset, the
// result follows the inputs after the adder's propagation delay.
//
// Interface: a, b (N bits) -> s (N+1 bits), s[N] is the carry out.
// Legal sizes: N > M >= K + 2.
module haloc_axa #(
  parameter int unsigned N = haloc_pkg::HALOC_N,
  parameter int unsigned M = haloc_pkg::HALOC_M,
  parameter int unsigned K = haloc_pkg::HALOC_K
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   s
);

  if (N <= M) begin : g_bad_size
    $error("haloc_axa: N (%0d) must exceed M (%0d)", N, M);
  end

  logic         cin;   // predicted carry from the lower part into the upper part
  logic [M-1:0] s_lo;
  logic [N-M:0] s_hi;

  haloc_lsm #(.M(M), .K(K)) u_lsm (
    .a    (a[M-1:0]),
    .b    (b[M-1:0]),
    .s    (s_lo),
    .cout (cin)
  );

  haloc_msm #(.W(N - M)) u_msm (
    .a   (a[N-1:M]),
    .b   (b[N-1:M]),
    .cin (cin),
    .s   (s_hi)
  );

  assign s = {s_hi, s_lo};

endmodule
