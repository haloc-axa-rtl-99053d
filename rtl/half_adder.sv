// half_adder: one-bit half adder.
//
// Adds two bits and returns the sum bit (a XOR b) and the carry (a AND b).
// Purely combinational, no clock. Two of these sit at the top of the
// approximate lower part of the HALOC-AxA adder.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);

  always_comb begin
    s = a ^ b;
    c = a & b;
  end

endmodule
