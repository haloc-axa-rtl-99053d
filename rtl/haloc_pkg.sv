// haloc_pkg: default sizes of the HALOC-AxA approximate adder.
//
// The adder splits an N-bit addition into an exact upper part of N-M bits
// (the most significant module, MSM) and an approximate lower part of M bits
// (the least significant module, LSM). Inside the LSM the K lowest sum bits
// are tied to 1, the next M-K-2 bits are bitwise ORs of the operands, and the
// top two bits come from two half adders. The defaults below are the sizes the
// design was evaluated at: N = 32, M = 10, K = 5.
package haloc_pkg;

  // Total operand width.
  localparam int unsigned HALOC_N = 32;
  // Width of the approximate lower part.
  localparam int unsigned HALOC_M = 10;
  // Number of constant-1 sum bits at the bottom of the lower part.
  localparam int unsigned HALOC_K = 5;

endpackage
