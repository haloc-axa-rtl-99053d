// tb_haloc_lsm: self-checking testbench for the approximate lower part.
//
// The reference is written from the behaviour, not from the gates: the low
// K bits are 1, bits M-3..K are the OR of the operands, and the top two bits
// plus the carry out equal the exact 2-bit sum of the top bit pairs, except
// in the one case the design gets wrong (both bits M-2 set, bits M-1
// different), where the result is 010. The ten distinct top-pair cases of the
// published truth table are checked by name; then the 10-bit lower part of
// the 32-bit configuration (M = 10, K = 5) and the 8-bit lower part of the
// 16-bit worked example (M = 8, K = 4) are checked over all operand pairs.
module tb_haloc_lsm;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  localparam int unsigned M1 = 10, K1 = 5;
  localparam int unsigned M2 = 8,  K2 = 4;

  logic [M1-1:0] a1, b1, s1;
  logic          c1;
  logic [M2-1:0] a2, b2, s2;
  logic          c2;

  haloc_lsm #(.M(M1), .K(K1)) dut1 (.a(a1), .b(b1), .s(s1), .cout(c1));
  haloc_lsm #(.M(M2), .K(K2)) dut2 (.a(a2), .b(b2), .s(s2), .cout(c2));

  // Reference: {cout, s} for an M-bit lower part with K constant bits.
  function automatic int unsigned ref_lsm(int unsigned a, int unsigned b, int unsigned m, int unsigned k);
    int unsigned lo, ta, tb, top;
    lo = ((a | b) & ((1 << (m - 2)) - 1)) | ((1 << k) - 1);
    ta = (a >> (m - 2)) & 3;
    tb = (b >> (m - 2)) & 3;
    if ((ta & 1) != 0 && (tb & 1) != 0 && ((ta ^ tb) & 2) != 0) top = 2;
    else                                              top = ta + tb;
    return (top << (m - 2)) | lo;
  endfunction

  task automatic check1(input int unsigned ta, input int unsigned tb);
    int unsigned exp;
    a1 = M1'(ta); b1 = M1'(tb);
    #1;
    exp = ref_lsm(ta, tb, M1, K1);
    checks++;
    if ({c1, s1} != (M1 + 1)'(exp)) begin
      failures++;
      if (failures < 10) $display("FAIL lsm10 a=%0h b=%0h got=%0h exp=%0h", ta, tb, {c1, s1}, exp);
    end
  endtask

  // Top-pair cases of the truth table: {a[M-1:M-2], b[M-1:M-2], expected 3-bit result}.
  typedef struct packed { logic [1:0] a; logic [1:0] b; logic [2:0] r; } row_t;
  row_t rows [10] = '{
    '{2'b00, 2'b00, 3'b000}, '{2'b01, 2'b00, 3'b001}, '{2'b01, 2'b01, 3'b010},
    '{2'b10, 2'b00, 3'b010}, '{2'b10, 2'b01, 3'b011}, '{2'b10, 2'b10, 3'b100},
    '{2'b11, 2'b00, 3'b011}, '{2'b11, 2'b01, 3'b010}, '{2'b11, 2'b10, 3'b101},
    '{2'b11, 2'b11, 3'b110}
  };

  initial begin
    // Named truth-table rows, both operand orders, lower bits zero.
    foreach (rows[r]) begin
      for (int sw = 0; sw < 2; sw++) begin
        a1 = {(sw != 0 ? rows[r].b : rows[r].a), 8'h00};
        b1 = {(sw != 0 ? rows[r].a : rows[r].b), 8'h00};
        #1;
        checks++;
        if ({c1, s1[M1-1:M1-2]} != rows[r].r || s1[M1-3:0] != 8'b00011111) begin
          failures++;
          $display("FAIL row a=%b b=%b got=%b exp=%b", a1[9:8], b1[9:8], {c1, s1[9:8]}, rows[r].r);
        end
      end
    end

    // Exhaustive, M = 10, K = 5.
    for (int unsigned i = 0; i < (1 << M1); i++)
      for (int unsigned j = 0; j < (1 << M1); j++)
        check1(i, j);

    // Exhaustive, M = 8, K = 4.
    for (int unsigned i = 0; i < (1 << M2); i++)
      for (int unsigned j = 0; j < (1 << M2); j++) begin
        int unsigned exp;
        a2 = M2'(i); b2 = M2'(j);
        #1;
        exp = ref_lsm(i, j, M2, K2);
        checks++;
        if ({c2, s2} != (M2 + 1)'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL lsm8 a=%0h b=%0h got=%0h exp=%0h", i, j, {c2, s2}, exp);
        end
      end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
