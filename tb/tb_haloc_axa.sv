// tb_haloc_axa: end-to-end testbench of the HALOC-AxA adder at its default
// size (N = 32, M = 10, K = 5, no parameter override).
//
// Each operand pair is checked against a reference written from the adder's
// behaviour: the upper N-M bits are the exact sum of the upper operand bits
// plus the predicted carry (a[M-1] & b[M-1]), the low part is built as in
// tb_haloc_lsm. Each result must also stay within the error bound of the
// lower part. A second instance at N = 16, M = 8, K = 4 reproduces the
// published worked example 38098 + 15064 = 53151 (exact 53162, error 11).
//
// Every mechanism of the adder is counted and must occur at least once:
// a carry predicted into the upper part, a carry of pair M-2 folded into
// S_{M-1}, the one wrong top-pair case, a carry out of the whole adder, and
// an exact result.
module tb_haloc_axa;

  localparam int unsigned N = 32, M = 10, K = 5;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [N-1:0] a, b;
  logic [N:0]   s;
  logic [15:0]  ae, be;
  logic [16:0]  se;

  haloc_axa dut (.a(a), .b(b), .s(s));
  haloc_axa #(.N(16), .M(8), .K(4)) dut_ex (.a(ae), .b(be), .s(se));

  int n_cin = 0, n_fold = 0, n_wrong = 0, n_cout = 0, n_exact = 0;

  function automatic longint unsigned ref_axa(longint unsigned x, longint unsigned y);
    longint unsigned lo, hi, tx, ty, top, cin;
    lo  = ((x | y) & ((64'd1 << (M - 2)) - 1)) | ((64'd1 << K) - 1);
    tx  = (x >> (M - 2)) & 3;
    ty  = (y >> (M - 2)) & 3;
    if ((tx & 1) != 0 && (ty & 1) != 0 && ((tx ^ ty) & 2) != 0) top = 2;
    else                                              top = tx + ty;
    cin = top >> 2;
    hi  = (x >> M) + (y >> M) + cin;
    return (hi << M) | ((top & 3) << (M - 2)) | lo;
  endfunction

  task automatic check(input logic [N-1:0] ta, input logic [N-1:0] tb);
    longint unsigned exp, exact, ed;
    a = ta; b = tb;
    @(posedge clk);
    exp   = ref_axa(64'(ta), 64'(tb));
    exact = longint'(ta) + longint'(tb);
    ed    = (longint'(s) > exact) ? longint'(s) - exact : exact - longint'(s);
    checks++;
    if (longint'(s) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL a=%0h b=%0h s=%0h exp=%0h", ta, tb, s, exp);
    end
    // Error bound: the wrong top-pair case costs 2^(M-1); the OR and constant
    // bits can be off by less than 2^(M-2).
    checks++;
    if (ed >= (64'd1 << (M - 1)) + (64'd1 << (M - 2))) begin
      failures++;
      $display("FAIL error bound a=%0h b=%0h ed=%0d", ta, tb, ed);
    end
    if (ta[M-1] & tb[M-1])                         n_cin++;
    if (ta[M-2] & tb[M-2])                         n_fold++;
    if (ta[M-2] & tb[M-2] & (ta[M-1] ^ tb[M-1]))   n_wrong++;
    if (s[N])                                      n_cout++;
    if (ed == 0)                                   n_exact++;
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-28s seen %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", what);
    end
  endtask

  initial begin
    // Published worked example, 16-bit adder with M = 8, K = 4.
    ae = 16'd38098; be = 16'd15064;
    @(posedge clk);
    checks++;
    if (se != 17'd53151) begin
      failures++;
      $display("FAIL worked example: got %0d, expected 53151", se);
    end else begin
      $display("worked example: 38098 + 15064 -> %0d (exact 53162, error %0d)", se, 53162 - se);
    end

    // Directed cases at the default size.
    check('0, '0);                 // only the constant bits: 31
    check('1, '1);                 // carry out of the whole adder
    check(32'h0000_0300, 32'h0000_0100);  // 11 + 01 in the top pair: the wrong case
    check(32'h0000_0300, 32'h0000_0200);  // 11 + 10: exact top pair, carry into the MSM
    check(32'hFFFF_FC00, 32'h0000_0200);  // carry predicted into an all-ones upper part
    check(32'h0000_001F, 32'h0000_0000);  // exact result
    repeat (20000) check($urandom, $urandom);

    need("carry into upper part", n_cin);
    need("carry folded into S_{M-1}", n_fold);
    need("wrong top-pair case", n_wrong);
    need("carry out of adder", n_cout);
    need("exact result", n_exact);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
