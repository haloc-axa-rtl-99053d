// tb_haloc_msm: self-checking testbench for the exact upper adder.
//
// Drives corner cases (zero, all ones, carry-in into an all-ones word) and
// random operands into a 22-bit instance, the width of the upper part in the
// 32-bit configuration, and compares the W+1 bit result with a 64-bit
// integer sum. A small 3-bit instance is checked exhaustively. A watchdog
// ends the run after a fixed number of clock cycles.
module tb_haloc_msm;

  localparam int unsigned W  = 22;
  localparam int unsigned WS = 3;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [W-1:0]  a, b;
  logic          cin;
  logic [W:0]    s;
  logic [WS-1:0] as, bs;
  logic          cins;
  logic [WS:0]   ss;

  haloc_msm #(.W(W))  dut   (.a(a),  .b(b),  .cin(cin),  .s(s));
  haloc_msm #(.W(WS)) dut_s (.a(as), .b(bs), .cin(cins), .s(ss));

  task automatic check_big(input logic [W-1:0] ta, input logic [W-1:0] tb, input logic tc);
    longint unsigned exp;
    a = ta; b = tb; cin = tc;
    @(posedge clk);
    exp = longint'(ta) + longint'(tb) + longint'(tc);
    checks++;
    if (longint'(s) != exp) begin
      failures++;
      $display("FAIL msm a=%0h b=%0h cin=%0b s=%0h exp=%0h", ta, tb, tc, s, exp);
    end
  endtask

  initial begin
    check_big('0, '0, 1'b0);
    check_big('0, '0, 1'b1);
    check_big('1, '0, 1'b1);
    check_big('1, '1, 1'b0);
    check_big('1, '1, 1'b1);
    check_big(22'h2AAAAA, 22'h155555, 1'b1);
    repeat (5000) check_big(W'($urandom), W'($urandom), 1'($urandom));

    for (int i = 0; i < (1 << WS); i++)
      for (int j = 0; j < (1 << WS); j++)
        for (int c = 0; c < 2; c++) begin
          as = WS'(i); bs = WS'(j); cins = 1'(c);
          @(posedge clk);
          checks++;
          if (int'(ss) != i + j + c) begin
            failures++;
            $display("FAIL msm3 %0d+%0d+%0d -> %0d", i, j, c, ss);
          end
        end

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
