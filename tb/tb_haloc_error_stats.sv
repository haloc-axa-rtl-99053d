// tb_haloc_error_stats: accuracy workload of the HALOC-AxA adder.
//
// Feeds 10^7 pairs of uniform random 32-bit operands through the adder at its
// default size (N = 32, M = 10, K = 5) and measures, against the exact sum,
//   MED  = mean of |S_approx - S_exact|
//   MRED = mean of |S_approx - S_exact| / S_exact.
// The published figures for this configuration are MED = 123.9 and
// MRED = 3.77e-8. MED must land within 2 % of 123.9. For uniform operands
// the expected MRED is about MED * 2 ln 2 / 2^32 = 4.0e-8, a little above the
// published value, so MRED is accepted anywhere in 3.5e-8 .. 4.3e-8.
// The run also checks that no single error exceeds the lower part's bound.
module tb_haloc_error_stats;

  localparam int unsigned N = 32, M = 10;
  localparam int          SAMPLES = 10_000_000;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [N-1:0] a, b;
  logic [N:0]   s;

  haloc_axa dut (.a(a), .b(b), .s(s));

  initial begin
    real             sum_ed, sum_red, med, mred;
    longint unsigned exact, ed, max_ed;
    int              bound_fail;
    sum_ed = 0.0; sum_red = 0.0; max_ed = 0; bound_fail = 0;
    for (int i = 0; i < SAMPLES; i++) begin
      a = $urandom;
      b = $urandom;
      #1;
      exact = longint'(a) + longint'(b);
      ed    = (longint'(s) > exact) ? longint'(s) - exact : exact - longint'(s);
      if (ed > max_ed) max_ed = ed;
      if (ed >= (64'd1 << (M - 1)) + (64'd1 << (M - 2))) bound_fail++;
      sum_ed += real'(ed);
      if (exact != 0) sum_red += real'(ed) / real'(exact);
    end
    med  = sum_ed / real'(SAMPLES);
    mred = sum_red / real'(SAMPLES);
    $display("samples=%0d MED=%.2f MRED=%.3e max ED=%0d", SAMPLES, med, mred, max_ed);

    checks++;
    if (bound_fail != 0) begin
      failures++;
      $display("FAIL %0d samples beyond the error bound", bound_fail);
    end
    checks++;
    if (med < 123.9 * 0.98 || med > 123.9 * 1.02) begin
      failures++;
      $display("FAIL MED %.2f not within 2%% of 123.9", med);
    end
    checks++;
    if (mred < 3.5e-8 || mred > 4.3e-8) begin
      failures++;
      $display("FAIL MRED %.3e outside 3.5e-8 .. 4.3e-8", mred);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog in clock cycles: the sample loop takes SAMPLES time units,
  // which is SAMPLES / 10 cycles.
  initial begin
    repeat (SAMPLES / 10 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
