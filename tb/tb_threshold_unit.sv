// tb_threshold_unit: runs decodes' worth of threshold requests (iteration 1
// with a random initial |s|, then iterations 2..7 with random later |s|,
// sometimes 0 or negative) and compares with the exact integer reference of
// bf_model_pkg::threshold for the default 7-bit coefficients. Also checks
// two hand-worked values: |s| = 5000 gives f = 101*5000/16384 + 10.84375 =
// 41.67 so iteration 1 gives ceil(41.67)+3 = 45, and iteration >= 4 with a
// small |s| gives M + delta = 36 + 3 = 39.
module tb_threshold_unit;
  import bf_model_pkg::*;
  localparam int unsigned WW = 16, CW = 8, ITW = 4, M = (bike_pkg::D_DEF + 1) / 2;
  logic clk = 1'b0, rst_n = 1'b0, latch = 1'b0;
  logic [ITW-1:0] iter = '0;
  logic signed [WW-1:0] weight = '0;
  logic [CW-1:0] thr;
  int checks = 0, failures = 0;
  threshold_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic req(input int it, input int w, input int expv);
    iter <= ITW'(it); weight <= WW'(w); latch <= 1'b1;
    @(posedge clk);
    latch <= 1'b0; weight <= WW'($urandom);
    @(posedge clk); #1;
    checks++;
    if (int'(thr) != expv) begin failures++; $display("FAIL: it %0d w %0d thr %0d exp %0d", it, w, thr, expv); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    req(1, 5000, 45);
    req(4, 100, 39);
    for (int run = 0; run < 200; run++) begin
      int w0;
      longint tp;
      w0 = int'($urandom_range(12992, 0));
      tp = longint'(bike_pkg::A_MANT_DEF) * w0 + (longint'(bike_pkg::B_FIX_DEF) << 7);
      req(1, w0, threshold(1, w0, tp, bike_pkg::A_MANT_DEF, 14, bike_pkg::B_FIX_DEF, 7, M, bike_pkg::DELTA_DEF));
      for (int it = 2; it <= 7; it++) begin
        int w;
        w = ($urandom_range(9, 0) == 0) ? -int'($urandom_range(50, 0)) : int'($urandom_range(w0, 0));
        req(it, w, threshold(it, w, tp, bike_pkg::A_MANT_DEF, 14, bike_pkg::B_FIX_DEF, 7, M, bike_pkg::DELTA_DEF));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
