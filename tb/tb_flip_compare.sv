// tb_flip_compare: random counts and thresholds (thresholds up to d+2, so
// T > d occurs); flip must be cnt >= T, registered when en is high and held
// when it is low.
module tb_flip_compare;
  localparam int unsigned L = bike_pkg::L_DEF, D = bike_pkg::D_DEF, CW = $clog2(D + 1);
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [L-1:0][CW-1:0] cnt = '0;
  logic [CW:0] thr = '0;
  logic [L-1:0] flip, exp_f;
  int checks = 0, failures = 0;
  flip_compare dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 300; i++) begin
      int t;
      t = int'($urandom_range(D + 2, 0));
      for (int l = 0; l < L; l++) begin
        cnt[l] <= CW'($urandom_range(D, 0));
      end
      thr <= (CW+1)'(t);
      en  <= 1'b1;
      @(posedge clk);
      en <= 1'b0;
      for (int l = 0; l < L; l++) exp_f[l] = (int'(cnt[l]) >= t);
      cnt <= '0; thr <= '1;      // must not change the held result
      @(posedge clk); #1;
      checks++;
      if (flip !== exp_f) begin failures++; $display("FAIL: %h exp %h", flip, exp_f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
