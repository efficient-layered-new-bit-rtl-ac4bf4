// tb_syn_weight: clears, accumulates the popcount of r/L = 406 random
// segments (checked against a bit-by-bit count), then applies random
// per-block updates sum(d - 2 sigma_j) over flipped lanes, checking the
// signed running weight after each step.
module tb_syn_weight;
  localparam int unsigned L = bike_pkg::L_DEF, D = bike_pkg::D_DEF, CW = $clog2(D + 1), WW = 16;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, seg_en = 1'b0, upd_en = 1'b0;
  logic [L-1:0] seg = '0, flip = '0;
  logic [L-1:0][CW-1:0] cnt = '0;
  logic signed [WW-1:0] weight;
  int checks = 0, failures = 0, ref_w = 0;
  syn_weight dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input string what);
    #1; checks++;
    if (int'(weight) != ref_w) begin failures++; $display("FAIL: %s %0d ref %0d", what, weight, ref_w); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    seg_en <= 1'b1; seg <= '1; @(posedge clk); seg_en <= 1'b0;  // something to clear
    clear <= 1'b1; @(posedge clk); clear <= 1'b0; ref_w = 0;
    chk("clear");
    for (int i = 0; i < bike_pkg::R_DEF / L; i++) begin
      logic [L-1:0] v;
      v = L'($urandom) & L'($urandom);
      seg_en <= 1'b1; seg <= v;
      for (int b = 0; b < L; b++) ref_w += v[b];
      @(posedge clk);
      seg_en <= 1'b0;
      chk("segment");
    end
    for (int i = 0; i < 300; i++) begin
      logic [L-1:0] f;
      f = L'($urandom) & L'($urandom) & L'($urandom);
      for (int l = 0; l < L; l++) begin
        int s;
        s = int'($urandom_range(D, 0));
        cnt[l] <= CW'(s);
        if (f[l]) ref_w += D - 2 * s;
      end
      flip <= f; upd_en <= 1'b1;
      @(posedge clk);
      upd_en <= 1'b0;
      chk("update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
