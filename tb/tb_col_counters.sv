// tb_col_counters: feeds blocks of d = 71 random diagonals (first marked,
// with random idle cycles in between) and checks every lane's count against
// a per-lane sum kept here, including that the counts hold while en is low.
module tb_col_counters;
  localparam int unsigned L = bike_pkg::L_DEF, D = bike_pkg::D_DEF, CW = $clog2(D + 1);
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, first = 1'b0;
  logic [L-1:0] bits = '0;
  logic [L-1:0][CW-1:0] cnt;
  int checks = 0, failures = 0;
  int ref_c [L];
  col_counters dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int blk = 0; blk < 8; blk++) begin
      for (int i = 0; i < D; i++) begin
        logic [L-1:0] v;
        v = L'($urandom);
        if (blk == 0) v = '1;   // d ones: the largest count
        en <= 1'b1; first <= (i == 0); bits <= v;
        for (int l = 0; l < L; l++) ref_c[l] = (i == 0 ? 0 : ref_c[l]) + v[l];
        @(posedge clk);
        if ($urandom_range(3, 0) == 0) begin en <= 1'b0; bits <= '1; @(posedge clk); end
      end
      en <= 1'b0;
      repeat (2) @(posedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(cnt[l]) != ref_c[l]) begin failures++; $display("FAIL: blk %0d lane %0d %0d ref %0d", blk, l, cnt[l], ref_c[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
