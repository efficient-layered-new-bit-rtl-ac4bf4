// tb_ram_i: loads all d words through the host port, reads them back
// (one-cycle read latency), rewrites random words through the write-back
// port and checks them, and checks that the host port wins when both write
// in the same cycle.
module tb_ram_i;
  localparam int unsigned DEPTH = bike_pkg::D_DEF, IW = $clog2(bike_pkg::R_DEF), AW = $clog2(DEPTH);
  logic clk = 1'b0;
  logic rd_en = 1'b0, upd_we = 1'b0, host_we = 1'b0;
  logic [AW-1:0] rd_addr = '0, upd_addr = '0, host_addr = '0;
  logic [2*IW-1:0] rd_data, upd_data = '0, host_data = '0;
  logic [2*IW-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  ram_i dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic rd(input int a);
    rd_en <= 1'b1; rd_addr <= AW'(a);
    @(posedge clk); rd_en <= 1'b0; #1;
    checks++;
    if (rd_data !== model[a]) begin failures++; $display("FAIL: addr %0d %h exp %h", a, rd_data, model[a]); end
  endtask
  initial begin
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = (2*IW)'({$urandom, $urandom});
      host_we <= 1'b1; host_addr <= AW'(a); host_data <= model[a];
      @(posedge clk);
    end
    host_we <= 1'b0;
    for (int a = 0; a < DEPTH; a++) rd(a);
    for (int i = 0; i < 200; i++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1, 0));
      model[a] = (2*IW)'({$urandom, $urandom});
      upd_we <= 1'b1; upd_addr <= AW'(a); upd_data <= model[a];
      @(posedge clk); upd_we <= 1'b0;
      rd(a);
    end
    // simultaneous writes to one address: host wins
    host_we <= 1'b1; upd_we <= 1'b1; host_addr <= '0; upd_addr <= '0;
    host_data <= (2*IW)'(32'h1234567); upd_data <= (2*IW)'(32'h7654321);
    model[0] = (2*IW)'(32'h1234567);
    @(posedge clk); host_we <= 1'b0; upd_we <= 1'b0;
    rd(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
