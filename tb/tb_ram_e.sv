// tb_ram_e: runs the per-block update sequence of the decoder on RAM E
// (upd_rd, next cycle upd_xor with the flips, write one cycle later) for all
// 812 blocks in a "first iteration" (old word taken as 0) and then in two
// more iterations (after a pass that leaves stale data, as a previous
// decode would), back to back as closely as the decoder can issue them,
// and reads e back through the host port, comparing with e kept here.
module tb_ram_e;
  localparam int unsigned L = bike_pkg::L_DEF, DEPTH = 2 * bike_pkg::R_DEF / L, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  logic upd_rd = 1'b0, upd_xor = 1'b0, zero_old = 1'b0, host_rd = 1'b0;
  logic [AW-1:0] upd_addr = '0, host_addr = '0;
  logic [L-1:0] flip = '0, rd_data;
  logic [L-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  ram_e dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int it = 0; it <= 3; it++) begin   // iteration 0 leaves stale data (a previous decode)
      for (int b = 0; b < DEPTH; b++) begin
        logic [L-1:0] f;
        f = L'($urandom) & L'($urandom);
        upd_rd <= 1'b1; upd_addr <= AW'(b);
        @(posedge clk);
        upd_rd <= 1'b0; upd_xor <= 1'b1; flip <= f; zero_old <= (it == 1);
        f = (it == 0) ? L'($urandom) : f;
        flip <= f;
        model[b] = (it <= 1 ? '0 : model[b]) ^ f;
        @(posedge clk);
        upd_xor <= 1'b0; flip <= '1;
      end
      repeat (2) @(posedge clk);
    end
    for (int b = 0; b < DEPTH; b++) begin
      host_rd <= 1'b1; host_addr <= AW'(b);
      @(posedge clk); host_rd <= 1'b0; #1;
      checks++;
      if (rd_data !== model[b]) begin failures++; $display("FAIL: block %0d %h exp %h", b, rd_data, model[b]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
