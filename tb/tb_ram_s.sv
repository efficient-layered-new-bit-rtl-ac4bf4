// tb_ram_s: random traffic on RAM S with reads and writes to both banks
// every cycle over a small address range, so that the data read in cycle
// c+1 for an address given in cycle c must include the writes of cycles c
// and c+1 (forwarding). A cycle-by-cycle model of the banks gives the
// expected data. The syndrome is first loaded and read back through the host
// port by block row (even rows in S0, odd rows in S1).
module tb_ram_s;
  localparam int unsigned R = bike_pkg::R_DEF, L = bike_pkg::L_DEF;
  localparam int unsigned DEPTH = R / (2 * L), AW = $clog2(DEPTH), QW = $clog2(R / L);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [AW-1:0] rd_addr0 = '0, rd_addr1 = '0, wr_addr0 = '0, wr_addr1 = '0;
  logic [L-1:0] rd_data0, rd_data1, wr_data0 = '0, wr_data1 = '0, host_data = '0;
  logic wr_en0 = 1'b0, wr_en1 = 1'b0, host_we = 1'b0;
  logic [QW-1:0] host_row = '0;
  logic [L-1:0] m0 [DEPTH], m1 [DEPTH];
  int checks = 0, failures = 0, hits = 0;
  ram_s dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [AW-1:0] pa0, pa1;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int q = 0; q < R / L; q++) begin
      logic [L-1:0] v;
      v = L'($urandom);
      host_we <= 1'b1; host_row <= QW'(q); host_data <= v;
      if (q % 2 == 0) m0[q/2] = v; else m1[q/2] = v;
      @(posedge clk);
    end
    host_we <= 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr0 <= AW'(a); rd_addr1 <= AW'(DEPTH - 1 - a);
      @(posedge clk); #1;
      checks++;
      if (rd_data0 !== m0[a] || rd_data1 !== m1[DEPTH-1-a]) begin failures++; $display("FAIL: load addr %0d", a); end
    end
    // random read/write traffic on addresses 0..3
    pa0 = rd_addr0; pa1 = rd_addr1;
    for (int i = 0; i < 3000; i++) begin
      logic we0, we1;
      logic [AW-1:0] ra0, ra1, wa0, wa1;
      logic [L-1:0] wd0, wd1;
      ra0 = AW'($urandom_range(3, 0)); ra1 = AW'($urandom_range(3, 0));
      wa0 = AW'($urandom_range(3, 0)); wa1 = AW'($urandom_range(3, 0));
      we0 = $urandom_range(1, 0) == 1; we1 = $urandom_range(1, 0) == 1;
      wd0 = L'($urandom); wd1 = L'($urandom);
      rd_addr0 <= ra0; rd_addr1 <= ra1;
      wr_en0 <= we0; wr_addr0 <= wa0; wr_data0 <= wd0;
      wr_en1 <= we1; wr_addr1 <= wa1; wr_data1 <= wd1;
      #1;
      // data for the address given in the previous cycle, this cycle's write included
      if (we0) m0[wa0] = wd0;
      if (we1) m1[wa1] = wd1;
      if (i > 0) begin
        checks++;
        if (rd_data0 !== m0[pa0] || rd_data1 !== m1[pa1]) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d %h/%h exp %h/%h", i, rd_data0, rd_data1, m0[pa0], m1[pa1]);
        end
        if ((we0 && wa0 == pa0) || (we1 && wa1 == pa1)) hits++;
      end
      pa0 = ra0; pa1 = ra1;
      @(posedge clk);
    end
    checks++;
    if (hits == 0) begin failures++; $display("FAIL: no same-cycle forwarding exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
