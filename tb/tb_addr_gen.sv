// tb_addr_gen: for random rows and for the rows of the last two block rows
// (bank wrap), checks that addr0/addr1/offset select the S0 and S1 words
// that hold block rows q = row/L and q+1 mod r/L, with the S0 word being the
// even one of the two.
module tb_addr_gen;
  localparam int unsigned R = bike_pkg::R_DEF, L = bike_pkg::L_DEF;
  localparam int unsigned IW = $clog2(R), AW = $clog2(R / (2 * L)), OW = $clog2(L);
  localparam int unsigned NBR = R / L;
  logic [IW-1:0] row;
  logic [AW-1:0] addr0, addr1;
  logic [OW-1:0] offset;
  logic odd;
  int checks = 0, failures = 0;
  addr_gen dut (.*);
  task automatic t1(input int v);
    int q, qn, e0, e1;
    row = IW'(v); #1;
    q  = v / L;
    qn = (q + 1) % NBR;
    e0 = (q % 2 == 0) ? q / 2 : qn / 2;
    e1 = (q % 2 == 1) ? q / 2 : qn / 2;
    checks++;
    if (int'(addr0) != e0 || int'(addr1) != e1 || int'(offset) != v % L || odd != q[0]) begin
      failures++;
      $display("FAIL: row %0d -> %0d %0d %0d %0d, expected %0d %0d %0d", v, addr0, addr1, offset, odd, e0, e1, v % L);
    end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) t1(int'($urandom_range(R - 1, 0)));
    for (int v = R - 2 * L; v < R; v++) t1(v);
    for (int v = 0; v < 2 * L; v++) t1(v);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
