// tb_diag_shifter: random 2L-bit windows at every offset; the output must be
// bits offset .. offset+L-1 of the window, extracted bit by bit here.
module tb_diag_shifter;
  localparam int unsigned L = bike_pkg::L_DEF, OW = $clog2(L);
  logic [2*L-1:0] window;
  logic [OW-1:0] offset;
  logic [L-1:0] diag, exp_d;
  int checks = 0, failures = 0;
  diag_shifter dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 40; i++)
      for (int o = 0; o < L; o++) begin
        window = {$urandom, $urandom};
        offset = OW'(o); #1;
        for (int b = 0; b < L; b++) exp_d[b] = window[o + b];
        checks++;
        if (diag !== exp_d) begin failures++; $display("FAIL: off %0d %h %h", o, diag, exp_d); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
