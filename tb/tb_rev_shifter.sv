// tb_rev_shifter: random windows and diagonals at every offset; bits
// offset .. offset+L-1 of the output must be the diagonal, all others the
// old window.
module tb_rev_shifter;
  localparam int unsigned L = bike_pkg::L_DEF, OW = $clog2(L);
  logic [2*L-1:0] window, window_out, exp_w;
  logic [OW-1:0] offset;
  logic [L-1:0] diag;
  int checks = 0, failures = 0;
  rev_shifter dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 40; i++)
      for (int o = 0; o < L; o++) begin
        window = {$urandom, $urandom};
        diag   = L'($urandom);
        offset = OW'(o); #1;
        exp_w = window;
        for (int b = 0; b < L; b++) exp_w[o + b] = diag[b];
        checks++;
        if (window_out !== exp_w) begin failures++; $display("FAIL: off %0d %h %h", o, window_out, exp_w); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
