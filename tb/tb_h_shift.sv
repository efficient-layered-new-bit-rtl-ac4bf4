// tb_h_shift: checks (idx + L) mod r of the H-matrix shifting unit at the
// default r = 12992, L = 32, on random indices and on every index of the
// last L rows (where the modulo wraps).
module tb_h_shift;
  localparam int unsigned R = bike_pkg::R_DEF, L = bike_pkg::L_DEF, IW = $clog2(R);
  logic [IW-1:0] idx_in, idx_out;
  int checks = 0, failures = 0;
  h_shift dut (.*);
  task automatic t1(input int v);
    idx_in = IW'(v); #1;
    checks++;
    if (int'(idx_out) != (v + L) % R) begin
      failures++; $display("FAIL: idx %0d -> %0d", v, idx_out);
    end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) t1(int'($urandom_range(R - 1, 0)));
    for (int v = R - L - 2; v < R; v++) t1(v);
    t1(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
