// tb_layer_ctrl: runs the controller at r = 64, L = 8, d = 5, I_max = 7 and
// checks the whole operation stream against the schedule written out here:
// weight pass over the r/L block rows, then per iteration one threshold
// cycle and, for each of the 2r/L blocks, d counting then d update ops with
// diagonals 0..d-1 and first/last marks, then the final weight pass and
// done. Also checks iter, sw_clear, thr_latch, fin and the total cycles.
module tb_layer_ctrl;
  import bike_pkg::*;
  localparam int unsigned R = 64, L = 8, D = 5, IMAX = 7, DRAIN = 6;
  localparam int unsigned BW = $clog2(2 * R / L), DGW = $clog2(D), ITW = 4;
  localparam int unsigned NBR = R / L, NBLK = 2 * R / L;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  op_e op;
  logic [BW-1:0] op_blk;
  logic [DGW-1:0] op_diag;
  logic op_first, op_last, sw_clear, thr_latch, busy, done, fin;
  logic [ITW-1:0] iter;
  int checks = 0, failures = 0;
  layer_ctrl #(.R(R), .L(L), .D(D), .IMAX(IMAX), .DRAIN(DRAIN)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic expect_op(input op_e o, input int b, input int dg, input string what);
    #1;
    checks++;
    if (op != o || (o != OP_NONE && int'(op_blk) != b) ||
        ((o == OP_COUNT || o == OP_UPDATE) && (int'(op_diag) != dg || op_first != (dg == 0) || op_last != (dg == D - 1)))) begin
      failures++;
      if (failures < 10) $display("FAIL: %s got %s blk %0d diag %0d, exp %s %0d %0d", what, op.name(), op_blk, op_diag, o.name(), b, dg);
    end
    @(posedge clk);
  endtask
  initial begin
    int total;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1; #1;
    checks++; if (!sw_clear) begin failures++; $display("FAIL: no clear at start"); end
    @(posedge clk); start <= 1'b0;
    total = 1;
    for (int q = 0; q < NBR; q++) expect_op(OP_WEIGHT, q, 0, "initial weight");
    for (int k = 0; k < 4; k++) expect_op(OP_NONE, 0, 0, "drain");
    for (int it = 1; it <= IMAX; it++) begin
      #1; checks++;
      if (!thr_latch || int'(iter) != it) begin failures++; $display("FAIL: threshold cycle of iteration %0d", it); end
      @(posedge clk);
      for (int b = 0; b < NBLK; b++) begin
        for (int dg = 0; dg < D; dg++) expect_op(OP_COUNT, b, dg, "count");
        for (int dg = 0; dg < D; dg++) expect_op(OP_UPDATE, b, dg, "update");
      end
      for (int k = 0; k < DRAIN; k++) begin
        #1;
        if (k == DRAIN - 1 && it == IMAX) begin
          checks++; if (!sw_clear) begin failures++; $display("FAIL: no clear before final pass"); end
        end
        expect_op(OP_NONE, 0, 0, "drain");
      end
    end
    for (int q = 0; q < NBR; q++) expect_op(OP_WEIGHT, q, 0, "final weight");
    for (int k = 0; k < 4; k++) expect_op(OP_NONE, 0, 0, "drain");
    #1; checks++;
    if (!done || !fin) begin failures++; $display("FAIL: done %0d fin %0d", done, fin); end
    @(posedge clk); #1;
    checks++;
    if (busy || done) begin failures++; $display("FAIL: not idle after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
