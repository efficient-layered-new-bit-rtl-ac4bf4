// tb_bike_full: one full-size decode on the decoder at its default
// parameters (r = 12992, L = 32, w = 142, I_max = 7, 7-bit a and b,
// delta = 3), i.e. the 128-bit-security example configuration.
//
// A random key and a random error of weight t = 134 are drawn, s = H e is
// loaded, the decoder runs once and e, the success flag, the threshold of
// every iteration and the cycle count are compared with the software
// reference in bf_model_pkg; a second error is then decoded with the same
// key still in RAM I. The H0 index list is loaded in ascending order, the H1 list in random order. One iteration streams (2r/L)*2d = 812*142 = 115304
// cycles. Forwarding in RAM S and diagonals wrapping past the last block
// row must occur.
module tb_bike_full;
  import bf_model_pkg::*;

  localparam int unsigned R      = bike_pkg::R_DEF;
  localparam int unsigned L      = bike_pkg::L_DEF;
  localparam int unsigned W      = bike_pkg::W_DEF;
  localparam int unsigned D      = W / 2;
  localparam int unsigned IMAX   = bike_pkg::IMAX_DEF;
  localparam int unsigned DELTA  = bike_pkg::DELTA_DEF;
  localparam int unsigned A_MANT = bike_pkg::A_MANT_DEF;
  localparam int unsigned A_FRAC = bike_pkg::A_FRAC_DEF;
  localparam int unsigned B_FIX  = bike_pkg::B_FIX_DEF;
  localparam int unsigned B_FRAC = bike_pkg::B_FRAC_DEF;
  localparam int unsigned NRUN   = 2;
  localparam int unsigned IW     = $clog2(R);
  localparam int unsigned DGW    = $clog2(D);
  localparam int unsigned QW     = $clog2(R / L);
  localparam int unsigned EAW    = $clog2(2 * R / L);
  localparam int unsigned WW     = $clog2(R + 1) + 2;
  localparam int unsigned NBR    = R / L;
  localparam int unsigned NBLK   = 2 * R / L;
  localparam longint      EXP_CYC = 2 * (NBR + 4) + IMAX * (NBLK * 2 * D + 7) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, success;
  logic [WW-1:0] syn_weight_o;
  logic idx_we = 1'b0; logic [DGW-1:0] idx_addr = '0; logic [2*IW-1:0] idx_data = '0;
  logic syn_we = 1'b0; logic [QW-1:0] syn_row = '0; logic [L-1:0] syn_data = '0;
  logic e_rd = 1'b0;   logic [EAW-1:0] e_addr = '0; logic [L-1:0] e_data;

  bike_layered_bf_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (1000000 * NRUN) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, from the datapath
  int fwd_now = 0, fwd_prev = 0, wraps = 0, thr_seen = 0;
  int thr_hw [IMAX];
  always @(posedge clk) begin
    if (dut.p2.op == bike_pkg::OP_COUNT || dut.p2.op == bike_pkg::OP_UPDATE) begin
      // per bank: which forwarding path supplied the read data
      if (dut.u_ram_s.we0 && dut.u_ram_s.wa0 == dut.u_ram_s.ra0_q) fwd_now++;
      else if (dut.u_ram_s.pwe0 && dut.u_ram_s.pwa0 == dut.u_ram_s.ra0_q) fwd_prev++;
      if (dut.u_ram_s.we1 && dut.u_ram_s.wa1 == dut.u_ram_s.ra1_q) fwd_now++;
      else if (dut.u_ram_s.pwe1 && dut.u_ram_s.pwa1 == dut.u_ram_s.ra1_q) fwd_prev++;
    end
    if ((dut.p1.op == bike_pkg::OP_COUNT) && dut.idx[IW-1:$clog2(L)] == (IW-$clog2(L))'(NBR - 1)) wraps++;
    if (dut.thr_latch) thr_seen <= 1;
    else if (thr_seen == 1) begin
      thr_hw[dut.iter - 1] = int'(dut.thr);
      thr_seen <= 0;
    end
  end

  int h0[], h1[];
  int n_succ = 0, n_fail = 0, multi_total = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    gen_support(R, D, h0, 1'b1);
    gen_support(R, D, h1);
    force_neighbour(h1, 0, 2, R);   // operations two apart share words
    for (int k = 0; k < D; k++) begin
      idx_we   <= 1'b1;
      idx_addr <= DGW'(k);
      idx_data <= {IW'(h1[k]), IW'(h0[k])};
      @(posedge clk);
    end
    idx_we <= 1'b0;

    for (int run = 0; run < NRUN; run++) begin
      bit e_true[], s[], e_ref[], succ_ref;
      int thr_ref[], flips, multi, t_err, sup[];
      longint c0, c1;
      t_err = 134;
      e_true = new[2 * R];
      gen_support(2 * R, t_err, sup);
      foreach (sup[k]) e_true[sup[k]] = 1'b1;
      syndrome(R, h0, h1, e_true, s);
      decode(R, L, IMAX, A_MANT, A_FRAC, B_FIX, B_FRAC, DELTA, h0, h1, s,
             e_ref, succ_ref, thr_ref, flips, multi);
      multi_total += multi;
      for (int q = 0; q < NBR; q++) begin
        logic [L-1:0] v;
        for (int b = 0; b < L; b++) v[b] = s[q * L + b];
        syn_we <= 1'b1; syn_row <= QW'(q); syn_data <= v;
        @(posedge clk);
      end
      syn_we <= 1'b0;
      start  <= 1'b1;
      @(posedge clk);
      c0 = cyc;
      start <= 1'b0;
      while (!done) @(posedge clk);
      c1 = cyc;
      @(posedge clk);
      check(success == succ_ref, $sformatf("run %0d success %0d ref %0d", run, success, succ_ref));
      check(c1 - c0 == EXP_CYC, $sformatf("run %0d cycles %0d expected %0d", run, c1 - c0, EXP_CYC));
      for (int i = 0; i < IMAX; i++)
        check(thr_hw[i] == thr_ref[i], $sformatf("run %0d iter %0d thr %0d ref %0d", run, i + 1, thr_hw[i], thr_ref[i]));
      for (int k = 0; k < NBLK; k++) begin
        logic [L-1:0] v, vt;
        e_rd <= 1'b1; e_addr <= EAW'(k);
        @(posedge clk);
        e_rd <= 1'b0;
        #1;
        for (int b = 0; b < L; b++) begin v[b] = e_ref[k * L + b]; vt[b] = e_true[k * L + b]; end
        check(e_data == v, $sformatf("run %0d e block %0d %h ref %h", run, k, e_data, v));
        if (succ_ref) check(e_data == vt, $sformatf("run %0d e block %0d differs from injected", run, k));
      end
      if (succ_ref) n_succ++; else n_fail++;
      $display("run %0d: t=%0d success=%0d flips=%0d cycles=%0d thr=%p", run, t_err, success, flips, c1 - c0, thr_ref);
    end

    $display("mechanisms: fwd_now=%0d fwd_prev=%0d wraps=%0d multi_flip_blocks=%0d successes=%0d failures_decoded=%0d",
             fwd_now, fwd_prev, wraps, multi_total, n_succ, n_fail);
    check(fwd_now > 0,     "forwarding of the current write never happened");
    check(fwd_prev > 0,    "forwarding of the previous write never happened");
    check(wraps > 0,       "no diagonal wrapped past the last block row");
    check(n_succ > 0,      "no successful decode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
