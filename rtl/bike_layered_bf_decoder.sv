// bike_layered_bf_decoder: L-parallel column-layered decoder for the new
// BIKE bit-flipping algorithm on a QC-MDPC code H = [H0 | H1] (r x 2r, d
// ones per column of each circulant).
//
// Column-layered schedule: the 2r columns are processed in 2r/L blocks of L
// columns. For a block, d counting cycles read one diagonal of L syndromes
// per cycle (one per nonzero of the block's first column) and accumulate
// sigma in L counters; the counts are compared with the iteration's
// threshold; d update cycles then visit the same diagonals again, XOR the
// flip bits into the syndromes and write them back in place, so the next
// block already counts with the updated syndrome. Hence only one copy of s is
// stored. A block takes 2d cycles, an iteration (2r/L)*2d cycles plus a few
// cycles of drain and threshold computation.
//
// Datapath pipeline (one operation per cycle from layer_ctrl):
//   P0  RAM I read of the diagonal's index pair
//   P1  pick the H0 or H1 index, Addr. gen -> RAM S0/S1 reads; in the update
//       pass write the index + L (mod r) back to RAM I
//   P2  2L-bit window from S0/S1 -> shifter -> counters (count pass), or
//       into the D register (update pass); weight ops feed the popcount
//   P3  update pass: diagonal xor flip bits -> rev shifter -> write S0/S1
// At P3 of a block's last counting op the comparators capture flip = sigma>=T
// and RAM E reads the block's word; at P3 of its first update op the flips
// go into RAM E (written one cycle later) and |s| += sum(d - 2 sigma).
//
// Host interface (used while busy is low): idx_* loads RAM I word k with
// {H1 row index, H0 row index} of the k-th nonzero of column 0 of H1 / H0;
// syn_* loads block row q (bits qL..qL+L-1) of s; e_rd/e_addr read block k of
// e on e_data the next cycle. `start` runs IMAX iterations followed by a
// recount of |s|; `done` pulses and `success` is 1 if s ended at zero. RAM I
// is restored to its loaded contents at the end of every iteration, so a new
// syndrome may be decoded with the same key. The structure follows the
// paper's block diagram; the pipeline split, the forwarding in RAM S, the
// host ports and the final recount are this design's choices.
module bike_layered_bf_decoder
  import bike_pkg::*;
#(
  parameter int unsigned R      = bike_pkg::R_DEF,
  parameter int unsigned L      = bike_pkg::L_DEF,
  parameter int unsigned W      = bike_pkg::W_DEF,
  parameter int unsigned IMAX   = bike_pkg::IMAX_DEF,
  parameter int unsigned DELTA  = bike_pkg::DELTA_DEF,
  parameter int unsigned A_MANT = bike_pkg::A_MANT_DEF,
  parameter int unsigned A_FRAC = bike_pkg::A_FRAC_DEF,
  parameter int unsigned B_FIX  = bike_pkg::B_FIX_DEF,
  parameter int unsigned B_FRAC = bike_pkg::B_FRAC_DEF,
  // derived
  parameter int unsigned D      = W / 2,
  parameter int unsigned IW     = $clog2(R),
  parameter int unsigned DGW    = $clog2(D),
  parameter int unsigned QW     = $clog2(R / L),
  parameter int unsigned EAW    = $clog2(2 * R / L),
  parameter int unsigned WW     = $clog2(R + 1) + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            success,
  output logic [WW-1:0]   syn_weight_o,
  // RAM I load
  input  logic            idx_we,
  input  logic [DGW-1:0]  idx_addr,
  input  logic [2*IW-1:0] idx_data,
  // RAM S load
  input  logic            syn_we,
  input  logic [QW-1:0]   syn_row,
  input  logic [L-1:0]    syn_data,
  // RAM E read
  input  logic            e_rd,
  input  logic [EAW-1:0]  e_addr,
  output logic [L-1:0]    e_data
);
  localparam int unsigned NBLK = 2 * R / L;
  localparam int unsigned SAW  = $clog2(R / (2 * L));
  localparam int unsigned OW   = $clog2(L);
  localparam int unsigned CW   = $clog2(D + 1);
  localparam int unsigned ITW  = 4;

  typedef struct packed {
    op_e            op;
    logic [EAW-1:0] blk;
    logic [DGW-1:0] diag;
    logic           first;
    logic           last;
  } op_t;

  // ---------------- controller ----------------
  op_t            op0, p1, p2, p3;
  logic [ITW-1:0] iter;
  logic           sw_clear, thr_latch, fin, done_c;

  layer_ctrl #(.R(R), .L(L), .D(D), .IMAX(IMAX), .BW(EAW), .DGW(DGW), .ITW(ITW)) u_ctrl (
    .clk, .rst_n, .start,
    .op(op0.op), .op_blk(op0.blk), .op_diag(op0.diag), .op_first(op0.first), .op_last(op0.last),
    .iter, .sw_clear, .thr_latch, .busy, .done(done_c), .fin
  );

  // ---------------- P0: RAM I ----------------
  logic [2*IW-1:0] ri_data, ri_wdata;
  logic            ri_we;
  logic [IW-1:0]   idx, idx_next;
  logic            sub_h1;

  ram_i #(.DEPTH(D), .IW(IW)) u_ram_i (
    .clk,
    .rd_en(op0.op == OP_COUNT || op0.op == OP_UPDATE), .rd_addr(op0.diag), .rd_data(ri_data),
    .upd_we(ri_we), .upd_addr(p1.diag), .upd_data(ri_wdata),
    .host_we(idx_we && !busy), .host_addr(idx_addr), .host_data(idx_data)
  );

  // ---------------- P1: H shift, address generation ----------------
  logic [SAW-1:0] a0, a1, s_ra0, s_ra1;
  logic [OW-1:0]  off;
  logic           odd;

  always_comb begin
    sub_h1   = (p1.blk >= EAW'(NBLK / 2));
    idx      = sub_h1 ? ri_data[2*IW-1:IW] : ri_data[IW-1:0];
    ri_we    = (p1.op == OP_UPDATE);
    ri_wdata = sub_h1 ? {idx_next, ri_data[IW-1:0]} : {ri_data[2*IW-1:IW], idx_next};
  end

  h_shift  #(.R(R), .L(L), .IW(IW)) u_hshift (.idx_in(idx), .idx_out(idx_next));
  addr_gen #(.R(R), .L(L), .IW(IW), .AW(SAW), .OW(OW)) u_agen (
    .row(idx), .addr0(a0), .addr1(a1), .offset(off), .odd
  );

  always_comb begin
    if (p1.op == OP_WEIGHT) begin
      s_ra0 = SAW'(p1.blk >> 1);
      s_ra1 = SAW'(p1.blk >> 1);
    end else begin
      s_ra0 = a0;
      s_ra1 = a1;
    end
  end

  // ---------------- RAM S ----------------
  logic [L-1:0]   s_rd0, s_rd1, s_wd0, s_wd1;
  logic           s_we;
  logic [SAW-1:0] p2_a0, p2_a1, p3_a0, p3_a1;
  logic [OW-1:0]  p2_off, p3_off;
  logic           p2_odd, p3_odd;

  ram_s #(.R(R), .L(L), .AW(SAW), .QW(QW)) u_ram_s (
    .clk, .rst_n,
    .rd_addr0(s_ra0), .rd_addr1(s_ra1), .rd_data0(s_rd0), .rd_data1(s_rd1),
    .wr_en0(s_we), .wr_addr0(p3_a0), .wr_data0(s_wd0),
    .wr_en1(s_we), .wr_addr1(p3_a1), .wr_data1(s_wd1),
    .host_we(syn_we && !busy), .host_row(syn_row), .host_data(syn_data)
  );

  // ---------------- P2: shifter, counters, weight popcount ----------------
  logic [2*L-1:0]        window, p3_window, win_out;
  logic [L-1:0]          diag, p3_diag, new_diag;
  logic [L-1:0][CW-1:0]  cnt;
  logic [L-1:0]          flip;
  logic [CW:0]           thr;
  logic signed [WW-1:0]  weight;

  assign window = p2_odd ? {s_rd0, s_rd1} : {s_rd1, s_rd0};

  diag_shifter #(.L(L)) u_shift (.window, .offset(p2_off), .diag);

  col_counters #(.L(L), .CW(CW)) u_cnt (
    .clk, .rst_n, .en(p2.op == OP_COUNT), .first(p2.first), .bits(diag), .cnt
  );

  // ---------------- P3: flip, rev shifter, write-back ----------------
  assign new_diag = p3_diag ^ flip;
  rev_shifter #(.L(L)) u_rshift (.window(p3_window), .offset(p3_off), .diag(new_diag), .window_out(win_out));

  always_comb begin
    s_we  = (p3.op == OP_UPDATE);
    s_wd0 = p3_odd ? win_out[2*L-1:L] : win_out[L-1:0];
    s_wd1 = p3_odd ? win_out[L-1:0]   : win_out[2*L-1:L];
  end

  // comparators, threshold, weight, RAM E
  logic cmp_en, blk_upd;
  assign cmp_en  = (p3.op == OP_COUNT)  && p3.last;
  assign blk_upd = (p3.op == OP_UPDATE) && p3.first;

  threshold_unit #(
    .A_MANT(A_MANT), .A_FRAC(A_FRAC), .B_FIX(B_FIX), .B_FRAC(B_FRAC),
    .DELTA(DELTA), .M((D + 1) / 2), .WW(WW), .CW(CW + 1), .ITW(ITW)
  ) u_thr (.clk, .rst_n, .latch(thr_latch), .iter, .weight, .thr);

  flip_compare #(.L(L), .CW(CW)) u_cmp (.clk, .rst_n, .en(cmp_en), .cnt, .thr, .flip);

  syn_weight #(.L(L), .D(D), .CW(CW), .WW(WW)) u_sw (
    .clk, .rst_n, .clear(sw_clear),
    .seg_en(p2.op == OP_WEIGHT), .seg(p2.blk[0] ? s_rd1 : s_rd0),
    .upd_en(blk_upd), .flip, .cnt, .weight
  );

  ram_e #(.L(L), .DEPTH(NBLK), .AW(EAW)) u_ram_e (
    .clk, .rst_n,
    .upd_rd(cmp_en), .upd_addr(p3.blk), .upd_xor(blk_upd), .zero_old(iter == ITW'(1)), .flip,
    .host_rd(e_rd && !busy), .host_addr(e_addr), .rd_data(e_data)
  );

  // ---------------- pipeline registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1 <= '0; p2 <= '0; p3 <= '0;
      success <= 1'b0;
    end else begin
      p1 <= op0;
      p2 <= p1;
      p3 <= p2;
      if (done_c) success <= fin && (weight == '0);
    end
  end

  always_ff @(posedge clk) begin
    p2_a0  <= a0;     p2_a1  <= a1;
    p2_off <= off;    p2_odd <= odd;
    p3_a0  <= p2_a0;  p3_a1  <= p2_a1;
    p3_off <= p2_off; p3_odd <= p2_odd;
    p3_window <= window;
    p3_diag   <= diag;
  end

  assign done         = done_c;
  assign syn_weight_o = weight;

  initial assert (W % 2 == 0 && R % (2 * L) == 0 && NBLK % 2 == 0)
    else $error("bike_layered_bf_decoder: unsupported R/L/W");
endmodule
