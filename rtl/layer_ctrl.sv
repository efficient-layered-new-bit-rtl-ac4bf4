// layer_ctrl: sequencing of the column-layered decoder.
//
// After `start` the controller
//   1. issues R/L OP_WEIGHT operations, one block row of RAM S each, so
//      syn_weight sums the initial |s| (cleared by sw_clear first);
//   2. for each of IMAX iterations: one cycle with thr_latch high (threshold
//      from the iteration number and |s|), then for each of the 2R/L column
//      blocks D OP_COUNT operations (diagonals 0..D-1, counting pass)
//      followed by D OP_UPDATE operations (same diagonals, flip and write
//      back), back to back with no bubble, so an iteration streams
//      (2R/L)*2D operations; then DRAIN cycles so the pipeline empties before
//      the next threshold is taken;
//   3. issues a second weight pass (final |s|) and pulses `done`, with `fin`
//      marking that |s| now decides success.
// The running decoder always does IMAX iterations. Operation fields: op_blk
// is the column block (the block row for OP_WEIGHT), op_diag the index into
// RAM I, op_first/op_last mark diagonal 0 and D-1. RAM I and RAM E addresses
// come from these counters. The drain length matches the 4-stage datapath
// plus the RAM E write-back of the top level. The two d-cycle passes per
// block and the counter-generated RAM addresses follow the paper; the
// weight passes, drain and one-cycle threshold step are this design's.
module layer_ctrl
  import bike_pkg::*;
#(
  parameter int unsigned R     = bike_pkg::R_DEF,
  parameter int unsigned L     = bike_pkg::L_DEF,
  parameter int unsigned D     = bike_pkg::D_DEF,
  parameter int unsigned IMAX  = bike_pkg::IMAX_DEF,
  parameter int unsigned DRAIN = 6,
  parameter int unsigned BW    = $clog2(2 * R / L),
  parameter int unsigned DGW   = $clog2(D),
  parameter int unsigned ITW   = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output op_e            op,
  output logic [BW-1:0]  op_blk,
  output logic [DGW-1:0] op_diag,
  output logic           op_first,
  output logic           op_last,
  output logic [ITW-1:0] iter,
  output logic           sw_clear,
  output logic           thr_latch,
  output logic           busy,
  output logic           done,
  output logic           fin
);
  localparam int unsigned NBR  = R / L;      // block rows of s
  localparam int unsigned NBLK = 2 * R / L;  // column blocks of H

  typedef enum logic [2:0] {
    S_IDLE, S_WGT, S_WDRAIN, S_THR, S_RUN, S_DRAIN, S_DONE
  } state_e;

  state_e         state;
  logic [BW-1:0]  blk;
  logic [DGW-1:0] diag;
  logic           upd_pass;
  logic           final_pass;
  logic [3:0]     dcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      blk        <= '0;
      diag       <= '0;
      upd_pass   <= 1'b0;
      final_pass <= 1'b0;
      dcnt       <= '0;
      iter       <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_WGT;
          blk        <= '0;
          final_pass <= 1'b0;
          iter       <= ITW'(1);
        end
        S_WGT: begin
          if (blk == BW'(NBR - 1)) begin
            blk   <= '0;
            dcnt  <= '0;
            state <= S_WDRAIN;
          end else blk <= blk + 1'b1;
        end
        S_WDRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 4'd3) state <= final_pass ? S_DONE : S_THR;
        end
        S_THR: begin
          state    <= S_RUN;
          blk      <= '0;
          diag     <= '0;
          upd_pass <= 1'b0;
        end
        S_RUN: begin
          if (diag == DGW'(D - 1)) begin
            diag     <= '0;
            upd_pass <= ~upd_pass;
            if (upd_pass) begin
              if (blk == BW'(NBLK - 1)) begin
                blk   <= '0;
                dcnt  <= '0;
                state <= S_DRAIN;
              end else blk <= blk + 1'b1;
            end
          end else diag <= diag + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 4'(DRAIN - 1)) begin
            if (iter == ITW'(IMAX)) begin
              final_pass <= 1'b1;
              blk        <= '0;
              state      <= S_WGT;
            end else begin
              iter  <= iter + 1'b1;
              state <= S_THR;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    op        = OP_NONE;
    op_blk    = blk;
    op_diag   = diag;
    op_first  = (diag == '0);
    op_last   = (diag == DGW'(D - 1));
    if (state == S_WGT) op = OP_WEIGHT;
    if (state == S_RUN) op = upd_pass ? OP_UPDATE : OP_COUNT;
    sw_clear  = (state == S_IDLE && start) ||
                (state == S_DRAIN && dcnt == 4'(DRAIN - 1) && iter == ITW'(IMAX));
    thr_latch = (state == S_THR);
    busy      = (state != S_IDLE);
    done      = (state == S_DONE);
    fin       = final_pass;
  end

  initial begin
    assert (D >= 2)      else $error("layer_ctrl: D must be at least 2");
    assert (DRAIN <= 15) else $error("layer_ctrl: DRAIN too large");
  end
endmodule
