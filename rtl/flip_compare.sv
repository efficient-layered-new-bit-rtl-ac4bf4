// flip_compare: the L comparators ("Comp.") and the D register behind them.
//
// When `en` is high the counts of a finished counting pass are compared with
// the threshold T and flip[l] = (sigma_l >= T) is registered; it is held for
// the block's update pass. Compare rule as in the decoding algorithm
// (sigma_j >= T). L comparators and the register behind them follow the
// paper's block diagram; the one-bit-wider threshold input (T may exceed d)
// is this design's.
module flip_compare #(
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned CW = $clog2(bike_pkg::D_DEF + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [L-1:0][CW-1:0] cnt,
  input  logic [CW:0]          thr,   // one bit wider: T may exceed d
  output logic [L-1:0]         flip
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flip <= '0;
    else if (en)
      for (int l = 0; l < L; l++) flip[l] <= ({1'b0, cnt[l]} >= thr);
  end
endmodule
