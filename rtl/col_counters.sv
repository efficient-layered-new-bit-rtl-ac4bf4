// col_counters: the L column counters count_0 .. count_{L-1}.
//
// Lane l is an adder-register loop that adds the syndrome bit of lane l of
// the current diagonal each cycle of a block's counting pass. After the d
// diagonals of the block it holds sigma for column (block*L + l): the number
// of unsatisfied checks that column takes part in. `first` loads the bit
// instead of adding it, which restarts the count for a new block without an
// extra clear cycle (this design's choice). The counts are held while `en`
// is low. L counters of adder-register form follow the paper.
module col_counters #(
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned CW = $clog2(bike_pkg::D_DEF + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic [L-1:0]      bits,
  output logic [L-1:0][CW-1:0] cnt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (en)
      for (int l = 0; l < L; l++)
        cnt[l] <= (first ? CW'(0) : cnt[l]) + CW'(bits[l]);
  end
endmodule
