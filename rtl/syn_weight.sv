// syn_weight: syndrome weight |s| ("Syn. weight computation").
//
// An adder-register feedback loop. In a weight pass (seg_en) it adds the
// number of ones of one L-bit syndrome segment per cycle; the segment is
// split into GROUP-bit groups whose ones are counted by combinational logic
// and then summed. During decoding (upd_en, once per column block) it adds
// d - 2*sigma_j for every flipped column j of the block, the weight change of
// flipping a bit with sigma_j unsatisfied checks. That update is exact unless
// two flipped columns of one block share a row; the decoder therefore
// recounts |s| from RAM S for its final success test. `clear` zeroes the
// sum. The weight is a signed WW-bit register. Loop, grouping and update
// rule follow the paper; group size, width and the recount are this
// design's choices.
module syn_weight #(
  parameter int unsigned L     = bike_pkg::L_DEF,
  parameter int unsigned D     = bike_pkg::D_DEF,
  parameter int unsigned CW    = $clog2(bike_pkg::D_DEF + 1),
  parameter int unsigned GROUP = 4,
  parameter int unsigned WW    = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 seg_en,
  input  logic [L-1:0]         seg,
  input  logic                 upd_en,
  input  logic [L-1:0]         flip,
  input  logic [L-1:0][CW-1:0] cnt,
  output logic signed [WW-1:0] weight
);
  localparam int unsigned NG = (L + GROUP - 1) / GROUP;
  logic signed [WW-1:0] seg_ones;
  logic signed [WW-1:0] delta;
  logic [$clog2(GROUP+1)-1:0] gcnt [NG];

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      gcnt[g] = '0;
      for (int b = 0; b < GROUP; b++)
        if (g * GROUP + b < L) gcnt[g] = gcnt[g] + seg[g*GROUP+b];
    end
    seg_ones = '0;
    for (int g = 0; g < NG; g++) seg_ones = seg_ones + WW'(gcnt[g]);
    delta = '0;
    for (int l = 0; l < L; l++)
      if (flip[l]) delta = delta + WW'(D) - (WW'(cnt[l]) << 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      weight <= '0;
    else if (clear)  weight <= '0;
    else if (seg_en) weight <= weight + seg_ones;
    else if (upd_en) weight <= weight + delta;
  end
endmodule
