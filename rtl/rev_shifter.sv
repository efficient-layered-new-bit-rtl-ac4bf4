// rev_shifter: the "rev shifter" in front of the RAM S write ports.
//
// Inverse of diag_shifter: the L updated syndromes of a diagonal are shifted
// left by `offset` and merged into the 2L-bit window of the two block rows
// they came from; bits outside [offset, offset+L) keep their old values.
// log2(L) rows of 2:1 multiplexers for the data and the same for the mask.
// Combinational. The reverse shifter follows the paper; merging with the
// old words (rather than bit-enabled RAM writes) is this design's choice.
module rev_shifter #(
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned OW = $clog2(L)
) (
  input  logic [2*L-1:0] window,
  input  logic [OW-1:0]  offset,
  input  logic [L-1:0]   diag,
  output logic [2*L-1:0] window_out
);
  logic [2*L-1:0] dat [OW+1];
  logic [2*L-1:0] msk [OW+1];
  always_comb begin
    dat[0] = {{L{1'b0}}, diag};
    msk[0] = {{L{1'b0}}, {L{1'b1}}};
    for (int k = 0; k < OW; k++) begin
      dat[k+1] = offset[k] ? (dat[k] << (1 << k)) : dat[k];
      msk[k+1] = offset[k] ? (msk[k] << (1 << k)) : msk[k];
    end
    window_out = (window & ~msk[OW]) | dat[OW];
  end
endmodule
