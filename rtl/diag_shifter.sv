// diag_shifter: the "shifter" in front of the column counters.
//
// Input is the 2L-bit window {upper block row, lower block row} read from the
// two RAM S banks; output is the L syndromes window[offset +: L], i.e. the
// rows touched by one diagonal of the current column block (lane l gets row
// start+l). Built as log2(L) rows of 2:1 multiplexers, each row shifting
// right by a power of two, with the window narrowing to L bits at the end.
// Combinational. The shifter and its place in front of the counters follow
// the paper; it counts six multiplexer rows for L = 32, while five suffice
// here because the offset never exceeds L-1.
module diag_shifter #(
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned OW = $clog2(L)
) (
  input  logic [2*L-1:0] window,
  input  logic [OW-1:0]  offset,
  output logic [L-1:0]   diag
);
  logic [2*L-1:0] stage [OW+1];
  always_comb begin
    stage[0] = window;
    for (int k = 0; k < OW; k++)
      stage[k+1] = offset[k] ? (stage[k] >> (1 << k)) : stage[k];
    diag = stage[OW][L-1:0];
  end
endmodule
