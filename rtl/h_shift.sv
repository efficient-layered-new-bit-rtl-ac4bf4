// h_shift: the "H matrix shifting" unit.
//
// A column block of L columns of a circulant is handled one diagonal at a
// time: a nonzero at row p of the block's first column continues as a
// diagonal through rows p, p+1, ..., p+L-1 of the L columns. The diagonals of
// the next column block start L rows further down, so each stored row index
// is advanced by L modulo r after its last use in a block (as the paper
// describes). Purely combinational: one adder and one conditional subtract.
// Requires idx_in < R and L < R.
module h_shift #(
  parameter int unsigned R  = bike_pkg::R_DEF,
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned IW = $clog2(R)
) (
  input  logic [IW-1:0] idx_in,
  output logic [IW-1:0] idx_out
);
  logic [IW:0] sum;
  always_comb begin
    sum = {1'b0, idx_in} + (IW+1)'(L);
    if (sum >= (IW+1)'(R)) sum = sum - (IW+1)'(R);
    idx_out = sum[IW-1:0];
  end
endmodule
