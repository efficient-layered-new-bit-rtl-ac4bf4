// bike_pkg: configuration shared by the layered BIKE bit-flipping decoder.
//
// The default numbers are those of the 128-bit-security example decoder:
// an MDPC code with r = 12992, column weight w = 142 (d = 71 ones per column
// of each circulant H0/H1), L = 32 columns processed in parallel, I_max = 7
// iterations and delta = 3. The threshold coefficients a and b are the
// layered-decoder optimum (a = 0.00618658, b = 10.8504) truncated to seven
// fractional bits of precision: a keeps its 7 most significant nonzero
// fractional bits, b its 7 most significant fractional bits:
//   a = 0.00000001100101b = 101 / 2^14 = 0.00616455078125
//   b = 1010.1101100b     = 1388 / 2^7 = 10.84375
// Everything else in this file (widths, the op encoding) is this design's
// own choice.
package bike_pkg;

  localparam int unsigned R_DEF     = 12992;  // circulant size r
  localparam int unsigned L_DEF     = 32;     // parallelism
  localparam int unsigned W_DEF     = 142;    // column weight w of H
  localparam int unsigned D_DEF     = W_DEF / 2;  // d, weight of one circulant column
  localparam int unsigned IMAX_DEF  = 7;
  localparam int unsigned DELTA_DEF = 3;

  // f(x) = a*x + b in fixed point
  localparam int unsigned A_MANT_DEF = 101;   // a = A_MANT / 2^A_FRAC
  localparam int unsigned A_FRAC_DEF = 14;
  localparam int unsigned B_FIX_DEF  = 1388;  // b = B_FIX / 2^B_FRAC
  localparam int unsigned B_FRAC_DEF = 7;

  // Kind of work the controller puts into the datapath pipeline.
  typedef enum logic [1:0] {
    OP_NONE   = 2'd0,
    OP_COUNT  = 2'd1,  // first pass over a column block: accumulate sigma
    OP_UPDATE = 2'd2,  // second pass: flip e, xor the flipped columns into s
    OP_WEIGHT = 2'd3   // read one block row of s for the |s| popcount
  } op_e;

endpackage
