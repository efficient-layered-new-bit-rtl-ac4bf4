// threshold_unit: bit-flipping threshold ("Threshold computation").
//
// Implements the THRESHOLD function of the new BIKE BF algorithm with the
// affine function f(x) = a*x + b held in fixed point (a = A_MANT/2^A_FRAC,
// b = B_FIX/2^B_FRAC; defaults are the 7-bit-precision layered-decoder
// coefficients). With T' = f(|s|) of the first iteration and M = (d+1)/2:
//   iteration 1: T' + delta
//   iteration 2: (2T' + M)/3 + delta
//   iteration 3: (T' + 2M)/3 + delta
//   iteration >= 4: M + delta
// and the threshold is max(f(|s|), that value), |s| being the syndrome
// weight at the start of the iteration.
// The real-valued threshold is never rounded away: because sigma is an
// integer, sigma >= T is the same as sigma >= ceil(T), so the unit outputs
// ceil() of the exact fixed-point value (ceil(x/(3*2^F)) is computed as
// ceil(ceil(x/2^F)/3), which is equal). Rounding is this design's choice;
// the algorithm does not specify any.
// Timing: when `latch` is high, `iter` and `weight` are sampled and `thr` is
// valid from the next cycle on; at iteration 1 T' is stored at the same edge.
// The multiply by a and add of b are outside any feedback loop.
module threshold_unit #(
  parameter int unsigned A_MANT = bike_pkg::A_MANT_DEF,
  parameter int unsigned A_FRAC = bike_pkg::A_FRAC_DEF,
  parameter int unsigned B_FIX  = bike_pkg::B_FIX_DEF,
  parameter int unsigned B_FRAC = bike_pkg::B_FRAC_DEF,
  parameter int unsigned DELTA  = bike_pkg::DELTA_DEF,
  parameter int unsigned M      = (bike_pkg::D_DEF + 1) / 2,
  parameter int unsigned WW     = 16,   // signed weight width
  parameter int unsigned CW     = 8,    // threshold width (counter width + 1)
  parameter int unsigned ITW    = 4     // iteration number width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 latch,
  input  logic [ITW-1:0]       iter,    // 1, 2, ...
  input  logic signed [WW-1:0] weight,
  output logic [CW-1:0]        thr
);
  localparam int unsigned F  = A_FRAC;     // common fractional bits
  localparam int unsigned FW = WW + 16;    // fixed-point width (a < 2^8 / 2^F, small)
  localparam int unsigned IV = FW - F + 2; // integer-part width

  logic [FW-1:0] tp_fx;    // latched T' (first iteration)
  logic [FW-1:0] f_fx, tpu_fx;
  logic [IV-1:0] cf, c_it, c_sel, n2, n3;
  logic [WW-1:0] wpos;

  function automatic logic [IV-1:0] ceil_shift(input logic [FW+1:0] x);
    ceil_shift = IV'((x + ((FW+2)'(1) << F) - 1) >> F);
  endfunction

  always_comb begin
    wpos   = weight[WW-1] ? '0 : weight;
    f_fx   = FW'(A_MANT) * FW'(wpos) + (FW'(B_FIX) << (F - B_FRAC));
    tpu_fx = (iter == ITW'(1)) ? f_fx : tp_fx;
    cf     = ceil_shift((FW+2)'(f_fx));
    n2     = ceil_shift(((FW+2)'(tpu_fx) << 1) + ((FW+2)'(M) << F));
    n3     = ceil_shift((FW+2)'(tpu_fx) + ((FW+2)'(2 * M) << F));
    unique case (iter)
      ITW'(1):  c_it = ceil_shift((FW+2)'(tpu_fx)) + IV'(DELTA);
      ITW'(2):  c_it = (n2 + IV'(2)) / IV'(3) + IV'(DELTA);
      ITW'(3):  c_it = (n3 + IV'(2)) / IV'(3) + IV'(DELTA);
      default:  c_it = IV'(M + DELTA);
    endcase
    c_sel = (cf > c_it) ? cf : c_it;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tp_fx <= '0;
      thr   <= '0;
    end else if (latch) begin
      if (iter == ITW'(1)) tp_fx <= f_fx;
      thr <= (c_sel > IV'((1 << CW) - 1)) ? CW'((1 << CW) - 1) : CW'(c_sel);
    end
  end

  initial assert (A_FRAC >= B_FRAC) else $error("threshold_unit: A_FRAC < B_FRAC");
endmodule
