// addr_gen: RAM S address generator ("Addr. gen").
//
// RAM S holds the syndrome in block rows of L bits; block row q = row / L
// lives in bank S0 at address q/2 when q is even and in bank S1 at address
// (q-1)/2 when q is odd (even/odd banking as in the paper). The L syndromes of
// a diagonal starting at `row` lie in block rows q and q+1 (mod R/L), which
// are always in different banks, so one read of each bank fetches them:
//   addr0 = S0 address of whichever of q, q+1 is even
//   addr1 = S1 address of whichever of q, q+1 is odd
//   offset = row mod L, odd = q is odd (then the lower word comes from S1).
// R must be a multiple of 2L (r = 12992 = 203 * 64 is), which keeps the wrap
// from the last block row to block row 0 in opposite banks. Combinational.
module addr_gen #(
  parameter int unsigned R  = bike_pkg::R_DEF,
  parameter int unsigned L  = bike_pkg::L_DEF,
  parameter int unsigned IW = $clog2(R),
  parameter int unsigned AW = $clog2(R / (2 * L)),
  parameter int unsigned OW = $clog2(L)
) (
  input  logic [IW-1:0] row,
  output logic [AW-1:0] addr0,
  output logic [AW-1:0] addr1,
  output logic [OW-1:0] offset,
  output logic          odd
);
  localparam int unsigned NBR = R / L;  // number of block rows
  logic [IW-OW-1:0] q, qn;

  always_comb begin
    q      = row[IW-1:OW];
    offset = row[OW-1:0];
    odd    = q[0];
    qn     = (q == (IW-OW)'(NBR - 1)) ? '0 : q + 1'b1;
    if (!odd) begin
      addr0 = AW'(q >> 1);
      addr1 = AW'(q >> 1);
    end else begin
      addr1 = AW'(q >> 1);
      addr0 = AW'(qn >> 1);
    end
  end

  initial begin
    assert (R % (2 * L) == 0) else $error("addr_gen: R must be a multiple of 2L");
    assert ((1 << OW) == L)   else $error("addr_gen: L must be a power of two");
  end
endmodule
