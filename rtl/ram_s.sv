// ram_s: RAM S, the syndrome memory, split into banks S0 and S1.
//
// The syndrome is stored in block rows of L bits: block row q sits in bank
// S0 at address q/2 if q is even, in bank S1 at address (q-1)/2 if q is odd.
// Each bank has one read and one write port. The decoder updates syndromes
// in place with a read-modify-write that writes two cycles after the read
// was issued, while the next diagonals may read the same word. Each bank
// therefore forwards into its read data the write being done in the current
// cycle and the one done in the previous cycle when their address matches
// (newest first); the forwarding is this design's own addition.
// Timing: rd_addr in cycle c, rd_data in cycle c+1 (includes every write of
// cycles <= c+1). A host port loads the syndrome by block row; it takes the
// write port of its bank.
module ram_s #(
  parameter int unsigned R     = bike_pkg::R_DEF,
  parameter int unsigned L     = bike_pkg::L_DEF,
  parameter int unsigned DEPTH = R / (2 * L),
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned QW    = $clog2(R / L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] rd_addr0,
  input  logic [AW-1:0] rd_addr1,
  output logic [L-1:0]  rd_data0,
  output logic [L-1:0]  rd_data1,
  input  logic          wr_en0,
  input  logic [AW-1:0] wr_addr0,
  input  logic [L-1:0]  wr_data0,
  input  logic          wr_en1,
  input  logic [AW-1:0] wr_addr1,
  input  logic [L-1:0]  wr_data1,
  input  logic          host_we,
  input  logic [QW-1:0] host_row,
  input  logic [L-1:0]  host_data
);
  logic [L-1:0]  mem0 [DEPTH];
  logic [L-1:0]  mem1 [DEPTH];
  logic [L-1:0]  raw0, raw1;
  logic [AW-1:0] ra0_q, ra1_q;

  // effective write ports (host has priority on its bank)
  logic          we0, we1;
  logic [AW-1:0] wa0, wa1;
  logic [L-1:0]  wd0, wd1;
  // previous-cycle writes, for forwarding
  logic          pwe0, pwe1;
  logic [AW-1:0] pwa0, pwa1;
  logic [L-1:0]  pwd0, pwd1;

  always_comb begin
    we0 = wr_en0; wa0 = wr_addr0; wd0 = wr_data0;
    we1 = wr_en1; wa1 = wr_addr1; wd1 = wr_data1;
    if (host_we && !host_row[0]) begin
      we0 = 1'b1; wa0 = AW'(host_row >> 1); wd0 = host_data;
    end
    if (host_we && host_row[0]) begin
      we1 = 1'b1; wa1 = AW'(host_row >> 1); wd1 = host_data;
    end
  end

  always_ff @(posedge clk) begin
    if (we0) mem0[wa0] <= wd0;
    if (we1) mem1[wa1] <= wd1;
    raw0  <= mem0[rd_addr0];
    raw1  <= mem1[rd_addr1];
    ra0_q <= rd_addr0;
    ra1_q <= rd_addr1;
    pwa0  <= wa0; pwd0 <= wd0;
    pwa1  <= wa1; pwd1 <= wd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pwe0 <= 1'b0;
      pwe1 <= 1'b0;
    end else begin
      pwe0 <= we0;
      pwe1 <= we1;
    end
  end

  always_comb begin
    if (we0 && wa0 == ra0_q)        rd_data0 = wd0;
    else if (pwe0 && pwa0 == ra0_q) rd_data0 = pwd0;
    else                            rd_data0 = raw0;
    if (we1 && wa1 == ra1_q)        rd_data1 = wd1;
    else if (pwe1 && pwa1 == ra1_q) rd_data1 = pwd1;
    else                            rd_data1 = raw1;
  end
endmodule
