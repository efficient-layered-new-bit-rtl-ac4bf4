// ram_e: RAM E, the error vector e, L bits per address, one address per
// column block (2r/L addresses).
//
// Update of a block: upd_rd reads the block's word (cycle c); in cycle c+1
// upd_xor XORs the flip bits into it (zero_old replaces the old word by 0,
// which is how e = 0 is started in the first iteration without a clearing
// pass, a choice of this design) and the result goes into the D register
// (as in the paper's diagram); it is written back in cycle
// c+2. The host reads e through the same read port (host_rd, data on
// rd_data the next cycle) while the decoder is idle.
module ram_e #(
  parameter int unsigned L     = bike_pkg::L_DEF,
  parameter int unsigned DEPTH = 2 * bike_pkg::R_DEF / bike_pkg::L_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          upd_rd,
  input  logic [AW-1:0] upd_addr,
  input  logic          upd_xor,
  input  logic          zero_old,
  input  logic [L-1:0]  flip,
  input  logic          host_rd,
  input  logic [AW-1:0] host_addr,
  output logic [L-1:0]  rd_data
);
  logic [L-1:0]  mem [DEPTH];
  logic [AW-1:0] ra_q, wa_q;
  logic [L-1:0]  wd_q;
  logic          we_q;

  always_ff @(posedge clk) begin
    if (we_q) mem[wa_q] <= wd_q;
    if (upd_rd)       rd_data <= mem[upd_addr];
    else if (host_rd) rd_data <= mem[host_addr];
    if (upd_rd) ra_q <= upd_addr;
    if (upd_xor) begin
      wa_q <= ra_q;
      wd_q <= (zero_old ? '0 : rd_data) ^ flip;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) we_q <= 1'b0;
    else        we_q <= upd_xor;
  end
endmodule
