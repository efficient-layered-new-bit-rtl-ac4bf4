// ram_i: RAM I, the store of the nonzero row indices of H.
//
// Word k holds {H1 index, H0 index} of the k-th nonzero of the column block
// being processed (IW bits each, DEPTH = d words). The host loads the row
// indices of the nonzeros of column 0 of H0 and H1 before decoding; during
// decoding the "H matrix shifting" unit writes each index back advanced by L
// after its last use in a block. The Din multiplexer of the block diagram
// selects the host when host_we is high, else the write-back.
// One synchronous read port (data valid the cycle after rd_en, read-first)
// and one write port.
module ram_i #(
  parameter int unsigned DEPTH = bike_pkg::D_DEF,
  parameter int unsigned IW    = $clog2(bike_pkg::R_DEF),
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [2*IW-1:0] rd_data,
  input  logic            upd_we,
  input  logic [AW-1:0]   upd_addr,
  input  logic [2*IW-1:0] upd_data,
  input  logic            host_we,
  input  logic [AW-1:0]   host_addr,
  input  logic [2*IW-1:0] host_data
);
  logic [2*IW-1:0] mem [DEPTH];
  logic            we;
  logic [AW-1:0]   wa;
  logic [2*IW-1:0] wd;

  always_comb begin
    we = host_we | upd_we;
    wa = host_we ? host_addr : upd_addr;
    wd = host_we ? host_data : upd_data;
  end

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
