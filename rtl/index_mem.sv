// index_mem: tile index memory of one bank group's compression decoder.
//
// For every compressed tile it holds the address of the tile's first
// non-zero sparse word (init_addr) and the address one past its last one
// (end_addr), both counted in sparse words inside the bank group. The
// decoder raises tile_rd_en with a tile number and gets both addresses one
// cycle later (synchronous read). The paper places this memory beside the
// crossbar routing tracks; here it is a plain array with one write port
// (filled through the bank group's request port) and one read port.
// Depth and address width are this design's choice.
module index_mem #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned AW    = 20,        // sparse-word address width
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // write port
  input  logic          wr_en,
  input  logic [IW-1:0] wr_tile,
  input  logic [AW-1:0] wr_init,
  input  logic [AW-1:0] wr_end,
  // read port (Fig. 4: tile_rd_en -> init_addr, end_addr)
  input  logic          tile_rd_en,
  input  logic [IW-1:0] rd_tile,
  output logic [AW-1:0] init_addr,
  output logic [AW-1:0] end_addr
);

  logic [2*AW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_tile] <= {wr_init, wr_end};
    if (tile_rd_en) {init_addr, end_addr} <= mem[rd_tile];
  end

endmodule
