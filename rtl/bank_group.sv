// bank_group: one bank group of the CC-MEM on-chip memory.
//
// The paper clusters SRAM banks into bank groups, each acting as one
// virtual single-port memory, and gives every group a compression decoder
// with its own index (sparse tile) memory and a small control unit for burst
// transfers. This module joins those parts (Fig. 3(a)): NBANK sram_bank
// instances share one access per cycle, the line address being
// {bank, row}; index_mem and comp_decoder implement load-as-dense reads of
// compressed tiles; burst_ctrl decodes requests and CSR writes and selects
// whether dense lines or decoded rows go back to the crossbar.
//
// Interface: one request port and one response port, valid/ready, carrying
// cc_pkg::req_t / rsp_t with addresses local to the group. Timing: a single
// read answers two cycles after it is accepted; see burst_ctrl and
// comp_decoder for bursts. Row addresses at or above DEPTH do not exist
// (the bank array wraps them). Bank count and depth are this design's
// choice (see sram_bank); the paper gives no split of the capacity.
module bank_group
  import cc_pkg::*;
#(
  parameter int unsigned NBANK     = 8,
  parameter int unsigned DEPTH     = 9216,   // lines per bank
  parameter int unsigned IDX_DEPTH = 8192,   // tiles per group
  localparam int unsigned BW  = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned RW  = $clog2(DEPTH),
  localparam int unsigned LAW = BW + RW,     // line address width
  localparam int unsigned AW  = LAW + 3,     // sparse-word address width
  localparam int unsigned IW  = $clog2(IDX_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req_valid,
  output logic req_ready,
  input  req_t req,
  output logic rsp_valid,
  input  logic rsp_ready,
  output rsp_t rsp,
  output logic dec_stall,      // decoder holding a row back (statistics)
  output logic burst_active
);

  // memory port
  logic              mem_en, mem_we;
  logic [LAW-1:0]    mem_addr;
  logic [LINE_W-1:0] mem_wdata, mem_rdata;

  // banks: only the addressed bank is enabled
  logic [LINE_W-1:0] bank_rdata [NBANK];
  logic [BW-1:0]     rd_bank_q;
  logic [BW-1:0]     sel_bank;
  assign sel_bank = (NBANK > 1) ? mem_addr[LAW-1 -: BW] : '0;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .WIDTH(LINE_W)) u_bank (
      .clk   (clk),
      .en    (mem_en && (sel_bank == BW'(b))),
      .we    (mem_we),
      .addr  (mem_addr[RW-1:0]),
      .wdata (mem_wdata),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk) if (mem_en && !mem_we) rd_bank_q <= sel_bank;
  assign mem_rdata = bank_rdata[rd_bank_q];

  // index memory
  logic              idx_wr_en, tile_rd_en;
  logic [IW-1:0]     idx_wr_tile, rd_tile;
  logic [AW-1:0]     idx_wr_init, idx_wr_end, init_addr, end_addr;

  index_mem #(.DEPTH(IDX_DEPTH), .AW(AW)) u_idx (
    .clk, .wr_en(idx_wr_en), .wr_tile(idx_wr_tile), .wr_init(idx_wr_init),
    .wr_end(idx_wr_end), .tile_rd_en, .rd_tile, .init_addr, .end_addr
  );

  // compression decoder
  logic               dec_start, dec_busy, dec_rd_en, dec_valid, dec_ready, dec_last;
  logic [IW-1:0]      dec_base;
  logic [15:0]        dec_cnt;
  logic [LAW-1:0]     dec_rd_addr;
  logic [NZV_W-1:0]   dec_words [TILE_COLS];
  logic [DENSE_W-1:0] dec_data;
  logic [ROW_W-1:0]   dec_row;

  comp_decoder #(.AW(AW), .IW(IW)) u_dec (
    .clk, .rst_n,
    .start(dec_start), .tile_base(dec_base), .tile_cnt(dec_cnt), .busy(dec_busy),
    .tile_rd_en, .rd_tile, .init_addr, .end_addr,
    .rd_en(dec_rd_en), .rd_addr(dec_rd_addr), .rd_data(mem_rdata),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_data(dec_words),
    .out_row(dec_row), .out_last(dec_last), .stall(dec_stall)
  );

  always_comb
    for (int k = 0; k < TILE_COLS; k++) dec_data[k*NZV_W +: NZV_W] = dec_words[k];

  // control unit
  burst_ctrl #(.LAW(LAW), .IW(IW)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req,
    .rsp_valid, .rsp_ready, .rsp,
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
    .idx_wr_en, .idx_wr_tile, .idx_wr_init, .idx_wr_end,
    .dec_start, .dec_base, .dec_cnt, .dec_busy,
    .dec_rd_en, .dec_rd_addr, .dec_valid, .dec_ready, .dec_data, .dec_last,
    .burst_active
  );

  logic unused_row;
  assign unused_row = ^dec_row;

endmodule
