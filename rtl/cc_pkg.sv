// cc_pkg: types and constants shared by the CC-MEM on-chip memory system.
//
// The compressed (sparse) format follows the paper: a weight matrix is cut
// into tiles of 32 rows by 8 columns; each non-zero value (NZV, 16 bits) is
// stored as a 24-bit sparse word {value[23:8], r[7:3], c[2:0]} where r is
// the row inside the tile and c the column. The data memory delivers eight
// sparse words (8*24 = 192 bits) per access, and the decoder emits eight
// dense 16-bit words (one tile row) per cycle.
//
// The request/response packet formats, opcodes and CSR map below are this
// design's own choice; the paper only says that the burst and decode units
// are programmed through memory-mapped control/status registers.
package cc_pkg;

  // ---- sparse tile format (paper, Sec. 3.2 / Fig. 4) ----
  localparam int unsigned NZV_W      = 16;                 // non-zero value width
  localparam int unsigned TILE_ROWS  = 32;                 // tile shape (32, 8)
  localparam int unsigned TILE_COLS  = 8;
  localparam int unsigned ROW_W      = $clog2(TILE_ROWS);  // 5-bit r
  localparam int unsigned COL_W      = $clog2(TILE_COLS);  // 3-bit c
  localparam int unsigned SW_W       = NZV_W + ROW_W + COL_W; // 24-bit sparse word
  localparam int unsigned WPL        = 8;                  // sparse words per line
  localparam int unsigned LINE_W     = WPL * SW_W;         // 192-bit SRAM line
  localparam int unsigned DENSE_W    = TILE_COLS * NZV_W;  // 128-bit decoded row

  // ---- packet formats (assumed) ----
  localparam int unsigned ADDR_W     = 32;   // request address field
  localparam int unsigned PORT_W     = 8;    // port id field (up to 256 ports)

  typedef enum logic [2:0] {
    OP_RD     = 3'd0,   // read one dense line at addr
    OP_WR     = 3'd1,   // write one line at addr
    OP_CSR_WR = 3'd2,   // write CSR addr[3:0] with data[31:0]
    OP_IDX_WR = 3'd3,   // write index-memory entry addr with {init,end}
    OP_BWR    = 3'd4    // burst write data: stored at the burst pointer
  } op_e;

  // CSR numbers (addr[3:0] of an OP_CSR_WR)
  localparam logic [3:0] CSR_ADDR  = 4'd0;  // burst start (line addr, or tile index)
  localparam logic [3:0] CSR_LEN   = 4'd1;  // burst length (lines, or tiles)
  localparam logic [3:0] CSR_START = 4'd2;  // write mode here to start the burst

  typedef enum logic [1:0] {
    BM_DENSE_RD  = 2'd0,  // stream LEN lines from ADDR, raw
    BM_SPARSE_RD = 2'd1,  // decode LEN tiles from index ADDR, 32 rows each
    BM_WRITE     = 2'd2   // accept LEN OP_BWR packets, store from ADDR on
  } burst_mode_e;

  // Request: port -> bank group. addr holds {group, local line address}.
  typedef struct packed {
    op_e                 op;
    logic [ADDR_W-1:0]   addr;
    logic [LINE_W-1:0]   data;
    logic [PORT_W-1:0]   src;
  } req_t;

  // Response: bank group -> port. Dense line reads fill all 192 bits;
  // decoded sparse rows fill data[127:0] (eight 16-bit words, column 0 low).
  typedef struct packed {
    logic [LINE_W-1:0]   data;
    logic [PORT_W-1:0]   dst;
    logic                sparse;  // data holds a decoded tile row
    logic                last;    // last beat of a burst
  } rsp_t;

  // One sparse word split into its fields (Fig. 4: value[23:8], r[7:3], c[2:0]).
  typedef struct packed {
    logic [NZV_W-1:0] value;
    logic [ROW_W-1:0] r;
    logic [COL_W-1:0] c;
  } sword_t;

endpackage
