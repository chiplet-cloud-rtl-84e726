// comp_decoder: compression decoder unit of one CC-MEM bank group
// ("store as compressed, load as dense").
//
// A weight matrix is stored as tiles of 32 rows x 8 columns in a tile-based
// compressed-sparse-row format: the tile's non-zero values are kept in
// row-major order as 24-bit sparse words {value[23:8], r[7:3], c[2:0]}, and
// an index memory gives, per tile, the address of its first sparse word
// (init_addr) and the address one past its last (end_addr). The decoder
// turns tiles back into dense rows: every cycle it emits one tile row, eight
// 16-bit words, with zeros where no sparse word exists.
//
// How it works (structure after Fig. 4 of the paper):
//  * A tile read request goes to the index memory (tile_rd_en). Its answer
//    loads the line pointer rd_addr; rd_addr then counts up by one line of
//    eight sparse words per read until rd_addr*8 >= end_addr.
//  * Lines land in two line buffers, Buf1 and Buf2 (eight words each). A
//    mask generator marks which words of a line lie in [init_addr,end_addr).
//  * The row counter glb_r walks 0..31. Eight output decoders (one per
//    column, see out_decoder) match all sixteen buffered words against
//    (glb_r, column) and insert zeros where nothing matches.
//  * A buffer is refilled once the rows of all its words are behind glb_r
//    (the paper's "glb_r >= r8" read condition, r8 being the row of the
//    buffer's last word). A row is emitted only when the newest buffered
//    word lies in a later row, or the tile has no more lines, so every word
//    of the row is in the buffers. Since a row holds at most eight words,
//    two buffers always suffice and the unit never deadlocks.
//  * The index of the next tile is prefetched once all lines of the current
//    tile have been requested (the paper's "rd_addr >= end_addr" -> tile_rd_en).
//
// Interface: start with tile_base/tile_cnt starts decoding tile_cnt tiles
// from index tile_base; busy stays high until the last row has been taken.
// Rows leave on out_valid/out_ready (held stable while not taken); out_row
// is the row number, out_last marks the final row of the final tile.
// Memories are synchronous with one cycle of read latency.
//
// Timing: up to one row per cycle. A buffer can only be refilled one cycle
// after it is freed, so rows that need a fresh line right away cost a stall
// cycle (a fully dense tile runs at about one row every two cycles; at 60%
// sparsity the unit mostly runs at one row per cycle). Each tile change
// costs two cycles. The line format, word order in a line (word 0 in the low
// bits), stall rule and address units are this design's choices.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' condition of the assertions below, which a linter reports
// as a net used both synchronously and asynchronously. It stands because
// the assertions are checks only and generate no logic.
module comp_decoder
  import cc_pkg::*;
#(
  parameter int unsigned AW = 20,   // sparse-word address width
  parameter int unsigned IW = 13    // tile index width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  start,
  input  logic [IW-1:0]         tile_base,
  input  logic [15:0]           tile_cnt,
  output logic                  busy,
  // index memory
  output logic                  tile_rd_en,
  output logic [IW-1:0]         rd_tile,
  input  logic [AW-1:0]         init_addr,
  input  logic [AW-1:0]         end_addr,
  // data memory (line address = sparse-word address / 8)
  output logic                  rd_en,
  output logic [AW-4:0]         rd_addr,
  input  logic [LINE_W-1:0]     rd_data,
  // dense output (to the crossbar)
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [NZV_W-1:0]      out_data [TILE_COLS],
  output logic [ROW_W-1:0]      out_row,
  output logic                  out_last,
  // statistics for tests: rows held back waiting for a line
  output logic                  stall
);

  localparam int unsigned LAW = AW - 3;  // line address width

  typedef struct packed {
    logic [WPL-1:0]   mask;     // valid words
    logic [ROW_W-1:0] last_r;   // row of the last valid word ("r8")
  } bufinfo_t;

  // ---------------- state ----------------
  logic               active;          // a decode command is running
  logic               have_tile;       // a tile is being decoded
  logic [15:0]        tiles_left;      // tiles still to emit
  logic [15:0]        fetch_left;      // tile indexes still to read
  logic [IW-1:0]      next_tile;
  logic               idx_pending;     // index read in flight
  logic               nxt_valid;       // prefetched index available
  logic [AW-1:0]      nxt_init, nxt_end;
  logic [AW-1:0]      cur_init, cur_end;
  logic [LAW-1:0]     line_ptr;        // rd_addr register
  logic [ROW_W-1:0]   glb_r;
  logic               pending;         // data read in flight
  logic [LAW-1:0]     pend_line;

  logic [LINE_W-1:0]  buf_data [2];    // Buf1, Buf2
  bufinfo_t           buf_info [2];
  logic [1:0]         buf_full;
  logic               old_sel;         // which buffer is older

  // ---------------- mask generator / arriving line ----------------
  logic [WPL-1:0]     in_mask;
  logic [ROW_W-1:0]   in_last_r;
  sword_t             in_words [WPL];

  always_comb begin
    in_last_r = '0;
    for (int i = 0; i < WPL; i++) begin
      in_words[i] = sword_t'(rd_data[i*SW_W +: SW_W]);
      in_mask[i]  = ({pend_line, 3'(i)} >= cur_init) && ({pend_line, 3'(i)} < cur_end);
      if (in_mask[i]) in_last_r = in_words[i].r;
    end
  end

  // ---------------- row emission ----------------
  logic issue_done, all_loaded, covered, fire, tile_end;
  logic newest_sel;
  logic [ROW_W-1:0] g_next;
  logic drop_old;
  logic [1:0] occ, occ_after;

  assign issue_done = ({line_ptr, 3'b000} >= cur_end) || (cur_init == cur_end);
  assign all_loaded = issue_done && !pending;
  assign newest_sel = buf_full[~old_sel] ? ~old_sel : old_sel;
  assign covered    = all_loaded ||
                      (buf_full[newest_sel] && (buf_info[newest_sel].last_r > glb_r));
  assign out_valid  = have_tile && covered;
  assign fire       = out_valid && out_ready;
  assign tile_end   = fire && (glb_r == ROW_W'(TILE_ROWS - 1));
  assign stall      = have_tile && !covered;
  assign g_next     = fire ? glb_r + 1'b1 : glb_r;
  assign drop_old   = buf_full[old_sel] && !tile_end && (buf_info[old_sel].last_r < g_next);

  assign occ        = 2'(buf_full[0]) + 2'(buf_full[1]);
  assign occ_after  = occ - 2'(drop_old) + 2'(pending);

  // data read: keep both buffers filled ("up to 8 sparse words per cycle")
  assign rd_en   = have_tile && !issue_done && !tile_end && (occ_after <= 2'd1);
  assign rd_addr = line_ptr;

  // index prefetch
  assign tile_rd_en = active && (fetch_left != 0) && !nxt_valid && !idx_pending &&
                      (!have_tile || issue_done);
  assign rd_tile    = next_tile;

  // output decoders x8
  sword_t         dwords [2*WPL];
  logic [2*WPL-1:0] dmask;
  always_comb begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < WPL; i++) begin
        dwords[b*WPL+i] = sword_t'(buf_data[b][i*SW_W +: SW_W]);
        dmask[b*WPL+i]  = buf_full[b] && buf_info[b].mask[i];
      end
  end

  for (genvar k = 0; k < TILE_COLS; k++) begin : g_odec
    logic unused_hit;
    out_decoder u_odec (
      .words (dwords),
      .mask  (dmask),
      .glb_r (glb_r),
      .loc_c (COL_W'(k)),
      .value (out_data[k]),
      .hit   (unused_hit)
    );
  end

  assign out_row  = glb_r;
  assign out_last = tile_end && (tiles_left == 16'd1);
  assign busy     = active;

  // ---------------- sequential ----------------
  logic load_tile;
  assign load_tile = nxt_valid && (!have_tile || tile_end) &&
                     !(tile_end && tiles_left == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      have_tile   <= 1'b0;
      tiles_left  <= '0;
      fetch_left  <= '0;
      next_tile   <= '0;
      idx_pending <= 1'b0;
      nxt_valid   <= 1'b0;
      nxt_init    <= '0;
      nxt_end     <= '0;
      cur_init    <= '0;
      cur_end     <= '0;
      line_ptr    <= '0;
      glb_r       <= '0;
      pending     <= 1'b0;
      pend_line   <= '0;
      buf_full    <= '0;
      old_sel     <= 1'b0;
      for (int b = 0; b < 2; b++) begin
        buf_data[b] <= '0;
        buf_info[b] <= '0;
      end
    end else begin
      // command
      if (start && !active && tile_cnt != 0) begin
        active     <= 1'b1;
        tiles_left <= tile_cnt;
        fetch_left <= tile_cnt;
        next_tile  <= tile_base;
      end

      // index prefetch
      idx_pending <= tile_rd_en;
      if (tile_rd_en) begin
        next_tile  <= next_tile + 1'b1;
        fetch_left <= fetch_left - 1'b1;
      end
      if (idx_pending) begin
        nxt_valid <= 1'b1;
        nxt_init  <= init_addr;
        nxt_end   <= end_addr;
      end

      // data read
      pending <= rd_en;
      if (rd_en) begin
        pend_line <= line_ptr;
        line_ptr  <= line_ptr + 1'b1;
      end

      // buffers: drop the older one when fully consumed, then accept arrival
      if (tile_end) begin
        buf_full <= '0;
      end else begin
        logic [1:0] f;
        logic       o;
        f = buf_full;
        o = old_sel;
        if (drop_old) begin
          f[o] = 1'b0;
          o    = ~o;
        end
        if (pending) begin
          // arriving line goes to the free buffer
          logic slot;
          slot = f[o] ? ~o : o;
          if (!f[o]) o = slot;      // window was empty: it is also the oldest
          f[slot]        = 1'b1;
          buf_data[slot] <= rd_data;
          buf_info[slot] <= '{mask: in_mask, last_r: in_last_r};
        end
        buf_full <= f;
        old_sel  <= o;
      end

      // rows
      if (fire) glb_r <= glb_r + 1'b1;

      // tile sequencing
      if (tile_end) begin
        tiles_left <= tiles_left - 1'b1;
        have_tile  <= 1'b0;
        glb_r      <= '0;
        if (tiles_left == 16'd1) active <= 1'b0;
      end
      if (load_tile) begin
        have_tile <= 1'b1;
        nxt_valid <= idx_pending;   // only when a new one lands this very cycle
        cur_init  <= nxt_init;
        cur_end   <= nxt_end;
        line_ptr  <= nxt_init[AW-1:3];
        glb_r     <= '0;
        buf_full  <= '0;
        old_sel   <= 1'b0;
      end
    end
  end

  // ---------------- handshake rules ----------------
  // a row offered and not taken stays offered and unchanged
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_row));
  endproperty
  a_out_stable: assert property (p_out_stable);

  // a line never arrives when both buffers are full after the drop
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      pending && !tile_end |-> !(buf_full[0] && buf_full[1] && !drop_old));

endmodule
