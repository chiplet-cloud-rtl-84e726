// burst_ctrl: control unit of one CC-MEM bank group.
//
// The paper gives every bank group a simple control unit that bursts
// sequential reads and writes inside the group, programmed through
// memory-mapped control/status registers, and controls the compression
// decoder through a similar set of CSRs. This module is that unit. It owns
// the group's single (virtual) memory port and its response queue.
//
// Requests (cc_pkg::req_t, addr already local to the group):
//   OP_RD      read one line, answered with one response (last=1)
//   OP_WR      write one line
//   OP_CSR_WR  write CSR addr[3:0]: CSR_ADDR, CSR_LEN, or CSR_START, whose
//              data[1:0] (burst_mode_e) starts a burst on behalf of src:
//                BM_DENSE_RD  LEN lines from line ADDR, one response each
//                BM_SPARSE_RD LEN tiles from tile index ADDR through the
//                             compression decoder, 32 dense rows per tile
//                BM_WRITE     the next LEN OP_BWR packets are written to
//                             lines ADDR, ADDR+1, ...
//   OP_IDX_WR  write index entry addr: init = data[AW-1:0],
//              end = data[2*AW-1:AW] (sparse-word addresses)
//   OP_BWR     burst write data (dropped when no write burst is open)
// While a read burst runs the unit accepts no request; that is how the
// group stays a single-port memory. Reads are issued only when the response
// queue has room, so back-pressure from the crossbar simply slows a burst.
//
// Write data and the index-write fields go straight from the request to the
// memory and index ports; the unit decides only whether and where they are
// written.
//
// Timing: one memory access per cycle; a dense burst of LEN lines sends LEN
// responses in LEN cycles plus two when the crossbar keeps up. The opcode
// and CSR encodings, the queue depth and the blocking rule are this design's
// choices; the paper does not describe them.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' condition of the assertions below, which a linter reports
// as a net used both synchronously and asynchronously. It stands because
// the assertions are checks only and generate no logic.
module burst_ctrl
  import cc_pkg::*;
#(
  parameter int unsigned LAW = 17,       // line address width inside the group
  parameter int unsigned IW  = 13,       // tile index width
  parameter int unsigned QD  = 4,        // response queue depth
  localparam int unsigned AW = LAW + 3   // sparse-word address width
) (
  input  logic              clk,
  input  logic              rst_n,
  // requests
  input  logic              req_valid,
  output logic              req_ready,
  input  req_t              req,
  // responses
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output rsp_t              rsp,
  // memory port of the bank group
  output logic              mem_en,
  output logic              mem_we,
  output logic [LAW-1:0]    mem_addr,
  output logic [LINE_W-1:0] mem_wdata,
  input  logic [LINE_W-1:0] mem_rdata,
  // index memory write port
  output logic              idx_wr_en,
  output logic [IW-1:0]     idx_wr_tile,
  output logic [AW-1:0]     idx_wr_init,
  output logic [AW-1:0]     idx_wr_end,
  // compression decoder
  output logic              dec_start,
  output logic [IW-1:0]     dec_base,
  output logic [15:0]       dec_cnt,
  input  logic              dec_busy,
  input  logic              dec_rd_en,
  input  logic [LAW-1:0]    dec_rd_addr,
  input  logic              dec_valid,
  output logic              dec_ready,
  input  logic [DENSE_W-1:0] dec_data,
  input  logic              dec_last,
  // status for tests
  output logic              burst_active
);

  localparam int unsigned CW = $clog2(QD);

  // ---------------- CSRs and burst state ----------------
  logic [31:0]       csr_addr, csr_len;
  logic              rd_burst;        // dense read burst running
  logic              sp_burst;        // sparse decode running
  logic              wr_burst;        // write burst open
  logic [31:0]       bptr, bleft;
  logic [PORT_W-1:0] bsrc;
  logic              dec_started;

  // ---------------- response queue ----------------
  logic              q_in_valid, q_in_ready;
  rsp_t              q_in;
  logic [CW:0]       q_count;
  logic              rd_pend;         // a dense read is in flight
  logic              rd_pend_last;
  logic [PORT_W-1:0] rd_pend_dst;

  sync_fifo #(.T(rsp_t), .DEPTH(QD)) u_q (
    .clk, .rst_n,
    .in_valid (q_in_valid), .in_ready (q_in_ready), .in_data (q_in),
    .out_valid(rsp_valid),  .out_ready(rsp_ready),  .out_data(rsp),
    .count    (q_count)
  );

  // room for one more read: queue plus in-flight read below depth
  logic room;
  assign room = (32'(q_count) + 32'(rd_pend)) < QD;

  // ---------------- request acceptance ----------------
  logic busy_rd;
  assign busy_rd   = rd_burst || sp_burst;
  assign req_ready = !busy_rd && ((req.op != OP_RD) || room);

  logic acc;
  assign acc = req_valid && req_ready;

  logic burst_rd_issue;
  assign burst_rd_issue = rd_burst && room && (bleft != 0);

  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = req.data;
    if (sp_burst) begin
      mem_en   = dec_rd_en;
      mem_addr = dec_rd_addr;
    end else if (burst_rd_issue) begin
      mem_en   = 1'b1;
      mem_addr = bptr[LAW-1:0];
    end else if (acc && req.op == OP_RD) begin
      mem_en   = 1'b1;
      mem_addr = req.addr[LAW-1:0];
    end else if (acc && req.op == OP_WR) begin
      mem_en   = 1'b1;
      mem_we   = 1'b1;
      mem_addr = req.addr[LAW-1:0];
    end else if (acc && req.op == OP_BWR && wr_burst) begin
      mem_en   = 1'b1;
      mem_we   = 1'b1;
      mem_addr = bptr[LAW-1:0];
    end
  end

  assign idx_wr_en   = acc && (req.op == OP_IDX_WR);
  assign idx_wr_tile = req.addr[IW-1:0];
  assign idx_wr_init = req.data[AW-1:0];
  assign idx_wr_end  = req.data[2*AW-1:AW];

  assign dec_start = sp_burst && !dec_started;
  assign dec_base  = csr_addr[IW-1:0];
  assign dec_cnt   = csr_len[15:0];

  // output selection (Fig. 3(a): dense path or decoder, to the crossbar)
  always_comb begin
    q_in_valid = 1'b0;
    q_in       = '0;
    dec_ready  = 1'b0;
    if (rd_pend) begin
      q_in_valid = 1'b1;
      q_in.data  = mem_rdata;
      q_in.dst   = rd_pend_dst;
      q_in.last  = rd_pend_last;
    end else if (sp_burst) begin
      dec_ready          = q_in_ready;
      q_in_valid         = dec_valid;
      q_in.data          = LINE_W'(dec_data);
      q_in.dst           = bsrc;
      q_in.sparse        = 1'b1;
      q_in.last          = dec_last;
    end
  end

  assign burst_active = rd_burst || sp_burst || wr_burst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_addr     <= '0;
      csr_len      <= '0;
      rd_burst     <= 1'b0;
      sp_burst     <= 1'b0;
      wr_burst     <= 1'b0;
      bptr         <= '0;
      bleft        <= '0;
      bsrc         <= '0;
      dec_started  <= 1'b0;
      rd_pend      <= 1'b0;
      rd_pend_last <= 1'b0;
      rd_pend_dst  <= '0;
    end else begin
      // reads in flight
      rd_pend <= 1'b0;
      if (burst_rd_issue) begin
        rd_pend      <= 1'b1;
        rd_pend_dst  <= bsrc;
        rd_pend_last <= (bleft == 32'd1);
        bptr         <= bptr + 1'b1;
        bleft        <= bleft - 1'b1;
        if (bleft == 32'd1) rd_burst <= 1'b0;
      end else if (acc && req.op == OP_RD && !sp_burst) begin
        rd_pend      <= 1'b1;
        rd_pend_dst  <= req.src;
        rd_pend_last <= 1'b1;
      end

      // burst write data
      if (acc && req.op == OP_BWR && wr_burst) begin
        bptr  <= bptr + 1'b1;
        bleft <= bleft - 1'b1;
        if (bleft == 32'd1) wr_burst <= 1'b0;
      end

      // sparse decode
      if (dec_start) dec_started <= 1'b1;
      if (sp_burst && dec_started && !dec_busy) begin
        sp_burst    <= 1'b0;
        dec_started <= 1'b0;
      end

      // CSR writes
      if (acc && req.op == OP_CSR_WR) begin
        case (req.addr[3:0])
          CSR_ADDR: csr_addr <= req.data[31:0];
          CSR_LEN:  csr_len  <= req.data[31:0];
          CSR_START: if (csr_len != 0) begin
            bptr  <= csr_addr;
            bleft <= csr_len;
            bsrc  <= req.src;
            case (burst_mode_e'(req.data[1:0]))
              BM_DENSE_RD:  rd_burst <= 1'b1;
              BM_SPARSE_RD: sp_burst <= 1'b1;
              BM_WRITE:     wr_burst <= 1'b1;
              default: ;
            endcase
          end
          default: ;
        endcase
      end
    end
  end

  // the queue never overflows: every push finds room
  a_q_room: assert property (@(posedge clk) disable iff (!rst_n)
      q_in_valid && !sp_burst |-> q_in_ready);

endmodule
