// cc_mem: CC-MEM, the SRAM-only main memory of one Chiplet Cloud chiplet.
//
// It holds the model parameters, KV cache and activations on chip. NG bank
// groups (bank_group) each act as a single-port memory with its own burst
// control unit and compression decoder; a pipelined request crossbar carries
// packets from NP ports to the groups and a response crossbar carries the
// answers back. The ports are where the chiplet's SIMD cores attach. Data
// leaving a group is always dense: compressed tiles are expanded inside the
// group, so the cores never see the sparse format.
//
// Addressing: a request's addr is {group, local line address} with the
// group number in bits [LAW +: GW]; CSR and index-memory writes use the same
// group field. A response goes to the port named by the request's src
// (responses carry it as dst), so a port must put its own number in src.
//
// Timing: a single read returns four cycles after it is accepted (request
// crossbar register, bank read, response queue, response crossbar
// register) when nothing contends. Each port and each group moves one packet
// per cycle.
//
// Sizes: NG = 128 groups of 8 banks x 9216 lines x 192 bits give 226.5 MB,
// the paper's 225.8 MB per chip of its GPT-3 design; at an assumed 1 GHz the
// groups deliver 128 x 24 B = 3.07 TB/s against the paper's 2.75 TB/s. The
// paper gives neither the group count, the clock nor the number of ports;
// NP = NG (a square crossbar) is this design's choice.
module cc_mem
  import cc_pkg::*;
#(
  parameter int unsigned NP        = 128,    // ports (SIMD cores)
  parameter int unsigned NG        = 128,    // bank groups
  parameter int unsigned NBANK     = 8,      // SRAM banks per group
  parameter int unsigned DEPTH     = 9216,   // lines per bank
  parameter int unsigned IDX_DEPTH = 8192,   // tiles per group index memory
  localparam int unsigned LAW = ((NBANK > 1) ? $clog2(NBANK) : 1) + $clog2(DEPTH),
  localparam int unsigned GW  = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned PW  = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // ports
  input  logic [NP-1:0] req_valid,
  output logic [NP-1:0] req_ready,
  input  req_t          req      [NP],
  output logic [NP-1:0] rsp_valid,
  input  logic [NP-1:0] rsp_ready,
  output rsp_t          rsp      [NP],
  // activity, for statistics
  output logic [NG-1:0] req_conflict,   // bank conflict at a group's input
  output logic [NP-1:0] rsp_conflict,   // two groups answering one port
  output logic [NG-1:0] dec_stall,
  output logic [NG-1:0] burst_active
);

  // ---------------- request crossbar ----------------
  logic [GW-1:0] req_dest [NP];
  for (genvar p = 0; p < NP; p++) begin : g_rdst
    assign req_dest[p] = req[p].addr[LAW +: GW];
  end

  logic [NG-1:0] g_req_valid, g_req_ready;
  req_t          g_req [NG];

  xbar #(.T(req_t), .NI(NP), .NO(NG)) u_req_xbar (
    .clk, .rst_n,
    .in_valid (req_valid), .in_ready (req_ready), .in_data (req), .in_dest (req_dest),
    .out_valid(g_req_valid), .out_ready(g_req_ready), .out_data(g_req),
    .conflict (req_conflict)
  );

  // ---------------- bank groups ----------------
  logic [NG-1:0] g_rsp_valid, g_rsp_ready;
  rsp_t          g_rsp [NG];
  logic [PW-1:0] rsp_dest [NG];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    req_t lreq;
    always_comb begin
      lreq      = g_req[g];
      lreq.addr = ADDR_W'(g_req[g].addr[LAW-1:0]);   // local to the group
    end

    bank_group #(.NBANK(NBANK), .DEPTH(DEPTH), .IDX_DEPTH(IDX_DEPTH)) u_bg (
      .clk, .rst_n,
      .req_valid (g_req_valid[g]), .req_ready (g_req_ready[g]), .req (lreq),
      .rsp_valid (g_rsp_valid[g]), .rsp_ready (g_rsp_ready[g]), .rsp (g_rsp[g]),
      .dec_stall (dec_stall[g]),   .burst_active (burst_active[g])
    );

    assign rsp_dest[g] = g_rsp[g].dst[PW-1:0];
  end

  // ---------------- response crossbar ----------------
  xbar #(.T(rsp_t), .NI(NG), .NO(NP)) u_rsp_xbar (
    .clk, .rst_n,
    .in_valid (g_rsp_valid), .in_ready (g_rsp_ready), .in_data (g_rsp), .in_dest (rsp_dest),
    .out_valid(rsp_valid),   .out_ready(rsp_ready),   .out_data(rsp),
    .conflict (rsp_conflict)
  );

endmodule
