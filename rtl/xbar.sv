// xbar: pipelined crossbar switch of the CC-MEM.
//
// The paper connects the bank groups to the compute side with a pipelined
// crossbar, chosen for low latency, full throughput under good scheduling
// and simple modelling of latency (pipeline depth) and congestion (bank
// conflicts). This is a generic NI x NO crossbar of packets of type T;
// CC-MEM uses one for requests (ports -> bank groups) and one for responses
// (bank groups -> ports).
//
// How it works: every input offers one packet with the number of its output
// (dest). Every output has a round-robin arbiter over the inputs that want it
// and one pipeline register; a packet moves into that register when it wins
// and the register is empty or being emptied. Two inputs wanting the same
// output is the bank conflict: the loser waits, holding its packet.
//
// Interface: valid/ready on every input and output; a packet offered with
// valid must stay unchanged until ready (checked below). Timing: one cycle
// from input to output register, one packet per output per cycle. The
// arbitration policy and the single pipeline stage are this design's choice.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' condition of the assertions below, which a linter reports
// as a net used both synchronously and asynchronously. It stands because
// the assertions are checks only and generate no logic.
module xbar #(
  parameter type         T  = logic [7:0],
  parameter int unsigned NI = 4,
  parameter int unsigned NO = 4,
  localparam int unsigned DW = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NI-1:0] in_valid,
  output logic [NI-1:0] in_ready,
  input  T              in_data  [NI],
  input  logic [DW-1:0] in_dest  [NI],
  output logic [NO-1:0] out_valid,
  input  logic [NO-1:0] out_ready,
  output T              out_data [NO],
  output logic [NO-1:0] conflict        // an output turned a requester away
);

  logic [NI-1:0] grant [NO];
  logic [NO-1:0] stage_ready;

  for (genvar o = 0; o < NO; o++) begin : g_out
    logic [NI-1:0] want;
    logic [IW-1:0] gidx;
    logic          take;

    always_comb
      for (int i = 0; i < NI; i++) want[i] = in_valid[i] && (in_dest[i] == DW'(o));

    assign stage_ready[o] = !out_valid[o] || out_ready[o];
    assign take           = stage_ready[o] && (want != '0);
    assign conflict[o]    = ($countones(want) > 1) || ((want != '0) && !stage_ready[o]);

    rr_arbiter #(.N(NI)) u_arb (
      .clk, .rst_n, .req(want), .advance(take), .grant(grant[o]), .grant_idx(gidx)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_valid[o] <= 1'b0;
      else if (stage_ready[o]) out_valid[o] <= (want != '0);
    end

    always_ff @(posedge clk) if (take) out_data[o] <= in_data[gidx];
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NO; o++)
      in_ready = in_ready | (grant[o] & {NI{stage_ready[o]}});
  end

  // handshake rules
  for (genvar i = 0; i < NI; i++) begin : g_chk
    a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
        (in_valid[i] && !in_ready[i]) |=> (in_valid[i] && in_data[i] == $past(in_data[i])
                                             && in_dest[i] == $past(in_dest[i])));
  end
  for (genvar o = 0; o < NO; o++) begin : g_ochk
    a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
        (out_valid[o] && !out_ready[o]) |=> (out_valid[o] && $stable(out_data[o])));
  end

endmodule
