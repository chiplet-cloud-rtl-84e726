// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters per cycle, starting the search one past the
// requester granted last, so every requester is served within N grants.
// grant is one-hot (or zero) and combinational; the priority pointer moves
// only when advance is high (the grant was used). Reset gives requester 0
// the highest priority.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic [N-1:0]  grant,
  output logic [IW-1:0] grant_idx
);

  logic [IW-1:0] ptr;   // highest-priority requester

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      // candidate (ptr + k) mod N; the loop runs downwards so the smallest
      // offset with a request wins
      int unsigned c;
      c = int'(ptr) + k;
      if (c >= N) c = c - N;
      if (req[c]) begin
        grant     = '0;
        grant[c]  = 1'b1;
        grant_idx = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && (grant != '0))
      ptr <= (int'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
  end

endmodule
