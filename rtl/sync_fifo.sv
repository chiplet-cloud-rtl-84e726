// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// Used as the response queue of a bank group. push is taken when in_ready,
// pop when out_valid and out_ready; out_data shows the oldest entry
// (registered storage, combinational read). count is the fill level.
// Reset empties it. Depth must be a power of two.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  T           in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output T           out_data,
  output logic [PW:0] count
);

  T            mem [DEPTH];
  logic [PW:0] wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[PW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[PW-1:0]] <= in_data;
  end

endmodule
