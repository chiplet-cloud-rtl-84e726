// sram_bank: one single-port SRAM bank of the CC-MEM data memory.
//
// The paper builds the CC-MEM from SRAM banks that hold model parameters,
// KV cache and activations, each access returning one line of eight 24-bit
// sparse words (or the same 192 bits of raw dense data). This module is the
// bank written as a synthesizable array, standing in for the foundry SRAM
// macro a real chip would use.
//
// Interface: one port. en=1 with we=1 writes wdata to addr at the clock edge;
// en=1 with we=0 reads addr and rdata shows the line in the next cycle
// (one-cycle synchronous read, held until the next read). Contents are not
// reset. The depth default (9216 lines) is this design's choice: 128 groups of
// 8 such banks give 226.5 MB, the 225.8 MB per chip of the paper's GPT-3
// design point; the paper does not say how that capacity is split into banks.
module sram_bank #(
  parameter int unsigned DEPTH = 9216,
  parameter int unsigned WIDTH = cc_pkg::LINE_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
