// tb_index_mem: self-checking test of the tile index memory.
//
// Writes random {init_addr, end_addr} pairs for every tile, then issues tile
// reads in random order, sometimes in back-to-back cycles, and checks that
// both addresses of the requested tile appear one cycle after tile_rd_en and
// hold while no read is requested. A write in the same cycle as a read of
// another tile must not disturb the read.
module tb_index_mem;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned AW    = 20;
  localparam int unsigned IW    = $clog2(DEPTH);

  logic clk = 1'b0;
  always #1 clk = ~clk;

  logic          wr_en, tile_rd_en;
  logic [IW-1:0] wr_tile, rd_tile;
  logic [AW-1:0] wr_init, wr_end, init_addr, end_addr;

  index_mem #(.DEPTH(DEPTH), .AW(AW)) dut (.*);

  logic [AW-1:0] ri [DEPTH], re [DEPTH];
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; tile_rd_en = 0; wr_tile = '0; rd_tile = '0; wr_init = '0; wr_end = '0;
    for (int t = 0; t < DEPTH; t++) begin
      @(negedge clk);
      wr_en = 1; wr_tile = IW'(t);
      wr_init = AW'($urandom); wr_end = AW'($urandom);
      ri[t] = wr_init; re[t] = wr_end;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      logic [IW-1:0] t;
      t = IW'($urandom_range(0, DEPTH - 1));
      tile_rd_en = 1; rd_tile = t;
      // a write to a different tile in the same cycle
      wr_en = $urandom_range(0, 1);
      wr_tile = IW'(t + 1'b1);
      wr_init = AW'($urandom); wr_end = AW'($urandom);
      if (wr_en) begin ri[wr_tile] = wr_init; re[wr_tile] = wr_end; end
      @(negedge clk);
      wr_en = 0;
      check(init_addr == ri[t] && end_addr == re[t], $sformatf("tile %0d", t));
      if ($urandom_range(0, 1)) begin
        tile_rd_en = 0;
        @(negedge clk);
        check(init_addr == ri[t] && end_addr == re[t], "held while idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
