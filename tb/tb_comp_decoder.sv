// tb_comp_decoder: self-checking test of the compression decoder.
//
// The bench builds random 32x8 tiles of 16-bit values at several densities
// (empty, 20%, 40% = the paper's 60% sparsity, 100% dense), packs their
// non-zeros row-major as 24-bit sparse words {value, r, c}, eight per
// 192-bit line, into a data-memory model, at unaligned start addresses, and
// fills an index-memory model with each tile's [init, end) word range. Both
// models answer one cycle after a read, like the SRAMs. The decoder then
// expands all tiles in one command while the bench stalls out_ready at
// random, and every row is compared with the tile it was made from.
// Checked besides the data: row numbers, out_last, that a tile needs no
// more than 1 cycle per row plus stalls, the 60%-sparse rate of a run
// without back-pressure, and that stalls and back-pressure both happened.
module tb_comp_decoder;
  import cc_pkg::*;

  localparam int unsigned AW = 12;
  localparam int unsigned IW = 5;
  localparam int unsigned NT = 12;           // tiles
  localparam int unsigned MW = 1 << AW;      // words of data memory

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic               start, busy, tile_rd_en, rd_en, out_valid, out_ready, out_last, stall;
  logic [IW-1:0]      tile_base, rd_tile;
  logic [15:0]        tile_cnt;
  logic [AW-1:0]      init_addr, end_addr;
  logic [AW-4:0]      rd_addr;
  logic [LINE_W-1:0]  rd_data;
  logic [NZV_W-1:0]   out_data [TILE_COLS];
  logic [ROW_W-1:0]   out_row;

  comp_decoder #(.AW(AW), .IW(IW)) dut (.*);

  // memories
  logic [SW_W-1:0]    dmem [MW];
  logic [2*AW-1:0]    imem [1 << IW];
  logic [NZV_W-1:0]   ref_tile [NT][TILE_ROWS][TILE_COLS];

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int i = 0; i < WPL; i++) rd_data[i*SW_W +: SW_W] <= dmem[{rd_addr, 3'(i)}];
    if (tile_rd_en) {init_addr, end_addr} <= imem[rd_tile];
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cycle);
    end
  endtask

  // build NT tiles starting at word address base; density per tile
  task automatic build(input int base, input int dens_pct [NT]);
    int a = base;
    for (int t = 0; t < NT; t++) begin
      int init = a;
      for (int r = 0; r < TILE_ROWS; r++)
        for (int c = 0; c < TILE_COLS; c++) begin
          logic [NZV_W-1:0] v;
          v = 16'($urandom_range(1, 16'hffff));
          if (int'($urandom_range(0, 99)) < dens_pct[t]) begin
            ref_tile[t][r][c] = v;
            dmem[a] = {v, 5'(r), 3'(c)};
            a++;
          end else ref_tile[t][r][c] = '0;
        end
      imem[t] = {AW'(init), AW'(a)};
      a = a + int'($urandom_range(0, 5));   // gap between tiles
    end
  endtask

  int rows_seen, stalls, bp_cycles, last_seen;
  int t_start, t_end;
  bit  random_bp;

  // output checker
  int exp_t, exp_r;
  always @(posedge clk) if (rst_n) begin
    out_ready <= random_bp ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (stall) stalls++;
    if (out_valid && !out_ready) bp_cycles++;
    if (out_valid && out_ready) begin
      bit ok;
      ok = 1;
      for (int c = 0; c < TILE_COLS; c++)
        if (out_data[c] !== ref_tile[exp_t][exp_r][c]) ok = 0;
      check(ok, $sformatf("tile %0d row %0d data", exp_t, exp_r));
      check(out_row == ROW_W'(exp_r), "row number");
      check(out_last == (exp_t == NT-1 && exp_r == TILE_ROWS-1), "out_last");
      if (out_last) last_seen++;
      rows_seen++;
      if (exp_r == TILE_ROWS-1) begin exp_r = 0; exp_t++; end
      else exp_r++;
    end
  end

  task automatic run_cmd();
    exp_t = 0; exp_r = 0; rows_seen = 0; stalls = 0; bp_cycles = 0;
    @(negedge clk);
    start = 1'b1; tile_base = '0; tile_cnt = 16'(NT);
    @(negedge clk);
    start = 1'b0;
    t_start = cycle;
    while (busy) @(negedge clk);
    t_end = cycle;
  endtask

  initial begin
    int dens [NT];
    start = 0; tile_base = '0; tile_cnt = '0; out_ready = 1'b1; random_bp = 0;
    last_seen = 0;
    for (int i = 0; i < MW; i++) dmem[i] = '0;
    for (int i = 0; i < (1 << IW); i++) imem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // run 1: mixed densities, random back-pressure
    dens = '{0, 20, 40, 100, 40, 40, 5, 70, 40, 100, 0, 40};
    build(3, dens);
    random_bp = 1;
    run_cmd();
    check(rows_seen == NT * TILE_ROWS, $sformatf("rows emitted %0d", rows_seen));
    check(t_end - t_start <= NT * TILE_ROWS + bp_cycles + stalls + 3 * NT + 4,
          $sformatf("cycles %0d within rows+stalls+bp bound", t_end - t_start));
    $display("run1: %0d rows in %0d cycles, %0d stall, %0d back-pressure cycles",
             rows_seen, t_end - t_start, stalls, bp_cycles);
    check(stalls > 0, "decoder stall happened");
    check(bp_cycles > 0, "back-pressure happened");

    // run 2: 60% sparsity everywhere, no back-pressure: rate close to 1 row/cycle
    for (int t = 0; t < NT; t++) dens[t] = 40;
    build(5, dens);
    random_bp = 0;
    repeat (2) @(negedge clk);
    run_cmd();
    check(rows_seen == NT * TILE_ROWS, "rows emitted, 60% sparse");
    $display("run2 (60%% sparse): %0d rows in %0d cycles, %0d stall cycles",
             rows_seen, t_end - t_start, stalls);
    // at least 0.8 rows per cycle on average
    check((t_end - t_start) * 8 <= rows_seen * 10, "60%-sparse rate >= 0.8 row/cycle");
    check(last_seen == 2, "out_last once per command");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
