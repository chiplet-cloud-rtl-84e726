// tb_cc_mem_full: CC-MEM at its full default size (128 ports, 128 bank
// groups of 8 banks x 9216 lines, 226.5 MB) taken through one complete
// operation of each kind, all three running side by side:
//  * port 5 stores two compressed tiles (60% sparse and 100% dense) with
//    their index entries in the last group (127, highest bank) and expands
//    them with a sparse burst; all 64 rows are checked;
//  * port 100 writes lines into group 0 and reads them back singly;
//  * port 3 writes eight lines into group 64 and reads them with a dense
//    burst, checking the one-line-per-cycle rate.
module tb_cc_mem_full;
  import cc_pkg::*;

  localparam int unsigned NP = 128, NG = 128;
  localparam int unsigned LAW = 3 + 14, AW = LAW + 3;
  localparam int unsigned NT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [NP-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  req_t          req [NP];
  rsp_t          rsp [NP];
  logic [NG-1:0] req_conflict, dec_stall, burst_active;
  logic [NP-1:0] rsp_conflict;

  cc_mem dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cycle); end
  endtask

  rsp_t got [NP][$];
  int   got_cyc [NP][$];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (rsp_valid[p] && rsp_ready[p]) begin
        got[p].push_back(rsp[p]); got_cyc[p].push_back(cycle);
      end
  assign rsp_ready = '1;

  function automatic int gaddr(int g, int la);
    return (g << LAW) | la;
  endfunction

  task automatic send(input int p, input op_e op, input int addr,
                      input logic [LINE_W-1:0] data);
    req_valid[p] = 1'b1;
    req[p].op = op; req[p].addr = ADDR_W'(addr); req[p].data = data; req[p].src = PORT_W'(p);
    @(posedge clk);
    while (!req_ready[p]) @(posedge clk);
    @(negedge clk);
    req_valid[p] = 1'b0;
  endtask

  task automatic wait_rsp(input int p, input int n);
    int guard;
    guard = 0;
    while (got[p].size() < n && guard < 5000) begin @(negedge clk); guard++; end
  endtask

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  logic [NZV_W-1:0] ref_tile [NT][TILE_ROWS][TILE_COLS];

  task automatic sparse_op();
    localparam int P = 5, G = 127;
    logic [SW_W-1:0] words [int];
    int dens [NT];
    int a, init, first_line, last_line;
    dens = '{40, 100};
    first_line = (7 << 14) + 9000;        // bank 7, row 9000
    a = first_line * WPL + 5;
    for (int t = 0; t < NT; t++) begin
      init = a;
      for (int r = 0; r < TILE_ROWS; r++)
        for (int c = 0; c < TILE_COLS; c++) begin
          logic [NZV_W-1:0] v;
          v = 16'($urandom_range(1, 16'hffff));
          if (int'($urandom_range(0, 99)) < dens[t]) begin
            ref_tile[t][r][c] = v; words[a] = {v, 5'(r), 3'(c)}; a++;
          end else ref_tile[t][r][c] = '0;
        end
      send(P, OP_IDX_WR, gaddr(G, 8000 + t), LINE_W'({AW'(a), AW'(init)}));
    end
    last_line = (a - 1) / WPL;
    for (int l = first_line; l <= last_line; l++) begin
      logic [LINE_W-1:0] ln;
      ln = '0;
      for (int i = 0; i < WPL; i++)
        if (words.exists(l*WPL + i)) ln[i*SW_W +: SW_W] = words[l*WPL + i];
      send(P, OP_WR, gaddr(G, l), ln);
    end
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_ADDR)), LINE_W'(8000));
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_LEN)), LINE_W'(NT));
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_START)), LINE_W'(BM_SPARSE_RD));
    wait_rsp(P, NT * TILE_ROWS);
    check(got[P].size() == NT * TILE_ROWS, "decoded row count");
    for (int i = 0; i < NT * TILE_ROWS && i < got[P].size(); i++) begin
      bit ok;
      ok = got[P][i].sparse && got[P][i].last == (i == NT*TILE_ROWS - 1);
      for (int c = 0; c < TILE_COLS; c++)
        if (got[P][i].data[c*NZV_W +: NZV_W] != ref_tile[i / TILE_ROWS][i % TILE_ROWS][c]) ok = 0;
      check(ok, $sformatf("tile %0d row %0d", i / TILE_ROWS, i % TILE_ROWS));
    end
  endtask

  task automatic single_op();
    localparam int P = 100;
    logic [LINE_W-1:0] l [4];
    for (int i = 0; i < 4; i++) begin
      l[i] = rnd_line();
      send(P, OP_WR, gaddr(0, (i << 14) + i), l[i]);
    end
    for (int i = 0; i < 4; i++) begin
      got[P].delete();
      send(P, OP_RD, gaddr(0, (i << 14) + i), '0);
      wait_rsp(P, 1);
      check(got[P].size() == 1 && got[P][0].data == l[i], $sformatf("single read %0d", i));
    end
  endtask

  task automatic burst_op();
    localparam int P = 3, G = 64;
    logic [LINE_W-1:0] l [8];
    for (int i = 0; i < 8; i++) begin
      l[i] = rnd_line();
      send(P, OP_WR, gaddr(G, 200 + i), l[i]);
    end
    got[P].delete(); got_cyc[P].delete();
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_ADDR)), LINE_W'(200));
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_LEN)), LINE_W'(8));
    send(P, OP_CSR_WR, gaddr(G, int'(CSR_START)), LINE_W'(BM_DENSE_RD));
    wait_rsp(P, 8);
    for (int i = 0; i < 8 && i < got[P].size(); i++)
      check(got[P][i].data == l[i] && got[P][i].last == (i == 7), $sformatf("burst beat %0d", i));
    if (got[P].size() == 8) check(got_cyc[P][7] - got_cyc[P][0] == 7, "burst rate");
  endtask

  initial begin
    req_valid = '0;
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork sparse_op(); single_op(); burst_op(); join
    repeat (5) @(negedge clk);
    check(burst_active == '0, "all bursts finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
