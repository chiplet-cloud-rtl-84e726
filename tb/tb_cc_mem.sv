// tb_cc_mem: end-to-end test of CC-MEM (crossbars, bank groups, control
// units, compression decoders, SRAM banks), at a reduced size: 4 ports,
// 4 bank groups of 2 banks x 64 lines, 16 tiles per index memory.
//
// Every port runs its own agent at once, so traffic contends in both
// crossbars. Phases:
//  A. each port writes lines into two groups (its own and the next one),
//     then reads back lines another port wrote, with single reads;
//  B. each port starts a dense burst in its own group, and port 0 starts a
//     second one in group 1, so two groups answer port 0 together;
//  C. each port stores compressed tiles (the paper's 60% sparsity, a dense
//     tile and a 20% one) into a group with index entries, then expands them
//     with a sparse burst; every decoded row is compared with its tile;
//  D. a burst write into group 3, read back by a dense burst.
// All responses see random back-pressure. The bench counts how often each
// mechanism happened and fails if one never did: bank conflicts at the
// request crossbar, two groups answering one port, response back-pressure,
// decoder stalls, and dense, sparse and write bursts.
module tb_cc_mem;
  import cc_pkg::*;

  localparam int unsigned NP = 4, NG = 4, NBANK = 2, DEPTH = 64, IDX_DEPTH = 16;
  localparam int unsigned LAW = 1 + 6, AW = LAW + 3, NL = NBANK * DEPTH;
  localparam int unsigned NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [NP-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  req_t          req [NP];
  rsp_t          rsp [NP];
  logic [NG-1:0] req_conflict, dec_stall, burst_active;
  logic [NP-1:0] rsp_conflict;

  cc_mem #(.NP(NP), .NG(NG), .NBANK(NBANK), .DEPTH(DEPTH), .IDX_DEPTH(IDX_DEPTH)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_req_conf = 0, n_rsp_conf = 0, n_bp = 0, n_stall = 0;
  int n_dense = 0, n_sparse = 0, n_write = 0, n_single = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cycle); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cycle++;
    n_req_conf += $countones(req_conflict);
    n_rsp_conf += $countones(rsp_conflict);
    n_stall    += $countones(dec_stall);
    n_bp       += $countones(rsp_valid & ~rsp_ready);
  end

  // responses per port
  rsp_t got [NP][$];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++) if (rsp_valid[p] && rsp_ready[p]) got[p].push_back(rsp[p]);
  always @(negedge clk) for (int p = 0; p < NP; p++) rsp_ready[p] = ($urandom_range(0, 3) != 0);

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

  task automatic csr(input int p, input int g, input logic [3:0] n, input int v);
    send(p, OP_CSR_WR, gaddr(g, int'(n)), LINE_W'(v));
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

  logic [LINE_W-1:0] ref_mem [NG][NL];
  logic [NZV_W-1:0]  ref_tile [NG][NT][TILE_ROWS][TILE_COLS];

  // phase A
  task automatic phase_a(input int p);
    int g2;
    g2 = (p + 1) % NG;
    for (int i = 0; i < 8; i++) begin
      ref_mem[p][p*8 + i]  = rnd_line();
      send(p, OP_WR, gaddr(p, p*8 + i), ref_mem[p][p*8 + i]);
      ref_mem[g2][p*8 + i] = rnd_line();
      send(p, OP_WR, gaddr(g2, p*8 + i), ref_mem[g2][p*8 + i]);
    end
  endtask

  task automatic phase_a_read(input int p);
    int q, g, la;
    q = (p + 2) % NP;           // lines written by another port
    g = q;
    got[p].delete();
    for (int i = 0; i < 8; i++) begin
      la = q*8 + i;
      send(p, OP_RD, gaddr(g, la), '0);
      wait_rsp(p, 1);
      check(got[p].size() == 1 && got[p][0].data == ref_mem[g][la] && got[p][0].last,
            $sformatf("port %0d single read g%0d l%0d", p, g, la));
      got[p].delete();
      n_single++;
    end
  endtask

  // phase B: dense bursts
  task automatic phase_b(input int p);
    int n;
    n = 8;
    got[p].delete();
    csr(p, p, CSR_ADDR, p*8); csr(p, p, CSR_LEN, n);
    csr(p, p, CSR_START, int'(BM_DENSE_RD));
    if (p == 0) begin
      csr(0, 1, CSR_ADDR, 0); csr(0, 1, CSR_LEN, n);
      csr(0, 1, CSR_START, int'(BM_DENSE_RD));
      n = 16;
    end
    wait_rsp(p, n);
    check(got[p].size() == n, $sformatf("port %0d burst beats %0d", p, got[p].size()));
    if (p != 0) begin
      for (int i = 0; i < 8 && i < got[p].size(); i++)
        check(got[p][i].data == ref_mem[p][p*8 + i] && got[p][i].last == (i == 7),
              $sformatf("port %0d burst beat %0d", p, i));
    end else begin
      // two bursts interleaved: each group's lines in order
      int k0, k1;
      k0 = 0; k1 = 0;
      for (int i = 0; i < got[0].size(); i++) begin
        if (k0 < 8 && got[0][i].data == ref_mem[0][k0]) k0++;
        else if (k1 < 8 && got[0][i].data == ref_mem[1][k1]) k1++;
      end
      check(k0 == 8 && k1 == 8, $sformatf("port 0 two bursts in order (%0d,%0d)", k0, k1));
    end
    n_dense++;
  endtask

  // phase C: compressed tiles into group g, then a sparse burst
  task automatic phase_c(input int p);
    logic [SW_W-1:0] words [NL*WPL];
    int dens [NT];
    int a, init, g, first_line, last_line;
    g = (p + 3) % NG;
    dens = '{40, 100, 20};
    first_line = 64;
    a = first_line * WPL + p;           // unaligned start
    for (int t = 0; t < NT; t++) begin
      init = a;
      for (int r = 0; r < TILE_ROWS; r++)
        for (int c = 0; c < TILE_COLS; c++) begin
          logic [NZV_W-1:0] v;
          v = 16'($urandom_range(1, 16'hffff));
          if (int'($urandom_range(0, 99)) < dens[t]) begin
            ref_tile[g][t][r][c] = v; words[a] = {v, 5'(r), 3'(c)}; a++;
          end else ref_tile[g][t][r][c] = '0;
        end
      send(p, OP_IDX_WR, gaddr(g, t), LINE_W'({AW'(a), AW'(init)}));
    end
    last_line = (a - 1) / WPL;
    for (int l = first_line; l <= last_line; l++) begin
      logic [LINE_W-1:0] ln;
      for (int i = 0; i < WPL; i++) ln[i*SW_W +: SW_W] = words[l*WPL + i];
      send(p, OP_WR, gaddr(g, l), ln);
    end
    got[p].delete();
    csr(p, g, CSR_ADDR, 0); csr(p, g, CSR_LEN, NT);
    csr(p, g, CSR_START, int'(BM_SPARSE_RD));
    wait_rsp(p, NT * TILE_ROWS);
    check(got[p].size() == NT * TILE_ROWS, $sformatf("port %0d decoded rows", p));
    for (int i = 0; i < NT * TILE_ROWS && i < got[p].size(); i++) begin
      int t, r;
      bit ok;
      t = i / TILE_ROWS; r = i % TILE_ROWS;
      ok = got[p][i].sparse && got[p][i].last == (i == NT*TILE_ROWS - 1);
      for (int c = 0; c < TILE_COLS; c++)
        if (got[p][i].data[c*NZV_W +: NZV_W] != ref_tile[g][t][r][c]) ok = 0;
      check(ok, $sformatf("port %0d group %0d tile %0d row %0d", p, g, t, r));
    end
    n_sparse++;
  endtask

  // phase D: burst write and read back
  task automatic phase_d();
    csr(2, 3, CSR_ADDR, 100); csr(2, 3, CSR_LEN, 6); csr(2, 3, CSR_START, int'(BM_WRITE));
    for (int i = 0; i < 6; i++) begin
      ref_mem[3][100 + i] = rnd_line();
      send(2, OP_BWR, gaddr(3, 0), ref_mem[3][100 + i]);
    end
    n_write++;
    got[2].delete();
    csr(2, 3, CSR_ADDR, 100); csr(2, 3, CSR_LEN, 6); csr(2, 3, CSR_START, int'(BM_DENSE_RD));
    wait_rsp(2, 6);
    for (int i = 0; i < 6 && i < got[2].size(); i++)
      check(got[2][i].data == ref_mem[3][100 + i], $sformatf("burst write line %0d", i));
    check(got[2].size() == 6, "burst write read-back length");
  endtask

  initial begin
    req_valid = '0;
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork phase_a(0); phase_a(1); phase_a(2); phase_a(3); join
    fork phase_a_read(0); phase_a_read(1); phase_a_read(2); phase_a_read(3); join
    fork phase_b(0); phase_b(1); phase_b(2); phase_b(3); join
    fork phase_c(0); phase_c(1); phase_c(2); phase_c(3); join
    phase_d();
    repeat (10) @(negedge clk);

    $display("mechanisms: req conflicts=%0d rsp conflicts=%0d back-pressure=%0d decoder stalls=%0d",
             n_req_conf, n_rsp_conf, n_bp, n_stall);
    $display("            single reads=%0d dense bursts=%0d sparse bursts=%0d write bursts=%0d",
             n_single, n_dense, n_sparse, n_write);
    check(n_req_conf > 0, "bank conflict happened");
    check(n_rsp_conf > 0, "response conflict happened");
    check(n_bp > 0, "back-pressure happened");
    check(n_stall > 0, "decoder stall happened");
    check(n_single > 0 && n_dense > 0 && n_sparse > 0 && n_write > 0, "all transfer kinds ran");
    check(burst_active == '0, "all bursts finished");
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
