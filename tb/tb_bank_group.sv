// tb_bank_group: self-checking test of one CC-MEM bank group.
//
// Drives the group's request port the way a crossbar would and collects its
// responses with random back-pressure. Sequence:
//  1. single-line writes across both banks, then single reads (data, dst,
//     last, and the two-cycle read latency on an idle port);
//  2. a dense burst read programmed through the CSRs, checking data, order,
//     the last flag and a rate of one line per cycle without back-pressure;
//  3. a burst write (OP_BWR packets) read back by a second dense burst;
//  4. compressed tiles (20%..100% dense, the paper's 60% sparsity among
//     them) written as sparse lines plus index entries, then expanded by a
//     sparse burst: every decoded row is compared with the dense tile it
//     came from, and a request sent meanwhile must wait until the burst ends.
module tb_bank_group;
  import cc_pkg::*;

  localparam int unsigned NBANK = 2, DEPTH = 64, IDX_DEPTH = 16;
  localparam int unsigned LAW = 1 + 6;
  localparam int unsigned AW  = LAW + 3;
  localparam int unsigned NT  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready, dec_stall, burst_active;
  req_t req;
  rsp_t rsp;

  bank_group #(.NBANK(NBANK), .DEPTH(DEPTH), .IDX_DEPTH(IDX_DEPTH)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cycle); end
  endtask

  // ---------------- request driver ----------------
  task automatic send(input op_e op, input int addr, input logic [LINE_W-1:0] data,
                      input int src = 3);
    req_valid = 1'b1;
    req.op = op; req.addr = ADDR_W'(addr); req.data = data; req.src = PORT_W'(src);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #0;
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic csr(input logic [3:0] n, input int v, input int src = 3);
    send(OP_CSR_WR, int'(n), LINE_W'(v), src);
  endtask

  // ---------------- response collector ----------------
  rsp_t got [$];
  int   got_cycle [$];
  bit   bp = 0;
  int   stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && rsp_ready) begin got.push_back(rsp); got_cycle.push_back(cycle); end
    if (dec_stall) stalls++;
  end
  always @(negedge clk) rsp_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic wait_rsp(input int n);
    int guard = 0;
    while (got.size() < n && guard < 5000) begin @(negedge clk); guard++; end
  endtask

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  logic [LINE_W-1:0] ref_line [NBANK*DEPTH];
  logic [NZV_W-1:0]  ref_tile [NT][TILE_ROWS][TILE_COLS];

  task automatic run();
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. single writes and reads
    for (int a = 0; a < 32; a++) begin
      int la = (a < 16) ? a : (DEPTH + a);   // both banks
      ref_line[la] = rnd_line();
      send(OP_WR, la, ref_line[la]);
    end
    for (int a = 0; a < 32; a += 5) begin
      int la = (a < 16) ? a : (DEPTH + a);
      got.delete(); got_cycle.delete();
      t0 = cycle;
      send(OP_RD, la, '0, 7);
      wait_rsp(1);
      check(got.size() == 1 && got[0].data == ref_line[la] && got[0].dst == 7 &&
            got[0].last && !got[0].sparse, $sformatf("single read %0d", la));
      // offered before edge 1 (accepted there), read at edge 1, queued at
      // edge 2, taken by the collector at edge 3
      check(got_cycle[0] - t0 == 3, $sformatf("single read latency %0d", got_cycle[0] - t0));
    end

    // 2. dense burst read
    got.delete(); got_cycle.delete();
    csr(CSR_ADDR, 2); csr(CSR_LEN, 10);
    csr(CSR_START, int'(BM_DENSE_RD), 5);
    t0 = cycle;
    wait_rsp(10);
    check(got.size() == 10, "dense burst length");
    for (int i = 0; i < 10 && i < got.size(); i++)
      check(got[i].data == ref_line[2+i] && got[i].dst == 5 && got[i].last == (i == 9),
            $sformatf("dense burst beat %0d", i));
    if (got.size() == 10)
      check(got_cycle[9] - got_cycle[0] == 9, "dense burst one line per cycle");

    // 3. burst write, read back with random back-pressure
    csr(CSR_ADDR, DEPTH + 20); csr(CSR_LEN, 8); csr(CSR_START, int'(BM_WRITE));
    for (int i = 0; i < 8; i++) begin
      ref_line[DEPTH + 20 + i] = rnd_line();
      send(OP_BWR, 0, ref_line[DEPTH + 20 + i]);
    end
    send(OP_BWR, 0, '1);              // outside the burst: dropped
    bp = 1;
    got.delete(); got_cycle.delete();
    csr(CSR_ADDR, DEPTH + 20); csr(CSR_LEN, 9); csr(CSR_START, int'(BM_DENSE_RD), 9);
    wait_rsp(9);
    for (int i = 0; i < 8 && i < got.size(); i++)
      check(got[i].data == ref_line[DEPTH + 20 + i], $sformatf("burst write beat %0d", i));
    check(got.size() == 9 && got[8].data != '1, "data outside a burst dropped");

    // 4. compressed tiles
    begin
      logic [SW_W-1:0] words [NBANK*DEPTH*WPL];
      int dens [NT] = '{40, 20, 100, 40};
      int a = 40 * WPL + 3;               // unaligned start
      int first_line = 40, last_line;
      for (int t = 0; t < NT; t++) begin
        int init = a;
        for (int r = 0; r < TILE_ROWS; r++)
          for (int c = 0; c < TILE_COLS; c++) begin
            logic [NZV_W-1:0] v;
            v = 16'($urandom_range(1, 16'hffff));
            if (int'($urandom_range(0, 99)) < dens[t]) begin
              ref_tile[t][r][c] = v; words[a] = {v, 5'(r), 3'(c)}; a++;
            end else ref_tile[t][r][c] = '0;
          end
        send(OP_IDX_WR, t + 2, LINE_W'({AW'(a), AW'(init)}));
      end
      last_line = (a - 1) / WPL;
      for (int l = first_line; l <= last_line; l++) begin
        logic [LINE_W-1:0] ln;
        for (int i = 0; i < WPL; i++) ln[i*SW_W +: SW_W] = words[l*WPL + i];
        send(OP_WR, l, ln);
      end
    end
    got.delete(); got_cycle.delete();
    stalls = 0;
    csr(CSR_ADDR, 2); csr(CSR_LEN, NT); csr(CSR_START, int'(BM_SPARSE_RD), 11);
    // a request during the burst must wait
    fork
      send(OP_RD, 0, '0, 12);
    join_none
    repeat (5) @(negedge clk);
    check(!req_ready && burst_active, "request held during sparse burst");
    wait_rsp(NT * TILE_ROWS + 1);
    check(got.size() == NT * TILE_ROWS + 1, $sformatf("decoded rows %0d", got.size()));
    for (int i = 0; i < NT * TILE_ROWS && i < got.size(); i++) begin
      int t = i / TILE_ROWS, r = i % TILE_ROWS;
      bit ok;
      ok = got[i].sparse && got[i].dst == 11 && got[i].last == (i == NT*TILE_ROWS-1);
      for (int c = 0; c < TILE_COLS; c++)
        if (got[i].data[c*NZV_W +: NZV_W] != ref_tile[t][r][c]) ok = 0;
      check(ok, $sformatf("tile %0d row %0d", t, r));
    end
    if (got.size() == NT * TILE_ROWS + 1)
      check(got[NT*TILE_ROWS].dst == 12 && got[NT*TILE_ROWS].data == ref_line[0],
            "held request served after the burst");
    $display("sparse burst: %0d rows, %0d decoder stall cycles", NT*TILE_ROWS, stalls);

  endtask

  initial begin
    req_valid = 0; req = '0;
    run();
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
