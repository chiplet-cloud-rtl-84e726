// tb_burst_ctrl: self-checking test of the bank-group control unit.
//
// The control unit is surrounded by a one-cycle SRAM model and by a
// stand-in for the compression decoder, which on dec_start records the tile
// range, raises busy, reads a few lines through dec_rd_en and offers a known
// number of rows honouring dec_ready. Checked: line writes and reads reach
// the memory port, CSR-programmed dense bursts stream the right lines with
// the last flag, burst writes fill consecutive lines and stop after LEN,
// index writes leave on the index port with the right fields, a sparse
// burst starts the decoder with the CSR values, hands it the memory port and
// forwards its rows (sparse=1, dst=requester, last), and that requests are
// refused while a read burst runs. Responses see random back-pressure.
module tb_burst_ctrl;
  import cc_pkg::*;

  localparam int unsigned LAW = 6, IW = 4, AW = LAW + 3, ML = 1 << LAW;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic              req_valid, req_ready, rsp_valid, rsp_ready;
  req_t              req;
  rsp_t              rsp;
  logic              mem_en, mem_we;
  logic [LAW-1:0]    mem_addr;
  logic [LINE_W-1:0] mem_wdata, mem_rdata;
  logic              idx_wr_en;
  logic [IW-1:0]     idx_wr_tile;
  logic [AW-1:0]     idx_wr_init, idx_wr_end;
  logic              dec_start, dec_busy, dec_rd_en, dec_valid, dec_ready, dec_last;
  logic [IW-1:0]     dec_base;
  logic [15:0]       dec_cnt;
  logic [LAW-1:0]    dec_rd_addr;
  logic [DENSE_W-1:0] dec_data;
  logic              burst_active;

  burst_ctrl #(.LAW(LAW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cycle); end
  endtask

  // memory model
  logic [LINE_W-1:0] mem [ML];
  int dec_reads = 0, dec_port_ok = 1;
  always @(posedge clk) if (mem_en) begin
    if (mem_we) mem[mem_addr] <= mem_wdata;
    else        mem_rdata <= mem[mem_addr];
  end

  // index port monitor
  int idx_writes = 0;
  logic [IW-1:0] last_tile; logic [AW-1:0] last_init, last_end;
  always @(posedge clk) if (idx_wr_en) begin
    idx_writes++; last_tile = idx_wr_tile; last_init = idx_wr_init; last_end = idx_wr_end;
  end

  int ncyc = 0;
  always @(negedge clk) ncyc++;

  // decoder stand-in: emits dec_cnt*2 rows, row k carries value k in every word
  int rows_to_send = 0, rows_sent = 0, starts = 0;
  logic [IW-1:0] got_base; logic [15:0] got_cnt;
  always @(posedge clk) begin
    if (dec_start && !dec_busy) begin
      starts++; got_base <= dec_base; got_cnt <= dec_cnt;
      rows_to_send = int'(dec_cnt) * 2; rows_sent = 0;
      dec_busy <= 1'b1;
    end else if (dec_busy) begin
      if (dec_valid && dec_ready) rows_sent++;
      if (rows_sent == rows_to_send) dec_busy <= 1'b0;
    end
    if (dec_rd_en) begin
      dec_reads++;
      if (!(mem_en && !mem_we && mem_addr == dec_rd_addr)) dec_port_ok = 0;
    end
  end
  assign dec_valid = dec_busy && (rows_sent < rows_to_send) && (ncyc % 3 != 0);
  assign dec_last  = dec_valid && (rows_sent == rows_to_send - 1);
  assign dec_rd_en = dec_busy && (ncyc % 4 == 1);
  assign dec_rd_addr = LAW'(ncyc);
  always_comb for (int k = 0; k < TILE_COLS; k++) dec_data[k*NZV_W +: NZV_W] = 16'(rows_sent);

  // responses
  rsp_t got [$];
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) got.push_back(rsp);
  always @(negedge clk) rsp_ready = ($urandom_range(0, 3) != 0);

  task automatic send(input op_e op, input int addr, input logic [LINE_W-1:0] data,
                      input int src = 1);
    req_valid = 1'b1;
    req.op = op; req.addr = ADDR_W'(addr); req.data = data; req.src = PORT_W'(src);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic wait_rsp(input int n);
    int guard;
    guard = 0;
    while (got.size() < n && guard < 3000) begin @(negedge clk); guard++; end
  endtask

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  logic [LINE_W-1:0] ref_mem [ML];

  task automatic run();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // single writes
    for (int a = 0; a < 16; a++) begin
      ref_mem[a] = rnd_line();
      send(OP_WR, a, ref_mem[a]);
    end
    @(negedge clk);
    for (int a = 0; a < 16; a++) check(mem[a] == ref_mem[a], $sformatf("write %0d", a));
    // single read
    got.delete();
    send(OP_RD, 9, '0, 4);
    wait_rsp(1);
    check(got.size() == 1 && got[0].data == ref_mem[9] && got[0].dst == 4 && got[0].last,
          "single read");
    // dense burst of 12
    got.delete();
    send(OP_CSR_WR, int'(CSR_ADDR), LINE_W'(3));
    send(OP_CSR_WR, int'(CSR_LEN), LINE_W'(12));
    send(OP_CSR_WR, int'(CSR_START), LINE_W'(BM_DENSE_RD), 6);
    @(negedge clk);
    check(!req_ready, "request refused during a read burst");
    wait_rsp(12);
    for (int i = 0; i < 12 && i < got.size(); i++)
      check(got[i].data == ref_mem[3+i] && got[i].dst == 6 && got[i].last == (i == 11)
            && !got[i].sparse, $sformatf("dense burst beat %0d", i));
    check(got.size() == 12, "dense burst length");
    // burst write of 5 at line 40
    send(OP_CSR_WR, int'(CSR_ADDR), LINE_W'(40));
    send(OP_CSR_WR, int'(CSR_LEN), LINE_W'(5));
    send(OP_CSR_WR, int'(CSR_START), LINE_W'(BM_WRITE));
    for (int i = 0; i < 6; i++) begin
      ref_mem[40+i] = rnd_line();
      send(OP_BWR, 0, ref_mem[40+i]);
    end
    @(negedge clk);
    for (int i = 0; i < 5; i++) check(mem[40+i] == ref_mem[40+i], $sformatf("burst write %0d", i));
    check(mem[45] != ref_mem[45], "burst write stops after LEN");
    // index write
    send(OP_IDX_WR, 5, LINE_W'({AW'(321), AW'(123)}));
    @(negedge clk);
    check(idx_writes == 1 && last_tile == 5 && last_init == 123 && last_end == 321, "index write");
    // sparse burst: 3 tiles from index 2
    got.delete();
    send(OP_CSR_WR, int'(CSR_ADDR), LINE_W'(2));
    send(OP_CSR_WR, int'(CSR_LEN), LINE_W'(3));
    send(OP_CSR_WR, int'(CSR_START), LINE_W'(BM_SPARSE_RD), 8);
    wait_rsp(6);
    repeat (4) @(negedge clk);
    check(starts == 1 && got_base == 2 && got_cnt == 3, "decoder started with CSR values");
    check(got.size() == 6, $sformatf("decoded rows forwarded (%0d)", got.size()));
    for (int i = 0; i < 6 && i < got.size(); i++)
      check(got[i].sparse && got[i].dst == 8 && got[i].data[NZV_W-1:0] == 16'(i)
            && got[i].data[LINE_W-1:DENSE_W] == '0 && got[i].last == (i == 5),
            $sformatf("decoded row %0d", i));
    check(dec_reads > 0 && dec_port_ok == 1, "decoder drives the memory port");
    check(!burst_active && req_ready, "idle after the sparse burst");
  endtask

  initial begin
    req_valid = 0; req = '0; dec_busy = 0;
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
