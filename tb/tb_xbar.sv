// tb_xbar: self-checking test of the pipelined crossbar.
//
// Four inputs send numbered packets to random outputs of a 4x3 crossbar
// while the outputs apply random back-pressure. A scoreboard per
// (input, output) pair checks that every packet arrives once, at the right
// output, unchanged and in order. Also checked: a lone packet reaches its
// output register one cycle after it is accepted; bank conflicts occurred
// and were resolved; all outputs carried full load in a saturation phase
// (one packet per output per cycle when each input keeps to its own output).
module tb_xbar;
  localparam int unsigned NI = 4, NO = 3;
  localparam int unsigned DW = 2;
  typedef logic [31:0] pkt_t;   // {input[7:0], output[7:0], seq[15:0]}

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [NI-1:0] in_valid, in_ready;
  pkt_t          in_data [NI];
  logic [DW-1:0] in_dest [NI];
  logic [NO-1:0] out_valid, out_ready, conflict;
  pkt_t          out_data [NO];

  xbar #(.T(pkt_t), .NI(NI), .NO(NO)) dut (.*);

  int checks = 0, failures = 0, conflicts = 0, delivered = 0, sent = 0;
  int unsigned next_seq [NI][NO];
  int unsigned exp_seq  [NI][NO];
  int phase = 0;     // 0 random, 1 saturation, 2 idle
  int cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cycle); end
  endtask

  function automatic pkt_t mk(int i, int o);
    return {8'(i), 8'(o), 16'(next_seq[i][o])};
  endfunction

  // drivers: change a packet only after it was taken
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      for (int i = 0; i < NI; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          if (in_valid[i]) begin
            next_seq[i][in_dest[i]]++;
            sent++;
          end
          in_valid[i] <= 1'b0;
          if (phase == 0 && $urandom_range(0, 1)) begin
            int o;
            o = $urandom_range(0, NO - 1);
            in_valid[i] <= 1'b1; in_dest[i] <= DW'(o); in_data[i] <= mk(i, o);
          end else if (phase == 1 && i < NO) begin
            in_valid[i] <= 1'b1; in_dest[i] <= DW'(i); in_data[i] <= mk(i, i);
          end
        end
      end
      for (int o = 0; o < NO; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int si;
          si = out_data[o][31:24];
          check(out_data[o][23:16] == 8'(o), "packet at its output");
          check(out_data[o][15:0] == 16'(exp_seq[si][o]), $sformatf("order %0d->%0d", si, o));
          exp_seq[si][o]++;
          delivered++;
        end
        out_ready[o] <= (phase == 0) ? ($urandom_range(0, 3) != 0) : 1'b1;
        if (conflict[o]) conflicts++;
      end
    end
  end

  initial begin
    int sat_start, sat_deliv;
    in_valid = '0; out_ready = '1;
    for (int i = 0; i < NI; i++) begin in_data[i] = '0; in_dest[i] = '0; end
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) begin
      next_seq[i][o] = 0; exp_seq[i][o] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2000) @(negedge clk);
    phase = 1;
    repeat (20) @(negedge clk);
    sat_deliv = delivered;
    repeat (100) @(negedge clk);
    check(delivered - sat_deliv >= 99 * NO, $sformatf("saturated throughput %0d/300",
          delivered - sat_deliv));
    phase = 2;
    repeat (20) @(negedge clk);
    check(delivered == sent, $sformatf("all %0d packets delivered (%0d)", sent, delivered));
    check(conflicts > 0, "bank conflicts happened");
    // latency of a lone packet
    @(negedge clk);
    force_one();
    $display("delivered=%0d conflicts=%0d", delivered, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic force_one();
    // in_valid is driven by the always block; phase 2 keeps it low, so drive
    // a packet for one handshake through the same variables at a negedge
    pkt_t p;
    p = mk(1, 2);
    in_valid[1] = 1'b1; in_dest[1] = DW'(2); in_data[1] = p;
    #0;
    check(in_ready[1], "lone packet accepted at once");
    @(negedge clk);
    check(out_valid[2] && out_data[2] == p, "lone packet one cycle later");
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
