// tb_sram_bank: self-checking test of the single-port SRAM bank.
//
// Writes random 192-bit lines to random rows while keeping a reference copy,
// then reads rows back and checks that each line appears exactly one cycle
// after its read, that the output holds while the bank is idle or writing,
// and that a write does not disturb the output register.
module tb_sram_bank;
  import cc_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #1 clk = ~clk;

  logic              en, we;
  logic [AW-1:0]     addr;
  logic [LINE_W-1:0] wdata, rdata;

  sram_bank #(.DEPTH(DEPTH)) dut (.*);

  logic [LINE_W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [LINE_W-1:0] held;
    en = 0; we = 0; addr = '0; wdata = '0;
    // fill every row
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = AW'(i); wdata = rnd_line(); ref_mem[i] = wdata;
    end
    // random mix of writes and reads
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      we = ($urandom_range(0, 2) == 0);
      addr = AW'($urandom_range(0, DEPTH - 1));
      wdata = rnd_line();
      if (en && we) ref_mem[addr] = wdata;
      if (en && !we) begin
        logic [AW-1:0] a;
        a = addr;
        @(negedge clk);
        check(rdata == ref_mem[a], $sformatf("read row %0d", a));
        held = rdata;
        en = 0; we = 0;
        @(negedge clk);
        check(rdata == held, "output held while idle");
        en = 1; we = 1; addr = AW'($urandom_range(0, DEPTH - 1)); wdata = rnd_line();
        ref_mem[addr] = wdata;
        @(negedge clk);
        check(rdata == held, "output held across a write");
        en = 0;
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
