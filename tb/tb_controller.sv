// tb_controller: runs two VMMs through the controller at a small size and
// compares every cycle with the expected schedule: one reset cycle, the
// input-buffer reads and latch strobes, the six analog phases with their
// switch levels and lengths (3,3,3,2,2,7 = 20 cycles, one analog clock), the
// capture strobe and the output-buffer writes. Also checks the total latency
// and that vmm_start is ignored while busy.
module tb_controller;
  import aidac_pkg::*;
  localparam int NIN = 4, NOUT = 2, IW = 64, OW = 64;
  logic clk = 0, rst_n = 0, vmm_start = 0;
  logic [5:0] ibuf_base = 0, obuf_base = 0;
  logic busy, done, drv_rst, ib_re, ld_en, cap_en, ob_we;
  state_t state;
  sw_t sw;
  logic [5:0] ib_raddr, ob_waddr;
  logic [1:0] ld_word;
  logic       st_word;
  int checks = 0, failures = 0;
  int analog_cycles;

  controller #(.NIN_WORDS(NIN), .NOUT_WORDS(NOUT), .IBUF_WORDS(IW), .OBUF_WORDS(OW)) dut (.*);

  always #5 clk = ~clk;

  // expected control word of cycle c after the start (c = 0: reset cycle)
  typedef struct packed {
    logic drv_rst, ib_re, ld_en, cap_en, ob_we, done;
    sw_t  sw;
  } ctl_t;

  function automatic ctl_t expected(input int c);
    ctl_t e;
    int a;
    e = '0;
    a = c - (2 + NIN);               // cycle inside the analog part
    if (c == 0) e.drv_rst = 1;
    else if (c <= NIN + 1) begin
      e.ib_re = (c <= NIN);
      e.ld_en = (c >= 2);
    end else if (a < 3)  begin e.sw.s1 = 1; e.sw.en = 1; end
    else if (a < 6)  begin e.sw.s1 = 1; e.sw.s2 = 1; end
    else if (a < 9)  e.sw.rl = 1;
    else if (a < 11) e.sw.s0 = 1;
    else if (a < 13) begin e.sw.s0 = 1; e.sw.s3 = 1; e.sw.s4 = (a == 12); end
    else if (a < 20) begin
      e.sw.s0 = 1; e.sw.s3 = 1; e.sw.s4 = 1; e.sw.tae = 1; e.cap_en = (a == 19);
    end else begin
      e.ob_we = 1; e.done = (a == 20 + NOUT - 1);
    end
    return e;
  endfunction

  task automatic run(input int ib, input int ob);
    ctl_t got, exp;
    int c;
    @(negedge clk);
    ibuf_base = 6'(ib); obuf_base = 6'(ob); vmm_start = 1;
    @(negedge clk);
    vmm_start = 1;                       // held: must be ignored while busy
    ibuf_base = 6'(ib + 7);
    analog_cycles = 0;
    c = 0;
    do begin
      got = {drv_rst, ib_re, ld_en, cap_en, ob_we, done, sw};
      exp = expected(c);
      checks++;
      if (got !== exp || !busy) begin
        failures++;
        $display("FAIL cycle %0d: got %b expected %b busy=%b", c, got, exp, busy);
      end
      if (ib_re) begin
        checks++;
        if (ib_raddr !== 6'(ib + c - 1)) begin failures++; $display("FAIL raddr %0d", ib_raddr); end
      end
      if (ld_en) begin
        checks++;
        if (ld_word !== 2'(c - 2)) begin failures++; $display("FAIL ld_word %0d", ld_word); end
      end
      if (ob_we) begin
        checks++;
        if (ob_waddr !== 6'(ob + c - (2 + NIN + 20)) || st_word !== 1'(c - (2 + NIN + 20))) begin
          failures++; $display("FAIL ob_waddr %0d st_word %0d", ob_waddr, st_word);
        end
      end
      if (sw.s1 || sw.s2 || sw.rl || sw.s0 || sw.s3) analog_cycles++;
      vmm_start = 0;
      c++;
      @(negedge clk);
    end while (c < 200 && !(c > 1 && exp.done));
    // latency: reset + loads + 20 analog cycles + stores
    checks += 2;
    if (c !== 2 + NIN + 20 + NOUT) begin failures++; $display("FAIL latency %0d", c); end
    if (analog_cycles !== 20) begin failures++; $display("FAIL analog cycles %0d", analog_cycles); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++;
    if (busy || sw !== '0) begin failures++; $display("FAIL not idle after reset"); end
    run(0, 0);
    run(32, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
