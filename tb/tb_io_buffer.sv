// tb_io_buffer: checks the two-port buffer against a reference array:
// random writes, reads one cycle later, data held while re is low, and
// read-during-write returning the old word.
module tb_io_buffer;
  localparam int WORDS = 16, WIDTH = 64, AW = 4;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  io_buffer #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    // fill every word
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk) we = 0;
    // random reads
    for (int n = 0; n < 40; n++) begin
      int a;
      a = $urandom_range(WORDS-1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      check(ref_mem[a], "read");
    end
    // hold while re low
    re = 0; raddr = raddr + 1;
    @(negedge clk);
    check(ref_mem[raddr - 1], "hold");
    // read during write: old data, then new data
    re = 1; we = 1; raddr = 3; waddr = 3; wdata = {$urandom, $urandom};
    @(negedge clk);
    check(ref_mem[3], "read-during-write");
    ref_mem[3] = wdata; we = 0;
    @(negedge clk);
    check(ref_mem[3], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
