// tb_mac_transfer: the two transfer curves of an 8-bit MAC with 128 input
// channels, on one full-size charge-domain macro (128 x 256 cells, 32 CBs).
//   * weight scan: every input is 255 and the weights of all 128 rows sweep
//     0..255 (32 weight values per VMM, one per CB, 8 VMMs);
//   * input scan: every weight is 255 and the inputs of all rows sweep
//     0..255 (one input value per VMM, 256 VMMs).
// In both cases the ideal CB voltage is code / 255 * VDD. The test checks
// each point against it (within 4 steps of 2**-24 VDD, rounding down), that
// each curve is monotonic, and reports the largest deviation as a fraction of
// full scale. Analog non-idealities are not modelled, so the curves come out
// ideal.
module tb_mac_transfer;
  import aidac_pkg::*;
  localparam int ROWS = 128, COLS = 256, NBIT = 8, NCB = COLS / NBIT;
  logic clk = 0, rst_n = 0;
  sw_t sw = '0;
  logic [NBIT-1:0] in_local [ROWS];
  logic [2:0] wsel = 0, wr_set = 0;
  logic wr_en = 0;
  logic [6:0] wr_row = 0;
  logic [COLS-1:0] wr_data = 0;
  volt_t vcb [NCB];
  int checks = 0, failures = 0;
  longint max_dev = 0;
  volt_t prev;

  cd_macro dut (.*);

  always #5 clk = ~clk;

  task automatic phase(input sw_t s, input int n);
    sw = s;
    repeat (n) @(negedge clk);
  endtask

  task automatic vmm();
    sw_t s;
    s = '0; s.s1 = 1; s.en = 1;  phase(s, 3);
    s = '0; s.s1 = 1; s.s2 = 1;  phase(s, 3);
    s = '0; s.rl = 1;            phase(s, 3);
    s = '0; s.s0 = 1;            phase(s, 2);
    s.s3 = 1;                    phase(s, 1);
    s.s4 = 1;                    phase(s, 8);
    phase('0, 1);
  endtask

  // weights of cluster bit p: CB c holds value f(c) in every row
  task automatic write_weights(input int p, input int base, input bit all_ones);
    logic [COLS-1:0] row;
    for (int c = 0; c < NCB; c++)
      for (int b = 0; b < NBIT; b++)
        row[c*NBIT + b] = all_ones ? 1'b1 : 1'(((base + c) >> b) & 1);
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1; wr_set = 3'(p); wr_row = 7'(r); wr_data = row;
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic check_point(input volt_t got, input int code, input string what);
    longint ideal, dev;
    ideal = (longint'(code) << VFRAC) / 255;
    dev = ideal - longint'(got);
    if (dev < 0) dev = -dev;
    if (dev > max_dev) max_dev = dev;
    checks++;
    if (!(longint'(got) <= ideal && longint'(got) + 4 >= ideal)) begin
      failures++;
      $display("FAIL %s code %0d: got %0d ideal %0d", what, code, got, ideal);
    end
    checks++;
    if (code > 0 && got < prev) begin
      failures++;
      $display("FAIL %s not monotonic at %0d", what, code);
    end
    prev = got;
  endtask

  initial begin
    int code;
    for (int i = 0; i < ROWS; i++) in_local[i] = 8'hFF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weight scan, input 255
    prev = '0;
    for (int v = 0; v < 256 / NCB; v++) begin
      write_weights(1, v * NCB, 0);
      wsel = 3'd1;
      vmm();
      for (int c = 0; c < NCB; c++) check_point(vcb[c], v * NCB + c, "weight scan");
    end
    // input scan, weight 255
    write_weights(4, 0, 1);
    wsel = 3'd4;
    prev = '0;
    for (code = 0; code < 256; code++) begin
      for (int i = 0; i < ROWS; i++) in_local[i] = 8'(code);
      vmm();
      check_point(vcb[code % NCB], code, "input scan");
    end
    $display("largest deviation from the ideal transfer curve: %0d / 2^%0d of VDD",
             max_dev, VFRAC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
