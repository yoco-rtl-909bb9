// tb_cd_macro: drives a small charge-domain macro (8 rows, 4 compute blocks
// of 8 columns) through the six switch phases and compares each CB voltage
// with the ideal charge-sharing result
//   V_CB = VDD * sum_i IN_i * W_i / (255 * 255 * ROWS),
// computed here from the inputs and 8-bit weights. The model rounds down in
// three sharing steps, so it may be up to a few steps of 2**-24 VDD below.
// Also checks: choosing another cluster bit (wsel) changes the weights used;
// without the phase-III multiply every cell keeps its charge, giving
// VDD * sum_i IN_i / ROWS; outputs hold after the VMM.
module tb_cd_macro;
  import aidac_pkg::*;
  localparam int ROWS = 8, COLS = 32, NBIT = 8, CL = 8, NCB = COLS / NBIT;
  logic clk = 0, rst_n = 0;
  sw_t sw = '0;
  logic [NBIT-1:0] in_local [ROWS];
  logic [2:0] wsel = 0, wr_set = 0;
  logic wr_en = 0;
  logic [2:0] wr_row = 0;
  logic [COLS-1:0] wr_data = 0;
  volt_t vcb [NCB];
  logic [7:0] wgt [CL][ROWS][NCB];
  int checks = 0, failures = 0;

  cd_macro #(.ROWS(ROWS), .COLS(COLS), .NBIT(NBIT), .CLUSTER(CL)) dut (.*);

  always #5 clk = ~clk;

  task automatic phase(input sw_t s, input int n);
    sw = s;
    repeat (n) @(negedge clk);
  endtask

  task automatic vmm(input bit do_mul);
    sw_t s;
    s = '0; s.s1 = 1; s.en = 1;              phase(s, 3);   // I
    s = '0; s.s1 = 1; s.s2 = 1;              phase(s, 3);   // II
    s = '0; s.rl = do_mul;                   phase(s, 3);   // III
    s = '0; s.s0 = 1;                        phase(s, 2);   // IV
    s = '0; s.s0 = 1; s.s3 = 1;              phase(s, 1);   // V
    s.s4 = 1;                                phase(s, 1);
    s.tae = 1;                               phase(s, 7);   // VI
    phase('0, 2);
  endtask

  task automatic check_cb(input int set, input bit do_mul, input string what);
    for (int c = 0; c < NCB; c++) begin
      longint unsigned num, den, ideal;
      num = 0;
      for (int i = 0; i < ROWS; i++)
        num += longint'(in_local[i]) * (do_mul ? longint'(wgt[set][i][c]) : 255);
      den = 255 * 255 * ROWS;
      ideal = (num << VFRAC) / den;
      checks++;
      if (!(vcb[c] <= volt_t'(ideal) && vcb[c] + 4 >= volt_t'(ideal))) begin
        failures++;
        $display("FAIL %s cb %0d: got %0d ideal %0d", what, c, vcb[c], ideal);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < ROWS; i++) in_local[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // write random 8-bit weights into every cluster bit
    for (int p = 0; p < CL; p++)
      for (int i = 0; i < ROWS; i++) begin
        logic [COLS-1:0] row;
        for (int c = 0; c < NCB; c++) begin
          wgt[p][i][c] = 8'($urandom);
          if (p == 0 && i == 0) wgt[p][i][c] = 8'hFF;
          for (int b = 0; b < NBIT; b++) row[c*NBIT + b] = wgt[p][i][c][b];
        end
        wr_en = 1; wr_set = 3'(p); wr_row = 3'(i); wr_data = row;
        @(negedge clk);
      end
    wr_en = 0;
    for (int n = 0; n < 12; n++) begin
      int set;
      set = n % CL;
      wsel = 3'(set);
      for (int i = 0; i < ROWS; i++)
        in_local[i] = (n == 0) ? 8'hFF : (n == 1) ? 8'h00 : 8'($urandom);
      vmm(1);
      check_cb(set, 1, "vmm");
      in_local[0] = ~in_local[0];          // inputs only matter in phase I
      @(negedge clk);
      in_local[0] = ~in_local[0];
      check_cb(set, 1, "hold");
    end
    // without the multiply every cell keeps its row voltage
    for (int i = 0; i < ROWS; i++) in_local[i] = 8'($urandom);
    vmm(0);
    check_cb(0, 0, "no multiply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
