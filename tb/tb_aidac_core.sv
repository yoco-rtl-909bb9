// tb_aidac_core: end-to-end test of a reduced core (2 x 2 macros of 8 rows x
// 4 compute blocks, 64-bit buffer words) with behavioural TDCs.
// Each VMM writes an input vector to the input buffer, runs the core and
// reads the output buffer; every output code is compared with the ideal
//   floor(256 * sum_i IN_i * W_io / (255 * 255 * NIN))
// computed here from the vectors (the analog chain rounds down, so the code
// may be one below). Covered and counted: all six phases, the driver reset,
// switching the active cluster bit (wsel), both input-buffer slots and two
// output-buffer slots, TDC saturation at full scale (all inputs and weights
// 255), an all-zero vector, and the VMM latency.
module tb_aidac_core;
  import aidac_pkg::*;
  localparam int MROWS = 2, MCOLS = 2, ROWS = 8, COLS = 32, NBIT = 8, CL = 8;
  localparam int BUS = 64, IBW = 4, OBW = 2;
  localparam int NCB = COLS / NBIT, NIN = MROWS * ROWS, NOUT = MCOLS * NCB;
  localparam int VPW = BUS / NBIT, NIN_WORDS = NIN / VPW, NOUT_WORDS = NOUT / VPW;
  localparam int unsigned TK = 100000;
  localparam int LATENCY = 1 + NIN_WORDS + 1 + 20 + NOUT_WORDS;

  logic clk = 0, rst_n = 0;
  logic vmm_start = 0, busy, done;
  logic [1:0] ibuf_base = 0;
  logic       obuf_base = 0;
  logic [2:0] wsel = 0;
  logic ib_we = 0, ob_re = 0;
  logic [1:0] ib_waddr = 0;
  logic [BUS-1:0] ib_wdata = 0, ob_rdata;
  logic ob_raddr = 0;
  logic w_we = 0;
  logic [1:0] w_macro = 0;
  logic [2:0] w_row = 0, w_set = 0;
  logic [COLS-1:0] w_data = 0;
  logic tdc_en;
  logic [31:0] tdc_start [NOUT], tdc_stop [NOUT];
  logic [NBIT-1:0] tdc_code [NOUT];

  logic [7:0] wgt [CL][NIN][NOUT];
  logic [7:0] vin [NIN];
  int checks = 0, failures = 0;
  int n_phase [6] = '{default: 0};
  int n_reset = 0, n_wsel_switch = 0, n_sat = 0, n_zero = 0;
  int n_islot [2], n_oslot [2];

  aidac_core #(.MROWS(MROWS), .MCOLS(MCOLS), .ROWS(ROWS), .COLS(COLS), .NBIT(NBIT),
               .CLUSTER(CL), .BUS(BUS), .IBUF_WORDS(IBW), .OBUF_WORDS(OBW)) dut (.*);

  for (genvar o = 0; o < NOUT; o++) begin : g_tdc
    tdc_model #(.NBIT(NBIT), .FS_FS(MROWS * TK)) u_tdc (
      .en(tdc_en), .t_start(tdc_start[o]), .t_stop(tdc_stop[o]), .code(tdc_code[o]));
  end

  always #5 clk = ~clk;

  // mechanism counters
  always @(posedge clk) begin
    if (rst_n && dut.state >= ST_PH1 && dut.state <= ST_PH6)
      n_phase[int'(dut.state) - int'(ST_PH1)]++;
    if (rst_n && dut.drv_rst) n_reset++;
  end

  task automatic load_weights(input int set, input int mode);   // 0 random, 1 all 255
    for (int mr = 0; mr < MROWS; mr++)
      for (int mc = 0; mc < MCOLS; mc++)
        for (int r = 0; r < ROWS; r++) begin
          logic [COLS-1:0] row;
          for (int c = 0; c < NCB; c++) begin
            logic [7:0] w;
            w = (mode == 1) ? 8'hFF : 8'($urandom);
            wgt[set][mr*ROWS + r][mc*NCB + c] = w;
            for (int b = 0; b < NBIT; b++) row[c*NBIT + b] = w[b];
          end
          @(negedge clk);
          w_we = 1; w_macro = 2'(mr * MCOLS + mc); w_row = 3'(r); w_set = 3'(set); w_data = row;
        end
    @(negedge clk) w_we = 0;
  endtask

  task automatic run_vmm(input int set, input int islot, input int oslot, input int mode);
    int cyc;
    // input vector: 0 random, 1 all 255, 2 all zero
    for (int i = 0; i < NIN; i++)
      vin[i] = (mode == 1) ? 8'hFF : (mode == 2) ? 8'h00 : 8'($urandom);
    for (int w = 0; w < NIN_WORDS; w++) begin
      @(negedge clk);
      ib_we = 1; ib_waddr = 2'(islot * NIN_WORDS + w);
      for (int l = 0; l < VPW; l++) ib_wdata[l*NBIT +: NBIT] = vin[w*VPW + l];
    end
    @(negedge clk);
    ib_we = 0;
    if (3'(set) != wsel) n_wsel_switch++;
    wsel = 3'(set);
    ibuf_base = 2'(islot * NIN_WORDS); obuf_base = 1'(oslot); vmm_start = 1;
    n_islot[islot]++; n_oslot[oslot]++;
    @(negedge clk);
    vmm_start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != LATENCY) begin failures++; $display("FAIL latency %0d exp %0d", cyc, LATENCY); end
    @(negedge clk);
    // read back and compare
    for (int w = 0; w < NOUT_WORDS; w++) begin
      ob_re = 1; ob_raddr = 1'(oslot + w);
      @(negedge clk);
      ob_re = 0;
      for (int l = 0; l < VPW; l++) begin
        int o;
        longint unsigned num, ideal;
        logic [7:0] got;
        o = w * VPW + l;
        num = 0;
        for (int i = 0; i < NIN; i++) num += longint'(vin[i]) * longint'(wgt[set][i][o]);
        ideal = (num * 256) / (longint'(255) * 255 * NIN);
        if (ideal > 255) ideal = 255;
        got = ob_rdata[l*NBIT +: NBIT];
        if (ideal == 255 && num == longint'(255) * 255 * NIN) n_sat++;
        if (num == 0) n_zero++;
        checks++;
        if (!(got == 8'(ideal) || (ideal > 0 && ideal < 255 && got == 8'(ideal - 1)))) begin
          failures++;
          $display("FAIL out %0d: got %0d ideal %0d", o, got, ideal);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights(0, 0);
    load_weights(5, 0);
    load_weights(7, 1);
    run_vmm(0, 0, 0, 0);
    run_vmm(5, 1, 1, 0);
    run_vmm(0, 1, 0, 0);
    run_vmm(7, 0, 1, 1);    // full scale: saturates the TDC
    run_vmm(5, 0, 0, 2);    // zero vector
    run_vmm(5, 1, 1, 0);
    // every mechanism must have happened
    for (int p = 0; p < 6; p++) begin
      checks++;
      if (n_phase[p] == 0) begin failures++; $display("FAIL phase %0d never ran", p + 1); end
    end
    checks += 7;
    if (n_reset == 0)       begin failures++; $display("FAIL no driver reset"); end
    if (n_wsel_switch < 2)  begin failures++; $display("FAIL wsel never switched"); end
    if (n_sat == 0)         begin failures++; $display("FAIL no saturation"); end
    if (n_zero == 0)        begin failures++; $display("FAIL no zero vector"); end
    if (n_islot[0] == 0 || n_islot[1] == 0) begin failures++; $display("FAIL input slots"); end
    if (n_oslot[0] == 0 || n_oslot[1] == 0) begin failures++; $display("FAIL output slots"); end
    if (n_phase[5] != 6 * 7) begin failures++; $display("FAIL phase VI cycles %0d", n_phase[5]); end
    $display("phases I-VI cycles: %0d %0d %0d %0d %0d %0d; driver resets %0d; wsel switches %0d; saturated outputs %0d; zero outputs %0d",
             n_phase[0], n_phase[1], n_phase[2], n_phase[3], n_phase[4], n_phase[5],
             n_reset, n_wsel_switch, n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
