// tb_aidac_full: one complete VMM on the core at its full default size:
// 8 x 8 macros of 128 x 256 cells, a 1024-element 8-bit input vector and a
// 1024 x 256 matrix of 8-bit weights, 256 behavioural TDCs. Loads the weights
// of one cluster bit into all 64 macros, writes the vector to the input
// buffer, runs the VMM, checks its 62-cycle latency (20 of them the analog
// cycle) and compares all 256 outputs with
//   floor(256 * sum_i IN_i * W_io / (255 * 255 * 1024))
// (one below is accepted: the analog chain rounds down).
// Inputs are drawn from 200..255 and the weights of output o from
// max(0, o-30)..o, so the 256 outputs sweep most of the code range instead
// of all landing near the mean.
module tb_aidac_full;
  import aidac_pkg::*;
  localparam int MROWS = 8, MCOLS = 8, ROWS = 128, COLS = 256, NBIT = 8;
  localparam int BUS = 256, NCB = COLS / NBIT, NIN = MROWS * ROWS, NOUT = MCOLS * NCB;
  localparam int VPW = BUS / NBIT, NIN_WORDS = NIN / VPW, NOUT_WORDS = NOUT / VPW;
  localparam int unsigned TK = 100000;
  localparam int LATENCY = 1 + NIN_WORDS + 1 + 20 + NOUT_WORDS;

  logic clk = 0, rst_n = 0;
  logic vmm_start = 0, busy, done;
  logic [5:0] ibuf_base = 0, obuf_base = 0;
  logic [2:0] wsel = 0;
  logic ib_we = 0, ob_re = 0;
  logic [5:0] ib_waddr = 0, ob_raddr = 0;
  logic [BUS-1:0] ib_wdata = 0, ob_rdata;
  logic w_we = 0;
  logic [5:0] w_macro = 0;
  logic [6:0] w_row = 0;
  logic [2:0] w_set = 0;
  logic [COLS-1:0] w_data = 0;
  logic tdc_en;
  logic [31:0] tdc_start [NOUT], tdc_stop [NOUT];
  logic [NBIT-1:0] tdc_code [NOUT];

  logic [7:0] wgt [NIN][NOUT];
  logic [7:0] vin [NIN];
  int checks = 0, failures = 0, exact = 0;

  aidac_core dut (.*);

  for (genvar o = 0; o < NOUT; o++) begin : g_tdc
    tdc_model #(.NBIT(NBIT), .FS_FS(MROWS * TK)) u_tdc (
      .en(tdc_en), .t_start(tdc_start[o]), .t_stop(tdc_stop[o]), .code(tdc_code[o]));
  end

  always #5 clk = ~clk;

  initial begin
    int cyc, lo, hi;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wsel = 3'd2;
    for (int mr = 0; mr < MROWS; mr++)
      for (int mc = 0; mc < MCOLS; mc++)
        for (int r = 0; r < ROWS; r++) begin
          logic [COLS-1:0] row;
          for (int c = 0; c < NCB; c++) begin
            logic [7:0] w;
            w = 8'($urandom_range(mc*NCB + c, (mc*NCB + c > 30) ? mc*NCB + c - 30 : 0));
            wgt[mr*ROWS + r][mc*NCB + c] = w;
            for (int b = 0; b < NBIT; b++) row[c*NBIT + b] = w[b];
          end
          @(negedge clk);
          w_we = 1; w_macro = 6'(mr * MCOLS + mc); w_row = 7'(r); w_set = 3'd2; w_data = row;
        end
    for (int i = 0; i < NIN; i++) vin[i] = 8'($urandom_range(255, 200));
    for (int w = 0; w < NIN_WORDS; w++) begin
      @(negedge clk);
      w_we = 0;
      ib_we = 1; ib_waddr = 6'(32 + w);
      for (int l = 0; l < VPW; l++) ib_wdata[l*NBIT +: NBIT] = vin[w*VPW + l];
    end
    @(negedge clk);
    ib_we = 0;
    ibuf_base = 6'd32; obuf_base = 6'd16; vmm_start = 1;
    @(negedge clk);
    vmm_start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != LATENCY) begin failures++; $display("FAIL latency %0d exp %0d", cyc, LATENCY); end
    @(negedge clk);
    lo = 255; hi = 0;
    for (int w = 0; w < NOUT_WORDS; w++) begin
      ob_re = 1; ob_raddr = 6'(16 + w);
      @(negedge clk);
      ob_re = 0;
      for (int l = 0; l < VPW; l++) begin
        int o;
        longint unsigned num, ideal;
        logic [7:0] got;
        o = w * VPW + l;
        num = 0;
        for (int i = 0; i < NIN; i++) num += longint'(vin[i]) * longint'(wgt[i][o]);
        ideal = (num * 256) / (longint'(255) * 255 * NIN);
        got = ob_rdata[l*NBIT +: NBIT];
        if (int'(got) < lo) lo = int'(got);
        if (int'(got) > hi) hi = int'(got);
        checks++;
        if (got == 8'(ideal)) exact++;
        else if (!(ideal > 0 && got == 8'(ideal - 1))) begin
          failures++;
          $display("FAIL out %0d: got %0d ideal %0d", o, got, ideal);
        end
      end
    end
    $display("outputs %0d..%0d, %0d of %0d exactly the ideal code, latency %0d cycles",
             lo, hi, exact, NOUT, cyc);
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
