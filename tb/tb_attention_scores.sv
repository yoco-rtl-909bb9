// tb_attention_scores: the attention-score product Q K^T of a transformer,
// computed on a reduced core (2 x 2 macros of 8 rows x 4 CBs: 16 inputs,
// 8 outputs) as a tiled workload.
// K^T (d_k = 16 rows, 16 keys) is stored as weights: keys 0-7 in cluster
// bit 0, keys 8-15 in cluster bit 1. Every one of 16 query vectors is
// written to the input buffer once (ping-pong between its two slots) and
// multiplied twice, switching wsel between the two key tiles, so each query
// yields all 16 scores. Each score code is checked against
//   floor(256 * q . k / (255 * 255 * d_k))   (one below accepted).
// Queries and keys are unsigned 8-bit, as the core computes; the sizes are
// this test's choice.
module tb_attention_scores;
  import aidac_pkg::*;
  localparam int MROWS = 2, MCOLS = 2, ROWS = 8, COLS = 32, NBIT = 8, CL = 8;
  localparam int BUS = 64, IBW = 4, OBW = 2;
  localparam int NCB = COLS / NBIT, DK = MROWS * ROWS, NOUT = MCOLS * NCB;
  localparam int VPW = BUS / NBIT, NIN_WORDS = DK / VPW;
  localparam int NTOK = 16, NKEY = 16, NTILE = NKEY / NOUT;
  localparam int unsigned TK = 100000;

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

  logic [7:0] q [NTOK][DK];
  logic [7:0] k [NKEY][DK];
  logic [7:0] score [NTOK][NKEY];
  int checks = 0, failures = 0, vmms = 0;

  aidac_core #(.MROWS(MROWS), .MCOLS(MCOLS), .ROWS(ROWS), .COLS(COLS), .NBIT(NBIT),
               .CLUSTER(CL), .BUS(BUS), .IBUF_WORDS(IBW), .OBUF_WORDS(OBW)) dut (.*);

  for (genvar o = 0; o < NOUT; o++) begin : g_tdc
    tdc_model #(.NBIT(NBIT), .FS_FS(MROWS * TK)) u_tdc (
      .en(tdc_en), .t_start(tdc_start[o]), .t_stop(tdc_stop[o]), .code(tdc_code[o]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NTOK; t++) for (int d = 0; d < DK; d++) q[t][d] = 8'($urandom);
    for (int n = 0; n < NKEY; n++) for (int d = 0; d < DK; d++) k[n][d] = 8'($urandom);
    // K^T into the weights: row d of tile s, output o = key s*NOUT + o
    for (int s = 0; s < NTILE; s++)
      for (int mr = 0; mr < MROWS; mr++)
        for (int mc = 0; mc < MCOLS; mc++)
          for (int r = 0; r < ROWS; r++) begin
            logic [COLS-1:0] row;
            for (int c = 0; c < NCB; c++)
              for (int b = 0; b < NBIT; b++)
                row[c*NBIT + b] = k[s*NOUT + mc*NCB + c][mr*ROWS + r][b];
            @(negedge clk);
            w_we = 1; w_macro = 2'(mr * MCOLS + mc); w_row = 3'(r); w_set = 3'(s); w_data = row;
          end
    @(negedge clk) w_we = 0;
    for (int t = 0; t < NTOK; t++) begin
      int slot;
      slot = t % 2;
      for (int w = 0; w < NIN_WORDS; w++) begin
        @(negedge clk);
        ib_we = 1; ib_waddr = 2'(slot * NIN_WORDS + w);
        for (int l = 0; l < VPW; l++) ib_wdata[l*NBIT +: NBIT] = q[t][w*VPW + l];
      end
      @(negedge clk) ib_we = 0;
      for (int s = 0; s < NTILE; s++) begin
        wsel = 3'(s);
        ibuf_base = 2'(slot * NIN_WORDS); obuf_base = 1'(s); vmm_start = 1;
        @(negedge clk) vmm_start = 0;
        while (!done) @(negedge clk);
        @(negedge clk);
        vmms++;
        ob_re = 1; ob_raddr = 1'(s);
        @(negedge clk) ob_re = 0;
        for (int o = 0; o < NOUT; o++) score[t][s*NOUT + o] = ob_rdata[o*NBIT +: NBIT];
      end
    end
    for (int t = 0; t < NTOK; t++)
      for (int n = 0; n < NKEY; n++) begin
        longint unsigned dot, ideal;
        dot = 0;
        for (int d = 0; d < DK; d++) dot += longint'(q[t][d]) * longint'(k[n][d]);
        ideal = (dot * 256) / (longint'(255) * 255 * DK);
        checks++;
        if (!(score[t][n] == 8'(ideal) || (ideal > 0 && score[t][n] == 8'(ideal - 1)))) begin
          failures++;
          $display("FAIL score q%0d k%0d: got %0d ideal %0d", t, n, score[t][n], ideal);
        end
      end
    checks++;
    if (vmms != NTOK * NTILE) begin failures++; $display("FAIL ran %0d VMMs", vmms); end
    $display("%0d x %0d scores from %0d VMMs over %0d weight tiles", NTOK, NKEY, vmms, NTILE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
