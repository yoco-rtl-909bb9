// aidac_core: one AiDAC core, an all-analog multibit VMM engine.
//
// MROWS x MCOLS charge-domain macros (8 x 8) each hold ROWS x COLS cells
// (128 x 256). The core multiplies a 1024-element vector of 8-bit inputs by a
// 1024 x 256 matrix of 8-bit weights in one analog cycle:
//   * the input vector is read from the input buffer into the row drivers;
//     the drivers of a row form a horizontal chain across the MCOLS macros,
//     so each input reaches every macro of its macro row;
//   * every macro computes, for each of its COLS/NBIT = 32 compute blocks
//     (CBs), a voltage proportional to its 128-row partial dot product;
//   * for each CB position a column time accumulator chains one VTC stage per
//     macro down the MROWS macros, adding the partial sums as time; a
//     reference chain per macro column (stages at 0 V) gives the start pulse;
//   * the 256 TDCs (MCOLS x 32) convert stop minus start into 8-bit codes,
//     which are captured and written to the output buffer.
// Output o = mc*(COLS/NBIT) + cb is therefore about
//   256 * sum_{i<1024} IN_i * W_{i,o} / (255 * 255 * 1024),
// i.e. the dot product normalised to the full scale of 8-bit operands.
//
// Interfaces (all on clk, active-low asynchronous rst_n):
//   host buffers : ib_we/ib_waddr/ib_wdata write the input buffer (input i is
//                  byte i % (BUS/8) of word ibuf_base + i / (BUS/8));
//                  ob_re/ob_raddr read the output buffer one cycle later
//                  (output o is byte o % (BUS/8) of word obuf_base + ...).
//   weights      : w_we writes row w_row, cluster bit w_set of macro w_macro
//                  (= macro row * MCOLS + macro column); bit j of w_data is
//                  column j, and weight bit b of CB c lives in column
//                  c*NBIT + b. wsel picks the cluster bit used in compute.
//   control      : vmm_start (while not busy) runs one VMM; done pulses with
//                  the last output-buffer write.
//   TDC          : the TDCs are external converters. In phase VI tdc_en is
//                  high and tdc_start/tdc_stop give the arrival times (fs) of
//                  the reference and accumulated pulses of each output; the
//                  TDC returns tdc_code, sampled in the last cycle of phase VI.
// A VMM takes 1 + (NIN_WORDS+1) + 20 + NOUT_WORDS cycles of the 1 GHz clock:
// 62 at the default size, of which 20 (one 50 MHz analog cycle) are analog.
//
// The structure, sizes and data flow follow the architecture. The buffer
// word layout, the weight-write port, the TDC hand-off and the cluster-bit
// select are this design's own choices.
module aidac_core
  import aidac_pkg::*;
#(
  parameter int MROWS      = 8,
  parameter int MCOLS      = 8,
  parameter int ROWS       = 128,
  parameter int COLS       = 256,
  parameter int NBIT       = 8,
  parameter int CLUSTER    = 8,
  parameter int BUS        = 256,
  parameter int IBUF_WORDS = 64,
  parameter int OBUF_WORDS = 64,
  parameter int unsigned T0_FS = 13000,
  parameter int unsigned TK_FS = 100000,
  localparam int NCB        = COLS / NBIT,
  localparam int NIN        = MROWS * ROWS,
  localparam int NOUT       = MCOLS * NCB,
  localparam int VPW        = BUS / NBIT,
  localparam int NIN_WORDS  = NIN / VPW,
  localparam int NOUT_WORDS = NOUT / VPW,
  localparam int NMAC       = MROWS * MCOLS,
  localparam int IAW        = $clog2(IBUF_WORDS),
  localparam int OAW        = $clog2(OBUF_WORDS),
  localparam int MW         = (NMAC > 1) ? $clog2(NMAC) : 1,
  localparam int RW         = $clog2(ROWS),
  localparam int CSW        = $clog2(CLUSTER)
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            vmm_start,
  input  logic [IAW-1:0]  ibuf_base,
  input  logic [OAW-1:0]  obuf_base,
  input  logic [CSW-1:0]  wsel,
  output logic            busy,
  output logic            done,
  // input buffer, host side
  input  logic            ib_we,
  input  logic [IAW-1:0]  ib_waddr,
  input  logic [BUS-1:0]  ib_wdata,
  // output buffer, host side
  input  logic            ob_re,
  input  logic [OAW-1:0]  ob_raddr,
  output logic [BUS-1:0]  ob_rdata,
  // weight write
  input  logic            w_we,
  input  logic [MW-1:0]   w_macro,
  input  logic [RW-1:0]   w_row,
  input  logic [CSW-1:0]  w_set,
  input  logic [COLS-1:0] w_data,
  // external TDCs
  output logic            tdc_en,
  output logic [31:0]     tdc_start [NOUT],
  output logic [31:0]     tdc_stop  [NOUT],
  input  logic [NBIT-1:0] tdc_code  [NOUT]
);

  localparam int LWW = (NIN_WORDS  > 1) ? $clog2(NIN_WORDS)  : 1;
  localparam int SWW = (NOUT_WORDS > 1) ? $clog2(NOUT_WORDS) : 1;

  state_t         state;
  sw_t            sw;
  logic           drv_rst, ib_re, ld_en, cap_en, ob_we;
  logic [IAW-1:0] ib_raddr;
  logic [OAW-1:0] ob_waddr;
  logic [LWW-1:0] ld_word;
  logic [SWW-1:0] st_word;
  logic [BUS-1:0] ib_rdata, ob_wdata;

  controller #(
    .NIN_WORDS(NIN_WORDS), .NOUT_WORDS(NOUT_WORDS),
    .IBUF_WORDS(IBUF_WORDS), .OBUF_WORDS(OBUF_WORDS)
  ) u_ctrl (
    .clk, .rst_n, .vmm_start, .ibuf_base, .obuf_base, .busy, .done,
    .state, .sw, .drv_rst, .ib_re, .ib_raddr, .ld_en, .ld_word, .cap_en,
    .ob_we, .ob_waddr, .st_word
  );

  io_buffer #(.WORDS(IBUF_WORDS), .WIDTH(BUS)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  io_buffer #(.WORDS(OBUF_WORDS), .WIDTH(BUS)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata)
  );

  // ---------------------------------------------------------------- drivers
  // the driver of row r in macro column mc takes its input from the driver
  // of the same row in macro column mc-1 (g_col[mc-1].post)
  logic [NBIT-1:0] drv_local [MROWS][MCOLS][ROWS];

  for (genvar mr = 0; mr < MROWS; mr++) begin : g_drow
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      localparam int GI = mr * ROWS + r;          // global input index
      logic le;
      assign le = ld_en && (ld_word == LWW'(GI / VPW));
      for (genvar mc = 0; mc < MCOLS; mc++) begin : g_col
        logic [NBIT-1:0] d, post;
        if (mc == 0) begin : g_first
          assign d = ib_rdata[(GI % VPW) * NBIT +: NBIT];
        end else begin : g_next
          assign d = g_col[mc-1].post;
        end
        row_driver #(.WIDTH(NBIT)) u_drv (
          .s(drv_rst), .le(le), .en(sw.en), .d(d),
          .to_post(post), .to_local(drv_local[mr][mc][r])
        );
      end
    end
  end

  // ----------------------------------------------------------------- macros
  volt_t vcb [MROWS][MCOLS][NCB];

  for (genvar mr = 0; mr < MROWS; mr++) begin : g_mrow
    for (genvar mc = 0; mc < MCOLS; mc++) begin : g_mcol
      cd_macro #(.ROWS(ROWS), .COLS(COLS), .NBIT(NBIT), .CLUSTER(CLUSTER)) u_mac (
        .clk, .rst_n, .sw, .in_local(drv_local[mr][mc]), .wsel,
        .wr_en(w_we && (w_macro == MW'(mr * MCOLS + mc))),
        .wr_row(w_row), .wr_set(w_set), .wr_data(w_data),
        .vcb(vcb[mr][mc])
      );
    end
  end

  // ---------------------------------------------------- time accumulators
  // chain k of macro column mc: stage mr converts vcb[mr][mc][k] and starts
  // from the pulse of stage mr-1 (g_stage[mr-1]); chain NCB is the reference
  // chain (0 V), shared by the macro column.
  logic ref_vld [MCOLS];

  for (genvar mc = 0; mc < MCOLS; mc++) begin : g_tcol
    for (genvar k = 0; k <= NCB; k++) begin : g_chain
      for (genvar mr = 0; mr < MROWS; mr++) begin : g_stage
        volt_t v;
        logic  vld_in, vld_out;
        tfs_t  t_in, t_out;
        if (k < NCB) begin : g_cb
          assign v = vcb[mr][mc][k];
        end else begin : g_ref
          assign v = '0;
        end
        if (mr == 0) begin : g_top
          assign vld_in = sw.tae;
          assign t_in   = '0;
        end else begin : g_below
          assign vld_in = g_stage[mr-1].vld_out;
          assign t_in   = g_stage[mr-1].t_out;
        end
        time_acc #(.T0_FS(T0_FS), .TK_FS(TK_FS)) u_ta (
          .en(sw.tae), .start(vld_in), .t_in(t_in), .v(v),
          .stop(vld_out), .t_out(t_out)
        );
      end
    end
    for (genvar k = 0; k < NCB; k++) begin : g_tdc
      assign tdc_start[mc*NCB + k] = g_chain[NCB].g_stage[MROWS-1].t_out;
      assign tdc_stop[mc*NCB + k]  = g_chain[k].g_stage[MROWS-1].t_out;
    end
    assign ref_vld[mc] = g_chain[NCB].g_stage[MROWS-1].vld_out;
  end

  assign tdc_en = sw.tae && ref_vld[0];

  // ------------------------------------------------ result capture, store
  logic [NBIT-1:0] result [NOUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NOUT; o++) result[o] <= '0;
    end else if (cap_en) begin
      for (int o = 0; o < NOUT; o++) result[o] <= tdc_code[o];
    end
  end

  always_comb begin
    for (int l = 0; l < VPW; l++)
      ob_wdata[l*NBIT +: NBIT] = result[int'(st_word) * VPW + l];
  end

  // the buffer words must hold whole vectors
  initial begin
    assert (NIN % VPW == 0 && NOUT % VPW == 0)
      else $error("BUS/NBIT must divide the input and output vector lengths");
    assert (NIN_WORDS <= IBUF_WORDS && NOUT_WORDS <= OBUF_WORDS)
      else $error("buffers too small for one VMM");
  end

endmodule
