// controller: sequences one vector-matrix multiplication (VMM) of the core.
//
// On vmm_start the controller
//   1. RESET  one cycle with drv_rst high: the switch S of every row driver
//             clears its latch;
//   2. LOAD   reads NIN_WORDS words from the input buffer, starting at
//             ibuf_base, and strobes each into the row-driver latches of the
//             rows it holds (ld_en/ld_word, one cycle after the read);
//   3. PH1..PH6 the analog cycle, with the switch levels of the architecture:
//             I   input            S1 on, EN on, S2 off
//             II  input conversion S1 on, S2 on (EN off: tri-states closed)
//             III 1-bit multiply   S1 off, RL high
//             IV  parallel add     RL low, S0 on
//             V   N-bit weighting  S3 on, after one cycle S4 on
//             VI  output conv.     S3, S4 held, TAE (time accumulators and
//                                  TDCs) on; cap_en in its last cycle
//   4. STORE  writes NOUT_WORDS words of captured TDC codes to the output
//             buffer from obuf_base; done is high with the last write.
// busy is high from the cycle after vmm_start until done. vmm_start is
// ignored while busy.
//
// The phase order and switch levels follow the architecture's timing
// description. The phase lengths are this design's choice, counted in cycles
// of the 1 GHz digital clock: 3+3+3+2+2+7 = 20 cycles, one period of the
// 50 MHz analog clock, so a VMM's analog part takes exactly one analog cycle;
// phases I-V (13 cycles) match the 13 ns quoted for a macro. Keeping S0 on
// through phases V and VI (so the columns stay on their output lines while
// S3/S4 act) and turning S2 off after phase II are also this design's choice.
// The reset/load/store steps around the analog cycle are not detailed in the
// architecture and are this design's own.
module controller
  import aidac_pkg::*;
#(
  parameter int NIN_WORDS  = 32,
  parameter int NOUT_WORDS = 8,
  parameter int IBUF_WORDS = 64,
  parameter int OBUF_WORDS = 64,
  parameter int PH1_CYC = 3,
  parameter int PH2_CYC = 3,
  parameter int PH3_CYC = 3,
  parameter int PH4_CYC = 2,
  parameter int PH5_CYC = 2,
  parameter int PH6_CYC = 7,
  localparam int IAW = $clog2(IBUF_WORDS),
  localparam int OAW = $clog2(OBUF_WORDS),
  localparam int LWW = (NIN_WORDS  > 1) ? $clog2(NIN_WORDS)  : 1,
  localparam int SWW = (NOUT_WORDS > 1) ? $clog2(NOUT_WORDS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           vmm_start,
  input  logic [IAW-1:0] ibuf_base,
  input  logic [OAW-1:0] obuf_base,
  output logic           busy,
  output logic           done,
  output state_t         state,
  output sw_t            sw,
  output logic           drv_rst,
  output logic           ib_re,
  output logic [IAW-1:0] ib_raddr,
  output logic           ld_en,
  output logic [LWW-1:0] ld_word,
  output logic           cap_en,
  output logic           ob_we,
  output logic [OAW-1:0] ob_waddr,
  output logic [SWW-1:0] st_word
);

  logic [7:0]     cnt;
  logic [IAW-1:0] ibase;
  logic [OAW-1:0] obase;
  logic           last;

  // length of the current state minus one
  always_comb begin
    unique case (state)
      ST_LOAD:  last = (cnt == 8'(NIN_WORDS));
      ST_PH1:   last = (cnt == 8'(PH1_CYC - 1));
      ST_PH2:   last = (cnt == 8'(PH2_CYC - 1));
      ST_PH3:   last = (cnt == 8'(PH3_CYC - 1));
      ST_PH4:   last = (cnt == 8'(PH4_CYC - 1));
      ST_PH5:   last = (cnt == 8'(PH5_CYC - 1));
      ST_PH6:   last = (cnt == 8'(PH6_CYC - 1));
      ST_STORE: last = (cnt == 8'(NOUT_WORDS - 1));
      default:  last = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      cnt   <= '0;
      ibase <= '0;
      obase <= '0;
    end else begin
      cnt <= last ? '0 : cnt + 8'd1;
      unique case (state)
        ST_IDLE:  begin
                    cnt <= '0;
                    if (vmm_start) begin
                      state <= ST_RESET;
                      ibase <= ibuf_base;
                      obase <= obuf_base;
                    end
                  end
        ST_RESET: state <= ST_LOAD;
        ST_LOAD:  if (last) state <= ST_PH1;
        ST_PH1:   if (last) state <= ST_PH2;
        ST_PH2:   if (last) state <= ST_PH3;
        ST_PH3:   if (last) state <= ST_PH4;
        ST_PH4:   if (last) state <= ST_PH5;
        ST_PH5:   if (last) state <= ST_PH6;
        ST_PH6:   if (last) state <= ST_STORE;
        ST_STORE: if (last) state <= ST_IDLE;
        default:  state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    sw = '0;
    unique case (state)
      ST_PH1:  begin sw.s1 = 1'b1; sw.en = 1'b1; end
      ST_PH2:  begin sw.s1 = 1'b1; sw.s2 = 1'b1; end
      ST_PH3:  sw.rl = 1'b1;
      ST_PH4:  sw.s0 = 1'b1;
      ST_PH5:  begin sw.s0 = 1'b1; sw.s3 = 1'b1; sw.s4 = (cnt != 8'd0); end
      ST_PH6:  begin sw.s0 = 1'b1; sw.s3 = 1'b1; sw.s4 = 1'b1; sw.tae = 1'b1; end
      default: ;
    endcase
  end

  assign busy     = (state != ST_IDLE);
  assign drv_rst  = (state == ST_RESET);
  assign ib_re    = (state == ST_LOAD) && (cnt < 8'(NIN_WORDS));
  assign ib_raddr = ibase + IAW'(cnt);
  assign ld_en    = (state == ST_LOAD) && (cnt != 8'd0);
  assign ld_word  = LWW'(cnt - 8'd1);
  assign cap_en   = (state == ST_PH6) && last;
  assign ob_we    = (state == ST_STORE);
  assign ob_waddr = obase + OAW'(cnt);
  assign st_word  = SWW'(cnt);
  assign done     = (state == ST_STORE) && last;

  // the analog switches must never short the input line to the output line:
  // S1 and S0 are never on together, nor RL with S1; S4 only joins columns
  // that S3 has split (all switches are off in reset)
  always_ff @(posedge clk) begin
    assert (!(sw.s1 && sw.s0)) else $error("S1 and S0 on together");
    assert (!(sw.s1 && sw.rl)) else $error("S1 and RL on together");
    assert (!sw.s4 || sw.s3)   else $error("S4 on without S3");
  end

endmodule
