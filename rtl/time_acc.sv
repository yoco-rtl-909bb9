// time_acc: behavioural model of one stage of a column time accumulator.
//
// A column time accumulator is a chain of voltage-to-time converters (VTCs),
// one per vertically stacked macro, joined head to tail: when a stage has
// finished its transition it releases the pulse that starts the next one, so
// the stop pulse leaving the last stage is delayed from the start pulse by
// the sum of the stage delays, i.e. proportional to V0 + V1 + ... + VN plus
// the stages' intrinsic delay. A redundant reference chain whose stages see
// 0 V provides the TDC's start pulse and so cancels the intrinsic delay.
//
// This is a behavioural model, not a circuit: the VTC is analog. Pulses are
// represented by a valid bit and their arrival time (femtoseconds, tfs_t);
// the stage adds T0_FS + TK_FS * v / VDD to the time of its input pulse.
// The linear law follows the architecture (T_OUT proportional to the sum of
// the voltages); the split of the 113 ps stage latency into 13 ps intrinsic
// delay and 100 ps full-scale gain is this design's choice. Combinational:
// the stage output follows its inputs while en (phase VI) is high.
module time_acc
  import aidac_pkg::*;
#(
  parameter int unsigned T0_FS = 13000,
  parameter int unsigned TK_FS = 100000
) (
  input  logic  en,
  input  logic  start,
  input  tfs_t  t_in,
  input  volt_t v,
  output logic  stop,
  output tfs_t  t_out
);

  logic [63:0] prod;
  tfs_t        gain;

  assign prod  = 64'(v) * 64'(TK_FS);
  assign gain  = prod[VFRAC +: $bits(tfs_t)];
  assign stop  = en && start;
  assign t_out = stop ? t_in + tfs_t'(T0_FS) + gain : '0;

endmodule
