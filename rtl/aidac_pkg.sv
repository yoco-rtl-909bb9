// aidac_pkg: types and constants shared by the AiDAC core.
//
// The analog quantities of the core are carried as unsigned fixed-point
// integers so that the models stay exact and deterministic:
//   * a voltage is a fraction of the supply, volt_t, with VDD = 2**VFRAC
//     (VFRAC = 24 gives about 54 nV per step at a 0.9 V supply);
//   * a time is an integer number of femtoseconds, tfs_t.
// sw_t bundles the switch and enable controls that the controller drives into
// every charge-domain macro during the six phases of the analog cycle
// (S1, S2, EN, RL, S0, S3, S4 as named in the architecture, plus TAE, the
// time-accumulator and TDC enable of phase VI).
// The numeric encodings here are this design's own choice.
package aidac_pkg;

  localparam int VFRAC = 24;
  typedef logic [VFRAC:0] volt_t;          // 0 .. VDD
  localparam volt_t VDD = volt_t'(1) << VFRAC;

  typedef logic [31:0] tfs_t;              // time in femtoseconds

  typedef struct packed {
    logic s1;   // cell capacitor to input line
    logic s2;   // links the input-line groups of a row
    logic en;   // tri-state input gates and local row-driver output
    logic rl;   // read line: in-cell 1-bit multiply
    logic s0;   // cell capacitor to column output line
    logic s3;   // splits each column into its weighted part
    logic s4;   // joins the weighted parts of the columns of a CB
    logic tae;  // time accumulators and TDCs enabled
  } sw_t;

  typedef enum logic [3:0] {
    ST_IDLE, ST_RESET, ST_LOAD,
    ST_PH1, ST_PH2, ST_PH3, ST_PH4, ST_PH5, ST_PH6,
    ST_STORE
  } state_t;

endpackage
