// cd_macro: behavioural model of one charge-domain (C-D) macro.
//
// The macro is a ROWS x COLS crossbar of memory-and-compute cells (MCCs).
// Each MCC holds a capacitor and a cluster of CLUSTER SRAM bits; the bit
// chosen by wsel is the cell's 1-bit weight. One VMM runs through the
// switch phases driven by the controller (sw):
//   I   (S1, EN, not S2)  the cells of row i are split into NBIT groups of
//       1, 2, ..., 2**(NBIT-1) cells; group g is charged to VDD or 0 by bit g
//       of the row input in_local[i];
//   II  (S1, S2)          the groups share charge, so every cell of the row
//       holds V_IN = IN * VDD / (2**NBIT - 1): the row capacitors are the DAC;
//   III (RL, not S1)      every cell whose weight bit is 0 discharges, the
//       others keep V_IN: a 1-bit multiply;
//   IV  (S0, not RL)      the cells of a column share charge:
//       V_col = sum_i V_IN_i * w_ij / ROWS;
//   V   (S3 then S4)      NBIT adjacent columns form a compute block (CB);
//       S3 isolates 2**b cells of the CB's column b and S4 joins those parts,
//       so V_CB = sum_b 2**b * V_col_b / (2**NBIT - 1).
// V_CB therefore equals VDD * sum_i IN_i * W_i / ((2**NBIT-1)**2 * ROWS) with
// W_i the NBIT-bit weight whose bit b sits in column b of the CB.
//
// This is a behavioural model of an analog circuit. Voltages are exact
// fixed-point fractions of VDD (volt_t, see aidac_pkg); each phase's charge
// sharing settles within the clock cycle in which its switch is sampled on,
// rounding down. The arithmetic follows the architecture's equations (2)-(4),
// with the column weights 1:2:...:2**(NBIT-1) of the text (equation (4)
// writes 2**j for j = 1..N, which would not give that ratio). This design's
// own choices: a row has 2**NBIT-1 grouped cells, the remaining cells of a
// row are modelled as following the shared row voltage; the multiply of
// phase III is applied when the columns are shared (the weights must not
// change between III and IV); bit b of a CB's weight is its column b (the x1
// column first); weights are written one row of one cluster bit at a time
// through a plain decoder (wr_*), which the architecture only names.
// Outputs vcb are registers, updated during phase V and held afterwards.
module cd_macro
  import aidac_pkg::*;
#(
  parameter int ROWS    = 128,
  parameter int COLS    = 256,
  parameter int NBIT    = 8,
  parameter int CLUSTER = 8,
  localparam int NCB = COLS / NBIT,
  localparam int RW  = $clog2(ROWS),
  localparam int CSW = $clog2(CLUSTER)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sw_t             sw,
  input  logic [NBIT-1:0] in_local [ROWS],
  input  logic [CSW-1:0]  wsel,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [CSW-1:0]  wr_set,
  input  logic [COLS-1:0] wr_data,
  output volt_t           vcb [NCB]
);

  localparam int unsigned FULL = (1 << NBIT) - 1;

  // weight storage: bit plane p of row r is cluster bit p of every cell of r
  logic [COLS-1:0] plane [ROWS][CLUSTER];
  logic [NBIT-1:0] chg   [ROWS];   // groups charged to VDD in phase I
  volt_t           vrow  [ROWS];   // row voltage after phase II
  volt_t           vcol  [COLS];   // column voltage after phase IV
  logic            mul_done;       // phase III has happened since phase I

  always_ff @(posedge clk) begin
    if (wr_en) plane[wr_row][wr_set] <= wr_data;
  end

  // settled voltages of phases II, IV and V, from the state before them
  volt_t vrow_n [ROWS];
  volt_t vcol_n [COLS];
  volt_t vcb_n  [NCB];

  always_comb begin
    logic [63:0] acc;
    // phase II: charge sharing of the 2**g-cell groups of each row
    for (int i = 0; i < ROWS; i++) begin
      acc = '0;
      for (int g = 0; g < NBIT; g++)
        if (chg[i][g]) acc += 64'(VDD) << g;
      vrow_n[i] = volt_t'(acc / 64'(FULL));
    end
    // phase IV: column charge sharing; after phase III a cell holding
    // weight 0 has discharged
    for (int j = 0; j < COLS; j++) begin
      acc = '0;
      for (int i = 0; i < ROWS; i++)
        if (!mul_done || plane[i][wsel][j]) acc += 64'(vrow[i]);
      vcol_n[j] = volt_t'(acc / 64'(ROWS));
    end
    // phase V: the 2**b-cell part of column b of each CB joined by S4
    for (int c = 0; c < NCB; c++) begin
      acc = '0;
      for (int b = 0; b < NBIT; b++)
        acc += 64'(vcol[c*NBIT + b]) << b;
      vcb_n[c] = volt_t'(acc / 64'(FULL));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mul_done <= 1'b0;
      chg  <= '{default: '0};
      vrow <= '{default: '0};
      vcol <= '{default: '0};
      vcb  <= '{default: '0};
    end else begin
      // phase I: each group charged or discharged by its input bit
      if (sw.s1 && sw.en && !sw.s2) begin
        mul_done <= 1'b0;
        chg      <= in_local;
      end
      if (sw.s1 && sw.s2 && !sw.en) vrow <= vrow_n;       // phase II
      if (sw.rl && !sw.s1) mul_done <= 1'b1;              // phase III
      if (sw.s0 && !sw.rl && !sw.s3) vcol <= vcol_n;      // phase IV
      if (sw.s3 && sw.s4) vcb <= vcb_n;                   // phase V
    end
  end

endmodule
