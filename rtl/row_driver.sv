// row_driver: gate-controlled row driver between horizontally adjacent macros.
//
// In the architecture a row driver is four inverters: a cross-coupled pair
// that forms a fast latch, then two output inverters, one driving the next
// macro and one, power-gated by EN, driving the local macro; a switch S
// clears the latch during the reset phase. This model keeps that structure
// for an N-bit row input:
//   * q is the latch (level-sensitive, transparent while le is high);
//   * s clears it (reset phase);
//   * to_post = q feeds the next macro's driver, so a chain of drivers whose
//     le is high together is transparent end to end;
//   * to_local = q while en is high, else 0 (the gated inverter is off).
// The latch is intended: it is the paper's storage element. The le strobe
// and the N-bit width (one 1-bit driver per input bit) are this design's
// choice. No clock; the latch opens when le is high.
module row_driver #(
  parameter int WIDTH = 8
) (
  input  logic             s,
  input  logic             le,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] to_post,
  output logic [WIDTH-1:0] to_local
);

  logic [WIDTH-1:0] q;

  always_latch begin
    if (s)       q = '0;
    else if (le) q = d;
  end

  assign to_post  = q;
  assign to_local = en ? q : '0;

endmodule
