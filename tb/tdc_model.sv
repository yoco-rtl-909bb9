// tdc_model: behavioural stand-in for the core's 8-bit time-to-digital
// converters, used by the testbenches only (the real TDC is an existing,
// silicon-proven converter, not part of this design).
//
// While en is high it converts stop - start (femtoseconds) into
// floor(dt * 2**NBIT / FS_FS), saturating at 2**NBIT - 1; FS_FS is the time
// that maps to full scale. Outputs 0 while en is low. Combinational.
module tdc_model #(
  parameter int          NBIT  = 8,
  parameter int unsigned FS_FS = 800000
) (
  input  logic            en,
  input  logic [31:0]     t_start,
  input  logic [31:0]     t_stop,
  output logic [NBIT-1:0] code
);
  logic [63:0] dt, q;
  always_comb begin
    dt = (t_stop > t_start) ? 64'(t_stop - t_start) : 64'd0;
    q  = (dt << NBIT) / 64'(FS_FS);
    if (!en)                      code = '0;
    else if (q > 64'((1 << NBIT) - 1)) code = '1;
    else                          code = NBIT'(q);
  end
endmodule
