// io_buffer: simple two-port SRAM buffer (one write port, one read port).
//
// The core has one of these as its input buffer (input vectors, written by the
// host, read by the controller into the row drivers) and one as its output
// buffer (TDC codes, written by the controller, read by the host). Each is
// 2 KB, organised as 64 words of 256 bits, the access width at which the
// buffer's energy and latency are quoted.
//
// Timing: a write takes effect at the rising clock edge with we high. A read
// with re high returns rdata on the next rising edge; rdata holds its value
// while re is low. A read and a write to the same address in one cycle return
// the old data. Sizes follow the architecture; the port arrangement is this
// design's own choice.
module io_buffer #(
  parameter int WORDS = 64,
  parameter int WIDTH = 256,
  localparam int AW = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
