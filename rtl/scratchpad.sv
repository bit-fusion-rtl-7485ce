// Scratchpad: one on-chip SRAM buffer of the accelerator.
//
// The same module serves as the input buffer of a row (IBUF), the weight
// buffer of a fusion unit (WBUF) and the output buffer of a column (OBUF).
// One write port and one read port; the read is synchronous (data one cycle
// after rd_en), and a read of the address being written in the same cycle
// returns the old word. The array is not reset, like an SRAM macro. Widths and
// depths are parameters; the 32-bit word follows the paper ("both input and
// weight buffers provide 32 bits per access"), the depths are chosen by the
// top level.
module scratchpad #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
