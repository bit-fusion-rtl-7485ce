// Column accumulator: adds a column's partial sum to the output stored for it.
//
// Sits under each column of the array (the adder with a feedback loop in the
// paper's Fig. 3). One cycle before a column result arrives, the output
// control for that step (octl_early) names the OBUF address; the accumulator
// reads that word so it is ready with the result. The value last written to
// OBUF is kept in a feedback register: when the next result targets the same
// address, the register is used instead of the SRAM word, which still holds
// the old value. `start` marks the first contribution to an output, which then
// starts from zero instead of the stored value.
//
// Outputs, valid in the cycle of psum_valid: `old` (the stored value), `sum`
// (old + psum, or psum at start) and the step's control `ctl`. The written
// value comes back on wb_* in the same cycle (after pooling/activation).
module accumulator
  import bf_pkg::*;
#(
  parameter int unsigned AW = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  octl_t              octl_early,
  output logic               obuf_re,
  output logic [AW-1:0]      obuf_raddr,
  input  logic signed [31:0] obuf_rdata,
  input  logic               psum_valid,
  input  logic signed [31:0] psum,
  input  logic               wb_valid,
  input  logic [AW-1:0]      wb_addr,
  input  logic signed [31:0] wb_data,
  output octl_t              ctl,
  output logic signed [31:0] old,
  output logic signed [31:0] sum
);
  logic               fb_v;
  logic [AW-1:0]      fb_addr;
  logic signed [31:0] fb_data;

  assign obuf_re    = octl_early.valid;
  assign obuf_raddr = AW'(octl_early.addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl     <= '0;
      fb_v    <= 1'b0;
      fb_addr <= '0;
      fb_data <= '0;
    end else begin
      ctl <= octl_early;
      if (wb_valid) begin
        fb_v    <= 1'b1;
        fb_addr <= wb_addr;
        fb_data <= wb_data;
      end else begin
        fb_v    <= 1'b0;
      end
    end
  end

  always_comb begin
    old = (fb_v && fb_addr == AW'(ctl.addr)) ? fb_data : obuf_rdata;
    sum = ctl.start ? psum : old + psum;
  end

  a_ctl_align: assert property (@(posedge clk) disable iff (!rst_n) psum_valid == ctl.valid);
endmodule
