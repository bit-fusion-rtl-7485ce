// Pooling unit: max pooling under one column of the array.
//
// The paper places a pooling unit under every column but does not describe
// it. Here pooling is a running maximum kept in the output buffer: for a step
// marked pool_max, the result is the column value itself on the first step of
// an output (start) and otherwise the larger of the column value and the
// stored value. A pooling window is thus walked by the loop nest, one window
// element per step. For other steps the accumulator's sum passes unchanged.
// Combinational.
module pooling_unit
  import bf_pkg::*;
(
  input  octl_t              ctl,
  input  logic signed [31:0] psum,   // column value of this step
  input  logic signed [31:0] old,    // stored output
  input  logic signed [31:0] sum,    // accumulator result
  output logic signed [31:0] out
);
  always_comb begin
    if (!ctl.pool_max)  out = sum;
    else if (ctl.start) out = psum;
    else                out = (psum > old) ? psum : old;
  end
endmodule
