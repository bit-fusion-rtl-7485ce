// Activation unit: the activation function under one column of the array.
//
// The paper names the unit but not its function; this design implements a
// rectified linear unit (max(0, x)), applied only on the final step of an
// output (fin) of a compute instruction that asks for it (relu), so partial
// sums are never clipped. Otherwise the value passes unchanged. Combinational.
module activation_unit
  import bf_pkg::*;
(
  input  octl_t              ctl,
  input  logic signed [31:0] in,
  output logic signed [31:0] out
);
  always_comb out = (ctl.relu && ctl.fin && in < 0) ? 32'sd0 : in;
endmodule
