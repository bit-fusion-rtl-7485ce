// BitBrick: the 2-bit multiplier every Fused-PE is built from.
//
// Each operand arrives as two bits plus a sign bit. With the sign bit set the
// operand is a signed 2-bit number (-2..1), otherwise unsigned (0..3). Both
// operands are extended to 3 bits (the new top bit is the old top bit when the
// sign bit is set, zero otherwise) and multiplied as 3-bit signed numbers into
// a 6-bit signed product. This follows the paper's BitBrick figure; the paper
// draws the 3-bit multiplier as a gate-level array, which is written here as a
// signed multiply and left to synthesis. Purely combinational.
module bitbrick (
  input  logic [1:0]        x,    // x_2b
  input  logic              sx,   // x is signed
  input  logic [1:0]        y,    // y_2b
  input  logic              sy,   // y is signed
  output logic signed [5:0] p     // p_6b
);
  logic signed [2:0] x3, y3;
  always_comb begin
    x3 = {sx & x[1], x};
    y3 = {sy & y[1], y};
    p  = 6'(x3 * y3);
  end
endmodule
