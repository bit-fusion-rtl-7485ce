// Exhaustive check of the BitBrick: all 4 x 4 operand pairs under all four
// sign-bit settings, against an integer reference product.
module tb_bitbrick;
  logic [1:0] x, y;
  logic sx, sy;
  logic signed [5:0] p;
  int checks = 0, failures = 0;
  bitbrick dut (.x, .sx, .y, .sy, .p);
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int s = 0; s < 4; s++)
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++) begin
          int ra, rb;
          x = 2'(a); y = 2'(b); sx = s[0]; sy = s[1];
          ra = (sx && a >= 2) ? a - 4 : a;
          rb = (sy && b >= 2) ? b - 4 : b;
          #1;
          checks++;
          if (int'(p) != ra * rb) begin
            failures++;
            $display("FAIL x=%0d sx=%0d y=%0d sy=%0d p=%0d exp=%0d", a, sx, b, sy, p, ra * rb);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
