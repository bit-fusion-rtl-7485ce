// Self-checking test of the pooling unit: random column values, stored values
// and accumulator results under every combination of pool_max and start; the
// output is compared with a reference selection.
module tb_pooling_unit;
  import bf_pkg::*;
  octl_t ctl;
  logic signed [31:0] psum, old, sum, out, exp_v;
  int checks = 0, failures = 0;
  pooling_unit dut (.ctl(ctl), .psum(psum), .old(old), .sum(sum), .out(out));
  initial begin : watchdog
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    ctl = '0;
    for (int i = 0; i < 400; i++) begin
      ctl = '0;
      ctl.valid = 1'b1;
      ctl.pool_max = 1'($urandom);
      ctl.start = 1'($urandom);
      psum = $signed($urandom) >>> ($urandom % 20);
      old  = $signed($urandom) >>> ($urandom % 20);
      sum  = $signed($urandom);
      #1;
      if (!ctl.pool_max) exp_v = sum;
      else if (ctl.start) exp_v = psum;
      else exp_v = (psum > old) ? psum : old;
      checks++;
      if (out !== exp_v) begin
        failures++;
        $display("FAIL pool=%0b start=%0b psum=%0d old=%0d got %0d", ctl.pool_max, ctl.start, psum, old, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
