// Self-checking test of the activation unit: random values under every
// combination of relu and fin; ReLU must apply only when both are set.
module tb_activation_unit;
  import bf_pkg::*;
  octl_t ctl;
  logic signed [31:0] in, out, exp_v;
  int checks = 0, failures = 0;
  activation_unit dut (.ctl(ctl), .in(in), .out(out));
  initial begin : watchdog
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    ctl = '0;
    for (int i = 0; i < 400; i++) begin
      ctl = '0;
      ctl.valid = 1'b1;
      ctl.relu = 1'($urandom);
      ctl.fin  = 1'($urandom);
      in = $signed($urandom);
      #1;
      exp_v = (ctl.relu && ctl.fin && in < 0) ? 0 : in;
      checks++;
      if (out !== exp_v) begin
        failures++;
        $display("FAIL relu=%0b fin=%0b in=%0d got %0d", ctl.relu, ctl.fin, in, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
