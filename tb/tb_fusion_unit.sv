// Fusion unit check: for every pair of input/weight bitwidth codes, random
// packed operand slices are run through all temporal phases of a step and the
// registered partial sum is compared with an integer dot product computed
// here from the element widths and signedness. The partial sum must appear one
// cycle after the last phase, and the step must take 1, 2 or 4 phases.
module tb_fusion_unit;
  import bf_pkg::*;
  logic clk = 0, rst_n = 0;
  fu_cfg_t cfg;
  beat_t beat_in, beat_out;
  logic [31:0] in_slice, wt_slice, in_fwd;
  logic signed [31:0] psum_in, psum_out;
  logic psum_vout;
  int checks = 0, failures = 0;
  int cycles = 0;

  fusion_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int ew(int code);
    case (code) 0: return 1; 1, 5: return 2; 2, 6: return 4; 3, 7: return 8; default: return 16; endcase
  endfunction
  function automatic bit sg(int code);
    return code inside {1, 2, 3, 4};
  endfunction
  function automatic int elem(logic [31:0] s, int idx, int w, bit signed_);
    longint v;
    v = (s >> (idx * w)) & ((64'd1 << w) - 1);
    if (signed_ && v[w-1]) v = v - (64'd1 << w);
    return int'(v);
  endfunction

  initial begin
    beat_in = '0; in_slice = '0; wt_slice = '0; psum_in = '0;
    cfg = make_cfg(BW_8S, BW_8S);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ci = 0; ci < 8; ci++)
      for (int cw = 0; cw < 8; cw++)
        for (int rep = 0; rep < 20; rep++) begin
          int wi, ww, chi, chw, np, nph;
          longint expv;
          wi = ew(ci); ww = ew(cw);
          chi = (wi <= 2) ? 1 : (wi >= 8 ? 4 : 2);
          chw = (ww <= 2) ? 1 : (ww >= 8 ? 4 : 2);
          np = 16 / (chi * chw);
          if (np > 32 / wi) np = 32 / wi;
          if (np > 32 / ww) np = 32 / ww;
          nph = (wi == 16 ? 2 : 1) * (ww == 16 ? 2 : 1);
          @(negedge clk);
          cfg = make_cfg(bw_e'(ci), bw_e'(cw));
          in_slice = $urandom; wt_slice = $urandom;
          if (rep == 0) begin in_slice = '1; wt_slice = '1; end
          if (rep == 1) begin in_slice = 32'h80808080; wt_slice = 32'h80808080; end
          psum_in = $urandom;
          expv = longint'(psum_in);
          for (int p = 0; p < np; p++)
            expv += longint'(elem(in_slice, p, wi, sg(ci))) * longint'(elem(wt_slice, p, ww, sg(cw)));
          checks++;
          if (cfg_phases(cfg) != 3'(nph)) begin
            failures++; $display("FAIL phases ci=%0d cw=%0d", ci, cw);
          end
          for (int ph = 0; ph < nph; ph++) begin
            beat_in.valid = 1; beat_in.phase = 2'(ph); beat_in.last = (ph == nph - 1);
            @(negedge clk);
            checks++;
            if (psum_vout != (ph == nph - 1)) begin
              failures++; $display("FAIL vout timing ci=%0d cw=%0d ph=%0d", ci, cw, ph);
            end
          end
          beat_in = '0;
          checks++;
          if (psum_out != 32'(expv)) begin
            failures++;
            $display("FAIL ci=%0d cw=%0d in=%h wt=%h got=%0d exp=%0d", ci, cw, in_slice, wt_slice, psum_out, 32'(expv));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
