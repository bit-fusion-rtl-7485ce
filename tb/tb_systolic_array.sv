// Systolic array check on a 4 x 3 array: buffers are filled with random words
// through the write port, then back-to-back compute steps with random slice
// indices are issued for several bitwidth pairs (including 16-bit, which takes
// several beats per step). Every column result is compared with a dot product
// over all rows computed here from the same words, and must arrive exactly
// ROWS + 2 + c cycles after the step's last beat.
module tb_systolic_array;
  import bf_pkg::*;
  localparam int R = 4, C = 3, IBD = 16, WBD = 8, MW = 128, L = MW / 32;
  logic clk = 0, rst_n = 0;
  fu_cfg_t cfg;
  beat_t issue_beat;
  logic [15:0] issue_i_idx, issue_w_idx, buf_waddr, buf_wbeat;
  logic ib_we, wb_we;
  logic [MW-1:0] buf_wdata;
  logic signed [31:0] col_psum [C];
  logic col_valid [C];
  logic [31:0] ibuf_reads, wbuf_reads;
  logic [31:0] ib [R][IBD];
  logic [31:0] wb [R*C][WBD];
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint expq [C][$];
  longint tq [C][$];

  systolic_array #(.ROWS(R), .COLS(C), .IB_DEPTH(IBD), .WB_DEPTH(WBD), .MEM_W(MW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int ew(int code);
    case (code) 0: return 1; 1, 5: return 2; 2, 6: return 4; 3, 7: return 8; default: return 16; endcase
  endfunction
  function automatic bit sg(int code); return code inside {1, 2, 3, 4}; endfunction
  function automatic longint elem(logic [31:0] s, int idx, int w, bit signed_);
    longint v;
    v = (s >> (idx * w)) & ((64'd1 << w) - 1);
    if (signed_ && v[w-1]) v = v - (64'd1 << w);
    return v;
  endfunction

  // results at the bottom of each column
  always @(negedge clk) if (rst_n)
    for (int c = 0; c < C; c++)
      if (col_valid[c]) begin
        checks++;
        if (expq[c].size() == 0) begin
          failures++; $display("FAIL unexpected result col %0d", c);
        end else begin
          longint e, t;
          e = expq[c].pop_front(); t = tq[c].pop_front();
          if (col_psum[c] != 32'(e)) begin
            failures++; $display("FAIL col %0d got=%0d exp=%0d", c, col_psum[c], 32'(e));
          end
          checks++;
          if (cyc != t + R + 2 + c) begin
            failures++; $display("FAIL col %0d latency %0d exp %0d", c, cyc - t, R + 2 + c);
          end
        end
      end

  initial begin
    static int codes_i [6] = '{1, 7, 6, 4, 0, 3};
    static int codes_w [6] = '{1, 5, 2, 3, 4, 4};
    issue_beat = '0; issue_i_idx = 0; issue_w_idx = 0;
    ib_we = 0; wb_we = 0; buf_waddr = 0; buf_wbeat = 0; buf_wdata = 0;
    cfg = make_cfg(BW_2S, BW_2S);
    repeat (2) @(posedge clk); rst_n = 1;
    // fill buffers
    for (int a = 0; a < IBD; a++) begin
      @(negedge clk); ib_we = 1; buf_waddr = 16'(a); buf_wbeat = 0;
      for (int k = 0; k < L; k++) begin
        buf_wdata[32*k +: 32] = $urandom;
        if (k < R) ib[k][a] = buf_wdata[32*k +: 32];
      end
    end
    @(negedge clk); ib_we = 0;
    for (int a = 0; a < WBD; a++)
      for (int g = 0; g < (R * C + L - 1) / L; g++) begin
        @(negedge clk); wb_we = 1; buf_waddr = 16'(a); buf_wbeat = 16'(g);
        for (int k = 0; k < L; k++) begin
          buf_wdata[32*k +: 32] = $urandom;
          if (g * L + k < R * C) wb[g * L + k][a] = buf_wdata[32*k +: 32];
        end
      end
    @(negedge clk); wb_we = 0;

    for (int t = 0; t < 6; t++) begin
      int ci, cw, wi, ww, np, nph, spwi, spww;
      ci = codes_i[t]; cw = codes_w[t];
      cfg = make_cfg(bw_e'(ci), bw_e'(cw));
      wi = ew(ci); ww = ew(cw);
      np = 1 << cfg.lg_p; nph = cfg_phases(cfg);
      spwi = 1 << cfg.lg_spw_i; spww = 1 << cfg.lg_spw_w;
      for (int s = 0; s < 12; s++) begin
        int ii, wi_;
        ii = $urandom_range(IBD * spwi - 1); wi_ = $urandom_range(WBD * spww - 1);
        for (int c = 0; c < C; c++) begin
          longint e;
          e = 0;
          for (int r = 0; r < R; r++) begin
            logic [31:0] xs, wsl;
            xs  = ib[r][ii / spwi] >> ((ii % spwi) * (32 / spwi));
            wsl = wb[r * C + c][wi_ / spww] >> ((wi_ % spww) * (32 / spww));
            for (int p = 0; p < np; p++) e += elem(xs, p, wi, sg(ci)) * elem(wsl, p, ww, sg(cw));
          end
          expq[c].push_back(e);
        end
        for (int ph = 0; ph < nph; ph++) begin
          @(negedge clk);
          issue_beat.valid = 1; issue_beat.phase = 2'(ph); issue_beat.last = (ph == nph - 1);
          issue_i_idx = 16'(ii); issue_w_idx = 16'(wi_);
          if (ph == nph - 1) for (int c = 0; c < C; c++) tq[c].push_back(cyc);
        end
      end
      @(negedge clk); issue_beat = '0;
      repeat (R + C + 4) @(negedge clk);
    end
    for (int c = 0; c < C; c++) begin
      checks++;
      if (expq[c].size() != 0) begin failures++; $display("FAIL missing results col %0d", c); end
    end
    $display("ibuf reads %0d wbuf reads %0d", ibuf_reads, wbuf_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
