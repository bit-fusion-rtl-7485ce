// Self-checking test of the controller alone. A one-block program with a
// three-level loop nest, a ld-mem inside the outer loop whose off-chip address
// moves with that loop, 16-bit x 8-bit operands (two beats per step) and a
// final st-mem is run; a small model answers transfer commands after a few cycles.
// Every issued step (slice indices, OBUF address, start, fin, ReLU, beat
// phases) and every transfer command is compared with the expected sequence
// built from the same nest in plain loops, and the step count, the drain
// before transfers and `done` are checked.
module tb_controller;
  import bf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic imem_we, start, busy, done;
  logic [7:0] imem_waddr;
  logic [31:0] imem_wdata;
  fu_cfg_t cfg;
  beat_t issue_beat;
  logic [15:0] issue_i_idx, issue_w_idx;
  octl_t issue_octl;
  logic dma_start, dma_store, dma_done;
  spad_e dma_spad;
  logic [31:0] dma_mem_addr, instr_count, step_count;
  logic [15:0] dma_nlines;
  int checks = 0, failures = 0;
  int exp_i [$], exp_w [$], exp_o [$], exp_s [$], exp_f [$];
  int exp_dst [$], exp_dsp [$], exp_dad [$], exp_dnl [$];
  int last_issue = -1000, cyc = 0, ph_expect = 0, dma_wait = 0;
  logic [31:0] prog [32];
  int np = 0;

  always #5 clk = ~clk;

  controller #(.IMEM_DEPTH(256), .DRAIN(20)) dut (.*);

  function automatic logic [31:0] ins(opcode_e op, logic [5:0] spec, logic [4:0] id, logic [15:0] imm);
    return {op, spec, id, imm};
  endfunction

  initial begin : watchdog
    #200000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // transfer model: done five cycles after start
  always @(posedge clk) begin
    cyc++;
    dma_done <= 1'b0;
    if (dma_wait > 0) begin
      dma_wait--;
      if (dma_wait == 0) dma_done <= 1'b1;
    end
    if (rst_n && dma_start) begin
      dma_wait = 5;
      checks++;
      if (exp_dst.size() == 0) begin
        failures++; $display("FAIL unexpected transfer");
      end else begin
        int st, sp, ad, nl;
        st = exp_dst.pop_front(); sp = exp_dsp.pop_front();
        ad = exp_dad.pop_front(); nl = exp_dnl.pop_front();
        if (dma_store != st || int'(dma_spad) != sp || dma_mem_addr != 32'(ad)
            || dma_nlines != 16'(nl) || cyc - last_issue < 20) begin
          failures++;
          $display("FAIL transfer st=%0b sp=%0d addr=%0d n=%0d (exp %0d %0d %0d %0d)",
                   dma_store, dma_spad, dma_mem_addr, dma_nlines, st, sp, ad, nl);
        end
      end
    end
    if (rst_n && issue_beat.valid) begin
      last_issue = cyc;
      checks++;
      if (int'(issue_beat.phase) != ph_expect || issue_beat.last != (ph_expect == 1)) begin
        failures++; $display("FAIL beat phase %0d last %0b", issue_beat.phase, issue_beat.last);
      end
      ph_expect = issue_beat.last ? 0 : ph_expect + 1;
    end
    if (rst_n && issue_octl.valid) begin
      checks++;
      if (exp_i.size() == 0) begin
        failures++; $display("FAIL unexpected step");
      end else begin
        int ei, ew, eo, es, ef;
        ei = exp_i.pop_front(); ew = exp_w.pop_front(); eo = exp_o.pop_front();
        es = exp_s.pop_front(); ef = exp_f.pop_front();
        if (issue_i_idx != 16'(ei) || issue_w_idx != 16'(ew) || issue_octl.addr != 16'(eo)
            || issue_octl.start != 1'(es) || issue_octl.fin != 1'(ef) || !issue_octl.relu
            || issue_octl.pool_max || !issue_beat.last) begin
          failures++;
          $display("FAIL step i=%0d w=%0d o=%0d s=%0b f=%0b (exp %0d %0d %0d %0d %0d)",
                   issue_i_idx, issue_w_idx, issue_octl.addr, issue_octl.start, issue_octl.fin,
                   ei, ew, eo, es, ef);
        end
      end
    end
  end

  initial begin
    imem_we = 1'b0; imem_waddr = '0; imem_wdata = '0; start = 1'b0; dma_done = 1'b0;
    for (int i = 0; i < 32; i++) prog[i] = '0;
    prog[np++] = ins(OP_SETUP, {BW_16S, BW_8S}, NO_LOOP, 0);
    prog[np++] = 1000; prog[np++] = 2000; prog[np++] = 3000;
    prog[np++] = ins(OP_GEN_ADDR, {SP_IBUF, GA_BUF_RD}, 0, 10);
    prog[np++] = ins(OP_GEN_ADDR, {SP_IBUF, GA_BUF_RD}, 1, 1);
    prog[np++] = ins(OP_GEN_ADDR, {SP_WBUF, GA_BUF_RD}, 1, 3);
    prog[np++] = ins(OP_GEN_ADDR, {SP_WBUF, GA_BUF_RD}, 2, 1);
    prog[np++] = ins(OP_GEN_ADDR, {SP_OBUF, GA_BUF_WR}, 0, 4);
    prog[np++] = ins(OP_GEN_ADDR, {SP_IBUF, GA_MEM_LD}, 0, 100);
    prog[np++] = ins(OP_LOOP, 6'd0, 0, 3);
    prog[np++] = ins(OP_LD_MEM, {SP_IBUF, BW_16S}, 0, 16);
    prog[np++] = ins(OP_LOOP, 6'd1, 1, 2);
    prog[np++] = ins(OP_LOOP, 6'd2, 2, 4);
    prog[np++] = ins(OP_COMPUTE, FN_RELU, 2, 0);
    prog[np++] = ins(OP_ST_MEM, {SP_OBUF, 3'd0}, NO_LOOP, 3);
    prog[np++] = ins(OP_BLOCK_END, 6'h3F, 5'h1F, 16'hFFFF);
    for (int a = 0; a < 3; a++) begin
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < 4; c++) begin
          exp_i.push_back(10 * a + b); exp_w.push_back(3 * b + c); exp_o.push_back(4 * a);
          exp_s.push_back(b == 0 && c == 0); exp_f.push_back(b == 1 && c == 3);
        end
    end
    for (int a = 0; a < 3; a++) begin
      exp_dst.push_back(0); exp_dsp.push_back(SP_IBUF); exp_dad.push_back(1000 + 100 * a); exp_dnl.push_back(8);
    end
    exp_dst.push_back(1); exp_dsp.push_back(SP_OBUF); exp_dad.push_back(2000); exp_dnl.push_back(3);

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < np; i++) begin
      @(posedge clk);
      imem_we <= 1'b1; imem_waddr <= 8'(i); imem_wdata <= prog[i];
    end
    @(posedge clk);
    imem_we <= 1'b0; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    checks++;
    if (exp_i.size() != 0 || exp_dst.size() != 0 || step_count != 32'd24) begin
      failures++;
      $display("FAIL left: %0d steps, %0d transfers; step_count=%0d", exp_i.size(), exp_dst.size(), step_count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
