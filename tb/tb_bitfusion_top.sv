// End-to-end test of the accelerator at reduced size (4 x 4 fusion units).
//
// Four instruction blocks, chained by block-end, each run one fully connected
// layer on a batch: load inputs and weights from the behavioural memory,
// a two-level loop nest (batch, then input slices) of compute steps, store
// of the outputs. The blocks differ in operand bitwidths and functions:
//   1: 4-bit signed inputs x 2-bit signed weights, ReLU, two computes per
//      loop body (back-to-back steps to one output)
//   2: 16-bit x 8-bit signed (two temporal phases), plain accumulation
//   3: 1-bit inputs x 4-bit signed weights, max pooling with ReLU
//   4: 16-bit x 16-bit signed (four temporal phases), ReLU
// A reference model reads the same memory image, forms every step's column
// sums from the buffer layout and the slice rules, applies the combine and
// activation rules, and is compared with what the accelerator stored.
// Mechanisms that must each occur at least once are counted; one that never
// occurs is a failure.
module tb_bitfusion_top;
  import bf_pkg::*;
  localparam int R = 4, C = 4, IBD = 32, WBD = 16, OBD = 16, MW = 128, L = MW / 32;
  localparam int BPL_I = R * 32 / MW, BPL_W = R * C * 32 / MW, BPL_O = C * 32 / MW;
  localparam int NBLK = 4, B = 4, KS = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic imem_we, start, busy, done;
  logic [7:0] imem_waddr;
  logic [31:0] imem_wdata;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [MW-1:0] mem_req_wdata, mem_rsp_data;
  logic [31:0] instr_count, step_count, ibuf_reads, wbuf_reads, mem_words;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bitfusion_top #(.ROWS(R), .COLS(C), .IB_DEPTH(IBD), .WB_DEPTH(WBD), .OB_DEPTH(OBD),
                  .MEM_W(MW), .IMEM_DEPTH(256)) dut (.*);
  dram_model #(.MEM_W(MW), .WORDS(2048), .LAT(4)) u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_req_ready, .mem_rsp_valid, .mem_rsp_data);

  // ---------------------------------------------------------------- program
  logic [31:0] prog [256];
  int np = 0;
  bw_e blk_bi [NBLK] = '{BW_4S, BW_16S, BW_1U, BW_16S};
  bw_e blk_bw [NBLK] = '{BW_2S, BW_8S, BW_4S, BW_16S};
  logic [5:0] blk_fn [NBLK] = '{FN_RELU, 6'd0, FN_MAX | FN_RELU, FN_RELU};
  int blk_nc [NBLK] = '{2, 1, 1, 1};
  int base_i [NBLK], base_o [NBLK], base_w [NBLK];

  function automatic logic [31:0] ins(opcode_e op, logic [5:0] spec, logic [4:0] id, logic [15:0] imm);
    return {op, spec, id, imm};
  endfunction
  task automatic emit(logic [31:0] w); prog[np] = w; np++; endtask

  task automatic build_block(int k, bit last);
    fu_cfg_t cf;
    int wi, ww, ni, nw;
    cf = make_cfg(blk_bi[k], blk_bw[k]);
    // words per buffer instance
    wi = (B * KS + (1 << cf.lg_spw_i) - 1) >> cf.lg_spw_i;
    ww = (KS + (1 << cf.lg_spw_w) - 1) >> cf.lg_spw_w;
    // element counts giving those words
    ni = wi * 32 / (1 << bw_lg_width(blk_bi[k]));
    nw = ww * 32 / (1 << bw_lg_width(blk_bw[k]));
    emit(ins(OP_SETUP, {blk_bi[k], blk_bw[k]}, NO_LOOP, 16'd0));
    emit(32'(base_i[k])); emit(32'(base_o[k])); emit(32'(base_w[k]));
    emit(ins(OP_GEN_ADDR, {SP_IBUF, GA_BUF_RD}, 5'd0, 16'(KS)));
    emit(ins(OP_GEN_ADDR, {SP_IBUF, GA_BUF_RD}, 5'd1, 16'd1));
    emit(ins(OP_GEN_ADDR, {SP_WBUF, GA_BUF_RD}, 5'd1, 16'd1));
    emit(ins(OP_GEN_ADDR, {SP_OBUF, GA_BUF_WR}, 5'd0, 16'd1));
    emit(ins(OP_WR_BUF,   {SP_OBUF, 3'd0}, NO_LOOP, 16'd0));
    emit(ins(OP_LD_MEM,   {SP_IBUF, blk_bi[k]}, NO_LOOP, 16'(ni)));
    emit(ins(OP_LD_MEM,   {SP_WBUF, blk_bw[k]}, NO_LOOP, 16'(nw)));
    emit(ins(OP_LOOP,     6'd0, 5'd0, 16'(B)));
    emit(ins(OP_LOOP,     6'd1, 5'd1, 16'(KS)));
    for (int j = 0; j < blk_nc[k]; j++) emit(ins(OP_COMPUTE, blk_fn[k], 5'd1, 16'd0));
    emit(ins(OP_ST_MEM,   {SP_OBUF, 3'd0}, NO_LOOP, 16'(B)));
    if (last) emit(ins(OP_BLOCK_END, 6'h3F, 5'h1F, 16'hFFFF));
    else      emit(ins(OP_BLOCK_END, 6'd0, 5'd0, 16'(np + 1)));
  endtask

  // ---------------------------------------------------------------- reference
  function automatic longint elem(bit is_w, int k, int inst, int idx, int p);
    fu_cfg_t cf;
    int lgs, word, s, sw, ew, bitpos, base, bpl;
    logic [MW-1:0] line;
    logic [31:0] v32;
    logic [15:0] raw;
    cf = make_cfg(blk_bi[k], blk_bw[k]);
    lgs = is_w ? cf.lg_spw_w : cf.lg_spw_i;
    ew  = 1 << (is_w ? cf.lg_eww : cf.lg_ewi);
    word = idx >> lgs;
    s = idx & ((1 << lgs) - 1);
    sw = 32 >> lgs;
    bitpos = s * sw + p * ew;
    base = is_w ? base_w[k] : base_i[k];
    bpl = is_w ? BPL_W : BPL_I;
    line = u_mem.mem[base + word * bpl + inst / L];
    v32 = line[32 * (inst % L) +: 32];
    raw = 16'((v32 >> bitpos) & ((32'd1 << ew) - 1));
    if ((is_w ? cf.sgn_w : cf.sgn_i) && raw[ew-1]) return longint'(raw) - (longint'(1) << ew);
    return longint'(raw);
  endfunction

  function automatic longint col_sum(int k, int iidx, int widx, int c);
    fu_cfg_t cf;
    longint s;
    cf = make_cfg(blk_bi[k], blk_bw[k]);
    s = 0;
    for (int r = 0; r < R; r++)
      for (int p = 0; p < (1 << cf.lg_p); p++)
        s += elem(0, k, r, iidx, p) * elem(1, k, r * C + c, widx, p);
    return s;
  endfunction

  // ---------------------------------------------------------------- mechanisms
  localparam int NM = 9;
  string mname [NM] = '{"temporal 2-phase", "temporal 4-phase", "mixed bitwidth",
                        "binary operand", "accumulate onto stored value",
                        "back-to-back forwarding", "max pooling", "ReLU clipping",
                        "memory back-pressure"};
  int mcount [NM];

  always @(posedge clk) if (rst_n) begin
    if (dut.issue_beat.valid && dut.issue_beat.phase == 2'd1 && dut.cfg.t_i != dut.cfg.t_w) mcount[0]++;
    if (dut.issue_beat.valid && dut.issue_beat.phase == 2'd3) mcount[1]++;
    if (dut.issue_beat.valid && dut.cfg.lg_ewi != dut.cfg.lg_eww) mcount[2]++;
    if (dut.issue_beat.valid && dut.cfg.lg_ewi == 3'd0) mcount[3]++;
    if (dut.g_col[0].ctl.valid && !dut.g_col[0].ctl.start && !dut.g_col[0].ctl.pool_max) mcount[4]++;
    if (dut.g_col[0].ctl.valid && dut.g_col[0].u_acc.fb_v
        && 16'(dut.g_col[0].u_acc.fb_addr) == dut.g_col[0].ctl.addr) mcount[5]++;
    if (dut.g_col[0].ctl.valid && dut.g_col[0].ctl.pool_max && !dut.g_col[0].ctl.start
        && dut.g_col[0].old > dut.col_psum[0]) mcount[6]++;
    if (dut.g_col[0].ctl.valid && dut.g_col[0].ctl.relu && dut.g_col[0].ctl.fin
        && dut.g_col[0].pooled < 0) mcount[7]++;
    if (mem_req_valid && !mem_req_ready) mcount[8]++;
  end

  initial begin : watchdog
    #3000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    imem_we = 1'b0; imem_waddr = '0; imem_wdata = '0; start = 1'b0;
    for (int m = 0; m < NM; m++) mcount[m] = 0;
    for (int i = 0; i < 256; i++) prog[i] = '0;
    for (int k = 0; k < NBLK; k++) begin
      base_i[k] = 64 + 256 * k;
      base_w[k] = 128 + 256 * k;
      base_o[k] = 1536 + 64 * k;
    end
    for (int i = 0; i < 1536; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < NBLK; k++) build_block(k, k == NBLK - 1);

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < np; i++) begin
      @(posedge clk);
      imem_we <= 1'b1; imem_waddr <= 8'(i); imem_wdata <= prog[i];
    end
    @(posedge clk);
    imem_we <= 1'b0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);

    // compare every stored output with the reference
    for (int k = 0; k < NBLK; k++) begin
      int bad;
      bad = 0;
      for (int b = 0; b < B; b++)
        for (int c = 0; c < C; c++) begin
          int e, v;       // 32-bit arithmetic, as in the accelerator
          logic [31:0] got;
          e = 0;
          for (int ks = 0; ks < KS; ks++) begin
            v = int'(col_sum(k, b * KS + ks, ks, c));
            for (int j = 0; j < blk_nc[k]; j++) begin
              if (|(blk_fn[k] & FN_MAX)) e = (ks == 0 || v > e) ? v : e;
              else e += v;
            end
          end
          if (|(blk_fn[k] & FN_RELU) && e < 0) e = 0;
          got = u_mem.mem[base_o[k] + b * BPL_O + c / L][32 * (c % L) +: 32];
          checks++;
          if (got !== 32'(e)) begin
            failures++;
            bad++;
            if (bad < 4) $display("FAIL block %0d batch %0d col %0d: got %0d expected %0d",
                                  k, b, c, $signed(got), e);
          end
        end
    end
    // counters
    checks++;
    if (step_count != 32'(B * KS * (blk_nc[0] + blk_nc[1] + blk_nc[2] + blk_nc[3]))) begin
      failures++;
      $display("FAIL step count %0d", step_count);
    end
    checks++;
    if (wbuf_reads >= step_count * R * C) begin
      failures++;
      $display("FAIL weight feed never reused a word (%0d reads)", wbuf_reads);
    end
    for (int m = 0; m < NM; m++) begin
      checks++;
      $display("mechanism %-30s %0d", mname[m], mcount[m]);
      if (mcount[m] == 0) begin
        failures++;
        $display("FAIL mechanism never happened: %s", mname[m]);
      end
    end
    $display("steps=%0d instructions=%0d ibuf_reads=%0d wbuf_reads=%0d mem_words=%0d",
             step_count, instr_count, ibuf_reads, wbuf_reads, mem_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
