// Controller: fetches and runs the Bit Fusion instruction blocks.
//
// Instructions are 32 bits: 5-bit opcode, 6-bit operand specification, 5-bit
// loop-id and 16-bit immediate (the paper's instruction-set table). They are
// written into an instruction memory through imem_* before `start`.
//
// A block runs in two passes over the instruction memory, one instruction per
// cycle. The decode pass reads the block up to its block-end: setup (operand
// bitwidths in spec[5:3] for inputs and spec[2:0] for weights, followed by
// three base-address words for inputs, outputs and weights, in that order),
// gen-addr (a stride for one address stream and one loop), rd-buf and
// loop (to learn each loop's nesting level). The execute pass then interprets
// loop, ld-mem, st-mem, compute and block-end and skips the rest.
//
// Loops are structured: a loop instruction (level in spec[2:0], iterations in
// the immediate) opens a loop whose body is the following instructions that
// lie deeper than its level; other instructions name in loop-id the loop whose
// body they belong to (31: none). When an instruction outside the innermost
// open loop is reached, that loop either iterates (jump back to its body) or
// closes. Seven address streams follow the paper's Eq. 4
// (address = base + sum of iteration * stride over the loops): the IBUF and
// WBUF slice indices and the OBUF address of compute steps, the off-chip
// addresses of ld-mem for each scratchpad and of st-mem. They are kept as
// running sums: an iteration adds the loop's stride, closing a loop subtracts
// stride*(iterations-1).
//
// A compute step issues cfg_phases beats (1, 2 or 4 for 16-bit operands) to
// the array with the slice indices, and an output control word with the last
// beat. Loops that do not move the OBUF address (stride 0) are reductions: the
// step is `start` when all open reduction loops are at iteration 0 (unless the
// block reads OBUF with rd-buf, i.e. accumulates onto loaded outputs) and
// `fin` when all are at their last iteration; of several computes in a row,
// only the first can start and only the last can finish an output. compute's spec is the function:
// bit 0 max pooling, bit 1 ReLU. ld-mem (scratchpad type spec[5:3], element
// width spec[2:0], element count per buffer instance in the immediate) and
// st-mem (OBUF lines in the immediate) wait for the array to drain, then run
// on the transfer engine. block-end carries the next block's address in its
// 27 low bits; all ones ends the program (`done`).
//
// Own choices (the paper gives the fields, not their encodings or these
// rules): the numeric encodings, the loop-id rule for non-loop instructions,
// the reduction rule for start/fin, loops with 0 iterations running once, and
// one control action per cycle (a loop body holding one compute issues a
// step every second cycle for narrow operands; two computes in a body issue
// back to back).
module controller
  import bf_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned NLOOP      = 8,     // loop-ids 0 .. NLOOP-1
  parameter int unsigned MAX_DEPTH  = 8,     // nesting levels
  parameter int unsigned DRAIN      = 52,    // cycles for the array to empty
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // program load
  input  logic               imem_we,
  input  logic [IAW-1:0]     imem_waddr,
  input  logic [31:0]        imem_wdata,
  // run control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // to the array
  output fu_cfg_t            cfg,
  output beat_t              issue_beat,
  output logic [15:0]        issue_i_idx,
  output logic [15:0]        issue_w_idx,
  output octl_t              issue_octl,
  // to the transfer engine
  output logic               dma_start,
  output logic               dma_store,
  output spad_e              dma_spad,
  output logic [31:0]        dma_mem_addr,
  output logic [15:0]        dma_nlines,
  input  logic               dma_done,
  // activity
  output logic [31:0]        instr_count,
  output logic [31:0]        step_count
);
  localparam int NS = 7;
  localparam int S_IBR = 0, S_WBR = 1, S_OBW = 2, S_LDI = 3, S_LDW = 4, S_LDO = 5, S_STO = 6;
  localparam int LAW = $clog2(NLOOP);
  localparam int DAW = $clog2(MAX_DEPTH + 1);
  localparam int SAW = $clog2(MAX_DEPTH);

  typedef enum logic [2:0] {C_IDLE, C_DEC, C_EXEC, C_COMP, C_DRAIN, C_DMA, C_FIN} cstate_e;

  logic [31:0]        imem [IMEM_DEPTH];
  cstate_e            state;
  logic [IAW-1:0]     pc, blk_pc;
  logic [1:0]         nbase;           // base-address words still to read
  logic signed [15:0] stride [NS][NLOOP];
  logic [2:0]         lvl_of [NLOOP];
  logic               obuf_rd;
  logic [31:0]        base   [3];      // input, output, weight
  logic [31:0]        acc    [NS];
  bw_e                bw_i, bw_w;
  // loop stack
  logic [DAW-1:0]     top;
  logic [SAW-1:0]     tix, tpush;     // innermost open loop, next free slot
  logic [LAW-1:0]     lid_stk  [MAX_DEPTH];
  logic [15:0]        n_stk    [MAX_DEPTH];
  logic [15:0]        it_stk   [MAX_DEPTH];
  logic [IAW-1:0]     body_stk [MAX_DEPTH];
  // compute step
  logic [1:0]         beat_cnt;
  logic [7:0]         drain_cnt;
  logic               cmd_store;
  spad_e              cmd_spad;
  logic [31:0]        cmd_addr;
  logic [15:0]        cmd_lines;

  instr_t  ins;
  logic    ins_in_loop;
  logic [DAW-1:0] ins_depth;
  logic    st_start, st_fin;
  logic [2:0] nph;

  logic    prev_comp, next_comp;    // neighbouring instruction is also a compute

  assign ins = instr_t'(imem[pc]);
  // several computes in a row update the same outputs: only the first starts
  // them and only the last finishes them
  assign prev_comp = (pc != IAW'(0)) && (imem[pc - IAW'(1)][31:27] == OP_COMPUTE);
  assign next_comp = (imem[pc + IAW'(1)][31:27] == OP_COMPUTE);
  assign cfg = make_cfg(bw_i, bw_w);
  assign nph = cfg_phases(cfg);

  // a compute beat is issued this cycle
  logic       comp_fire, comp_last;
  logic [1:0] cur_phase;
  always_comb begin
    comp_fire = (state == C_COMP) ||
                (state == C_EXEC && ins.op == OP_COMPUTE && !(top != '0 && ins_depth < top));
    cur_phase = (state == C_COMP) ? beat_cnt : 2'd0;
    comp_last = (3'(cur_phase) + 3'd1 == nph);
  end
  assign busy = (state != C_IDLE);
  assign tix   = SAW'(top - DAW'(1));
  assign tpush = SAW'(top);

  always_ff @(posedge clk) if (imem_we) imem[imem_waddr] <= imem_wdata;

  // depth of the current instruction in the loop nest
  always_comb begin
    ins_in_loop = (ins.loop_id != NO_LOOP) && (32'(ins.loop_id) < NLOOP);
    if (ins.op == OP_LOOP)          ins_depth = DAW'(ins.spec[2:0]);
    else if (ins.op == OP_BLOCK_END || !ins_in_loop) ins_depth = '0;
    else                            ins_depth = DAW'(lvl_of[LAW'(ins.loop_id)]) + DAW'(1);
  end

  // first / final step of the outputs addressed now
  always_comb begin
    st_start = !obuf_rd;
    st_fin   = 1'b1;
    for (int k = 0; k < MAX_DEPTH; k++)
      if (DAW'(k) < top && stride[S_OBW][lid_stk[k]] == 16'sd0) begin
        if (it_stk[k] != 16'd0) st_start = 1'b0;
        if (it_stk[k] + 16'd1 < n_stk[k]) st_fin = 1'b0;
      end
  end

  // stream selected by a gen-addr
  function automatic int ga_stream(logic [5:0] spec);
    unique case (ga_kind_e'(spec[2:0]))
      GA_BUF_RD, GA_BUF_WR:
        return (spad_e'(spec[5:3]) == SP_IBUF) ? S_IBR : (spad_e'(spec[5:3]) == SP_WBUF) ? S_WBR : S_OBW;
      GA_MEM_LD:
        return (spad_e'(spec[5:3]) == SP_IBUF) ? S_LDI : (spad_e'(spec[5:3]) == SP_WBUF) ? S_LDW : S_LDO;
      default: return S_STO;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      pc          <= '0;
      blk_pc      <= '0;
      nbase       <= '0;
      obuf_rd     <= 1'b0;
      bw_i        <= BW_8S;
      bw_w        <= BW_8S;
      top         <= '0;
      beat_cnt    <= '0;
      drain_cnt   <= '0;
      cmd_store   <= 1'b0;
      cmd_spad    <= SP_IBUF;
      cmd_addr    <= '0;
      cmd_lines   <= '0;
      done        <= 1'b0;
      issue_beat  <= '0;
      issue_i_idx <= '0;
      issue_w_idx <= '0;
      issue_octl  <= '0;
      dma_start   <= 1'b0;
      dma_store   <= 1'b0;
      dma_spad    <= SP_IBUF;
      dma_mem_addr <= '0;
      dma_nlines  <= '0;
      instr_count <= '0;
      step_count  <= '0;
      for (int i = 0; i < 3; i++) base[i] <= '0;
      for (int s = 0; s < NS; s++) begin
        acc[s] <= '0;
        for (int l = 0; l < NLOOP; l++) stride[s][l] <= '0;
      end
      for (int l = 0; l < NLOOP; l++) lvl_of[l] <= '0;
      for (int k = 0; k < MAX_DEPTH; k++) begin
        lid_stk[k] <= '0; n_stk[k] <= '0; it_stk[k] <= '0; body_stk[k] <= '0;
      end
    end else begin
      done       <= 1'b0;
      dma_start  <= 1'b0;
      issue_beat <= '0;
      issue_octl <= '0;
      if (drain_cnt != 8'd0) drain_cnt <= drain_cnt - 8'd1;

      unique case (state)
        C_IDLE: if (start) begin
          pc    <= '0;
          state <= C_DEC;
          nbase <= '0;
          blk_pc <= '0;
          obuf_rd <= 1'b0;
          for (int s = 0; s < NS; s++)
            for (int l = 0; l < NLOOP; l++) stride[s][l] <= '0;
        end

        // ------------------------------------------------ decode pass
        C_DEC: begin
          pc <= pc + IAW'(1);
          if (nbase != 2'd0) begin
            base[3 - nbase] <= imem[pc];
            nbase <= nbase - 2'd1;
          end else begin
            unique case (ins.op)
              OP_SETUP: begin
                bw_i  <= bw_e'(ins.spec[5:3]);
                bw_w  <= bw_e'(ins.spec[2:0]);
                nbase <= 2'd3;
              end
              OP_GEN_ADDR: if (ins_in_loop)
                stride[ga_stream(ins.spec)][LAW'(ins.loop_id)] <= $signed(ins.imm);
              OP_RD_BUF: if (spad_e'(ins.spec[5:3]) == SP_OBUF) obuf_rd <= 1'b1;
              OP_LOOP: if (ins_in_loop) lvl_of[LAW'(ins.loop_id)] <= ins.spec[2:0];
              OP_BLOCK_END: begin
                pc    <= blk_pc;
                top   <= '0;
                state <= C_EXEC;
              end
              default: ;
            endcase
          end
        end

        // ------------------------------------------------ execute pass
        C_EXEC: begin
          if (pc == blk_pc) begin
            // first cycle of a block: address streams start at their bases
            acc[S_IBR] <= '0; acc[S_WBR] <= '0; acc[S_OBW] <= '0;
            acc[S_LDI] <= base[0]; acc[S_LDO] <= base[1]; acc[S_STO] <= base[1];
            acc[S_LDW] <= base[2];
          end
          if (ins.op == OP_SETUP) begin
            pc <= pc + IAW'(4);
          end else if (ins.op == OP_GEN_ADDR || ins.op == OP_RD_BUF || ins.op == OP_WR_BUF) begin
            pc <= pc + IAW'(1);
          end else if (top != '0 && ins_depth < top) begin
            // leave the innermost loop's body: iterate or close it
            if (it_stk[tix] + 16'd1 < n_stk[tix]) begin
              it_stk[tix] <= it_stk[tix] + 16'd1;
              pc <= body_stk[tix];
              for (int s = 0; s < NS; s++)
                acc[s] <= acc[s] + 32'(stride[s][lid_stk[tix]]);
            end else begin
              it_stk[tix] <= '0;
              top <= top - DAW'(1);
              for (int s = 0; s < NS; s++)
                if (n_stk[tix] > 16'd1)
                  acc[s] <= acc[s] - 32'(stride[s][lid_stk[tix]])
                                     * 32'(n_stk[tix] - 16'd1);
            end
          end else begin
            instr_count <= instr_count + 32'd1;
            unique case (ins.op)
              OP_LOOP: begin
                if (32'(top) < MAX_DEPTH) begin
                  lid_stk[tpush]  <= LAW'(ins.loop_id);
                  n_stk[tpush]    <= ins.imm;
                  it_stk[tpush]   <= '0;
                  body_stk[tpush] <= pc + IAW'(1);
                  top <= top + DAW'(1);
                end
                pc <= pc + IAW'(1);
              end
              OP_COMPUTE: ;  // issued below
              OP_LD_MEM: begin
                cmd_store <= 1'b0;
                cmd_spad  <= spad_e'(ins.spec[5:3]);
                cmd_addr  <= (spad_e'(ins.spec[5:3]) == SP_IBUF) ? acc[S_LDI]
                           : (spad_e'(ins.spec[5:3]) == SP_WBUF) ? acc[S_LDW] : acc[S_LDO];
                cmd_lines <= (spad_e'(ins.spec[5:3]) == SP_OBUF) ? ins.imm
                           : 16'(((32'(ins.imm) << bw_lg_width(bw_e'(ins.spec[2:0]))) + 32'd31) >> 5);
                state     <= C_DRAIN;
                pc        <= pc + IAW'(1);
              end
              OP_ST_MEM: begin
                cmd_store <= 1'b1;
                cmd_spad  <= SP_OBUF;
                cmd_addr  <= acc[S_STO];
                cmd_lines <= ins.imm;
                state     <= C_DRAIN;
                pc        <= pc + IAW'(1);
              end
              OP_BLOCK_END: begin
                if ({ins.spec, ins.loop_id, ins.imm} == 27'h7FF_FFFF) begin
                  state <= C_FIN;
                end else begin
                  pc      <= IAW'({ins.spec, ins.loop_id, ins.imm});
                  blk_pc  <= IAW'({ins.spec, ins.loop_id, ins.imm});
                  obuf_rd <= 1'b0;
                  for (int s = 0; s < NS; s++)
                    for (int l = 0; l < NLOOP; l++) stride[s][l] <= '0;
                  state   <= C_DEC;
                end
              end
              default: pc <= pc + IAW'(1);
            endcase
          end
        end

        // remaining beats of a 16-bit compute step
        C_COMP: ;
        // ------------------------------------------------ transfers
        C_DRAIN: if (drain_cnt == 8'd0) begin
          dma_start    <= 1'b1;
          dma_store    <= cmd_store;
          dma_spad     <= cmd_spad;
          dma_mem_addr <= cmd_addr;
          dma_nlines   <= cmd_lines;
          state        <= C_DMA;
        end
        C_DMA: if (dma_done) state <= C_EXEC;

        C_FIN: if (drain_cnt == 8'd0) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase

      // one beat of a compute step: the first beat leaves in the cycle the
      // compute instruction is executed, further beats from C_COMP
      if (comp_fire) begin
        issue_beat.valid <= 1'b1;
        issue_beat.phase <= cur_phase;
        issue_beat.last  <= comp_last;
        issue_i_idx      <= 16'(acc[S_IBR]);
        issue_w_idx      <= 16'(acc[S_WBR]);
        drain_cnt        <= 8'(DRAIN);
        if (comp_last) begin
          issue_octl.valid    <= 1'b1;
          issue_octl.addr     <= 16'(acc[S_OBW]);
          issue_octl.start    <= st_start && !prev_comp;
          issue_octl.fin      <= st_fin && !next_comp;
          issue_octl.pool_max <= |(ins.spec & FN_MAX);
          issue_octl.relu     <= |(ins.spec & FN_RELU);
          step_count          <= step_count + 32'd1;
          pc                  <= pc + IAW'(1);
          state               <= C_EXEC;
        end else begin
          beat_cnt <= cur_phase + 2'd1;
          state    <= C_COMP;
        end
      end
    end
  end
endmodule
