// Shared types and constants of the Bit Fusion accelerator.
//
// Holds the instruction format (5-bit opcode, 6-bit operand specification,
// 5-bit loop identifier, 16-bit immediate, as in the paper's instruction-set
// table), the operand bitwidth codes carried by the setup instruction, and the
// fusion configuration derived from a pair of bitwidths. The numeric opcode and
// bitwidth encodings are this design's own choice; the paper gives only the
// field names and widths.
package bf_pkg;

  // ------------------------------------------------------------------ ISA
  typedef enum logic [4:0] {
    OP_SETUP     = 5'd0,
    OP_LD_MEM    = 5'd1,
    OP_ST_MEM    = 5'd2,
    OP_RD_BUF    = 5'd3,
    OP_WR_BUF    = 5'd4,
    OP_GEN_ADDR  = 5'd5,
    OP_COMPUTE   = 5'd6,
    OP_LOOP      = 5'd7,
    OP_BLOCK_END = 5'd8
  } opcode_e;

  typedef struct packed {
    opcode_e     op;      // [31:27]
    logic [5:0]  spec;    // [26:21] operand specification
    logic [4:0]  loop_id; // [20:16]
    logic [15:0] imm;     // [15:0]
  } instr_t;

  // scratchpad-type field (spec[5:3])
  typedef enum logic [2:0] {
    SP_IBUF = 3'd0,
    SP_WBUF = 3'd1,
    SP_OBUF = 3'd2
  } spad_e;

  // gen-addr ld/st field (spec[2:0]): which address the stride walks
  typedef enum logic [2:0] {
    GA_MEM_LD = 3'd0,   // off-chip address of ld-mem
    GA_MEM_ST = 3'd1,   // off-chip address of st-mem
    GA_BUF_RD = 3'd2,   // on-chip address read by a compute step
    GA_BUF_WR = 3'd3    // on-chip address written by a compute step
  } ga_kind_e;

  // compute fn field (spec[5:0])
  localparam logic [5:0] FN_MAX  = 6'b000001; // pooling: combine by max instead of add
  localparam logic [5:0] FN_RELU = 6'b000010; // activation on the final value

  localparam logic [4:0] NO_LOOP = 5'd31;     // loop-id of an instruction outside every loop

  // ------------------------------------------------------------ bitwidths
  typedef enum logic [2:0] {
    BW_1U  = 3'd0,  // binary (0,+1)
    BW_2S  = 3'd1,  // ternary / signed 2-bit
    BW_4S  = 3'd2,
    BW_8S  = 3'd3,
    BW_16S = 3'd4,
    BW_2U  = 3'd5,
    BW_4U  = 3'd6,
    BW_8U  = 3'd7
  } bw_e;

  // log2 of the element width in bits (0..4 for 1..16 bits)
  function automatic logic [2:0] bw_lg_width(bw_e c);
    unique case (c)
      BW_1U:         return 3'd0;
      BW_2S, BW_2U:  return 3'd1;
      BW_4S, BW_4U:  return 3'd2;
      BW_8S, BW_8U:  return 3'd3;
      default:       return 3'd4;  // BW_16S
    endcase
  endfunction

  function automatic logic bw_signed(bw_e c);
    return (c == BW_2S) || (c == BW_4S) || (c == BW_8S) || (c == BW_16S);
  endfunction

  // Fusion configuration shared by every fusion unit and operand feed.
  // "i" is the input operand (op0), "w" the weight operand (op1).
  typedef struct packed {
    logic [1:0] lg_ci;     // log2 of 2-bit chunks per spatial input operand (0..2)
    logic [1:0] lg_cw;     // log2 of 2-bit chunks per spatial weight operand (0..2)
    logic [2:0] lg_p;      // log2 of Fused-PEs (products) per fusion unit (0..4)
    logic [2:0] lg_ewi;    // log2 of input element width
    logic [2:0] lg_eww;    // log2 of weight element width
    logic       sgn_i;
    logic       sgn_w;
    logic       t_i;       // input is 16-bit: split over two temporal phases
    logic       t_w;       // weight is 16-bit: split over two temporal phases
    logic [2:0] lg_spw_i;  // log2 of input slices per 32-bit buffer word
    logic [2:0] lg_spw_w;  // log2 of weight slices per 32-bit buffer word
  } fu_cfg_t;

  function automatic fu_cfg_t make_cfg(bw_e bi, bw_e bw);
    fu_cfg_t c;
    logic [2:0] lgp, capi, capw;
    c.lg_ewi = bw_lg_width(bi);
    c.lg_eww = bw_lg_width(bw);
    c.sgn_i  = bw_signed(bi);
    c.sgn_w  = bw_signed(bw);
    c.t_i    = (c.lg_ewi == 3'd4);
    c.t_w    = (c.lg_eww == 3'd4);
    // spatial operand width is at most 8 bits; chunks of 2 bits
    c.lg_ci  = (c.lg_ewi <= 3'd1) ? 2'd0 : (c.lg_ewi == 3'd2) ? 2'd1 : 2'd2;
    c.lg_cw  = (c.lg_eww <= 3'd1) ? 2'd0 : (c.lg_eww == 3'd2) ? 2'd1 : 2'd2;
    lgp      = 3'd4 - {1'b0, c.lg_ci} - {1'b0, c.lg_cw};
    // at most 32 bits of each operand per step (one buffer word)
    capi     = 3'd5 - c.lg_ewi;
    capw     = 3'd5 - c.lg_eww;
    if (capi < lgp) lgp = capi;
    if (capw < lgp) lgp = capw;
    c.lg_p     = lgp;
    c.lg_spw_i = 3'd5 - (lgp + c.lg_ewi);
    c.lg_spw_w = 3'd5 - (lgp + c.lg_eww);
    return c;
  endfunction

  // number of temporal phases (cycles) of one compute step: 1, 2 or 4
  function automatic logic [2:0] cfg_phases(fu_cfg_t c);
    return 3'd1 << ({1'b0, c.t_i} + {1'b0, c.t_w});
  endfunction

  // One beat travelling with the operands through the array.
  typedef struct packed {
    logic       valid;
    logic [1:0] phase;   // temporal phase of a 16-bit step
    logic       last;    // last phase of the step
  } beat_t;

  // Output-side control of one step, consumed at the bottom of each column.
  typedef struct packed {
    logic        valid;
    logic [15:0] addr;      // OBUF address
    logic        start;     // first step of this output: do not combine with stored value
    logic        fin;       // final step of this output: apply activation
    logic        pool_max;  // combine by max (pooling) instead of add
    logic        relu;
  } octl_t;

endpackage
