// Bit Fusion systolic array: ROWS x COLS fusion units with their buffers.
//
// Every row has an input buffer (IBUF) with its operand feed at the left edge;
// every fusion unit has its own weight buffer (WBUF) and feed. A compute step
// issued at the array's port enters row r r cycles later (row skew), so that
// the partial sum leaving row r-1 meets row r's products. Input slices move
// one unit to the right per cycle, partial sums one unit down per cycle, as in
// the paper's Fig. 3; the top row starts from a zero partial sum. Each weight
// feed is requested one cycle before its unit sees the step, from the beat at
// the unit to its left (or from the row entry for column 0).
//
// Timing: a step's last beat presented at the issue port in the cycle before
// clock edge t gives the result of column c at the bottom (col_valid[c]) in
// the cycle after edge t + ROWS + 1 + c, i.e. ROWS + 2 + c cycles after issue.
//
// Buffer writes (from the memory transfer engine) arrive as MEM_W-bit beats;
// beat g of a buffer line covers buffer instances g*LANES .. g*LANES+LANES-1,
// lane k of the beat going to instance g*LANES+k. IBUF instance r is row r;
// WBUF instance r*COLS+c is unit (r,c).
module systolic_array
  import bf_pkg::*;
#(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned COLS     = 16,
  parameter int unsigned IB_DEPTH = 256,
  parameter int unsigned WB_DEPTH = 32,
  parameter int unsigned MEM_W    = 128,
  localparam int unsigned LANES   = MEM_W / 32,
  localparam int unsigned IB_AW   = $clog2(IB_DEPTH),
  localparam int unsigned WB_AW   = $clog2(WB_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  fu_cfg_t            cfg,
  // compute issue
  input  beat_t              issue_beat,
  input  logic [15:0]        issue_i_idx,   // input slice index
  input  logic [15:0]        issue_w_idx,   // weight slice index
  // buffer write from the memory transfer engine
  input  logic               ib_we,
  input  logic               wb_we,
  input  logic [15:0]        buf_waddr,     // buffer line
  input  logic [15:0]        buf_wbeat,     // beat within the line
  input  logic [MEM_W-1:0]   buf_wdata,
  // column results
  output logic signed [31:0] col_psum  [COLS],
  output logic               col_valid [COLS],
  // activity counters
  output logic [31:0]        ibuf_reads,
  output logic [31:0]        wbuf_reads
);
  typedef struct packed {
    beat_t       beat;
    logic [15:0] i_idx;
    logic [15:0] w_idx;
  } rowctl_t;

  rowctl_t            row_ctl   [ROWS];
  beat_t              fu_beat_in  [ROWS][COLS];
  beat_t              fu_beat_out [ROWS][COLS];
  logic [31:0]        fu_in     [ROWS][COLS];
  logic [31:0]        fu_in_fwd [ROWS][COLS];
  logic [31:0]        fu_wt     [ROWS][COLS];
  logic signed [31:0] fu_psum_in  [ROWS][COLS];
  logic signed [31:0] fu_psum_out [ROWS][COLS];
  logic               fu_psum_v   [ROWS][COLS];
  logic [15:0]        widx_at   [ROWS][COLS];   // weight index travelling with beat_in
  logic [31:0]        ib_cnt    [ROWS];
  logic [31:0]        wb_cnt    [ROWS][COLS];

  // ------------------------------------------------------------- row skew
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) row_ctl[r] <= '0;
    end else begin
      row_ctl[0] <= '{issue_beat, issue_i_idx, issue_w_idx};
      for (int r = 1; r < ROWS; r++) row_ctl[r] <= row_ctl[r-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic              ib_re;
    logic [IB_AW-1:0]  ib_raddr;
    logic [31:0]       ib_rdata;
    beat_t             beat_q;
    logic [15:0]       widx_q;

    scratchpad #(.DEPTH(IB_DEPTH), .WIDTH(32)) u_ibuf (
      .clk, .we(ib_we && buf_wbeat == 16'(r / LANES)), .waddr(IB_AW'(buf_waddr)),
      .wdata(buf_wdata[32*(r % LANES) +: 32]),
      .rd_en(ib_re), .raddr(ib_raddr), .rdata(ib_rdata));

    operand_feed #(.AW(IB_AW)) u_ifeed (
      .clk, .rst_n, .req(row_ctl[r].beat.valid), .idx(row_ctl[r].i_idx),
      .lg_spw(cfg.lg_spw_i), .invalidate(ib_we),
      .rd_en(ib_re), .rd_addr(ib_raddr), .rd_data(ib_rdata),
      .slice(fu_in[r][0]), .sram_reads(ib_cnt[r]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        beat_q <= '0;
        widx_q <= '0;
      end else begin
        beat_q <= row_ctl[r].beat;
        widx_q <= row_ctl[r].w_idx;
      end
    end

    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic             wb_re;
      logic [WB_AW-1:0] wb_raddr;
      logic [31:0]      wb_rdata;
      logic             wreq;
      logic [15:0]      widx_req;
      localparam int unsigned INST = r * COLS + c;

      if (c == 0) begin : g_first
        assign fu_beat_in[r][c] = beat_q;
        assign widx_at[r][c]    = widx_q;
        assign wreq             = row_ctl[r].beat.valid;
        assign widx_req         = row_ctl[r].w_idx;
      end else begin : g_next
        assign fu_beat_in[r][c] = fu_beat_out[r][c-1];
        assign fu_in[r][c]      = fu_in_fwd[r][c-1];
        assign wreq             = fu_beat_in[r][c-1].valid;
        assign widx_req         = widx_at[r][c-1];
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) widx_at[r][c] <= '0;
          else        widx_at[r][c] <= widx_at[r][c-1];
      end

      if (r == 0) begin : g_top
        assign fu_psum_in[r][c] = '0;
      end else begin : g_below
        assign fu_psum_in[r][c] = fu_psum_out[r-1][c];
        // the partial sum from above must arrive with the step's last beat
        a_psum_align: assert property (@(posedge clk) disable iff (!rst_n)
          (fu_beat_in[r][c].valid && fu_beat_in[r][c].last) |-> fu_psum_v[r-1][c]);
      end

      scratchpad #(.DEPTH(WB_DEPTH), .WIDTH(32)) u_wbuf (
        .clk, .we(wb_we && buf_wbeat == 16'(INST / LANES)), .waddr(WB_AW'(buf_waddr)),
        .wdata(buf_wdata[32*(INST % LANES) +: 32]),
        .rd_en(wb_re), .raddr(wb_raddr), .rdata(wb_rdata));

      operand_feed #(.AW(WB_AW)) u_wfeed (
        .clk, .rst_n, .req(wreq), .idx(widx_req),
        .lg_spw(cfg.lg_spw_w), .invalidate(wb_we),
        .rd_en(wb_re), .rd_addr(wb_raddr), .rd_data(wb_rdata),
        .slice(fu_wt[r][c]), .sram_reads(wb_cnt[r][c]));

      fusion_unit u_fu (
        .clk, .rst_n, .cfg,
        .beat_in(fu_beat_in[r][c]), .in_slice(fu_in[r][c]), .wt_slice(fu_wt[r][c]),
        .psum_in(fu_psum_in[r][c]),
        .beat_out(fu_beat_out[r][c]), .in_fwd(fu_in_fwd[r][c]),
        .psum_out(fu_psum_out[r][c]), .psum_vout(fu_psum_v[r][c]));
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      col_psum[c]  = fu_psum_out[ROWS-1][c];
      col_valid[c] = fu_psum_v[ROWS-1][c];
    end
    ibuf_reads = '0;
    wbuf_reads = '0;
    for (int r = 0; r < ROWS; r++) begin
      ibuf_reads += ib_cnt[r];
      for (int c = 0; c < COLS; c++) wbuf_reads += wb_cnt[r][c];
    end
  end
endmodule
