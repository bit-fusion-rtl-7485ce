// Bit Fusion accelerator: controller, systolic array of fusion units, per-
// column output path and memory transfer engine.
//
// Structure (paper Fig. 3 and Sec. IV): a ROWS x COLS systolic array of fusion
// units with a per-row input buffer (IBUF) and a weight buffer (WBUF) per unit;
// under each column an accumulator, a pooling unit, an activation unit and
// that column's output buffer (OBUF) slice. The controller runs instruction
// blocks from its instruction memory and drives the array and the transfer
// engine, which connects the three buffers to off-chip memory.
//
// Output path timing: the controller issues a step's output control word
// (OBUF address, start/fin, pooling, ReLU) with the step's last beat. A shared
// delay line hands it to column c ROWS+1+c cycles later, one cycle before that
// column's result arrives, so the accumulator can read the OBUF word in time.
// The combined value is written back into OBUF in the cycle the result
// arrives.
//
// Interface: program the instruction memory with imem_*, pulse `start`, wait
// for `done`. The off-chip memory is reached through the MEM_W-bit request/
// response port (mem_*); the memory itself is outside this design. Activity
// counters are outputs. Parameter defaults: 512 fusion units (32 x 16) and
// 112 KB of buffers (IBUF 32 KB, WBUF 64 KB, OBUF 16 KB) as in the paper's
// 45 nm comparison configuration; the array shape and the split of the
// buffer capacity are this design's choices.
module bitfusion_top
  import bf_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 16,
  parameter int unsigned IB_DEPTH   = 256,
  parameter int unsigned WB_DEPTH   = 32,
  parameter int unsigned OB_DEPTH   = 256,
  parameter int unsigned MEM_W      = 128,
  parameter int unsigned IMEM_DEPTH = 256,
  localparam int unsigned LANES     = MEM_W / 32,
  localparam int unsigned OB_AW     = $clog2(OB_DEPTH),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // program load and run control
  input  logic               imem_we,
  input  logic [IAW-1:0]     imem_waddr,
  input  logic [31:0]        imem_wdata,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // off-chip memory port
  output logic               mem_req_valid,
  output logic               mem_req_we,
  output logic [31:0]        mem_req_addr,
  output logic [MEM_W-1:0]   mem_req_wdata,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  logic [MEM_W-1:0]   mem_rsp_data,
  // activity counters
  output logic [31:0]        instr_count,
  output logic [31:0]        step_count,
  output logic [31:0]        ibuf_reads,
  output logic [31:0]        wbuf_reads,
  output logic [31:0]        mem_words
);
  localparam int unsigned DLY = ROWS + COLS;

  fu_cfg_t            cfg;
  beat_t              issue_beat;
  logic [15:0]        issue_i_idx, issue_w_idx;
  octl_t              issue_octl;
  octl_t              octl_dly [1:DLY];
  logic               dma_start, dma_store, dma_done;
  spad_e              dma_spad;
  logic [31:0]        dma_mem_addr;
  logic [15:0]        dma_nlines;
  logic               ib_we, wb_we, ob_we, ob_re;
  logic [15:0]        buf_waddr, buf_wbeat, ob_raddr;
  logic [MEM_W-1:0]   buf_wdata;
  logic [COLS*32-1:0] ob_line;
  logic signed [31:0] col_psum  [COLS];
  logic               col_valid [COLS];

  controller #(.IMEM_DEPTH(IMEM_DEPTH), .DRAIN(ROWS + COLS + 4)) u_ctrl (
    .clk, .rst_n, .imem_we, .imem_waddr, .imem_wdata, .start, .busy, .done,
    .cfg, .issue_beat, .issue_i_idx, .issue_w_idx, .issue_octl,
    .dma_start, .dma_store, .dma_spad, .dma_mem_addr, .dma_nlines, .dma_done,
    .instr_count, .step_count);

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .IB_DEPTH(IB_DEPTH), .WB_DEPTH(WB_DEPTH),
                   .MEM_W(MEM_W)) u_array (
    .clk, .rst_n, .cfg, .issue_beat, .issue_i_idx, .issue_w_idx,
    .ib_we, .wb_we, .buf_waddr, .buf_wbeat, .buf_wdata,
    .col_psum, .col_valid, .ibuf_reads, .wbuf_reads);

  dma #(.ROWS(ROWS), .COLS(COLS), .MEM_W(MEM_W)) u_dma (
    .clk, .rst_n, .start(dma_start), .store(dma_store), .spad(dma_spad),
    .mem_addr(dma_mem_addr), .nlines(dma_nlines), .busy(), .done(dma_done),
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_data,
    .ib_we, .wb_we, .ob_we, .buf_waddr, .buf_wbeat, .buf_wdata,
    .ob_re, .ob_raddr, .ob_rdata(ob_line), .mem_words);

  // output control delay line: octl_dly[k] is the control word issued k cycles ago
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= DLY; k++) octl_dly[k] <= '0;
    end else begin
      octl_dly[1] <= issue_octl;
      for (int k = 2; k <= DLY; k++) octl_dly[k] <= octl_dly[k-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    octl_t              ctl;
    logic               acc_re, o_we, o_re;
    logic [OB_AW-1:0]   acc_raddr, o_waddr, o_raddr;
    logic [31:0]        o_rdata, o_wdata;
    logic signed [31:0] old, sum, pooled, act;

    accumulator #(.AW(OB_AW)) u_acc (
      .clk, .rst_n, .octl_early(octl_dly[ROWS + 1 + c]),
      .obuf_re(acc_re), .obuf_raddr(acc_raddr), .obuf_rdata($signed(o_rdata)),
      .psum_valid(col_valid[c]), .psum(col_psum[c]),
      .wb_valid(ctl.valid), .wb_addr(OB_AW'(ctl.addr)), .wb_data(act),
      .ctl(ctl), .old(old), .sum(sum));

    pooling_unit u_pool (.ctl(ctl), .psum(col_psum[c]), .old(old), .sum(sum), .out(pooled));
    activation_unit u_act (.ctl(ctl), .in(pooled), .out(act));

    // OBUF port sharing: results from the column, or line writes/reads of the
    // transfer engine (only while the array is idle)
    always_comb begin
      o_we    = ctl.valid || (ob_we && buf_wbeat == 16'(c / LANES));
      o_waddr = ctl.valid ? OB_AW'(ctl.addr) : OB_AW'(buf_waddr);
      o_wdata = ctl.valid ? act : buf_wdata[32 * (c % LANES) +: 32];
      o_re    = acc_re || ob_re;
      o_raddr = acc_re ? acc_raddr : OB_AW'(ob_raddr);
    end

    scratchpad #(.DEPTH(OB_DEPTH), .WIDTH(32)) u_obuf (
      .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
      .rd_en(o_re), .raddr(o_raddr), .rdata(o_rdata));

    assign ob_line[32*c +: 32] = o_rdata;
  end
endmodule
