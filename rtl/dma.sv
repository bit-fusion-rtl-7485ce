// Memory transfer engine: moves buffer lines between off-chip memory and the
// on-chip scratchpads for the ld-mem and st-mem instructions.
//
// The off-chip side is one MEM_W-bit request/response port (the paper's
// "128 bits per cycle" of memory bandwidth); addresses count MEM_W-bit words.
// A buffer line is one 32-bit word in every instance of a scratchpad at the
// same address: ROWS words for IBUF, ROWS*COLS for WBUF (one per fusion unit),
// COLS for OBUF. A line therefore takes BPL = instances*32/MEM_W consecutive
// memory words ("beats"); beat g carries instances g*LANES .. g*LANES+LANES-1.
// A transfer of n lines starts at buffer line 0 and at memory word mem_addr
// and covers n*BPL consecutive memory words.
//
// Loads issue one request per cycle while mem_req_ready is high and write
// each response, in order, into the scratchpad (ib_we/wb_we/ob_we with line
// and beat). Stores (OBUF only) read one OBUF line, then send its beats as
// write requests. `done` pulses for one cycle when the last response of a load
// has been written or the last write request of a store accepted. The
// controller only starts a transfer while the array is idle. The request/
// response protocol and the buffer-line layout are this design's choices; the
// paper gives neither.
module dma
  import bf_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 16,
  parameter int unsigned MEM_W = 128,
  localparam int unsigned LANES = MEM_W / 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command from the controller
  input  logic                  start,
  input  logic                  store,      // 1: st-mem (OBUF to memory), 0: ld-mem
  input  spad_e                 spad,
  input  logic [31:0]           mem_addr,
  input  logic [15:0]           nlines,
  output logic                  busy,
  output logic                  done,
  // off-chip memory port
  output logic                  mem_req_valid,
  output logic                  mem_req_we,
  output logic [31:0]           mem_req_addr,
  output logic [MEM_W-1:0]      mem_req_wdata,
  input  logic                  mem_req_ready,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_W-1:0]      mem_rsp_data,
  // scratchpad write side
  output logic                  ib_we,
  output logic                  wb_we,
  output logic                  ob_we,
  output logic [15:0]           buf_waddr,
  output logic [15:0]           buf_wbeat,
  output logic [MEM_W-1:0]      buf_wdata,
  // OBUF read side for stores (one line of all columns, one cycle latency)
  output logic                  ob_re,
  output logic [15:0]           ob_raddr,
  input  logic [COLS*32-1:0]    ob_rdata,
  // activity
  output logic [31:0]           mem_words
);
  localparam int unsigned BPL_I = (ROWS * 32) / MEM_W;
  localparam int unsigned BPL_W = (ROWS * COLS * 32) / MEM_W;
  localparam int unsigned BPL_O = (COLS * 32) / MEM_W;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SRD, S_SWR} state_e;
  state_e      state;
  spad_e       spad_q;
  logic [31:0] base_q, total_q, req_cnt, rsp_cnt;
  logic [15:0] bpl_q, rsp_beat, rsp_line, st_line, st_beat, nlines_q;
  logic [15:0] bpl;

  always_comb begin
    unique case (spad)
      SP_IBUF: bpl = 16'(BPL_I);
      SP_WBUF: bpl = 16'(BPL_W);
      default: bpl = 16'(BPL_O);
    endcase
  end

  assign busy = (state != S_IDLE);

  // memory requests
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = base_q + req_cnt;
    mem_req_wdata = ob_rdata[32*LANES*st_beat +: MEM_W];
    if (state == S_LOAD && req_cnt < total_q) mem_req_valid = 1'b1;
    if (state == S_SWR) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
    end
  end

  // buffer writes from load responses
  always_comb begin
    ib_we     = (state == S_LOAD) && mem_rsp_valid && spad_q == SP_IBUF;
    wb_we     = (state == S_LOAD) && mem_rsp_valid && spad_q == SP_WBUF;
    ob_we     = (state == S_LOAD) && mem_rsp_valid && spad_q == SP_OBUF;
    buf_waddr = rsp_line;
    buf_wbeat = rsp_beat;
    buf_wdata = mem_rsp_data;
    ob_re     = (state == S_SRD);
    ob_raddr  = st_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      spad_q    <= SP_IBUF;
      base_q    <= '0;
      total_q   <= '0;
      req_cnt   <= '0;
      rsp_cnt   <= '0;
      bpl_q     <= '0;
      rsp_beat  <= '0;
      rsp_line  <= '0;
      st_line   <= '0;
      st_beat   <= '0;
      nlines_q  <= '0;
      done      <= 1'b0;
      mem_words <= '0;
    end else begin
      done <= 1'b0;
      if (mem_req_valid && mem_req_ready) mem_words <= mem_words + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          spad_q   <= store ? SP_OBUF : spad;
          base_q   <= mem_addr;
          bpl_q    <= store ? 16'(BPL_O) : bpl;
          total_q  <= 32'(nlines) * 32'(store ? 16'(BPL_O) : bpl);
          nlines_q <= nlines;
          req_cnt  <= '0;
          rsp_cnt  <= '0;
          rsp_beat <= '0;
          rsp_line <= '0;
          st_line  <= '0;
          st_beat  <= '0;
          if (nlines == 16'd0) done <= 1'b1;
          else state <= store ? S_SRD : S_LOAD;
        end
        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 32'd1;
          if (mem_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 32'd1;
            if (rsp_beat == bpl_q - 16'd1) begin
              rsp_beat <= '0;
              rsp_line <= rsp_line + 16'd1;
            end else begin
              rsp_beat <= rsp_beat + 16'd1;
            end
            if (rsp_cnt == total_q - 32'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_SRD: state <= S_SWR;
        S_SWR: if (mem_req_ready) begin
          req_cnt <= req_cnt + 32'd1;
          if (st_beat == bpl_q - 16'd1) begin
            st_beat <= '0;
            st_line <= st_line + 16'd1;
            if (st_line == nlines_q - 16'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_SRD;
            end
          end else begin
            st_beat <= st_beat + 16'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
