// Operand feed: the output register and multiplexers of an input or weight
// buffer.
//
// The paper augments IBUF and WBUF with a register that holds one 32-bit row
// read from the buffer, followed by multiplexers that hand it to the Fused-PEs
// a slice at a time according to the operand bitwidth, so that one SRAM
// access serves several steps. Here a request names a slice index; the
// buffer word holding it is word = index >> lg_spw and the slice within the
// word is index & (2^lg_spw - 1), where lg_spw is log2 of the slices per word
// (0..5: slices of 32, 16, 8, 4, 2 or 1 bits). If that word is already in the
// register the SRAM is not read. The slice appears, zero-extended to 32 bits,
// one cycle after the request in either case. `invalidate` forgets the held
// word (used when the buffer is rewritten). The tag scheme is this design's
// own choice; the paper only states the register-plus-multiplexer idea.
module operand_feed #(
  parameter int unsigned AW = 8     // buffer address width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic [15:0]   idx,        // slice index
  input  logic [2:0]    lg_spw,
  input  logic          invalidate,
  // buffer read port
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [31:0]   rd_data,
  // to the fusion unit
  output logic [31:0]   slice,
  output logic [31:0]   sram_reads  // number of buffer accesses made
);
  logic [31:0]   word_q;
  logic [AW-1:0] tag_q;
  logic          tag_v;
  logic          loaded_q;
  logic [4:0]    sel_q;
  logic [2:0]    lg_spw_q;
  logic [15:0]   waddr;

  assign waddr   = idx >> lg_spw;
  assign rd_addr = AW'(waddr);
  assign rd_en   = req && !(tag_v && tag_q == AW'(waddr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_q     <= '0;
      tag_q      <= '0;
      tag_v      <= 1'b0;
      loaded_q   <= 1'b0;
      sel_q      <= '0;
      lg_spw_q   <= '0;
      sram_reads <= '0;
    end else begin
      loaded_q <= rd_en;
      if (loaded_q) word_q <= rd_data;
      if (req) begin
        sel_q    <= 5'(idx & ((16'd1 << lg_spw) - 16'd1));
        lg_spw_q <= lg_spw;
      end
      if (rd_en) begin
        tag_q      <= AW'(waddr);
        tag_v      <= 1'b1;
        sram_reads <= sram_reads + 1;
      end
      if (invalidate) tag_v <= 1'b0;
    end
  end

  always_comb begin
    logic [31:0] w;
    logic [5:0]  sw;     // slice width in bits
    w     = loaded_q ? rd_data : word_q;
    sw    = 6'd32 >> lg_spw_q;
    slice = (w >> (sel_q * sw)) & ((sw == 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << sw) - 32'd1));
  end
endmodule
