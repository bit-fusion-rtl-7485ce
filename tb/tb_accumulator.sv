// Self-checking test of the column accumulator together with a 16-word output
// buffer. Each cycle a random step (address, start) is announced one cycle
// before its partial sum; the sum is written back to the buffer, and a
// reference array predicts every result. Back-to-back steps to the same
// address exercise the feedback register that stands in for a buffer word
// whose write has only just been issued.
module tb_accumulator;
  import bf_pkg::*;
  localparam int AW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  octl_t octl_early, ctl;
  logic obuf_re;
  logic [AW-1:0] obuf_raddr;
  logic signed [31:0] obuf_rdata, psum, old, sum;
  logic psum_valid;
  logic signed [31:0] ref_mem [16];
  logic signed [31:0] exp_v;
  logic [31:0] rdata_u;
  int checks = 0, failures = 0, fwd_hits = 0;

  always #5 clk = ~clk;

  scratchpad #(.DEPTH(16), .WIDTH(32)) u_obuf (
    .clk(clk), .we(ctl.valid), .waddr(AW'(ctl.addr)), .wdata(sum),
    .rd_en(obuf_re), .raddr(obuf_raddr), .rdata(rdata_u));
  assign obuf_rdata = $signed(rdata_u);

  accumulator #(.AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .octl_early(octl_early),
    .obuf_re(obuf_re), .obuf_raddr(obuf_raddr), .obuf_rdata(obuf_rdata),
    .psum_valid(psum_valid), .psum(psum),
    .wb_valid(ctl.valid), .wb_addr(AW'(ctl.addr)), .wb_data(sum),
    .ctl(ctl), .old(old), .sum(sum));

  initial begin : watchdog
    #1000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    octl_early = '0; psum_valid = 1'b0; psum = '0;
    for (int i = 0; i < 16; i++) ref_mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // first write every address with start so the buffer is defined
    for (int i = 0; i < 16 + 600; i++) begin
      @(posedge clk);
      // present the partial sum of the step announced last cycle
      psum_valid <= octl_early.valid;
      psum       <= $signed($urandom) >>> 8;
      octl_early <= '0;
      if (i < 16) begin
        octl_early.valid <= 1'b1; octl_early.addr <= 16'(i); octl_early.start <= 1'b1;
      end else if ($urandom % 8 != 0) begin
        octl_early.valid <= 1'b1;
        octl_early.addr  <= 16'((($urandom % 3) == 0) ? octl_early.addr : 16'($urandom % 4));
        octl_early.start <= ($urandom % 10) == 0;
      end
    end
    @(posedge clk);
    octl_early <= '0; psum_valid <= octl_early.valid;
    @(posedge clk);
    psum_valid <= 1'b0;
    repeat (3) @(posedge clk);
    if (fwd_hits == 0) begin
      failures++;
      $display("FAIL feedback path never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference check at the cycle the sum is produced
  always @(negedge clk) if (rst_n && ctl.valid) begin
    exp_v = ctl.start ? psum : ref_mem[ctl.addr[3:0]] + psum;
    checks++;
    if (sum !== exp_v) begin
      failures++;
      $display("FAIL addr=%0d start=%0b psum=%0d got %0d exp %0d", ctl.addr, ctl.start, psum, sum, exp_v);
    end
    if (dut.fb_v && dut.fb_addr == ctl.addr[3:0]) fwd_hits++;
    ref_mem[ctl.addr[3:0]] = exp_v;
  end
endmodule
