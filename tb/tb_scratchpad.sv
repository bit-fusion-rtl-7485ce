// Scratchpad check: fills the buffer with a pattern, reads every word back
// with one cycle of latency, checks read-during-write returns the old word and
// that a cycle without rd_en keeps the read data.
module tb_scratchpad;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic we, rd_en;
  logic [5:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  scratchpad #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  function automatic logic [31:0] pat(int a, int k); return 32'(a * 32'h9E3779B1 + k); endfunction
  task automatic check(logic [31:0] exp, string what);
    checks++;
    if (rdata !== exp) begin failures++; $display("FAIL %s got=%h exp=%h", what, rdata, exp); end
  endtask
  initial begin
    we = 0; rd_en = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = pat(a, 0);
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; raddr = 6'(a);
      @(negedge clk); rd_en = 0; check(pat(a, 0), "read");
    end
    // read during write of the same address returns the old word
    @(negedge clk); we = 1; waddr = 6'd5; wdata = pat(5, 7); rd_en = 1; raddr = 6'd5;
    @(negedge clk); we = 0; rd_en = 0; check(pat(5, 0), "read-during-write");
    // rd_en low holds the data
    @(negedge clk); check(pat(5, 0), "hold");
    @(negedge clk); rd_en = 1; raddr = 6'd5;
    @(negedge clk); rd_en = 0; check(pat(5, 7), "new value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
