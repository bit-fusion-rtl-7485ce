// Operand feed check: a small SRAM model holds known words; every slice width
// is walked through a sequence of slice indices, and each returned slice is
// compared with the slice cut from the word here. Also checks that a word is
// read from the buffer only once while its slices are consumed, and that
// invalidate forces a new read.
module tb_operand_feed;
  logic clk = 0, rst_n = 0;
  logic req, invalidate, rd_en;
  logic [15:0] idx;
  logic [2:0] lg_spw;
  logic [7:0] rd_addr;
  logic [31:0] rd_data, slice, sram_reads;
  logic [31:0] mem [256];
  int checks = 0, failures = 0;
  operand_feed #(.AW(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) mem[i] = $urandom;
    req = 0; invalidate = 0; idx = 0; lg_spw = 0; rd_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l <= 5; l++) begin
      int sw, nslices;
      logic [31:0] r0;
      sw = 32 >> l; nslices = 8 << l;
      @(negedge clk); invalidate = 1; @(negedge clk); invalidate = 0;
      r0 = sram_reads;
      for (int k = 0; k < nslices; k++) begin
        logic [31:0] w, e;
        req = 1; idx = 16'(k); lg_spw = 3'(l);
        @(negedge clk);
        req = 0;
        w = mem[k >> l];
        e = (sw == 32) ? w : ((w >> ((k % (1 << l)) * sw)) & ((32'd1 << sw) - 1));
        checks++;
        if (slice !== e) begin failures++; $display("FAIL l=%0d k=%0d got=%h exp=%h", l, k, slice, e); end
      end
      checks++;
      if (sram_reads - r0 != 32'(nslices >> l)) begin
        failures++; $display("FAIL reads l=%0d got=%0d exp=%0d", l, sram_reads - r0, nslices >> l);
      end
    end
    // repeated request of the held word: no new read; invalidate: a new read
    @(negedge clk); req = 1; idx = 16'd3; lg_spw = 3'd0;
    @(negedge clk); req = 1;
    @(negedge clk); req = 0;
    checks++; if (slice !== mem[3]) begin failures++; $display("FAIL repeat"); end
    begin
      logic [31:0] r1;
      r1 = sram_reads;
      invalidate = 1; @(negedge clk); invalidate = 0;
      req = 1; @(negedge clk); req = 0;
      checks++; if (sram_reads != r1 + 1) begin failures++; $display("FAIL invalidate"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
