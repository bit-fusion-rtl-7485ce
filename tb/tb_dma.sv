// Self-checking test of the memory transfer engine with an 8x8 array geometry
// (IBUF line 2 beats, WBUF line 16 beats, OBUF line 2 beats) and the
// behavioural memory with random back-pressure. Random loads into each
// scratchpad are checked write by write against memory contents (buffer line
// and beat must match the memory word n*BPL+beat past the start address, and
// the write count must be n*BPL). Random stores read a modelled OBUF whose
// line content is a function of the line number and are checked against the
// memory afterwards.
module tb_dma;
  import bf_pkg::*;
  localparam int R = 8, C = 8, MW = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, store, busy, done;
  spad_e spad;
  logic [31:0] mem_addr, mem_words;
  logic [15:0] nlines;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [MW-1:0] mem_req_wdata, mem_rsp_data, buf_wdata;
  logic ib_we, wb_we, ob_we, ob_re;
  logic [15:0] buf_waddr, buf_wbeat, ob_raddr;
  logic [C*32-1:0] ob_rdata;
  int checks = 0, failures = 0, writes_seen = 0, bpl_cur = 1;
  spad_e exp_spad;

  always #5 clk = ~clk;

  dma #(.ROWS(R), .COLS(C), .MEM_W(MW)) dut (.*);
  dram_model #(.MEM_W(MW), .WORDS(2048), .LAT(3)) u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_req_ready, .mem_rsp_valid, .mem_rsp_data);

  function automatic logic [C*32-1:0] line_val(logic [15:0] l);
    logic [C*32-1:0] v;
    for (int i = 0; i < C; i++) v[32*i +: 32] = {l, 16'(i * 77 + 5)};
    return v;
  endfunction

  always @(posedge clk) if (ob_re) ob_rdata <= line_val(ob_raddr);

  initial begin : watchdog
    #2000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // every buffer write must match memory
  always @(negedge clk) if (rst_n && (ib_we || wb_we || ob_we)) begin
    checks++;
    writes_seen++;
    if ({ib_we, wb_we, ob_we} != (exp_spad == SP_IBUF ? 3'b100 : exp_spad == SP_WBUF ? 3'b010 : 3'b001)
        || buf_wdata !== u_mem.mem[mem_addr + 32'(buf_waddr) * 32'(bpl_cur) + 32'(buf_wbeat)]
        || buf_wbeat >= 16'(bpl_cur)) begin
      failures++;
      $display("FAIL load write line=%0d beat=%0d", buf_waddr, buf_wbeat);
    end
  end

  initial begin
    start = 1'b0; store = 1'b0; spad = SP_IBUF; mem_addr = '0; nlines = '0;
    ob_rdata = '0;
    for (int i = 0; i < 2048; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 24; t++) begin
      logic st;
      int n;
      st = (t % 4) == 3;
      exp_spad = st ? SP_OBUF : spad_e'(t % 3);
      bpl_cur = (exp_spad == SP_WBUF) ? R * C * 32 / MW : (exp_spad == SP_IBUF) ? R * 32 / MW : C * 32 / MW;
      n = 1 + $urandom % 6;
      writes_seen = 0;
      @(posedge clk);
      start <= 1'b1; store <= st; spad <= exp_spad;
      mem_addr <= 32'($urandom % 1024); nlines <= 16'(n);
      @(posedge clk);
      start <= 1'b0;
      while (!done) @(posedge clk);
      @(negedge clk);
      checks++;
      if (st) begin
        int bad = 0;
        for (int l = 0; l < n; l++)
          for (int b = 0; b < bpl_cur; b++)
            if (u_mem.mem[mem_addr + 32'(l * bpl_cur + b)] !== line_val(16'(l))[MW*b +: MW]) bad++;
        if (bad != 0) begin failures++; $display("FAIL store: %0d words wrong", bad); end
      end else if (writes_seen != n * bpl_cur) begin
        failures++;
        $display("FAIL load: %0d writes, expected %0d", writes_seen, n * bpl_cur);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
