// Behavioural off-chip memory for the testbenches (not synthesizable).
//
// WORDS words of MEM_W bits behind the accelerator's request/response port.
// A request is accepted when mem_req_ready is high; ready drops at random
// (about one cycle in STALL_1_IN) to exercise back-pressure. Read data
// returns in order LAT cycles after acceptance. Writes update the array when
// accepted. The array `mem` is read and written directly by the testbench.
module dram_model #(
  parameter int unsigned MEM_W      = 128,
  parameter int unsigned WORDS      = 4096,
  parameter int unsigned LAT        = 3,
  parameter int unsigned STALL_1_IN = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mem_req_valid,
  input  logic             mem_req_we,
  input  logic [31:0]      mem_req_addr,
  input  logic [MEM_W-1:0] mem_req_wdata,
  output logic             mem_req_ready,
  output logic             mem_rsp_valid,
  output logic [MEM_W-1:0] mem_rsp_data
);
  logic [MEM_W-1:0] mem [WORDS];
  logic             pv [LAT];
  logic [MEM_W-1:0] pd [LAT];
  int reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end

  assign mem_rsp_valid = pv[LAT-1];
  assign mem_rsp_data  = pd[LAT-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_req_ready <= 1'b0;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      mem_req_ready <= ($urandom % STALL_1_IN) != 0;
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= 1'b0;
      pd[0] <= '0;
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_addr >= WORDS) $display("DRAM: address %0d out of range", mem_req_addr);
        if (mem_req_we) begin
          mem[mem_req_addr % WORDS] <= mem_req_wdata;
          writes++;
        end else begin
          pv[0] <= 1'b1;
          pd[0] <= mem[mem_req_addr % WORDS];
          reads++;
        end
      end
    end
  end
endmodule
