// main_memory_model: behavioural stand-in for the stacked DRAM, for simulation
// only. Byte-wide request/grant port: a request is granted in cycles where a
// pseudo-random stall does not occur (STALL_PCT percent), writes take effect
// when granted, and read data return in order LATENCY cycles after the grant.
module main_memory_model #(
  parameter int unsigned SIZE      = 65536,
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mem_req,
  input  logic        mem_we,
  input  logic [31:0] mem_addr,
  input  logic [7:0]  mem_wdata,
  output logic        mem_gnt,
  output logic        mem_rvalid,
  output logic [7:0]  mem_rdata
);
  logic [7:0] mem [SIZE];
  logic [LATENCY-1:0] vpipe;
  logic [7:0] dpipe [LATENCY];

  always_ff @(negedge clk) mem_gnt <= ($urandom_range(0, 99) >= STALL_PCT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int k = 0; k < LATENCY; k++) dpipe[k] <= '0;
    end else begin
      vpipe <= {vpipe[LATENCY-2:0], mem_req && mem_gnt && !mem_we};
      dpipe[0] <= mem[mem_addr % SIZE];
      for (int k = 1; k < LATENCY; k++) dpipe[k] <= dpipe[k - 1];
      if (mem_req && mem_gnt && mem_we) mem[mem_addr % SIZE] <= mem_wdata;
    end
  end
  assign mem_rvalid = vpipe[LATENCY-1];
  assign mem_rdata  = dpipe[LATENCY-1];
endmodule
