// tb_dma_controller: copies a block of main memory into a stand-in input
// buffer and a stream of output-buffer bytes back to memory, with random
// memory stalls, and checks every byte, the byte counts and that the input
// buffer is never overfilled.
module tb_dma_controller;
  import nn_pkg::*;
  localparam int IND = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [31:0] cfg_addr, cfg_wdata;
  logic busy, done, mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr;
  logic [7:0] mem_wdata, mem_rdata, ib_data;
  logic [7:0] ob_data = '0;
  logic ib_push, ob_pop;
  logic ob_empty = 1'b1;
  logic [$clog2(IND+1)-1:0] ib_count = '0;
  int checks = 0, failures = 0;
  logic [7:0] ibq [$], obq [$];
  int drain_en;

  dma_controller #(.IN_DEPTH(IND)) dut (.*);
  main_memory_model #(.SIZE(4096)) u_mem (.*);

  // Stand-in input buffer: queue drained slowly when enabled.
  always @(negedge clk) #1 ib_count = ($clog2(IND+1))'(ibq.size());
  always @(posedge clk) begin
    if (rst_n && ib_push) ibq.push_back(ib_data);
    if (ibq.size() > IND) begin failures++; $display("FAIL input buffer overfilled"); end
  end
  // Stand-in output buffer.
  always @(negedge clk) #1 begin
    ob_empty = (obq.size() == 0);
    ob_data  = (obq.size() == 0) ? 8'd0 : obq[0];
  end
  always @(posedge clk) if (ob_pop && !ob_empty) void'(obq.pop_front());

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic cfg(input logic [3:0] r, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {U_DMA, 12'd0, 12'd0, r}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, got_n;
    got_n = 0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = 8'(a * 7 + 3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Memory -> input buffer, 40 bytes from address 100, consumer keeps up late.
    cfg(0, 100); cfg(1, 40); cfg(2, 32'h1);
    repeat (60) @(negedge clk);
    chk("stalls while input buffer full", ibq.size(), IND);
    chk("busy while stalled", int'(busy), 1);
    n = 0;
    while (busy && n < 2000) begin
      @(negedge clk); n++;
      if (ibq.size() > 0 && ($urandom_range(0, 1) == 1)) begin
        chk("read byte", int'(ibq.pop_front()), ((100 + got_n) * 7 + 3) & 255);
        got_n++;
      end
    end
    chk("read transfer completes", int'(busy), 0);
    while (ibq.size() > 0) begin
      chk("read byte", int'(ibq.pop_front()), ((100 + got_n) * 7 + 3) & 255);
      got_n++;
    end
    chk("bytes of first transfer", got_n, 40);
    // Check content with a fresh transfer and no back-pressure.
    cfg(0, 500); cfg(1, 12); cfg(2, 32'h1);
    n = 0;
    while (busy && n < 500) begin @(negedge clk); n++; end
    repeat (5) @(negedge clk);
    chk("bytes read", ibq.size(), 12);
    for (int k = 0; k < 12 && k < ibq.size(); k++) chk("byte value", int'(ibq[k]), ((500 + k) * 7 + 3) & 255);
    // Output buffer -> memory, 20 bytes to address 2000.
    for (int k = 0; k < 20; k++) obq.push_back(8'(200 - k));
    cfg(0, 2000); cfg(1, 20); cfg(2, 32'h3);
    n = 0;
    while (busy && n < 500) begin @(negedge clk); n++; end
    repeat (3) @(negedge clk);
    chk("output drained", obq.size(), 0);
    for (int k = 0; k < 20; k++) chk("written byte", int'(u_mem.mem[2000 + k]), 200 - k);
    chk("nothing written beyond", int'(u_mem.mem[2020]), (2020 * 7 + 3) & 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
