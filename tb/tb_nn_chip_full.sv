// tb_nn_chip_full: one recognition pass through the chip at full size.
//
// The chip is instantiated with all its default sizes (24 x 24 mesh, 400-input
// 100-neuron cores). Core (0,0) evaluates one 400-input, 100-neuron layer with
// the random start weights its crossbar holds after reset plus one strong
// programmed synapse per neuron. The input vector is
// read from main memory by the DMA engine, framed by the input buffer onto mesh
// row 0, and the 100 outputs travel east through the 23 other routers of row 0
// to the output buffer, from where the DMA engine writes them back to memory.
// The results are compared with a floating-point model of the layer, and the
// number of cycles from the start of the frame to the last output is reported.
module tb_nn_chip_full;
  import nn_pkg::*;
  localparam int R = 400, C = 100, MC = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [31:0] cfg_addr, cfg_wdata, mem_addr;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [7:0] mem_wdata, mem_rdata;
  logic dma_busy, dma_done, frame_sent, collision, dropped, out_overflow;
  logic [10:0] out_count;
  int checks = 0, failures = 0;
  longint t_frame, t_last;

  nn_chip dut (.*);
  main_memory_model #(.SIZE(4096)) u_mem (.*);

  always @(posedge clk) if (rst_n) begin
    if (frame_sent) t_frame = $time;
    if (dut.out_row[0].valid) t_last = $time;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic cfg(input logic [3:0] unit, input int node, input int r, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {unit, 12'(node), 16'(r)}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic dma(input int addr, input int len, input bit to_mem);
    int n = 0;
    cfg(U_DMA, 0, 0, addr); cfg(U_DMA, 0, 1, len); cfg(U_DMA, 0, 2, {30'd0, to_mem, 1'b1});
    @(negedge clk);
    while (dma_busy && n < 100000) begin @(negedge clk); n++; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, nz;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; t_frame = 0; t_last = 0;
    for (int i = 0; i < R; i++) u_mem.mem[i] = 8'($urandom_range(0, 255));
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg(U_ROUTER, 0, P_L, 5'b01000);
    cfg(U_ROUTER, 0, P_E, 5'b10000);
    for (int c = 1; c < MC; c++) cfg(U_ROUTER, c, P_E, 5'b01000);
    // One strong synapse per neuron on top of the start weights, so that the
    // outputs spread over the ADC range.
    for (int j = 0; j < C; j++) begin
      cfg(U_CORE, 0, C_WSEL, {16'((j * 7) % R), 16'(j)});
      cfg(U_CORE, 0, C_WDATA, {16'(j % 2 ? 16'd4000 : 16'd60000), 16'(j % 2 ? 16'd60000 : 16'd4000)});
    end
    cfg(U_CORE, 0, C_NIN, R); cfg(U_CORE, 0, C_NOUT, C);
    cfg(U_CORE, 0, C_MODE, {28'd0, 1'b0, 1'b1, M_RECOG});
    cfg(U_INBUF, 0, 0, 0); cfg(U_INBUF, 0, 1, R); cfg(U_INBUF, 0, 2, 0);
    cfg(U_INBUF, 0, 3, 1000); cfg(U_INBUF, 0, 4, 1);
    cfg(U_OUTBUF, 0, 0, 0); cfg(U_OUTBUF, 0, 1, 3'b001);
    dma(0, R, 1'b0);
    n = 0;
    while (out_count < 11'(C) && n < 5000) begin @(negedge clk); n++; end
    repeat (50) @(negedge clk);
    chk("outputs buffered", int'(out_count), C);
    dma(1024, C, 1'b1);
    repeat (5) @(negedge clk);
    nz = 0;
    for (int j = 0; j < C; j++) begin
      real dp;
      int f;
      dp = 0.0;
      for (int i = 0; i < R; i++)
        dp += real'($signed(u_mem.mem[i])) / 256.0 *
              (real'(dut.g_r[0].g_c[0].u_core.u_xbar.gp[i][j]) - real'(dut.g_r[0].g_c[0].u_core.u_xbar.gn[i][j])) / 16384.0;
      f = int'($floor(dp / 4.0 * 8.0));
      f = (f < -4) ? -4 : (f > 3) ? 3 : f;
      if (f != 0 && f != -1) nz++;
      chk($sformatf("output %0d", j), int'($signed(u_mem.mem[1024 + j])), f * 32);
    end
    $display("outputs away from zero: %0d of %0d", nz, C);
    checks++; if (nz < C / 4) begin failures++; $display("FAIL too few outputs away from zero"); end
    $display("frame start to last output at the east edge: %0d cycles", (t_last - t_frame) / 10);
    chk("no collision", int'(collision), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
