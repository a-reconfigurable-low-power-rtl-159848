// tb_sys_input_buffer: fills the FIFO and checks that frames leave on the
// selected mesh row only, one word per cycle, DATA words first and TARGET
// words after them, that a frame waits until it is complete in the FIFO, and
// that frame starts are at least `period` cycles apart.
module tb_sys_input_buffer;
  import nn_pkg::*;
  localparam int D = 64, MR = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, wr_valid, full, frame_sent;
  logic [31:0] cfg_addr, cfg_wdata;
  logic [7:0] wr_data;
  logic [$clog2(D+1)-1:0] count;
  flit_t row_flit [MR];
  int checks = 0, failures = 0, cyc = 0;
  flit_t seen [$];
  int seen_cyc [$];
  int wrong_row = 0;

  sys_input_buffer #(.DEPTH(D), .MESH_R(MR)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (row_flit[1].valid) begin seen.push_back(row_flit[1]); seen_cyc.push_back(cyc); end
      if (row_flit[0].valid || row_flit[2].valid) wrong_row++;
    end
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic cfg(input logic [3:0] r, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {U_INBUF, 24'd0, r}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic push(input int n, input int base);
    for (int k = 0; k < n; k++) begin
      @(negedge clk) begin wr_valid = 1; wr_data = 8'(base + k); end
    end
    @(negedge clk) wr_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; wr_valid = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg(0, 1); cfg(5, 1); cfg(1, 5); cfg(2, 2); cfg(3, 30); cfg(4, 1);
    push(4, 0);                       // less than one frame of 7 words
    repeat (10) @(negedge clk);
    chk("incomplete frame held", seen.size(), 0);
    push(17, 4);                      // now 21 words = 3 frames
    repeat (120) @(negedge clk);
    chk("words sent", seen.size(), 21);
    for (int k = 0; k < seen.size(); k++) begin
      chk("word order", int'(seen[k].data), k);
      chk("word kind", int'(seen[k].kind), (k % 7 < 5) ? int'(K_DATA) : int'(K_TARGET));
      if (k % 7 != 0) chk("back-to-back", seen_cyc[k] - seen_cyc[k - 1], 1);
    end
    chk("frame period", seen_cyc[7] - seen_cyc[0], 30);
    chk("frame period", seen_cyc[14] - seen_cyc[7], 30);
    chk("other rows idle", wrong_row, 0);
    chk("fifo empty", int'(count), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
