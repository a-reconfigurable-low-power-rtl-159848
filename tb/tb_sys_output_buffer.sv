// tb_sys_output_buffer: offers words on every mesh row and checks that only
// the selected row's words of enabled kinds are stored, in order, and that a
// word arriving when full is lost and raises the overflow flag.
module tb_sys_output_buffer;
  import nn_pkg::*;
  localparam int D = 8, MR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, rd_pop, empty, overflow;
  logic [31:0] cfg_addr, cfg_wdata;
  flit_t row_flit [MR];
  logic [7:0] rd_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  int expq [$];

  sys_output_buffer #(.DEPTH(D), .MESH_R(MR)) dut (.*);

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic cfg(input logic [3:0] r, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {U_OUTBUF, 24'd0, r}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; rd_pop = 0;
    for (int r = 0; r < MR; r++) row_flit[r] = FLIT_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg(0, 2); cfg(1, 3'b011);           // row 2, DATA and ERR words
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      for (int r = 0; r < MR; r++)
        row_flit[r] = '{valid: 1'b1, kind: kind_e'(t % 3), data: 8'(r * 50 + t)};
      if (t % 3 != 2) expq.push_back(2 * 50 + t);
    end
    @(negedge clk);
    for (int r = 0; r < MR; r++) row_flit[r] = FLIT_IDLE;
    chk("stored count", int'(count), expq.size());
    chk("no overflow yet", int'(overflow), 0);
    for (int k = 0; k < expq.size(); k++) begin
      chk("stored word", int'(rd_data), expq[k]);
      @(negedge clk) rd_pop = 1;
      @(negedge clk) rd_pop = 0;
    end
    chk("empty", int'(empty), 1);
    // Overflow: D + 2 DATA words.
    for (int t = 0; t < D + 2; t++) begin
      @(negedge clk) row_flit[2] = '{valid: 1'b1, kind: K_DATA, data: 8'(t)};
    end
    @(negedge clk) row_flit[2] = FLIT_IDLE;
    chk("full count", int'(count), D);
    chk("overflow flagged", int'(overflow), 1);
    chk("oldest kept", int'(rd_data), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
