// tb_core_output_buffer: loads random 3-bit neuron codes and checks that each
// is read back as the 8-bit word code * 32, that the buffer holds its
// contents until the next load, and that out-of-range reads give 0.
module tb_core_output_buffer;
  import nn_pkg::*;
  localparam int C = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load;
  logic signed [Y_BITS-1:0] y_code [C];
  logic [15:0] rd_idx;
  logic [BUS_W-1:0] rd_word;
  int checks = 0, failures = 0;
  int ref_q [C];

  core_output_buffer #(.COLS(C)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; rd_idx = 0;
    for (int j = 0; j < C; j++) y_code[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      @(negedge clk);
      for (int j = 0; j < C; j++) begin
        ref_q[j] = $urandom_range(0, 7) - 4;
        y_code[j] = 3'(ref_q[j]);
      end
      load = 1;
      @(negedge clk);
      load = 0;
      for (int j = 0; j < C; j++) y_code[j] = '0;   // inputs change, buffer holds
      for (int j = 0; j < C; j++) begin
        rd_idx = 16'(j);
        #1;
        checks++;
        if ($signed(rd_word) != 8'(ref_q[j] * 32)) begin
          failures++; $display("FAIL word %0d: %0d vs %0d", j, $signed(rd_word), ref_q[j] * 32);
        end
      end
    end
    rd_idx = 16'(C); #1; checks++; if (rd_word != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
