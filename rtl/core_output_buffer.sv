// core_output_buffer: output buffer of one neural core.
//
// Every neuron column ends in a 3-bit ADC; when an evaluation has settled the
// control unit loads all COLS codes into this buffer in one cycle, and then
// reads them out one per cycle for the 8-bit routing link. A 3-bit code q
// (neuron output q/8) leaves as the word {q, 5'b0}, which is the same value in
// the input-word format (value = word/256), so the next core can take it as an
// input unchanged. The paper gives the buffer, the 3-bit ADCs and the 8-bit
// link; the word format is this design's choice.
//
// Timing: load is sampled at the clock edge; rd_word is combinational from
// rd_idx.
module core_output_buffer
  import nn_pkg::*;
#(
  parameter int unsigned COLS = 100
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic signed [Y_BITS-1:0] y_code [COLS],
  input  logic [15:0]              rd_idx,
  output logic [BUS_W-1:0]         rd_word
);

  logic signed [Y_BITS-1:0] buf_q [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) buf_q[j] <= '0;
    end else if (load) begin
      for (int j = 0; j < COLS; j++) buf_q[j] <= y_code[j];
    end
  end

  always_comb begin
    rd_word = '0;
    if (rd_idx < 16'(COLS))
      rd_word = {buf_q[rd_idx[$clog2(COLS)-1:0]], {(BUS_W - Y_BITS){1'b0}}};
  end

endmodule
