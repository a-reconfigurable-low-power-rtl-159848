// sys_input_buffer: buffer between main memory and the neural-core mesh.
//
// The DMA controller fills a DEPTH-byte FIFO (4 kB in the paper) with training
// or test data; the buffer sends it into the mesh through the west port of
// the first router of one mesh row (the paper places the input buffer along
// one edge of the mesh). Because the routing is static and has no flow
// control, data leave in frames on a fixed schedule: a frame is n_data DATA
// words (one input vector) followed by n_tgt TARGET words (the training
// targets, zero for recognition), one word per cycle, and frames start no
// closer than `period` cycles apart, so that every core on the path has
// finished the previous vector. A frame starts only when the whole frame is in
// the FIFO, so it is never interrupted. Framing and the kind tags are this
// design's choices.
//
// TARGET words leave on row tgt_row, which may differ from the DATA row, so
// that targets can reach the output-layer core by their own static path.
//
// Registers (unit U_INBUF): 0 row, 1 n_data, 2 n_tgt, 3 period, 4 enable,
// 5 tgt_row.
module sys_input_buffer
  import nn_pkg::*;
#(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned MESH_R = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [31:0]                cfg_addr,
  input  logic [31:0]                cfg_wdata,
  // write side (DMA)
  input  logic                       wr_valid,
  input  logic [7:0]                 wr_data,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  // mesh side
  output flit_t                      row_flit [MESH_R],
  output logic                       frame_sent
);

  logic [15:0] row_q, tgt_row, n_data, n_tgt;
  logic [31:0] period;
  logic        enable;
  logic [15:0] pos;          // position in the current frame
  logic        sending;
  logic [31:0] since;        // cycles since the last frame started
  logic        pop, empty;
  logic [7:0]  rdata;
  logic [15:0] frame_len;

  assign frame_len = n_data + n_tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q <= '0; tgt_row <= '0; n_data <= 16'd1; n_tgt <= '0; period <= '0; enable <= 1'b0;
    end else if (cfg_we && cfg_addr[31:28] == U_INBUF) begin
      unique case (cfg_addr[3:0])
        4'd0: row_q  <= cfg_wdata[15:0];
        4'd1: n_data <= cfg_wdata[15:0];
        4'd2: n_tgt  <= cfg_wdata[15:0];
        4'd3: period <= cfg_wdata;
        4'd4: enable <= cfg_wdata[0];
        4'd5: tgt_row <= cfg_wdata[15:0];
        default: ;
      endcase
    end
  end

  sync_fifo #(.W(8), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(wr_valid), .wdata(wr_data), .pop, .rdata, .empty, .full, .count
  );

  assign pop = sending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending    <= 1'b0;
      pos        <= '0;
      since      <= 32'h7FFF_FFFF;
      frame_sent <= 1'b0;
      for (int r = 0; r < MESH_R; r++) row_flit[r] <= FLIT_IDLE;
    end else begin
      frame_sent <= 1'b0;
      if (since != 32'h7FFF_FFFF) since <= since + 1;
      for (int r = 0; r < MESH_R; r++) row_flit[r] <= FLIT_IDLE;
      if (!sending) begin
        if (enable && frame_len != 0 && 32'(count) >= 32'(frame_len) && since + 1 >= period) begin
          sending <= 1'b1;
          pos     <= '0;
          since   <= '0;
        end
      end else begin
        if (pos < n_data) begin
          if (row_q < 16'(MESH_R))
            row_flit[row_q[$clog2(MESH_R)-1:0]] <= '{valid: 1'b1, kind: K_DATA, data: rdata};
        end else begin
          if (tgt_row < 16'(MESH_R))
            row_flit[tgt_row[$clog2(MESH_R)-1:0]] <= '{valid: 1'b1, kind: K_TARGET, data: rdata};
        end
        pos <= pos + 1'b1;
        if (pos == frame_len - 1'b1) begin
          sending    <= 1'b0;
          frame_sent <= 1'b1;
        end
      end
    end
  end

endmodule
