// sys_output_buffer: buffer between the neural-core mesh and main memory.
//
// It listens to the east port of the last router of one mesh row (the paper
// places the output buffer along the opposite edge of the mesh from the input
// buffer) and stores every valid word whose kind is enabled in kind_mask in a
// DEPTH-byte FIFO (1 kB in the paper). The DMA controller drains it to main
// memory. A word that arrives while the FIFO is full is lost and sets the
// sticky overflow flag. Row selection and the kind filter are this design's
// choices.
//
// Registers (unit U_OUTBUF): 0 row, 1 kind_mask (bit k accepts kind k).
module sys_output_buffer
  import nn_pkg::*;
#(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned MESH_R = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [31:0]                cfg_addr,
  input  logic [31:0]                cfg_wdata,
  input  flit_t                      row_flit [MESH_R],
  // read side (DMA)
  input  logic                       rd_pop,
  output logic [7:0]                 rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow
);

  logic [15:0] row_q;
  logic [2:0]  kind_mask;
  flit_t       f;
  logic        push, full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q <= '0; kind_mask <= 3'b001;
    end else if (cfg_we && cfg_addr[31:28] == U_OUTBUF) begin
      unique case (cfg_addr[3:0])
        4'd0: row_q     <= cfg_wdata[15:0];
        4'd1: kind_mask <= cfg_wdata[2:0];
        default: ;
      endcase
    end
  end

  assign f    = (row_q < 16'(MESH_R)) ? row_flit[row_q[$clog2(MESH_R)-1:0]] : FLIT_IDLE;
  assign push = f.valid && kind_mask[f.kind];

  sync_fifo #(.W(8), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .wdata(f.data), .pop(rd_pop), .rdata(rd_data), .empty, .full, .count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              overflow <= 1'b0;
    else if (push && full)   overflow <= 1'b1;
  end

endmodule
