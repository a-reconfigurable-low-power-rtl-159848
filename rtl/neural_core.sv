// neural_core: one memristor neural core.
//
// A core evaluates one layer of up to ROWS inputs and COLS neurons in a single
// analog step and can train that layer in place. It joins the blocks of the
// paper's core figure: the input buffer feeding the crossbar DACs, the
// memristor crossbar with its neuron circuits and ADCs (memristor_array, a
// behavioural model), the output buffer, the training unit and the control
// unit. The paper's core is 400 x 200 memristors, i.e. 400 inputs and 100
// neurons; those are the defaults.
//
// Configuration (this design's register map, written over the chip's
// configuration bus; the unit field must be U_CORE and the node field node_id):
//   C_NIN   inputs in use      C_NOUT neurons in use
//   C_MODE  {send_back, send_fwd, mode}   C_ETA learning-rate code
//   C_WSEL  {row, col} of a synapse; C_WDATA {G+, G-} programs that synapse.
// Data enter on rx_flit and leave on tx_flit, both attached to the core port
// of the node's routing switch. For an output layer the error input is the
// analog t - y of the crossbar model; for a hidden layer it is the received
// back-propagated sum held in the input buffer.
module neural_core
  import nn_pkg::*;
  import core_state_pkg::*;
#(
  parameter int unsigned ROWS      = 400,
  parameter int unsigned COLS      = 100,
  parameter int unsigned EVAL_CYC  = 4,
  parameter int unsigned PULSE_MAX = 200
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [11:0]  node_id,   // mesh position, strapped at the instance
  input  logic         cfg_we,
  input  logic [31:0]  cfg_addr,
  input  logic [31:0]  cfg_wdata,
  input  flit_t        rx_flit,
  output flit_t        tx_flit,
  output core_state_e  state,
  output logic         dropped
);

  // ---------------- configuration registers ----------------
  logic [15:0] n_in, n_out;
  mode_e       mode;
  logic        send_fwd, send_back;
  logic [7:0]  eta;
  logic [15:0] wsel_row, wsel_col;
  logic        prog_we;
  logic [G_BITS-1:0] prog_gp, prog_gn;
  logic        sel;

  assign sel = cfg_we && cfg_addr[31:28] == U_CORE && cfg_addr[27:16] == node_id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_in      <= 16'(ROWS);
      n_out     <= 16'(COLS);
      mode      <= M_RECOG;
      send_fwd  <= 1'b1;
      send_back <= 1'b0;
      eta       <= 8'd16;
      wsel_row  <= '0;
      wsel_col  <= '0;
      prog_we   <= 1'b0;
      prog_gp   <= '0;
      prog_gn   <= '0;
    end else begin
      prog_we <= 1'b0;
      if (sel) begin
        unique case (cfg_addr[15:0])
          C_NIN:   n_in <= cfg_wdata[15:0];
          C_NOUT:  n_out <= cfg_wdata[15:0];
          C_MODE:  begin
                     mode      <= mode_e'(cfg_wdata[1:0]);
                     send_fwd  <= cfg_wdata[2];
                     send_back <= cfg_wdata[3];
                   end
          C_ETA:   eta <= cfg_wdata[7:0];
          C_WSEL:  begin wsel_row <= cfg_wdata[31:16]; wsel_col <= cfg_wdata[15:0]; end
          C_WDATA: begin prog_gp <= cfg_wdata[31:16]; prog_gn <= cfg_wdata[15:0]; prog_we <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  // ---------------- datapath ----------------
  logic signed [7:0]            x    [ROWS];
  logic signed [7:0]            ebuf [COLS];
  logic signed [Y_BITS-1:0]     y_code [COLS];
  logic signed [DPI_BITS-1:0]   dp_idx [COLS];
  logic signed [ERR_BITS-1:0]   err_code [COLS];
  logic signed [ERR_BITS-1:0]   err_in [COLS];
  logic signed [ERR_BITS-1:0]   delta [COLS];
  logic [ROWS-1:0]              row_sel;
  logic [COLS-1:0]              pulse_en, pulse_neg;
  logic signed [ERR_BITS-1:0]   bsum_code;
  logic bsum_valid, fwd_done;
  logic accept_x, accept_t, accept_e, clear_x, clear_e, x_full, e_full;
  logic eval, bwd_en, upd_en, ob_load, fp_we, d_we, err_from_array;
  logic bwd_start, bwd_shift, upd_start;
  logic [15:0] rd_idx, idx;
  logic [BUS_W-1:0] out_word;

  core_input_buffer #(.ROWS(ROWS), .COLS(COLS)) u_ibuf (
    .clk, .rst_n, .in_flit(rx_flit), .accept_x, .accept_t, .accept_e,
    .clear_x, .clear_e, .n_in, .n_out, .x, .e(ebuf), .x_full, .e_full, .dropped
  );

  memristor_array #(.ROWS(ROWS), .COLS(COLS), .EVAL_CYC(EVAL_CYC)) u_xbar (
    .clk, .rst_n, .seed({20'd0, node_id} + 32'd1), .x, .eval, .fwd_done, .y_code, .dp_idx,
    .tgt(ebuf), .err_code, .delta, .row_sel, .bwd_en, .bsum_code, .bsum_valid,
    .upd_en, .pulse_en, .pulse_neg,
    .prog_we, .prog_row(wsel_row), .prog_col(wsel_col), .prog_gp, .prog_gn
  );

  core_output_buffer #(.COLS(COLS)) u_obuf (
    .clk, .rst_n, .load(ob_load), .y_code, .rd_idx, .rd_word(out_word)
  );

  always_comb
    for (int j = 0; j < COLS; j++) err_in[j] = err_from_array ? err_code[j] : ebuf[j];

  training_unit #(.ROWS(ROWS), .COLS(COLS), .PULSE_MAX(PULSE_MAX)) u_train (
    .clk, .rst_n, .fp_we, .fp_idx(idx), .dp_idx, .d_we, .d_idx(idx), .err_in, .delta,
    .bwd_start, .bwd_shift, .row_sel, .upd_start, .eta, .pulse_en, .pulse_neg
  );

  core_control_unit #(.UPD_CYC(PULSE_MAX)) u_ctrl (
    .clk, .rst_n, .mode, .send_fwd, .send_back, .n_in, .n_out,
    .x_full, .e_full, .accept_x, .accept_t, .accept_e, .clear_x, .clear_e,
    .eval, .fwd_done, .bwd_en, .bsum_valid, .bsum_code, .upd_en,
    .ob_load, .rd_idx, .out_word, .fp_we, .d_we, .idx, .err_from_array,
    .bwd_start, .bwd_shift, .upd_start, .tx_flit, .state
  );

endmodule
