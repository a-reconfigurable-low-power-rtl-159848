// core_control_unit: finite-state machine that sequences one neural core.
//
// The paper specifies the control unit only as a small FSM that manages the
// input and output buffers and talks to the core's routing switch; the phase
// order below is this design's reading of the paper's three training steps
// (forward pass with error generation, back-propagation, weight update).
//
//   S_RX   take n_in input words (and, for an output layer, n_out targets)
//   S_EVAL one-cycle evaluation strobe to the crossbar
//   S_WAIT wait for the crossbar to settle (fwd_done), load the output buffer
//   S_FP   training only: store f'(DP_j) for j = 0..n_out-1
//   S_TX   if send_fwd: send the n_out neuron outputs as DATA words
//   then, recognition: back to S_RX.
//   S_RXE  hidden layer: take n_out back-propagated error sums (ERR words)
//   S_DELTA compute delta_j = err_j * f'(DP_j) for j = 0..n_out-1
//   S_BWD  if send_back: select crossbar rows 0..n_in-1 one per cycle and send
//          each row's error sum as an ERR word one cycle later
//   S_BWD_END one cycle in which the last error word leaves (or, without
//          back-propagation, the last delta register settles); pulses load
//   S_UPD  UPD_CYC cycles of weight-update pulses, then back to S_RX
//
// Entering S_RX clears both input-buffer regions. tx_flit is registered, so a
// word leaves the cycle after the state that produced it. With the defaults a
// recognition pass costs n_in + 1 + EVAL_CYC + n_out cycles plus link hops.
module core_control_unit
  import nn_pkg::*;
  import core_state_pkg::*;
#(
  parameter int unsigned UPD_CYC = 200
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  mode_e                      mode,
  input  logic                       send_fwd,
  input  logic                       send_back,
  input  logic [15:0]                n_in,
  input  logic [15:0]                n_out,
  // input buffer
  input  logic                       x_full,
  input  logic                       e_full,
  output logic                       accept_x,
  output logic                       accept_t,
  output logic                       accept_e,
  output logic                       clear_x,
  output logic                       clear_e,
  // crossbar
  output logic                       eval,
  input  logic                       fwd_done,
  output logic                       bwd_en,
  input  logic                       bsum_valid,
  input  logic signed [ERR_BITS-1:0] bsum_code,
  output logic                       upd_en,
  // output buffer
  output logic                       ob_load,
  output logic [15:0]                rd_idx,
  input  logic [BUS_W-1:0]           out_word,
  // training unit
  output logic                       fp_we,
  output logic                       d_we,
  output logic [15:0]                idx,
  output logic                       err_from_array,
  output logic                       bwd_start,
  output logic                       bwd_shift,
  output logic                       upd_start,
  // link and status
  output flit_t                      tx_flit,
  output core_state_e                state
);

  core_state_e nstate;
  logic [15:0] cnt, ncnt;
  logic        training;

  assign training       = (mode != M_RECOG);
  assign err_from_array = (mode == M_TRAIN_OUT);
  assign idx            = cnt;
  assign rd_idx         = cnt;

  always_comb begin
    nstate    = state;
    ncnt      = cnt;
    accept_x  = 1'b0;
    accept_t  = 1'b0;
    accept_e  = 1'b0;
    clear_x   = 1'b0;
    clear_e   = 1'b0;
    eval      = 1'b0;
    bwd_en    = 1'b0;
    upd_en    = 1'b0;
    ob_load   = 1'b0;
    fp_we     = 1'b0;
    d_we      = 1'b0;
    bwd_start = 1'b0;
    bwd_shift = 1'b0;
    upd_start = 1'b0;

    unique case (state)
      S_RX: begin
        accept_x = 1'b1;
        accept_t = (mode == M_TRAIN_OUT);
        if (x_full && (mode != M_TRAIN_OUT || e_full)) nstate = S_EVAL;
      end
      S_EVAL: begin
        eval   = 1'b1;
        nstate = S_WAIT;
      end
      S_WAIT: begin
        if (fwd_done) begin
          ob_load = 1'b1;
          ncnt    = '0;
          if (training)      nstate = S_FP;
          else if (send_fwd) nstate = S_TX;
          else begin nstate = S_RX; clear_x = 1'b1; clear_e = 1'b1; end
        end
      end
      S_FP: begin
        fp_we = 1'b1;
        ncnt  = cnt + 1'b1;
        if (cnt == n_out - 1'b1) begin
          ncnt = '0;
          if (send_fwd)                  nstate = S_TX;
          else if (mode == M_TRAIN_OUT)  nstate = S_DELTA;
          else                           nstate = S_RXE;
        end
      end
      S_TX: begin
        ncnt = cnt + 1'b1;
        if (cnt == n_out - 1'b1) begin
          ncnt = '0;
          if (!training) begin nstate = S_RX; clear_x = 1'b1; clear_e = 1'b1; end
          else if (mode == M_TRAIN_OUT) nstate = S_DELTA;
          else                          nstate = S_RXE;
        end
      end
      S_RXE: begin
        accept_e = 1'b1;
        if (e_full) begin nstate = S_DELTA; ncnt = '0; end
      end
      S_DELTA: begin
        d_we = 1'b1;
        ncnt = cnt + 1'b1;
        if (cnt == n_out - 1'b1) begin
          ncnt = '0;
          if (send_back) begin bwd_start = 1'b1; nstate = S_BWD; end
          else           nstate = S_BWD_END;   // delta[last] settles first
        end
      end
      S_BWD: begin
        bwd_en    = 1'b1;
        bwd_shift = 1'b1;
        ncnt      = cnt + 1'b1;
        if (cnt == n_in - 1'b1) begin ncnt = '0; nstate = S_BWD_END; end
      end
      S_BWD_END: begin
        upd_start = 1'b1;
        nstate    = S_UPD;
      end
      S_UPD: begin
        upd_en = 1'b1;
        ncnt   = cnt + 1'b1;
        if (32'(cnt) == UPD_CYC - 1) begin
          ncnt = '0; nstate = S_RX; clear_x = 1'b1; clear_e = 1'b1;
        end
      end
      default: nstate = S_RX;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_RX;
      cnt     <= '0;
      tx_flit <= FLIT_IDLE;
    end else begin
      state <= nstate;
      cnt   <= ncnt;
      if (state == S_TX)
        tx_flit <= '{valid: 1'b1, kind: K_DATA, data: out_word};
      else if (bsum_valid)
        tx_flit <= '{valid: 1'b1, kind: K_ERR, data: bsum_code};
      else
        tx_flit <= FLIT_IDLE;
    end
  end

  a_eval_pulse: assert property (@(posedge clk) disable iff (!rst_n) eval |=> !eval)
    else $error("core_control_unit: eval strobe longer than one cycle");

endmodule
