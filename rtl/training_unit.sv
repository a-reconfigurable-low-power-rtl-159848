// training_unit: digital part of the on-chip back-propagation circuit.
//
// It holds, for the COLS neurons of a core:
//  * the f'(DP) buffer. After a forward evaluation the control unit steps
//    fp_idx over the neurons; each step reads the discretised DP of that
//    neuron through one shared lookup table and stores f'(DP_j).
//  * the error (delta) registers and their digital multiplier. Stepping d_idx
//    over the neurons stores delta_j = err_in_j * f'(DP_j). err_in_j is an
//    8-bit error: the converted t_j - y_j for an output layer (Eq. 4) or the
//    converted back-propagated sum sum_k delta_k w_kj for a hidden layer (Eq. 5).
//    The product (units 2^-7 * 2^-9) is scaled to the 8-bit delta format
//    (units 2^-9) by an arithmetic right shift of 7 and saturated.
//  * the row shift register of the multiplexed back-propagation circuit: a
//    single one that enables the pass transistor of one crossbar row at a time,
//    so back-propagation costs one cycle per input row (O(m)).
//  * the weight-update pulse generator. For each neuron it produces a column
//    pulse whose duration is proportional to eta * |delta_j| and whose polarity
//    is the sign of delta_j: duration = min((|delta_j| * eta) >> 4, PULSE_MAX)
//    cycles. The row amplitudes (x_i) come from the input buffer, so each
//    synapse moves by an amount proportional to eta * delta_j * x_i.
//
// The first three follow the paper's figures: one LUT and one multiplier are
// shared by all neurons, as the paper suggests for the layer-2 error circuit.
// The number formats, the >>4 scale of eta and the PULSE_MAX bound
// (200 cycles = the paper's 1.00 us weight-update time at 200 MHz) are this
// design's choices.
module training_unit
  import nn_pkg::*;
#(
  parameter int unsigned ROWS      = 400,
  parameter int unsigned COLS      = 100,
  parameter int unsigned PULSE_MAX = 200
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // f'(DP) capture
  input  logic                         fp_we,
  input  logic [15:0]                  fp_idx,
  input  logic signed [DPI_BITS-1:0]   dp_idx [COLS],
  // delta computation
  input  logic                         d_we,
  input  logic [15:0]                  d_idx,
  input  logic signed [ERR_BITS-1:0]   err_in [COLS],
  output logic signed [ERR_BITS-1:0]   delta  [COLS],
  // multiplexed back-propagation row select
  input  logic                         bwd_start,
  input  logic                         bwd_shift,
  output logic [ROWS-1:0]              row_sel,
  // weight-update pulses
  input  logic                         upd_start,
  input  logic [7:0]                   eta,
  output logic [COLS-1:0]              pulse_en,
  output logic [COLS-1:0]              pulse_neg
);

  localparam int CI = $clog2(COLS);
  localparam int PW = $clog2(PULSE_MAX + 1);

  logic [FP_BITS-1:0]        fp_buf [COLS];
  logic [FP_BITS-1:0]        lut_out;
  logic signed [DPI_BITS-1:0] lut_in;
  logic [PW-1:0]             pcnt [COLS];
  logic signed [ERR_BITS-1:0] prod_q;

  assign lut_in = (fp_idx < 16'(COLS)) ? dp_idx[fp_idx[CI-1:0]] : '0;

  fprime_lut u_lut (.dp_idx(lut_in), .fprime(lut_out));

  // Error multiplier: delta = err * f' >>> 7, saturated to 8 bits.
  always_comb begin
    logic signed [ERR_BITS-1:0] ev;
    logic [FP_BITS-1:0]         fv;
    logic signed [31:0]         p;
    ev = (d_idx < 16'(COLS)) ? err_in[d_idx[CI-1:0]] : '0;
    fv = (d_idx < 16'(COLS)) ? fp_buf[d_idx[CI-1:0]] : '0;
    p  = (32'(ev) * $signed({24'd0, fv})) >>> 7;
    prod_q = ERR_BITS'(sat(64'(p), ERR_BITS));
  end

  function automatic logic [PW-1:0] pulse_len(input logic signed [ERR_BITS-1:0] d,
                                              input logic [7:0] k);
    int unsigned mag, len;
    mag = (d < 0) ? int'(-32'(d)) : int'(d);
    len = (mag * int'(k)) >> 4;
    if (len > PULSE_MAX) len = PULSE_MAX;
    return PW'(len);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) begin
        fp_buf[j]    <= '0;
        delta[j]     <= '0;
        pcnt[j]      <= '0;
        pulse_neg[j] <= 1'b0;
      end
      row_sel <= '0;
    end else begin
      if (fp_we && fp_idx < 16'(COLS)) fp_buf[fp_idx[CI-1:0]] <= lut_out;
      if (d_we && d_idx < 16'(COLS))   delta[d_idx[CI-1:0]]   <= prod_q;

      if (bwd_start)      row_sel <= ROWS'(1);
      else if (bwd_shift) row_sel <= row_sel << 1;

      for (int j = 0; j < COLS; j++) begin
        if (upd_start) begin
          pcnt[j]      <= pulse_len(delta[j], eta);
          pulse_neg[j] <= delta[j][ERR_BITS-1];
        end else if (pcnt[j] != '0) begin
          pcnt[j] <= pcnt[j] - 1'b1;
        end
      end
    end
  end

  always_comb
    for (int j = 0; j < COLS; j++) pulse_en[j] = (pcnt[j] != '0);

endmodule
