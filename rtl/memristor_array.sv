// memristor_array: behavioural model of the analog half of a neural core.
//
// This is a behavioural model of an analog circuit, not a circuit to
// synthesize. It stands for the memristor crossbar of one core together with
// the DACs that drive it, the op-amp neuron circuits under its columns, the
// ADCs behind them, the target-minus-output summing amplifiers of the output
// error circuit, and the pass-transistor multiplexed read-out used for
// back-propagation. Its ports are the digital sides of those converters.
//
// Following the paper:
//  * every synapse is a pair of memristors, weight w = sigma+ - sigma-, so a
//    core of ROWS inputs and COLS neurons holds ROWS x 2*COLS memristors
//    (400 x 200 in the paper);
//  * a forward evaluation computes DP_j = sum_i x_i w_ij for all neurons at once
//    and the neuron output y_j = h(DP_j), h(x) = x/4 clipped to +-0.5 (Eq. 3);
//    it takes EVAL_CYC cycles (20 ns at the 200 MHz routing clock = 4 cycles);
//  * neuron outputs go through 3-bit ADCs; DP_j is discretised for the f'
//    lookup table;
//  * the output error circuit forms t_j - y_j in analog and converts it with
//    an 8-bit ADC;
//  * back-propagation drives +delta_j and -delta_j onto the two columns of each
//    neuron and reads the current of the one row whose pass transistor the
//    shift register enables: sum_j w_ij delta_j, converted to 8 bits (Figs. 9-10);
//  * weight update applies to row i a pulse whose amplitude follows x_i and to
//    column j a pulse whose duration follows eta*delta_j. Each memristor of the
//    pair moves by x_i per pulse cycle, in opposite directions, so the weight
//    changes by 2*eta*delta_j*x_i (Eq. 6);
//  * memristors start at high random resistance (low random conductance).
//
// This design's own modelling choices: conductance is a 16-bit state code
// (weight value = (G+ - G-) / 2^14, so |w| < 4); drift, device variation,
// wire resistance and sneak paths are not modelled; conductance saturates at
// the ends of its range; a program port writes a synapse pair directly so
// that trained weights can be loaded for recognition.
//
// Timing: eval is a one-cycle strobe; fwd_done is high in the cycle that ends
// EVAL_CYC clock edges after the edge that samples eval (EVAL_CYC >= 2), and
// y_code/dp_idx/err_code are valid from then until the next eval. bwd_en with
// a one-hot row_sel gives bsum_code one cycle later (bsum_valid). Each cycle
// with upd_en and pulse_en[j] set moves column j's conductances.
module memristor_array
  import nn_pkg::*;
#(
  parameter int unsigned ROWS     = 400,
  parameter int unsigned COLS     = 100,
  parameter int unsigned EVAL_CYC = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [31:0]                  seed,     // start-state pattern of this array
  // forward evaluation
  input  logic signed [7:0]            x        [ROWS],
  input  logic                         eval,
  output logic                         fwd_done,
  output logic signed [Y_BITS-1:0]     y_code   [COLS],
  output logic signed [DPI_BITS-1:0]   dp_idx   [COLS],
  // output error: targets in input-word format
  input  logic signed [7:0]            tgt      [COLS],
  output logic signed [ERR_BITS-1:0]   err_code [COLS],
  // back-propagation read-out
  input  logic signed [ERR_BITS-1:0]   delta    [COLS],
  input  logic [ROWS-1:0]              row_sel,
  input  logic                         bwd_en,
  output logic signed [ERR_BITS-1:0]   bsum_code,
  output logic                         bsum_valid,
  // weight update pulses
  input  logic                         upd_en,
  input  logic [COLS-1:0]              pulse_en,
  input  logic [COLS-1:0]              pulse_neg,
  // direct programming of one synapse pair
  input  logic                         prog_we,
  input  logic [15:0]                  prog_row,
  input  logic [15:0]                  prog_col,
  input  logic [G_BITS-1:0]            prog_gp,
  input  logic [G_BITS-1:0]            prog_gn
);

  localparam int GMAX = (1 << G_BITS) - 1;
  localparam int RW   = $clog2(ROWS);
  localparam int CW   = $clog2(COLS);

  logic [G_BITS-1:0] gp [ROWS][COLS];   // sigma+ state
  logic [G_BITS-1:0] gn [ROWS][COLS];   // sigma- state

  logic signed [47:0] acc    [COLS];    // settled column current difference
  logic signed [47:0] y_an   [COLS];    // neuron output voltage, LSB 2^-24
  logic signed [47:0] e_an   [COLS];    // target minus output, LSB 2^-24
  logic signed [47:0] bsum_an;
  logic [$clog2(EVAL_CYC+1)-1:0] cnt;
  logic              busy;

  // Small pseudo-random start conductance (high resistance).
  function automatic logic [G_BITS-1:0] init_g(input int unsigned i, input int unsigned j,
                                               input logic [31:0] s);
    logic [31:0] h;
    h = (i * 32'd2654435761) ^ (j * 32'd40503) ^ (s * 32'd2246822519);
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return G_BITS'(h[9:0]);
  endfunction

  function automatic logic [G_BITS-1:0] g_add(input logic [G_BITS-1:0] g, input int d);
    int v;
    v = int'(g) + d;
    if (v < 0)    v = 0;
    if (v > GMAX) v = GMAX;
    return G_BITS'(v);
  endfunction

  // Synapse state: reset, programming and weight-update pulses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          gp[i][j] <= init_g(i, 2 * j, seed);
          gn[i][j] <= init_g(i, 2 * j + 1, seed);
        end
    end else begin
      if (upd_en) begin
        for (int j = 0; j < COLS; j++) begin
          if (pulse_en[j]) begin
            for (int i = 0; i < ROWS; i++) begin
              int d;
              d = pulse_neg[j] ? -int'(x[i]) : int'(x[i]);
              gp[i][j] <= g_add(gp[i][j], d);
              gn[i][j] <= g_add(gn[i][j], -d);
            end
          end
        end
      end
      if (prog_we && prog_row < 16'(ROWS) && prog_col < 16'(COLS)) begin
        gp[RW'(prog_row)][CW'(prog_col)] <= prog_gp;
        gn[RW'(prog_row)][CW'(prog_col)] <= prog_gn;
      end
    end
  end

  // Forward evaluation: all neurons settle together after EVAL_CYC cycles.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= '0;
      fwd_done <= 1'b0;
      for (int j = 0; j < COLS; j++) acc[j] <= '0;
    end else begin
      fwd_done <= 1'b0;
      if (eval) begin
        for (int j = 0; j < COLS; j++) begin
          logic signed [47:0] s;
          s = '0;
          for (int i = 0; i < ROWS; i++)
            s += 48'(x[i]) * (48'(gp[i][j]) - 48'(gn[i][j]));
          acc[j] <= s;
        end
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        if (32'(cnt) == EVAL_CYC - 2) begin
          busy     <= 1'b0;
          fwd_done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  // Neuron op-amps (h), discretised DP and the output error summing amplifiers.
  // Analog values are carried at full precision, LSB 2^-24.
  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      y_an[j] = acc[j];                                  // y = DP/4 = acc / 2^24
      if (y_an[j] >  48'sd8388608) y_an[j] =  48'sd8388608;   // +0.5
      if (y_an[j] < -48'sd8388608) y_an[j] = -48'sd8388608;   // -0.5
      dp_idx[j] = DPI_BITS'(sat(64'(acc[j]) >>> 19, DPI_BITS));  // DP * 8
      e_an[j]   = (48'(tgt[j]) <<< 16) - y_an[j];
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_adc
    adc_quantizer #(.AN_W(48), .SHIFT(21), .BITS(Y_BITS))   u_yadc (.analog_in(y_an[j]), .code(y_code[j]));
    adc_quantizer #(.AN_W(48), .SHIFT(17), .BITS(ERR_BITS)) u_eadc (.analog_in(e_an[j]), .code(err_code[j]));
  end

  // Back-propagation: read the selected row's current with delta on the columns.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bsum_an    <= '0;
      bsum_valid <= 1'b0;
    end else begin
      bsum_valid <= bwd_en;
      if (bwd_en) begin
        logic signed [47:0] s;
        s = '0;
        for (int i = 0; i < ROWS; i++)
          if (row_sel[i])
            for (int j = 0; j < COLS; j++)
              s += 48'(delta[j]) * (48'(gp[i][j]) - 48'(gn[i][j]));
        bsum_an <= s;
      end
    end
  end

  adc_quantizer #(.AN_W(48), .SHIFT(16), .BITS(ERR_BITS)) u_badc (.analog_in(bsum_an), .code(bsum_code));

  a_one_row: assert property (@(posedge clk) disable iff (!rst_n) bwd_en |-> $onehot0(row_sel))
    else $error("memristor_array: more than one row selected for back-propagation");

endmodule
