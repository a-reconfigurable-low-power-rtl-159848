// core_input_buffer: digital input buffer of one neural core.
//
// Words arrive one per cycle from the core's routing switch and are stored
// until the crossbar has used them; every stored word drives one DAC, so the
// whole buffer is read in parallel. The paper gives the buffer and its role
// (inputs arrive in digital form, are stored, then applied through DACs).
// This design adds a second, COLS-entry region to the same buffer for the
// per-neuron error inputs of training: training targets (kind TARGET) for an
// output layer, or back-propagated error sums (kind ERR) for a hidden layer.
//
// Each region is filled in arrival order by its own write counter. A word is
// accepted only when the control unit enables its kind and the region is not
// yet full; any other valid word is dropped and reported on `dropped` for one
// cycle (with a static schedule this indicates a scheduling error).
// clear_x / clear_e zero a region and rewind its counter, so unused rows
// drive 0 V. x_full/e_full compare the counters with n_in/n_out.
module core_input_buffer
  import nn_pkg::*;
#(
  parameter int unsigned ROWS = 400,
  parameter int unsigned COLS = 100
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  flit_t                  in_flit,
  input  logic                   accept_x,    // take K_DATA words into the x region
  input  logic                   accept_t,    // take K_TARGET words into the e region
  input  logic                   accept_e,    // take K_ERR words into the e region
  input  logic                   clear_x,
  input  logic                   clear_e,
  input  logic [15:0]            n_in,
  input  logic [15:0]            n_out,
  output logic signed [7:0]      x [ROWS],
  output logic signed [7:0]      e [COLS],
  output logic                   x_full,
  output logic                   e_full,
  output logic                   dropped
);

  localparam int XW = $clog2(ROWS + 1);
  localparam int EW = $clog2(COLS + 1);

  logic [XW-1:0] xcnt;
  logic [EW-1:0] ecnt;
  logic          take_x, take_e;

  assign x_full = (16'(xcnt) >= n_in);
  assign e_full = (16'(ecnt) >= n_out);

  always_comb begin
    take_x = in_flit.valid && accept_x && in_flit.kind == K_DATA && !x_full;
    take_e = in_flit.valid && !e_full &&
             ((accept_t && in_flit.kind == K_TARGET) || (accept_e && in_flit.kind == K_ERR));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xcnt    <= '0;
      ecnt    <= '0;
      dropped <= 1'b0;
      for (int i = 0; i < ROWS; i++) x[i] <= '0;
      for (int j = 0; j < COLS; j++) e[j] <= '0;
    end else begin
      dropped <= in_flit.valid && !take_x && !take_e;
      if (clear_x) begin
        xcnt <= '0;
        for (int i = 0; i < ROWS; i++) x[i] <= '0;
      end else if (take_x) begin
        x[xcnt] <= in_flit.data;
        xcnt    <= xcnt + 1'b1;
      end
      if (clear_e) begin
        ecnt <= '0;
        for (int j = 0; j < COLS; j++) e[j] <= '0;
      end else if (take_e) begin
        e[ecnt] <= in_flit.data;
        ecnt    <= ecnt + 1'b1;
      end
    end
  end

endmodule
