// nn_pkg: types and constants shared by the memristor neural-network chip.
//
// The chip moves every value between cores as one 8-bit word on a static
// routing link (8-bit links follow the paper). Each link word carries a valid
// bit and a 2-bit kind tag, which is this design's own addition: the tag lets a
// core tell forward data, back-propagated error sums and training targets apart
// when several streams share one statically configured link.
//
// Number formats (this design's choice; the paper gives only the bit counts):
//   input word x        : signed 8 bit, value = code / 256, range [-0.5, 0.5)
//   neuron output y     : signed 3 bit ADC code, value = code / 8; sent on the
//                         network as the word {code, 5'b0}, i.e. in input format
//   weight w            : (G+ - G-) / 2^14 with 16-bit conductance codes
//   DP index            : signed 6 bit, DP value = index / 8, range [-4, 4)
//   f'(DP)              : unsigned 8 bit, value = code / 512
//   error / delta       : signed 8 bit (8-bit error precision as in the paper)
package nn_pkg;

  localparam int unsigned BUS_W      = 8;    // routing link data width (Fig. 2)
  localparam int unsigned NPORTS     = 5;    // N, E, S, W, local core
  localparam int unsigned Y_BITS     = 3;    // neuron output ADC bits
  localparam int unsigned ERR_BITS   = 8;    // neuron error precision
  localparam int unsigned DPI_BITS   = 6;    // discretised DP index for the f' table
  localparam int unsigned FP_BITS    = 8;    // f'(DP) code
  localparam int unsigned G_BITS     = 16;   // memristor conductance state code

  // Link word kinds.
  typedef enum logic [1:0] {
    K_DATA   = 2'd0,   // forward data (inputs, neuron outputs)
    K_ERR    = 2'd1,   // back-propagated error sums
    K_TARGET = 2'd2    // training targets for an output layer
  } kind_e;

  typedef struct packed {
    logic              valid;
    kind_e             kind;
    logic [BUS_W-1:0]  data;
  } flit_t;

  localparam flit_t FLIT_IDLE = '{valid: 1'b0, kind: K_DATA, data: '0};

  // Router port numbering.
  typedef enum logic [2:0] {
    P_N = 3'd0, P_E = 3'd1, P_S = 3'd2, P_W = 3'd3, P_L = 3'd4
  } port_e;

  // Operating mode of a neural core.
  typedef enum logic [1:0] {
    M_RECOG     = 2'd0,  // forward pass only
    M_TRAIN_OUT = 2'd1,  // output layer: error from targets
    M_TRAIN_HID = 2'd2   // hidden layer: error from back-propagated sums
  } mode_e;

  // Configuration bus written by the host processor.
  // cfg_addr[31:28] selects the unit, [27:16] the mesh node, [15:0] a register.
  localparam logic [3:0] U_ROUTER = 4'd0;
  localparam logic [3:0] U_CORE   = 4'd1;
  localparam logic [3:0] U_DMA    = 4'd2;
  localparam logic [3:0] U_INBUF  = 4'd3;
  localparam logic [3:0] U_OUTBUF = 4'd4;

  // Core register offsets.
  localparam logic [15:0] C_NIN   = 16'd0;  // number of inputs used (1..ROWS)
  localparam logic [15:0] C_NOUT  = 16'd1;  // number of neurons used (1..COLS)
  localparam logic [15:0] C_MODE  = 16'd2;  // {send_back, send_fwd, mode[1:0]}
  localparam logic [15:0] C_ETA   = 16'd3;  // learning rate (pulse duration scale)
  localparam logic [15:0] C_WSEL  = 16'd4;  // {row[15:0]} << 16 | col
  localparam logic [15:0] C_WDATA = 16'd5;  // {G+, G-}; writing programs the pair

  // Saturate a signed value to a signed field of n bits.
  function automatic logic signed [31:0] sat(input logic signed [63:0] v, input int n);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (n - 1)) - 1;
    lo = -(64'sd1 <<< (n - 1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

endpackage
