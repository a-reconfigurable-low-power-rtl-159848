// core_state_pkg: state encoding of the neural-core control unit, shared by
// the control unit and the testbenches that follow its phases.
package core_state_pkg;
  typedef enum logic [3:0] {
    S_RX      = 4'd0,   // receive inputs (and targets for an output layer)
    S_EVAL    = 4'd1,   // start the crossbar evaluation
    S_WAIT    = 4'd2,   // wait for the analog evaluation to settle
    S_FP      = 4'd3,   // store f'(DP_j), one neuron per cycle
    S_TX      = 4'd4,   // send neuron outputs, one word per cycle
    S_RXE     = 4'd5,   // receive back-propagated error sums
    S_DELTA   = 4'd6,   // compute delta_j, one neuron per cycle
    S_BWD     = 4'd7,   // back-propagate, one crossbar row per cycle
    S_BWD_END = 4'd8,   // last error word leaves; update pulses are loaded
    S_UPD     = 4'd9    // weight-update pulses
  } core_state_e;
endpackage
