// fprime_lut: lookup table of the activation-function derivative f'(DP).
//
// During the forward pass of training each neuron's dot product DP is
// discretised and its derivative f'(DP) is read from a table, so that no
// analog differentiator is needed; the result is kept in a buffer for the
// error computation. That much follows the paper. The table contents are this
// design's choice: the paper's activation is approximated by the sigmoid
// f(x) = 1/(1+exp(-x)) - 0.5, so entry a (a = 0..63) holds
//     round(512 * s * (1 - s)),  s = 1/(1+exp(-x)),  x = (a - 32) / 8,
// i.e. the index is the signed DP code (DP * 8, range [-4, 4)) offset by 32 and
// the output is f'(DP) in units of 1/512 (0.25 reads as 128).
// The table is read combinationally (a small ROM), 64 x 8 bits.
module fprime_lut
  import nn_pkg::*;
(
  input  logic signed [DPI_BITS-1:0] dp_idx,
  output logic        [FP_BITS-1:0]  fprime
);

  logic [FP_BITS-1:0] rom [2**DPI_BITS];

  initial $readmemh("rtl/fprime_lut.hex", rom);

  // Signed index -32..31 maps to address 0..63 by flipping the sign bit.
  assign fprime = rom[{~dp_idx[DPI_BITS-1], dp_idx[DPI_BITS-2:0]}];

endmodule
