// adc_quantizer: behavioural model of an analog-to-digital converter.
//
// This is a behavioural model of an analog part, not a circuit to synthesize.
// Inside this design an analog signal (a column current turned into a voltage
// by an op-amp, or a difference of two such voltages) is carried as a signed
// fixed-point number with AN_W bits. The converter keeps the top bits of that
// number: it shifts right by SHIFT bits (floor, as a mid-tread-free flash ADC
// with thresholds at multiples of its LSB would) and saturates the result to
// a signed BITS-bit code.
//
// The paper uses 3-bit ADCs for neuron outputs and 8-bit precision for neuron
// errors; the sizes are parameters here. Conversion is modelled as instant;
// its settling time is included in the crossbar evaluation latency.
module adc_quantizer #(
  parameter int unsigned AN_W  = 32,  // width of the analog value
  parameter int unsigned SHIFT = 13,  // analog LSBs per ADC step (log2)
  parameter int unsigned BITS  = 3    // ADC resolution
) (
  input  logic signed [AN_W-1:0] analog_in,
  output logic signed [BITS-1:0] code
);

  localparam logic signed [AN_W-1:0] HI = AN_W'((64'sd1 <<< (BITS - 1)) - 1);
  localparam logic signed [AN_W-1:0] LO = AN_W'(-(64'sd1 <<< (BITS - 1)));

  logic signed [AN_W-1:0] scaled;

  always_comb begin
    scaled = analog_in >>> SHIFT;
    if (scaled > HI)      code = HI[BITS-1:0];
    else if (scaled < LO) code = LO[BITS-1:0];
    else                  code = scaled[BITS-1:0];
  end

endmodule
