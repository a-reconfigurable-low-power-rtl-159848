// tb_fprime_lut: checks every entry of the derivative table against
// s*(1-s)*512 of the sigmoid, computed here in floating point.
module tb_fprime_lut;
  import nn_pkg::*;
  logic signed [DPI_BITS-1:0] idx;
  logic [FP_BITS-1:0] fp;
  int checks = 0, failures = 0;

  fprime_lut dut (.dp_idx(idx), .fprime(fp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -32; a < 32; a++) begin
      real x, s, e;
      int exp_code;
      idx = DPI_BITS'(a);
      #1;
      x = real'(a) / 8.0;
      s = 1.0 / (1.0 + $exp(-x));
      e = 512.0 * s * (1.0 - s);
      exp_code = int'(e);            // round to nearest
      checks++;
      if (int'(fp) != exp_code) begin
        failures++;
        $display("idx %0d: got %0d expected %0d", a, fp, exp_code);
      end
    end
    // The table must peak at DP = 0 with f'(0) = 0.25.
    idx = '0; #1; checks++; if (fp != 8'd128) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
