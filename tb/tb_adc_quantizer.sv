// tb_adc_quantizer: sweeps the analog input of a 3-bit and an 8-bit converter
// and compares each code with floor(value / step) clipped to the code range.
module tb_adc_quantizer;
  logic signed [31:0] a;
  logic signed [2:0]  c3;
  logic signed [7:0]  c8;
  int checks = 0, failures = 0;

  adc_quantizer #(.AN_W(32), .SHIFT(13), .BITS(3)) dut3 (.analog_in(a), .code(c3));
  adc_quantizer #(.AN_W(32), .SHIFT(9),  .BITS(8)) dut8 (.analog_in(a), .code(c8));

  function automatic int ref_code(input int v, input real step, input int bits);
    int f, hi, lo;
    f  = int'($floor(real'(v) / step));
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    return (f > hi) ? hi : (f < lo) ? lo : f;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -140000; v <= 140000; v += 997) begin
      a = v;
      #1;
      checks += 2;
      if (int'(c3) != ref_code(v, 8192.0, 3)) begin
        failures++; $display("3-bit: in %0d got %0d", v, c3);
      end
      if (int'(c8) != ref_code(v, 512.0, 8)) begin
        failures++; $display("8-bit: in %0d got %0d", v, c8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
