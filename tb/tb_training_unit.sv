// tb_training_unit: checks the f'(DP) buffer against the sigmoid derivative,
// delta = err * f' against an integer reference, the walking row select of
// the multiplexed back-propagation, and the length and polarity of every
// weight-update pulse, including the PULSE_MAX bound.
module tb_training_unit;
  import nn_pkg::*;
  localparam int R = 12, C = 6, PMAX = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fp_we, d_we, bwd_start, bwd_shift, upd_start;
  logic [15:0] fp_idx, d_idx;
  logic signed [DPI_BITS-1:0] dp_idx [C];
  logic signed [ERR_BITS-1:0] err_in [C];
  logic signed [ERR_BITS-1:0] delta [C];
  logic [R-1:0] row_sel;
  logic [7:0] eta;
  logic [C-1:0] pulse_en, pulse_neg;
  int checks = 0, failures = 0;
  int fpr [C], dref [C], plen [C];

  training_unit #(.ROWS(R), .COLS(C), .PULSE_MAX(PMAX)) dut (.*);

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp_we = 0; d_we = 0; bwd_start = 0; bwd_shift = 0; upd_start = 0;
    fp_idx = 0; d_idx = 0; eta = 0;
    for (int j = 0; j < C; j++) begin dp_idx[j] = '0; err_in[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      // f' capture, one neuron per cycle.
      for (int j = 0; j < C; j++) begin
        real xv, s;
        dp_idx[j] = 6'($urandom_range(0, 63));
        xv = real'(dp_idx[j]) / 8.0;
        s  = 1.0 / (1.0 + $exp(-xv));
        fpr[j] = int'(512.0 * s * (1.0 - s));
      end
      for (int j = 0; j < C; j++) begin
        @(negedge clk) begin fp_we = 1; fp_idx = 16'(j); end
      end
      @(negedge clk) fp_we = 0;
      for (int j = 0; j < C; j++) begin
        int p;
        err_in[j] = 8'($urandom_range(0, 255));
        if (round == 3 && j == 0) err_in[j] = 8'sd127;
        if (round == 3 && j == 1) err_in[j] = -8'sd128;
        p = (int'(err_in[j]) * fpr[j]);
        p = (p >= 0) ? p / 128 : -((-p + 127) / 128);       // floor division by 128
        dref[j] = (p > 127) ? 127 : (p < -128) ? -128 : p;
      end
      for (int j = 0; j < C; j++) begin
        @(negedge clk) begin d_we = 1; d_idx = 16'(j); end
      end
      @(negedge clk) d_we = 0;
      for (int j = 0; j < C; j++) chk($sformatf("delta[%0d]", j), int'(delta[j]), dref[j]);

      // Weight-update pulses.
      eta = (round == 3) ? 8'd255 : 8'($urandom_range(1, 40));
      for (int j = 0; j < C; j++) begin
        int m;
        m = (dref[j] < 0) ? -dref[j] : dref[j];
        plen[j] = (m * int'(eta)) / 16;
        if (plen[j] > PMAX) plen[j] = PMAX;
      end
      @(negedge clk) upd_start = 1;
      @(negedge clk) upd_start = 0;
      begin
        int cnt [C];
        for (int j = 0; j < C; j++) cnt[j] = 0;
        for (int t = 0; t < PMAX + 5; t++) begin
          for (int j = 0; j < C; j++) if (pulse_en[j]) begin
            cnt[j]++;
            if (int'(pulse_neg[j]) != int'(dref[j] < 0)) begin
              failures++; $display("FAIL polarity of column %0d", j);
            end
          end
          @(negedge clk);
        end
        for (int j = 0; j < C; j++) chk($sformatf("pulse length[%0d]", j), cnt[j], plen[j]);
      end
    end
    // Row select walks one row per shift.
    @(negedge clk) bwd_start = 1;
    @(negedge clk) bwd_start = 0;
    for (int i = 0; i < R; i++) begin
      chk("row_sel one-hot", int'(row_sel), 1 << i);
      @(negedge clk) bwd_shift = 1;
      @(negedge clk) bwd_shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
