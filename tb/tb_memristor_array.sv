// tb_memristor_array: checks the crossbar model on a small 8 x 4 array against
// a floating-point reference of the neuron equations: forward outputs and
// their latency, DP discretisation, output error, the multiplexed
// back-propagation read-out and the weight-update pulses.
module tb_memristor_array;
  import nn_pkg::*;
  localparam int R = 8, C = 4, EC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [7:0] x [R];
  logic eval, fwd_done;
  logic signed [Y_BITS-1:0] y_code [C];
  logic signed [DPI_BITS-1:0] dp_idx [C];
  logic signed [7:0] tgt [C];
  logic signed [ERR_BITS-1:0] err_code [C];
  logic signed [ERR_BITS-1:0] delta [C];
  logic [R-1:0] row_sel;
  logic bwd_en, bsum_valid, upd_en, prog_we;
  logic signed [ERR_BITS-1:0] bsum_code;
  logic [C-1:0] pulse_en, pulse_neg;
  logic [15:0] prog_row, prog_col;
  logic [15:0] prog_gp, prog_gn;
  int gpm [R][C], gnm [R][C];
  int checks = 0, failures = 0;

  memristor_array #(.ROWS(R), .COLS(C), .EVAL_CYC(EC)) dut (.seed(32'd7), .*);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int clampi(input real v, input int lo, input int hi);
    int f;
    f = int'($floor(v));
    if (f < lo) return lo;
    if (f > hi) return hi;
    return f;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    eval = 0; bwd_en = 0; upd_en = 0; prog_we = 0; row_sel = '0;
    pulse_en = '0; pulse_neg = '0; prog_row = 0; prog_col = 0; prog_gp = 0; prog_gn = 0;
    for (int i = 0; i < R; i++) x[i] = '0;
    for (int j = 0; j < C; j++) begin tgt[j] = '0; delta[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Start state: high resistance, i.e. conductance codes below 1024.
    begin
      int low = 1;
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
        if (dut.gp[i][j] >= 1024 || dut.gn[i][j] >= 1024) low = 0;
      check("start conductance low", low, 1);
    end
    // Program a known weight pattern.
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        gpm[i][j] = (i * 5000 + j * 9000 + 3000) % 60000;
        gnm[i][j] = (i * 7000 + j * 3000 + 11000) % 60000;
        @(negedge clk);
        prog_we = 1; prog_row = 16'(i); prog_col = 16'(j);
        prog_gp = 16'(gpm[i][j]); prog_gn = 16'(gnm[i][j]);
      end
    @(negedge clk) prog_we = 0;

    for (int trial = 0; trial < 6; trial++) begin
      real dp, y;
      int lat;
      for (int i = 0; i < R; i++) x[i] = 8'($urandom_range(0, 255));
      for (int j = 0; j < C; j++) tgt[j] = 8'($urandom_range(0, 255));
      if (trial == 0) for (int i = 0; i < R; i++) x[i] = 8'sd127;   // drive into saturation
      @(negedge clk) eval = 1;
      @(negedge clk) eval = 0;
      lat = 1;
      while (!fwd_done) begin @(negedge clk); lat++; end
      check("forward latency", lat, EC);
      for (int j = 0; j < C; j++) begin
        dp = 0.0;
        for (int i = 0; i < R; i++)
          dp += (real'(x[i]) / 256.0) * (real'(gpm[i][j] - gnm[i][j]) / 16384.0);
        y = dp / 4.0;
        if (y > 0.5) y = 0.5;
        if (y < -0.5) y = -0.5;
        check($sformatf("y_code[%0d]", j), int'(y_code[j]), clampi(y * 8.0, -4, 3));
        check($sformatf("dp_idx[%0d]", j), int'(dp_idx[j]), clampi(dp * 8.0, -32, 31));
        check($sformatf("err[%0d]", j), int'(err_code[j]),
              clampi((real'(tgt[j]) / 256.0 - y) * 128.0, -128, 127));
      end
    end

    // Back-propagation: one row at a time.
    for (int j = 0; j < C; j++) delta[j] = 8'($urandom_range(0, 255));
    for (int i = 0; i < R; i++) begin
      real s;
      @(negedge clk) begin bwd_en = 1; row_sel = R'(1) << i; end
      @(negedge clk) bwd_en = 0;
      check("bsum_valid", int'(bsum_valid), 1);
      s = 0.0;
      for (int j = 0; j < C; j++)
        s += (real'(delta[j]) / 512.0) * (real'(gpm[i][j] - gnm[i][j]) / 16384.0);
      check($sformatf("bsum row %0d", i), int'(bsum_code), clampi(s * 128.0, -128, 127));
    end

    // Weight update: column 1 positive for 3 cycles, column 2 negative for 5.
    for (int i = 0; i < R; i++) x[i] = 8'(i * 9 - 30);
    for (int c = 0; c < 5; c++) begin
      @(negedge clk);
      upd_en = 1;
      pulse_en = {1'b0, (c < 5) ? 1'b1 : 1'b0, (c < 3) ? 1'b1 : 1'b0, 1'b0};
      pulse_neg = 4'b0100;
    end
    @(negedge clk) begin upd_en = 0; pulse_en = '0; end
    for (int i = 0; i < R; i++) begin
      int xi;
      xi = i * 9 - 30;
      check("G+ col1", int'(dut.gp[i][1]), gpm[i][1] + 3 * xi);
      check("G- col1", int'(dut.gn[i][1]), gnm[i][1] - 3 * xi);
      check("G+ col2", int'(dut.gp[i][2]), gpm[i][2] - 5 * xi);
      check("G- col2", int'(dut.gn[i][2]), gnm[i][2] + 5 * xi);
      check("G+ col0 unchanged", int'(dut.gp[i][0]), gpm[i][0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
