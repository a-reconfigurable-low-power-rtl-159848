// tb_neural_core: drives one 8-input, 4-neuron core through its link port.
// It programs known weights, then checks (against a floating-point model of
// the neuron equations and an integer model of the digital error path):
// recognition outputs and latency; output-layer training - outputs,
// back-propagated error words and the conductance change of every synapse;
// hidden-layer training driven by received error sums.
module tb_neural_core;
  import nn_pkg::*;
  import core_state_pkg::*;
  localparam int R = 8, C = 4, EC = 4, PMAX = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [31:0] cfg_addr, cfg_wdata;
  flit_t rx_flit, tx_flit;
  core_state_e state;
  logic dropped;
  int checks = 0, failures = 0;
  int gp [R][C], gn [R][C];
  int xin [R], tg [C];
  flit_t got [$];
  int first_out_cycle, cyc;

  neural_core #(.ROWS(R), .COLS(C), .EVAL_CYC(EC), .PULSE_MAX(PMAX)) dut (.node_id(12'd5), .*);

  always @(posedge clk) begin
    cyc++;
    if (tx_flit.valid) begin
      if (got.size() == 0) first_out_cycle = cyc;
      got.push_back(tx_flit);
    end
  end

  task automatic chk(input string what, input int got_v, input int exp);
    checks++;
    if (got_v != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got_v, exp); end
  endtask

  task automatic cfg(input logic [15:0] reg_a, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {U_CORE, 12'd5, reg_a}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic send(input kind_e k, input int d);
    @(negedge clk) rx_flit = '{valid: 1'b1, kind: k, data: 8'(d)};
    @(negedge clk) rx_flit = FLIT_IDLE;
  endtask

  function automatic int fl(input real v, input int lo, input int hi);
    int f; f = int'($floor(v));
    return (f < lo) ? lo : (f > hi) ? hi : f;
  endfunction
  function automatic real w(input int i, input int j);
    return real'(gp[i][j] - gn[i][j]) / 16384.0;
  endfunction
  function automatic real dp_of(input int j);
    real s = 0.0;
    for (int i = 0; i < R; i++) s += real'(xin[i]) / 256.0 * w(i, j);
    return s;
  endfunction
  function automatic real y_of(input int j);
    real y = dp_of(j) / 4.0;
    return (y > 0.5) ? 0.5 : (y < -0.5) ? -0.5 : y;
  endfunction
  function automatic int fp_of(input int j);
    real xv, s;
    xv = real'(fl(dp_of(j) * 8.0, -32, 31)) / 8.0;
    s = 1.0 / (1.0 + $exp(-xv));
    return int'(512.0 * s * (1.0 - s));
  endfunction
  function automatic int delta_of(input int e, input int fp);
    int p = e * fp;
    p = (p >= 0) ? p / 128 : -((-p + 127) / 128);
    return (p > 127) ? 127 : (p < -128) ? -128 : p;
  endfunction

  function automatic int lim(input int g);
    return (g < 0) ? 0 : (g > 65535) ? 65535 : g;
  endfunction

  // Expected conductances after an update with the given deltas.
  task automatic apply_update(input int d [C], input int eta);
    for (int j = 0; j < C; j++) begin
      int m, len;
      m = (d[j] < 0) ? -d[j] : d[j];
      len = m * eta / 16;
      if (len > PMAX) len = PMAX;
      for (int i = 0; i < R; i++) begin
        int step = (d[j] < 0) ? -xin[i] : xin[i];
        // conductance saturates at the ends of its range
        gp[i][j] = lim(gp[i][j] + step * len);
        gn[i][j] = lim(gn[i][j] - step * len);
      end
    end
  endtask

  task automatic check_weights(input string what);
    int bad = 0;
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
      if (int'(dut.u_xbar.gp[i][j]) != gp[i][j] || int'(dut.u_xbar.gn[i][j]) != gn[i][j]) begin
        bad++;
        $display("  synapse %0d,%0d: G+ %0d/%0d G- %0d/%0d", i, j, dut.u_xbar.gp[i][j], gp[i][j], dut.u_xbar.gn[i][j], gn[i][j]);
      end
    chk(what, bad, 0);
  endtask

  task automatic wait_state(input core_state_e s);
    int n = 0;
    while (state != s && n < 2000) begin @(negedge clk); n++; end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [C];
    int start;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; rx_flit = FLIT_IDLE; cyc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg(C_NIN, R); cfg(C_NOUT, C); cfg(C_MODE, {28'd0, 1'b0, 1'b1, M_RECOG}); cfg(C_ETA, 16);
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      gp[i][j] = 20000 + ((i * 3 + j * 7) % 11) * 1500;
      gn[i][j] = 20000 + ((i * 5 + j * 2) % 13) * 1300;
      cfg(C_WSEL, {16'(i), 16'(j)});
      cfg(C_WDATA, {16'(gp[i][j]), 16'(gn[i][j])});
    end
    // ---- recognition ----
    for (int trial = 0; trial < 3; trial++) begin
      got.delete();
      for (int i = 0; i < R; i++) xin[i] = $urandom_range(0, 255) - 128;
      for (int i = 0; i < R; i++) send(K_DATA, xin[i]);
      start = cyc;
      repeat (20) @(negedge clk);
      chk("recognition words", got.size(), C);
      // last word in at edge `start`; one cycle to see x_full, one in S_EVAL,
      // EC for the crossbar, one to register the word, one to observe it
      chk("recognition latency", first_out_cycle - start, EC + 4);
      for (int j = 0; j < C && j < got.size(); j++)
        chk($sformatf("output %0d", j), int'($signed(got[j].data)), fl(y_of(j) * 8.0, -4, 3) * 32);
    end
    // ---- output-layer training with back-propagation ----
    cfg(C_MODE, {28'd0, 1'b1, 1'b1, M_TRAIN_OUT}); cfg(C_ETA, 24);
    got.delete();
    for (int i = 0; i < R; i++) xin[i] = $urandom_range(0, 255) - 128;
    for (int j = 0; j < C; j++) tg[j] = $urandom_range(0, 255) - 128;
    for (int j = 0; j < C; j++) send(K_TARGET, tg[j]);
    for (int i = 0; i < R; i++) send(K_DATA, xin[i]);
    wait_state(S_UPD);
    repeat (3) @(negedge clk);
    chk("training words", got.size(), C + R);
    for (int j = 0; j < C; j++) begin
      int e;
      e = fl((real'(tg[j]) / 256.0 - y_of(j)) * 128.0, -128, 127);
      d[j] = delta_of(e, fp_of(j));
      chk($sformatf("delta %0d", j), int'(dut.u_train.delta[j]), d[j]);
    end
    for (int i = 0; i < R && C + i < got.size(); i++) begin
      real s;
      s = 0.0;
      for (int j = 0; j < C; j++) s += real'(d[j]) / 512.0 * w(i, j);
      chk("error word kind", int'(got[C + i].kind), int'(K_ERR));
      chk($sformatf("back-propagated error %0d", i), int'($signed(got[C + i].data)),
          fl(s * 128.0, -128, 127));
    end
    apply_update(d, 24);
    wait_state(S_RX);
    check_weights("weights after output-layer update");
    // ---- hidden-layer training ----
    cfg(C_MODE, {28'd0, 1'b0, 1'b1, M_TRAIN_HID}); cfg(C_ETA, 40);
    got.delete();
    for (int i = 0; i < R; i++) xin[i] = $urandom_range(0, 255) - 128;
    for (int i = 0; i < R; i++) send(K_DATA, xin[i]);
    wait_state(S_RXE);
    repeat (3) @(negedge clk);
    chk("hidden outputs", got.size(), C);
    for (int j = 0; j < C; j++) begin
      int e;
      e = $urandom_range(0, 255) - 128;
      d[j] = delta_of(e, fp_of(j));
      send(K_ERR, e);
    end
    wait_state(S_UPD);
    for (int j = 0; j < C; j++) chk($sformatf("hidden delta %0d", j), int'(dut.u_train.delta[j]), d[j]);
    apply_update(d, 40);
    wait_state(S_RX);
    check_weights("weights after hidden-layer update");
    chk("no words dropped", int'(dropped), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
