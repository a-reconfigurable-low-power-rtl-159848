// tb_nn_chip: end-to-end run of a 2 x 2 mesh with 8-input, 4-neuron cores.
//
// A two-layer network (8 -> 4 -> 4) is mapped onto nodes (0,0) and (0,1).
// Training samples (8 inputs + 4 targets) go from main memory through the DMA
// engine and the input buffer; inputs enter the hidden-layer core from the
// west, targets travel along mesh row 1 and up into the output-layer core,
// the hidden outputs go east, the back-propagated error sums come back west,
// and both cores update their weights. The routes and core modes are then
// switched to recognition; test vectors are evaluated, the outputs collected
// by the output buffer and written back to memory by the DMA engine, and
// compared with a floating-point model of both layers using the trained
// weights. Each mechanism (DMA in both directions, DMA back-pressure,
// framing, target routing, back-propagation, weight update in both layers,
// mode switch, recognition output) is counted and must occur.
module tb_nn_chip;
  import nn_pkg::*;
  import core_state_pkg::*;
  localparam int MR = 2, MC = 2, R = 8, C = 4, PM = 20;
  localparam int NTRAIN = 6, NTEST = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [31:0] cfg_addr, cfg_wdata, mem_addr;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [7:0] mem_wdata, mem_rdata;
  logic dma_busy, dma_done, frame_sent, collision, dropped, out_overflow;
  logic [5:0] out_count;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_frames, n_err_words, n_tgt_words, n_upd_hid, n_upd_out, n_dma_done, n_backpressure, n_recog_words;
  int n_collision;
  int w1p [R][C], w1n [R][C], w2p [C][C], w2n [C][C];

  nn_chip #(.MESH_R(MR), .MESH_C(MC), .ROWS(R), .COLS(C), .PULSE_MAX(PM),
            .IN_DEPTH(32), .OUT_DEPTH(32)) dut (.*);
  main_memory_model #(.SIZE(4096)) u_mem (.*);

  core_state_e st0, st1, st0_q, st1_q;
  assign st0 = dut.g_r[0].g_c[0].u_core.state;
  assign st1 = dut.g_r[0].g_c[1].u_core.state;

  always @(posedge clk) if (rst_n) begin
    st0_q <= st0; st1_q <= st1;
    if (st0 == S_UPD && st0_q != S_UPD) n_upd_hid++;
    if (st1 == S_UPD && st1_q != S_UPD) n_upd_out++;
    if (frame_sent) n_frames++;
    if (dma_done) n_dma_done++;
    if (collision) n_collision++;
    if (dut.rout[0][0][P_L].valid && dut.rout[0][0][P_L].kind == K_ERR) n_err_words++;
    if (dut.rout[0][1][P_L].valid && dut.rout[0][1][P_L].kind == K_TARGET) n_tgt_words++;
    if (dut.out_row[0].valid && dut.out_row[0].kind == K_DATA) n_recog_words++;
    if (dma_busy && !dut.u_dma.dir && !mem_req && dut.u_dma.issued < dut.u_dma.len_q) n_backpressure++;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic mechanism(input string what, input int n);
    checks++;
    $display("mechanism %-28s happened %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask
  task automatic cfg(input logic [3:0] unit, input int node, input int r, input logic [31:0] d);
    @(negedge clk) begin cfg_we = 1; cfg_addr = {unit, 12'(node), 16'(r)}; cfg_wdata = d; end
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic dma(input int addr, input int len, input bit to_mem);
    int n = 0;
    cfg(U_DMA, 0, 0, addr); cfg(U_DMA, 0, 1, len); cfg(U_DMA, 0, 2, {30'd0, to_mem, 1'b1});
    @(negedge clk);
    while (dma_busy && n < 100000) begin @(negedge clk); n++; end
  endtask

  function automatic int fl(input real v, input int lo, input int hi);
    int f; f = int'($floor(v));
    return (f < lo) ? lo : (f > hi) ? hi : f;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, changed;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    {n_frames, n_err_words, n_tgt_words, n_upd_hid, n_upd_out, n_dma_done, n_backpressure, n_recog_words, n_collision} = '0;
    // Training samples at 0 (8 inputs + 4 targets), test vectors at 1024.
    for (int s = 0; s < NTRAIN; s++) begin
      for (int i = 0; i < R; i++) u_mem.mem[s * 12 + i] = 8'($urandom_range(0, 255));
      for (int j = 0; j < C; j++) u_mem.mem[s * 12 + R + j] = 8'($urandom_range(0, 120) - 60);
    end
    for (int a = 0; a < NTEST * R; a++) u_mem.mem[1024 + a] = 8'($urandom_range(0, 255));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Weights of both layers.
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      w1p[i][j] = 20000 + ((i * 3 + j * 7) % 11) * 1700; w1n[i][j] = 20000 + ((i * 5 + j * 2) % 13) * 1400;
      cfg(U_CORE, 0, C_WSEL, {16'(i), 16'(j)}); cfg(U_CORE, 0, C_WDATA, {16'(w1p[i][j]), 16'(w1n[i][j])});
    end
    for (int i = 0; i < C; i++) for (int j = 0; j < C; j++) begin
      w2p[i][j] = 20000 + ((i * 7 + j * 3) % 9) * 2500; w2n[i][j] = 20000 + ((i * 2 + j * 5) % 7) * 3000;
      cfg(U_CORE, 1, C_WSEL, {16'(i), 16'(j)}); cfg(U_CORE, 1, C_WDATA, {16'(w2p[i][j]), 16'(w2n[i][j])});
    end
    // Routes for training.
    cfg(U_ROUTER, 0, P_L, 5'b01010);   // (0,0) core <- west inputs, east error sums
    cfg(U_ROUTER, 0, P_E, 5'b10000);   // (0,0) east <- core
    cfg(U_ROUTER, 1, P_L, 5'b01100);   // (0,1) core <- west hidden outputs, south targets
    cfg(U_ROUTER, 1, P_W, 5'b10000);   // (0,1) west <- core error sums
    cfg(U_ROUTER, 1, P_E, 5'b10000);   // (0,1) east <- core (to output buffer)
    cfg(U_ROUTER, 2, P_E, 5'b01000);   // (1,0) east <- west targets
    cfg(U_ROUTER, 3, P_N, 5'b01000);   // (1,1) north <- west targets
    // Cores.
    cfg(U_CORE, 0, C_NIN, R); cfg(U_CORE, 0, C_NOUT, C); cfg(U_CORE, 0, C_ETA, 16);
    cfg(U_CORE, 0, C_MODE, {28'd0, 1'b0, 1'b1, M_TRAIN_HID});
    cfg(U_CORE, 1, C_NIN, C); cfg(U_CORE, 1, C_NOUT, C); cfg(U_CORE, 1, C_ETA, 16);
    cfg(U_CORE, 1, C_MODE, {28'd0, 1'b1, 1'b0, M_TRAIN_OUT});
    // Buffers.
    cfg(U_INBUF, 0, 0, 0); cfg(U_INBUF, 0, 5, 1); cfg(U_INBUF, 0, 1, R); cfg(U_INBUF, 0, 2, C);
    cfg(U_INBUF, 0, 3, 150); cfg(U_INBUF, 0, 4, 1);
    cfg(U_OUTBUF, 0, 0, 0); cfg(U_OUTBUF, 0, 1, 3'b001);

    // ---- training ----
    dma(0, NTRAIN * (R + C), 1'b0);
    n = 0;
    while (n_frames < NTRAIN && n < 20000) begin @(negedge clk); n++; end
    repeat (200) @(negedge clk);
    chk("frames sent", n_frames, NTRAIN);
    chk("hidden-layer updates", n_upd_hid, NTRAIN);
    chk("output-layer updates", n_upd_out, NTRAIN);
    chk("error words into hidden core", n_err_words, NTRAIN * C);
    chk("targets into output core", n_tgt_words, NTRAIN * C);
    changed = 0;
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
      if (int'(dut.g_r[0].g_c[0].u_core.u_xbar.gp[i][j]) != w1p[i][j]) changed++;
    checks++; if (changed == 0) begin failures++; $display("FAIL hidden weights unchanged"); end
    changed = 0;
    for (int i = 0; i < C; i++) for (int j = 0; j < C; j++)
      if (int'(dut.g_r[0].g_c[1].u_core.u_xbar.gp[i][j]) != w2p[i][j]) changed++;
    checks++; if (changed == 0) begin failures++; $display("FAIL output weights unchanged"); end
    chk("training words into output buffer", int'(out_count), 0);

    // ---- switch to recognition ----
    cfg(U_INBUF, 0, 4, 0);
    cfg(U_ROUTER, 1, P_W, 5'b00000);
    cfg(U_CORE, 0, C_MODE, {28'd0, 1'b0, 1'b1, M_RECOG});
    cfg(U_CORE, 1, C_MODE, {28'd0, 1'b0, 1'b1, M_RECOG});
    cfg(U_INBUF, 0, 2, 0); cfg(U_INBUF, 0, 3, 40); cfg(U_INBUF, 0, 4, 1);
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      w1p[i][j] = dut.g_r[0].g_c[0].u_core.u_xbar.gp[i][j]; w1n[i][j] = dut.g_r[0].g_c[0].u_core.u_xbar.gn[i][j];
    end
    for (int i = 0; i < C; i++) for (int j = 0; j < C; j++) begin
      w2p[i][j] = dut.g_r[0].g_c[1].u_core.u_xbar.gp[i][j]; w2n[i][j] = dut.g_r[0].g_c[1].u_core.u_xbar.gn[i][j];
    end
    n_frames = 0;
    dma(1024, NTEST * R, 1'b0);
    n = 0;
    while (n_frames < NTEST && n < 20000) begin @(negedge clk); n++; end
    repeat (100) @(negedge clk);
    chk("recognition words buffered", int'(out_count), NTEST * C);
    dma(2048, NTEST * C, 1'b1);
    repeat (5) @(negedge clk);
    for (int s = 0; s < NTEST; s++) begin
      real h [C];
      for (int j = 0; j < C; j++) begin
        real dp;
        dp = 0.0;
        for (int i = 0; i < R; i++)
          dp += real'($signed(u_mem.mem[1024 + s * R + i])) / 256.0 * real'(w1p[i][j] - w1n[i][j]) / 16384.0;
        h[j] = real'(fl(dp / 4.0 * 8.0, -4, 3) * 32) / 256.0;
      end
      for (int k = 0; k < C; k++) begin
        real dp;
        dp = 0.0;
        for (int j = 0; j < C; j++) dp += h[j] * real'(w2p[j][k] - w2n[j][k]) / 16384.0;
        chk($sformatf("result %0d.%0d", s, k), int'($signed(u_mem.mem[2048 + s * C + k])),
            fl(dp / 4.0 * 8.0, -4, 3) * 32);
      end
    end
    chk("no collision", n_collision, 0);
    chk("no output overflow", int'(out_overflow), 0);
    mechanism("DMA transfers completed", n_dma_done);
    mechanism("DMA held by full input buffer", n_backpressure);
    mechanism("input frames", n_frames);
    mechanism("targets routed to output core", n_tgt_words);
    mechanism("back-propagated error words", n_err_words);
    mechanism("hidden-layer weight updates", n_upd_hid);
    mechanism("output-layer weight updates", n_upd_out);
    mechanism("recognition output words", n_recog_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
