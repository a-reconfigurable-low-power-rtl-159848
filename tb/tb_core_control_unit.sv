// tb_core_control_unit: runs the FSM through a recognition pass, an
// output-layer training pass and a hidden-layer training pass against a
// stand-in datapath, counting each control pulse and checking the words it
// sends, the number of cycles of each phase and the return to S_RX.
module tb_core_control_unit;
  import nn_pkg::*;
  import core_state_pkg::*;
  localparam int UPD = 10, EC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e mode;
  logic send_fwd, send_back, x_full, e_full, fwd_done, bsum_valid;
  logic [15:0] n_in, n_out, rd_idx, idx;
  logic signed [ERR_BITS-1:0] bsum_code;
  logic [BUS_W-1:0] out_word;
  logic accept_x, accept_t, accept_e, clear_x, clear_e, eval, bwd_en, upd_en, ob_load;
  logic fp_we, d_we, err_from_array, bwd_start, bwd_shift, upd_start;
  flit_t tx_flit;
  core_state_e state;
  int checks = 0, failures = 0;
  int n_eval, n_load, n_fp, n_d, n_bwd, n_upd, n_updstart, n_bstart, n_clear, n_txd, n_txe, n_acc_e;
  int eval_cyc, done_cnt;
  logic [7:0] last_tx [$];

  core_control_unit #(.UPD_CYC(UPD)) dut (.*);

  // Stand-in datapath: the crossbar answers EC cycles after eval; the
  // back-propagation read-out answers one cycle after bwd_en.
  assign out_word = 8'(rd_idx * 3 + 1);
  always_ff @(posedge clk) begin
    bsum_valid <= bwd_en;
    bsum_code  <= 8'(idx + 16'd100);
    if (eval) done_cnt <= 1;
    else if (done_cnt != 0) done_cnt <= done_cnt + 1;
  end
  assign fwd_done = (done_cnt == EC - 1);

  always @(posedge clk) if (rst_n) begin
    n_eval += int'(eval); n_load += int'(ob_load); n_fp += int'(fp_we); n_d += int'(d_we);
    n_bwd += int'(bwd_en); n_upd += int'(upd_en); n_updstart += int'(upd_start);
    n_bstart += int'(bwd_start); n_clear += int'(clear_x && clear_e); n_acc_e += int'(accept_e);
    if (tx_flit.valid && tx_flit.kind == K_DATA) begin n_txd++; last_tx.push_back(tx_flit.data); end
    if (tx_flit.valid && tx_flit.kind == K_ERR)  begin n_txe++; last_tx.push_back(tx_flit.data); end
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic clear_counts();
    {n_eval, n_load, n_fp, n_d, n_bwd, n_upd, n_updstart, n_bstart, n_clear, n_txd, n_txe, n_acc_e} = '0;
    last_tx.delete();
  endtask

  task automatic wait_rx(output int cycles);
    cycles = 0;
    do begin @(negedge clk); cycles++; end while (state != S_RX && cycles < 1000);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    done_cnt = 0; mode = M_RECOG; send_fwd = 1; send_back = 0; x_full = 0; e_full = 0;
    n_in = 16'd3; n_out = 16'd2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    clear_counts();
    // ---- recognition ----
    repeat (3) @(negedge clk);
    chk("waits in S_RX", int'(state), int'(S_RX));
    chk("accepts inputs", int'(accept_x), 1);
    chk("no targets in recognition", int'(accept_t), 0);
    x_full = 1;
    @(negedge clk); x_full = 0;
    wait_rx(cyc);
    // S_EVAL 1 + wait EC-1 (done seen) + TX n_out
    chk("recognition cycles", cyc, 1 + (EC - 1) + 2);
    repeat (2) @(negedge clk);
    chk("eval strobes", n_eval, 1); chk("output loads", n_load, 1);
    chk("data words sent", n_txd, 2); chk("no error words", n_txe, 0);
    chk("word 0", int'(last_tx[0]), 1); chk("word 1", int'(last_tx[1]), 4);
    chk("no training", n_fp + n_d + n_upd, 0);
    chk("buffers cleared", n_clear, 1);

    // ---- output-layer training with back-propagation ----
    clear_counts();
    mode = M_TRAIN_OUT; send_back = 1;
    @(negedge clk);
    chk("targets accepted", int'(accept_t), 1);
    x_full = 1;
    repeat (2) @(negedge clk);
    chk("waits for targets", int'(state), int'(S_RX));
    e_full = 1;
    @(negedge clk); x_full = 0; e_full = 0;
    wait_rx(cyc);
    // EVAL 1 + WAIT EC-1 + FP 2 + TX 2 + DELTA 2 + BWD 3 + BWD_END 1 + UPD
    chk("training cycles", cyc, 1 + (EC - 1) + 2 + 2 + 2 + 3 + 1 + UPD);
    repeat (2) @(negedge clk);
    chk("f' stores", n_fp, 2); chk("delta stores", n_d, 2);
    chk("error from array", int'(err_from_array), 1);
    chk("bwd start", n_bstart, 1); chk("bwd rows", n_bwd, 3);
    chk("update start", n_updstart, 1); chk("update cycles", n_upd, UPD);
    chk("data words", n_txd, 2); chk("error words", n_txe, 3);
    chk("error word 0", int'(last_tx[2]), 100);
    chk("error word 2", int'(last_tx[4]), 102);

    // ---- hidden-layer training, no back-propagation, no forward send ----
    clear_counts();
    mode = M_TRAIN_HID; send_back = 0; send_fwd = 0;
    x_full = 1;
    @(negedge clk); x_full = 0;
    repeat (12) @(negedge clk);
    chk("waits for error sums", int'(state), int'(S_RXE));
    chk("accepts error sums", int'(accept_e), 1);
    e_full = 1;
    @(negedge clk); e_full = 0;
    wait_rx(cyc);
    chk("error from buffer", int'(err_from_array), 0);
    chk("delta stores", n_d, 2); chk("no bwd", n_bwd, 0); chk("update cycles", n_upd, UPD);
    chk("nothing sent", n_txd + n_txe, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
