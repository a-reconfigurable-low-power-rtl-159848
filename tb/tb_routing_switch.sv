// tb_routing_switch: programs crosspoints, checks that words follow exactly
// the programmed connections with one cycle of delay, that the core port can
// loop back to itself, that a joined bus merges two inputs, and that the
// collision flag rises when two joined inputs are valid in one cycle.
module tb_routing_switch;
  import nn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [2:0] cfg_port;
  logic [NPORTS-1:0] cfg_mask;
  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  logic collision;
  int checks = 0, failures = 0;
  int exp_src [NPORTS];

  routing_switch dut (.*);

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic prog_port(input int o, input logic [NPORTS-1:0] m);
    @(negedge clk); cfg_we = 1; cfg_port = 3'(o); cfg_mask = m;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_port = 0; cfg_mask = 0;
    for (int p = 0; p < NPORTS; p++) in_flit[p] = FLIT_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // W -> E, L -> L (loop-back), N -> S, S is not joined to anything else.
    prog_port(P_E, 5'b01000);
    prog_port(P_L, 5'b10000);
    prog_port(P_S, 5'b00001);
    exp_src = '{P_N: -1, P_E: P_W, P_S: P_N, P_W: -1, P_L: P_L};
    for (int t = 0; t < 40; t++) begin
      flit_t sent [NPORTS];
      @(negedge clk);
      for (int p = 0; p < NPORTS; p++) begin
        in_flit[p] = '{valid: 1'b1, kind: kind_e'(p % 3), data: 8'($urandom)};
        sent[p] = in_flit[p];
      end
      @(negedge clk);
      for (int p = 0; p < NPORTS; p++) in_flit[p] = FLIT_IDLE;
      for (int o = 0; o < NPORTS; o++) begin
        if (exp_src[o] < 0) chk("unrouted output idle", int'(out_flit[o].valid), 0);
        else begin
          chk("routed valid", int'(out_flit[o].valid), 1);
          chk("routed data", int'(out_flit[o].data), int'(sent[exp_src[o]].data));
          chk("routed kind", int'(out_flit[o].kind), int'(sent[exp_src[o]].kind));
        end
      end
      chk("no collision", int'(collision), 0);
    end
    // Join W and E onto the core port: one at a time merges, both collide.
    prog_port(P_L, 5'b01010);
    @(negedge clk); in_flit[P_W] = '{valid: 1'b1, kind: K_DATA, data: 8'h11};
    @(negedge clk); in_flit[P_W] = FLIT_IDLE; in_flit[P_E] = '{valid: 1'b1, kind: K_ERR, data: 8'h22};
    chk("merge from W", int'(out_flit[P_L].data), 8'h11);
    @(negedge clk); in_flit[P_E] = FLIT_IDLE;
    chk("merge from E", int'(out_flit[P_L].data), 8'h22);
    chk("merge kind", int'(out_flit[P_L].kind), int'(K_ERR));
    @(negedge clk);
    in_flit[P_W] = '{valid: 1'b1, kind: K_DATA, data: 8'h33};
    in_flit[P_E] = '{valid: 1'b1, kind: K_DATA, data: 8'h44};
    @(negedge clk);
    chk("collision flagged", int'(collision), 1);
    in_flit[P_W] = FLIT_IDLE; in_flit[P_E] = FLIT_IDLE;
    @(negedge clk);
    chk("collision clears", int'(collision), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
