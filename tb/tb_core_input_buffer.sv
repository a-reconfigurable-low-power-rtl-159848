// tb_core_input_buffer: sends words of every kind and checks that each lands
// in the right region and slot only when its kind is enabled, that full
// regions and unexpected words are dropped and reported, and that clearing
// zeroes a region.
module tb_core_input_buffer;
  import nn_pkg::*;
  localparam int R = 6, C = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t in_flit;
  logic accept_x, accept_t, accept_e, clear_x, clear_e, x_full, e_full, dropped;
  logic [15:0] n_in, n_out;
  logic signed [7:0] x [R];
  logic signed [7:0] e [C];
  int checks = 0, failures = 0, drops = 0;

  core_input_buffer #(.ROWS(R), .COLS(C)) dut (.*);

  always @(posedge clk) if (rst_n && dropped) drops++;

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic send(input kind_e k, input logic [7:0] d);
    @(negedge clk) in_flit = '{valid: 1'b1, kind: k, data: d};
    @(negedge clk) in_flit = FLIT_IDLE;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_flit = FLIT_IDLE; accept_x = 0; accept_t = 0; accept_e = 0; clear_x = 0; clear_e = 0;
    n_in = 16'd4; n_out = 16'd2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(K_DATA, 8'h10);                      // not accepted yet
    @(negedge clk); chk("drop when disabled", drops, 1);
    accept_x = 1; accept_t = 1;
    send(K_DATA, 8'h21); send(K_TARGET, 8'h91); send(K_DATA, 8'h22);
    send(K_ERR, 8'h55);                       // ERR not enabled
    send(K_DATA, 8'h23); send(K_TARGET, 8'h92); send(K_DATA, 8'h24);
    send(K_DATA, 8'h25);                      // x region full (n_in = 4)
    send(K_TARGET, 8'h93);                    // e region full (n_out = 2)
    @(negedge clk);
    chk("drops", drops, 4);
    chk("x_full", int'(x_full), 1);
    chk("e_full", int'(e_full), 1);
    chk("x0", int'(x[0]), 8'h21); chk("x1", int'(x[1]), 8'h22);
    chk("x2", int'(x[2]), 8'h23); chk("x3", int'(x[3]), 8'h24);
    chk("x4 unused", int'(x[4]), 0);
    chk("t0", int'(e[0]), $signed(8'h91)); chk("t1", int'(e[1]), $signed(8'h92));
    @(negedge clk) begin clear_e = 1; accept_t = 0; accept_e = 1; end
    @(negedge clk) clear_e = 0;
    chk("e cleared", int'(e[0]), 0);
    chk("e_full after clear", int'(e_full), 0);
    send(K_ERR, 8'h7a); send(K_TARGET, 8'h01); send(K_ERR, 8'h86);
    @(negedge clk);
    chk("err0", int'(e[0]), 8'h7a); chk("err1", int'(e[1]), $signed(8'h86));
    chk("target dropped", drops, 5);
    @(negedge clk) clear_x = 1;
    @(negedge clk) clear_x = 0;
    chk("x cleared", int'(x[2]), 0);
    chk("x_full after clear", int'(x_full), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
