// nn_chip: multicore memristor neural-network processor (top level).
//
// The chip is a MESH_R x MESH_C grid of nodes; each node is a memristor neural
// core attached to an SRAM-programmed static routing switch, and neighbouring
// switches are joined by 8-bit links in a 2-D mesh. A layer of a deep network
// that fits in 400 inputs x 100 neurons runs on one core; larger layers are
// split over several cores and small ones may share a core through the
// switch's loop-back. The system input buffer feeds the west edge of the mesh
// (one row at a time), the system output buffer listens to the east edge, and
// a DMA engine moves data between them and main memory. The host RISC core and
// the stacked DRAM are outside this RTL: the configuration bus the RISC core
// would drive and the DRAM port are top-level ports.
//
// The paper's system has 576 cores; the 24 x 24 arrangement is this design's
// choice. Configuration bus: cfg_addr[31:28] unit, [27:16] node (row*MESH_C +
// col), [15:0] register. Routers: register = output port (N,E,S,W,L = 0..4),
// data[4:0] = inputs joined to it. See neural_core, sys_input_buffer,
// sys_output_buffer and dma_controller for their registers.
//
// Status outputs: collision (two words met on one link in a cycle), dropped
// (a core received a word it was not expecting), out_overflow (output buffer
// full); all three indicate a wrong static schedule.
module nn_chip
  import nn_pkg::*;
#(
  parameter int unsigned MESH_R    = 24,
  parameter int unsigned MESH_C    = 24,
  parameter int unsigned ROWS      = 400,
  parameter int unsigned COLS      = 100,
  parameter int unsigned EVAL_CYC  = 4,
  parameter int unsigned PULSE_MAX = 200,
  parameter int unsigned IN_DEPTH  = 4096,
  parameter int unsigned OUT_DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  // configuration bus from the host RISC core
  input  logic         cfg_we,
  input  logic [31:0]  cfg_addr,
  input  logic [31:0]  cfg_wdata,
  // main memory (3D-stacked DRAM) port
  output logic         mem_req,
  output logic         mem_we,
  output logic [31:0]  mem_addr,
  output logic [7:0]   mem_wdata,
  input  logic         mem_gnt,
  input  logic         mem_rvalid,
  input  logic [7:0]   mem_rdata,
  // status
  output logic         dma_busy,
  output logic         dma_done,
  output logic         frame_sent,
  output logic [$clog2(OUT_DEPTH+1)-1:0] out_count,
  output logic         collision,
  output logic         dropped,
  output logic         out_overflow
);

  flit_t rin  [MESH_R][MESH_C][NPORTS];
  flit_t rout [MESH_R][MESH_C][NPORTS];
  flit_t in_row  [MESH_R];
  flit_t out_row [MESH_R];
  logic [MESH_R*MESH_C-1:0] coll_v, drop_v;

  logic ib_push, ib_full, ob_pop, ob_empty;
  logic [7:0] ib_data, ob_data;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_count;

  for (genvar r = 0; r < MESH_R; r++) begin : g_r
    for (genvar c = 0; c < MESH_C; c++) begin : g_c
      localparam int unsigned ID = r * MESH_C + c;
      logic rcfg;
      core_state_pkg::core_state_e st;

      assign rin[r][c][P_N] = (r > 0)          ? rout[(r > 0 ? r - 1 : 0)][c][P_S] : FLIT_IDLE;
      assign rin[r][c][P_S] = (r < MESH_R - 1) ? rout[(r < MESH_R - 1 ? r + 1 : r)][c][P_N] : FLIT_IDLE;
      assign rin[r][c][P_E] = (c < MESH_C - 1) ? rout[r][(c < MESH_C - 1 ? c + 1 : c)][P_W] : FLIT_IDLE;
      assign rin[r][c][P_W] = (c > 0)          ? rout[r][(c > 0 ? c - 1 : 0)][P_E] : in_row[r];

      assign rcfg = cfg_we && cfg_addr[31:28] == U_ROUTER && cfg_addr[27:16] == 12'(ID);

      routing_switch u_sw (
        .clk, .rst_n, .cfg_we(rcfg), .cfg_port(cfg_addr[2:0]), .cfg_mask(cfg_wdata[NPORTS-1:0]),
        .in_flit(rin[r][c]), .out_flit(rout[r][c]), .collision(coll_v[ID])
      );

      neural_core #(.ROWS(ROWS), .COLS(COLS), .EVAL_CYC(EVAL_CYC), .PULSE_MAX(PULSE_MAX)) u_core (
        .clk, .rst_n, .node_id(12'(ID)), .cfg_we, .cfg_addr, .cfg_wdata,
        .rx_flit(rout[r][c][P_L]), .tx_flit(rin[r][c][P_L]), .state(st), .dropped(drop_v[ID])
      );
    end
    assign out_row[r] = rout[r][MESH_C - 1][P_E];
  end

  sys_input_buffer #(.DEPTH(IN_DEPTH), .MESH_R(MESH_R)) u_inbuf (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .wr_valid(ib_push), .wr_data(ib_data), .full(ib_full), .count(ib_count),
    .row_flit(in_row), .frame_sent
  );

  sys_output_buffer #(.DEPTH(OUT_DEPTH), .MESH_R(MESH_R)) u_outbuf (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .row_flit(out_row), .rd_pop(ob_pop), .rd_data(ob_data), .empty(ob_empty),
    .count(out_count), .overflow(out_overflow)
  );

  dma_controller #(.IN_DEPTH(IN_DEPTH)) u_dma (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .busy(dma_busy), .done(dma_done),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ib_push, .ib_data, .ib_count, .ob_pop, .ob_data, .ob_empty
  );

  assign collision = |coll_v;
  assign dropped   = |drop_v;

endmodule
