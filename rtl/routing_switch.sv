// routing_switch: SRAM-programmed static routing switch of one mesh node.
//
// The switch joins five link buses - north, east, south, west and the local
// neural core - through a grid of crosspoints. Each crosspoint is a set of pass
// transistors controlled by one SRAM bit, as in the paper's switch figure, so
// the routing is fixed once the SRAM is written and no arbitration or header
// decoding takes place. Because a crosspoint may join the core's own output bus
// to its input bus, a core can feed its outputs back to itself (recurrent
// networks, or several layers mapped onto one core).
//
// Model of the crosspoint array: out[o] is the merge of every input i whose
// SRAM bit cfg[o][i] is set. Like a wired bus, at most one of the joined
// inputs may carry a valid word in a given cycle; the design flags a cycle in
// which two do (collision) and asserts against it in simulation. The merged
// word is registered once per hop, so each hop costs one routing-clock cycle;
// the paper routes at 200 MHz but does not say where links are latched, so the
// register is this design's choice.
//
// Interface: cfg_we/cfg_port/cfg_mask write one row of the SRAM (the set of
// inputs joined to output port cfg_port). The SRAM clears on reset (no links).
module routing_switch
  import nn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [2:0]           cfg_port,
  input  logic [NPORTS-1:0]    cfg_mask,
  input  flit_t                in_flit  [NPORTS],
  output flit_t                out_flit [NPORTS],
  output logic                 collision
);

  logic [NPORTS-1:0] sram [NPORTS];   // sram[out][in]
  flit_t             merged [NPORTS];
  logic [NPORTS-1:0] coll;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) sram[o] <= '0;
    end else if (cfg_we && cfg_port < 3'(NPORTS)) begin
      sram[cfg_port] <= cfg_mask;
    end
  end

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      int unsigned nvalid;
      merged[o] = FLIT_IDLE;
      nvalid    = 0;
      for (int i = 0; i < NPORTS; i++) begin
        if (sram[o][i] && in_flit[i].valid) begin
          merged[o] = in_flit[i];
          nvalid++;
        end
      end
      coll[o] = (nvalid > 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) out_flit[o] <= FLIT_IDLE;
      collision <= 1'b0;
    end else begin
      for (int o = 0; o < NPORTS; o++) out_flit[o] <= merged[o];
      collision <= |coll;
    end
  end

  // A static schedule must never put two words on one joined bus at once.
  property p_no_collision;
    @(posedge clk) disable iff (!rst_n) !(|coll);
  endproperty
  a_no_collision: assert property (p_no_collision)
    else $warning("routing_switch: two inputs drive one output in the same cycle");

endmodule
