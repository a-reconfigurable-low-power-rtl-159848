// dma_controller: moves data between main memory and the system buffers.
//
// Training data are read many times, so the chip streams them from a 3D-stacked
// DRAM through a DMA engine that the host RISC core sets up and then leaves
// alone (the paper names the engine and its role; its registers and memory
// protocol are this design's). One transfer moves `len` bytes:
//   dir = 0: main memory [addr, addr+len) -> system input buffer
//   dir = 1: system output buffer -> main memory [addr, addr+len)
//
// Registers (unit U_DMA): 0 addr, 1 len, 2 control {dir, start} - writing
// control with start = 1 begins a transfer; busy is high until the last byte
// has moved, then done pulses for one cycle.
//
// Memory port: byte-wide request/grant. A request (mem_req with mem_we,
// mem_addr, mem_wdata) is taken in a cycle where mem_gnt is high. Read data
// return later, in order, with mem_rvalid. Reads are issued only while the
// input buffer has room for every byte still in flight, so no returned byte
// can be lost; at most MAX_OUTSTANDING reads are in flight.
module dma_controller
  import nn_pkg::*;
#(
  parameter int unsigned IN_DEPTH        = 4096,
  parameter int unsigned MAX_OUTSTANDING = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_we,
  input  logic [31:0]                   cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  output logic                          busy,
  output logic                          done,
  // main memory
  output logic                          mem_req,
  output logic                          mem_we,
  output logic [31:0]                   mem_addr,
  output logic [7:0]                    mem_wdata,
  input  logic                          mem_gnt,
  input  logic                          mem_rvalid,
  input  logic [7:0]                    mem_rdata,
  // system input buffer
  output logic                          ib_push,
  output logic [7:0]                    ib_data,
  input  logic [$clog2(IN_DEPTH+1)-1:0] ib_count,
  // system output buffer
  output logic                          ob_pop,
  input  logic [7:0]                    ob_data,
  input  logic                          ob_empty
);

  logic [31:0] addr_q, len_q;
  logic        dir;
  logic [31:0] issued, received;   // requests accepted, bytes completed
  logic [31:0] inflight;
  logic        sel;

  assign sel      = cfg_we && cfg_addr[31:28] == U_DMA;
  assign inflight = issued - received;

  // Request side.
  always_comb begin
    mem_req   = 1'b0;
    mem_we    = dir;
    mem_addr  = addr_q + issued;
    mem_wdata = ob_data;
    ob_pop    = 1'b0;
    if (busy && issued < len_q) begin
      if (!dir) begin
        mem_req = (inflight < MAX_OUTSTANDING) &&
                  (32'(ib_count) + inflight + 1 <= IN_DEPTH);
      end else begin
        mem_req = !ob_empty;
        ob_pop  = mem_req && mem_gnt;
      end
    end
  end

  assign ib_push = busy && !dir && mem_rvalid;
  assign ib_data = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q   <= '0;
      len_q    <= '0;
      dir      <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      issued   <= '0;
      received <= '0;
    end else begin
      done <= 1'b0;
      if (sel && !busy) begin
        unique case (cfg_addr[3:0])
          4'd0: addr_q <= cfg_wdata;
          4'd1: len_q  <= cfg_wdata;
          4'd2: begin
                  dir <= cfg_wdata[1];
                  if (cfg_wdata[0]) begin
                    busy     <= 1'b1;
                    issued   <= '0;
                    received <= '0;
                  end
                end
          default: ;
        endcase
      end else if (busy) begin
        if (mem_req && mem_gnt) issued <= issued + 1;
        if (!dir && mem_rvalid) received <= received + 1;
        if (dir && mem_req && mem_gnt) received <= received + 1;
        if ((received + ((!dir && mem_rvalid) || (dir && mem_req && mem_gnt) ? 1 : 0)) == len_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
