# A mesh of memristor neural cores for on-chip deep-network training

This RTL describes a many-core accelerator that both **runs and trains**
multi-layer neural networks. Each core stores one layer's weights as the
conductances of a memristor crossbar. The crossbar computes all of the layer's
dot products in one analog step. The same crossbar is also used backwards to
propagate errors and, through voltage pulses, to update its own weights. The
cores sit in a 24 x 24 mesh of statically routed switches. Layers exchange
8-bit words over this mesh. A DMA engine streams training samples from a
stacked DRAM into the mesh, and results back out.

The digital parts are synthesizable SystemVerilog:

- routing switches
- core control and training logic
- buffers
- DMA engine
- top level

The analog crossbar and its converters are behavioural models with the real
parts' digital ports. The processor that configures the chip and the DRAM are
not part of the RTL. Their buses are ports of the top module.

## 1. System organisation

```
            cfg bus (from the host processor)           main memory port
                  |                                           |
   +--------------+-------------------------------------------+----+
   |                                 dma_controller                 |
   |                                  |            ^                |
   |  sys_input_buffer (4 kB) --row--> [S]-[S]-...-[S] --> sys_output_buffer (1 kB)
   |           |          west edge     |   |       |  east edge       |
   |           +--row--> [S]-[S]-...-[S]  ...                          |
   |                      |   |       |      each [S] = routing_switch  |
   |                     core core  core            + neural_core        |
   +----------------------------------------------------------------+
```

`nn_chip` has `MESH_R x MESH_C` nodes (24 x 24 = 576 by default). Each node
has a `routing_switch` and a `neural_core`. Switch ports are numbered
N=0, E=1, S=2, W=3, L=4 (L is the local core). Neighbouring switches are
joined by their facing ports. The system input buffer drives the W input of
column 0 in any one row. The system output buffer listens to the E output of
the last column in one row.

### Static routing

A layer always sends its outputs to the same place, so paths need no headers
and no arbitration. Each switch holds a 5 x 5 bit SRAM, `sram[out][in]`. Each
output is the merge of the inputs whose bits are set, like a wired bus, and is
registered once per hop. So a word moves one node per clock cycle.

A switch can join the core's output back to its own input. It can also join
several inputs to one output, for example forward data from the west and
error sums from the east into the same core. The schedule must then keep the
streams apart in time. If two valid words meet on one output, the switch
raises `collision`, and a simulation assertion reports it.

### Link words

A link carries `flit_t` = `{valid, kind[1:0], data[7:0]}`. The 8 data bits
match the 8-bit links the design is sized for. The 2-bit kind is this
design's addition. It lets a core tell apart three streams that may share a
link:

| kind       | carries                                      |
|------------|----------------------------------------------|
| `K_DATA`   | inputs or neuron outputs                     |
| `K_ERR`    | back-propagated error sums, sent backwards   |
| `K_TARGET` | training targets for an output layer         |

A core drops a word of a kind it is not waiting for and raises `dropped`.

## 2. Number formats

| quantity | representation | value |
|---|---|---|
| input word `x` | signed 8 bit | code / 256, in [-0.5, 0.5) |
| neuron output `y` | signed 3-bit ADC code, sent as `{code, 5'b0}` | code / 8 |
| weight `w` | two 16-bit conductance codes G+, G- | (G+ - G-) / 2^14 |
| dot product index | signed 6 bit | DP * 8, saturated |
| f'(DP) | unsigned 8 bit | code / 512 |
| error, delta | signed 8 bit | error in units of 2^-7 |

Because a neuron output is sent in input-word format, one layer's outputs
feed the next layer unchanged. The activation is h(DP) = DP/4 clipped to
+-0.5. With a 3-bit output, it has eight levels.

## 3. The neural core

`neural_core` holds the following parts:

- `core_input_buffer`: an input region of ROWS words and a target/error region of COLS words.
- `memristor_array`: the crossbar, its neuron amplifiers and its ADCs.
- `core_output_buffer`: the 3-bit outputs, read out one word at a time.
- `training_unit`: the f' registers, deltas, row shift register and pulse counters.
- `core_control_unit`: the FSM.
- A small register file written over the configuration bus.

A core holds one layer of up to 400 inputs and 100 neurons. It uses only the
first `n_in` inputs and `n_out` neurons.

### Crossbar model (`memristor_array`, behavioural)

Each synapse is a pair of memristors, so the crossbar is 400 x 200 devices
for 400 x 100 synapses. The model keeps two 16-bit conductance codes per
synapse.

- **Forward.** An `eval` strobe latches `acc_j = sum_i x_i (G+_ij - G-_ij)`
  for all columns at once. The outputs are ready `EVAL_CYC` = 4 cycles later
  (20 ns at a 200 MHz routing clock). The neuron voltage is clipped, then
  quantised by a 3-bit ADC (`adc_quantizer`). The model also gives the
  discretised dot product for the derivative table, and `t_j - y_j` through an
  8-bit ADC. That output error is formed in analog, before the output ADC, so
  it is finer than 3 bits.
- **Backward.** Deltas drive each column pair as +delta and -delta. A one-hot
  `row_sel` picks the single row whose current is read: `sum_j delta_j w_ij`.
  The 8-bit result arrives one cycle later. Reading row by row like this
  replaces one converter per row with a multiplexer and one converter.
- **Update.** In each pulse cycle where column j's pulse is on, G+ of every
  row i moves by +-x_i and G- by -+x_i. Both codes saturate at 0 and 65535.
  Pulse amplitude follows the input and pulse length follows eta x delta, so
  the weight change is proportional to eta x delta_j x x_i.
- Sneak paths, wire resistance, drift and device-to-device variation are not
  modelled.
- After reset the conductances are small pseudo-random values (high
  resistance). The configuration bus can also write a synapse pair directly,
  to load trained weights.

### Training arithmetic (`training_unit`, `fprime_lut`)

1. **FP.** After the forward pass, each neuron's DP index addresses a 64-entry
   ROM holding round(512 s(1-s)), with s = 1/(1+e^-DP) and DP from -4 to
   3.875 in steps of 1/8. The ROM is `rtl/fprime_lut.hex`, read with
   `$readmemh` relative to the project root. The f' values are then latched.
2. **DELTA.** delta_j = sat8((e_j x f'_j) >>> 7). For an output layer, e_j
   comes from the crossbar's `t - y` converter. For a hidden layer, e_j is
   the error sum received from the next layer.
3. **BWD** (only if `send_back` is set). A shift register walks a single 1
   over the rows. Each row's error sum is read, and each is sent upstream as a
   `K_ERR` word in row order.
4. **UPD.** Each column's pulse counter loads min(|delta| x eta / 16, 200).
   The pulse polarity is the sign of delta. The update phase lasts 200
   cycles, which is 1 us at 200 MHz.

### Control sequence (`core_control_unit`)

```
S_RX  -> collect n_in DATA words (and n_out TARGET words for an output layer)
S_EVAL-> S_WAIT (crossbar settles) -> S_FP
S_TX  -> send n_out outputs (if send_fwd)
recognition: back to S_RX
output layer : S_DELTA -> S_BWD (if send_back) -> S_BWD_END -> S_UPD -> S_RX
hidden layer : S_RXE (collect n_out ERR words) -> S_DELTA -> ... as above
```

- Targets may arrive before or during the inputs.
- Error words for a hidden layer arrive only after the next layer has run,
  so the hidden core waits for them in `S_RXE`.
- `S_BWD_END` separates the last delta write from the start of the pulses.

Latency per sample, with n inputs and m neurons:

| operation | cycles |
|---|---|
| receive | n |
| evaluate | 4 |
| f' latch | about 3 |
| send | m |
| backward pass (if `send_back`) | n |
| update | 200 |

### Core registers

The configuration address is `{unit[31:28], node[27:16], reg[15:0]}`.

| unit | node | reg | data |
|---|---|---|---|
| 0 router | r*MESH_C+c | output port 0..4 | [4:0] inputs joined to that output (N,E,S,W,L) |
| 1 core | r*MESH_C+c | 0 n_in, 1 n_out, 2 mode, 3 eta, 4 weight select, 5 weight data | mode = {send_back, send_fwd, mode[1:0]}: 0 recognise, 1 train output layer, 2 train hidden layer; select = {row, col}; data = {G+, G-} |
| 2 DMA | - | 0 address, 1 length, 2 {dir, start} | dir 0: memory -> input buffer, 1: output buffer -> memory |
| 3 input buffer | - | 0 row, 1 data words per frame, 2 target words per frame, 3 frame period, 4 enable, 5 target row | |
| 4 output buffer | - | 0 row, 1 kind mask | |

## 4. Feeding the mesh

- **`dma_controller`** copies `length` bytes between memory and a buffer.
  - Memory port: request/grant, then read data returned in order.
  - It keeps at most 8 reads in flight.
  - It never issues a read that the 4 kB input buffer could not take, so a
    full buffer stalls the transfer instead of losing data.
- **`sys_input_buffer`** is a byte FIFO that sends samples as frames.
  - A frame is `n_data` input words, sent as `K_DATA` on the selected row.
  - `n_tgt` target words follow, sent as `K_TARGET` on the target row. The
    targets can then reach an output-layer core by a path of their own.
  - A frame starts only when it is complete in the FIFO, and at most once
    every `period` cycles. The period is how the schedule keeps successive
    samples from overtaking a training core.
- **`sys_output_buffer`** is a 1 kB FIFO. It takes words of the enabled kinds
  from one row's east edge and flags overflow.

## 5. Mapping a network: the worked example in `tb_nn_chip`

An 8 -> 4 -> 4 network on a 2 x 2 mesh:

| node | role | core settings | switch settings |
|---|---|---|---|
| (0,0) | hidden layer | `M_TRAIN_HID`, send_fwd | L <- W,E; E <- L |
| (0,1) | output layer | `M_TRAIN_OUT`, send_back | L <- W,S; W <- L; E <- L |
| (1,0) | targets pass through | - | E <- W |
| (1,1) | targets pass through | - | N <- W |

- Inputs enter (0,0) from the west.
- The targets travel along row 1 and turn north into (0,1).
- Error sums go west from (0,1) to (0,0).
- The output buffer's kind mask admits only `K_DATA`, so error words that also
  go east are ignored.

For recognition, the host changes both cores to `M_RECOG`, removes the
westward route and sends frames without targets. The outputs of (0,1) then
leave at the east edge.

The interval between samples must cover the slowest core's full
train-and-update sequence (see the latency table in section 3).

## 6. Capacity against the networks the design targets

| network | cores needed (of 576) | fits |
|---|---|---|
| KDD 41->15->41 | 2 | yes |
| MNIST 784->300->200->100->10 | 10 | yes |
| ISOLET 617->2000->1000->500->250->26 | 112 | yes |
| MNIST autoencoder 784->100->784 | 10 | yes |
| MNIST deep network 784->200->100->10 | 6 | yes |
| Caltech 60000->800->1 | 1202 | no |

A layer takes ceil(inputs/400) x ceil(neurons/100) cores. A neuron with more
than 400 inputs is split into several smaller neurons, and the network is
trained in that split form.

## 7. Where this RTL departs from or adds to the source design

- **One layer per core.** The switch loop-back that would let several small
  layers share a core is present. The core's sequencer, however, handles a
  single layer.
- **Backward-pass time** is one cycle per row (n_in cycles). The published
  core figure for this step is 0.8 us, which is not reproduced. Forward (4
  cycles) and update (200 cycles) times follow the published 20 ns and 1 us.
- **Own choices.** These are this design's own:
  - the number formats of section 2
  - the fixed-point scaling of delta and pulse length
  - the smooth sigmoid derivative in the f' table (the activation itself is
    clipped-linear)
  - the kind tag on link words
  - the register map
  - frame-based input buffering
  - the DMA handshake
- **Not built.** The configuring processor, the DRAM, the through-silicon
  vias and the DACs are not built. In this fixed-point model a DAC is the
  identity.

## 8. Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M`. With Verilator 5, from the project root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl --top-module tb_nn_chip \
  rtl/nn_pkg.sv rtl/core_state_pkg.sv tb/tb_nn_chip.sv
./obj_dir/Vtb_nn_chip
```

- **`tb_nn_chip`** (2 x 2 mesh, 8 x 4 cores) trains the example network on
  six samples and switches to recognition. It checks the DMA'd results
  against a floating-point model of both layers, using the trained weights.
  It counts each mechanism and fails if one never happens:
  - DMA transfers
  - DMA stalls on a full input buffer
  - frames
  - targets routed to the output core
  - back-propagated error words
  - weight updates in each layer
  - recognition outputs
- **`tb_nn_chip_full`** uses the default sizes: 24 x 24 mesh, 400 x 100
  cores, 4 kB/1 kB buffers. It sends a 400-input vector through one core and
  23 further hops, and checks all 100 outputs.
- `tb/main_memory_model.sv` is a behavioural DRAM with random grant stalls,
  used by both.
