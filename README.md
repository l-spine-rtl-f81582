# L-SPINE in SystemVerilog: a packed-lane spiking neural engine

This is a register-transfer model of the accelerator described in *L-SPINE: A
Low-Precision SIMD Spiking Neural Compute Engine for Resource-efficient Edge
Inference* (S. Kumar, M. Lokhande, S. K. Vishvakarma). The design runs
leaky integrate-and-fire (LIF) spiking neurons. Its main idea is that one 8-bit
datapath holds one INT8 neuron, two INT4 neurons or four INT2 neurons, and
updates all of them in a single cycle. All arithmetic is additions and shifts:

* An input spike is a single bit. It either lets a synaptic weight through or
  blocks it, so integrating a synapse is one addition.
* The leak is a constant subtraction or a right shift followed by a
  subtraction.
* Firing is a comparison with a threshold, followed by a reset to zero.

The paper gives the datapath drawings and the block diagram. It gives very
little about control, widths and interfaces. This RTL fills those gaps with
the simplest choices that work, and says where it does so. The RTL is not by
the paper's authors.

## 1. Packed lanes and precision control

Everything numeric in the engine is an 8-bit word split into lanes by the
precision control `pc` (`lspine_pkg::prec_e`):

| `pc` | name | lanes per word | lane bits | lane range |
|------|------|----------------|-----------|------------|
| 0    | INT2 | 4              | [1:0], [3:2], [5:4], [7:6] | -2 .. 1 |
| 1    | INT4 | 2              | [3:0], [7:4] | -8 .. 7 |
| 2    | INT8 | 1              | [7:0] | -128 .. 127 |

Lanes are two's complement. Weights, membrane potentials, the threshold `vth`
and the constant leak `vleak` are all packed the same way, and lane *l* of
one word only ever meets lane *l* of another. So a threshold of `8'h55` means
"1 in every lane" at INT2 and "5 in every lane" at INT4.

### The adder chain (`simd_fa_adder`)

The adder is a ripple chain of twelve one-bit full adders (`fa_cell`). Each
lane occupies W+1 cells. The extra cell is a sign-extension bit, so a lane sum
never wraps into its neighbour:

```
INT2:  [ l3 : 3 ][ l2 : 3 ][ l1 : 3 ][ l0 : 3 ]   12 cells
INT4:  [ -- 2 --][   l1 : 5   ][   l0 : 5   ]   10 cells used
INT8:  [ -- 3 ---][       l0 : 9          ]      9 cells used
```

Every cell has a carry-in multiplexer. At the first cell of a lane it takes
the lane carry-in. Elsewhere it takes the carry-out of the cell below. A
"function" input inverts the b operand and sets every lane carry-in to 1,
which turns the chain into a subtractor. The W+1-bit lane results are
available unclipped (`sum_ext`). The engine uses the version clipped to W bits
(`sum_sat`), so an INT2 neuron at 1 that receives +1 stays at 1 rather than
wrapping to -2. The chain layout, the carry and function multiplexers and the
W+1 lanes come from the paper's datapath drawing. Signed lanes and saturation
are this design's choices.

### The lane shifter (`simd_shifter`)

The shifter treats the word as four 2-bit columns. Three stages shift right by
1, 2 and 4 when the matching bit of `rs` is set. A bit may move from one
column to the next only inside a lane: columns join in pairs at INT4 and all
four join at INT8. The lane's sign bit fills in from the top. Bits that drop
off the bottom of a lane OR into that lane's sticky flag. With `sticky_ctrl`
set, the flag is also OR-ed into the lane's LSB, which rounds a small nonzero
value up to a nonzero leak. Shift amounts above W-1 are clamped. The paper's
drawing shows the columns, the stages and the signals `sticky_ctrl`, `B_w^rs`
and a final-shift control (`fs_en` here). It does not say what they do, so the
behaviour above is this design's reading.

## 2. The neuron compute engine (`nce`)

Each engine has three scratchpads, sized as in the paper:

| scratchpad | size | content |
|------------|------|---------|
| IFmap | 12 x 1 bit | input spikes of the current chunk (a shift register) |
| Filt  | 224 x 8 bit | packed synaptic weights |
| Vmem  | 24 x 8 bit | packed membrane potentials |

The engine executes one operation per cycle. The result is written back and
appears on `psum_out` (and `spike_out`) one cycle later, with `out_valid`:

| `op` | effect on word `V = Vmem[vaddr]` |
|------|----------------------------------|
| `NCE_INTEGRATE` | `V <- sat(V + x)`, with `x = Filt[faddr]` if `IFmap[iaddr]` is 1, else 0. With `use_psum`, `x = psum_in`. |
| `NCE_FIRE` | `u = sat(V - leak)`. Each lane with `u >= vth` spikes and is reset to 0; the other lanes keep `u`. |
| `NCE_CLEAR` | `V <- 0` |

`leak` is `vleak` when `leak_mode` is 0. When `leak_mode` is 1 it is
`V >>> leak_shift` from the lane shifter, so the potential decays by a fixed
fraction. Per lane, the LIF update for one timestep is therefore

```
V <- V + sum over inputs i with a spike of W[i]      (saturating, in input order)
u <- V - leak(V)
spike <- (u >= Vth);  V <- spike ? 0 : u
```

The filter write port is 32 bits wide and writes four consecutive filter words
(`Filt[4*filt_waddr + k] <- filt_wdata[8k +: 8]`). `spike_shift` pushes
`spike_in` into IFmap bit 0. After n pushes, the first spike pushed sits at
index n-1.

## 3. The array and the timestep schedule

`nce_array` holds 8 x 8 engines by default (`ROWS`, `COLS`; the paper does
not give the size). All engines receive the same operation, addresses and
spike each cycle, so they run in lock-step on different neurons. The filter
scratchpads are written one engine at a time, selected by `filt_sel`. Inside a
column, engine (r, c) receives the `psum_out` of engine (r-1, c) as its
`psum_in`. The sequencer below does not use this chain.

A layer is mapped so that every engine holds `n_vwords` membrane words. The
weight for input i of word v sits at filter address `v * n_inputs + i`. The
layer must satisfy `n_inputs * n_vwords <= 224` and `n_vwords <= 24`.
Neuron *l* of word *v* in engine *e* is therefore output neuron
`(e * n_vwords + v) * L + l`, where L is the number of lanes.

`leak_fsm` drives the array. On a start command it checks that the layer fits
(otherwise it sets `cfg_err` and stops at once), clears the spike counters and
issues `NCE_CLEAR` for every word. Then, for every timestep:

1. **Encode**: it starts the encoder and waits for it. This takes n_inputs + 2
   cycles.
2. **Load**: it reads the next chunk of up to 12 spikes from the spike buffer
   and shifts them into every IFmap. This takes len + 1 cycles.
3. **Integrate**: it issues `NCE_INTEGRATE` for every word and every input of
   the chunk. This takes n_vwords x len cycles. Steps 2 and 3 repeat until all
   inputs are used.
4. **Fire**: it issues `NCE_FIRE` for every word, which takes n_vwords cycles.
   The array's spike outputs are valid one cycle later. They are written to
   `neuron_memory` and counted by `spike_counter`.

A run therefore takes

```
n_vwords + T * ( n_inputs + 2 + sum over chunks (len + 1) + n_vwords * n_inputs + n_vwords ) + 2
```

cycles from the run command to `irq_done`. For example, 20 inputs, 11 words
and 4 timesteps take 1113 cycles, and the end-to-end testbench checks this
formula. Weights stay in the scratchpads for every timestep of a run. Only the
spikes are fetched again.

## 4. Around the array

```
host bus ──> data_interface ──┬─> map_record (layer configuration)
                               ├─> synaptic_core (4096 x 32 b weights) ──> ring_fifo ──> array filter scratchpads
                               ├─> spike_encoder (pixel memory + LFSR) ──> spike_buffer ──> array IFmaps
                               ├─< neuron_memory (last timestep's spikes) <── array spike outputs
                               └─< spike_counter (16 counts + winner)   <──┘
                    leak_fsm sequences encoder, spike buffer and array
```

* **spike_encoder** turns each 8-bit pixel into a spike with probability of
  about pixel/256 in every timestep. The spike is `pixel > r`, where r is the
  top byte of a 16-bit LFSR (x^16+x^14+x^13+x^11+1, seed `16'hACE1`) that
  advances once per pixel and is never reseeded. It encodes one pixel per
  cycle.
* **synaptic_core** copies weight word k to engine k / 56, filter group
  k % 56. It sends one word per cycle through the 16-entry **ring_fifo**,
  which the array drains one entry per cycle.
* **spike_counter** counts, over all timesteps, the spikes of the first 16
  neurons of membrane word 0 in engine order. Neuron k is lane k % L of
  engine k / L. The counters saturate at 255. The winner is the largest count,
  with ties going to the lower index.
* **map_record** holds the layer configuration (`layer_cfg_t`).

### Host programming model (`data_interface`)

The bus uses 16-bit word addresses and 32-bit data. A write takes effect on
the clock edge. Read data arrives one cycle after `host_re`, with
`host_rvalid`.

| address | content |
|---------|---------|
| 0x0000 | `pc` |
| 0x0001 | `n_inputs` (1..224 in practice) |
| 0x0002 | `n_vwords` (1..24) |
| 0x0003 | timesteps |
| 0x0004 | `vth` (packed) |
| 0x0005 | `vleak` (packed) |
| 0x0006 | `{leak_sticky, leak_mode, leak_shift[2:0]}` |
| 0x0007 | weight words to load (64 x 56 = 3584 fills every engine) |
| 0x0010 | write: bit 0 starts a run, bit 1 starts the weight load |
| 0x0011 | status: [7:0] timestep, [8] run busy, [9] load busy, [10] run done, [11] layer refused, [12] load done |
| 0x1000-0x1FFF | weight memory |
| 0x2000-0x23FF | pixel memory (write only) |
| 0x3000-0x33FF | spike buffer |
| 0x4000 + (engine << 5) + word | lane spikes of that word in the last timestep |
| 0x5000-0x500F, 0x5010 | spike counts, winner |

The usual sequence is: write the configuration, the weights and the pixels;
write 2 to 0x0010 and poll status bit 12; write 1 to 0x0010 and wait for
`irq_done`; then read the spikes, counts and winner.

## 5. What fits

Each engine holds 224 filter words, so the whole array holds 64 x 224 = 14,336
weight words at a time. That is 14,336 INT8 weights, 28,672 INT4 weights or
57,344 INT2 weights. A layer can have at most 224 inputs, when each engine
holds a single membrane word. With that shape the array holds 64 x L output
neurons. With 12 words of 18 inputs it holds up to 64 x 12 x 4 = 3072 INT2
neurons.

The paper evaluates VGG-8, VGG-16 and ResNet-18 on CIFAR-10, CIFAR-100, DVS
and ImageNet data, and fully connected networks on MNIST, Fashion-MNIST and
SVHN. None of these runs on this RTL. The convolutional networks have
millions of weights, and this sequencer only runs fully connected layers whose
weights stay resident. The MNIST-size inputs (784) exceed 224 inputs per
layer.

`tb_workload_fc` runs the largest piece of such an FC network that fits: a
14 x 16 = 224-pixel image feeding one membrane word per engine.
* At INT8 it is a 64-neuron layer. Its 16 counted neurons hold templates of
  16 synthetic classes, and the test checks that the shown class wins. Each
  image takes 5555 cycles for 8 timesteps.
* At INT2 the same shape is 256 neurons with random weights, and takes 2779
  cycles for 4 timesteps. The paper does not describe how it streams weights or maps
convolutions, and that is what the evaluated networks would need.

## 6. Where this RTL departs from the paper, and why

* **Parallelism per engine.** The paper's text claims 16 INT2, 4 INT4 and
  1 INT8 operations in parallel. Its own lane drawing shows 4, 2 and 1 lanes
  in the adder chain, and this RTL follows the drawing. The paper does not say
  how 16 and 4 arise.
* **Port widths.** The paper's processing-element drawing labels the filter
  and psum inputs as 32 bits. Here the filter port is 32 bits (four words per
  write). The psum port is 8 bits, matching the 8-bit output psum of the same
  drawing.
* **Bit-parallel adder.** The paper calls the full-adder hierarchy a
  "bit-serial and parallel hybrid" but shows no serial part. Here the chain
  adds a whole packed word in one cycle.
* **Two leak forms.** The drawing has a constant −Vleak register and the text
  speaks of shift-based leak. Both are provided, selected by `leak_mode`.
* **Choices of this design, not in the paper:**
  - the firing test `>=` and saturation;
  - the opcode set and the whole schedule of `leak_fsm`;
  - the 8 x 8 array size;
  - the LFSR encoder;
  - the bus, the address map and all memory depths outside the engine;
  - the contents of the blocks that the paper only names: map record, neuron
    memory, synaptic core and spike counter.
* **Not built:**
  - the RISC-V host, an existing core that the paper integrates; its bus is
    the top's host port;
  - the address-event (AER) bus named beside the encoder;
  - the "FC core" (a stack of neurons) and the "data/access interface" that
    the paper's block diagram draws next to the array without describing
    them; fully connected layers run on the array instead;
  - convolution and multi-layer scheduling;
  - weight streaming from external memory;
  - any use of the psum chain by the sequencer.

## 7. Files, simulation and how far to trust it

`rtl/` holds one module per file: `lspine_pkg`, `fa_cell`, `simd_fa_adder`,
`simd_shifter`, `nce`, `nce_array`, `spike_encoder`, `spike_buffer`,
`ring_fifo`, `synaptic_core`, `leak_fsm`, `spike_counter`, `neuron_memory`,
`map_record`, `data_interface` and the top, `lspine_top`. Every module starts
with a comment on its function, its interface and its timing.

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each testbench
compares the module with an independent model and ends with a line
`TB_RESULT checks=N failures=M`. The adder and the shifter are checked
exhaustively. The engine and the array are checked with random operation
streams, and the sequencer with models of the encoder and the spike buffer.
`tb_lspine_top` runs the design at its default size through the host bus only.
It runs four layers (INT8, INT4 and INT2, with both leak forms), compares
every neuron's spikes, the counts, the winner and the cycle count with a
bit-exact model of the network, and checks that an oversized layer is refused.
It takes about 40 s. `tb_workload_fc` is the classifier workload described
in section 5.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/lspine_pkg.sv rtl/*.sv \
          tb/tb_lspine_top.sv --top-module tb_lspine_top -o sim
./obj_dir/sim
```

Replace `tb_lspine_top` with another testbench to run it instead.
`lspine_pkg.sv` must come first. If it is listed again through `rtl/*.sv`,
Verilator only warns. All code is plain synthesizable SystemVerilog-2017.
Memories are arrays with synchronous write. Reads are combinational, as in
FPGA distributed RAM. The one exception is the port through which the
sequencer reads the spike buffer, which is registered.

The testbenches show that the RTL matches the behaviour described in this
file. They cannot show that this behaviour is the paper's, wherever the paper
is silent (see section 6). No timing, area or power figure of the paper has
been reproduced.
