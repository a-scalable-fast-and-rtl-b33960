# A programmable neural decoder for surface-code error correction

A fault-tolerant quantum computer repeatedly measures the stabilisers of a
rotated surface code of distance L. Each QEC cycle gives T rounds of
syndrome bits. A decoder has to turn them into the positions of the data-qubit
errors before the next cycle ends. This RTL implements a *neural* decoder: a
small quantised neural network reads the three-dimensional syndrome array (rounds ×
stabilisers) and estimates the error. The network is a multi-task
network:
- a front end of stepper 3D convolutions (stride about equal to the kernel) and one
  fully connected layer extracts shared features;
- several small fully connected back-end "heads" each give the distribution of one piece of the answer: the logical class
  L_c (one bit) and pieces s_j of the pure-error bits s.

Taking the argmax of every head yields an estimate of L_c and of all (L²−1)/2 bits of s. These become
a physical error pattern through a table: the pattern is the XOR of the
table row for L_c and the rows of every set bit of s.

The hardware here is the *programmable* form of such a decoder. One generic
three-stage neural processing engine (NPE) is shared by every layer. A VLIW
program describes the network, so the same hardware runs networks of any
shape and code distances up to its built maximum (L = 9) without being
re-synthesised. Two decoders sit side by side: one infers X errors from
the Z-type syndromes, the other Z errors from the X-type syndromes.

All RTL is SystemVerilog-2017 in `rtl/`, one module or package per file, and
all testbenches are in `tb/`.

## Block structure

```
nn_decoder_top
├── prog_decoder u_xdec     (Z-type syndromes -> X errors)
└── prog_decoder u_zdec     (X-type syndromes -> Z errors)
      ├── control_unit      instruction decoder + NPE scheduler + register file manager
      ├── instr_mem         VLIW program (1024 words, synchronous read)
      ├── net_info_mem      16 layer descriptors
      ├── param_file        weight words (2400 x 1024 B) + bias/scale table (4096)
      ├── weight_regfile    two banks of one weight word
      ├── data_regfile      4096 bytes: syndromes and all activations
      ├── npe               NCOL=8 columns x NMAU=16 MAUs x MK=8 products
      │     ├── mau          (x128)  MK-input dot product
      │     ├── adder_tree   (x8)    log2(NMAU) levels with a tap per level
      │     └── sf_unit      (x128)  accumulate/bypass, bias, scale, activation, int8
      └── error_comb_lut    argmax of the heads, XOR of table rows
```

`npe_pkg` holds every size, the instruction word, the layer descriptor and
the host-load bundle. All modules import it. Its localparams are the
single place to change the geometry.

## Data representation

Everything the network touches is a signed 8-bit integer:
- the syndrome bits, stored as bytes 0/1;
- the weights, biases and activations.

Each output neuron also has an unsigned 8-bit scale. A neuron's value is

    y = sat8( act( round( ((Σ w·x) + (b << bshift)) · scale  >> shift ) ) )

Here `act` is ReLU, or LeakyReLU with slope 2^−lshift, or none. `round` adds half of
the shifted-out weight before the arithmetic right shift. `sat8` clamps to
[−128, 127]. `shift`, `bshift` and `lshift` are per layer. This keeps every
layer's input int8 after a requantisation, as a quantised network trained with
per-layer rescaling expects. Sum widths grow without overflow:
- 19 bits after an MAU;
- 23 bits after the full adder tree;
- 32 bits in the chunk accumulator;
- 42 bits for the scaled value.

## The neural processing engine

A *pass* is one use of the NPE. In a pass all NCOL columns read the same
VEC = NMAU·MK = 128 data bytes. Each column has its own 128 weight bytes, so one
weight word is NCOL·VEC = 1024 bytes. Inside a column:

1. **MA stage.** MAU m forms Σ_k d[m·MK+k]·w[c][m][k] over its MK = 8 products.
2. **AT stage.** An adder tree of log2(NMAU) = 4 levels sums the 16 MAU
   results. Its *tap level* picks how deep the sum goes:
   - level 0 gives the 16 MAU results themselves;
   - level ℓ gives 16>>ℓ sums of 2^ℓ MAUs each;
   - level 4 gives one sum of all 128 products.

   Shallow taps let one pass compute many small neurons at once. In the
   test network, for example, the three back-end heads are computed side by side in one pass.
3. **SF stage.** Each of the G = 16>>level outputs of a column goes to
   an SF lane with its own accumulator. A neuron whose fan-in exceeds one pass is
   computed in *chunks*:
   - the first chunk loads the accumulator (`first`);
   - middle chunks add to it;
   - the last chunk (`last`) adds, then finishes the neuron with bias, scale, shift,
     activation and saturation.

   A pass with both flags set bypasses the accumulator.

The NCOL·G results are written back as one block. Output o = c·G + g
(column c, group g) goes to data address dst + o for o < n_out. The bias and
scale of output o come from entry bias_base + o of the bias table.

Pipeline registers sit after the operand gather (S0), the MA stage (S1), the AT
stage (S2) and the SF stage (S3). A pass issued in cycle t is therefore written
into the data register file at the end of cycle t+4. One pass can be issued
every cycle. `busy` is high while any pass is in flight.

### Operand gather

The data register file produces the 128 operands of a pass combinationally:
operand (m, k) = mem[src + m·mstride + k·kstride]. The two strides come from
the layer descriptor. They cover the layers the network uses:
- *Fully connected, one chunk of 128 inputs*: mstride = 8, kstride = 1.
- *Stepper convolution*: every MAU sees one window of MK inputs. The weight word
  repeats the same kernel in all MAUs of a column and holds a different output
  channel in each column. With tap level 0, one pass computes 16 windows × 8
  channels.
- *Small heads*: mstride = 0 gives every MAU the same 8 inputs, so tap level
  0 makes 128 neurons of fan-in 8 in one pass.

## Memories

| memory | contents | organisation | read |
|---|---|---|---|
| instruction memory | VLIW program | 1024 × 92 bit | synchronous |
| network information | layer descriptors | 16 × 44 bit | combinational |
| weight memory | weight words | 2400 × 1024 B (≈2.46 M parameters) | synchronous, one word per read |
| bias table | {scale, bias} | 4096 × 16 bit | combinational, 128 entries from a base |
| weight register file | two weight words | 2 × 1024 B | combinational |
| data register file | syndromes, activations | 4096 × 8 bit | combinational gather of 128 + a 64-byte window |
| error LUT | L_c row and one row per s bit | 41 × 81 bit | combinational |

Syndrome round r, bit i is stored at data address r·40 + i: 40 = (9²−1)/2
bytes per round. Smaller codes simply use fewer of them. The 2400 weight
words hold the largest network the design targets: distance 9, 12 rounds, about 2.4 M parameters.

All memories except the weight register file are loaded by a host before
decoding. They share one write port `ld` of type `host_ld_t`: valid, a 3-bit
target, a 20-bit address and 128 data bits.
- Weight memory addresses count 128-bit quarters: word·64 + lane.
- The bias table takes {scale, bias} in data[15:0].
- LUT row 0 is the logical operator and row k+1 is the pure error of s-bit k.

The data register file and the LUT's estimated bits are not reset. A program
writes every location before it reads it, and `start` clears the estimate.

## The VLIW program

One 92-bit instruction word (`instr_t`) has three slots that execute in the
same cycle.

| slot | fields | does |
|---|---|---|
| control | `op` (NOP, WAITSYN, ARGMAX, COMBINE, END), `rounds`, `am_src`, `am_nbits`, `am_bitpos`, `am_lc` | waits for syndrome rounds, drives the error-combination block, ends the program |
| computation | `c_valid`, `layer`, `src`, `dst`, `bias_base`, `first`, `last`, `wbank`, `sync` | one NPE pass |
| memory transfer | `m_valid`, `waddr`, `mbank` | read weight word `waddr` into weight bank `mbank` |

A layer descriptor (`layer_info_t`) holds activation, shift, bshift,
lshift, tap level, mstride, kstride and n_out. One descriptor is shared by every
pass of a layer.

**Weight double buffering.** A transfer reads the weight memory in the
cycle its word executes. The bank is written at the end of the next cycle. The
usual schedule puts the transfer of a layer's next weight word into the
first pass that uses the current one, so the load is hidden behind computation.

**Sequencing and interlocks.** `start` clears the round counter and the
LUT estimate, and sets the program counter to 0. The next cycle fetches word 0.
From the cycle after that, one word executes per cycle unless it has to
wait. A waiting word does nothing in any of its slots. A word waits while:

1. its pass reads the weight bank that the transfer of the previous cycle is
   still filling;
2. it has `sync` set and the NPE still has passes in flight. The compiler
   sets `sync` on the first pass of a layer that reads results of the
   previous one. Passes of the same layer stream back to back;
3. its op is ARGMAX, COMBINE or END and the NPE is busy;
4. its op is WAITSYN and fewer than `rounds` syndrome rounds have arrived.

Rule 4 lets decoding start before the last syndrome round has been
measured. The first convolution passes only need the early rounds, so
they wait for just those. Everything that depends on late rounds waits for more. This is
sliding-window decoding: by the time the last round arrives, most of the
front end has already been computed.

**Error combination.** ARGMAX takes the 2^am_nbits int8 scores at data
address am_src. The lowest index wins ties.
- With `am_lc` set, bit 0 of the winning index becomes the logical-class estimate.
- Otherwise the am_nbits index bits are written into the estimate of s at bit am_bitpos. A head
  of 2^n outputs thus gives n bits of s.

COMBINE XORs LUT row 0 (if L_c = 1) with the row of every set s bit. The
resulting 81-bit pattern appears on `err` with `err_valid` in the next cycle.
END pulses `done` one cycle later and returns the control unit to idle.

### Timing

Number the cycles from the one in which `start` is high (cycle 0). Word i executes in
cycle e_i = max(e_{i−1} + 1, whatever its wait rules ask), with e_{−1} = 1:
- WAITSYN n: e ≥ (cycle of round n−1) + 1;
- sync pass, ARGMAX, COMBINE, END: e ≥ (cycle of the last issued pass) + 5;
- a pass after a transfer into its own bank: e ≥ (cycle of that transfer) + 2.

`err_valid` is high in cycle e_COMBINE + 1, and a decoder's `done` in cycle e_END + 1. The
top's `done` comes one cycle after the later of its two decoders' `done`s. The
testbench reference model computes these numbers, and the testbenches check
them cycle-exactly.

## Top level

`nn_decoder_top` has plain ports:
- `clk`, `rst_n` (synchronous, active low);
- the host port `ld` with `ld_sel` (0 = X-error decoder, 1 = Z-error decoder);
- `start`, one per QEC cycle;
- `syn_valid` with `syn_z` and `syn_x`, one strobe per measured round, 40 bits each;
- `x_err_valid`/`x_err` and `z_err_valid`/`z_err`, 81 bits each;
- `busy` and `done`.

Round 0 may come in the same cycle as `start`. Outside this module sit the
readout electronics that produce the syndromes and the control electronics that
turn error positions into correction pulses.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, has a watchdog and uses random stimulus.

- `tb_mau`, `tb_adder_tree`, `tb_sf_unit`: arithmetic against direct
  formulas, with random operands, every tap level, every activation, and
  saturation and rounding cases.
- `tb_instr_mem`, `tb_net_info_mem`, `tb_param_file`, `tb_weight_regfile`,
  `tb_data_regfile`, `tb_error_comb_lut`: memories and the error-combination
  block against behavioural copies.
- `tb_npe`: 300 random groups of 1–3 chunks, each with a random tap level,
  activation and output count, against an explicit sum. Checks data,
  address, write-back cycle (issue + 4) and `busy`.
- `tb_control_unit`: the toy program below, with a modelled synchronous
  instruction memory and NPE busy, at four syndrome periods. Checks the
  execution cycle and slot outputs of every word.
- `tb_prog_decoder` and `tb_nn_decoder_top`: end-to-end, at the default sizes.

The end-to-end tests share `dec_model_pkg`, a reference model. It keeps its own
copies of all memories, runs a program word by word with plain arithmetic,
and predicts the execution cycle of each word from the interlock rules above.

Its `build_toy()` writes a randomised multi-task network of the same shape as
a real one:
- a stepper convolution over 10 rounds × 40 syndrome bits (4 passes, each started as
  soon as its rounds are in);
- a 512→128 fully connected LeakyReLU layer in 4 chunks;
- a hidden layer for three heads computed side by side at tap level 3;
- three head output layers at tap level 0;
- an L_c argmax and two 6-bit argmaxes for s, COMBINE and END.

The networks have random weights, so they are not trained decoders. They exercise
every mechanism instead. The end-to-end testbenches count, and require to happen at
least once: syndrome waits, weight-bank waits, pipeline drains, a weight
transfer overlapping a pass, chunk accumulation, bypass, tap levels 0/3/4,
ReLU clamping, LeakyReLU on negative values, and int8 saturation.

On this toy network the error pattern is ready 374 cycles after `start`, or 158
cycles after the last round, with rounds 24 cycles apart.

Build and run one testbench with plain Verilator (5.x) from the directory that holds
`rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/npe_pkg.sv tb/dec_model_pkg.sv \
        -y rtl -y tb tb/tb_nn_decoder_top.sv --top-module tb_nn_decoder_top -Mdir obj
    ./obj/Vtb_nn_decoder_top

`tb_nn_decoder_top` runs the whole design at its default parameters. It
builds in about a minute and runs in under a second.

## Where this design departs from, or adds to, the published decoder

- **Array geometry.** 8 × 16 × 8 = 1024 int8 multipliers is this design's
  choice. The published decoder sizes the engine to the largest layer of its
  network-specific version. That layer's size is not given, and the published
  implementation reports 1340 DSP blocks. Latencies in nanoseconds are
  therefore not comparable.

  A rough bound: a network with M multiplications needs at least M/1024 passes.
  The ≈10 M multiplications of an L = 9 network take about 9 800 cycles, while
  the published L = 9 latency is 4.8 µs at 260 MHz.
- **Memory sizes.** All depths (data registers, weights, biases, program,
  layer table) are this design's choice. The weight memory is sized so that the
  ≈2.4 M-parameter L = 9 network fits.
- **Instruction set.** The two published instruction groups, computation and
  memory transfer, are the second and third slots. The control slot (WAITSYN,
  ARGMAX, COMBINE, END) is added so that sliding-window start, the argmax and
  the table combination can be programmed. All field widths and encodings are
  this design's own.
- **Interlocks** (weight-bank hazard, drain before dependent work) are this
  design's; the published description does not discuss hazards.
- **Argmax instead of Softmax.** The heads' outputs are compared as int8
  scores. Softmax is monotone and is not needed for the decision.
- **LUT rows.** The table has one row for the logical operator and one per
  pure-error bit, i.e. (L²−1)/2 + 1 rows of L² bits.
- **Quantisation details.** The placement of bias, scale and rounding is
  this design's choice: the bias is int8 shifted left per layer, and the scale
  is a per-neuron 8-bit multiplier followed by a per-layer rounding right shift.
  So are the LeakyReLU slope 2^−lshift and saturation to int8.
- **Not built.**
  - The network-specific (hard-wired per layer) engine, which is the
    alternative the programmable engine replaces.
  - The multi-core NPE for larger distances, whose links and partitioning are
    not described.
  - The readout and correction electronics and their links.
- **Host loading** through one 128-bit write port is this design's
  choice. The published decoder loads its memories before the computation starts,
  by means not described.
- **Synthesis.** The memories are written as arrays. Each decoder has
  ≈2.5 MB of weight memory, which is meant to map onto on-chip RAM blocks.
