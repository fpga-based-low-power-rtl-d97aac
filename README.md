# An LSTM engine for on-chip speech recognition

This is the RNN part of a low-power speech recognizer. Two LSTM networks run on
one piece of hardware:

- an **acoustic model**: 3 LSTM layers of 256 cells. It reads one 123-value
  feature frame every 10 ms and gives 31 character scores.
- a **character language model** (LM): 2 LSTM layers of 256 cells. It reads one
  character as a 30-way one-hot vector and gives 30 scores for the next
  character.

A CPU runs the N-best beam search and sends commands to the engine. A
word-level tri-gram LM in DRAM rescoring hypotheses on the CPU side is also
part of the recognizer, but it is not part of this RTL.

The main idea is that nothing the RNNs need leaves the chip:

- All weights are quantized to 6 bits, which is small enough to keep every
  weight in block RAM.
- The recurrent state of the acoustic model is kept on chip.
- So is the recurrent state of 128 LM instances, one for each beam-search
  hypothesis. This store is called the *context memory*.

A network step therefore never waits on DRAM. Only one LSTM datapath is built,
and both networks are time-multiplexed on it, layer by layer.

The design is written in synthesizable SystemVerilog-2017. Every parameter
defaults to the full size described above.

## Block map

```
            x_t (8)            ld_* (host load bus)
  host ────────────┐             │
                   ▼             ▼
            ┌──────────────── lstm_tile ──────────────────┐
            │  pe_controller ─ Weight0/Weight1 BRAM        │
            │        │         bias_select (b_i b_f b_o b_c)│
            │  Sel_IN mux ──► pe_array (2 x 256 PEs)       │
            │                   │ PE_OUT0 / PE_OUT1        │
            │                 pe_buffer (PE_i PE_f PE_o PE_c)
            │  epu_controller ─ peephole BRAM              │
            │                   ▼                          │
            │                 lstm_epu ──► h_t (8), c_t (16)
            └──────────────────────────────────────────────┘
                  ▲ c_{t-1}, h_{t-1}, x of upper layers │
                  │                                      ▼
         context_memory (66,304 x {c16, h8}) ◄── context_manager
                  │ h of top layer                       ▲
                  ▼                                      │ cmd {net, src, dst}
             output_tile (fully connected) ──► y (16), one per clock
```

| File | Role |
|---|---|
| `rnn_pkg.sv` | Widths, number-format types, read-request and load-target encodings, helper functions. |
| `rnn_accel_top.sv` | Top level. It holds the tile, the context memory, the context manager and the output tile, and has the host ports. |
| `lstm_tile.sv` | One complete LSTM layer engine. |
| `pe.sv`, `pe_array.sv` | The multiply-accumulate PE, and the two 256-PE arrays. |
| `sdp_ram.sv` | Simple dual-port RAM with a registered read. It is used for Weight0/Weight1, the peephole weights and the output weights. |
| `bias_select.sv` | The four bias banks and the bias multiplexers. |
| `pe_buffer.sv` | Holds the four gate pre-activations of a layer. |
| `pe_controller.sv` | Sequences the two PE-array passes of a layer. |
| `epu_controller.sv` | Streams the buffered gate values through the EPU. |
| `lstm_epu.sv`, `act_lut.sv` | The element-wise LSTM cell and its sigmoid/tanh tables. |
| `context_memory.sv` | The state store. |
| `context_manager.sv` | Runs the layers of one command and turns operand requests into addresses. |
| `output_tile.sv` | The softmax-less output layer. |

## Number formats

The signal width is 8 bits, the weight width 6 bits and the cell/accumulator
width 16 bits. These widths are the published ones. The binary points are this
design's choice:

| Quantity | Format | Range |
|---|---|---|
| x, h (layer inputs and outputs) | signed Q1.6 | −2 … +1.98 |
| weights | signed Q1.4 | −2 … +1.94 |
| accumulator `net`, biases, cell c, PE buffer | signed Q5.10 | −32 … +32 |
| peephole weights | signed Q3.4, one 8-bit field each | |
| sigmoid output | unsigned 0.8 | 0 … 0.996 |
| tanh output | signed Q0.7 | |

An 8-bit × 6-bit product is exactly Q5.10, so the PE adds products without
shifting.

All sums saturate to 16 bits:

- the PE accumulator;
- the gate sums after the peephole term;
- the cell update.

All other rescaling is an arithmetic right shift, which truncates.

### The activation tables

Each lookup table has 256 entries and is indexed by `net >>> 6`. That index is
the argument in steps of 1/16, clipped to [−8, 8). Entry s holds:

- sigmoid: `min(255, round(256 / (1 + e^(-s/16))))`
- tanh: `clamp(round(128 · tanh(s/16)), −128, 127)`

`act_lut.sv` computes the table at elaboration time with a constant function,
so no data file is needed. To change the resolution or the range, change
`LUT_SHIFT` and that function.

## The PE arrays and the two-pass layer schedule

An LSTM layer with peephole connections needs eight matrix–vector products:
W_x·x and W_h·h_{t-1} for each of the four gates i, f, o and the candidate c.

The engine has two arrays of 256 PEs (`PE0[k]`, `PE1[k]`). They work in
**outer-product** order:

- One input element is broadcast to all 512 PEs per clock.
- Each PE multiplies that element by its own weight.
- The weights come from one row of the Weight0 BRAM (array 0) or the Weight1
  BRAM (array 1).
- PE k accumulates output element k.

So one pass over the n_in + 256 elements of [x ; h_{t-1}] produces two whole
gate vectors. Two passes finish a layer:

| Pass | Array 0 (Weight0, Bias0) | Array 1 (Weight1, Bias1) | Stored in |
|---|---|---|---|
| 0 | gate i, preset with b_i | gate f, preset with b_f | PE_i, PE_f |
| 1 | gate o, preset with b_o | candidate c, preset with b_c | PE_o, PE_c |

Each pass, as run by `pe_controller`:

1. **BIAS** (1 clock): `rstnet` loads the bias vector of the current layer and
   pass into every accumulator. So the bias costs no extra add.
2. **RUN** (n_in + 256 clocks): element j is requested on the read-request bus,
   one per clock. Weight row `wbase + pass·(n_in+256) + j` is read at the same
   time. Both answer one clock later, and `en` accumulates.
   - The `Sel_IN` multiplexer passes x for the first n_in elements and
     h_{t-1} for the rest.
3. **WAIT** (1 clock), to drain the last product.
4. **STORE** (1 clock): all 512 accumulators are copied into the PE buffer.

A layer's rows are laid out like this in both weight BRAMs. This is also the
layout the host loads:

```
wbase(layer) + 0 … n_in-1             pass 0, x columns
             + n_in … n_in+255        pass 0, h columns
             + (n_in+256) + …         pass 1, same order
```

Each row holds 256 weights of 6 bits, 1,536 bits in all. Bits [6k+5:6k] feed PE k.

The layers follow one another in this order:

1. acoustic-model layers 0–2, with n_in = 123, 256 and 256;
2. LM layers 0–1, with n_in = 30 and 256.

That gives 758 + 1,024 + 1,024 + 572 + 1,024 = **4,402 rows**.

## The LSTM EPU

After both passes, `epu_controller` streams the 256 elements through
`lstm_epu`, one per clock. For each element it supplies:

- PE_i, PE_f, PE_o and PE_c from the buffer;
- the 24-bit peephole word {w_ci, w_cf, w_co} from the peephole BRAM, at
  address `layer·256 + k`;
- c_{t-1} from the context memory.

The EPU is a six-stage pipeline:

```
i   = σ(PE_i + (w_ci·c_{t-1} >>> 4))        f = σ(PE_f + (w_cf·c_{t-1} >>> 4))
g   = tanh(PE_c)
c_t = sat16( (f·c_{t-1} >>> 8) + (g·i >>> 5) )
o   = σ(PE_o + (w_co·c_t >>> 4))
h_t = (o · tanh(c_t)) >>> 9
```

Like the textbook peephole LSTM, the output gate looks at the *new* cell
c_t. The i and f gates look at the *old* cell c_{t-1}.

h_t and c_t come out 6 clocks after the element goes in. The context manager
writes them back as one 24-bit word. The phase ends once all 256 results are
written, which takes 256 + 9 clocks.

## Context memory and the context manager

The context memory has 66,304 words of 24 bits. Each word is {c (16), h (8)}
for one cell of one layer. The size is 256 × (3 + 128 × 2):

| Region | Address |
|---|---|
| acoustic model, layer l, cell e | `l·256 + e` |
| LM context s (0…127), layer l, cell e | `3·256 + (s·2 + l)·256 + e` |

The host sends one **command** {net, src, dst}:

- `net = 0`: one acoustic-model step. `src`/`dst` are ignored.
- `net = 1`: one LM step. The old state is read from context slot `src`, and
  the new state is written to slot `dst`.
  - With `src = dst`, a hypothesis advances in place.
  - With `src ≠ dst`, a new hypothesis branches off an existing one without
    copying anything. This is what beam-search expansion needs.

For each layer the context manager starts the tile with that layer's n_in and
wbase. It then maps the tile's **read requests** {kind, index} to addresses.
The mapping is combinational, so the data arrives one clock later:

| Request | Source |
|---|---|
| `RD_X` of the first layer | the host's `x_t` port (`x_rd_en`, `x_rd_addr`) |
| `RD_X` of an upper layer | h of layer l−1 in slot dst (just written) |
| `RD_H`, `RD_C` | layer l in slot src |
| output tile | h of the top layer in slot dst |

Only one unit reads at a time. An assertion checks this.

## Output tile

The output layer is y = W_o·h + b. Its 256 inputs are broadcast one per clock
to a row of N_OUT = 31 PEs, in the same outer-product way as the LSTM arrays.

- The weight memory has 512 rows of 31 × 6 bits: 256 rows for each network.
- There is one 31 × 16-bit bias vector per network.
- The raw Q5.10 sums are sent out one per clock on `y_valid`/`y_idx`/`y_data`:
  31 of them for the acoustic model, 30 for the LM.

The engine computes no softmax, normalisation or CTC logic. Those belong to the
search on the CPU.

## Host interface (`rnn_accel_top`)

| Port | Meaning |
|---|---|
| `ld_we`, `ld_target`, `ld_addr[16:0]`, `ld_data[4095:0]` | Load bus. Use it only while `busy` is low (an assertion checks this). |
| `cmd_valid`, `cmd_net`, `cmd_src`, `cmd_dst` | Start one step. `busy` rises on the next clock. `cmd_done` pulses at the end. |
| `x_rd_en`, `x_rd_addr` → `x_t` | Input fetch. The host must drive element `x_rd_addr` on `x_t` in the clock after `x_rd_en`. |
| `y_valid`, `y_idx`, `y_data` | Output scores, one per clock, just before `cmd_done`. |

Load targets (`rnn_pkg::ld_target_e`):

| Target | ld_addr | ld_data |
|---|---|---|
| `LD_W0`, `LD_W1` | weight row 0…4401 | 256 × 6 bits |
| `LD_BI`, `LD_BF`, `LD_BO`, `LD_BC` | layer 0…4 | 256 × 16 bits |
| `LD_PEEP` | layer·256 + cell | {w_ci, w_cf, w_co} |
| `LD_CTX` | context address | {c, h}; used to clear or seed a context |
| `LD_OUT_W` | net·256 + input | 31 × 6 bits |
| `LD_OUT_B` | net | 31 × 16 bits |

Memories and datapath registers are not reset. Only the control state has an
asynchronous active-low reset (`rst_n`). So the host must load every parameter,
and clear the contexts it uses, before the first command.

## Timing

All figures are at the default sizes and are measured in simulation.

| Phase | Clocks |
|---|---|
| one PE pass | n_in + 256 + 3 |
| EPU phase of a layer, with hand-over | 256 + 11 |
| one LSTM layer | 2(n_in + 259) + 267 |
| output layer | 256 + 6 + N_OUT |
| **acoustic-model command** | **3,918** |
| **LM command** | **2,434** |

The PE-array share alone is 2,806 clocks for the acoustic model and 1,596 for
the LM.

**Real-time load.** A real-time recognizer needs:

- 100 acoustic-model steps per second;
- about 3,840 LM steps per second (30 character transitions × 128 beams).

That is 100 × 3,918 + 3,840 × 2,434 ≈ 9.7 M clocks per second. At 100 MHz this
is under a tenth of the available cycles.

## Where this design departs from the published architecture

- **The EPU phase is not overlapped.** The published design lets the PE arrays
  and the EPU work at the same time, since the PE buffer decouples them. Here,
  a layer's EPU phase runs after its two PE passes, and the next layer starts
  only when it ends. This is simpler and always correct: an upper layer needs
  the new h of the layer below, and the LM's first layer needs the whole new
  state before the next command. It costs 267 clocks per layer. With the
  output layer, an acoustic-model step takes 3,918 clocks instead of about
  2,806. An overlapped version would feed the new h values of a layer straight
  from the EPU into the next layer's x columns as they appear. It would also
  need a second read path into the context memory, because the EPU reads
  c_{t-1} in the same clocks.
- **Binary points, rounding, saturation, LUT size and pipeline depth** are not
  published. The choices are the ones listed above.
- **The peephole word** is three 8-bit fields, following the published 24-bit
  width. The weights in it are not restricted to 6 bits.
- **The command and load protocol**, the context layout and the source/
  destination context scheme are this design's own. So are the separate
  read and write addresses of the context memory, which let the EPU write-back
  overlap the next read.
- **The output tile** has N_OUT PEs fed in outer-product order, the simplest
  structure that computes the layer. Its internal structure is not published.
- **Not built:** the CPU with its N-best search, the word-level LM and its
  DRAM, and the feature extraction that makes the 123-value frames. Their
  signals are the top's ports.

## What fits

| Configuration | Fits at defaults? |
|---|---|
| 3×256 acoustic model + 2×256 LM, 6-bit weights, 128 beams | yes. 2.25 M weights fill the 2 × 4,402 × 1,536-bit weight BRAMs exactly. |
| same model with 4- or 5-bit weights | yes (sign-extended into the 6-bit field) |
| 256 beams | no. This needs N_CTX = 256, which doubles the context memory. |
| 4×512 / 2×512 model | no. It would need 512-PE arrays (HID = 512) and about 6× the weight memory. |

`HID`, the input and output sizes, the layer counts and `N_CTX` are parameters
of `rnn_accel_top`. The weight-row count and every address width follow from
them.

## Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.
`tb_rnn_ref_pkg.sv` holds a bit-exact reference model:

- the same formats;
- the same table formulas;
- a whole-network `step()` that mirrors the context layout.

The testbenches compare every output with that model, and check the latencies
given above.

- **`tb_rnn_accel_top`** runs the top at reduced size (HID = 8).
- **`tb_rnn_full`** runs it at the full default size. It loads random
  parameters and issues acoustic-model frames and LM steps, both in place and
  branching. It also reloads a context through the load bus. It counts each
  mechanism and fails if any never happens:
  - acoustic-model and LM commands;
  - in-place and branched LM steps;
  - a context carried across commands;
  - a context load;
  - accumulator saturation.

  It takes about half a minute.
- **`tb_rnn_realtime`** runs the real-time load at full size. Each of two
  10 ms frames issues one acoustic-model step and 39 LM steps on the beam's
  contexts. The testbench checks that the frame fits in 1,000,000 clocks, the
  budget at 100 MHz. A frame takes 98,844 clocks.

To run one with Verilator 5:

```
verilator --binary -Wall -Wno-fatal --top-module tb_rnn_full \
    -Irtl -Itb rtl/rnn_pkg.sv tb/tb_rnn_ref_pkg.sv rtl/*.sv tb/tb_rnn_full.sv
./obj_dir/Vtb_rnn_full
```

Use the same command with another `tb_<block>` for one block.

Four limits on how far this verification goes:

- Weights and inputs are random, not a trained network, so recognition accuracy
  is not checked.
- Each number format is checked against the reference model, not against a
  floating-point LSTM.
- Timing closure at 100 MHz has not been run.
- The weight memories are plain arrays. They map to block RAM only on a device
  with about 13.5 Mbit of it.
