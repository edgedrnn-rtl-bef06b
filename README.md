# EdgeDRNN: a delta-GRU accelerator that fetches only the weights it needs

At batch size 1, a recurrent network spends almost all its time reading
weights. Each time step multiplies a large weight matrix by a short vector,
and every weight is used once. On a small FPGA the weights of a useful GRU
(several MB) do not fit in block RAM. They live in DRAM, and the speed is
set by how fast DRAM can deliver them.

EdgeDRNN reduces the weights that have to be read, not the arithmetic per
weight. It runs a *delta* GRU. Every input and hidden-state element is
compared with the value it had when it was last propagated. Only elements
that moved by at least a threshold Θ are sent on. Each sent element selects
one column of the weight matrix. That column is fetched from DRAM and
multiplied by the element's change. Columns of unchanged elements are never
read. With slowly varying inputs such as speech features or sensor readings,
most columns are skipped in most steps, and the DRAM bandwidth goes only to
the columns that matter.

The hardware is a narrow pipeline built around that one idea:

* A **Delta Unit** walks the state vector, applies the threshold and emits
  (column index, delta) pairs.
* A **controller** turns each column index into a DMA read command.
* A row of **K = 8 processing elements (PEs)** consumes the returned 64-bit
  weight beats, 8 weights per beat. The PEs multiply-accumulate them into
  per-neuron *delta memories*. Afterwards the same multipliers, adders and
  look-up tables compute the GRU gates and the new hidden state.

K = 8 comes from the 64-bit DRAM port divided by 8-bit weights, so the
array consumes one full DRAM beat per cycle.

The RTL here is complete from the host register interface and the DMA
command/data streams down to the activation look-up tables. It is
parameterised for networks of up to 2 layers, 768 hidden units and 768
inputs.

---

## 1. The computation

### GRU written as delta updates

For one layer with input x (size I) and hidden state h (size H), the state
vector is the concatenation

    s_t = [ 1, x_t, h_{t-1} ]            (length I + 1 + H)

The leading 1 carries the biases. The weights of the three gates are stacked
into one matrix W of 3H rows and I+1+H columns. Column 0 is the bias column,
columns 1..I multiply the input, and columns I+1..I+H multiply the old
hidden state.

A conventional GRU would compute W·s_t every step. The delta form keeps, for
every column e, the last value ŝ[e] that was propagated. It also keeps four
running sums per neuron j, the *delta memories*:

    M_r[j], M_u[j]   reset and update gate pre-activations (input + hidden parts)
    M_xc[j]          candidate pre-activation, input part (incl. bias)
    M_hc[j]          candidate pre-activation, hidden part

Each step, for every column e:

    d = s_t[e] - ŝ[e]
    if d != 0 and |d| >= Θ:                    Θ = Θx for e <= I, Θh for e > I
        ŝ[e] += d
        for every row n of column e:  M_{bank(n,e)}[n mod H] += W[n][e] * d

Then each neuron is updated:

    r  = σ(M_r)         u = σ(M_u)
    c  = tanh(M_xc + r · M_hc)
    h  = u · h_{t-1} + (1 - u) · c

The c gate keeps its input part and hidden part in separate memories, because
r multiplies only the hidden part. The bias column is column 0 and its
"state" is the constant 1.0. It is therefore sent exactly once after a reset,
when ŝ[0] goes from 0 to 1, and never again. The delta memories persist from
step to step; that is what makes the skipping exact when Θ = 0. A reset of
the network state (ŝ, h and M all zero) is a host command.

### Why a zero threshold still skips

At Θ = 0 the rule above still drops elements whose difference is exactly
zero. Quantised features and saturated hidden units often repeat exactly,
so some columns are skipped even without a threshold.

---

## 2. Dataflow of one time step

```
 host (AXI4-Lite) ─► cfg ──────────────── sizes, Θx/Θh, weight base per layer
                                │
 x_t (AXIS, Q8.8) ─► delta_unit ──pcol──► ctrl ──80-bit cmd──► DMA (outside)
                     │  ▲   ▲                                      │
               delta │  │   │h_{t-1}                      64-bit weight beats
                     ▼  │   │                                      ▼
                  d_fifo│   └───────── pe_array ◄──────────── w_fifo
                        │     (8 PEs + │ acc memories)
                        │              │ h_t, 8 elements per word
                        └─── x of next layer ◄── obuf ──► h_t (AXIS, Q8.8)
```

Layers run one after another. For layer l the controller:

1. **Delta pass.** The controller starts the Delta Unit. The Delta Unit walks
   [1, x, h_{t-1}] at one element per cycle. Layer 0 takes x from the input
   stream. Later layers read x from the output buffer, which holds the h_t of
   layer l-1. For each element that passes the test, the delta goes into the
   D-FIFO and its column index (*pcol*) goes to the controller.
2. **Weight fetch and MxV.** This runs in parallel with step 1. Each pcol
   becomes one DMA command that reads the 3H bytes of column pcol. The
   returned beats go through the W-FIFO into the PE array. The array pops one
   delta per column and applies it to all 3H/8 beats of that column.
3. **Activation.** The controller waits until the delta pass has finished, the
   D-FIFO is empty, every command has been accepted and the array is idle. It
   then starts the activation pass. The PEs read their delta memories and
   produce h_t, 8 neurons per word.
4. **Hand-over.** Each word of h_t goes into the output buffer. It is also
   written at once into the Delta Unit's h memory, where it becomes h_{t-1} of
   the next step.

After the last layer, the output buffer streams h_t to the host and
`step_done` pulses. The next step starts when the next x_t arrives.

The three activities of one layer overlap as far as the data allows. The
Delta Unit runs ahead until a FIFO is almost full. The DMA has several
commands in flight. The PE array consumes one weight beat per cycle whenever
the W-FIFO has data. A column of a 768-unit layer is 288 beats, so in practice
the array is almost always busy or waiting for DRAM.

---

## 3. Number formats

| quantity | format | notes |
|---|---|---|
| x, h, deltas, thresholds | 16-bit signed Q8.8 | thresholds are written as Q8.8 integers (64 = 0.25) |
| weights | 8-bit signed Q2.6 | the binary point (W_FRAC = 6) is this design's choice |
| delta memories M | 32-bit signed, 14 fractional bits | product of Q8.8 and Q2.6, accumulated without rounding |
| σ and tanh outputs | 5-bit Q1.4 | σ unsigned in [0, 1]; tanh signed in [-1, 15/16] |

The activation arithmetic, in the order the PE performs it:

    a(M)   = sat16(M >>> 6)                  M to Q8.8
    r, u   = σ(a(M_r)), σ(a(M_u))            Q1.4
    pre    = sat16(a(M_xc) + (r · a(M_hc)) >>> 4)
    c      = tanh(pre)                       Q1.4
    1-u    = 16 - u                          Q1.4 (exact, 0..16)
    h      = sat16((u · h_{t-1}) >>> 4 + (1-u) · c)

The product of two Q1.4 values has 8 fractional bits, so (1-u)·c is already
Q8.8. All shifts are arithmetic (they round toward −∞), and all sums saturate
to 16 bits. The package `edgedrnn_pkg` holds these helpers. The testbench
reference model repeats them independently.

### The look-up tables

With a 16-bit input and a 5-bit output, a direct table would have 65 536
entries but only 16 or 32 distinct values. Each `act_lut` is therefore a
list of breakpoints: the output is the number of breakpoints the input has
passed. The breakpoints are computed at elaboration from the inverse
functions (logit, atanh), so that the output is the exactly rounded
(half-up) value of σ or tanh. The output width can be set from 5 to 9 bits.

---

## 4. Weights in DRAM and the command stream

Each layer's W is stored **column-major** at a per-layer byte base address.
Column e occupies bytes `base + e·3H … base + e·3H + 3H − 1`. Inside a column
the rows come in three blocks of H: the **r** block, then **c**, then **u**.
A 64-bit beat carries 8 consecutive rows, and byte k of the beat goes to PE k.
So row n is always handled by PE n mod 8, and PE p owns neurons p, p+8, p+16, …

Beat b of a column (0 ≤ b < 3H/8) updates word b mod (H/8) of one memory:

| beat range | bank |
|---|---|
| 0 … H/8−1 | M_r |
| H/8 … 2H/8−1 | M_xc for input and bias columns, M_hc for hidden columns |
| 2H/8 … 3H/8−1 | M_u |

A column is therefore one contiguous DMA read of 3H bytes. The controller
issues one 80-bit AXI-Datamover-style MM2S command per sent element:

| bits | field | value |
|---|---|---|
| 22:0 | BTT (bytes to transfer) | 3H |
| 23 | TYPE | 1 (incrementing) |
| 29:24 | DSA | 0 |
| 30 | EOF | 1 |
| 31 | DRR | 0 |
| 71:32 | SADDR | base[l] + pcol · 3H (40-bit) |
| 75:72 | TAG | pcol[3:0] |
| 79:76 | reserved | 0 |

The beats come back in command order, and the PE array knows the size of a
column. So the data stream needs no framing: tlast and the tag are not used.
Commands wait in a 16-entry queue. The Delta Unit pauses when two or fewer
entries are free.

---

## 5. The Delta Unit

The Delta Unit is a two-stage pipeline that handles one element per cycle:

* **Stage 1** reads ŝ[e] from the state memory. For e > I it also reads
  h_{t-1}[e−I−1] from the h memory. The x elements come from the input
  stream (layer 0) or from the output buffer (later layers).
* **Stage 2** forms d = s − ŝ with saturation to 16 bits and applies the test
  `d ≠ 0 && |d| ≥ Θ`. Θ is Θx for e ≤ I and Θh for e > I. If the element is
  sent, the stage writes ŝ + d back, pushes d to the D-FIFO and pushes e to the
  controller.

The state memory holds ŝ for I+1+H columns per layer (1 537 words per layer at
the largest size). Because a saturated delta is written back as sent, ŝ
always equals the sum of the deltas the PEs have seen. That keeps the delta
memories consistent with the hidden state even after a clipped step.

The unit stalls in three cases: when the D-FIFO or the command queue is
almost full, or when the input stream has no data. Without stalls, a vector
of D elements takes D + 2 cycles.

The h memory (K elements per word) belongs to the Delta Unit, but the PE
array also uses it. During activation the array reads h_{t-1} from it for
u·h_{t-1}. It writes each new h_t word into it, in the same cycle as into
the output buffer.

An init command clears ŝ and h of all layers in parallel with the delta
memories.

---

## 6. The processing element and its time-shared datapath

This is the least obvious part of the design. Each PE has exactly these
arithmetic resources:

* **MUL**, a 16×16-bit signed multiplier;
* **ADD0**, a 32-bit adder;
* **ADD1**, a 16-bit adder;
* one **σ LUT** and one **tanh LUT**;
* the four delta-memory banks (`acc_mem`, 32-bit words, one word per owned
  neuron per layer).

The same units do both jobs of a step. Operand multiplexers in front of them
select the job.

### MxV mode

Each cycle the PE receives one weight and the column's delta. MUL forms
w·d, and the addressed M word is read in the same cycle. ADD0 adds the
product, and the sum is written back one cycle later. This read-modify-write
accepts one weight per cycle because a column never touches the same word in
two consecutive beats. Clearing uses the same path: the operand below ADD0 is
forced to 0 and the delta is 0, so an init is 4·DEPTH cycles of writes of
zero.

### Activation mode: 8 stages at an initiation interval of 5

A neuron's update needs three multiplications (r·M_hc, u·h, (1−u)·c), three
32-bit additions, two 16-bit additions and three table look-ups. With one
instance of each unit, a new neuron can start every 5 cycles. The stages are:

| stage | MUL | ADD0 | ADD1 | σ | tanh |
|---|---|---|---|---|---|
| S0 | | | | r = σ(M_r) | |
| S1 | | | | | |
| S2 | r·M_hc | | | u = σ(M_u) | |
| S3 | | pre = M_xc + r·M_hc | 1 − u | | |
| S4 | u·h_{t-1} | | | | c = tanh(pre) |
| S5 | (1−u)·c | uh + 0 | | | |
| S6 | | (1−u)c + 0 | | | |
| S7 | | | h = uh + (1−u)c | | |

S1 is a register stage that lines up the memory read and the first LUT. In
S5 and S6, ADD0 only passes its operand through, with 0 below it. That keeps
the output path on the same adder the MxV uses.

A new neuron starts every 5 cycles. Neuron n+1 then runs its S0–S2 in the
same cycles as S5–S7 of neuron n. Each unit is used at these stage offsets:

| unit | stages used | offsets mod 5 |
|---|---|---|
| MUL | S2, S4, S5 | 2, 4, 0 |
| ADD0 | S3, S5, S6 | 3, 0, 1 |
| ADD1 | S3, S7 | 3, 2 |
| σ | S0, S2 | 0, 2 |
| tanh | S4 | 4 |

All offsets are distinct within each row. So the overlap is free of
conflicts, and any interval shorter than 5 would put MUL twice in one cycle.
Assertions in `pe.sv` check that no unit is claimed twice in one cycle. The
result appears 9 cycles after the read request.

### The array around the PEs

`pe_array` slices each weight beat into 8 weights. It broadcasts the delta
popped from the D-FIFO to all PEs and counts beats to pick the bank and word.
The next column's delta is popped together with the last beat of the current
column, so columns follow each other without a gap. For activation, the
array issues one group of 8 neurons every 5 cycles. It reads the 8 matching
h_{t-1} values as one word from the Delta Unit. It emits the 8 new values as
one word to the output buffer.

A pass over H neurons takes 5·H/8 + 6 cycles (486 for H = 768).

---

## 7. Control, buffering and flow control

`ctrl` is a small FSM with the states idle → init → delta/MxV per layer →
activation per layer → output. It also contains the command generator. All
streams follow AXI4-Stream rules: data is held while valid is high and ready
is low. Assertions check this on the command, weight and output streams. The FIFO depths are:

| FIFO | default | purpose |
|---|---|---|
| D-FIFO | 1 024 × 16 bit | deltas waiting for their columns; almost-full with 2 entries of slack |
| W-FIFO | 512 × 64 bit | weight beats, absorbs DRAM latency; tready = not full |
| command queue | 16 × pcol | column indices waiting for the command channel |

## 8. Register map (AXI4-Lite, 32-bit)

| address | name | access | meaning |
|---|---|---|---|
| 0x00 | CONTROL | W | bit 0: clear network state (ŝ, h, M) |
| 0x04 | STATUS | R/W1C | bit 0 busy, bit 1 step done |
| 0x08 | NUM_LAYERS | RW | 1 … 2 |
| 0x0C | I_DIM | RW | input size of layer 0 |
| 0x10 | H_DIM | RW | hidden size, multiple of 8 |
| 0x14 | STEPS | R | time steps completed |
| 0x40 + 16·l | W_BASE_LO | RW | weight base address [31:0] of layer l |
| 0x44 + 16·l | W_BASE_HI | RW | bits [39:32] |
| 0x48 + 16·l | TH_X | RW | Θx of layer l (Q8.8) |
| 0x4C + 16·l | TH_H | RW | Θh of layer l (Q8.8) |

Host sequence: write the sizes, bases and thresholds, write CONTROL = 1, and
wait for busy to clear. Then stream x_t and read h_t for each step. A new
network size also needs a clear, because the delta memories of the old
network are meaningless for the new one.

---

## 9. Timing and performance

At clock f (125 MHz in the reference implementation), with the DMA supplying
one beat per cycle, one time step takes about

    Σ_layers [ n_sent(l) · 3H/8  +  5H/8 + 6 ]  +  H + H/8      cycles

The first term, the weight stream, dominates. The delta pass (I+1+H cycles)
runs under it. DRAM latency costs time only when too few columns are in
flight to cover it.

For the largest supported network (2 layers, H = 768, I = 40) with every
column sent, a step is about 677 000 cycles, or 5.4 ms at 125 MHz. The same
network needs 0.54 ms on average with Θ = 0.25 in the reference measurements,
which means about 90 % of the columns are skipped. The workload testbench
checks the bound above on every step.

### Sizes the defaults support

| network | fits | note |
|---|---|---|
| 1 or 2 layers, H = 256/512/768, I = 40 (spoken digits) | yes | largest: 96 of 96 accumulator words per layer per bank |
| 2 layers, H = 256, I = 14 (gas sensors) | yes | separate Θx, Θh per layer |
| 2 layers, H = 128, input size unknown (prosthesis control) | if I ≤ 768 | |

The limits are NL = 2 layers, NH = 768 hidden units and NI = 768 inputs
(`edgedrnn_top` parameters). H must be a multiple of 8.

---

## 10. Where this design departs from, or goes beyond, the reference description

* **Activation rate.** The reference performance model charges about 3H/8
  cycles for the activation of a layer. This datapath needs 5H/8 + 6, because
  with one multiplier per PE an interval of 5 is the shortest free of
  conflicts (section 6). For H = 768 the difference is 198 cycles per layer.
* **Delta Unit latency.** The reference gives exactly D cycles for a vector
  of D elements. This unit processes one element per cycle too, but its
  two-stage pipeline adds 2 cycles of fill. The parallel multi-unit Delta
  Unit that the reference discusses as an option is not built; like the
  reference system, this design uses one.
* **Weight width.** The reference text says both that K = 8 is optimal with
  16-bit weights and that 8-bit weights with K = 8 fill the 64-bit port. This
  design follows the 8-bit version. 16-bit weights (K = 4) are not built.
* **Stage contents.** The reference gives the units, the 8 stages and the
  reuse of S0–S2 during S5–S7. The exact operand of each unit in each stage
  (the table in section 6), the register stage S1 and the scaling between
  stages are this design's.
* **Look-up tables** are stored as breakpoints with round-half-up, not as
  explicit tables. The output is the same as a full table rounded the same way.
* **Zero deltas** are never sent, even at Θ = 0.
* **Separate h memory.** The true h_{t-1} is kept beside ŝ, because with
  Θh > 0 ŝ differs from h.
* **Saturation** of deltas, pre-activations and h, and the choice of Q2.6 for
  the weights, are not specified by the reference and are this design's.
* **DMA command layout** follows the common 80-bit, 40-bit-address Datamover
  command format. The reference gives only the width and the contents
  (address from pcol, length from the network size).
* **Register map, FIFO depths, the controller FSM and the output stream
  format** (one Q8.8 element per beat, tlast on the last) are this design's.
* **Not included:** the DMA engines, the DRAM and its controller, the host
  processor and the GPIO used in the reference system. They are outside
  `edgedrnn_top`, which exposes their streams and the AXI4-Lite port.
  Testbenches use `tb/axi_datamover_model.sv`, which models the DMA with
  latency, random stalls and a hashed DRAM content.

---

## 11. Verification

`tb/tb_ref_pkg.sv` has a reference model written separately from the RTL.
It steps a stack of delta-GRU layers with the same number formats and
computes the look-up tables from `$exp`. It counts columns sent, zero
differences and sub-threshold differences. Every testbench is self-checking
and ends with a `TB_RESULT checks=… failures=…` line. A watchdog ends any
run that hangs.

| testbench | what it checks |
|---|---|
| tb_act_lut | all 65 536 inputs of σ and tanh at 5 bits, and tanh at 9 bits, against real arithmetic |
| tb_acc_mem | random reads and writes of the four banks against an array model |
| tb_pe | MxV accumulation and activation results; 9-cycle latency; back-to-back neurons at interval 5 |
| tb_pe_array | beat-to-bank mapping, activation of whole layers, cycle counts of init, MxV and activation |
| tb_delta_unit | delta rule at several thresholds including 0, clipping, D+2 timing, init |
| tb_d_fifo, tb_w_fifo | random push/pop against a queue model, almost-full and ready timing |
| tb_ctrl | every command field, the order of layer/activation/output events, hold under back-pressure |
| tb_obuf | word writes, element reads, stream with tlast under back-pressure |
| tb_cfg | register read-back, clear, status and step counter |
| tb_edgedrnn_top | 2 layers, I = 12, H = 32, 6 steps. h_t is bit-exact against the model. Checks every command and the activation timing. It also counts that each mechanism occurred: threshold skips, zero skips, the single bias send, D-FIFO almost-full, W-FIFO empty waits, command back-pressure, input gaps, layer-1 reads from the output buffer, the S0–S2/S5–S7 overlap, output back-pressure and init |
| tb_edgedrnn_full | the top at its default parameters (2 layers, H = 768, I = 40), 2 steps, bit-exact |
| tb_edgedrnn_workloads | default top, reconfigured between the evaluated sizes: 1L/2L × 256/512/768 with I = 40, Θ = 0.25; 2L-256H with I = 14 and Θx ≠ Θh; 2L-128H with an assumed input size of 8. Checks h_t bit-exact and the cycle bound of section 9, and prints µs per step at 125 MHz |

Limits: inputs in the testbenches are random walks and the weights are
hashed, not trained networks. Reported latencies therefore reflect the
stimulus, not the reference accuracy or sparsity. The DMA is a model.
Throughput against real DRAM has not been measured.

## 12. Simulating

Any testbench builds with plain Verilator 5. For example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/edgedrnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_edgedrnn_top.sv \
    --top-module tb_edgedrnn_top
./obj_dir/Vtb_edgedrnn_top
```

Unit testbenches that do not use the reference model can drop
`tb/tb_ref_pkg.sv`. Simulation needs the commands to be run from the
repository root. To change the network size, set `NL`, `NI` and `NH` on
`edgedrnn_top`. The accumulator depth (NL·NH/8 words per bank) and the state
memories follow from them. The number formats are in `rtl/edgedrnn_pkg.sv`.
