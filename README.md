# A matrix-vector unit for streaming quantised neural networks

Inside a dataflow accelerator for quantised neural networks, each layer has its own hardware.
A convolution is first unrolled into a matrix product: a sliding window turns the input feature
map into a stream of column vectors of K_d²·I_c elements, one per output pixel. Each vector is
then multiplied by a fixed O_c × K_d²·I_c weight matrix. This design is the unit that performs that
product, the *matrix-vector unit* (MVU). It is written in SystemVerilog as a drop-in replacement for
the high-level-synthesis MVU of the FINN framework. Fully connected layers use the same unit, with
K_d = 1.

The weights are fixed when the design is built ("burned in") and live in on-chip memories next to
the arithmetic. Input vectors arrive, and results leave, over AXI-Stream. The amount of hardware
is set by two numbers:

* **PE**, the number of processing elements. Each PE is a hardware neuron that computes one row of
  the matrix at a time.
* **SIMD**, the number of lanes per PE. Each lane is a hardware synapse that multiplies one
  input element by one weight in each cycle.

When PE × SIMD is smaller than the matrix, the matrix is *folded* onto the hardware in time, and
the unit still starts one compute step every clock cycle (initiation interval of one).

## Folding: what happens in which cycle

Let the matrix have `MATRIXH = O_c` rows and `MATRIXW = K_d²·I_c` columns. Then:

| quantity | meaning | default |
|---|---|---|
| `SF = MATRIXW / SIMD` | input words per vector (synapse fold) | 256/16 = 16 |
| `NF = MATRIXH / PE` | passes over the vector, one per group of PE rows (neuron fold) | 16/16 = 1 |
| `D_MEM = SF · NF` | weight words per PE = compute cycles per vector | 16 |

The unit works through the loop nest `for nf in 0..NF-1: for sf in 0..SF-1`, one iteration per compute
cycle. In iteration (nf, sf), PE *p* takes input word *sf*, which holds elements
`sf·SIMD .. sf·SIMD+SIMD-1` of the vector. It multiplies these by the weights of row `nf·PE+p` in the
same columns and adds the lane products into its accumulator. At `sf = SF-1` every PE holds a
complete dot product. The PE results together form one output word: PE *p*'s field is output
channel `nf·PE+p`. So a vector yields NF output words.

In the paper's 4 × 4 example with PE = SIMD = 2, PE0 computes row 0 in cycles 1–2 and row 2 in
cycles 3–4, while PE1 computes rows 1 and 3. The input elements x0..x3 are therefore needed twice.
On the first pass (nf = 0) each word comes straight from the input stream and is also written into
the **input buffer**. Passes nf ≥ 1 read the words back from that buffer. The buffer therefore holds
SF = K_d²·I_c/SIMD words.

Bit layout: element *s* of a `SIMD·IN_W`-bit input word is at `[s·IN_W +: IN_W]`. Weight *s* of a PE's
weight word is at `[s·W_W +: W_W]`. PE *p*'s result in a `PE·OUT_W`-bit output word is at
`[p·OUT_W +: OUT_W]`, as a signed number.

## Block structure

```
mvu_batch                      top ("batch unit")
├── mvu_weight_ctrl            weight-read control unit
├── mvu_weight_mem × PE        one burned-in weight memory per PE (D_MEM × SIMD·W_W)
└── mvu_stream                 "stream unit"
    ├── mvu_stream_ctrl        Idle/Write/Read FSM, fold counters
    ├── mvu_input_buffer       SF words of SIMD·IN_W bits
    ├── mvu_pe × PE
    │   ├── mvu_simd × SIMD    XNOR / binary-weight mux / multiplier lane
    │   ├── mvu_popcount       (XNOR lanes)  or  mvu_adder_tree (other lanes)
    │   └── mvu_accumulator
    └── mvu_out_fifo           small output FIFO (AXI-Stream master side)
mvu_pkg                        lane-type and FSM-state enums, product width
```

The batch unit sends weights to the stream unit as a stream of its own. In each cycle the weight
memories present one word per PE, `wmem_out[p]`. The control unit raises `wmem_valid` when those
words are ready, and the stream unit raises `wmem_ready` in every cycle in which it uses them. The
weights are consumed in address order 0, 1, …, D_MEM−1 and then wrap around. This works because the
memories are laid out so that address `nf·SF + sf` holds exactly the weights needed in fold
iteration (nf, sf).

## The stream control FSM

This FSM is the part of the design that takes the most care. It is a three-state Mealy machine.
Its job is to let a PE compute in every cycle in which it can, and in no other.

* **Idle** is the state after reset, and the state after any cycle in which no computation took place.
* **Write** is the first pass of a vector. Here words are taken from the input stream, handed to
  the PEs and written into the input buffer.
* **Read** covers the remaining NF−1 passes. Here the buffered words are reused and the input stream
  is not read.

Two internal conditions drive it. `INP_BUF_FULL` means the current vector is completely in the buffer
(the pass counter is past pass 0). `COMP_DONE` marks the compute cycle that finishes the last pass.
The machine uses a single "TREADY", meaning "a compute cycle may happen now". In this design that
is true when the output FIFO is not full and a weight word is valid. The transitions are:

| from | to | condition |
|---|---|---|
| Idle | Write | in_valid & TREADY |
| Idle | Read | TREADY & INP_BUF_FULL |
| Write | Idle | !in_valid \| !TREADY |
| Write | Read | TREADY & INP_BUF_FULL |
| Read | Idle | !TREADY \| COMP_DONE (and no input waiting) |
| Read | Write | in_valid & COMP_DONE |

Because the machine is Mealy, each compute step belongs to the transition that is taken in the same
cycle, so no cycle is lost on entering a state. A step happens exactly when
`TREADY && (pass > 0 || in_valid)`. The state register records only what happened in the last cycle.

Some cases need a specific rule:

* **Completion takes priority in Read.** If `COMP_DONE` and `in_valid` are both true in Read, the
  machine goes to Write, so the next vector follows without a gap. If `COMP_DONE` is true without
  `in_valid`, it goes to Idle.
* **A vector can finish from Idle or Write.** A buffered step taken from one of those states can
  itself finish the vector (a stall just before the last step). The machine then leaves as it would
  from Read.
* **Single-pass matrices.** When NF = 1 the Read state is never used, and Write repeats for vector
  after vector.

The ready signal given upstream (`out_ready`) is `TREADY && !INP_BUF_FULL && state != Read`. It never
depends on `in_valid`, as AXI-Stream requires.

## Back-pressure and the output FIFO

Results do not go to the output port directly. When a PE group finishes, its output word is written
into a small FIFO (`OUT_FIFO_DEPTH`, default 4 words), and the FIFO drives the AXI-Stream master
port. When the next layer stops accepting (`in_ready` low), computation carries on until the FIFO is
full. Only then does TREADY fall and the FSM stall. Because a word is produced only every SF cycles,
four free slots let the PEs keep running for up to 4·SF cycles while the next layer is stalled. This
smooths the mismatch between bursts of PE outputs and the rate at which the next layer takes them.
If input is missing instead, the unit stops at once: it cannot compute without data.

## The three lane types

The `SIMD_TYPE` parameter (`mvu_pkg::simd_type_e`) selects the lane circuit at elaboration time.

| `SIMD_TYPE` | operands | lane | reduction |
|---|---|---|---|
| `SIMD_XNOR` | 1-bit input, 1-bit weight (0 ≙ −1, 1 ≙ +1) | XNOR | pop count |
| `SIMD_BINWGT` | `IN_W`-bit signed input, 1-bit weight | 2:1 mux choosing −x (w = 0) or +x (w = 1) | adder tree |
| `SIMD_STD` | `IN_W`- and `W_W`-bit signed | multiplier | adder tree |

With XNOR lanes the output is the number of agreeing bit pairs, not the ±1 dot product. The dot
product is `2·count − MATRIXW`, and a following threshold stage would normally absorb that offset.
The adder tree and the pop count are combinational. The accumulator is the only register in a PE.
On the last word of a row the accumulator's next value, which already includes the current
cycle's products, goes straight into the output FIFO.

## Timing

* One compute step per clock cycle whenever input (in pass 0), a weight word and FIFO space are
  available. A vector costs exactly D_MEM cycles, and consecutive vectors follow without gaps.
* The first output word is valid SF cycles after the first input word of a vector is accepted.
* After reset, `wmem_valid` rises after one cycle, once the weight memories have made their first
  registered read.
* Reset (`aresetn`) is asynchronous and active low. It puts the FSM in Idle, clears the fold
  counters, the accumulators and the FIFO, and drops `wmem_valid`.

## Parameters of the top (`mvu_batch`)

| parameter | default | meaning |
|---|---|---|
| `SIMD_TYPE` | `SIMD_STD` | lane type |
| `KDIM` | 4 | kernel size K_d |
| `IFM_CH` | 16 | input channels I_c |
| `OFM_CH` | 16 | output channels O_c |
| `PE`, `SIMD` | 16, 16 | parallelism; must divide O_c and K_d²·I_c |
| `IN_W`, `W_W` | 4, 4 | input and weight width (set both to 1 for XNOR, `W_W` = 1 for binary weights) |
| `OUT_W` | 16 | accumulator and output width |
| `OUT_FIFO_DEPTH` | 4 | output FIFO words |
| `WEIGHT_FILE` | `rtl/mvu_weights.hex` | `$readmemh` image, path relative to the simulation directory |

The defaults are a layer with 16 input channels, a 4 × 4 kernel and 16 output channels, at 4-bit
precision, on 16 PEs of 16 lanes. That is a 16 × 256 matrix with SF = 16 and NF = 1.

**Weight image.** The file holds PE·D_MEM lines with one hex word each. Line `p·D_MEM + a` is word
*a* of PE *p*. Weight *s* of that word is `W[nf·PE+p][sf·SIMD+s]`, where `a = nf·SF + sf`. The shipped
`rtl/mvu_weights.hex` is not a trained network. It is a test pattern, `W[r][c] = (3r + 5c + r·c + 1)
mod 16`, read as a signed 4-bit number. The test images in `tb/` use the same formula modulo 2^W_W.
To use real weights, write them in this layout and point `WEIGHT_FILE` at the file.

## How far it is checked

Each module has a self-checking testbench in `tb/` that compares against values computed
independently in the testbench:

* **Leaf blocks.** `tb_mvu_simd` tests every operand pair exhaustively. `tb_mvu_popcount`,
  `tb_mvu_adder_tree` and `tb_mvu_accumulator` use random values and corner cases.
* **PE.** `tb_mvu_pe` checks all three lane types.
* **Memories and FIFO.** `tb_mvu_input_buffer`, `tb_mvu_out_fifo` and `tb_mvu_weight_mem` check
  contents and ordering. `tb_mvu_weight_ctrl` checks that no weight word is skipped or repeated and
  that one word arrives per cycle.
* **FSM.** `tb_mvu_stream_ctrl` checks every state, every counter and `out_ready` against the
  transition table above under random stalls. It also requires every transition to occur.
* **Stream unit.** `tb_mvu_stream` runs the paper's 4 × 4 example with PE = SIMD = 2. It includes a
  cycle-exact throughput check.
* **Top, reduced size.** `tb_mvu_batch` runs an 8 × 16 layer (PE = 2, SIMD = 4, NF = 4) for all three
  lane types. It uses random input gaps and back-pressure, checks every output and checks the
  stall-free cycle count. It also counts the FSM transitions, buffer reuse, back-pressure, computation
  continuing into the FIFO and the FIFO filling up, and fails if any of them never happens. Two
  more units in the same test cover the extremes of folding: fully parallel (SF = NF = 1, one cycle
  per vector) and fully serial (PE = SIMD = 1).
* **Top, default size.** `tb_mvu_batch_full` runs a complete 16 × 16 input map: 169 vectors, checked in
  full, finishing in 169 × 16 cycles.
* **Larger layers.** `tb_mvu_large` runs the same layer with 32 input channels (a 16 × 512 matrix)
  and with 64 input channels (a 16 × 1024 matrix), each over a full 169-vector layer.
* **NID layers.** `tb_mvu_nid` runs all layers of the paper's four-layer network-intrusion
  detection MLP, with 2-bit weights and inputs: layer 0 (600 → 64, PE 64, SIMD 50), layers 1/2
  (64 → 64) and layer 3 (64 → 1).
* **Evaluation sweeps.** `tb_mvu_sweep` builds one point of each of the six parameter sweeps used to
  evaluate the design (64 input and 64 output channels and 4 × 4 kernels unless swept). Those points
  are 8 input channels on PE = SIMD = 2, 64 × 1024 on PE = SIMD = 32, 16 output channels on
  PE = SIMD = 2, a 3 × 3 kernel on PE = SIMD = 32, PE 16 with SIMD 64, and PE 64 with SIMD 16. The
  builds rotate through the three lane types.

Where a weight image would be large (NID layer 0, the 64-channel layer, the sweeps), the harness does not read it
from a file. It computes the same formula and writes each word into the PEs' memories through
hierarchical references, one time unit into the simulation, before reset ends.

Assertions check the handshakes. They cover FIFO overflow, AXI-Stream valid and data staying stable
under back-pressure, no input being accepted in Read, and `COMP_DONE` happening only on the last word
of a pass.

Not verified: synthesis on an FPGA and timing closure. Of the evaluation sweeps, only the one
point of each listed above is simulated, and not every lane type at every point.

## Simulating

From the directory that holds `rtl/` and `tb/` (the weight paths are relative to it):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mvu_pkg.sv tb/tb_mvu_batch_full.sv --top-module tb_mvu_batch_full -o sim
./obj_dir/sim
```

Substitute any other `tb/tb_*.sv`. Each testbench ends with `TB_RESULT checks=N failures=M`. To try
another layer shape, instantiate `mvu_batch` with new parameters and a matching weight image.
`tb/tb_mvu_batch_harness.sv` is a reusable driver and checker for any shape and lane type.

## Departures and choices

The block split (batch unit, stream unit, control units, input buffer, PE/SIMD array), the three
lane circuits, the Idle/Write/Read FSM and its transition conditions, the AXI-Stream signal set, the
output FIFO, and the weight-memory and input-buffer depths all follow the published description of
the FINN MVU RTL. The following points are not specified there, and this design decides them itself:

* **Number format.** Multi-bit inputs and weights are two's complement signed.
* **Widths and FIFO depth.** `OUT_W` = 16 and an output FIFO depth of 4.
* **The FSM's TREADY.** It is FIFO-not-full and weight-valid. The downstream ready only drains the FIFO.
* **Memory read styles.** The weight memories have a registered read. The control unit addresses them
  one cycle ahead. The input buffer has an asynchronous read.
* **Arithmetic structure.** The adder tree and pop count are combinational, with no pipeline
  registers.
* **Weight loading.** One shared `$readmemh` image for all PEs.
* **Fig. 3 of the source.** It prints some input indices inconsistently, for example x0, x1 beside
  y02, y03. This design follows the matrix product itself: y_ij is always multiplied by x_j.
* **Latency.** For the NID layers the reported RTL execution cycles are 17 / 13 / 13. This design
  needs D_MEM = 12 / 8 / 8 cycles for one vector, from first input to last output. The source does
  not describe the pipelining behind its extra cycles, so none was added.
* **Not included.** The output thresholding that normally follows an MVU is not included. Neither is
  the sliding-window unit that produces its input vectors.

Verilator reports `SYNCASYNCNET` for `aresetn`. The warning comes from assertions that sample
`aresetn` in `disable iff` next to flip-flops that use it as an asynchronous reset. It is harmless.
