# MEADOW accelerator in SystemVerilog

Running a small transformer language model on an edge FPGA is limited less by
arithmetic than by off-chip traffic. Two kinds of data dominate:

- Intermediate activations of the attention block (Q, QK^T, softmax) are
  written out to DRAM and read back.
- Weights have to be streamed in for every layer.

The MEADOW architecture attacks both of these:

1. **Token-parallel, head-sequential (TPHS) attention.** Each token's query is
   computed, scored against every key, run through softmax and multiplied
   with V in a chain of on-chip units. The intermediate results go directly
   from one unit to the next and never reach a memory. Several tokens run
   side by side in separate lanes. Heads are processed one after another.
2. **Packed weights.** Every weight matrix is cut into small chunks. The
   distinct chunks are kept once in a *unique matrix*, and the weight matrix
   becomes a matrix of chunk IDs. The IDs are sent in 32-bit packets. Each
   packet uses only as many bits per ID as its largest ID needs. A host-side
   reindexing step gives the most frequent chunks the smallest IDs, so most
   packets can use narrow IDs. On chip, a weight-unpacking and look-up unit
   (WILU) turns packets back into 8-bit weight rows.

The other layers (K/V projection, output projection, MLP) run as ordinary
matrix multiplications (GEMM) on the same processing elements (PEs). The PEs
are hybrid: they switch between a GEMM mode and a pipelined TPHS mode.

All arithmetic is 8-bit weights times 8-bit activations, with 32-bit
accumulation.

## Block structure

```
 host ports ──► input BRAM ─┐                               ┌─► output BRAM ──► host
 host ports ──► weight BRAM ┼─ packets ─► WILU ─ rows ─┐    │
                            ├─ K rows ─────────────────┼─► NoC ─┬─► 12 lanes ─┘
                            └─ V rows ─────────────────┘        ├─► 8 LN modules
                                                                └─► 8 NL (ReLU/GeLU) modules
```

Each of the 12 lanes holds the following units:

| Unit | Count per lane | Role |
|------|----------------|------|
| Q PEs | 6 | parallel-MAC hybrid PEs that compute q = x·W_Q |
| QK^T PE | 1 | parallel-MAC hybrid PE that computes one score q·k_i per cycle |
| Softmax module | 1 | three-stage softmax (MAX, EXP, DIV) |
| Broadcasting PE | 1 | broadcasting-MAC hybrid PE that accumulates Σ_i p_i·v_i |

The parallel-MAC PEs are the 6 Q PEs and 1 QK^T PE of every lane:
12 × 7 = 84 parallel PEs, plus 12 broadcasting PEs. Each PE has 64
multipliers.

| File | Contents |
|------|----------|
| `meadow_pkg.sv` | shared widths, the PE command struct, NoC destination codes and the job configuration struct |
| `mau.sv` | mode-aware unpacking of one packet into chunk IDs |
| `wilu.sv` | packet stream → unique-matrix look-up → 64-byte weight rows |
| `pe_parallel_mac.sv` | 64 multipliers plus an adder tree: one dot product per cycle |
| `pe_broadcast_mac.sv` | 64 multiply-accumulators; one scalar broadcast against a 64-wide row per cycle |
| `hybrid_pe.sv` | either MAC, double-banked input/weight/output register files (RFs), a double-banked pipeline register (PREG), requantization |
| `softmax_sm.sv` | pipelined MAX / EXP / DIV softmax |
| `layernorm_ln.sv` | layer normalization of one token |
| `nl_unit.sv` | eight-wide ReLU/GeLU |
| `bram_sdp.sv` | 512-bit × 16384 memory: one write port, N read ports |
| `meadow_noc.sv` | fixed-topology interconnect between BRAMs, WILU, PEs and SM/LN/NL modules |
| `meadow_ctrl.sv` | job sequencer |
| `meadow_top.sv` | the top level |

The default sizes are 1 MB per BRAM and 4 KB per RF (two banks of 32 rows of
64 bytes).

## The TPHS pipeline in detail

This is the least obvious part of the design, and it lives in `meadow_ctrl`.
An attention job computes `SMV_t = softmax(q_t K^T) V` for one head of width
64, where `q_t = x_t W_Q`. Tokens t = 0..T-1 are taken 12 at a time, one per
lane. A batch of 12 tokens is called a *group*.

The controller has four engines. Each works on its own group, so at any time
up to four groups are in flight.

**Q engine.**

1. Load each lane's token (D = 64·dch bytes) from the input BRAM into the
   input RFs of that lane's Q PEs.
2. Stream the packed W_Q through the WILU. The rows come out in the order
   (output j, chunk c).
3. Write row (j, c) into the weight RF of Q PE `j mod 6` in every lane, so
   all 12 lanes share one weight stream.
4. When a PE finishes a q_j, send it over the NoC into byte j of the QK^T
   PE's PREG.

The PREG has two banks. The Q engine fills one bank while the QK^T engine
reads the other. The bank swap is what lets Q of group g+1 overlap QK^T of
group g.

**QK^T engine.**

1. Read K rows k_0..k_{T-1} from the weight BRAM, one per cycle. The weight
   BRAM has a separate read port for K.
2. Apply each row to every lane's QK^T PE at once. Each PE produces one int8
   score per cycle.
3. Send the scores into the lane's softmax module.

**Softmax.** Each stage takes T cycles per token:

- MAX stage: takes in the T scores and finds the maximum.
- EXP stage: replays them from a buffer as `exp(s - max)` and sums them.
- DIV stage: outputs each exponential divided by the sum.

Successive groups follow one another through the three stages. The first
probability of a token appears 2T+2 cycles after its first score.

**SMxV engine.**

1. Each probability p_i goes over the NoC, through one register stage, into
   the broadcasting PE's PREG.
2. V row i is read in the same cycle from the weight BRAM's third read port.
3. The broadcasting PE adds `p_i · v_i` into its 64 accumulators.
4. After T steps, requantize the lane's output row and write it to the
   output BRAM.

Engines hand over through small per-group flags:

- the Q engine must not overwrite a PREG bank that QK^T is still reading;
- QK^T must not start a group whose q is not complete;
- SMxV follows the softmax output valid.

The testbench checks and counts:

- the overlaps between engines;
- the PREG, weight RF and K bank switches.

With the full-size configuration, a 40-token head of width 64 takes about
6,200 cycles. The Q stage dominates. The WILU delivers one 64-byte weight
row every 17 cycles, because it does one unique-matrix look-up per cycle
plus one bubble per row. It does not deliver one row per cycle as the stage
timing in the paper's example assumes.

## Weight packing and the WILU

**Chunks and IDs.** A chunk is 4 consecutive int8 weights along the reduction
dimension, so 16 chunks make one 64-byte PE row. The unique matrix holds up
to 2048 chunks. IDs are therefore at most 11 bits.

**Packets.** A packet is 32 bits, `{mode[2:0], payload[28:0]}`. In mode m, the
payload holds `floor(29 / 2^m)` IDs of `2^m` bits each, least significant ID
first:

| Mode | ID width (bits) | IDs per packet |
|------|-----------------|----------------|
| 0 | 1 | 29 |
| 1 | 2 | 14 |
| 2 | 4 | 7 |
| 3 | 8 | 3 |
| 4 | 16 | 1 |

Modes 5–7 carry no IDs. They serve as fillers, for example to pad the last
512-bit word of a matrix.

**Storage.** Sixteen packets fill one weight-BRAM word. Packet k sits in bits
[32k+31 : 32k].

**Unpacking.** The MAU (`mau.sv`) is purely combinational and unpacks a packet
into an ID list. The WILU then does the following:

1. Takes one word at a time.
2. Steps through its 16 packets.
3. Looks up each ID in the unique table, one per cycle.
4. Collects 16 chunks into a row, which it hands to the NoC with a
   valid/ready handshake.

**Host side.** Choosing modes, building the unique table and the
frequency-aware reindexing are all done offline by the host. The unique table
is loaded through the `host_um_*` ports before a job.

## Hybrid PE

Each PE has these storage elements:

- an input RF and a weight RF (two banks of 32 × 64 bytes each);
- an output RF;
- a two-bank, 64-byte PREG.

A per-cycle command (`pe_cmd_t`) selects:

- the weight row and bank;
- either an input-RF row (GEMM mode) or the PREG (pipelined mode);
- clear and last flags;
- the requantization shift;
- whether the result goes to the output RF or onto the NoC.

**Parallel PE.** Takes 64 × 64 products per cycle and produces one 32-bit
dot-product partial sum. The partial sums accumulate over the chunks of a
long input.

**Broadcasting PE.** Multiplies one selected input byte with a 64-byte row
and accumulates 64 sums.

**Result formatting.** Results are shifted right with rounding and saturated
to int8:

- A parallel PE packs 64 scalar results into one output-RF row through a
  staging register.
- A broadcasting PE writes a whole row at once.

RFs and PREGs are plain registers, so their reads are combinational.

## GEMM, LN and NL jobs

**GEMM.** A GEMM job computes `Y[t][n] = Σ_k X[t][k] W[n][k]` for up to 84
tokens at once.

1. Token t is loaded into parallel PE t's input RF.
2. Each weight row from the WILU goes to every parallel PE.
3. After the dch chunks of output n, every PE has Y[t][n].
4. The output RFs are drained to the output BRAM, optionally through the
   eight NL modules.

The limits come from the RF sizes:

- The input dimension is at most 64 × 32 = 2048 bytes.
- At most 2048 outputs fit in one job. Larger layers are split into several
  jobs over output ranges.

**LN.** An LN job normalises T tokens of D features, eight tokens at a time,
one per LN module. To avoid a divide for the mean, each module works in integers scaled by F:
`y_i = ((F·x_i − S) << 4) / sqrt(F·Q − S²)`, where `S = Σ x` and `Q = Σ x²`.
It works in three phases:

1. An input phase of F cycles buffers the features and accumulates S and Q.
2. A square-root phase takes one bit per cycle.
3. An output phase of F cycles divides and emits one feature per cycle.

The output is int8 with 4 fractional bits. There is no learned scale or
shift.

**NL.** GeLU is computed as `x·Φ(x)` on inputs with 4 fractional bits, using
a clipped second-order approximation of erf, which needs one small multiply.

## Number formats

| Quantity | Format |
|----------|--------|
| Activations and weights | int8 |
| Accumulators | int32 |
| Q, scores and SMV | each requantized with its own per-job shift (`q_shift`, `s_shift`, `o_shift`) |
| Softmax input | int8 score read as x/16 |
| EXP LUT | 256 entries of exp(−d/16) in Q0.16. The table is computed at elaboration from one constant ratio, not read from a file. |
| Softmax output | probabilities in Q0.7 (0…127), used directly as the broadcasting PE's int8 input |

## Using the top level

1. Load the input BRAM, the weight BRAM and the unique table through the
   `host_*` write ports.
2. Fill `cfg` (a `cfg_t`): job type, dch, token count, output count, base
   addresses, shifts and NL enable.
3. Pulse `start`. Wait for `done`. `busy` is high in between.
4. Read the results from the output BRAM through `host_out_addr`. The data
   appears on `host_out_rdata` one cycle later.

The memory layouts are given in the header of `meadow_ctrl.sv`. The host ports
stand where the off-chip DRAM interface would connect.

## How far the RTL follows the architecture

**Same as described:**

- 84 parallel and 12 broadcasting PEs with 64 multipliers each.
- 8 LN and 8 activation modules.
- 1 MB BRAMs and 4 KB double-buffered RFs and PREGs.
- The GEMM/pipelined PE modes.
- The three-stage softmax running each stage over the features of a token.
- Packets with a per-packet ID width.
- A unique-matrix look-up feeding the weight RFs.

**Departures and own choices:**

- **Softmax modules.** There are 12 softmax modules, one per lane, where the
  reference configuration lists 84. Only one token per lane is in softmax at
  any time, so more modules would sit idle in this lane organisation.
- **Input BRAM in the pipelined mode.** The architecture text says the input
  BRAM is idle in pipelined mode. However, its own dataflow example multiplies
  the input tokens with W_Q in the first stage. Here the Q stage reads the
  tokens from the input BRAM; QK^T and SMxV do not touch it.
- **Mode widths.** The packet description gives modes 0 and 1 three- and
  two-bit IDs. The unpacking hardware description gives 1, 2 and 4 bits for
  modes 0, 1 and 2. This design follows the hardware description and extends
  it as `2^mode`.
- **Q-stage rate.** The Q stage runs at the WILU rate (17 cycles per weight
  row), not in T cycles.
- **K and V source.** K and V are read as plain int8 rows from the weight
  BRAM. They come from an earlier GEMM job. Only W_Q and GEMM weights are
  packed.
- **Output RF double buffering.** The output RF has a second bank but the
  controller uses only one. Draining does not overlap the next GEMM.
- **GEMM input dimension.** Partial sums are not carried across jobs, so the
  GEMM input dimension is limited to 2048.
- **Other own choices.** The following are not specified by the architecture:
  - the LN algorithm, and LN without learned scale and shift;
  - the GeLU approximation;
  - all number formats and requantization shifts;
  - the packet layout and chunk size;
  - the NoC topology;
  - all handshakes.
- **Clock.** The 100 MHz clock target was not checked by timing analysis.

### Model sizes against the defaults

The layer sizes below are those of the public OPT and DeiT models. Attention
fits for every evaluated case: 64, 197 and 512 tokens are all ≤ 1024, and K,
V and the packed W_Q fit easily in the 1 MB weight BRAM.

| Model | GEMM layers | Fits? |
|-------|-------------|-------|
| DeiT-S (d = 384, MLP 1536) | input dimensions 384 and 1536 are both within the 2048 limit | fits completely |
| OPT-125M / DeiT-B (d = 768, MLP 3072) | second MLP layer has input dimension 3072 | does not fit one GEMM job |
| OPT-1.3B (d = 2048, MLP 8192) | second MLP layer has input dimension 8192 | does not fit one GEMM job |

Running the second MLP layer of the larger models would need accumulation
across jobs, which is not implemented.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each one compares
against a model computed independently inside the testbench. Every testbench
prints `TB_RESULT checks=N failures=M` and has a watchdog.

Two testbenches run the whole top level end to end: `tb_meadow_top` at
reduced size and `tb_meadow_top_full` at the full default size. Both share
`meadow_top_harness.sv` and run the same sequence:

1. A TPHS head of 40 tokens: exact scores, probabilities within ±2 LSB of a
   floating-point softmax, exact SMV.
2. GEMM jobs: plain, with ReLU and with GeLU.
3. An LN job.

Both also count that every mechanism occurred: stage overlaps, bank
switches, every packet mode, fillers, and both activation functions.

The reduced run has 2 lanes of 3 Q PEs. The full-size run at the default
parameters (84 + 12 PEs, 1 MB BRAMs) passed with 22,930 checks in about two
minutes of compile and simulation.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/meadow_pkg.sv $(ls rtl/*.sv | grep -v meadow_pkg) tb/meadow_top_harness.sv \
  tb/tb_meadow_top.sv --top-module tb_meadow_top -Mdir obj_tb
./obj_tb/Vtb_meadow_top
```

Notes on other testbenches:

- For a unit testbench, replace the last file and the top-module name, for
  example `tb/tb_softmax_sm.sv` and `tb_softmax_sm`. Leave out the harness
  file.
- The testbenches assume a two-state simulator and initialise everything
  they read.
- Random stimulus uses `$urandom`.
