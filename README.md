# Gated DeltaNet decode with a resident state

Batch-1 decoding of a Gated DeltaNet (GDN) layer is limited by memory
bandwidth, not by arithmetic. A GDN layer replaces the growing KV cache of
softmax attention with a fixed recurrent state: one d × d matrix per value
head. Each token reads that state, updates it and writes it back. For a
Qwen3-Next-style layer (16 query/key heads, 32 value heads, d = 128, FP32)
the state is 32 · 128 · 128 · 4 B = 2 MiB. A GPU must stream those 2 MiB
through HBM twice per token, while doing only a few flops per byte.

This RTL keeps the whole 2 MiB state in on-chip dual-port RAM for as long as
the design runs. Per token, the host side moves only the token's vectors and
gate inputs (about 25 KB in this implementation) and the 32 × 128 outputs.
The rest of the design makes the state traffic as cheap as the RAM ports
allow:

* **Two passes instead of three.** The GDN step is rewritten so that each
  state matrix is read once and written once per token.
* **Paired heads.** Two value heads share one query/key pair. Each pair of
  value heads is processed together, with q and k broadcast to both.
* **Head groups in a dataflow pipeline.** The 32 value heads are handled as
  N_ITER = 4 groups of H_ITER = 8 heads. Three stages (prepare, compute,
  store) overlap across groups through ping-pong buffers.
* **Banked state.** Every head has PK = 16 column banks. One clock moves 16
  state words per head: 128 words per clock across 8 heads.

At the default size one token takes about 18,900–19,000 clock cycles in
simulation. Of these, 4 × 2,074 are compute and the rest is mostly input
loading.

## 1. The recurrence and how it is fused

For every value head, with inputs q, k, v ∈ R^d and scalar gate inputs
α, b, A_log and dt_bias:

    g  = exp(-sigmoid(α) · exp(A_log) · softplus(dt_bias))      decay gate
    β  = sigmoid(b)                                             write strength
    r  = Sᵀ k                                                   retrieval
    Δv = β (v − r)                                              delta rule
    S  ← g S + k Δvᵀ                                            state update
    o  = Sᵀ q / √d                                              output (new S)

Computed as written, this needs three sweeps over S: Sᵀk, the update, and Sᵀq
on the updated S. The identity

    S_newᵀ q = g S_oldᵀ q + (qᵀk) Δv

removes the third sweep. The partial output ô = g S_oldᵀ q can be formed in
the same read sweep as r, and the output is then corrected without rereading
the state. Each head therefore runs five phases per token:

| phase | work | cycles at D=128, PK=16 |
|---|---|---|
| DOT   | α_qk = q · k, PK products per cycle into an adder tree | D/PK = 8 |
| READ  | r_i = Σ_j S[j][i] k_j and ô_i = Σ_j S[j][i] q_j for every column i | D²/PK = 1,024 (+1 RAM latency) |
| DELTA | Δv = β (v − r) | 8 |
| OUT   | o = (g ô + α_qk Δv) / √D | 8 |
| WRITE | S[j][i] ← g S[j][i] + k_j Δv_i, read-modify-write | 1,024 (+1) |

That is 2·D²/PK + 3·D/PK = 2,072 cycles of work. The controller adds one
drain cycle after each sweep, which gives an interval of **2,074 cycles per
head group**. The paper's HLS build reports about 2,105.

### Storage order inside the state

Word S[j][i] (row j, column i) of head h in group n lives in column bank
`j mod PK` of head slot `h`, at address

    (n · D + i) · (D / PK) + j / PK

A sweep steps through addresses 0, 1, 2, … of its group's region. All heads
and all lanes share one read address and one write address. In each cycle,
lane l of every PE sees S[tile·PK + l][i] of its own head. The four groups
use the same 128 physical banks at four address offsets. As a result, the
state of all 32 heads sits in 8 × 16 = 128 banks of 4,096 × 32 bits.

The paper's own indexing of S is not consistent between the retrieval formula
(S_ji, summed over j) and the update loop (S_{:,i}). The layout above
implements the mathematics of the formulas. Only the naming differs.

### The processing element (`gdn_pe`)

One PE serves one value head. It has PK lanes, and each lane has three FP32
multipliers and one FP32 adder. These are shared between the phases by
multiplexers:

* READ: lanes multiply S by k and by q. Two PK-input adder trees reduce the
  products, and two accumulators build r_i and ô_i over the D/PK tiles of a
  column.
* DELTA: (v − r) · β, PK elements per cycle.
* OUT: g · ô + α_qk · Δv, then · 1/√D. The constant 1/√D is computed at
  elaboration from D.
* WRITE: g · S + k · Δv_i on each lane, written back one cycle after it is
  read.

A GVA group (`gdn_gva_group`) is one q·k dot-product unit plus two PEs.
`gdn_compute` holds H_ITER/2 such groups and the phase controller.

All FP32 arithmetic is combinational: one add or one multiply in a cycle.
So a recurrence over the tiles does not have to cover an adder latency, as
it does in the HLS original. A physical build would need pipelined FP units
(section 6).

## 2. The dataflow around the compute stage

```
 gmem0 (q,k,v FP16) ─┐                           ┌─ q,k ping-pong ─┐
 gmem1 (α,b FP16)   ─┼─ AXI read ─ input ─ prepare ─ v   ping-pong ─┼─ compute ─ out ping-pong ─ store ─ gmem3 (o FP16)
 gmem2 (A_log,dt FP32)┘  masters   buffers  (gates)  g,β ping-pong ─┘    │
                                                                  128 state banks
```

* **Load.** Three AXI4 read masters fetch the token inputs at the same
  time. gmem0 carries q, k and v. gmem1 carries α and b. gmem2 carries
  A_log and dt_bias. FP16 words are widened to FP32 as they arrive. All
  values go into `gdn_input_buffers`.
* **Prepare** (`gdn_prepare`, per group) copies the q/k slices of the
  group's GVA pairs and the v slices of its heads into the channels, one
  element per cycle. Value head h uses q/k head h/2. Prepare also runs the
  shared gate unit for each head of the group.
* **Compute** starts a group when all its input channels hold data and the
  output channel has a free bank. It releases the input banks after the
  READ sweep. It commits the output bank right after OUT, so the next
  group's inputs and the previous group's outputs move while the WRITE sweep
  runs.
* **Store** (`gdn_store`) narrows each output to FP16 and writes it to
  `out_base + 2·(h·D + i)` for global head h, in bursts.

Each channel (`gdn_pingpong`) is a two-bank buffer with a full flag per
bank. The producer fills bank A while the consumer reads bank B. The
producer commits a bank and the consumer releases it. Assertions check that
neither side acts out of turn. This is the behaviour of an HLS PIPO channel,
written out in RTL.

Measured at full size with a memory model that stalls now and then:
prepare and compute overlap for about 8,000 cycles per two tokens, and
compute and store for about 9,000. The pipeline interval is set by compute
(2,074 cycles). Prepare needs about 1,300–1,400 cycles per group, most of it
for the gate unit, and store about 1,030.

## 3. Gates and floating point

`gdn_gate_unit` evaluates g and β for one head with a single shared set of
sequential units:

* `fp32_exp`: range reduction x = n·ln 2 + f, then a degree-7 polynomial for
  2^f, then exponent insertion. It takes 10 cycles.
* `fp32_ln`: m·2^e with m in [√½, √2), then ln m = 2 atanh((m−1)/(m+1)) as
  an odd series to the 9th power.
* `fp32_div`: 27-step restoring division of the significands.
* `fp32_add` and `fp32_mul`.

softplus(x) returns x itself when x > 16, where the two are equal in FP32.
One head takes 164 cycles.

Every FP32 unit rounds to nearest-even and flushes subnormal inputs and
results to zero. NaN results are the quiet NaN 0x7FC00000. The add and
multiply units are bit-exact against IEEE rounding on normal numbers. The
transcendental units are accurate to about 1e-6 relative.

## 4. External interface

`gdn_decode_top`:

* `start` is a one-cycle pulse while idle. The eight base addresses
  (`q_addr`, `k_addr`, `v_addr`, `alpha_addr`, `b_addr`, `a_log_addr`,
  `dt_addr`, `out_addr`) are byte addresses and must be held during the
  token.
* `busy` is high for the whole token. `done` pulses once the last write
  response has come back.
* `axi_err` is a sticky flag that any non-OKAY response sets.
* There are four AXI4 master ports with AR/R or AW/W/B signals only: no IDs,
  cache, lock, prot or QoS.
  * Each beat carries one element, so the data width is 16 bits on gmem0,
    gmem1 and gmem3 and 32 bits on gmem2.
  * Bursts are INCR bursts of up to MAX_BURST = 256 beats and never cross a
    4 KB boundary.
  * Only one burst is outstanding per port.
* The state is zero at power-up and is never reset afterwards. Each token
  continues from the previous one. To start a new sequence, reload or
  re-initialise the design. The state write enable is gated by
  reset, so flip-flops that power up at random values cannot corrupt the
  state before reset clears them.

Parameters (defaults in brackets):

| parameter | meaning |
|---|---|
| HV [32] | value heads |
| HQK [16] | query/key heads (GVA ratio HV/HQK = 2) |
| D [128] | head dimension |
| H_ITER [8] | value heads per group; N_ITER = HV/H_ITER |
| PK [16] | column banks per head (lanes per PE) |
| ADDR_W [64] | AXI address width |
| MAX_BURST [256] | longest burst |

D and PK must be powers of two, H_ITER must be even, and H_ITER must divide
HV. The paper's other configurations are builds with H_ITER = 2, 4 or 16.
The state memory holds HV·D² words at any H_ITER.

## 5. Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* **FP units.** Bit-exact against reference values computed in double
  precision and rounded with the same conventions. FP16 → FP32 is tested
  exhaustively.
* **Gate unit.** Checked against double-precision formulas with 2e-5
  relative tolerance, and its latency is checked.
* **AXI masters.** Run against a behavioural AXI memory (`axi_mem_model`) that inserts random stalls and flags any
  burst crossing 4 KB.
* **Compute, GVA group, PE and state memory.** Driven through a shared
  harness that runs several tokens against a double-precision model of the
  three-pass recurrence. Outputs are checked element by element, so state
  carried across tokens is checked too. The cycles per group are checked
  against 2·D²/PK + 3·D/PK.
* **Full size.** `tb_gdn_decode_top` runs the top level with its default
  parameters for two consecutive tokens. Every output is compared with a
  model, and the token latency and compute interval are checked. It also
  counts that each mechanism happened: stage overlaps, AXI stalls, multiburst
  transfers, 4 KB splits, the softplus shortcut, and state carried from
  one token to the next. It builds in about half a minute and runs in about a
  second.

* **Other group sizes.** `tb_gdn_decode_hiter` runs the same end-to-end
  test with H_ITER = 4, and with 2 or 16 if its localparam is edited.
  Measured token latencies:

  | H_ITER | this RTL | published HLS result |
  |---|---|---|
  | 2 | 42,046 | 42,538 |
  | 4 | 26,074 | 26,252 |
  | 8 | 18,935 | 18,978 |
  | 16 | 17,879 | 23,206 |

  The interval stays at 2,074 cycles in all four.

To run a testbench with plain verilator, for example the full-size one:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_gdn_decode_top \
        rtl/gdn_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/axi_mem_model.sv tb/tb_gdn_decode_top.sv -o sim
    obj_dir/sim

The block testbenches build the same way. Add `tb/tb_compute_harness.sv`
for the compute-stage ones.

## 6. Where this design departs from the paper

* **I/O precision.** The system diagram marks q, k, v, α, b and the outputs
  as FP16 and A_log and dt_bias as FP32. This design follows the diagram.
  The paper's byte counts (about 48.5 KB, 49,664 B per token) match all-FP32
  I/O instead. Changing the element width touches only the read and write
  masters' data width and the two converters.
* **Arithmetic timing.** FP32 add and multiply are single-cycle
  combinational units, and the accumulators close in one cycle. The HLS
  design uses pipelined units, about 5 cycles for an add, and relies on the
  8-tile recurrence distance. A build for 300 MHz would pipeline these
  units. The lanes would then need PK partial sums per accumulator and a
  few more cycles per phase.
* **Interval.** 2,074 cycles against the paper's ~2,105 to 2,106. The
  paper's interval inflation at H_ITER = 16 (to ~6,300 cycles) is an effect
  of HLS scheduling. It is not reproduced here: this RTL keeps the same
  interval at every H_ITER.
* **Load time.** The memory model in the testbench answers with a short
  latency. The ~10,500 load cycles the paper measures depend on the real HBM
  and AXI interconnect.
* **Gate unit.** The paper only names the gate formulas. The sequential
  exp, ln and divide units and the softplus threshold are this design's
  choices.
* **Control.** The host control interface (start, arguments and interrupts
  of the HLS kernel) is not described in the paper. It is replaced by
  `start`/`done` and address ports.
* **Not built.** The HBM, the platform shell and the host are not built.
  The testbenches stand in for them with a behavioural AXI memory.
