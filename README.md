# PIM-LLM: a hybrid analog-PIM / systolic-array accelerator for 1-bit LLMs

A 1-bit (ternary-weight) decoder-only LLM has two kinds of matrix
multiplication:

* **Projection layers** (W_Q, W_K, W_V, the output projection and the two
  feed-forward matrices) multiply 8-bit activations by weights that are only
  −1, 0 or +1 (W1A8). These matrices are fixed at inference time and account
  for most of the operations.
* **Attention heads** multiply activations by activations (Q·Kᵀ, then the
  scores by V) at 8 bits (W8A8). These operands change for every token.

This design gives each kind its own engine, sharing one LPDDR port:

* **PIM (processing in memory).** Ternary weights are stored once in resistive
  (RRAM) crossbars. The multiply-accumulate happens in the analog domain when
  the input vector is applied as row voltages.
* **TPU.** A digital, output-stationary 32×32 systolic array of 8-bit MACs with
  8 MB of SRAM. It computes the attention MatMuls, with a ConSmax unit standing
  in for softmax.

The RTL describes both engines down to the processing elements, plus the
arbiter that joins them:

```
                 +----------------------- pim_llm_top -----------------------+
 host ──desc──►  | tpu: scheduler → controller → dataflow generator          |
                 |      input / weight / activation SRAM, 32x32 array,       |
                 |      ConSmax lanes, requantiser                ──┐        |
 host ──cmd───►  | pim: controller + global buffer                  ├─ lpddr_arbiter ─► LPDDR
                 |      2 banks x 4 tiles x 4 PEs (256x256 crossbar) ─┘        |
                 +-----------------------------------------------------------+
```

The host CPU and the LPDDR device are not part of the RTL. They connect
through the command ports and the memory port. Testbenches play both roles:
`tb/lpddr_model.sv` is a behavioural DRAM model with random back-pressure.

## Shared conventions (`rtl/pim_llm_pkg.sv`)

* **Memory word.** Every memory word is 256 bits: 32 int8 values, byte *b*
  in bits [8b+7:8b]. Memory requests are `mem_req_t {valid, we, addr, wdata}`
  with a separate `ready`. Read responses (`mem_rsp_t`) come back in request
  order.
* **Ternary weights.** Encoded in 2 bits: `00` = 0, `01` = +1, `10` = −1.
  A crossbar row of 256 weights takes two memory words: columns 0–127, then
  columns 128–255.
* **TPU descriptor** `tpu_desc_t`:
  * A is read column by column (word k = A[0..31][k]).
  * B is read row by row (word k = B[k][0..31]).
  * `k_len` is the inner dimension.
  * `m_rows` result rows go to `out_base + i`.
  * `softmax` chooses ConSmax or requantisation `sat8(acc >>> out_shift)`.
* **PIM command** `pim_cmd_t`:
  * `PIM_PROGRAM` writes `rows` crossbar rows of one PE from `src`.
  * `PIM_MVM` runs one tile on the vector at `src` and stores the result at
    `dst`, with `reduce` and `pp_mode` (bypass / GELU / LayerNorm).

All state machines use an asynchronous active-low reset. The memories
(`sram`) and the crossbar conductances are not reset, like the real arrays.

## The analog PE and its numbers (the hardest part)

A PIM PE (`pim_pe`) has the following parts:

* **Input register.** 256 int8 inputs, written word by word by the tile.
* **DACs.** One per row (`dac`, behavioural): `v = code · 7812 µV`, so full
  scale is about ±1 V.
* **Row decoder** (`row_decoder`). It selects one word line while programming.
* **Crossbar** (`rram_crossbar`, behavioural). 256×256 cells, each a
  *differential pair* of devices:
  * +1 is stored as G⁺ = G_ON, G⁻ = G_OFF;
  * −1 the other way round;
  * 0 as G_OFF/G_OFF.

  The differential amplifier on each column senses (G⁺ − G⁻)·V summed over
  the rows and turns it into a voltage through a feedback resistor. With the
  default G_ON = 100 µS, G_OFF = 1 µS and R_F = 1 kΩ, the column gain is
  0.099 V per volt of signed input sum.
* **ADCs.** One per column (`adc`, behavioural), 8 bits, LSB 12375 µV. They
  round half away from zero and saturate.
* **Post-processing** (`post_processing_unit`): bypass, GELU or LayerNorm on
  the 256 codes.

The whole chain from int8 input to int8 output code is therefore

    code[c] = sat8(round( Σ_r w[r][c]·x[r] · 7812 · 0.099 / 12375 ))  ≈ Σ w·x / 16

so the PE returns the ternary dot product in a Q4 format. The behavioural
models use integer µV, µS and pA so that both simulators and synthesis
front ends accept them. They contain no `real`.

**Timing.**
* The crossbar model integrates one row per clock, keeping an integer column
  current. The MVM result is therefore ready 258 cycles after `eval`.
* The physical crossbar settles in one analog step. The row-serial
  integration is a modelling choice that keeps elaboration affordable. It does
  not describe a serial circuit.
* Programming writes one row per cycle through the word line.

### Post-processing unit

The codes are treated as Q4 values: real value = code / 16.

* **GELU** (1 cycle). It uses the integer polynomial of I-BERT:
  * erf(x/√2) is approximated by a clipped second-order polynomial;
  * the result is 0.5·x·(1 + erf) rounded back to Q4.
* **LayerNorm** (39 cycles). It has no learned scale or shift and computes
  (x − mean)/std in Q4.
  * Σx and Σx² are formed in one cycle.
  * 256·variance is computed exactly as (N·Σx² − (Σx)²)·256/N².
  * A 12-step digit-serial integer square root follows.
  * Then a 25-step restoring division forms 2²⁴/(16·std).
  * Each output is (N·x − Σx)·quotient, rounded and saturated to int8.

### Tile, bank and PIM top

* **Tile** (`pim_tile`): an input buffer, an input distributor, 4 PEs, a
  summing network and an output buffer. There are two modes:
  * **Broadcast** (`reduce = 0`). One 256-element vector goes to every PE, and
    the tile returns 4 × 256 post-processed outputs. This is how a weight
    matrix wider than 256 columns is split over PEs.
  * **Row split** (`reduce = 1`). Element block *p* of a 1024-element vector
    goes to PE *p*. The PEs' codes are added first in groups (junctions), then
    centrally, and the sum is scaled by 2⁻² and saturated. Post-processing is
    bypassed in this mode, because a nonlinearity needs the complete sum.
* **Bank** (`pim_bank`): 4 tiles on a shared bus (the bank's on-chip network)
  and a bank output buffer that collects the selected tile's result.
* **PIM** (`pim`, `pim_controller`): a 256-word global buffer. The upper half
  is the output area. The controller runs the commands as phases:
  * LPDDR → global buffer → bank input;
  * start the tile and wait;
  * collect the results → global buffer → LPDDR.

  Programming fetches the two weight words of each row and writes the row.

## TPU

* `tpu_pe`: an 8×8-bit multiplier and a 32-bit accumulator. It registers the
  operands and passes them on to the right and downward. A `clear` flag
  restarts the accumulation with the current product.
* `systolic_array`: 32×32 PEs, output stationary.
  * Row *i* of A enters *i* cycles late and column *j* of B enters *j* cycles
    late, through delay lines at the edges.
  * A clear marker travels with the diagonal wavefront, so a new product can
    start while the previous drain is done.
  * C[i][j] is complete 63 cycles after the last input.
* Memories: input memory 2 MB, weight memory 4 MB, activation memory 2 MB,
  each of 256-bit words (8 MB in total).
* `dataflow_generator` runs one of three phases:
  * **load**: sequential LPDDR reads into the input or weight memory;
  * **compute**: streams both memories into the array, then flushes it;
  * **store**: activation memory → LPDDR.
* `tpu_controller`: runs load A, load B, compute, drain, store for each
  descriptor. The drain takes one result row per cycle, passes it to the 32
  ConSmax lanes or the requantiser, and writes it to the activation memory.
* `tpu_scheduler`: an in-order queue of 8 descriptors that issues them one
  layer after another.
* `consmax_unit`: ConSmax replaces softmax by exp(s − β)/γ with learned
  constants, so it needs no row-wide max or sum.
  * The score is scaled to Q8.
  * It is multiplied by log₂e.
  * The fractional part indexes a 16-entry 2^(i/16) table.
  * The integer part shifts the result.
  * Output is an 8-bit probability. β = 0 and 1/γ = 1/32 are defaults.

## Arbiter

`lpddr_arbiter` joins the TPU and the PIM on one memory port:

* Requests are arbitrated round robin; the priority flips after a cycle in
  which both masters asked.
* A 64-entry owner FIFO sends the in-order read responses back to the master
  that asked.

## Verification

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=… failures=…`. Every testbench has a watchdog.

| testbench | covers |
|---|---|
| `tb_tpu_pe`, `tb_systolic_array` | MAC arithmetic; array result and latency (63 cycles after the last input) |
| `tb_sram`, `tb_consmax_unit` | memories; ConSmax against exp(s/1024)/32 |
| `tb_dac`, `tb_adc`, `tb_row_decoder`, `tb_rram_crossbar` | analog chain elements; crossbar latency |
| `tb_post_processing_unit` | GELU and LayerNorm against floating point |
| `tb_tpu` | two queued layers (requantised and ConSmax) through LPDDR, cycle bounds |
| `tb_pim` | programming, row-split MVM, broadcast MVM with GELU |
| `tb_lpddr_arbiter` | response routing under random back-pressure, round-robin fairness |
| `tb_pim_llm_top` | the full-size design: TPU layers running while the PIM programs a tile and runs reduce, GELU and LayerNorm MVMs; counts each mechanism, including arbiter contention and LPDDR back-pressure (about 9,200 cycles, a few seconds of simulation) |

The floating-point references for the analog path allow ±2 LSB. The
LayerNorm reference also allows 32/std LSB, because a one-code ADC difference
moves the mean and standard deviation slightly.

To simulate with plain Verilator:

    verilator --binary --timing --assert -y rtl -y tb --top-module tb_pim \
        rtl/pim_llm_pkg.sv tb/tb_pim.sv -o sim && obj_dir/sim

## Where this design departs from, or goes beyond, what is published

* **PIM size.** The published design gives no counts of banks, tiles or PEs.
  This design uses 2 banks × 4 tiles × 4 PEs = 32 crossbars, about 2.1 M
  ternary weights. One decoder layer of the smallest evaluated model (GPT-2
  355M, d = 1024) needs 6.3 M. Running a full model therefore needs a larger
  instance (raise `PIM_BANKS`, `PIM_TILES`, `PIM_PES`) or reprogramming
  between layers. The tile drawing shows 16 PEs in four groups; the default
  here is 4.
* **Analog values are assumptions.** These include the device conductances,
  feedback resistor, DAC and ADC step sizes, and the Q4 output format. The
  crossbar is modelled ideally: no noise, wire resistance or device
  variation.
* **Formats.** The following are this design's own: descriptor and command
  formats, the memory word, the split of the 8 MB between the three TPU
  memories, requantisation by shift, the 2⁻² scaling of row-split sums, and
  the absence of LayerNorm's learned γ/β.
* **ConSmax constants and table size** are chosen here. The unit follows the
  published ConSmax formula.
* **Scheduling.** The published scheduler also decides which layer runs where.
  Here the host issues projection commands to the PIM and attention
  descriptors to the TPU. The two run concurrently and share LPDDR.
* **Not modelled:** the LPDDR device and the host CPU. Energy and power are
  also not modelled.
