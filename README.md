# FLARE: an integer-only, processing-in-memory attention layer

A transformer encoder spends most of its attention time and traffic moving
tensors. These are the weights of the four projections (W_Q, W_K, W_V,
W_O), the keys and values of the whole sequence, the N×N score matrix, and
the many dequantise/requantise steps that post-training-quantised (PTQ)
models need around the softmax. FLARE keeps all of them inside one
processing element (PE):

* **Weights stay in memory and are computed in memory.** The four D×D
  weight matrices live in MRAM compute-in-memory arrays. The keys and values
  of the sequence live in SRAM compute-in-memory arrays, one pair per head.
  Every matrix-vector product (GEMV) is done where the operand is stored.
* **Analog reads are made error-free by construction.** Activations enter
  the arrays one bit plane at a time. At most eight word lines are ever
  raised at once, so a column current can only take nine levels, and a
  4-bit ADC reads it exactly. A controller (BitSift) skips the zero bits of
  each plane, so sparse activations cost fewer cycles.
* **No floating point and no division.** Every intermediate tensor is
  requantised by moving its most significant used bit to the top of a 9-bit
  word (eMSB quantisation). The number of bits shifted away is a
  power-of-two exponent. The softmax uses that exponent to pick a small
  parameter set, and computes exp() with a shift and a second-order
  polynomial. Its outputs are normalised by the same MSB search instead of
  a division by their sum.

The SystemVerilog here implements this PE and an array of sixteen of them.
The array, the PE, the GEMV engines and their controllers, the quantiser,
the softmax and its table are synthesizable RTL. The analog arrays are a
bit-accurate behavioural model.

## 1. One attention layer in two passes

A PE processes one layer for a sequence of N tokens of dimension D with H
heads of width d_k = D/H. Defaults: D = 1024, N = 512, H = 16, d_k = 64.

**Pass 1 (K/V).** The host streams the N input tokens (8-bit signed
elements). Each token is multiplied by W_K and W_V at the same time in two
MRAM engines. K and V must share one scale over the whole sequence, because
every later query meets all of them. So they are cut to 9 bits at a fixed,
configured bit position (`kv_shift_i`), saturating if they exceed it. Each
K vector is written into every head's K cache as one column group. Each V
vector is written as one row of every head's V cache.

**Pass 2 (fused, token by token).** The host streams the same N tokens
again. For each token:

1. Q = x·W_Q, then eMSB-quantised to 9 bits (exponent e_Q).
2. All H heads compute their N logits L_h = Q_h·K_hᵀ in parallel, each in
   its own K cache.
3. One head after another, L_h is eMSB-quantised (exponent e_L). The
   softmax then runs with n_e = x_ne + e_Q + e_L, saturated to 6 bits.
   `x_ne_i` is the exponent of the input, which the host supplies.
4. All heads compute A_h = S_h·V_h in parallel, in their V caches.
5. The concatenated A is eMSB-quantised (e_A) and multiplied by W_O. The
   result is eMSB-quantised (e_O) and sent out with exponent e_A + e_O.

No intermediate tensor leaves the PE. The traffic per layer is the input
read twice plus the output written once (3·N·D bytes). The unfused flow
would move Q, K, V, L, S and A through memory.

## 2. The bit-serial GEMV engine (`pim_gemv`)

Every product in the PE runs on the same engine. Its parts are a
compute-in-memory array, the BitSift controller, the dummy-row controller
and a shift-and-add unit.

*Array.* There are ROWS word lines, and every stored element is GW bits on
GW adjacent bit lines. When a set of word lines is raised, each bit line
reports how many raised rows hold a 1: a 4-bit code, 0…8.
`ams_pim_array` models this digitally. It adds a row write port (used for
weights and V) and a column-group write port (used for K).

*Bit planes.* A GEMV takes a 9-bit two's-complement activation vector. It
visits plane 8 (the sign plane) down to plane 0. A plane with no ones costs
one cycle and is skipped. A plane with ones is loaded into BitSift, which
issues fetches of at most eight ones each until none remain.

*BitSift controller* (`bitsift_ctrl`, `lpc_slice`, `gpc`):

* The plane is cut into 32-bit slices. Each slice has a local pop
  controller (LPC), which marks the slice's ones from bit 0 up to the
  eighth, counts them (4 bits) and flags a slice that has more.
* The global pop controller (GPC) admits slices in order from slice 0 while
  the running sum of their counts stays ≤ 8. It stops at the first slice
  that would overflow. Only the admitted slices' marked bits reach the word
  lines.
* A pending register then clears the fetched bits and the LPCs run again on
  what is left. A dense slice is therefore emptied eight ones at a time.
* An assertion checks that each fetch raises between 1 and 8 word lines.

*SAWL_D controller* (`sawl_d_ctrl`). When a fetch raises fewer than eight
rows, it raises 8 − n of seven dummy rows of off cells. Every compute
cycle therefore sees the same eight-row load, the condition the column
read-out is calibrated for. A fetch of zero rows never happens.

*Shift and add* (`shift_add`). For each element:
`Σ_b code_b·2^b − code_{GW−1}·2^{GW−1}`, which handles the signed weight's
top bit. This sum is shifted by the plane index and subtracted for the sign
plane, then accumulated (28 bits).

*Timing.* `done` comes `2 + Σ_planes (1 + fetches_p)` cycles after
`start`, where a zero plane counts `fetches_p = 0`. A fully dense
1024-element plane takes 128 fetches. The latency bound the method is
usually quoted with, ⌈ones/8⌉ per plane, is met exactly when the ones of
each fetch come from whole slices that sum to 8. With in-order slice
admission, a fetch can close early: for example, slices with 5 and 4 ones
take two fetches. The exact count is always between ⌈ones/8⌉ and the
number of fetched slice groups. The testbenches check it against a
reference model.

## 3. Number formats and eMSB quantisation (`emsb_q`)

All activations between stages are 9-bit two's complement. An 8-bit
magnitude plus sign is the "Q+1 bits" the method uses for its quantised
values.

`emsb_q` takes N accumulator words (28 bits) and finds the number of bits
the widest one needs, `need`. It does this with one OR over `x ^ sign`,
without a comparator tree. In automatic mode it shifts every word right by
`need − 9`, or 0 if `need ≤ 9`, and reports that shift. The value is then
`q·2^shift`: the shift is the tensor's exponent, and the exponents add up
along the chain. In fixed mode it applies a given shift and saturates. This
mode is used for K and V. Results are truncated (arithmetic shift); there
is no rounding.

Where eMSB-Q is applied, per token: Q, each head's L, the concatenated A
and the output. K and V use the fixed mode (section 1).

## 4. VDR-Softmax (`vdr_softmax`, `vdr_iexp`, `vdr_ipoly`, `vdr_lut`)

A logit quantised with exponent n_e has an LSB worth some real step s(n_e).
A fixed integer exp() is only accurate for one step. The variable-dynamic-
range softmax instead keeps a small table with one parameter set per
exponent. It has 16 entries of {a 8b, b 10b, c 16b, S 8b, l 8b}, 50 bits
each, 100 bytes in all. Exponents above 15 use entry 15.

For one head and token, the pipeline is:

1. Register the N logits and the table entry for n_e (`vdr_lut`, read
   combinationally).
2. Subtract the maximum, x_sub = x − max ≤ 0. Then, in N parallel
   `vdr_iexp` lanes:
   * clip x_sub at −18·l (2·Q_I with Q_I = 9);
   * find Q = ⌊−x_sub / l⌋ with a ladder of 18 comparisons against l, 2l,
     …, 18l, a thermometer code whose ones are counted, instead of a
     divider;
   * compute the remainder r = x_sub + Q·l ∈ (−l, 0];
   * evaluate the polynomial r·(r + b) + c, clamped to 24 bits;
   * shift the result right by Q.

   Because l is ln2 in logit steps, the shift multiplies by e^(−Q·l·s).
3. eMSB-quantise the N exponentials to 9 bits. The largest lands at the top
   of the range and the rest keep their ratio to it.

The result is proportional to the softmax, scaled by a power of two rather
than divided by the sum. The scale a·S is available at `s_exp_o` but
A = S·V uses the scores directly. Latency is three cycles, and a new head
can start every cycle.

*Table contents* (written by the host). For an entry whose logit step is s,
the polynomial 0.3585·(r + 1.353)² + 0.344 = 0.3585·(r·(r + 2.706) + 2.790)
gives:

* l = round(ln2 / s);
* b = round(2.706 / s);
* c = round(2.790 / s²);
* a·S = the fixed-point form of 0.3585·s².

The testbenches use l = 64 − 3e for entry e, which spans the range that
fits the 8-, 10- and 16-bit fields.

## 5. The PE and the PE array (`flare_pe`, `flare_top`)

`flare_pe` instantiates the following:

* four A-W engines (D rows × D elements × 8 bits): W_Q, W_K, W_V, W_O;
* per head, a K engine (d_k rows × N elements × 9 bits) and a V engine
  (N rows × d_k elements × 9 bits);
* the K/V, Q, L, A and output quantisers;
* the table and the softmax.

A sequencer walks the states IDLE, KV_WAIT, KV_GEMV, KV_WRITE (N times),
then Q_WAIT, Q_GEMV, L_GEMV, SOFTMAX (H times), A_GEMV, O_GEMV, OUT
(N times), then DONE. Heads share one softmax but their GEMVs run
concurrently.

`flare_top` holds NUM_PE = 16 PEs, each able to keep one layer resident.
Every PE has its own control, token-in and token-out ports, passed as
arrays indexed by PE. The weight and table data buses are shared, with one
write enable per PE. Nothing connects the PEs to each other: the
feed-forward blocks and normalisation between layers are outside this
design.

### Interface of one PE (index `[p]` at the top)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `w_we_i, w_sel_i, w_row_i, w_data_i` | in | 1, 2, log2 D, 8·D | write row `w_row` of W_Q/W_K/W_V/W_O (`w_sel` 0..3); element f at bits 8f+7:8f |
| `lut_we_i, lut_addr_i, lut_data_i` | in | 1, 4, 50 | write softmax table entry (`vdr_param_t` {a,b,c,s,l}) |
| `kv_shift_i` | in | 5 | right shift that cuts K and V to 9 bits |
| `x_ne_i` | in | 6 | exponent of the input tokens |
| `start_i` / `busy_o` / `done_o` | in/out | 1 | start a layer / layer running / one-cycle pulse after the N-th output |
| `tok_valid_i, tok_ready_o, tok_i` | in/out | 1, 1, D×8 | token stream: all N tokens, then all N again |
| `out_valid_o, out_ready_i, out_o, out_exp_o` | out/in | 1, 1, D×9, 6 | output token and its exponent (e_A + e_O) |

A token is taken on a cycle where `tok_valid_i && tok_ready_o`, and an
output on `out_valid_o && out_ready_i`. Both sides may stall freely.
Weights and table are loaded before `start_i` and persist across layers.
Reset is asynchronous, active low, and clears the state machines, registers
and table. The arrays (weights and K/V caches) are not reset.

## 6. Files

| File | Contents |
|---|---|
| `rtl/flare_pkg.sv` | shared constants (SAWL limit 8, 7 dummy rows, 32-bit slices, table layout), `vdr_param_t`, mode and state enums |
| `rtl/lpc_slice.sv`, `rtl/gpc.sv`, `rtl/bitsift_ctrl.sv` | BitSift controller |
| `rtl/sawl_d_ctrl.sv` | dummy word-line padding |
| `rtl/ams_pim_array.sv` | behavioural model of the MRAM/8T-SRAM compute arrays with 4-bit read-out |
| `rtl/shift_add.sv` | weighting and accumulation of ADC codes |
| `rtl/pim_gemv.sv` | one bit-serial GEMV engine |
| `rtl/emsb_q.sv` | eMSB quantiser |
| `rtl/vdr_lut.sv`, `rtl/vdr_ipoly.sv`, `rtl/vdr_iexp.sv`, `rtl/vdr_softmax.sv` | VDR-Softmax |
| `rtl/flare_pe.sv`, `rtl/flare_top.sv` | PE and PE array |
| `tb/flare_ref_pkg.sv` | integer reference model: GEMV, eMSB-Q, iEXP, softmax, BitSift fetch and cycle counts |
| `tb/tb_*.sv` | one self-checking testbench per module |

## 7. Verification

Each testbench drives its module with `$urandom` stimulus, compares against
values computed independently in the testbench, and prints
`TB_RESULT checks=… failures=…`. A watchdog ends a hung run as a failure.

* **Controllers.** `tb_lpc_slice`, `tb_gpc`, `tb_sawl_d_ctrl` and
  `tb_bitsift_ctrl` use random and corner-case planes. They check the fetched
  word lines and the fetch count against a model. They also check that the
  count is at least ⌈ones/8⌉.
* **Array and accumulation.** `tb_ams_pim_array` checks ADC codes for
  random row sets including dummy rows. `tb_shift_add` checks signed
  weighting.
* **Engine.** `tb_pim_gemv` runs 60 GEMVs (all-zero, sparse, dense,
  small-positive). It checks every accumulator, the latency formula of
  section 2 and the fetch count.
* **Quantiser.** `tb_emsb_q` checks both modes and saturation.
* **Softmax.** `tb_vdr_lut`, `tb_vdr_iexp` and `tb_vdr_softmax` are
  bit-exact against the model. `tb_vdr_iexp` also checks that exp() stays
  within 2.5 % of the real function for realistic tables.
* **PE.** `tb_flare_pe` (D = 64, N = 8, H = 2) checks every output word and
  exponent of a layer against the reference model. It also checks each
  W_K GEMV's cycle count.
* **Array.** `tb_flare_top` runs two PEs with different tables, K/V shifts
  and exponents, concurrently, under random input gaps and output
  back-pressure. It is bit-exact. It also counts how often each mechanism
  occurs and fails if any never does:
  * a dense slice;
  * a multi-fetch plane;
  * dummy-row padding;
  * a zero-plane skip;
  * an eMSB shift;
  * K/V saturation;
  * a table-index clip;
  * input and output stalls;
  * both PEs busy at once.

The largest configuration simulated end to end is two PEs with D = 64,
N = 8, H = 2. The default configuration (16 PEs, D = 1024, N = 512) passes
lint and elaboration, but was not simulated. One layer at that size is
several hundred thousand cycles of a model with 16 × (4 × 8 Mbit + 9 Mbit)
of arrays, evaluated every cycle. That is far beyond a ten-minute
simulation.

To simulate with plain verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
  rtl/flare_pkg.sv tb/tb_flare_top.sv --top-module tb_flare_top
./obj_dir/Vtb_flare_top
```

## 8. Where this design departs from the source description or fills gaps

* **Range reduction.** The written algorithm has r = x_sub − Q − l and
  r_EXP = r_POLY << Q. These are implemented as r = x_sub + Q·l and
  r_EXP = r_POLY >> Q. The first form is not a range reduction. The second
  would make every lane's scale differ, which breaks the common eMSB
  normalisation.
* **Division.** ⌊x/l⌋ is a comparator ladder (at most 18 steps), not a
  divider.
* **K/V caches.** The caches are two separate arrays per head. V is stored
  transposed, because A = S·V needs the N tokens on word lines. The source
  gives only one H×[d_k, N·IBP] array size.
* **Bit-cell budget.** The quoted totals (72 Mi MRAM, 512×64×1024 SRAM
  cells) are not reconciled with the sizes built here: 32 Mi MRAM bits and
  9.4 Mbit SRAM per PE. The source's "DC8" eight-fold array parallelism is
  not modelled; each engine fetches one group of ≤ 8 rows per cycle.
* **Chosen details.** The handshakes, the sequencer and the pipeline depths
  are this design's own, as are:
  * the A requantisation;
  * the output exponent convention;
  * truncation rather than rounding;
  * 28-bit accumulators;
  * the number of heads (16, for a d_k of 64 at D = 1024).
* **K/V word length.** K and V are parsed from a fixed MSB position, as the
  source describes, which also asks for a longer word than the per-token
  tensors to keep a wider range. No length is given, so here K and V have
  the same 9 bits as every other activation. The K/V arrays' element width
  is a parameter of `pim_gemv`, so widening it is a local change in
  `flare_pe`.
* **Analog parts.** Bit cells, sense and ADC circuits are a behavioural
  model. It assumes the lossless read-out that the eight-row limit is meant
  to guarantee.
* **Sequence length.** There is no key mask, so a sequence shorter than N
  would include padding positions in the softmax. Shorter models need an
  N-sized build.

## 9. Which models fit

At the defaults, one PE holds one attention layer of BERT-large or
RoBERTa-large (D = 1024, H = 16, N = 512): 32 Mbit of weights and 9.4 Mbit
of K/V. It also holds BERT-base (D = 768, H = 12, N = 512) with zero-padded
weights. The sixteen PEs hold 16 layers at once; a 24-layer model needs its
remaining layers reloaded. ViT-B/16 and DeiT-S (N = 197) fit in storage,
but need a key mask or a build with N = 197.
