# Nonbinary LDPC emulator on one chip

Measuring the error floor of a nonbinary LDPC code takes many frames, and
software decoders over GF(q) are slow. This design moves the whole Monte-Carlo
loop into hardware:

- a Gaussian-noise channel that produces the decoder's soft input;
- an iterative EMS or min-max decoder for a code over GF(q);
- hard decisions, and counters of frame, symbol and bit errors.

A host sets the SNR, the iteration count, the decoding rule and the number of
frames, pulses `start`, and reads the error totals back when `running` falls.
Nothing else crosses the chip boundary. The codeword is all-zero, which is
enough for a linear code and a symmetric channel. So neither an encoder nor
stored codewords are needed.

The built defaults are one configuration:

- a rate-1/2, (2,4)-regular code of 960 bits over GF(32): N = 192 symbols, M = 96 checks;
- messages truncated to the n_m = 8 most likely symbols;
- costs of Q = 6 bits;
- up to 255 decoding iterations (the usual setting is 10).

Everything is parameterised, so other fields, message lengths and code sizes
can be built (see *Parameters*).

## Structure

```
nbldpc_emulator (top)
├── top_controller      IDLE -> RUN{PG, DD} per frame, frame counter, frame limit
├── prior_generator     PG: channel model, writes one prior LLRV per symbol
│   └── llrv_channel x2 AWGN -> bit LLRs -> q symbol costs -> sorted n_m best
│       ├── awgn_generator
│       └── sorter
├── prior_memory        2 banks of N LLRVs, two write ports, one read port
├── nb_decoder          DD: row-by-row iterative decoding
│   ├── code_luts x2    edge -> column, H entry, partner edge
│   ├── perm_unit x2+d_c multiply / divide the symbols of an LLRV by an H entry
│   ├── check_node      forward-backward recursion on 4 ecn
│   │   └── ecn x4
│   │       └── sorter
│   └── vn_unit x d_c   VN-RAM based variable-node combine, one lane per edge
│       └── sorter
├── decision            wrong symbols and wrong bits of the decided frame
├── error_collector     FE / SE / BE totals, one record per wrong frame
└── error_memory        the records, readable by the host
```

`nbldpc_pkg` holds the shared arithmetic:

- the GF(2^m) primitive polynomials, multiplication, powers of alpha and inverses;
- the SNR table;
- the formulas that define the parity-check matrix.

## Messages: LLRVs

Every message in the decoder is an **LLRV**: n_m (cost, symbol) pairs sorted
by ascending cost.

- The cost is a log-likelihood distance from the most likely symbol: 0 is the best.
- A cost is an unsigned Q-bit number and saturates at 2^Q−1.
- Symbols are GF(2^m) elements in the polynomial basis, m = log2 q.
- Packed, entry i sits at `list[i] = {cost, symbol}`, and entry 0 is the best.
- A slot with cost 2^Q−1 is "unknown / least likely".

EMS adds costs; min-max takes their maximum. The only difference in hardware
is the cost combiner of the elementary check node, selected by `mm`.

Keeping n_m entries instead of all q is what makes GF(32) and above practical.
A symbol missing from a list counts as "no more likely than the last entry".

## The channel (PG state)

`prior_generator` has two `llrv_channel` instances. One serves the even
columns and the other the odd columns, and each writes through its own port
of the dual-port `prior_memory`. For one column a channel works in three stages.

1. **Noise.** `awgn_generator` advances a 64-bit xorshift generator and sums
   four 10-bit uniform samples. By the central limit theorem this is close to
   Gaussian: mean 0, standard deviation about 591.
2. **Bit LLRs.** Each of the m bits of the (all-zero) symbol gets a soft value
   `llr = sat(mean + round(g · kstd / 2^16))`, a Q-bit signed number with an
   LSB of 0.5.
   - `mean` and `kstd` come from a 16-entry table over Eb/N0 = 0 … 7.5 dB in
     0.5 dB steps, for a rate-1/2 code under BPSK.
   - The mean is the BPSK LLR mean 2/σ², counted in LSBs of 0.5, so 4/σ².
   - The table is in `nbldpc_pkg` with its formula.
3. **Symbol costs.** A mux array and adder form the cost of every symbol x:
   the sum of the LLR magnitudes of the bits where x disagrees with the hard
   decision.
   - The q costs enter an insertion `sorter` of length q, one per cycle.
   - The n_m cheapest come out as the prior LLRV.
   - They are written to the prior memory one entry per cycle.

A column therefore takes q + n_m cycles. The two channels together fill the
memory in (N/2)(q + n_m) cycles plus a 2-cycle start-up: 3,843 cycles at the
defaults.

## The code

The decoder needs three things per edge of H:

- the column it connects to;
- its nonzero entry h;
- its **partner**, the other edge of the same column (every column has weight 2).

`code_luts` builds these tables at elaboration from closed formulas. With
e = row·d_c + k:

- the rows in the first half connect to columns `e mod N`;
- the rows in the second half connect to columns `(13·(e − M·d_c/2) + 5) mod N`;
- the entry is `alpha^((7e + 1) mod (q − 1))`.

Each half of the rows covers every column once, so each column has weight 2.
The partner table is derived by pairing the two edges of each column. An
assertion in the decoder checks that the partner map is an involution.

To use a different code, replace the two formulas in `nbldpc_pkg`
(`h_col`, `h_entry`). The rest follows, as long as every column keeps weight 2.

## The decoder (DD state)

`nb_decoder` works through H one row at a time, and through all M rows every
iteration. Messages live in two LLRV memories of M·d_c words, one LLRV per
edge. Decisions go to a third memory:

| memory | contents |
|---|---|
| v-c | variable-to-check message of the edge, already multiplied by h (the "check domain") |
| c-v | check-to-variable message of the edge, divided by h again (the "variable domain") |
| posterior | the decided symbol of every column (N words) |

For row r the control FSM runs three phases.

1. **Gather.** For k = 0 … d_c−1 the v-c LLRV of edge e is fetched. In the
   first iteration there is no v-c message yet: the column's prior is read from
   the prior memory and multiplied by h in a `perm_unit`. Each LLRV is written
   into bank k of the check node's input RAM. This takes 2 cycles per edge.
2. **Check node.** `check_node` computes the d_c outgoing messages. It is
   described in its own section below.
3. **Scatter.** Each edge of the row has its own VN lane: a `vn_unit` and
   an output `perm_unit`. The lane of edge k starts 2 cycles after that of
   edge k−1, and the next row begins once every lane is idle. For each edge e,
   with partner p:
   - The outgoing message is divided by h(e) (inverse `perm_unit`) and stored
     as c-v[e].
   - The column's next message towards the check of p is formed:
     v-c[p] = VN(prior, c-v[e]), multiplied by h(p).
   - If p already holds a c-v message in this frame, the posterior is
     VN(v-c[p] before permutation, c-v[p]), and its best symbol is written to
     the posterior memory. Otherwise the new v-c message serves as posterior.

The edges of a row lie in different columns, so the lanes never write the
same word. The result is the same as handling the edges one at a time.
A replacement code must keep this property, as any valid parity-check
matrix with one nonzero per (row, column) does.

Because each column has degree 2, the message towards one of its checks is
the prior combined with the message from the other check. This is why the
decoder only needs the partner edge and not a general d_v-way combine. Rows
are processed in order and the v-c memory is updated in place. The decoder is
therefore a layered (row-serial) schedule: a row already sees the messages
produced earlier in the same iteration.

After the last row of iteration L the decoder pulses `done`. `decision` then
scans the posterior memory. Against the all-zero codeword, every nonzero
symbol is a symbol error, and its popcount is added to the bit errors.

### Check node: forward, backward, merge

For the d_c input LLRVs U[0 … d_c−1] the check node computes, for every k,
the LLRV of the GF sum of all other inputs. It uses the forward-backward
recursion, and every step is one **elementary check node** (ECN) on two LLRVs:

```
forward   F[0] = U[0],        F[s] = ECN(F[s−1], U[s])     s = 1 … d_c−2
backward  B[d_c−1] = U[d_c−1], B[s] = ECN(B[s+1], U[s])    s = d_c−2 … 1
merge     V[0] = B[1],  V[d_c−1] = F[d_c−2],  V[k] = ECN(F[k−1], B[k+1])
```

Four ECNs run in parallel.

- ECN0 steps forward and ECN1 steps backward, in lock step. Their results go
  to the forward and backward memories.
- ECN2 merges k = ⌊(d_c−1)/2⌋ down to 1, and ECN3 merges the remaining k up to d_c−2.
- A merge starts as soon as both of its inputs exist. The merges therefore
  begin when forward and backward meet in the middle of the trellis, and they
  overlap the second half of the forward/backward steps.

For d_c = 4 the node takes two ECN steps plus a few cycles of hand-over:
42 cycles at n_m = L_S-CN = 8.

### The elementary check node

An ECN on A and B must find the n_m cheapest distinct symbols of
{a ⊕ b}. Its cost is c(a)+c(b) (EMS) or max(c(a), c(b)) (min-max). The full
n_m × n_m cost matrix is sorted along rows and columns, so the ECN uses a
**bubble merge**.

- A sorter of length L_S-CN is loaded with the first column (i, 0) of the
  matrix, i < L_S-CN, one entry per cycle.
- Then every cycle the cheapest bubble (i, j) is popped. Its symbol is
  emitted unless a `seen` bit vector shows it was already emitted.
- The popped bubble is replaced by (i, j+1).

This is an exact k-way merge of the first L_S-CN rows. With
L_S-CN ≥ n_m the output equals the exact truncated EMS/min-max result.
A shorter sorter trades accuracy for area.

- The ECN finishes after 2 + L_S-CN + n_m cycles, plus one cycle per
  repeated symbol it skips.
- A truncated output (every bubble used up) is padded with cost 2^Q−1.
- Costs saturate at 2^Q−1.

### Variable node

`vn_unit` combines two LLRVs P and C into the LLRV of their summed log
likelihoods. A symbol missing from one list is charged that list's last cost.

To find "the cost of symbol s in the other list" in one cycle, both lists are
first written into **VN RAMs addressed by symbol**: a valid bit, the position
and the cost. Then position k of both lists is streamed per cycle.

- P[k] always produces a candidate: its cost plus C's cost for the same symbol.
- C[k] produces a candidate only if its symbol is absent from P: its cost plus
  P's last cost.
- No symbol enters twice. Candidates go into an insertion sorter of length
  L_S-VN.
- The result is normalised so that its first cost is 0, then saturated.

A VN run takes 3 + n_m cycles.

### Permutation

`perm_unit` multiplies (or, with `inverse`, divides) every symbol of an LLRV
by an H entry. The costs are untouched and the order is preserved. The
q × q multiplication table and the inverse table are built at elaboration
from the field polynomial.

## Control, error statistics and the host interface

`top_controller` sees a rising edge on `start`, clears the statistics, and
runs PG then DD for each frame. The two phases are pipelined across frames,
and the prior memory has two banks:

- PG fills a free bank.
- DD decodes the oldest full bank, and frees it when the frame's decision is
  counted.

So the priors of frame k+1 are generated while frame k is decoded. After each
DD the controller increments `count`, and it stops after `frame_limit` frames
(0 counts as 1). The chip's run-time inputs are:

| port | meaning |
|---|---|
| `frame_limit[15:0]` | frames per run |
| `iter_limit[7:0]` | decoding iterations per frame (≥ 1) |
| `snr_idx[3:0]` | Eb/N0 = 0.5 dB × snr_idx |
| `mm` | 0 = EMS, 1 = min-max |

Results:

- `fe`, `se`, `be`: frame, symbol and bit errors, 32-bit and saturating.
- `frames`: the number of frames emulated.
- `err_count` and the read port `err_raddr → err_rdata`, one cycle later.
  `err_rdata` is one 48-bit record per wrong frame:
  `{frame[15:0], symbol errors[15:0], bit errors[15:0]}`. The record memory
  holds `EDEPTH` = 256 records and wraps.
- Status: `running`, `pg_busy`, `dec_busy`, `dec_iter`, and `dec_partner`
  (a posterior was formed from the partner's message).

## Timing

At the defaults (GF(32), n_m = 8, d_c = 4, L_S-CN = L_S-VN = 8):

| step | cycles |
|---|---|
| prior generation, whole frame | 3,843 |
| check node, one row | 42 |
| VN run (per lane; one or two per edge) | 11 |
| one row: 8 gather + check node + 8 issue + last lane + hand-over | about 82 |
| one iteration (96 rows) | about 7,800 |
| one frame, 10 iterations, decision included (prior generation hidden) | about 78,500 |

That is about 1.5 Mb/s of decoded code bits at 120 MHz. Only the first frame
of a run waits for its prior generation. The ECN latency grows
by one cycle per repeated symbol, so these figures vary slightly between frames.

## Where this design departs from the architecture it follows

The overall architecture is reproduced: the PG/DD state machine, the dual
AWGN channels with sorter, the prior memory, the four-ECN check node with
forward/backward memories, the VN-RAM variable node, the permutation units
and LUTs, and the error collector and memory. These parts differ:

- **One processing path.** The reference architecture interleaves two rows so
  that the check node of one row overlaps the variable nodes of the other.
  Here rows run one after another, with the VN work of a row spread over d_c
  lanes. That gives about 82 cycles per row against about 71 for the
  interleaved schedule.
- **Two prior-memory banks.** To overlap PG of the next frame with DD of the
  current one, the prior memory is doubled. Within a frame, decoding still
  waits for that frame's priors to be complete.
- **Degree-2 columns only.** The decoder's variable-node step assumes every
  column has exactly two edges. This covers the regular (2, d_c) codes, but
  not quasi-cyclic codes with higher column weight.
- **Own parity-check matrix.** The code is defined by the formulas above, not
  by a published matrix. Error rates therefore match a random-like (2,4) code
  of that length, not a specific published one.
- **SNR in 0.5 dB steps** from a fixed table, so for example 4.4 dB runs as 4.5 dB.
- **Noise** is a 4-sample central-limit approximation. Its tails are
  truncated at about ±3.5σ, so error rates far below 10⁻⁶ are optimistic.
- **Variable node** latency is 3 + n_m, not 2 + L_S-VN + n_m: the sorter
  settles while candidates arrive.
- **Decision** is a scan of the posterior memory after the last iteration, not
  a per-symbol check during decoding. There is no early stopping on a valid
  syndrome.
- **Memory organisation.** The memories hold one LLRV per word. The
  forward/backward memories hold d_c LLRVs, rather than the minimal
  (d_c−3)·n_m entries.
- **Not included:** the host software and board link that set the run-time
  parameters and collect results, and the flow that generates RTL from a code
  description. Here the ports above replace the host link, and the code is
  changed through the package formulas and parameters.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `QQ`, `GFB` | 32, 5 | field size q = 2^GFB (2 … 256) |
| `Q` | 6 | cost / LLR width |
| `NM` | 8 | LLRV length n_m |
| `N`, `M`, `DC` | 192, 96, 4 | symbols, checks, check degree (N·2 = M·DC) |
| `LSCN`, `LSVN` | 8, 8 | ECN and VN sorter lengths |
| `EDEPTH` | 256 | error records kept |

`N` must be even, because the two channels take alternate columns.

## Simulating

Every module has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=… failures=…` and ends with `$finish`. The testbenches
include `tb/ldpc_tb_model.svh`, a software model of the ECN and the VN.

```
verilator --binary -Irtl -Itb --top-module tb_nbldpc_emulator \
    rtl/*.sv tb/tb_nbldpc_emulator.sv
./obj_dir/Vtb_nbldpc_emulator
```

Any other testbench runs the same way with its own top name. Each one
overrides parameters to stay small, except `tb_nbldpc_emulator`, which runs
the full-size design in a few seconds:

- two EMS frames at 7.5 dB with 10 iterations, which must decode without error;
- two min-max frames at 0 dB with 3 iterations, which must fail. It checks
  that the record memory agrees with the totals.

It also counts, and requires at least once, every mechanism of the design:

- PG and DD runs, PG running while DD decodes, a frame decoded from the
  second prior-memory bank, and simultaneous writes on both prior-memory ports;
- forward/backward and merge ECN steps, and repeated symbols skipped by an ECN;
- posteriors formed from the partner's message;
- frames decoded with each rule, the iteration limit reached, and records logged.

## How far it can be trusted

- **Blocks are checked against independent models.**
  - The ECN, VN and check node are compared entry by entry with software
    implementations of the same rules, on random sorted LLRVs, in both EMS
    and min-max.
  - The permutation unit and the LUTs are checked against GF arithmetic
    written separately in the testbench, and against the column-weight and
    partner properties.
  - The channel is checked statistically: the mean and spread of the LLRs,
    and the sorted costs against a recomputation from the same noise.
  - Timing bounds are checked where a latency is stated: channel cycles per
    column, ECN, check node, VN and decision.
- **The decoder as a whole** is compared edge by edge and iteration by
  iteration with a complete software decoder. This uses a small code: GF(8),
  n_m = 4, 8 columns.
- **Each testbench has been shown to fail** on a deliberately broken copy of
  its module.
- **Decoding behaviour** at full size shows the expected waterfall. Over 20
  EMS frames with 10 iterations, the bit error rate drops from about 7·10⁻³
  at 3 dB to about 8·10⁻⁴ at 3.5 dB, and min-max is slightly weaker. These
  are short runs on this design's own matrix and are meant as a sanity check,
  not as reference curves.
- All RTL lints cleanly under Verilator with `-Wall`. It is written as
  synthesizable SystemVerilog (no latches, and memories as register arrays
  with registered reads).
