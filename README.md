# Gain-cell sliding-window attention head

During autoregressive generation a Transformer recomputes, for every new token,
the dot products of the new query with all stored keys and a weighted sum of
all stored values. On a processor this means streaming the whole key/value
cache from memory for each token. This design keeps the cache *inside* the
compute array instead: keys and values are stored as analog levels in
gain cells (a capacitor plus a read transistor), and the two matrix-vector
products of attention are done where the data sit, by letting cell currents
add up on shared bit lines. Only the final read-out is digital.

The RTL describes one attention head of a GPT-2-sized model: head dimension
d = 64, a sliding window of the last M = 1024 tokens, split into 16
sub-tiles of 64 x 64 cells. One token is processed every 65 clock cycles
(65 ns at 1 GHz). The analog parts are written as integer behavioural models
with the same ports and timing as the circuits, so the whole head simulates
cycle by cycle and the digital periphery (sequencer, address controller,
pulse counters, adders) is ordinary synthesizable logic.

## What the head computes

Softmax is hard to build in analog circuits, so the head uses a ReLU-style
activation that falls out of the read-out circuit for free. For token i, with
a 4-bit query `q[r]` (0..15) and 3-bit stored levels `l` (0..7), the RTL
computes exactly:

```
w(l)    = 2*l - 7                                  signed cell weight, -7..+7
S_j     = sum_r q[r] * w(K_j[r])                   score of window column j
phi_j   = S_j > 0 ? min(15, ceil(S_j / RELU_DSTEP)) : 0     (0 if column j is empty)
c_t[r]  = sum_{j in sub-tile t} phi_j * w(V_j[r])
val_t[r]= sgn(c_t[r]) * min(15, ceil(|c_t[r]| / SIGNED_DSTEP))   (sgn(0) = +)
A_i[r]  = sum_{t = 0..15} val_t[r]                 9-bit signed result per row
```

Where each term comes from physically:

* **`w(l)`** – a cell stores a voltage between 0 and V_DD. Its read stage
  sources or sinks current depending on whether that voltage is above or
  below V_DD/2, so the eight levels act as the odd weights -7..+7, with no
  zero level. The real I-V curve is slightly cubic; the model uses the linear
  idealisation.
* **`q[r]`** – the query is not a voltage but a pulse *width*: row r is driven
  for `q[r]` cycles. The charge collected on a bit line is then the product
  of width and cell current, summed over rows: a dot product.
* **`phi`** – the K-array bit-line charge is integrated on a capacitor and
  then drained at a constant current; the converter's output is high while
  charge is left. A negative charge never produces a pulse (the ReLU), a
  large one is cut at the 15-cycle window (saturation). `RELU_DSTEP` is the
  charge drained per cycle.
* **`val`** – the V array is driven by the `phi` pulses. Its bit-line charge
  may have either sign, so the second converter stores the polarity in a
  flip-flop, drives the charge back towards zero and pulses until it gets
  there. A 16-level counter measures the pulse and applies the sign, giving
  31 values -15..+15.
* **`A`** – each sub-tile produces its own 64 counts; 64 adders with 16
  inputs add them.

`RELU_DSTEP = 64` and `SIGNED_DSTEP = 32` are this design's choices (the
published design does not give the discharge currents). With uniformly random
inputs they spread the pulse widths over the full 0..15 range; in a trained
model they play the role of the per-layer scale factors that map activations
into the converter range.

## One sub-tile

```
          q pulses (64 rows, shared by all 16 sub-tiles)
              |
      +-------v--------+      64 x relu_c2p      +----------------+
 K -> | K array 64x64  |--S_j--> [ReLU c2p ] --phi_j--> | V array 64x64  | <- V
      | token = column |    (masked by col_valid)      | token = row    |
      +----------------+                               +-------+--------+
                                                               | c[r] (64 bit lines)
                                                     64 x signed_c2p + pulse_counter
                                                               |
                                                           val[r] (5 bit signed)
```

The K array has the query on its word lines and one token per bit line; the
V array is the transpose, one token per word line and one output row per bit
line, so the ReLU pulses of the K array can drive the V array directly. Each
array has a column decoder (`col_decoder`) that selects the token line to
discharge and rewrite; the 64 DAC levels of the new key or value go to all
cells of that line at once.

**Masking.** Each sub-tile holds a `col_valid` bit per column. It is cleared
by `clear` and set when a key write into that column completes. The ReLU
pulse of a column is gated by it, so while the window is still filling, the
empty columns (which still hold whatever was there before) take no part.
Once the window is full, every column is valid and the oldest token is
overwritten in place: this is the sliding window.

## The 65-cycle token schedule

Cycle numbers count from the first cycle after a request is taken
(`gca_pkg` holds them as constants).

| cycles   | phase   | converters / counters                  | writes                                   |
|----------|---------|----------------------------------------|------------------------------------------|
| 0 – 4    | RSTK    | ReLU integrators reset                 | V line of token i discharged             |
| 5 – 19   | MAC QK  | query pulses on K arrays, ReLU sampling| V_i written (5 – 14), `adv_v` at 14      |
| 15 – 19  | RSTV    | signed integrators and counters reset  |                                          |
| 20 – 34  | MAC SV  | ReLU discharge → pulses on V arrays, signed sampling | K line of token i+1 discharged (20 – 24), K_{i+1} written (25 – 34), `adv_k` at 34 |
| 35 – 49  | COUNT   | signed discharge, counters enabled     |                                          |
| 50 – 64  | ADD     | adder tree (4 cycles) then result held |                                          |

`out_valid` rises one cycle after cycle 64, i.e. 65 cycles after the
request was taken, and a new request can be taken in cycle 64, so steps run
back to back at one token per 65 cycles.

The point of the schedule is that writing overlaps computing: the V array is
rewritten while only the K array is read, and the K array while only the V
array is read. This is why step i writes **V_i** but **K_{i+1}**: by the
time the new key could be written, the current query has already been
compared with the old keys. A sequence therefore starts with one
`OP_LOAD_K` request (15 cycles: discharge 5, write 10) that writes K_0.

## The sliding window

`write_addr_ctrl` holds two circular indices 0..M-1, one for keys and one for
values, each split into a sub-tile number (upper 4 bits) and a column
(lower 6 bits). Token j lives in column j mod 1024. The key index runs one
ahead of the value index during a step. `k_full` goes high once all M key
columns have been written; from then on every write replaces the oldest
token. `clear` (applied while the head is idle) resets both indices and all
valid bits, which starts a new sequence.

## Interface of `attention_head`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | 1 GHz clock, asynchronous active-low reset |
| `clear` | in | 1 | empty the window (use while idle) |
| `req_valid`, `req_ready` | in/out | 1 | request handshake, taken when both are high |
| `req_op` | in | 1 | `OP_STEP` or `OP_LOAD_K` (`gca_pkg::op_e`) |
| `req_q` | in | 64 x 4 | query Q_i |
| `req_k` | in | 64 x 3 | key of the *next* token |
| `req_v` | in | 64 x 3 | value of this token |
| `out_valid` | out | 1 | one-cycle result strobe |
| `out_a` | out | 64 x 9 | signed result A_i per row (held until the next result) |
| `busy`, `k_idx`, `v_idx`, `k_full` | out | | status |

`req_valid` must stay high, with stable data, until the request is taken
(an assertion in `attn_ctrl` checks this). The request data are registered
when taken.

A sequence of N tokens is driven as: `clear`; `OP_LOAD_K` with K_0; then
for i = 0..N-1 an `OP_STEP` with (Q_i, V_i, K_{i+1}). The key sent with the
last step is written but not used until a further step.

Queries, keys and values must arrive already projected and quantised (4, 3
and 3 bits): the linear projections of the Transformer and the concatenation
of heads are outside this head.

## Module hierarchy

```
attention_head                top
├── attn_ctrl                 65-cycle sequencer, handshake
├── write_addr_ctrl           circular K and V write indices
├── pwm_gen                   64 query pulse generators (4-bit widths)
├── subtile  x16
│   ├── col_decoder  x2       write line select for K and V
│   ├── gain_cell_array x2    K array (64x64), V array (64x64)      [behavioural]
│   ├── relu_c2p     x64      ReLU charge-to-pulse                   [behavioural]
│   ├── signed_c2p   x64      signed charge-to-pulse                 [behavioural]
│   └── pulse_counter x64     16-level counter with sign
└── tile_adder  x64           16-input signed adder tree, 4 stages
gca_pkg                       sizes, phase timing, control structs, opcode
```

All modules have parameters whose defaults are the GPT-2 head above; the
head can be built smaller (e.g. `D=8, WINDOW=32, COLS=8`) for fast tests.
`WINDOW` must be a multiple of `COLS`.

## How far the model can be trusted

The digital parts (sequencer, indices, decoders, counters, adders, pulse
generators) are meant as real RTL. The three analog blocks are integer
models of what the circuits do on average:

* **Linear cells.** The cell current is taken as proportional to the stored
  level around V_DD/2. The real transfer curve is a cubic fit whose
  coefficients are not available, so the nonlinearity is missing.
* **No leakage.** A silicon gain cell loses its charge with a time constant of
  about 5 ms (oxide-semiconductor cells far longer). Across a 1024-token
  window of a 12-layer model this decays the oldest keys by roughly 15 %.
  The model stores levels forever.
* **Whole-cycle pulse widths.** A real converter emits a pulse of continuous
  width; the model rounds every width up to whole 1 ns cycles, so the
  scores reaching the V array are already quantised to 16 levels.
* **No noise, no IR drop, no mismatch.** The converters are exact integer
  dividers with ceiling rounding.
* **The DAC is folded into the array.** A write stores the level index;
  the conversion to a write voltage and the 10-cycle pulse shape are not
  modelled, only their timing.

## Departures from the published design

* **K write slot.** The published timing chart draws the K_{i+1} write
  starting right after MAC QK. Its 5-cycle discharge would then fall inside
  MAC QK and change the keys being read, so here the discharge is at
  cycles 20 – 24 and the write at 25 – 34, both inside MAC SV.
* **Valid mask.** How empty window columns are excluded is not described;
  the per-column valid bit is this design's choice.
* **Discharge rates.** `RELU_DSTEP` and `SIGNED_DSTEP` (the saturation
  thresholds) are chosen, not published.
* **Handshake and `OP_LOAD_K`.** The request/response protocol and the
  separate first-key load are this design's.
* **ADD phase length.** Only the total of 65 cycles is given; the adder tree
  takes 4 cycles and the result is registered at the end of the 65.
* **Zero output.** A signed charge of exactly zero gives `+0`; the published
  counter is described as 32 levels (both signs of zero), here there are 31
  distinct values.
* **Single head.** A full attention layer would be twelve of these heads side
  by side; only one is built.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. The head testbenches compare against
`tb/attn_ref_pkg.sv`, an untimed reference written from the formulas above.

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/gca_pkg.sv tb/attn_ref_pkg.sv tb/tb_attention_head.sv \
    --top tb_attention_head -Mdir obj_head
./obj_head/Vtb_attention_head
```

Other testbenches build the same way (`attn_ref_pkg.sv` is only needed by
`tb_attention_head`, `tb_attention_head_full` and `tb_subtile`).

* `tb_attention_head` – reduced head (d = 8, M = 32, 8-column sub-tiles),
  92 tokens in two sequences, wrapping the window twice, with a `clear`
  between them and requests issued back to back; checks every output, the 65-cycle latency and the
  one-token-per-65-cycles rate, and counts how often each mechanism
  (ReLU cut-off, linear, saturated; masked column; positive, negative and
  saturated output; wrap; back-to-back; key load; clear) occurred.
* `tb_attention_head_full` – the head at its default size (d = 64,
  M = 1024, 16 sub-tiles), 1,100 tokens so the window wraps, plus a second
  short sequence after `clear`. It takes about one minute with Verilator.
* `tb_subtile`, `tb_gain_cell_array`, `tb_relu_c2p`, `tb_signed_c2p`,
  `tb_pulse_counter`, `tb_pwm_gen`, `tb_col_decoder`, `tb_write_addr_ctrl`,
  `tb_tile_adder`, `tb_attn_ctrl` – one per block.

The simulator is two-state; run with `+verilator+rand+reset+2` to start
unreset state at random values, which all testbenches tolerate.
