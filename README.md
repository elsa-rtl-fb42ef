# ELSA-style LSTM layer on accelerated approximate multipliers

This RTL computes one LSTM layer. Every multiplication is done by a *bit-stream approximate
multiplier*: it needs no array multiplier, and it takes a number of cycles that depends on
one operand's value. Because of that, small weights and activations finish early. An
*elastic* pipeline lets the slow operations of one node overlap the work of the next node,
and the matrix work of the next time step. The result is a layer whose run time follows the
data, not a fixed worst case.

For `t = 1..T` and `N` hidden nodes, the layer computes:

```
f_t  = HSig (W_xf x_t + W_hf h_{t-1} + b_f)      HSig(x)  = clip(x/4 + 1/2, 0, 1)
i_t  = HSig (W_xi x_t + W_hi h_{t-1} + b_i)      HTanh(x) = clip(x, -1, 1)
o_t  = HSig (W_xo x_t + W_ho h_{t-1} + b_o)
Ĉ_t  = HTanh(W_xc x_t + W_hc h_{t-1} + b_c)
C_t  = i_t ⊙ Ĉ_t + f_t ⊙ C_{t-1}
h_t  = o_t ⊙ HTanh(C_t)                           with h_0 = C_0 = 0
```

The defaults are:

| Parameter | Value |
|---|---|
| `N` | 128 hidden nodes (and 128 inputs) |
| `DW` | 8-bit data |
| `ACC_W` | 11-bit accumulators |
| `T_MAX` | up to 1000 time steps |

## 1. Number format

- Every stored value is a `DW`-bit two's-complement fraction (`Q1.7` at the default). This
  covers weights, biases, x, h, C and the gate values. A value of 0.5 is `0x40`, and -1 is
  `0x80`. +1 cannot be represented, so every clip to +1 gives `1 - 2^-7` (`0x7F`).
- Accumulators are `ACC_W` = 11 bits with the same binary point (`Q4.7`). They saturate at
  each count.
- The ternary adder sums the x-MVM result, the h-MVM result and the bias. Its sum is
  `ACC_W+2` bits wide and cannot overflow. The activations read that sum directly.
- C and h are saturated back to 8 bits before they are stored. Because C is stored as an
  8-bit fraction, HTanh(C) only matters at C = -1. The unit is still present and used.

## 2. The approximate multiplier (`am_seq`, `am_acc`, `am_mult`)

Take X and W as n-bit fractions, and let `N(W)` be W's integer numerator (W = N(W)/2^(n-1)).

**Plain stream multiplier.** It runs `|N(W)|` cycles. In each cycle a multiplexer picks one
bit of X, and an up-down counter counts +1 or -1 by that bit XOR W's sign. The bits are
picked in a fixed pattern:

- the inverted sign bit of X on every odd cycle;
- `X_{n-2}` on cycles 2, 6, 10, …;
- `X_{n-3}` on cycles 4, 12, …;
- and so on.

After `|N(W)|` cycles, the counter holds about X·W in units of 2^-(n-1).

**Accelerated version.** Half of the cycles only count the sign bit of X, and their net sum is
known in advance: `±(|N(W)| >> 1)`. A *preprocessing* cycle therefore presets the counter to
that value. The sign is positive when `~X_msb ^ W_msb` is 1. The down counter is loaded with
`|N(W)| >> 1`, and only the even cycles run. In even cycle `c`, the selector picks X bit
`n-2-tz(c)`, where `tz` is the number of trailing zeros of `c`. The selector is a counter with
2^(n-1) states.

**Cost and output.**

- Latency is `1 + (|N(W)| >> 1)` cycles. This is the operation's cost throughout this
  document, written `1 + k(W)`.
- `last` is high in the final cycle, and also while idle. A controller can therefore issue the
  next operation right after the last cycle.
- With `accumulate` set, the preset is added to the current counter value instead of
  replacing it. This is how products are summed.

**Accuracy.**

- At `DW = 8`, the error against the exact product is below 4 LSB of the accumulator.
  Exhaustive testing measured a worst case of 3.02 LSB.
- For odd `|N(W)|`, the shift drops one sign-bit count. This rule was kept on purpose.

**Small example (n = 4).** X = 0.5 (`0100`) and W = 0.75 (`0110`). The preset is 3. Three
stream cycles count +1, -1, +1. The result is 4/8 = 0.5 in 4 cycles instead of the plain
multiplier's 6.

`am_seq` holds the parts one multiplier, or a whole row of them, can share: the down counter
and the selector. `am_acc` holds the per-multiplier parts: the X register, the mux, the XOR
and the preset/saturating up-down counter. `am_mult` is one of each.

## 3. Matrix-vector units (`mvm`)

One `mvm` computes `W·y` for an N×N matrix, one column at a time. Each pass multiplies
column `c` by the scalar `y_c`:

- The scalar is the *latency operand*. All N rows therefore share one `am_seq`, and the
  column takes `1 + k(y_c)` cycles.
- Each row has its own `am_acc`, which streams its matrix element.
- The rows' counters are not cleared between columns, so after the last column they hold
  `W·y`.
- The `first` flag marks column 0, where the counters restart.
- A zero scalar costs a single cycle.

The layer has eight MVMs: `W_x` and `W_h` for each of the four gates, `8·N` multipliers in
total.

## 4. Controllers

Four controllers drive the datapath. They are one top controller and three mini controllers.
Each mini controller owns one computation unit, waits for a request from the top, and answers
with a one-cycle `done`.

| Controller | States | Work |
|---|---|---|
| `mvm_ctrl` | Idle, Full, Partial, Done | *Full* walks all N columns. *Partial* runs one given column. It reads the weight column and the scalar one column ahead, so consecutive columns need no gap. |
| `ema_ctrl` | Idle, Mult1, Mult2, Done | Mult1 computes `i·Ĉ`. Mult2 computes `f·C_{t-1}`, accumulated onto it. |
| `em_ctrl` | Idle, Mult1, Done | Computes `h = o·tanh(C)`. |
| `top_ctrl` | Idle, S1 … S7, Done | The schedule below. |

The costs, counted from request to `done` inclusive, are:

- MVM Full: `2 + Σ_c (1 + k(y_c))`
- MVM Partial: `3 + k`
- EMA: `k(i) + k(f) + 3`
- EM: `k(o) + 2`

## 5. The elastic schedule

This is the core of the design. A time step is split into six stages:

1. the eight MVMs;
2. adders and activations for f, Ĉ and i;
3. the memory-state update (EMA);
4. o;
5. tanh(C);
6. the hidden output (EM).

The top controller walks them as follows, with `j` = node and `t` = step, both from 0:

| State | Does | In parallel |
|---|---|---|
| S1 | t = 0: MVM Full pass. t > 0: MVM Partial on column N-1 only. Then the eight result vectors are copied to the intermediate buffer. | – |
| S2 | stage 2 for node 0 | – |
| S3 | EMA for node 0 | – |
| S4 (1 cycle) | stage 2 for node j+1, stage 4 and 5 for node j | – |
| S5 | EM for node j, then (if t < T-1) MVM Partial on column j for step t+1, using `x_{t+1,j}` and the new `h_j` | EMA for node j+1 |
| S6 (1 cycle) | stage 4 and 5 for node N-1 | – |
| S7 | EM for node N-1, then S1 of the next step or Done | – |

S4/S5 repeat for j = 0 … N-2.

**Why the next step's matrix work can start early.** Column j of `W_h` needs only `h_j`. As
soon as EM has produced `h_j`, the MVMs can process column j for step t+1. They accumulate
into fresh counters, because the current step's results were already copied to the buffer in
S1. Most of the next step's MVM work therefore hides behind the current step's element-wise
work. Only column N-1 is left for the next S1.

**What "elastic" means here.** Every state that holds several operations waits until all of
them have finished, and each operation's length depends on its data. In S5 the path
EM → MVM Partial and the EMA run side by side, so S5 lasts as long as the slower of the two.

**Exact cycle count.** A run takes, counting from the `start` cycle to the `done` cycle
inclusive:

```
1 + Σ_t [ S1_t + 1 + (k(i_0)+k(f_0)+3)
          + Σ_{j<N-1} (1 + max(path_j, k(i_{j+1})+k(f_{j+1})+3))
          + 1 + (k(o_{N-1})+2) ] + 1
S1_0 = 2 + Σ_c (1 + k(x_{0,c}))          (h_{-1} = 0 costs nothing)
S1_t = 3 + max(k(x_{t,N-1}), k(h_{t-1,N-1}))
path_j = k(o_j)+2 + [t < T-1] · (2 + max(k(x_{t+1,j}), k(h_{t,j})))
```

The end-to-end testbench checks this count to the cycle.

**Measured speed-up.** Compared with the same operations run one after another, the measured
speed-up is:

- 1.34–1.52× at N = 128 (random data and workload-shaped data);
- 1.31–1.49× at N = 12.

The per-operation request/done overhead (2–3 cycles) is what keeps this below the
source's figure of about 1.6×.

**Two points the source schedule leaves open.** This design fills them as follows:

- S6 computes o for the last node as well as its tanh. The last node needs o, and no other
  state provides it.
- At the last step no Partial MVM is started, because there is no next step.

## 6. Data storage

| Memory | Organisation |
|---|---|
| Weights | 8 memories, one per matrix. Each word holds one full column (N × 8 bits). |
| Biases | 4 memories of N words |
| Input sequence | `T_MAX·N` words, address `t·N + j` |
| Output (h) sequence | `T_MAX·N` words, address `t·N + j` |
| Memory state C | N words, overwritten every step |

- All memories are `sram_1r1w`: one write port (with a lane select for column words), one
  read port, and one cycle of read latency.
- Previous h values are read from the output memory, which therefore also holds the
  recurrent state.
- The `mvm_buffer` is a register copy of the eight MVM result vectors (8 × N × 11 bits). It
  has two combinational read ports: one for the node in stage 2 (j+1) and one for the node
  in stage 4 (j).

At the defaults the storage is:

- 128 KiB of weights;
- 2 × 125 KiB for the input and output sequences;
- 512 B of biases;
- 128 B for C.

The input vector has N elements. A shorter input (for example a 65-symbol one-hot code) is
zero-padded. Zero inputs and zero weights in unused columns cost one cycle per column and
change nothing.

## 7. Host interface (`elsa_top`)

Load the memories while `busy` is low, then pulse `start` with `seq_len` = T (1 ≤ T ≤ T_MAX).

| Port group | Meaning |
|---|---|
| `w_we, w_mat, w_row, w_col, w_data` | write one weight. `w_mat` = 2·gate + (0 for W_x, 1 for W_h), gates ordered f, c, i, o. |
| `b_we, b_gate, b_idx, b_data` | write one bias |
| `x_we, x_addr, x_data` | write `x_t[j]` at `t·N + j` |
| `h_re, h_addr → h_data` | read `h_t[j]` one cycle later |
| `busy, done` | `done` pulses once, when all of `h_1 … h_T` are written |

## 8. Where this RTL departs from, or adds to, the source design

- **Preprocessing cycle.** The source counts only the stream cycles of a multiplication.
  Here the preset takes one extra cycle, and each controller handshake adds one or two more.
- **Cycle model.** The source's closed-form model has no halving on the MVM terms. This RTL
  uses the accelerated multiplier in the MVMs too, as the source's text states, so MVM
  columns cost `1 + k` with k = |N(y)|>>1.
- **Multiplier count.** There are 8·N + 2 multipliers (1026 at N = 128). The source quotes
  772 MACs without a breakdown.
- **Memory size.** The memories hold more than the source's 106 KB on-chip figure. Its split
  is not given, and this design keeps the whole input and output sequences on chip.
- **Not built.** Clock gating of idle units and SRAM sleep modes are power techniques of the
  physical design and are not modelled. Idle units simply hold their state. The memories are
  behavioural arrays, standing in for foundry SRAM macros.
- **Own choices.** Saturation widths, rounding of HSig (toward −∞), the ternary-adder width,
  the host interface, and zero initial state.
- **Width.** Data and accumulator widths are parameters. Besides 8/11 bits, the whole layer
  is tested at 12/15 and 16/19 bits with reduced N. Making the accumulator `DW + 3` bits
  wide is this design's choice.

## 9. Files

| File | Contents |
|---|---|
| `elsa_pkg.sv` | defaults, gate and state encodings |
| `am_seq.sv`, `am_acc.sv`, `am_mult.sv` | approximate multiplier |
| `mvm.sv`, `mvm_ctrl.sv`, `mvm_buffer.sv` | matrix-vector stage |
| `ternary_adder.sv`, `hsig.sv`, `htanh.sv` | stages 2 and 4 |
| `ema.sv`, `ema_ctrl.sv` | memory-state update |
| `em.sv`, `em_ctrl.sv` | hidden output |
| `sram_1r1w.sv` | memory model |
| `top_ctrl.sv`, `elsa_top.sv` | schedule and top level |

Testbenches are in `tb/`. Each one prints `TB_RESULT checks=… failures=…` and has a cycle
watchdog.

- `elsa_ref_pkg.sv` is the shared reference model. It holds a multiplier model built from the
  plain (non-accelerated) stream definition, and the activations.
- Each unit testbench compares its unit with that model, and checks cycle counts where a
  latency is defined.
- `elsa_top_tb` runs the whole layer at N = 12 for T = 6, 3, 1 and 8. It runs a bit-exact
  software LSTM, checks every h, checks the exact cycle count, and counts that each mechanism
  happened. The mechanisms are Full and Partial passes, EMA overlapped with MVM and with EM,
  zero-cost columns, accumulator saturation, and activations clipped at both ends.
- `elsa_full_tb` does the same at the default sizes (N = 128) for T = 10 and T = 2.
- `elsa_prec12_tb` and `elsa_prec16_tb` run the same test with 12-bit and 16-bit data
  (accumulators of 15 and 19 bits), at N = 12 and N = 10.
- `elsa_lm_tb` runs workload-shaped data on the default-size layer:
  - a 65-symbol one-hot input (first language-model layer);
  - the first layer's output fed into a second 128→128 layer;
  - a 64-node layer padded with zeros, for 10 and 1000 time steps.

  The measured speed-ups were 1.43–1.52×.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/elsa_pkg.sv tb/elsa_ref_pkg.sv \
          tb/elsa_top_tb.sv --top-module elsa_top_tb -o sim && obj_dir/sim
```

Replace `elsa_top_tb` with any other testbench name. `elsa_full_tb` runs in under a minute, and `elsa_lm_tb` in about three.
