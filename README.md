# MESA: a pipelined eCRT-Paillier decryption engine in SystemVerilog

Paillier decryption is dominated by one operation: raising a 2N-bit
ciphertext `c` to a large exponent modulo `n^2`. The CRT speeds this up by
working separately modulo `p^2` and `q^2` with half-length exponents `p-1`
and `q-1`. The CRT recombination after that is a chain of divisions,
Montgomery multiplications, range corrections ("judgments") and additions.
It adds latency but little real work.

This design follows the MESA architecture from "Cost-Effective Optimization
and Implementation of the CRT-Paillier Decryption Algorithm for Enhanced
Performance". It rests on two ideas:

1. **A shorter post-processing chain (eCRT-Paillier).** The usual sequence is
   `L(U) * e mod p`, then the CRT coefficients `l3 = q * (q^-1 mod p)` and
   `l4`, then an addition mod `n`. The constants are folded together offline
   into one value per branch, `t_p = e_p * l3 mod n`, so each branch needs a
   single modular multiplication modulo `n`. Most of the intermediate range
   corrections can be left out, because a value below 2m is pulled back into
   range by the next Montgomery multiplication anyway. Only one correction
   per branch remains, plus one after the final addition.
2. **A pipeline built around exponentiation.** The exponent `p-1` is cut
   into `STAGES` segments. Each segment runs on its own exponentiation unit
   (ME), and the ladder state moves from stage to stage. Pre-processing
   (conversion into the Montgomery domain) and post-processing each get a
   stage of their own. With `STAGES+2` ciphertexts in flight, the ME units
   never wait. The slowest stage sets the throughput, and at full size that
   stage is an ME segment.

The RTL is parameterised by the key size `N` (default 2048), the number of
ME stages per branch `STAGES` (default 3, so 6 ME units in total) and the
word size of the high-radix multipliers `WORD` (default 16).

## Decryption, step by step

| step | where | operation | result |
|---|---|---|---|
| 1 | pre (stage 1) | `S_p = MM_B(c, y_p, p^2)` | `c·R mod p^2`, below `2p^2` |
| 2 | ME stages 2..STAGES+1 | Montgomery ladder over `p-1`, one segment per stage; the last stage also computes `MM(1, S)` | `U_p = c^(p-1) mod p^2` |
| 3 | post (last stage) | `L_p = floor(U_p / p)` (restoring divider) | `L_p < p` |
| 4 | post, on the pre multipliers | `m_p = MM_B(L_p, t_pR, n)` | `L_p·t_p mod n`, below `2n` |
| 5 | post | `m_p >= n ? m_p - n : m_p` (com/sub) | |
| 6 | post | `m_p + m_q`, then one final com/sub | plaintext `m` |

The `q` branch is identical and runs beside the `p` branch at every stage.
The key-dependent constants are computed offline and written into the
configuration RAM (see "Configuration memory" below).

`L(U) = (U-1)/p` is computed as `floor(U/p)`. The two agree because
`U ≡ 1 (mod p)`, so no decrement is needed.

## Montgomery domains: which R is where

This is the least obvious part of the design, and the one where it departs
from the paper's formulas.

* **MM_H** (`rtl/mm_h.sv`) is the word-serial CIOS multiplier used inside
  the ME units. It works with `R = 2^(LW·WORD)`, where
  `LW = ceil((N+2)/WORD)`, the same `R` as the paper's CIOS algorithm. Each
  clock it completes one outer CIOS iteration: one WORD-bit digit of `b`
  times the whole of `a`, plus the matching reduction word. A product takes
  `LW+1` cycles. There is no final subtraction, so results stay below `2m`.
  Two extra bits of headroom (`N+2`) keep this stable when the inputs are
  below `2m` as well. The constant `m' = -m^-1 mod 2^WORD` is derived inside
  the unit by Newton iteration.
* **MM_B** (`rtl/mm_b.sv`) is the bit-serial radix-2 multiplier. It must
  accept the full 2N-bit ciphertext as its first operand, so it scans
  `K = 2·LW·WORD` bits. This means it divides by `R_B = 2^K = R^2`, not by
  `R`. A product takes `K+1` cycles, with no final subtraction.
* The ME units need `S_p = c·R mod p^2` (Montgomery form for MM_H). Since
  `MM_B(c, y) = c·y·R^-2`, the stored constant is **`y_p = R^3 mod p^2`**.
  The paper writes `y_p = R_1^2 mod p^2` with `R_1 = R^2`. That is the
  constant a multiplier dividing by `R_1` would need to reach the `R_1`
  domain, and it does not match this datapath. The value here is what makes
  the MM_B/MM_H pair consistent.
* The post multiplication `MM_B(L_p, t_pR, n)` also divides by `R^2`, so
  **`t_pR = t_p·R^2 mod n`**.
* The ladder's starting value `S = MM(1, R^2) = R mod p^2` ("one" in the
  Montgomery domain) is also stored as a constant (`one_p`, `one_q`). The
  unit does not compute it.

The final ladder step `MM(1, S)` leaves the Montgomery domain. Its result is
a fully reduced `c^(p-1) mod p^2` in practice. The bound guaranteed by the
algorithm is `U < 2p^2`, and the divider's width (`N+1` bits) allows for
that.

## The ME unit and the segmented ladder

Each ME (`rtl/me_unit.sv`) runs the Montgomery power ladder on a pair
`(S, Z)` with `Z = S·base`. For every exponent bit `b_i`, taken MSB first
from a shift register, it does three things:

    X  = b_i ? Z : S            shared operand multiplexer
    S <= MM_H(S, X)             upper multiplier
    Z <= MM_H(X, Z)             lower multiplier

When `b_i = 1`, the upper multiplier computes `S·Z` and the lower one
squares `Z`. When `b_i = 0`, the upper one squares `S` and the lower one
computes `S·Z`. Both multipliers run on every bit, so neither timing nor
activity depends on the exponent. That protection against simple power
analysis is the reason the ladder was chosen.

The exponent is split as `p-1 = {h_3, h_2, h_1}` (for `STAGES = 3`), with
`SEG = ceil((N/2)/STAGES)` bits per segment (342 at N=2048). The first ME
stage gets the most significant segment `h_3`. Each stage passes both `S`
and `Z` on to the next, and only the last stage (`FINAL = 1`) converts out
of the Montgomery domain. Passing `Z` as well as `S` is needed for the
ladder to continue. The paper's drawing shows one connection between
stages, so treat this as the design's reading of it.

An ME segment takes `SEG·(LW+2) + 1` cycles: `LW+1` for the product plus
one cycle to latch and shift, per bit. The final stage adds `LW+2` cycles
for the conversion.

## Post-processing

`rtl/post_unit.sv` runs the sequence as a small state machine:

1. Two restoring dividers (`rtl/div_unit.sv`). Each produces one quotient
   bit per clock, `N/2+1` bits in total, for a latency of `N/2+2`.
2. It requests the two MM_B multipliers of the pre-processing unit, waits
   until they are free, and multiplies `L·t_R mod n`. Sharing these
   multipliers follows the paper's text. Its Fig. 2 draws separate post
   multipliers.
3. Two comparator/subtractors (`rtl/com_sub.sv`) reduce `m_p`, `m_q` below
   `n`. They compare 64-bit chunks from the top and stop at the first chunk
   that differs. Only when `a >= n` do they run a chunked subtraction. This
   takes 1 to `NCH+1` cycles for the compare plus `NCH` for the subtraction,
   where `NCH = ceil((N+1)/64)`.
4. One adder (`rtl/adder.sv`), 64 bits per clock, then a final com/sub.

Chunked arithmetic was chosen so that the 1024-bit configuration lands on
the per-operation cycle counts the paper reports for add, sub and com
(18 cycles).

## Pipeline control

`rtl/control_unit.sv` advances all `STAGES+2` stages in lockstep:

* **LOAD.** After `en` rises, the control unit reads every word of the
  configuration RAM once and copies it into the PE's parameter registers,
  which are delayed one cycle to match the RAM latency. During this it
  holds the PE in reset. The parameters then stay in place for every
  ciphertext of that key.
* **READY.** If a ciphertext is waiting, or any stage still holds one, the
  unit pulses `step` together with `stage_en`. `stage_en` is a bit mask of
  the stages that hold valid data: bit 0 is pre, bits 1..STAGES are the ME
  stages, and the last bit is post.
* **RUN.** The unit waits until the PE drops `busy`.
* **FINISH.** If post held a result, the unit pushes it into the output
  FIFO. If that FIFO is full, it holds here with `stall` raised. Then it
  shifts the valid mask by one place.

A new ciphertext is only taken while `en` is high. When `en` falls, the
pipeline drains and the unit returns to idle. The next rising edge of `en`
reloads the parameters, so a key can be changed between runs.

The step period is the busiest stage's time plus 3 control cycles. With the
last ME stage occupied at N=2048, that is `(SEG+1)·(LW+2) + 3 = 44,936`
cycles.

## Configuration memory

`rtl/cfg_unit.sv` is a simple N-bit-wide RAM with a one-cycle read and a
write port for the host. Its address map is defined in `rtl/mesa_pkg.sv`:

| address | content |
|---|---|
| 0 / 1 | `p^2` / `q^2` |
| 2 / 3 | `y_p = R^3 mod p^2` / `y_q` |
| 4 / 5 | `one_p = R mod p^2` / `one_q` |
| 6 / 7 | `p` / `q` |
| 8 / 9 | `t_pR = t_p·R^2 mod n` / `t_qR` |
| 10 | `n` |
| 11 + 2(j-1) + {0,1} | exponent segment `h_{p,j}` / `h_{q,j}`, for j = 1..STAGES |

Here `R = 2^(LW·WORD)`, `t_p = e_p·q·(q^-1 mod p) mod n`, and
`e_p = (L(g^(p-1) mod p^2))^-1 mod p` with `g = n+1`. Key preparation is
host software. The testbenches show it in SystemVerilog (`paillier` class in
`tb/tb_math_pkg.sv`).

## Top-level interface (`mesa_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_we`, `cfg_waddr`, `cfg_wdata` | in | 1, 6, N | host writes of the key constants |
| `en` | in | 1 | load parameters and run; low drains the pipeline |
| `c_valid`, `c_ready`, `c_data` | in/out/in | 1, 1, 2N | ciphertext stream (valid/ready) |
| `m_valid`, `m_ready`, `m_data` | out/in/out | 1, 1, N | plaintext stream (valid/ready), in input order |
| `loaded` | out | 1 | parameters loaded |
| `stall` | out | 1 | pipeline held by a full output FIFO |

Both streams pass through two-entry FIFOs (`rtl/data_path.sv`,
`rtl/sync_fifo.sv`). Plaintexts appear `STAGES+2` steps after their
ciphertext was taken.

## Performance compared with the paper

Cycle counts below are from the formulas above and were confirmed in
simulation. The paper's numbers are for a 100 MHz FPGA implementation.

| configuration | quantity | this RTL | paper |
|---|---|---|---|
| N=1024, 12 MEs (6 stages) | MM_H | 66 | 87 |
| | MM_B | 2081 | 2087 |
| | div | 514 | 3081 |
| | add / sub / com | 18 / 18 / 1–18 | 18 / 18 / 1–18 |
| | ME stage (pipeline step) | 5832 | 7567 |
| | decryptions/s at 100 MHz | ≈17,100 | 13,215 |
| N=2048, 6 MEs (3 stages) | pipeline step | 44,936 (0.449 ms) | 0.577 ms |

The divider here produces one quotient bit per cycle over `N/2+1` bits. The
paper's divider is slower, but in both designs the post stage stays well
below an ME step. At small sizes such as N=64, pre- and post-processing set
the step time instead.

## Where this design departs from or goes beyond the paper

* The Montgomery constants are `y = R^3` and `t_R = t·R^2`, as explained
  above, instead of `y = R_1^2`.
* `S` and `Z` both move between ME stages. The start value `R mod p^2` is
  stored rather than computed.
* The MM_B multipliers are shared between pre and post. This follows the
  text rather than Fig. 2.
* The paper leaves the word size (16), the chunk width of com/sub and add
  (64), the FIFO depths (2), the handshakes, the address map, reset and the
  exact control sequence open. All of these are this design's own choices.
* Precomputation of the key constants is outside the accelerator, as in the
  paper.

## Simulating

Every block has a self-checking testbench in `tb/`. The reference
arithmetic in `tb/tb_math_pkg.sv` is independent of the RTL. It uses
schoolbook big-integer methods, so it avoids wide `/` and `%`, which
simulators limit. Small sizes (N=64 or 256) keep the block tests fast.
Example:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/mesa_pkg.sv tb/tb_math_pkg.sv tb/tb_mesa_top.sv --top-module tb_mesa_top
    ./obj_dir/Vtb_mesa_top

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. The end-to-end
tests are:

* `tb_mesa_top` (N=64, two keys) covers streaming, pipeline bubbles, the
  full pipeline, output back-pressure (stall), `en` drop and reload with a
  second key, and final-subtraction cases. It also checks the step period
  against PE busy time.
* `tb_mesa_w1024` runs the 1024-bit, 6-stage configuration. It checks the
  plaintexts and the 5832-cycle step period, and takes about 20 s.
* `tb_mesa_full` runs the default 2048-bit top with four ciphertexts. It
  takes about 4 minutes, and it checks plaintexts and the 44,936-cycle step
  period.
