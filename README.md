# Windowed SC-LDPC decoder and error-rate evaluation platform

Spatially coupled LDPC (SC-LDPC) codes chain many small LDPC codes into one
long band-diagonal code. The code word of sub-block `t` is tied by parity
checks to its `MU` predecessors. A decoder does not have to wait for the whole
chain. It slides a window of a few sub-blocks along it and releases each
sub-block once it has spent enough iterations in the window. With the right
degree profile a weakly coupled code (small `MU`) reaches very low error rates
with few iterations. That makes such codes attractive for high-speed optical
links, which need a bit error rate around 1e-15.

Such error rates cannot be measured in software. The way to measure them is
to run the decoder in hardware next to a hardware noise source, so that
trillions of bits pass through. This repository holds SystemVerilog for that
kind of platform, with the following path:

    taus88 URNG x2 -> Box-Muller -> (x scale + offset, 15-level quantizer)
        -> windowed layered min-sum decoder -> error counter + error-position FIFO

The link emulated is BPSK over an AWGN channel, carrying the all-zero code
word. Every decoded `1` is therefore a bit error. The platform can be
replicated `D` times (lanes).

Everything is synthesizable. The defaults are the full-size code: sub-blocks
of n = 7500 bits, m = 1500 checks per coupling sub-matrix, 30×30 circulants,
frames of L = 90 sub-blocks, a window of W = 13 and two decoding engines.

## The code

The code is time-invariant and terminated, with rate 4/5 and syndrome-former
memory `MU = 2`. Its parity-check matrix is a band. The check rows of block
row `t` (m = 1500 checks) see the variable sub-blocks `t`, `t-1` and `t-2`
through the sub-matrices `H_0`, `H_1` and `H_2`. Sub-blocks outside
`0 .. L-1` are known zeros. This is the termination: the first and last rows
have fewer unknowns, and decoding starts from the ends of the chain.

Each `H_i` is lifted from the protograph row `(2 1 1 1 1)`. Within one `H_i`, a
check has two edges to protograph column 0 and one edge to each of columns 1
to 4. Summed over `H_0..H_2`, that is

* check degree `d_c = 18`,
* variable degree 6 for the 20 % of bits in column 0,
* variable degree 3 for the other 80 %.

The lifting has two steps:

1. Every protograph column becomes `MB = 50` column blocks of `Z = 30` bits,
   so n = 5·50·30 = 7500.
2. Every protograph row becomes `MB` block rows of `Z` checks, so m = 1500.

So every block row of a coupled row has 18 circulants. The package
`sc_ldpc_pkg` computes each circulant's position and shift with fixed
formulas. The edge `e = 0..17` of block row `r` has sub-matrix `i = e/6`,
protograph column `p` and copy `k` (0 or 1, column 0 only):

    column block = p*MB + (r + 7i + 13p + k*MB/2) mod MB
    shift        = (r(2p+1) + 5i + 11k + 3pi) mod Z

These formulas are **not** a girth-optimised code. The published code's
matrices are not given, and these formulas only produce the right degree
structure. Expect a much higher residual error rate and an earlier error
floor than a carefully designed matrix would have. To plug in a real code,
replace the two functions, or the two tables `colb_rom`/`shf_rom` in
`windowed_decoder` that they fill.

## Window schedule

This is the part that takes the most care. It lives in `window_ctrl`. Think
of the decoder as a ring of `S = W + MU = 15` sub-block slots of LLR memory
and a ring of `W = 13` block-row slots of check memory. A frame runs in steps
`s = 0 .. L+W+MU-1`, and each step has two phases:

**LOAD** takes `n/Z = 250` clocks, one word of 30 LLRs per clock.

* Sub-block `s` is written into LLR slot `s mod S`.
* The same clock reads the word it overwrites, which is sub-block `s-S`. That
  sub-block is leaving the window, and the signs of its posteriors go out as
  hard decisions.
* Check slot `s mod W` is cleared, because block row `s` is entering the
  window.
* For `s >= L`, no input is needed and the zeros of the termination are
  written.
* For `s < S`, nothing is output.
* If the noise generator has no word ready, the phase waits and `stall` is
  high.

**SWEEP** takes `W·MB = 650` clocks. The window holds the block rows
`t0 = s-W+1 .. s`. Each of the two engines updates one circulant block row,
that is 30 checks, per clock:

* Engine 0 walks the whole window from its oldest row to its newest.
* Engine 1 walks the whole window too, starting `OFF = 6` rows (6m checks)
  further on and wrapping around.

A block row touches sub-blocks `t-2..t`. The engines are 6 rows apart one way
and 7 the other, so they never read or write the same sub-block in the same
clock. This is why the module checks `OFF >= MU+1` and `W-OFF >= MU+1` at
elaboration.

Each engine visits all `W` window rows in one sweep, so every row is updated
twice per step, once by each engine, at two different points of the sweep. A
block row stays in the window for `W` steps, so each check is updated `2W`
times before the sub-blocks it sees leave. The last step only loads:
its sweep would update rows whose results never leave. A frame therefore takes

    (L+W+MU)·n/Z + (L+W+MU-1)·W·MB  clocks  (+ input stalls)
    = 105·250 + 104·650 = 93,850 clocks at the defaults

plus whatever the noise generator costs. The generator makes two samples per
clock, so one input word takes 15 clocks. The 90 input sub-blocks therefore
add about 300,000 stall clocks. The full-size simulation measured 407,605
clocks for one frame, against 407,590 predicted.

The slot arithmetic handles rows and sub-blocks before 0 and after `L-1`
(`sw_t` is signed). Every edge that points at such a sub-block is marked
*known* and masked in the engines.

A sweep never overlaps a load. Decoding and loading are strictly
sequential, which is simpler than overlapping them. The price is that a step takes
250 + 650 clocks, where an overlapped design would need only 650.

## Layered scaled min-sum and the compressed check state

`dec_engine` updates one block row, i.e. `Z = 30` checks of degree 18, in one
clock with `Z` copies of `cn_minsum`. It works in four steps:

1. It reads the 18 posterior words (one per circulant) from the LLR memory.
2. It rotates each word by the circulant's shift so that lane `q` holds the
   18 posteriors of check `q`.
3. It updates all 30 checks.
4. It rotates the results back and writes them to the same 18 addresses.

The check state is the compressed min-sum form. It stores nothing per edge
except one sign:

| field  | width | meaning                                   |
|--------|-------|-------------------------------------------|
| `min1` | 4     | smallest scaled magnitude                 |
| `min2` | 4     | second smallest                           |
| `idx`  | 5     | edge holding `min1`                       |
| `sp`   | 1     | product of all signs                      |
| `sgn`  | 18    | sign of each edge's variable-to-check msg |

That is 32 bits per check, 960 bits per memory word. The old
check-to-variable message of edge `e` is rebuilt from the state:
`(e == idx ? min2 : min1)`, with sign `sp ^ sgn[e]`. `cn_minsum` computes
four things:

* `Q_e = P_e − R_old_e` for each edge,
* `|Q_e|` clipped to 20,
* the new minima, index and signs,
* the new messages `R_new_e = 0.75 · (min)`, rounded as `(3x+2)>>2`. The new
  posteriors are `P_e = Q_e + R_new_e`.

Known edges take part as `Q = +127`. They never become the minimum and never
change sign, and their posteriors are not written back.

### Why the posterior is 8 bits

In a layered decoder the stored posterior must stay equal to the channel
value plus the sum of all the stored check messages. If the posterior
saturates, that identity breaks. The next subtraction then produces a wrong
`Q`, which can flip a bit that was already correct.

With 6-bit posteriors this design first diverged, producing negative
posteriors from all-positive input. The formats are now chosen so that
saturation cannot happen:

* the channel LLR is at most 7,
* a stored message is at most `0.75·20 = 15`,
* a variable has at most 6 edges,
* so a posterior is at most `7 + 6·15 = 97`, which is below 127.

## Memories

* `llr_memory`: `S·n/Z = 3750` words of 30 × 8 bits (about 0.9 Mbit).
  * It has 36 read and 36 write ports: 18 per engine, one per circulant of
    the row being updated. Reads are asynchronous.
  * As RTL it is a plain array. An FPGA or ASIC implementation would split
    it into banks, one per column block, which is possible because a block
    row never touches the same column block twice.
* `cn_msg_memory`: `W·MB = 650` words of 30 check states (about 0.62 Mbit),
  with one read/write port pair per engine. In LOAD, port 0 clears the row
  entering the window.
* `windowed_decoder` asserts that no two write ports hit the same address
  in the same clock.

## Noise lane

* `urng_taus`: a taus88 combined Tausworthe generator, 32 bits per clock.
  It is seeded from 96 bits at reset. Bit 4 of each seed word is forced to 1
  to avoid the forbidden all-small states.
* `box_muller`: maps two uniform words to two independent N(0,1) samples.
  * It looks up a radius `sqrt(−2 ln u1)` and a `cos(2π u2)` in 1024-entry
    tables. The tables are computed at elaboration; `sin` is read from the
    cosine table a quarter turn away. Then it multiplies.
  * It has two pipeline stages. Outputs are Q3.12.
  * The radius table ends at about 3.9σ, so the Gaussian tail beyond that is
    missing. At the error rates a simulation reaches this hardly matters. For
    a hardware run aimed at 1e-12, widen `U_W` or replace the radius table
    with a tail-accurate method.
* `llr_scaler`: `llr = sat±7(round(z·scale + offset))`, with two Q4.12
  operands:
  * `scale = 2/(σ·δ)` is shared by all lanes;
  * `offset = 2/(σ²·δ)` is set per lane;
  * `δ` is the quantizer step, so a channel LLR of `k·δ` maps to level `k`.
* `gaussian_llr_gen`: two samples per clock, packed into 30-sample words and
  offered with valid/ready. It stops its generators while the consumer is
  not ready, so no sample is lost and the sequence does not depend on the
  decoder's timing.

## Statistics

For each output word, `error_stats` adds 30 to a 48-bit bit counter and the
number of ones to a 48-bit error counter. Each word that contains an error
pushes a record `{frame[15:0], sub-block, word, 30-bit error mask}` into a
16-deep FIFO, which the host reads with `pos_valid`/`pos_ready`. A full FIFO
drops the record and increments `ovf_count`. A synchronous `clear` resets all
of it.

## Top level: `sc_ldpc_platform`

The top holds `D` lanes (default 1), each a generator, a decoder and a
statistics unit. Its ports are the host's configuration and status signals:

* `cfg_scale`;
* per lane: `cfg_offset`, the seeds `cfg_seed_a`/`cfg_seed_b` and
  `cfg_lane_en`;
* `start` with `num_frames`;
* `busy` and `frames_done`;
* per-lane counters: bits, errors, overflows, and clocks stalled waiting for
  noise;
* the error-record FIFO outputs.

A frame starts on all enabled lanes together. The next frame starts when all
of them have finished. The host interface itself (a PC link) is left out: it
is a bus to a computer and has no function to implement here.

## Verification

Each module has a self-checking testbench in `tb/` that compares it against
an independent model (`tb_ref_pkg` holds the shared reference functions):

| testbench | what it checks |
|---|---|
| `tb_urng_taus` | 4000 outputs against a software taus88, with enable gaps |
| `tb_box_muller` | 20000 sample pairs against the formula at the bin centres, latency, hold, mean and variance |
| `tb_llr_scaler` | 20000 random operands against an integer model |
| `tb_gaussian_llr_gen` | word sequence with and without back-pressure identical, and word rate |
| `tb_cn_minsum` | 90000 random check updates against a sorting reference |
| `tb_dec_engine` | random words, shifts, known-edge masks and states (Z = 6), every written-back element against the reference |
| `tb_llr_memory`, `tb_cn_msg_memory` | multi-port reads and writes against an array model |
| `tb_window_ctrl` | every slot, row and output index against a re-derived schedule, and the frame length |
| `tb_windowed_decoder` | 5 frames at a small size (Z=6, MB=4, W=7, L=10), all-zero and all-one code words with weak wrong-signed LLRs, with and without input stalls: every decoded bit, output order, frame length |
| `tb_error_stats` | counters and records against a scoreboard, forced FIFO overflow |
| `tb_sc_ldpc_platform` | 2 lanes, reduced size. Stalls, back-pressure, correction, records, overflow, back-to-back frames and a disabled lane each must occur |
| `tb_sc_ldpc_platform_full` | default parameters, one whole frame (675,000 bits) at Eb/N0 = 4 dB |

The full-size run takes about 20 s compiled. It saw 9568 wrong-signed channel
LLRs, and 42 bit errors remained after decoding. The remaining errors are far
more than the published code reaches. That reflects the ad-hoc circulant
formula above, not the schedule: the same RTL with a designed matrix would
only need new tables.

To simulate with plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/sc_ldpc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sc_ldpc_platform_full.sv \
        --top-module tb_sc_ldpc_platform_full
    obj_dir/Vtb_sc_ldpc_platform_full

Every testbench ends with `TB_RESULT checks=N failures=M`.

## Departures and choices

Follows the published platform:

* the code family (μ=2, d_c=18, 20 %/80 % degree-6/degree-3 variables, rate
  4/5);
* n = 7500, 30×30 circulants, L = 90;
* W = 13, two engines 6m checks apart, one pass per window position;
* layered scaled min-sum with compressed check storage;
* 15-level channel LLRs;
* the noise path of uniform generators, Box-Muller, a shared multiplier and
  a per-lane adder;
* BER counting with error positions.

This design's own choices:

* the circulant positions and shifts (not optimised);
* all bit widths, and the scaling factor 0.75 with its rounding;
* a window memory of W+MU sub-blocks. The paper's count is (W+MU−1)·n. One
  extra slot lets a sub-block leave the memory while its successor is
  written.
* load and sweep as separate, non-overlapped phases;
* the truncated Box-Muller tables;
* the record format and FIFO depth;
* the frame loop;
* one lane by default.

Not built:

* the host interface;
* the regular μ=1 code with d_c=20, which needs other package constants and
  tables;
* the block-code reference decoder the paper compares against.
