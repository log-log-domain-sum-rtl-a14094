# Log-log domain sum-product LDPC decoder

Information reconciliation in long-distance continuous-variable QKD uses LDPC
codes of very low rate, around 0.01, and very long blocks, around 10^6 bits.
At that rate the messages a check node sends back are tiny, because they are
roughly the product of many small input magnitudes. A fixed-point decoder
therefore needs many fraction bits just so those messages do not round to
zero, and with millions of edges that precision decides how big the message
memory is.

This decoder stores each LLR `L` as its sign plus the **logarithm** of its
magnitude, offset by a constant: `x = ln|L| + b`. A uniform grid on `x` is
fine near `|L| = 0` and coarse for large `|L|`, which is the precision
profile the decoder needs. With 3 integer bits, 6 fraction bits and `b = 5`,
one message is 10 bits (`FP(1,3,6)`). It covers `|L|` from `e^-5 ≈ 0.0067` to
`e^3 ≈ 20`. A conventional fixed-point SPA decoder of similar accuracy on the
same code uses `FP(1,3,8)`, which is 12 bits.

The node updates stay in the log domain throughout:

* The **check-node update** uses an approximation of the sum-product rule
  that fits low-rate codes. It needs only a minimum, one additive
  piecewise-linear function and a sign product.
* The **variable-node update** adds LLRs pairwise with the
  log-sum/difference-exp function. It needs one table lookup per addition.

The RTL implements that algorithm as a serial, memory-based decoder whose
code structure is loaded at run time. The default sizes hold the rate-0.01
code with N = 998400.

## 1. Message format

```
 bit 9      bits 8..0
 sign       x = ln|L| + b  as unsigned Q3.6   (x = code / 64)
 1 = L < 0  code 0 -> |L| = e^-5,  code 511 -> |L| = e^(511/64 - 5) ≈ 20
```

* The sign bit equals the hard decision: bit value 1 for a negative LLR.
* The offset `b` gives the log value room below zero without a sign bit of
  its own. This is why the format has one sign bit, not two.
* Both node updates take offset inputs and produce offset outputs, so `b` is
  added once, when the channel LLR enters. The one place it matters again is
  inside `g()` (section 2).
* Every result is clipped to the representable range:
  * a value smaller than `e^-5`, or an exact cancellation, becomes code 0;
  * a value larger than about 20 becomes code 511.

  The clipping rule is a choice of this design.

The format is set by three parameters: `INT_W`/`INTW`, `FRAC_W`/`FRW` and
`B_OFF`/`BOFF`. Their defaults are in `llsp_pkg`. For the rate-0.1 code,
`FRW = 4` gives the 8-bit `FP(1,3,4)` format.

## 2. Check-node update (`cn_g`, `cn_proc`)

For a check node with inputs `x_k` and output to neighbour `i`:

```
x_out(i)   = x_m + sum over l != i, m of g(x_l - b)
sign_out(i) = XOR of the signs of all inputs except i
m          = the input of smallest magnitude among those other than i
```

`g(v)` approximates `ln(tanh(e^v / 2))`. That term is the log of the factor
by which one input scales the output in the approximate check rule
`L_out ≈ (smallest |L|) * product of tanh(|L_l| / 2)`. Four linear segments
are used:

| segment            | g(v)             |
|--------------------|------------------|
| v ≤ -0.76          | v - 0.694        |
| -0.76 < v ≤ 0.538  | 0.833 v - 0.822  |
| 0.538 < v ≤ 1.414  | 0.389 v - 0.583  |
| v > 1.414          | 0                |

`cn_g` rounds the thresholds and biases to the message grid and the two
slopes to 8 fraction bits. Its error against the exact function is below
0.08 over the whole range, which the testbench checks.

`cn_proc` processes a node in two passes.

**Pass 1.** While the `d_c` inputs stream in, one per clock, the unit keeps:

* each input and its `g` value;
* the two smallest magnitudes, and the position of the smallest;
* the running sum `G` of all `g` values;
* the XOR of the signs.

**Pass 2.** Each output is formed as a total minus the terms it must leave
out:

```
i is not the minimum:  x_min1 + G - g(x_min1) - g(x_i)
i is the minimum:      x_min2 + G - g(x_min1) - g(x_min2)
```

Every `g` is ≤ 0, so an output can only fall below its minimum, never exceed
it. An output that falls below zero clips to code 0. The same unit also XORs
the hard decisions of the node's variable nodes, which gives one row of the
syndrome `H x^T` for the stopping test.

## 3. Variable-node update (`vn_fpm`, `vn_proc`)

`vn_fpm` adds two log-domain LLRs `(s_a, x)` and `(s_b, y)`:

```
same signs:       max(x, y) + ln(1 + e^-|x-y|)      sign = s_a
different signs:  max(x, y) + ln(1 - e^-|x-y|)      sign = s_a if x >= y else s_b
```

The two correction terms come from two tables with 512 entries each, one per
difference code. The tables are built at elaboration from the formulas, so
there is no data file. For the difference-of-zero entry, `ln(0) = -inf`, the
table holds a value that forces the result to code 0.

`vn_proc` handles one variable node in two passes:

1. It loads the channel message, then adds the node's check messages one per
   clock. The result is the a-posteriori LLR. Its sign is the hard decision.
2. For each edge it subtracts that edge's own message from the total, using a
   second `vn_fpm` with the own sign inverted. The result is the extrinsic
   message for that edge.

In the initial pass (`init_i`), the extrinsic message is the channel message
itself. This is the decoder's initialisation step.

**Accuracy limit.** This total-minus-own form is cheap for the very high
degrees in these codes: the rate-0.01 code has a node of degree 281. Its
limit is this: when a node's total clips at the largest magnitude, about 20,
its extrinsic messages lose accuracy. Highly reliable nodes are where this
happens.

## 4. Decoder organisation (`llsp_decoder`)

```
 llr_*  --> ch_log --> [channel RAM  N x 10]
                                  |
 cfg_*  --> [CN degree M] [edge->VN E] [VN degree N] [VN edge list E]
                                  |
              +---------- controller (flooding, one node at a time) ---------+
              |                                                              |
        vn_proc (VN pass) <--> [edge RAM  E x 10] <--> cn_proc (CN pass)     |
              |                                            |                 |
              +--> [hard-decision RAM N x 1] ------------->+ syndrome        |
                           |                                                 |
 hd_ra_i / hd_rd_o <-------+        busy_o done_o success_o iter_o <---------+
```

Each edge of the code has one word in the edge RAM. A VN pass writes the
variable-to-check messages into it. The following CN pass reads them and
overwrites the same words with check-to-variable messages, and so on. There
are two address tables, because the check side and the variable side walk the
same edges in different orders:

* **CN side.** Edges are numbered in check-node order: all edges of check 0,
  then all edges of check 1, and so on. A CN pass reads them consecutively
  and looks up each edge's VN index, which it needs for the hard decision.
* **VN side.** A VN pass walks a second table. For every VN, in VN order, it
  lists the numbers of that VN's edges.

The degree tables tell the controller how many entries belong to each node.

**Decoding sequence.**

1. An initial VN pass copies every channel message onto its edges. The hard
   decisions are the channel signs.
2. A CN pass updates every check node and accumulates the syndrome from the
   hard decisions of the last VN pass.
3. After the CN pass:
   * if no check failed, the decoder stops with `success_o = 1`;
   * if `max_iter_i` iterations are done, it stops with `success_o = 0`;
   * otherwise it runs a full VN pass (new messages and new hard decisions),
     counts one iteration and returns to step 2.

A frame whose channel decisions already form a codeword stops with 0
iterations.

**Timing.** The controller issues one memory read per clock. Each node adds a
few pipeline cycles:

| step                   | cycles      |
|------------------------|-------------|
| VN, initial pass       | `dv + 6`    |
| VN, later passes       | `2 dv + 9`  |
| CN                     | `2 dc + 5`  |
| decision, per CN pass  | `1`         |

Whole decoding, with E edges, N VNs and M CNs:

```
cycles = (E + 6N) + (2E + 5M + 1) + iter * ((2E + 9N) + (2E + 5M + 1)) + 1
```

For the default code that is about 23 M cycles plus 30 M per iteration. The
testbenches check this count exactly.

**Host interface.**

* `cfg_we_i`, `cfg_sel_i`, `cfg_addr_i`, `cfg_data_i` write one word of one
  table. `cfg_sel_e` in `llsp_pkg` lists the tables.
* `llr_we_i`, `llr_addr_i`, `llr_i` write one channel LLR, in 16-bit two's
  complement with 10 fraction bits.
* `num_vn_i`, `num_cn_i` and `max_iter_i` describe the loaded code and the
  iteration limit.
* `start_i` starts a decoding. `done_o` pulses at the end, when `success_o`
  and `iter_o` are valid.
* Hard decisions are read back on `hd_ra_i` / `hd_rd_o`, with one cycle of
  latency.

Writes are accepted only while `busy_o` is low, and assertions flag writes
made while busy.

`ch_log` converts each LLR as it is written: `ln|L| = ln2 * (p - 10) +
ln(1 + m)`. Here `p` is the position of the leading one and `m` the next 8
bits after it. Both terms come from small tables built at elaboration.

## 5. Codes and sizes

The codes are type-based protograph LDPC codes.

**Rate 0.01**, the default:

* The protograph has 100 variable nodes: two high-degree nodes A and B, and
  98 degree-1 nodes.
* It has 99 checks in seven types. Each entry gives repetitions × (edges to
  A, edges to B):
  `14 × (1,3)`, `1 × (2,3)`, `6 × (1,2)`, `6 × (1,4)`, `18 × (0,3)`,
  `35 × (0,2)`, `19 × (0,4)`.
* Every type except `(2,3)` also has its own degree-1 variable node.

That gives 407 edges, check degrees 3 to 6, and VN degrees 1, 28 (A) and
281 (B). Lifted by 9984:

| N      | M      | E       |
|--------|--------|---------|
| 998400 | 988416 | 4063488 |

These are the defaults `N_MAX`, `M_MAX`, `E_MAX`, `DC_MAX = 6` and
`DV_MAX = 281`.

**Rate 0.1:**

* 10 VNs, 9 checks, 37 edges;
* lifted by 12800: N = 128000, M = 115200, E = 473600;
* check degree ≤ 5, VN degree ≤ 25.

This code fits the default build. Its own message format needs `FRW = 4`.

The edge counts above come from reading the published protograph drawings:
each number beside a check is the number of parallel edges to that side's
high-degree node, and an unlabelled line is one edge. This reading gives
exactly the stated rates.

The circulant shifts of the lifted codes are not published. That is why the
decoder takes its code structure from tables rather than from fixed wiring.
The testbenches generate the codes with random shifts.

**Storage at the default size**, about 234 Mbit in total:

| memory           | size                           |
|------------------|--------------------------------|
| edge messages    | 4063488 × 10 bits = 40.6 Mbit  |
| channel messages | 998400 × 10 bits               |
| hard decisions   | 998400 × 1 bit                 |
| code tables      | 4063488 × (20 + 22) bits, plus degree tables |

The code tables take most of that. A quasi-cyclic decoder would compute
those addresses from shift values instead of storing them.

## 6. Departures from the source algorithm, and open points

The algorithm defines the node equations, the `g()` segments, the table
method and sign rule of the VN adder, the message format and offset, and the
stopping rule. Everything else is this design's choice:

* the serial one-node-at-a-time architecture and the in-place edge memory;
* the loadable tables and the host interface;
* the total-minus-own form in both node units;
* the clipping rules;
* the rounding of the `g()` constants and of the tables;
* the channel-LLR input format and the logarithm circuit;
* making the iteration limit a run-time input (the algorithm does not give a
  value).

Not covered:

* Throughput is about one edge per clock per pass, far below a parallel
  FPGA decoder.
* The frame-error-rate curves that motivate the format have not been
  reproduced. The testbenches show correct decoding at moderate SNR, not
  performance near capacity (Es/N0 ≈ -21 dB).

## 7. Files and simulation

| file | content |
|------|---------|
| `rtl/llsp_pkg.sv` | format defaults, table selector, controller states |
| `rtl/ch_log.sv` | channel LLR → log-domain message |
| `rtl/cn_g.sv` | piecewise-linear `g(x - b)` |
| `rtl/cn_proc.sv` | serial check-node processor with syndrome row |
| `rtl/vn_fpm.sv` | log-sum/difference-exp adder with sign rule |
| `rtl/vn_proc.sv` | serial variable-node processor |
| `rtl/msg_ram.sv` | 1W1R synchronous RAM used for every memory |
| `rtl/llsp_decoder.sv` | top level: memories, tables, controller |
| `tb/ldpc_code_pkg.sv` | protograph lifting and Gaussian noise for the testbenches |
| `tb/*_tb.sv` | one self-checking testbench per unit, plus system tests |

The system tests:

| testbench | what it runs | time |
|-----------|--------------|------|
| `llsp_decoder_tb` | both codes at small lifts (N = 400 and N = 80). Noiseless, moderate-SNR and pure-noise frames, with exact cycle counts and an independent syndrome check. Counts each mechanism: stop before/after iterating, iteration limit, channel/CN/VN clipping, code reload. | under 1 s |
| `llsp_r01_tb` | the rate-0.1 code at N = 128000 in `FP(1,3,4)` | about 15 s |
| `llsp_full_tb` | one decoding of the N = 998400 rate-0.01 code with every parameter at its default | about 1 min, 95 MB |

Every testbench prints `TB_RESULT checks=N failures=F`.

Run any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/llsp_pkg.sv tb/ldpc_code_pkg.sv tb/llsp_decoder_tb.sv \
    --top-module llsp_decoder_tb
./obj_dir/Vllsp_decoder_tb
```

The unit testbenches (`cn_g_tb`, `vn_fpm_tb`, `ch_log_tb`, `cn_proc_tb`,
`vn_proc_tb`, `msg_ram_tb`) compare against floating-point models of the
same equations. `ldpc_code_pkg.sv` is not needed for them.

To change the format, override `INTW`, `FRW` and `BOFF` on `llsp_decoder`.
All tables and constants are recomputed from them.
