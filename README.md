# Two-step graph convolution for event-camera GCNNs on FPGA

An event camera reports brightness changes as a sparse stream of events
`(x, y, t, polarity)`. One way to classify such data on an FPGA is a graph
convolutional network: every event becomes a vertex of a 3-D graph over
`x`, `y` and time, edges join vertices that are close to each other, and
graph-convolution layers compute a feature vector per vertex. After the
first layers and a 4×4 pooling step, the graph is kept as a sequence of
*temporal channels* (TCs): each TC is a `SIZE × SIZE` array of vertex slots
that covers `TIME_WINDOW / SIZE` of time. A synchronous convolution layer
must finish one TC before the next one arrives.

The layer computes PointNetConv:

    out_i = ReLU( max over j in {i} ∪ N(i) of  phi( x_j , p_j − p_i ) )

where `phi` is a linear layer applied to the neighbour's features `x_j`
extended by its position difference. After pooling, the neighbourhood
radius is 1, so a vertex has at most 17 neighbours: 8 in its own TC and 9
in the previous TC.

Computed directly, every input vector goes through the multiplier once for
each edge that uses it. This RTL implements the **two-step** scheme instead.
Because `phi` is linear, it can be split as `phi(x_j, d) = W·x_j + V·d`,
and `d = p_j − p_i` only ever takes a few values:

* **Step 1** multiplies each vertex of the TC once: `phi_j = requant(W·x_j)`.
  The results go into a feature buffer.
* **Step 2** reads, for every vertex, its own `phi` and those of its
  neighbours from the buffer of the current TC and the buffer of the
  previous TC. It adds the constant vector `V·d` from an 18-entry look-up
  table, takes the element-wise maximum and applies ReLU.

Step 1 costs `OUT_DIM / N_MUL` cycles per position, where `N_MUL` is the
number of multiplier lanes. Step 2 costs 5 cycles per position, because it
gets 4 reads per cycle from two dual-port buffers. So one TC takes about
`SIZE² · (OUT_DIM/N_MUL + 5)` cycles. Computing every edge separately
would cost `SIZE² · 9 · OUT_DIM` cycles with two multipliers. The saving
lets a layer meet its deadline with far fewer multipliers, at the cost of
two BRAM buffers.

## Block structure

```
             in_we/in_addr/in_data            tc_valid / tc_ready
                      │                              │
              ┌───────▼────────┐               ┌─────▼──────┐
              │ tc_input_ram   │ 2 banks       │ controller │ IDLE→STEP1→STEP2
              │ (input TC)     │               └────────────┘
              └──┬─────────┬───┘
        features │         │ valid + edge mask
          ┌──────▼──────┐  │
          │ step1_self  │  │     N_MUL × vec_mul (dot product + requant)
          └──────┬──────┘  │
            write│         │
   ┌─────────────▼──┐  ┌───▼────────────────────────────────────┐
   │ fmap_buffer 0  │  │ step2_gather                           │
   │ fmap_buffer 1  ├──►  4 reads/cycle → delta_append (LUT +)  │
   │ (cur / prev,   │  │               → max_relu → out_*       │
   │  swap per TC)  │  └────────────────────────────────────────┘
   └────────────────┘
```

| module | role |
|---|---|
| `gcn_pkg` | widths, the vertex header struct, edge-mask and LUT index helpers |
| `requant` | `sat8((acc·mult + 2^(shift−1)) >>> shift)` |
| `vec_mul` | one output element per clock: 16 signed 8×8 products, adder tree, requantiser; 2 register stages |
| `tc_input_ram` | two banks of `SIZE²` vertex words: one is written by the upstream layer while the other is processed |
| `fmap_buffer` | `SIZE²` words, each a whole `OUT_DIM × 8`-bit vector; port A read/write, port B read |
| `step1_self` | step-1 sequencer, `N_MUL` `vec_mul` lanes, weight registers, assembles one vector per position |
| `step2_gather` | step-2 address schedule, edge and border masking, `delta_append`, `max_relu` |
| `delta_append` | 18-entry position LUT with 4 lookup-and-add lanes |
| `max_relu` | running element-wise max over 4 candidates per cycle, then ReLU and clamp |
| `two_step_gconv` | top: controller, bank and buffer ping-pong, port multiplexing |

## Data formats

**Features** are signed 8-bit integers. The quantisation is symmetric, with
no zero point. The output of ReLU is clamped to `[0, 127]`, so it is again
a valid signed 8-bit input for the next layer.

**Vertex word** (`in_data`, `WORD_W = 1 + 17 + 8·IN_DIM` bits):

| bits | field |
|---|---|
| `[WORD_W−1]` | vertex present |
| `[WORD_W−2 −: 17]` | edge mask |
| `[8·IN_DIM−1 : 0]` | features, element `i` at `[8i +: 8]` |

**Neighbour numbering.** Neighbour `n = 0…8` lies at `dx = n%3 − 1`,
`dy = n/3 − 1`. So `n = 4` is the vertex's own position.

**Edge mask.**

* Bits 0–7 enable current-TC neighbours `n = 0,1,2,3,5,6,7,8`. The vertex
  itself (`n = 4`) is always included.
* Bits 8–16 enable previous-TC neighbours `n = 0…8`.
* A bit that points outside the array is ignored.

**Addresses.** A position's address is `y·SIZE + x`. The upstream writes all
`SIZE²` positions of a TC, with present = 0 for empty ones.

**Position LUT.** Entry `n` holds `V·(dx, dy, 0)` for current-TC neighbour
`n`. Entry `9 + n` holds `V·(dx, dy, −1)` for previous-TC neighbour `n`.
Each element is a signed 8-bit value in the requantised scale.
Entry 4 belongs to the self-loop, where `d = 0`. It is normally zero, but a
layer bias can be folded into it; the bias must then be added to all 18
entries.

**Output stream.** One word per position, in raster order:

* `out_addr` is the position;
* `out_vertex` says whether a vertex is present;
* `out_edges` is the vertex's edge mask, passed through unchanged;
* `out_feat` holds the result vector.

Empty positions give zeros.

## The two steps in time

**Step 1** walks every position, empty or not. This keeps the TC time
fixed. For each position it runs `G = OUT_DIM/N_MUL` cycles; in cycle `g`,
lane `l` computes output element `g·N_MUL + l`. The input RAM is read again
in every cycle, so no stall is needed between vertices. The pipeline is:

1. issue the address and select the weight column;
2. RAM data arrives and the product tree runs;
3. accumulator register;
4. requantiser register;
5. buffer write of the assembled vector.

`done` comes `SIZE²·G + 3` cycles after `start` is taken.

**Step 2** spends exactly 5 cycles on each position. Ports A and B of
*both* buffers receive the same two neighbour addresses:

| cycle | port A | port B |
|---|---|---|
| 0 | n = 0 | n = 1 |
| 1 | n = 2 | n = 3 |
| 2 | n = 4 (self) | n = 5 |
| 3 | n = 6 | n = 7 |
| 4 | n = 8 | (idle) |

So each cycle yields up to 4 candidates: two from the current TC and two
from the previous TC. In cycle 0 the vertex header (present bit and edge
mask) is read from the input RAM; it is held for the other four cycles.
One cycle after the read, each candidate is enabled or not (present, inside
the array, edge bit set). It then gets its LUT vector added, with 9-bit
sums, and is folded into the running maximum. The ReLU result is
registered on the fifth cycle. `done` and the last output word come
`5·SIZE² + 1` cycles after `start`.

**A TC, end to end.** A TC takes `SIZE²·(OUT_DIM/N_MUL + 5) + 8` cycles
from the clock edge that accepts it (`tc_valid && tc_ready`) to `tc_done`.

**Buffers.** The two feature buffers trade roles on every accepted TC. The
buffer written by step 1 of TC `k` is the previous-TC buffer during TC
`k+1`. Step 1 of TC `k+1` then overwrites the other buffer, whose content
(TC `k−1`) is no longer needed.

**Input banks.** The two input banks also alternate, so the upstream can
write TC `k+1` at any time while TC `k` is being processed.

## Meeting the TC deadline

A TC arrives every `T_CC = TIME_WINDOW / (SIZE · clock period)` cycles; the
clock is 200 MHz (5 ns). Choose `N_MUL` so that
`SIZE²·(OUT_DIM/N_MUL + 5) + 8 ≤ T_CC`. `N_MUL` must divide `OUT_DIM`. The
top warns at elaboration when the budget is exceeded.

| time window | SIZE | OUT_DIM | N_MUL | cycles / TC | T_CC |
|---|---|---|---|---|---|
| 50 ms | 64 | 64 | 2 (default) | 151 560 | 156 250 |
| 50 ms | 64 | 32 | 1 | 151 560 | 156 250 |
| 30 ms | 64 | 64 | 4 | 86 024 | 93 750 |
| 100 ms | 32 | 128 | 1 | 136 200 | 625 000 |
| 100 ms | 64 | 128 | 2 | 282 632 | 312 500 |
| 100 ms | 128 | 32 | 8 | 147 464 | 156 250 |

All rows were simulated, with every output checked and the cycle count
measured. The multiplier counts are the minimum that the cycle formula
allows.

The default build has `SIZE = 64`, `IN_DIM = 16`, `OUT_DIM = 64`,
`N_MUL = 2`. It holds one 16 → 64 layer for a 256×256 input graph pooled
4×4 and a 50 ms window.

## Arithmetic and accuracy

Each element of `phi_j` is rounded to 8 bits *before* the position term is
added. A direct implementation rounds once, after the whole sum. The two
orders can therefore differ by one LSB in some output elements. This is
inherent to the method; the testbenches use the two-step order as the
reference.

Requantisation uses one unsigned 16-bit multiplier and a 5-bit right shift
per layer. It rounds half up and saturates to `[−128, 127]`.

## Interface

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset of control state (memories are not cleared) |
| `in_we`, `in_addr`, `in_data` | in | write a vertex word into the free input bank |
| `tc_valid` / `tc_ready` | in / out | hand over the written TC. `tc_ready` is high only while idle; `tc_valid` must stay high until accepted (assertion) |
| `wgt_we`, `wgt_addr`, `wgt_wdata` | in | load weight column `wgt_addr` (`IN_DIM` signed bytes) |
| `lut_we`, `lut_addr`, `lut_wdata` | in | load position-LUT entry `lut_addr` (`OUT_DIM` signed bytes) |
| `rq_mult`, `rq_shift` | in | requantisation multiplier and shift |
| `out_valid`, `out_addr`, `out_vertex`, `out_edges`, `out_feat` | out | output stream |
| `tc_done` | out | pulses after the last output word of a TC |

Load parameters only while the layer is idle (an assertion checks this).
Before the first TC after reset the previous-TC buffer holds no data, so
that TC must not set any previous-TC edge bits (8–16).

## What is from the method, and what is this implementation's own

These parts follow the method's description:

* the split into a self-loop step and a gather step;
* two BRAM buffers for the current and previous TC;
* reading 18 candidates in 5 cycles through two dual-port buffers;
* the position term as a look-up table;
* max, then ReLU;
* one output element per multiplier per cycle;
* parallel multipliers when one lane is too slow;
* the sizes 64×64, 16 → 64 (or 32), 50 ms, 200 MHz.

These are choices made here:

* the vertex word and edge-mask encoding;
* the read schedule of step 2;
* the two-bank input memory and the valid/ready hand-over;
* loading weights and the LUT at run time (instead of constant weights);
* the requantisation formula;
* clamping the output to 127;
* 18 LUT entries, since `dt = +1` cannot occur in a graph whose edges point
  to earlier vertices;
* processing empty positions;
* the output stream format.

The layers around this one are not included: event-to-graph generation,
the asynchronous first convolution and the 4×4 pooling that forms TCs.
This layer expects their output as TCs written through `in_*`.

## Simulating

All code is SystemVerilog-2017 and simulates with Verilator 5. For example,
the end-to-end test at the default size:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/gcn_pkg.sv tb/gcn_ref_pkg.sv tb/tb_two_step_gconv.sv \
  --top-module tb_two_step_gconv -o sim
./obj_dir/sim
```

Every testbench ends with `TB_RESULT checks=N failures=M`. The testbenches
are:

* **Block tests** (`tb_requant`, `tb_vec_mul`, `tb_tc_input_ram`,
  `tb_fmap_buffer`, `tb_delta_append`, `tb_max_relu`, `tb_step1_self`,
  `tb_step2_gather`). Each checks a block against integer reference
  arithmetic in `gcn_ref_pkg` and checks the cycle counts given above.
* **`tb_two_step_gconv`** runs three TCs through the default-size layer,
  about 15 s of simulation. It checks every output element and the cycle
  count, and that each TC fits its 156 250-cycle budget. It also counts
  these events and fails if any never happens:
  * a stalled hand-over;
  * writing the next TC during processing;
  * previous-TC neighbours;
  * border edges that must be ignored;
  * empty positions;
  * negative maxima;
  * clamping at 127;
  * saturated requantisation.
* **`tb_gconv_workloads`** runs the other five rows of the table above. The five
  configurations run side by side, about 1.5 min. It is built from
  `gconv_workload_run`.

## Limits

* Only checked in simulation against a reference model written alongside
  it; no FPGA resource or timing results.
* The reference uses the same encodings and quantisation choices as the
  RTL. It therefore cannot reveal a difference from the original network's
  exact number format.
* Weight and LUT storage are plain registers. With constant weights,
  multiplication by constants would make the `vec_mul` lanes much smaller
  than generic 8×8 multipliers.
