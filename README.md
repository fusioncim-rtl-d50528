# FusionCIM attention engine in SystemVerilog

Causal self-attention, `softmax(Q K^T) V`, is usually run as three separate
steps with large intermediate matrices between them. Compute-in-memory (CIM)
accelerators have mostly kept K and V stationary in the arrays. That forces
K to be transposed and the arrays to be rewritten for every new query block.

This design turns that around. A block of 128 queries is held stationary
inside one *hybrid engine*, and its 128 output rows stay stationary inside
the same engine. Keys and values stream past them exactly once. Each engine
chains three units into one pipeline, so no score or probability matrix is
ever stored:

1. **IP-CIM** (inner-product CIM): a 128 x 128 array that holds Q. It
   computes the 128 scores `s_i = Q_i . k` of one key vector.
2. **SoftMax macro**: 128 online ("safe") softmax units, one per query row.
   Each turns a score into a probability `p_i` and, when the row maximum
   grows, into a rescale factor `alpha_i` for the outputs.
3. **OP-CIM** (outer-product CIM): a 128 x 128 array that holds the output
   tile. It performs `O_i <- alpha_i * O_i + p_i * v` in place for all 128 x
   128 elements at once.

Sixteen engines work side by side on 16 consecutive query blocks. A global
scheduler multicasts each key/value tile to every engine that needs it. The
tiles come from DRAM through a 1 MB global buffer that is filled ahead of
use.

The second idea is to choose the order in which keys arrive so that the
softmax rarely has to rescale the outputs. Attention scores tend to be
largest near the diagonal: recent tokens, and the query's own position.
Each engine therefore gets its own diagonal tile first, then the tiles
before it in descending order. Inside a tile, keys go from the last to the
first. The running maximum is then usually found early, and later keys seldom
raise it. Every raise costs an exponential and a rescale of a whole output row.

## Numbers and formats

| quantity | format |
|---|---|
| Q, K, V elements | signed 8-bit integers |
| score `s` | signed 23-bit integer (128 products of 8x8 bits) |
| probability `p`, rescale factor `alpha` | unsigned Q0.8 (255 stands for 1.0, saturating) |
| output element `O` | signed 16-bit word in an output bank, saturating |
| row sum `l` | unsigned 24-bit, kept next to the softmax unit of each row |

The score scale is set at run time. `ssh` gives `exp(-(d) / 2^ssh)` for a
score difference `d`. This covers the usual `1/sqrt(d_k)` factor together with
the integer scaling of Q and K.

The partial-sum quantiser `qsh` divides every `p*v` product by `2^qsh` before
it is added into the 16-bit word. That keeps long rows in range.

After a pass, the host divides each row of `O` by its `l` and multiplies by
`2^qsh`. This gives the attention output in V's units. The design does not
perform that division; the row sums are read out next to `O`.

The exponential is computed as a power of two:

```
exp(-x) = 2^(-y),  y = x * log2(e)  (Q.14 fixed point)
2^(-y) = 2^(-n) * 2^(-f),   n = integer part,  f = fraction
2^(-f) = sum_k c_k f^k,     c_k = (-ln 2)^k / k!,  k = 0..8
```

The polynomial is evaluated by Horner's rule, one coefficient per clock, over
eight clocks. The coefficients are 24-bit Q2.22 words in a small table, and
are computed when the design is elaborated. The final shift by `n` and the
rounding give the 8-bit result. Over the whole input range the error is
within one LSB of the rounded true value.

## The hybrid engine pipeline

All three stages use bit-serial 8-bit arithmetic and take eight clocks per
vector. Every stage can therefore accept a new vector every eight clocks, and
three consecutive keys are in flight at once:

```
clock (x8)   0      1      2      3 ...
IP-CIM       k7     k6     k5     k4
SoftMax             s7     s6     s5
OP-CIM                     p7,v7  p6,v6
```

**IP-CIM.** Each unit stores four 8-bit query words (4 x 8 bank); `blk`
selects one as the wordline. On every clock the macro drives one bit of each
key element down the columns, most significant bit first. Each unit gates its
query byte with that bit (a 1b x 8b multiply). The row's adder tree sums the
128 products, and the shift-and-add periphery accumulates
`acc <- 2*acc + tree`. The sum is negated on the MSB cycle, because INT8 has a
negative weight there.

A `start` at clock edge E0 gives the scores and `score_valid` at E8.

**SoftMax.** Each unit compares the new score with its running maximum `m`
at the start edge, and classifies the key:

- *masked*: in the diagonal tile, key index > row index. Gives `p = 0`; the
  state is unchanged.
- *first unmasked key of the pass*: `m = s`, `p = 1`, `alpha = 0` with
  rescale. This clears whatever the output row held before, so no separate
  clear of the OP-CIM is needed.
- *new maximum*: `m = s`, `p = 1`,
  `alpha = exp(m_old - s)`, `l <- l * alpha + 1`. This is a true rescale
  event; it is counted.
- *otherwise*: `p = exp(s - m)`, `l <- l + p`.

Each case needs only one exponential. The result appears 10 clocks after the
start edge: 9 for the exponential and one output register. A second
key-kind register keeps back-to-back keys apart.

**OP-CIM.** Each unit holds a 4 x 16-bit output bank. Over eight clocks it
receives one bit of `v_j` and one bit of `alpha_i` per clock. Two serial
accumulators form `p_i * v_j` and `O * alpha_i`. In the last clock the bank
word is written back as

```
O_new = sat16( (rescale ? (O * alpha) >> 8 : O) + (p * v) >> qsh )
```

The engine's `idle` output rises when its KV buffer is empty and all three
stages have drained.

**Engine control.** The KV buffer has two tile slots, so one tile can be
received while the other is computed on.

The intra-tile scheduler takes a freshly filled slot and issues its 128 keys
in reverse order. For each key it marks whether it belongs to the engine's
diagonal tile.

Two small FIFOs carry the key's index, slot and flags to the softmax stage
and the OP-CIM stage. The V vector is read from the slot when the softmax
result comes out. The slot is released after its last key has been read.

## Across engines: the schedule

One *pass* computes query tiles `q0 .. q0+15` of one head. Engine `h` holds
query tile `q0+h`.

KV tiles are sent from the highest (`q0+15`, needed only by engine 15) down
to tile 0. Tile `t` goes to every engine with `q0+h >= t`: a single network
flit carries a destination mask, and the network delivers it to all of them
(multicast). So at the start only engine 15 works. Each later tile reaches
one more engine, and from tile `q0` down all sixteen receive it. Every engine
sees its own diagonal tile first and then its earlier tiles in descending
order. Long sequences take several passes (q0 = 0, 16, 32, ...); the output
bank word `blk` lets up to four passes keep their results in the engines.

The **top scheduler** runs two counters over a ring of tile slots in the
global buffer:

- a *fetch* counter, which hands DRAM jobs (one tile = 128 KV pairs) to the
  memory controller as soon as a slot is free;
- a *consume* counter, which reads the tile back word by word and sends it
  over the network.

The consume side waits when a tile has not fully arrived. That is a
*prefetch stall*, counted in `stat_stall_prefetch`. Network back-pressure,
when any destination engine's KV buffer is full, is counted in
`stat_stall_noc`. The pass ends, and `done` pulses, when all tiles are sent,
the network is empty and every engine is idle. Query rows are loaded before
a pass through the same network, addressed to single engines.

The **memory controller** turns a job into DRAM beat requests: 512-bit beats,
four per KV pair. It assembles the beats into 2048-bit words, K in the low
half and V in the high half, and writes them into the global buffer
(4096 x 2048 bits = 1 MB).

## Files

| file | contents |
|---|---|
| `rtl/fusioncim_pkg.sv` | shared constants (sizes, formats) and the flit kind |
| `rtl/ip_cim_unit.sv`, `adder_tree.sv`, `ip_cim_macro.sv` | IP-CIM |
| `rtl/nl_lut.sv`, `exp_taylor_pe.sv`, `safe_softmax_unit.sv`, `softmax_macro.sv` | SoftMax macro |
| `rtl/op_cim_unit.sv`, `op_cim_macro.sv` | OP-CIM |
| `rtl/kv_buffer.sv`, `intra_tile_scheduler.sv`, `sync_fifo.sv`, `hybrid_engine.sv` | one engine |
| `rtl/noc.sv`, `global_buffer.sv`, `memory_controller.sv`, `top_scheduler.sv` | shared blocks |
| `rtl/fusioncim_top.sv` | the whole accelerator |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_fusioncim_top.sv` | end-to-end test, reduced size |
| `tb/tb_kv_pkg.sv`, `tb_attn_pkg.sv`, `dram_model.sv` | test data, floating-point attention reference, behavioural DRAM |

Each file opens with a description of its interface and timing. The unit
modules `ip_cim_unit` and `op_cim_unit` describe a row of `N` units. A
macro places one instance per row with `N = 128`. This keeps a full
16-engine model at about ten thousand instances instead of half a million,
which both simulators and synthesis front ends need.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself,
with a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fusioncim_pkg.sv tb/tb_kv_pkg.sv tb/tb_attn_pkg.sv tb/tb_fusioncim_top.sv \
    --top-module tb_fusioncim_top -o sim && obj_dir/sim
```

Verilator finds the other modules by file name in the `-I` directories.

The block testbenches check against values computed independently in the
testbench: dot products, `$exp`, a floating-point attention reference. They
also check the latencies and rates above.

`tb_fusioncim_top` runs a reduced accelerator: 4 engines of 8 x 8, a
two-tile global buffer, and a 64-bit DRAM with random back-pressure and a
20-clock latency. It runs two passes in different bank words, and checks
every output row of every engine against the reference. It also counts each
mechanism: prefetch stalls, network stalls, multicast flits, rescale events,
masked keys, DRAM back-pressure and the bank switch. It fails if any of
them never occurred.

A typical run takes 466 clocks for a 6-tile pass whose last engine has 48
keys. The pure pipeline rate would be 384 clocks.

No test runs the top at its full default size. With verilator, the
16-engine, 128 x 128 model becomes about 390 MB of C++. It takes about 18
minutes to build, and a 2048-token pass did not finish within 5 minutes of
simulation. The full size is checked only by lint and elaboration in both
verilator and slang. The largest configuration simulated end to end is the
end-to-end testbench with its sizes raised to the full 16 engines:

- 32 x 32 macros, so 32-vector tiles;
- a four-tile global buffer and a 128-bit DRAM port;
- the same two passes, over 18 and 16 tiles.

All 33,832 checks passed, and every mechanism occurred. Pass A took 4871
clocks, against 4608 for the pure pipeline rate of its last engine.

The build took 4 minutes and the simulation 25 seconds.

## How it relates to the published design

These follow the published architecture:

- 16 hybrid engines, 128 x 128 IP-CIM and OP-CIM macros;
- 4 x 8 query banks and 4 x 16 output banks;
- 1b x 8b multipliers, adder trees, shift-and-add;
- a SoftMax macro of 128 max/compare/subtract/exponential units with a
  coefficient table and Taylor-series exponential;
- 8-clock bit-serial stages and a three-stage vector pipeline;
- a 1 MB global buffer, a prefetching memory controller, and the on-chip
  network;
- the diagonal-first inter-tile order and the reverse intra-tile order.

These are choices of this implementation:

- **Number format of the SoftMax macro.** The published SoftMax macro works
  in FP16. Here it works in fixed point (formats above). This is the largest
  departure, and the softmax blocks are therefore only a partial match.
- **Output clearing.** Outputs are cleared by the first key's rescale with
  `alpha = 0`.
- **Row sums.** The row sum `l` lives next to the softmax unit.
- **Host and DRAM interfaces.** Both are plain valid/ready signals of this
  design's own making.
- **Network.** The network is a single registered multicast stage rather
  than a routed fabric.
- **Global buffer layout.** The buffer stores K and V of one token in one
  wide word.
- **Key ordering.** Key vectors pass through a two-slot buffer in each
  engine.
- **Query tile shape.** A query tile is always 128 rows. A decoding step with
  fewer new tokens would use part of the rows.
- **Output division.** The final division by `l` is left to the host.
- **Precision.** Only INT8 is built. The published design also lists an
  INT4 mode, which would take four bit cycles per vector instead of eight.
- **Coefficient table.** The table holds nine 24-bit coefficients (27
  bytes), not a 128-byte table.
- **Throughput.** Timing at the published 400 MHz clock has not been
  checked. The arithmetic rate does match the published figures: 128 x 128
  MACs every 8 clocks at 400 MHz is 1.64 TOPS per macro.

Not modelled: the SRAM bit cells, wordline drivers and other analog parts
(the banks are flip-flop arrays), and the DRAM itself (a behavioural model in
the testbenches).

## Sizing notes

- **Context length.** At the defaults, a LLaMA3-8B head (dimension 128,
  context up to 8K) needs 64 query tiles, or four passes per head. Its K and
  V (2 MB per head) are larger than the global buffer and stream through the
  buffer ring.
- **Row sums.** `l` stays below `8192 x 255 < 2^24`.
- **Outputs.** The 16-bit outputs rely on `qsh` (up to 15) to stay in range
  over long rows.
- **Accuracy.** In the tests at 8 x 8, the normalised outputs match the
  floating-point reference within 2 units of V's scale.
