# A template DNN accelerator: systolic matrix unit fused with a programmable vector unit

This is synthesizable SystemVerilog for a neural-network inference accelerator
built around two engines. A **matrix unit** runs every GEMM and convolution on
a weight-stationary systolic array of int8 multipliers. A **vector unit** takes
the int32 results as they leave the array and runs everything else: it
dequantizes them, applies element-wise and nonlinear functions, reduces or
accumulates them, requantizes them, and writes them back to memory. Because the
matrix unit's output is wired straight into the vector unit, a layer such as
`conv -> dequantize -> ReLU -> quantize` costs one pass over memory instead of
four. The vector unit can also run on its own from memory. That is how softmax,
layer norm and residual additions run.

The design is a template. Array size, buffer depths and the vector width are
parameters. The defaults give the 32 x 32 configuration with 192 KB of input
and accumulation SRAM.

```
             host register port (mmio)
                      |
                 +-----------+   mu_inst / start      vu_inst / start
                 | ctrl_regs |--------------------+--------------------+
                 +-----------+                    |                    |
  L2 inputs  --> tile_fetcher -> pingpong_buffer  |                    |
  L2 weights --> tile_fetcher -> pingpong_buffer  v                    v
  L2 biases  --> stream_reader ---------> +---------------+   int32   +-------------+
                                          |  matrix_unit  | --------> | vector_unit | --> L2 write
                 systolic_array (ROWS x COLS pe)  |  vectors  |             | <-- 3 x L2 read
                 accum_buffer (2 banks)   +---------------+           +-------------+
```

## Number formats

* Matrix operands are int8, and partial sums are int32. Each multiply-add is
  `psum + a*w`, computed at full int32 width.
* Vector lanes are bfloat16: 1 sign bit, 8 exponent bits, 7 fraction bits.
  Every vector operation rounds its result to nearest-even. Subnormals are
  flushed to zero. The arithmetic lives in `voyager_pkg`:
  * `bf16_mul`, `bf16_add` and `bf16_sub`;
  * `bf16_lt` and `bf16_max`;
  * `bf16_recip`, a reciprocal computed by long division;
  * `bf16_from_int`, which converts an int32 to bfloat16;
  * `bf16_to_int8`, which converts with rounding and saturation.
* Quantized results are int8. They are sign-extended into a 16-bit lane when
  written to memory.

The source design's main evaluated configuration uses FP8 (E4M3) operands. This
RTL implements only the int8 datapath. The array's throughput, one
multiply-accumulate per PE per cycle, is the same.

## The matrix unit

### Array and weight handling (`pe`, `systolic_array`)

Activation vectors of ROWS int8 values enter the left edge, one vector per
cycle. Row r is delayed by r cycles through a staircase of skew registers.
Partial sums flow down the columns. A de-skew staircase delays column c by a
further COLS-1-c cycles. As a result, one aligned vector of COLS int32 sums
leaves the array ROWS+COLS-1 cycles after its input vector entered.

Each PE holds three weight registers:

* One stage of a column shift chain. Weights for the next tile are shifted in
  from the top, one row per cycle, while the current tile is computing.
* Two bank registers. A latch pulse copies the whole chain into one bank.

Every activation carries a bank-select bit alongside it. The array can
therefore hold tile t in bank t%2 and tile t+1 in the other bank, and vectors
of the two tiles follow each other without a bubble.

### Buffers and fetchers (`tile_fetcher`, `pingpong_buffer`, `addr_gen`, `stream_reader`)

Inputs and weights each have a fetcher and a two-bank buffer. The fetcher
writes one bank while the array reads the other. A bank is handed over when
its last word is committed, and returned when the reader releases it.

A fetcher is an address generator feeding an in-order L2 read port.
`stream_reader` counts requests against free FIFO slots, so responses can
never overflow the FIFO. The memory port therefore needs no back-pressure on
responses.

The address generator (`addr_gen`) walks six nested loops. Each loop has a
run-time bound and a signed stride. It produces one address per cycle:

* At start, it spends one cycle computing, for each loop, the jump the address
  makes when that loop advances and all inner loops wrap.
* While running, it needs one adder and a "which loop is not at its last index"
  priority choice. It has no multipliers and no chain of bound comparisons.

This is the coding style that closes timing at high clock rates. Layout,
tiling and convolution windows are all expressed as loop patterns. One example
is a 3 x 3 window over a feature map: filter offsets are loops whose strides
are the row and pixel pitches.

### One matrix instruction (`matrix_unit`)

A `mu_inst_t` instruction contains:

* three address patterns: inputs, weights and biases;
* P, the number of input vectors per tile;
* KT, the number of reduction tiles;
* NT, the number of output-channel tiles;
* a bias enable.

It computes NT x P output vectors. Each is the sum, over KT tiles, of an input
vector times a ROWS x COLS weight tile. Tiles run in the order output tile
outer, reduction tile inner. Within that order the memory layout is entirely
up to the address patterns. The weight pattern must deliver each tile row 0
first.

Two controllers run at once:

* **Weight loader.** It shifts tile t+1 into the PE chains (ROWS cycles) while
  tile t streams. It latches the weights into bank (t+1)%2 once the last
  vector of tile t-1 has left the array.
* **Streamer.** It sends the P vectors of a tile, each tagged with the tile's
  bank. It waits for three things: the tile's weights are latched, its inputs
  are buffered, and, on the first reduction tile of an output tile, an
  accumulation bank is free and the bias has arrived.

Output vectors are matched to accumulation addresses by counters that follow
the same tile order.

Timing: in steady state a tile takes max(P + 2, ROWS + 3) cycles. This assumes
P is at least about ROWS + COLS, so that a bank's previous tile has drained
before the bank is re-latched. With smaller P the loader waits for that drain.

The accumulation buffer (`accum_buffer`) adds each arriving vector into its
row of the current bank:

* On the first reduction tile it writes the vector plus the bias.
* On later tiles it reads, adds and writes back in the same cycle. This works
  because the array is a flip-flop memory with an asynchronous read.

When an output tile's last vector has been added, the bank is marked full and
streams to the vector unit while the other bank accumulates. With
`DOUBLE_BUF=0` there is a single bank, and the array waits for the vector unit
to drain it. This is the configuration the double-buffering option exists to
avoid.

## The vector unit

### Pipeline (`vector_pipeline`, `spline_unit`)

N lanes (N = COLS) pass through a dequantize stage and four operation stages.
Each stage is one register, and a single enable stalls the whole pipeline when
its consumer is not ready.

| stage | operations (selected per instruction)            |
|-------|--------------------------------------------------|
| dq    | x = m, or s_m * int(m); y = n, or s_n * int(n)   |
| 1     | u = x, s*x, x+y, x-y, x*y                        |
| 2     | v = u, or f(u) by a 7-segment quadratic spline   |
| 3     | w = v, s*v, v*v, v+z, v*z, v*(1/z)               |
| 4     | o = w, w/s, or int8(round(w*s)) saturated        |

The spline compares u with six ascending knots to pick one of seven segments.
It then evaluates (a*u + b)*u + c with that segment's coefficients. The
coefficients are part of the instruction, so exp, GELU, SiLU, ReLU or tanh are
all just tables. A testbench package shows an exp fit built from three points
per segment.

### Operand routing, reduction and accumulation (`vector_unit`, `reduce_unit`, `vector_accum`)

Operand sources:

* m comes from the matrix unit or from memory stream 0.
* n comes from memory stream 1, the reducer's last result, or the
  accumulator's last result.
* z comes from stream 2, the reducer, or the accumulator.

Each memory stream is an address generator plus a read port, so a stream can
repeat a vector, for example one row maximum applied to every vector of that
row. A fourth address generator supplies the write addresses.

The stage-3/4 result goes to one of three places:

* Straight to memory.
* To the **reducer**. It sums or takes the maximum across the N lanes with a
  tree, then across `red_len` consecutive vectors. It then either replicates
  the scalar into all lanes or appends successive scalars into the lanes of
  one output vector. A partly filled vector is flushed at the end of the
  instruction.
* To the **accumulator**. It adds `acc_len` consecutive vectors lane by lane.

An instruction streams `count` vectors. It ends when the last result address
has been written.

Softmax over rows is three instructions:

1. Row maximum (max reduction, replicate) to memory.
2. Sum of exp(x - max): stream 1 replays the maximum, stage 1 subtracts, the
   spline computes exp, and the reducer sums.
3. exp(x - max) * (1/sum): stream 2 replays the sum, and stage 3 multiplies by
   its reciprocal.

## Control (`ctrl_regs`, `voyager_top`)

The host writes instructions through a 32-bit register port. Word addresses:

| address   | register                                                         |
|-----------|------------------------------------------------------------------|
| 0x000     | command: bit 0 starts the matrix unit, bit 1 the vector unit     |
| 0x001     | status: bit 0 matrix unit busy, bit 1 vector unit busy           |
| 0x002     | free-running cycle counter                                       |
| 0x100 + i | word i of the matrix instruction (`mu_inst_t`, low word first)   |
| 0x200 + i | word i of the vector instruction (`vu_inst_t`, low word first)   |

* A start pulse comes one cycle after the command write. It is ignored while
  that unit is busy.
* For a fused layer, load both instructions and start both units with one
  write of 3. The vector instruction then takes m from the matrix unit.

The top has seven memory ports, each a plain in-order request/response port:

* input reads;
* weight reads;
* bias reads;
* three vector reads;
* one vector write.

In a system-on-chip these would go through bus adapters to the shared L2. The
CPU, bus, L2 and DRAM are not part of this RTL.

## Parameters and sizes

| parameter (top) | default | meaning                                                  |
|-----------------|---------|----------------------------------------------------------|
| ROWS            | 32      | array rows = int8 input channels per vector              |
| COLS            | 32      | array columns = output channels = vector lanes           |
| IBUF_DEPTH      | 1024    | input-buffer words per bank (ROWS bytes each)            |
| ABUF_DEPTH      | 512     | accumulation rows per bank (COLS x int32 each)           |
| DOUBLE_BUF      | 1       | two accumulation banks (0 = one)                         |

The buffer sizes at the defaults:

* The input buffer is 2 x 1024 x 32 B = 64 KB.
* The accumulation buffer is 2 x 512 x 128 B = 128 KB.
* Together they make 192 KB.
* The weight buffer adds 2 KB.

The same two depths give the SRAM totals of the smaller and larger
configurations as well: 48 KB for 8 x 8, 96 KB for 16 x 16 and 384 KB for
64 x 64.

## Running whole networks

Nothing in the design limits model size. Weights and activations live in L2 or
DRAM and are streamed through the buffers one tile at a time, so a layer only
has to be cut into tiles:

* 32-channel reduction tiles and 32-channel output tiles;
* at most 1024 input vectors per input bank;
* at most 512 output vectors per accumulation bank.

At 1024 multiply-accumulates per cycle, a rough cycle count is the layer's MAC
count divided by 1024 and by the utilisation. Some examples:

| network                  | work                 | ideal cycles |
|--------------------------|----------------------|--------------|
| ResNet-50 (224 x 224)    | about 4.1 GMAC       | about 4.0 M  |
| BERT-Base (128 tokens)   | about 11 GMAC        | about 11 M   |
| LLaMA-class 1B model (prefill of 512 tokens) | about 0.6 TMAC | about 600 M |

Attention softmax and layer norm add vector-unit passes, each streaming the
tensor once per instruction. Depthwise convolutions map poorly onto the array
and dominate the runtime of mobile networks.

## How this RTL departs from the source design

* **Datatype.** Only int8 operands are implemented; FP8 (E4M3) and the other
  datatypes are not. The operand packing that lets several datatypes share a
  fetcher is also absent.
* **Microscaling.** The microscaling (MX) variant is not included. That
  variant scales int32 partial sums by shared power-of-two factors inside the
  matrix unit.
* **Depthwise convolution.** The optional depthwise-convolution unit is not
  included. Depthwise layers must run on the array at low utilisation.
* **Loop order.** The matrix unit has a fixed tile order: output tiles outer,
  reduction tiles inner. The source design lets the compiler choose the loop
  order at both buffer levels. Here only the memory-side order is programmable,
  through the address patterns. Convolution padding is not generated in
  hardware.
* **Fetchers.** They do not transpose or permute data on the way in.
* **Dequantization.** It multiplies by the scale. The source describes it both
  as division by the scale and as multiplication by the product of scales.
  Division is obtained by passing the reciprocal.
* **PE weight registers.** The PE keeps three weight registers (one chain
  stage and two banks), and bank selection travels with each activation.
* **Interfaces and encodings.** The following are this design's own choices:
  * the memory ports, the register map and the instruction encodings;
  * the vector unit's write address generator;
  * all latencies.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against values computed independently in the testbench, and each ends with a
`TB_RESULT checks=N failures=M` line.

| testbench             | what it establishes                                                                       |
|-----------------------|-------------------------------------------------------------------------------------------|
| `tb_pe`               | MAC, bank select, chain shift, one-cycle timing                                           |
| `tb_systolic_array`   | tiles alternating between banks (also during a shift), ROWS+COLS-1 latency              |
| `tb_pingpong_buffer`  | tile data, bank alternation, producer held off while both banks are full, read latency  |
| `tb_addr_gen`         | random loop nests against a nested-loop reference, one address per cycle                 |
| `tb_tile_fetcher`     | strided tiles under memory stalls and buffer back-pressure, one word per cycle when free |
| `tb_accum_buffer`     | first-tile write with bias, accumulation, drain order, bank claiming                     |
| `tb_matrix_unit`      | GEMM with bias under stalls; accumulation-bank waits; overlap of weight loading; tile rate |
| `tb_spline_unit`      | segment choice and polynomial value over random inputs                                   |
| `tb_vector_pipeline`  | every stage operation against a per-lane real-number model, stalls, five-cycle latency   |
| `tb_reduce_unit`      | sum and max, replicate and append, flush                                                  |
| `tb_vector_accum`     | grouped accumulation under output stalls                                                  |
| `tb_vector_unit`      | three-pass softmax, fused dequantize-ReLU-quantize from a producer, accumulate, append    |
| `tb_ctrl_regs`        | instruction words, read-back, start pulses, busy suppression, counter rate                |
| `tb_voyager_top`      | whole accelerator at 4 x 4 (see below)                                                    |
| `tb_voyager_full`     | the same program on the unmodified 32 x 32 default configuration                         |

Both end-to-end tests program the accelerator only through the register port.
Each runs:

1. a GEMM with bias, fused with dequantize -> ReLU;
2. a softmax over the result rows;
3. column sums through the accumulator;
4. an int8 quantisation of the softmax.

They count how often each mechanism occurred, and fail if any never did. The
mechanisms are:

* accumulation-bank waits;
* weight loading hidden behind streaming;
* vector-unit back-pressure reaching the matrix unit;
* memory stalls;
* bias use;
* max and sum reduction;
* accumulation;
* quantisation.

The full-size test takes about half a minute in Verilator.

To run a testbench with Verilator (packages first, then the testbench; the
remaining modules are found by name):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/voyager_pkg.sv tb/tb_util_pkg.sv tb/tb_ref_pkg.sv tb/tb_vec_prog_pkg.sv \
    tb/tb_voyager_top.sv --top-module tb_voyager_top
./obj_dir/Vtb_voyager_top
```

The simulation is two-state. Every register has a reset, and the testbenches
hold reset for several cycles so that the memory models drain anything
requested before reset.

Remaining lint warnings:

* Instruction bits stored but not used by every unit.
* A synchronous-versus-asynchronous reset remark. It arises because the
  handshake assertions sample the asynchronous reset as a disable condition.
