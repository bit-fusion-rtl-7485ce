# Bit Fusion in SystemVerilog

Bit Fusion is a deep-neural-network accelerator whose multipliers change width at run time.
Quantized networks mix very narrow operands in one model, for example 1-bit, 2-bit (ternary),
4-bit and 8-bit values, with occasional 16-bit layers. A fixed-width datapath wastes most of its
area on such operands. Bit Fusion builds its arithmetic from 2-bit multipliers instead.
For every layer it groups as many of them as each product needs, so one unit computes one 8x8
product, or four 4x4 products, or sixteen 2x2 products in a cycle. A 16-bit operand takes
two cycles (four for 16x16).

This RTL implements the accelerator at its 512-unit configuration:

- a 32 x 16 systolic array of fusion units;
- 112 KB of on-chip buffers;
- a 128-bit memory port;
- a controller for the block-structured instruction set that drives it all.

Everything is synthesizable except the off-chip memory. The testbenches model the memory behaviourally.

## The BitBrick

The smallest arithmetic element (`bitbrick`) multiplies two 2-bit values. Each value has its own
sign flag. A value whose flag is set is read as signed (-2..1), otherwise as unsigned (0..3).
Both values are widened to 3 bits by sign or zero extension, and their 6-bit signed product is
the result. The brick is purely combinational. The test is exhaustive: 64 operand/flag
combinations.

## Fusing bricks: the fusion unit

A fusion unit (`fusion_unit`) holds 16 BitBricks and a two-level shift-add tree.

**Splitting operands.** An operand of 2^k bits, with k = 1..3, is cut into 2-bit chunks. Only the
top chunk carries the operand's sign; lower chunks are unsigned. A product of an n-chunk input
and an m-chunk weight takes n*m bricks. The brick for input chunk a and weight chunk c is
shifted left by 2(a+c). Thus one unit computes 16/(n*m) products per step, and the tree adds them
into one dot-product term.

**Which brick takes which chunk.** The brick index is read as binary. Its lowest bits, in order,
select the low/high chunk of the input and then of the weight, but only the split bits that exist
for the current widths are used. The bit order is input-low (shift 2), weight-low (shift 2),
input-high (shift 4), weight-high (shift 4). The remaining high index bits select which product
the brick belongs to. With this order, every first-level group of four bricks needs only shifts
by 0, 2 or 4, and the second level adds the four group sums with group shifts. This matches the
recursive decomposition of a 2n-bit product into four n-bit products. Bricks past the last
product get zero operands.

**16-bit operands (temporal fusion).** A 16-bit operand is processed as two 8-bit halves in
consecutive cycles, called phases. The low half is unsigned and the high half carries the sign.
The phase result is shifted by 8 for each high half involved. 16x8 takes two phases and 16x16
takes four. A local register adds up the phases. The partial sum leaves the unit one cycle after
the last phase, added to the partial sum from the unit above.

**Products per step.** At most 32 bits of each operand are used per step: one buffer word, and
one 32-bit slice bus per operand.

| input x weight | products per unit per step | cycles per step |
|---|---|---|
| 1 or 2 x 1 or 2 bit | 16 | 1 |
| 4 x 2, 2 x 4 | 8 | 1 |
| 4 x 4, 8 x 2 | 4 | 1 |
| 8 x 4 | 2 | 1 |
| 8 x 8 | 1 | 1 |
| 16 x 2 | 2 | 2 |
| 16 x 4 to 16 x 8 | 1 | 2 |
| 16 x 16 | 1 | 4 |

The 16-bit rows are this design's choice: the 32-bit-per-step cap limits them. 1-bit operands
are unsigned {0, 1}. A network with +1/-1 binary values needs a correction in software, since the
design has no such mode.

Each unit's configuration (`fu_cfg_t` in `bf_pkg`) comes from the two bitwidth codes of the
current instruction block (`make_cfg`). The supported codes are:

- 1-bit unsigned;
- 2-, 4- and 8-bit, each signed or unsigned;
- 16-bit signed.

## Buffers and operand slices

Each array row has an input buffer (IBUF) at its left edge. Each fusion unit has its own weight
buffer (WBUF). Each column has an output-buffer slice (OBUF) at the bottom. All are 32-bit wide
single-port-read, single-port-write SRAMs (`scratchpad`) with a registered read.

**Slices.** Operands sit packed in 32-bit words. A step consumes one *slice* of a word: the P
elements it multiplies, which are P x width bits. An `operand_feed` sits between a buffer and its
consumer. It keeps the last word read in an output register and cuts the requested slice out
with a multiplexer.

**Slice index.** A compute step names a slice index. Word = index >> log2(slices per word), and
the slice within the word is the low bits of the index.

**Reuse.** While consecutive steps use slices of the same word, the SRAM is not read again. The
`ibuf_reads` and `wbuf_reads` counters show the effect. A buffer write drops the held word. The
slice is valid one cycle after the request.

## The systolic array and its timing

`systolic_array` places ROWS x COLS fusion units.

**Data flow.** Input slices enter at the left of each row from that row's IBUF feed. They move
one unit to the right per cycle, so all columns share the same inputs. Partial sums move one unit
down per cycle; the top row starts from zero. Each unit reads its own WBUF through its own feed.

**Timing.** A step enters row r r cycles after issue, so the partial sum from row r-1 meets row
r's products. The weight feed of unit (r, c) is requested one cycle before the step reaches it.
The request comes from the beat held by its left neighbour, or from the row entry for column 0.
For a step whose last beat is issued in cycle t, column c's sum appears at the bottom in cycle
t + ROWS + 2 + c. The testbench checks this latency exactly. An assertion checks that a partial
sum always arrives together with its own step.

Buffers are written from the memory side in 128-bit beats. This is described under
*Moving data* below.

## Under each column: accumulate, pool, activate

The array delivers one partial sum per column per step. The controller sends an *output control
word* (`octl_t`) with the step's last beat. It holds:

- the OBUF address;
- `start`, for the first contribution to this output;
- `fin`, for the last contribution;
- the pooling and ReLU flags.

A shared delay line gives the word to column c at ROWS + 1 + c cycles after issue, one cycle
ahead of the data. Then:

1. `accumulator` reads the stored output at that address one cycle early. When the data arrives,
   it forms `start ? psum : stored + psum`. If the previous cycle wrote the same address, the
   SRAM still holds the old word, so a one-entry register forwards the value just written. This
   happens when two steps to one output are issued back to back.
2. `pooling_unit` handles steps marked for max pooling. It keeps a running maximum in OBUF:
   `start ? psum : max(stored, psum)`. Otherwise the sum passes through. A pooling window is
   thus walked by the loop nest, one element per step.
3. `activation_unit` applies ReLU when the step asks for it and `fin` is set. Partial sums are
   never clipped.
4. The result is written back to the column's OBUF at the same address.

## Instruction set and controller

An instruction is 32 bits: a 5-bit opcode, a 6-bit operand field, a 5-bit loop-id and a 16-bit
immediate. Programs are *blocks*: a setup, then address generators, loops and operations, then
a block-end.

| opcode | op | operand field | loop-id | immediate |
|---|---|---|---|---|
| 0 | setup | [5:3] input bitwidth code, [2:0] weight bitwidth code; followed by three 32-bit words: input, output and weight base addresses in off-chip memory | – | – |
| 1 | ld-mem | [5:3] buffer (0 IBUF, 1 WBUF, 2 OBUF), [2:0] element bitwidth code | enclosing loop | elements per buffer instance (OBUF: lines) |
| 2 | st-mem | [5:3] buffer (OBUF) | enclosing loop | OBUF lines |
| 3 | rd-buf | [5:3] buffer; a block with rd-buf OBUF accumulates onto stored outputs | – | – |
| 4 | wr-buf | [5:3] buffer (no effect on execution) | – | – |
| 5 | gen-addr | [5:3] buffer, [2:0] stream: 0 memory load, 1 memory store, 2 buffer read, 3 buffer write | loop it strides in | signed stride |
| 6 | compute | bit 0 max pooling, bit 1 ReLU | enclosing loop | – |
| 7 | loop | [2:0] nesting level | its id (0..7) | iterations |
| 8 | block-end | {operand, loop-id, immediate} = next block's address; all ones ends the program | | |

Loop-id 31 means "not inside any loop".

**Two passes per block.** The controller first walks the block once to decode it, one
instruction per cycle. It records:

- the bitwidths and base addresses;
- every gen-addr stride, in a table per address stream and loop;
- the level of each loop;
- whether OBUF is read.

A second pass then executes loop, ld-mem, st-mem, compute and block-end, and steps over the rest.

**Loops are structured.** A loop's body is the instructions after it that lie deeper than its
level. A non-loop instruction's depth is one more than the level of the loop named in its
loop-id. Reaching an instruction no deeper than the innermost open loop ends one pass of its
body. The controller then jumps back to the body's start, or closes the loop and looks at the
same instruction again.

**Address streams.** There are seven:

- the IBUF slice index, the WBUF slice index and the OBUF address of compute steps;
- the off-chip address of ld-mem for each buffer;
- the off-chip address of st-mem.

Each follows address = base + Σ iteration(id) × stride(id). The controller keeps each as a
running sum: a loop iteration adds the loop's stride, and closing a loop subtracts
stride × (iterations − 1). On-chip streams start at 0. Off-chip streams start at the setup's
base words: input for IBUF, weight for WBUF, output for OBUF loads and stores.

**start and fin.** A loop that does not move the OBUF address (its OBUF stride is 0) is a
*reduction* loop. A step starts its output when every open reduction loop is at iteration 0.
It finishes the output when every open reduction loop is at its last iteration. Of several
computes in a row, only the first may start an output and only the last may finish it. A block
that reads OBUF (rd-buf OBUF) never starts an output, so it adds onto data loaded from memory.

**Issue.** A compute issues its first beat in the cycle it is executed. Extra beats for 16-bit
operands follow on the next cycles. A loop body with one narrow compute issues a step every
second cycle, because closing the body takes a cycle. Two computes in a row issue back to back.
Before any transfer, the controller waits until the array has drained (ROWS + COLS + 4 cycles
after the last issue).

## Moving data: the transfer engine

`dma` serves ld-mem and st-mem over one 128-bit request/response port:

- a request is accepted when `mem_req_ready` is high;
- read data returns in order, with any latency.

**Lines and beats.** A buffer *line* is one 32-bit word in every instance of a buffer at the same
address:

| buffer | words per line | 128-bit beats per line |
|---|---|---|
| IBUF | 32 (one per row) | 8 |
| WBUF | 512 (one per unit) | 128 |
| OBUF | 16 (one per column) | 4 |

Lane k of beat g goes to instance 4g + k. WBUF instance r*COLS + c belongs to unit (r, c).

**Transfers.** A transfer of n lines covers n × beats-per-line consecutive memory words from the
stream's address. It always fills the buffer from line 0, so one layer tile is resident at a
time and there is no double buffering. ld-mem converts its element count into lines:
ceil(count × width / 32) for IBUF and WBUF, the count itself for OBUF. Loads issue one request
per accepted cycle. Stores read an OBUF line, then send its beats.

## Sizes

| parameter | default | origin |
|---|---|---|
| fusion units | 512 (ROWS 32 × COLS 16) | 512 from the paper's 45 nm comparison; the 32 × 16 shape is this design's |
| BitBricks per unit | 16 | paper |
| IBUF | 32 × 256 words × 32 bit = 32 KB | total of 112 KB from the paper; the split is this design's |
| WBUF | 512 × 32 words × 32 bit = 64 KB | as above |
| OBUF | 16 × 256 words × 32 bit = 16 KB | as above |
| memory port | 128 bit | paper (default bandwidth) |
| instruction memory | 256 words | this design's |
| loop ids / nesting depth | 8 / 8 | this design's |

The paper evaluates the design at 500 MHz in 45 nm. No timing closure was attempted here.
The deepest combinational paths are the operand routing and the adder tree inside each fusion
unit, and they are not pipelined.

## Simulating

Every module has one file in `rtl/`. The package `bf_pkg.sv` must be compiled first. Each
testbench in `tb/` prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/bf_pkg.sv tb/tb_bitfusion_top.sv
./obj_dir/Vtb_bitfusion_top
```

- `tb_bitbrick`, `tb_fusion_unit`, `tb_operand_feed`, `tb_scratchpad`, `tb_systolic_array`,
  `tb_accumulator`, `tb_pooling_unit`, `tb_activation_unit`, `tb_dma` and `tb_controller` test
  one block each against references computed in the testbench.
- `tb_fusion_unit` covers all 64 bitwidth pairs.
- `tb_bitfusion_top` runs a 4 × 4 array end to end. It runs four chained blocks, each a fully
  connected layer over a batch:
  - 4-bit × 2-bit signed, with ReLU and back-to-back steps;
  - 16-bit × 8-bit;
  - 1-bit × 4-bit with max pooling and ReLU;
  - 16-bit × 16-bit with ReLU.

  Every stored output is compared with a reference model that reads the same memory image. It
  also counts these mechanisms, each of which must occur:
  - two- and four-phase steps;
  - mixed widths;
  - binary operands;
  - accumulation;
  - forwarding;
  - max pooling;
  - ReLU clipping;
  - memory back-pressure.
- `tb_bitfusion_full` runs the same program on the design at its default size (512 units). It
  takes a few seconds.
- `dram_model` is the behavioural off-chip memory the testbenches use. Its latency is fixed and
  it drops ready at random.

## Where this design departs from the paper, and what it lacks

- **Encodings.** The numeric encodings (opcodes, bitwidth codes, buffer and stream codes,
  compute functions) are this design's own. So are the loop-id rule for non-loop instructions
  and the reduction rule behind start/fin.
- **1-bit values.** 1-bit operands are 0/1, not ±1.
- **16-bit operands.** They are capped at 32 bits per step, so 16 x 2 and 16 x 4 run fewer
  products per cycle than spatial fusion alone could give.
- **Column functions.** Pooling is max only. Activation is ReLU only. Average pooling and the
  sigmoid/tanh needed by recurrent networks are not built.
- **Transfers and overlap.** Transfers always start at buffer line 0, and computation does not
  overlap with transfers. The array drains before each ld-mem or st-mem. This costs performance
  against a double-buffered design but keeps the buffers free of hazards.
- **Controller rate.** The controller performs one action per cycle. A loop body that holds a
  single narrow compute therefore reaches half the array's peak rate.
- **Assertions.** The assertions use the reset synchronously in `disable iff`, so a linter
  reports the reset as used both synchronously and asynchronously. The assertions are ignored in
  synthesis, and all flip-flops reset asynchronously.
- **Workloads.** The paper's convolutional benchmarks map onto the loop nest: convolution and
  fully connected layers as reductions, plus max pooling and ReLU. Residual additions and the
  recurrent benchmarks' nonlinearities are missing.
