# MSB-pruned approximate convolution unit

Most products in a CNN convolution are tiny next to the largest product in the same sum,
and skipping them barely changes the output. Skipping only exact zeros (what ReLU-sparsity
accelerators do) misses them: smooth activations such as tanh make almost no exact zeros,
yet they make plenty of values that are close to zero. This unit skips both kinds of
product. It does so without first computing the products it skips.

The trick: the position of the highest set bit of an integer, `MSB(x)`, is `floor(log2|x|)`.
So `MSB(a) + MSB(b)` is a cheap estimate of `log2|a*b|`, good to within two. For each output of
a 3x3 convolution the unit adds the MSB positions of every activation/weight pair. It finds
the largest of these nine sums and multiplies only the pairs whose sum lies within a
threshold `T` of that maximum. Every other pair is treated as contributing zero. `T` is
counted in powers of two: `T = 7` keeps, roughly, every product above 1 % of the largest
one, and a smaller `T` drops more.

The RTL is a fixed-size accelerator meant to hang off the execution stage of a 32-bit
RISC-V core (RI5CY-class). It convolves one 4x4 window of signed 32-bit values with a
stored 3x3 kernel and gives the four outputs of the 2x2 valid convolution. Software builds
larger convolutions out of calls to it. The unit is invoked as a custom R-type instruction
on opcode `0x77`.

## The pruning rule, exactly

For one output window with activations `x_t` and weights `w_t`, `t = 0..8`:

```
live_t = (x_t != 0) && (w_t != 0)
s_t    = MSB(|x_t|) + MSB(|w_t|)                    (6 bits, 0..62)
s_max  = max of s_t over live terms                  (balanced reduction tree)
keep_t = live_t && (s_t + T >= s_max)                SKIP_ON_EQUAL = 0 (default)
keep_t = live_t && (s_t + T >  s_max)                SKIP_ON_EQUAL = 1
y      = sum of x_t * w_t over kept terms            (exact, 68 bits)
```

There are two versions of the rule, and they disagree only when `s_max - s_t == T`.
The description of the hardware's multiply stage keeps a term when `s_t + T >= s_max`,
which is the default. The algorithmic description drops a term once the gap reaches `T`,
which is `SKIP_ON_EQUAL = 1`. The parameter exists for that reason. `T = 0` under the
default rule keeps only the terms tied for the maximum; under the other rule it keeps
nothing.

Terms with a zero operand are never multiplied and never count toward `s_max`. That is
exact, because their product is zero. It also stops a zero, whose MSB encoder output is
0 just like the value 1's, from being mistaken for a small non-zero operand.

Error bound: a dropped term has `|P| < 2^(s_t+2) <= 2^(s_max - T + 1)`, while the kept
maximum has `|P| >= 2^s_max`. So each dropped product is below `2^(1-T)` times the largest
one (`2^(2-T)` with `SKIP_ON_EQUAL = 1`). With at most eight dropped products per
output, the error is below `8 * 2^(1-T) * max|P|` under the default rule. Dropped positive and negative products tend to cancel, so the typical error is far smaller.

How a fractional threshold maps to `T` is up to the software. The natural mapping is
`T = ceil(log2(1/f))`: 1 % gives 7, 3 % gives 6, 6 % gives 5, 10 % gives 4 and 25 % gives 2.
Because `T` is an integer, fractions that share a ceiling (for example 0.15 and 0.2, both
`T = 3`) behave identically in this hardware.

## Datapath and operation sequence

```
 instr, rs1, rs2 ──> cx_decoder ──> conv_fsm ───────────── strobes ──────────────┐
                                       │                                         │
 data memory <── req/gnt/rvalid ── mem_fetch ──┬──> window_buffer (16 x 32)      │
                                               └──> kernel_store (9 x 32 + MSB)  │
                                                         │                       │
   window_buffer ─> 16 x msb_encoder ─> STAGE_1 register (16 x 5 bit + zero)     │
                                                         │                       │
   4 lanes, one per output y[2i+j]:  prune_mult (9 MSB adders, max tree,         │
        9 compares, 9 gated 32x32 multipliers) ─> accum (9-input adder) ─> y  <──┘
```

A convolution walks the controller's six states:

| state     | cycles (zero-wait memory) | what happens |
|-----------|---------------------------|--------------|
| IDLE      | -                         | the instruction is captured: rd, and for CONV the fetch base (rs2) and word count (rs1) |
| GET_DATA  | N + 1 for N words         | one read request per cycle; words land in the window buffer row-major |
| STAGE_1   | 1                         | MSB positions and zero flags of all 16 activations are registered |
| STAGE_2   | 1                         | per lane: reduction tree, compares, kept products registered |
| STAGE_3   | 1                         | per lane: kept products summed into y |
| DONE      | until ack                 | `done_o` high, `result_o` = y0 |

A full window (N = 16) therefore reaches DONE 20 cycles after it is captured. Weight MSBs
are not recomputed per convolution. The kernel store encodes each weight as it is loaded
and keeps the MSB and zero flag next to it.

Pruned terms do not toggle their multiplier's output register: each product register loads
only when its term is kept. A synthesis flow with clock-gating insertion turns that enable
into a gated clock. This is how the design realises the saving the method aims at. No gating
cell is instantiated by hand, and the multipliers' combinational inputs are not isolated.

## Instructions

All are R-type with opcode `0x77` and `funct7 = 0`. Other `funct3`/`funct7` values are not
claimed (`cx_hit_o = 0`), so the core's normal illegal-instruction handling applies.

| funct3 | name        | rs1                          | rs2                      | rd receives |
|--------|-------------|------------------------------|--------------------------|-------------|
| 0      | CONV        | words to fetch (16)          | byte address of the 4x4 window, row-major | y0 |
| 1      | LOAD_KERNEL | words to fetch (9)           | byte address of the 3x3 kernel, row-major | 0 |
| 2      | SET_THR     | new T in bits [5:0]          | -                        | previous T |
| 3      | READ_OUT    | output index in bits [1:0]   | -                        | y[index] |

`y[2*i + j]` is the output whose window has its top-left input at row `i`, column `j`.
The outputs are the low 32 bits of the exact sum. All four are also visible on `y_o`.
A word count below the buffer size leaves the remaining entries at zero; a larger one is
clipped. T resets to 7 (parameter `THR_RESET`).

To convolve an image of any size, software loops over 2x2 output tiles. It copies each 4x4
input window into 16 contiguous words, issues CONV, and collects y1..y3 with READ_OUT.
The unit has no row stride, so the copy is the software's job.

## Core-side handshake

The EX stage drives `instr_valid_i` with `instr_i`, `rs1_i` and `rs2_i`. If `cx_hit_o` is
high the unit captures the instruction on that clock edge and raises `busy_o` from the
next cycle. The pipeline must stall and keep `instr_valid_i` high, which an assertion checks.
When `done_o` rises, `result_o` and `rd_o` are valid and stay valid until the core pulses
`ack_i`. The core must drop `instr_valid_i` in the same cycle as `ack_i`, or the
instruction is started again. SET_THR and READ_OUT take one cycle; LOAD_KERNEL takes the
fetch plus one.

The memory port uses the request/grant/response convention of RI5CY-style data ports.
`data_req_o` is held with a stable `data_addr_o` until `data_gnt_i`. Each grant is answered
by one `data_rvalid_i` cycle in a later cycle, in order. Requests are pipelined, so several
may be outstanding. The unit only reads.

## Files

`rtl/` (all synthesizable; one module or package per file):

| file | contents |
|------|----------|
| `conv_approx_pkg.sv` | sizes, opcode, operation and state enums |
| `msb_encoder.sv` | magnitude (two's complement) + priority encoder, zero flag |
| `window_buffer.sv` | 16-entry input window |
| `kernel_store.sv` | 9 weights with stored MSB positions and zero flags |
| `mem_fetch.sv` | pipelined memory read master |
| `prune_mult.sv` | STAGE_2 of one lane: MSB sums, max tree, keep rule, gated multipliers |
| `accum.sv` | STAGE_3 of one lane |
| `cx_decoder.sv` | opcode/funct decode |
| `conv_fsm.sv` | the six-state controller |
| `conv_approx_unit.sv` | top level |

`tb/`: every block has a self-checking testbench `tb_<module>.sv`. `tb_ref_pkg.sv` is an
independent integer model of the rule above, and `tb_data_mem.sv` a behavioural data memory
that can stall grants at random. `tb_conv_approx_unit.sv` plays the core at the default
parameters. It runs 300 random convolutions with kernel loads, threshold changes, short and
over-long fetches, memory stalls and late acknowledges, and checks every output, the
multiplication count and the 20-cycle latency. `tb_mnist_workload.sv` convolves a generated
28x28 digit image with the smoothing kernel `[1 1 1; 1 9 1; 1 1 1]` as 169 tiled calls, at
`T = 63, 6, 5, 4, 2`. It checks every output and prints the number of multiplications against
the 6084 of an exact convolution. On its image (574 zero pixels of 784) it reports 1881 multiplications
with only zero-skipping and 1641, 1589, 1589 and 859 at the four thresholds.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.
To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_conv_approx_unit \
    -Irtl -Itb -y rtl -y tb rtl/conv_approx_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_conv_approx_unit.sv -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Each run takes well under a second.

## Parameters and sizes

The 4x4/3x3/2x2 geometry, 32-bit data and 5-bit MSB fields are fixed in
`conv_approx_pkg`. `THR_RESET` and `SKIP_ON_EQUAL` are parameters of the top. The lower
modules take their widths as parameters, so a different data width (16-bit activations,
for instance) is a package edit. After coarse synthesis the top is about 1650 word-level cells
and 2370 flip-flop bits. It holds 36 multipliers of 32x32 bits, one for each of the 4 x 9
window products, which dominate its area.

## How far it follows the method, and where it departs

Taken from the method's description: MSB as the log-magnitude proxy; negation of negative
values before priority encoding; 5-bit MSB positions of 32-bit values; a max over MSB sums
by a combinational reduction tree; the keep rule; one result per window summed from the
kept products; the states IDLE, GET_DATA, STAGE_1..3, DONE and what each does; a separate
instruction that loads the kernel and precomputes its MSBs; opcode `0x77` with rs1 as the
size and rs2 as the address of the input array; a DONE that waits for acknowledgement.

Choices made here, where the description is silent:

- The `funct3` codes. The whole of SET_THR and READ_OUT, since four outputs must come back
  through a single destination register and T must be set somehow.
- Rule for zeros: excluded from `s_max` and never multiplied.
- Full 64-bit products and 68-bit sums; a 32-bit result.
- One cycle per STAGE_n; the bus protocol and fetch pipelining; word count clipping.
- Shorter state paths for the non-convolution instructions (LOAD_KERNEL skips the stages;
  SET_THR and READ_OUT go straight to DONE).
- Internal state is not wiped when DONE returns to IDLE. The outputs must stay readable by
  READ_OUT, so the window buffer and outputs are cleared when the next CONV starts instead.
- Reset values: T = 7, all registers zero.

Not built:

- The floating-point variant, which uses the IEEE-754 exponent in place of the MSB.
- Per-layer or adaptive thresholds; storing precomputed MSB arrays in memory so that
  operands are fetched only when needed.
- Convolutions with 4x4 or 5x5 kernels, as in LeNet-5's layers. The kernel store holds nine
  weights and a window compares nine products, so such layers need a software
  decomposition that changes which products compete for the maximum.
- The host core and the data memory.

Area, power and timing in a 65 nm process have not been reproduced. The multiplication
counts of the testbenches come from a generated image, not from the MNIST data set.
