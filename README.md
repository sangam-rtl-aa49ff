# PIM logic chiplet for a chiplet-based DDR5 memory module

LLM decoding is mostly matrix–vector and "flat"
matrix–matrix work: a handful of rows (the batch) times very large weight
matrices. Each weight is touched once per token, so the speed is set by
memory bandwidth, not by arithmetic. This design puts the arithmetic beside
the DRAM banks. A DDR5 chip is split into DRAM bank chiplets and one logic
chiplet in the centre stripe, on an interposer. Because the logic is made in
a logic process, it can hold real systolic arrays and an SRAM. It sees the
128-bit row-buffer interface of every bank at once.

The SystemVerilog here is the compute part of that logic chiplet: everything
one DRAM chip needs to run a GEMM, a GEMV, a maximum or an exponential on
the data its 32 banks hold. Module-level parts (CXL controller, rank-level
reduction units, the DRAM arrays and the ordinary DDR5 peripheral logic) are
not included. Their connections appear as ports of the top, `pim_chiplet`.

## One chip at a glance

```
 bank 0 .. bank 31 (128-bit reads, all banks in lock-step)
    |                 |
 [bank_pim]  ...  [bank_pim]      8x8 FP16 systolic array + 16-lane FP16 multiplier each
    | 8 lanes         | 8 lanes
    +---- lane j of every bank ----> adder tree j (32-to-1), j = 0..7
                                          |
                           SIMD FP16 adder (8 lanes) <---- old partial sums
                                          |                     ^
                                          v                     |
                             256 KiB SRAM scratchpad (16384 x 128 bit)
                               |            |             ^
                        64-to-1 max tree   32-lane exp unit
```

| Unit | Size | Module |
|---|---|---|
| Systolic array | 8×8 FP16 MACs per bank, 32 banks | `systolic_array`, `sa_pe` |
| SIMD multiplier | 16 FP16 lanes per bank | `simd_mul` |
| Per-bank wrapper | array + multiplier on one read port | `bank_pim` |
| Adder trees | eight, 32-to-1 | `adder_tree` |
| SIMD adder | 8 FP16 lanes | `simd_add` |
| Scratchpad | 256 KiB, 128-bit words | `scratchpad_sram` |
| Max tree | 64-to-1, value and index | `max_tree` |
| Exponential | 32 FP16 lanes | `exp_unit` |
| FP16 arithmetic, types, commands | — | `sangam_pkg` |

Everything runs on one clock. The intended clock is 400 MHz, which equals the
bank column-to-column time of 2.5 ns. So every unit that consumes bank data
takes one 128-bit read per bank per cycle.

## How a GEMM is laid out

Take `C = A · W`, where `A` is M×K (activations) and `W` is K×N (weights).

* **Across banks, K is split.** Bank *b* holds rows `8b .. 8b+7` of a
  256-row slab of `W`. Each bank computes a partial product over its 8 values
  of K. The adder trees then add the 32 partial products. Tree *j* takes
  output lane *j* from all banks, so one pass reduces K = 256.
* **Inside a bank, the input is stationary.** The bank's systolic array
  first loads an 8×8 tile of `A`: rows m = 0..7, and the 8 K-values that
  match that bank's slab. After that, every bank read is one column of
  weights, `W[8b..8b+7][n]`. The 8 values of one read are the 8 K-values of
  one output column, which is why a weight tile is stored column after
  column in the bank. Each cycle, one read goes in and one output column
  `C[0..7][n]` (8 FP16 values) comes out.
* **In the array**, PE(r,c) holds `A[r][c]`. Weight value `W[c][n]` enters
  at the top of column c and moves down one PE per cycle. Partial sums move
  from left to right along row r. PE(r,c) adds `A[r][c]·W[c][n]` to the sum
  arriving from its left. Column c of the weights is delayed by c cycles on
  the way in, and row outputs are realigned on the way out. Because of this,
  an output column leaves 2·8+1 = 17 cycles after its read went in, with no
  gaps. The 17 cycles are 8 hops across, a 2-stage multiplier plus a
  1-stage adder in every PE, and the skew registers.
* **Across passes, K is accumulated in the SRAM.** Output column n is one
  128-bit word, at `dst + n`. When a pass has `acc` set, the SIMD adder adds
  the tree output to the word already stored there. Reading and writing
  that word each cycle is why the SRAM has one read port and one write port.
  When `acc` is clear, the adder adds +0, so the tree output is stored
  as-is.
* **N and M, and the higher levels.** Splitting N over the chips of a rank,
  and M over several tiles, is done by whatever issues the commands. Joining
  chip results into a rank result is done by the rank-level units. Neither
  is part of this RTL.

For a GEMV, or any element-wise product, each bank's 16-lane multiplier is
used instead of the array. One multiply needs 16 values but a read delivers
8, so two consecutive reads are paired. Their 16 values are multiplied by a
16-value vector register in the bank. The 16 products leave as two 8-lane
beats (lanes 0–7, then lanes 8–15), which go through the same adder trees
and SRAM path. A pair of reads produces 16 multiplies, or 8 per cycle per
bank. Over the whole system this gives a SIMD rate 1/16 of the GEMM rate,
which is the ratio the architecture is specified with.

The array and the multiplier share the bank's read port, so only one of them
runs at a time. Switching between them waits for the one in use to drain.

## The sequencer and its commands

The paper this design follows gives no instruction set, so the command
interface is this design's own. A command is a packed struct
`sangam_pkg::cmd_t` with these fields: `op`, `bcast`, `bank`, `acc`, `src`,
`dst` and `len`. Commands run one at a time. `cmd_ready` is high when the
sequencer is idle, and `cmd_done` pulses once when a command finishes.

| `op` | Meaning |
|---|---|
| `OP_LOAD_TILE` | Load SRAM words `src..src+7` as rows 0..7 of an input tile. The tile goes to bank `bank`, or to every bank when `bcast` is set. |
| `OP_LOAD_VEC` | Load SRAM words `src`, `src+1` as the 16-value multiplier vector, into one bank or into all of them. |
| `OP_GEMM` | Stream `len` all-bank reads through the systolic arrays. Beat j goes to `SRAM[dst+j]`, added to the old word when `acc` is set. |
| `OP_GEMV` | The same through the SIMD multipliers (`len` even). Read pair p gives beats 2p and 2p+1. |
| `OP_EWMUL` | As `OP_GEMV`, but only bank `bank` reaches the adder trees; the others' lanes are replaced by +0. The result is the element-wise product of that bank's reads with its vector, as needed by activation functions. |
| `OP_MAX` | Running maximum and its index over `len` groups of 64 values (8 words) starting at `src`. The result appears on `max_val` / `max_idx`. |
| `OP_EXP` | e^x of `len` groups of 32 values (4 words), from `src` to `dst`. |

**Bank reads.** `bank_rd_req` asks all banks for their next column.
Addresses stay on the DRAM side: the column decode and bank control logic
there keep them. A request is only issued while `bank_rd_ready` is high. The
DRAM side lowers it for activation, refresh or any other stall. Data returns
on `bank_rd_valid`, in order, after any fixed or varying latency. The
sequencer counts both requests and returns. So a stall costs only the
cycles it lasts, and a GEMM runs at one read per cycle when there is no
stall.

**External port.** The `ext_*` signals read and write the SRAM while the
sequencer is idle. This is how activations, tiles and vectors arrive, and
how results leave, through the chiplet's communication logic. Read data
comes one cycle after the request.

Assertions in `pim_chiplet` check three rules:

* all banks produce results in the same cycle (lock-step);
* the external port is not used while a command runs;
* no read data arrives that was not requested.

## FP16 conventions

All arithmetic is IEEE binary16. The paper does not set the fine points,
so the following are this design's choices. They are the same in every
unit, because the functions in `sangam_pkg` are shared:

* rounding is to nearest, ties to even;
* subnormal inputs count as zero, and results below 2^-14 flush to signed
  zero;
* overflow gives ±inf;
* NaN inputs, inf·0 and inf−inf give the quiet NaN `0x7E00`;
* an exact zero from a subtraction is +0.

The multiplier has two pipeline stages, as the paper gives. The first stage
adds exponents and multiplies significands. The second normalises and
rounds. The adder is one stage and rounds once, using guard, round and
sticky bits. An accumulation therefore rounds after every add. The order of
additions is fixed, and each testbench's reference model follows the same
order:

* inside the array, k runs from 0 to 7, starting from +0;
* in a tree, neighbouring pairs are added, level by level.

**Exponential.** The exp unit works out e^x as 2^(x·log2 e). The argument is
scaled in fixed point, split into an integer part and a fraction f, and
2^f comes from a cubic fitted by least squares. The coefficients are
1 + 0.69543·f + 0.22694·f² + 0.07738·f³, held as integers over 2^16. The
result is within 2 units in the last place of the true value. Zero gives
exactly 1.0. |x| ≥ 32 saturates to +inf or +0. There are two pipeline
stages.

**Max tree.** The max tree compares values in a total order, with −0 below
+0. When two values are equal, the lower index wins. It is combinational
with one output register.

## Departures from the paper and open points

* The paper names the units and their sizes, but not how they are driven.
  The sequencer, the command set and every handshake are this design's.
* The paper does not say which way partial sums move inside the array.
  Here weights move down and partial sums move right, with skew and
  deskew registers. The 17-cycle latency follows from that choice.
* The SRAM organisation (128-bit words, one read and one write port,
  synchronous read) is assumed.
* The vector operand of the SIMD multipliers is loaded from the SRAM into
  a register in each bank. The paper does not say where it comes from.
* The SIMD adder is 8 lanes wide, one lane per adder tree.
* Element-wise products leave through the same adder trees as everything
  else, with all banks but one masked to +0. The paper says the multipliers
  serve element-wise kernels, but not how their results bypass the
  cross-bank sum. One consequence: a product of −0 comes out as +0.
* Softmax is only partly covered: the max tree and the exp unit exist, as
  in the paper, but subtracting the maximum, summing, and dividing are not
  listed among the chiplet's units and are not built.
* `OP_MAX` and `OP_EXP` work on values stored one after another. A GEMV
  writes its outputs that way, so the scores of one query can be reduced
  directly. A GEMM with M > 1 writes one word per output column, holding the
  8 rows, so a row-wise softmax over its output needs a transpose first.
  No unit for that is built.
* Clock gating of idle arrays appears as a register enable: the arrays'
  registers only advance while columns are in flight.
* Not modelled: DRAM timing (activation, refresh), the DDR5 centre-stripe
  logic, the links between logic chiplets, the rank-level units, the CXL
  controller and switch, and the DMA engines. Their place in the design is
  marked by the top's ports.

## Files

`rtl/` holds one package (`sangam_pkg`) and twelve modules. The file
hierarchy, top down:

```
pim_chiplet
  bank_pim x32
    systolic_array -> sa_pe x64
    simd_mul       -> fp16_mul x16
  adder_tree x8        (fp16_add functions)
  simd_add             -> fp16_add x8
  scratchpad_sram
  max_tree
  exp_unit
```

`tb/` holds one self-checking testbench per module, the workload test
`tb_decode_proj`, and `fp16_ref_pkg`.
That package is an independent FP16 reference written with `real` numbers,
and the testbenches use it to work out expected values. Every testbench
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

The testbenches check latencies and rates as well as values:

* multiplier 2 cycles, adder 1, PE 3, array 17, adder tree 5, max tree 1,
  exp 2;
* a full-rate GEMM in `tb_pim_chiplet` must issue its reads on
  consecutive cycles.

`tb_pim_chiplet` runs the full-size chip, with all 32 banks and the 256 KiB
SRAM. It includes a behavioural model of the banks: column streams with a
4-cycle read latency, and a ready signal that can drop at random. The test
runs the following sequence:

* a two-pass GEMM (K = 512, N = 24), the second pass accumulating under
  random stalls;
* a broadcast vector load, a GEMV, and an element-wise product from the
  last bank;
* a broadcast tile load and a short GEMM, which switches the banks from
  the multipliers back to the arrays;
* a max over two groups;
* an exp over two groups.

It compares every result word with a reference. It also counts each
mechanism and fails if one never happens: stalls, accumulation, broadcast,
both mode switches, the element-wise product, max, exp, and a full-rate
pass.

`tb_decode_proj` runs one realistic workload at full size. It takes one
chip's share of a decode-phase gate projection of a 7B-class model with a
batch of 8: GEMM(M = 8, K = 4096, N = 86), where 86 is 11008 output columns
spread over 128 chips. The work takes 16 passes of 32 tile loads and 86
streamed columns, each pass accumulating into the SRAM. All 688 outputs are
checked, and so is the rate. The streaming phases take 1856 cycles, which is
the ideal 16 × 86 plus about 30 cycles of pipeline fill and drain per pass.

The same testbench then runs the batch-1 case, where the LM head is a GEMV
(K shortened to 1024, N = 128). It runs on the SIMD multipliers. In each
pass, bank b streams one row k of the weights, 16 columns per read pair,
and its vector register holds x[k] in all 16 lanes. The adder trees
therefore sum over 32 values of k, and the passes accumulate. The outputs
land in the SRAM in column order, so `OP_MAX` can pick the next token
directly, and the testbench checks that argmax. The streaming itself takes
1024 cycles (32 passes of 16 reads plus fill). Loading 32 vectors per pass
costs another 5120 cycles. So in this mapping, unless N per chip is large,
the time goes to loading vectors. A sequencer that loaded all banks'
vectors in one burst would remove most of that; this one does not.

## Simulating

Any testbench builds with plain Verilator 5, with the package files first.
For example:

```
verilator --binary --timing -Wno-fatal \
  rtl/sangam_pkg.sv tb/fp16_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v sangam_pkg) tb/tb_pim_chiplet.sv \
  --top-module tb_pim_chiplet -o sim
./obj_dir/sim | grep TB_RESULT
```

For a single block, list only the files it needs. For `tb_systolic_array`,
that is `sangam_pkg.sv`, `fp16_ref_pkg.sv`, `sa_pe.sv`, `systolic_array.sv`
and the testbench. The full-size chip test takes a few minutes to compile
and well under a minute to run. For faster turnaround, change `NB` inside
`tb_pim_chiplet` (2 banks work). The reference functions follow `NB`.

The parameters of the top (`NB`, `DIM`, `DEPTH`) default to the chip's
numbers: 32 banks, 8×8 arrays and 16384 SRAM words. The command encoding
assumes up to 32 banks, through the 5-bit `bank` field, and up to 16384 SRAM
words, through the 14-bit addresses.
