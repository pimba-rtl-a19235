# Pimba: a state-update engine inside HBM

Post-transformer LLMs (RetNet, GLA, HGRN2, Mamba-2 and hybrids
such as Zamba2) replace the growing key/value cache of attention with a
fixed-size matrix state per head. Each generated token updates that state and
reads it once:

    S_t = d_t (.) S_{t-1} + k_t v_t^T        (decay, then rank-one update)
    y_t = S_t^T q_t                          (output)

Every element of S is read, changed and written back once per token, with
only a few multiply-adds per element. The step is limited by memory
bandwidth, not by arithmetic. Pimba puts the arithmetic next to the DRAM
banks. Its goal is to do this with as little logic per bank as possible, so
three ideas work together:

* **One processing unit per two banks.** A State-update Processing Unit (SPU)
  sits between an "upper" and a "bottom" bank. Its four-stage pipeline
  (the State-update Processing Engine, SPE) alternates between the two banks
  on every clock. It reads a column of one bank while it writes the result of
  an earlier column back into the other bank. A bank never has to read and
  write in the same cycle, and each unit does the work of two banks.
* **MX8 numbers.** State, operands and results are stored in a block format
  with 8 bits per value. Sixteen values share an exponent, each pair of
  values shares a one-bit microexponent, and each value keeps a sign and a
  6-bit magnitude. Multiplying and adding such groups needs only small
  integer multipliers, shifters and one exponent compare per group.
* **Stochastic rounding.** A state that is re-quantised on every token would
  drift if it were always rounded the same way. The adder output is rounded
  to MX8 by adding random bits below the cut before truncating, so the
  rounding error averages out over many tokens.

The same pipeline also runs the two halves of attention for the transformer
layers of hybrid models. In *score* mode it computes dot products of key
columns with q. In *attend* mode it computes score-weighted sums of value
columns.

This repository holds synthesizable SystemVerilog for one HBM pseudo-channel
of such a design: 16 banks, 8 SPUs, the command decoder and timing scheduler,
and the fp16-to-MX8 quantizer. It also holds self-checking testbenches for
every block and for the whole channel. The DRAM arrays themselves are not
RTL. A behavioural bank model stands in for them in the testbenches.

## Numbers: the MX8 group and its wide forms

The format is fixed in `rtl/pimba_pkg.sv`.

    MX8 group, 128 bits
      [127:120]  shared exponent E, bias 127
      [119:112]  microexponents; bit p belongs to elements 2p and 2p+1
      [7e+6:7e]  element e (0..15): {sign, magnitude[5:0]}
      value(e) = (-1)^sign * magnitude * 2^(E - 127 - micro[e/2] - 5)

A DRAM column of 256 bits (one *sub-chunk*) holds two groups, i.e. 32
elements. Element j of a column lives in group j/16, slot j%16.

A microexponent of 1 means both elements of a pair are half the scale of the
group. They keep one extra bit of precision. The format follows the paper in
group size, pair sharing and 6-bit magnitude. The bit layout, the bias and
where the binary point sits are this implementation's choices.

Inside the SPE, values travel in wider forms that never lose bits until the
final rounding:

| type | made by | per element | value |
|---|---|---|---|
| `mxw_group_t` | multiplier | sign + 12-bit magnitude, 8 microexponents kept | `mag * 2^(exp-127-micro-10)` |
| `mxs_group_t` | adder | signed 18-bit, no microexponent | `val * 2^(exp-127-14)` |
| `acc_scalar_t` | dot product | one 22-bit signed mantissa, 10-bit exponent | `mant * 2^(exp-12)` |

## The arithmetic units

**MX multiplier** (`mx_multiplier`). The group exponent is `Ea + Eb - 127`.
Each element's magnitude product is 12 bits. Microexponents combine in two
ways:
- the output microexponent of a pair is the OR of the two input bits;
- the product is shifted right by one when both inputs have the bit set (the
  AND).

Together these give an exact product. Sign is an XOR. The block is
combinational.

**MX adder** (`mx_adder`). A compare unit picks the larger exponent and the
difference. Each element of the smaller group is shifted right by the
difference plus its own microexponent. Each element of the larger group is
shifted by its microexponent only. Four guard bits are kept below the 12-bit
magnitude, so the rounder still sees what was shifted out. The two signed
values are then added. The output microexponents are zero.

**Stochastic-rounding quantizer** (`mx_sr_quantizer`). This unit turns an
adder result back into MX8:
1. It finds the leading one of the OR of all 16 magnitudes.
2. That sets the new shared exponent, so the largest element keeps 6
   significant bits.
3. For each element it adds a random number below the cut and truncates.

The random bits come from one 32-bit LFSR word per clock. Each element uses
a different rotation of that word. Further rules:
- a magnitude that rounds up to 64 saturates at 63;
- a group whose exponent would fall below 0 becomes zero;
- an exponent above 255 saturates.

With `sr_en` low the unit truncates.

**LFSR** (`lfsr`). A 32-bit Galois register with polynomial
x^32+x^22+x^2+x+1. It advances once per pipeline step.

**Dot product** (`mx_dot_product`). This unit multiplies the 32 element pairs
of a state (or key) column and of q. Each product is shifted left by
`2 - micro_a - micro_b`, so all products of a group sit on one integer grid.
It sums them per group. The two group sums are then combined with the same
align-and-add as the accumulators (`acc_add` in the package). The result is
one `acc_scalar_t`.

**Quantization Unit** (`mx_quantizer`). This unit sits at the host side and
turns 16 fp16 operands into one MX8 group:
- the largest fp16 exponent becomes the shared exponent, rebiased;
- a pair whose two values are both below that maximum gets microexponent 1;
- each mantissa is shifted into 6 bits by truncation.

Zeros and subnormals become zero. A `REG_WRITE` flagged as needing
quantization passes through two of these units, one per group.

## The SPE pipeline and its three modes

The pipeline (`spe`) advances only on `step`, which the controller raises
once per SPU clock (tCCD_L = 4 memory-bus cycles). One step is one
*iteration*, i.e. one sub-chunk:

| stage | state update (SU) | score | attend |
|---|---|---|---|
| 1 | register the column read from the bank | same | same |
| 2 | `d x S` and `k x v[eidx]` (v element broadcast) | — | `V x score[eidx]` |
| 3 | add, stochastic rounding to MX8 | — | add to vector accumulator, round, store |
| 4 | write S_t back to the bank; `S_t . q` into scalar accumulator | `K . q` into scalar accumulator | — |

The operands d, q, k and v sit in the SPU register file (`spu_regs`). There
is one full set of four 256-bit words for each of the two banks, so the two
banks can hold different heads. Registers are written by `REG_WRITE`
commands. They can be changed while a burst is running, because the pipeline
reads them at stage 2.

Each iteration carries a tag through the pipeline with these fields:
- **mode**;
- **side** (upper or bottom bank);
- **column**;
- **eidx**: which element of v, or of the scores, is broadcast;
- **acc_idx**: the accumulator entry;
- **acc_clr**: start a new sum instead of adding.

Scalar accumulators are 32 entries per side. A result read returns eight of
them, packed into 256 bits. Vector accumulators for attend are four MX8 words
per side. They are rounded with the same stochastic quantizer after each
addition.

In SU mode y_t comes out as one partial sum per sub-chunk. The host adds the
partial sums across sub-chunks, or lets consecutive COMPs add into one
accumulator entry by clearing only on the first.

## Access interleaving between the bank pair

`spu` connects one SPE to its upper bank (2s) and bottom bank (2s+1):
- The controller picks the side for every step. It alternates on every step
  and restarts at the bottom bank whenever the pipeline has emptied, giving
  the read order B0, U0, B1, U1, …
- An iteration is read at stage 1 and written at stage 4, three steps later.
  So its write always goes to the other bank than the read of the same
  cycle.
- An assertion in `spu` checks that no bank ever sees a read and a write in
  one cycle.

In a long burst each bank therefore does a read and a write every second SPU
clock, and the SPU does useful work on every clock.

When the host stops sending COMPs, iterations would otherwise stay in the
pipeline. So the controller inserts drain steps (*bubbles*) every tCCD_L
cycles until the pipeline is empty. These steps still toggle the side.

## Commands and timing

The host drives five commands, decoded by `pim_controller`:

| command | effect |
|---|---|
| `ACT4 bg,row` | open `row` in the four banks of bank group `bg` at once |
| `REG_WRITE spu,side,reg,data` | load one operand word into one SPU, or into all (`bcast`) |
| `COMP mode,col,eidx,acc_idx,acc_clr` | one iteration in all 8 SPUs |
| `RESULT_READ spu,side,vec,idx` | return one 256-bit accumulator word, one cycle later |
| `PRECHARGES` | close all banks |

A full state-update burst over one row pair is:

    ACT4 x4, 64 COMP, PRECHARGES, RESULT_READs

The 64 COMPs are 32 columns in each of the two banks.

`pim_cmd_scheduler` issues the host's commands in order. Each waits until
the HBM timing rules allow it. The values are in memory-bus cycles:

| rule | value | applies to |
|---|---|---|
| tFAW | 30 | between ACT4s: four activations fill one window |
| tRP | 14 | PRECHARGES to ACT4 |
| tRAS | 34 | ACT4 to PRECHARGES |
| tCCD_L | 4 | between column commands (REG_WRITE, COMP, RESULT_READ) |
| tWR | 16 | write recovery |
| tRTP_L | 6 | read to precharge |
| tRCD | 14 | ACT4 to COMP (value assumed, not from the paper) |

Because COMP writes three SPU clocks after it reads, RESULT_READ and
PRECHARGES wait `3*tCCD_L + tWR` after the last COMP.

Two overlaps from the paper's command schedule come out of the rules
themselves:
- REG_WRITEs queued between ACT4s issue inside the tFAW windows, so loading
  operands costs no time;
- RESULT_READs queued after PRECHARGES issue during tRP.

The status outputs `stat_ovl_regw` and `stat_ovl_rr` pulse when that happens.

## The top level: `pimba_top`

`pimba_top` is one pseudo-channel. Its blocks are:
- host command queue input (`host_valid`/`host_ready`, `pim_cmd_t`),
  optionally with 32 fp16 values to quantize (`host_quant`, `host_fp16`);
- the scheduler, the controller, two quantizers, and 8 SPUs;
- per-bank ports toward the DRAM: `bank_act`/`bank_act_row`, `bank_pre`, and
  the column read (`bank_rd`, `bank_rd_col`, combinational `bank_rdata`)
  and write (`bank_we`, `bank_wr_col`, `bank_wdata`, at the clock edge) of
  each row buffer;
- results on `rr_valid`/`rr_data`.

Bank b belongs to bank group b/4. SPU s owns banks 2s and 2s+1.

Parameters, all with the paper's configuration as default:

| parameter | default | meaning |
|---|---|---|
| `N_SPU` | 8 | SPUs per pseudo-channel |
| `N_BANK` | 16 | banks (two per SPU) |
| `ACC_N`, `VACC_N` | 32, 4 | accumulator entries per side (own choice) |
| `TFAW` … `TRCD` | see table above | timing in bus cycles |

## Mapping a model onto the banks

A head's state is a `dim_state x dim_head` matrix. Each state column is cut
along `dim_head` into 32-element sub-chunks, one DRAM column each. A row of
32 columns is a *chunk* of sub-chunks that share d, q and k. Heads, or groups
of chunks, are spread over banks. One COMP therefore processes 32 elements in
each of 16 banks: 512 state values per pseudo-channel per SPU clock.

At the paper's 1.512 GHz bus clock that is 512 values per 2.65 ns, about
193 G state values per second per pseudo-channel. The cost is dominated by
the bank accesses, as the design intends. Per row pair it adds ACT4/tFAW and
precharge overhead of roughly 170 bus cycles, against 256 cycles of COMPs.

## Verification

Each block has a self-checking testbench in `tb/`. The checks are against
real-number reference models in `tb/mx_ref_pkg.sv`, which compute each
format's value directly from its definition.

| testbench | what is checked |
|---|---|
| `tb_mx_multiplier` | 10000 random products, exact |
| `tb_mx_adder` | sums against exact real sums within the guard-bit error |
| `tb_mx_sr_quantizer` | rounding to within 1 ulp, saturation, flush; mean of stochastic rounding is unbiased |
| `tb_lfsr` | 2000 steps against a bit-level model; hold when disabled; never zero; reset reloads the seed |
| `tb_mx_dot_product` | 500 random dot products |
| `tb_mx_quantizer` | fp16 groups against their real values |
| `tb_spu_regs` | per-side, per-register writes |
| `tb_spe` | SU, score and attend through the pipeline; write-back timing; accumulator clear |
| `tb_spu` | a burst with interleaved reads and writes on two bank models; no conflicts |
| `tb_pim_controller` | decoding, step spacing, bubbles, side sequence, result read |
| `tb_pim_cmd_scheduler` | every timing rule, and both overlaps |
| `tb_pimba_top` | full-size pseudo-channel run (below) |

`tb_pimba_top` runs the full-size channel, with no parameter overrides,
against 16 bank models (`tb/hbm_bank_model.sv`). It runs three rounds:
1. A state update of a whole row in all 16 banks:
   - 64 REG_WRITEs, interleaved with the ACT4s;
   - one REG_WRITE goes through the fp16 quantizer;
   - then 64 COMPs, PRECHARGES and 64 RESULT_READs.

   Every written-back state word and every y partial sum is compared with
   the reference. The COMPs must come exactly one per tCCD_L.
2. Attention scores over two-column keys.
3. Attend over four value columns, with the scores broadcast to all SPUs.

It also counts drain bubbles, overlapped REG_WRITEs and RESULT_READs,
interleaved read/write steps, quantized writes and COMPs of each mode. It
fails if any of these never happened.

To run a testbench with plain Verilator (5.x):

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/pimba_pkg.sv tb/mx_ref_pkg.sv rtl/*.sv tb/hbm_bank_model.sv \
        tb/tb_pimba_top.sv --top-module tb_pimba_top -j 4
    obj_dir/Vtb_pimba_top

(list `rtl/pimba_pkg.sv` once; the glob may be replaced by the modules the
testbench needs). Each testbench prints `TB_RESULT checks=N failures=M`.
Building the full channel takes a few minutes, because every element
datapath is unrolled.

## Where this design departs from, or goes beyond, the paper

The paper gives the block structure, the pipeline stages and the command set.
It also gives the MX multiplier and adder datapaths, the timing parameters
and the bank pairing. Everything below is this implementation's own choice
and can be changed without touching the rest:

* MX8 bit layout, bias 127, binary point, and the wide intermediate formats
  (12-bit products, 4 guard bits, 18-bit sums).
* Normalisation, saturation and flush rules of the stochastic rounder. Also
  the use of one 32-bit LFSR word per step, rotated per element.
* The dot-product arithmetic and the scalar accumulator format; the
  accumulator sizes; the MX8 vector accumulator for attend, re-rounded after
  every addition.
* Two operand sets per SPU, one per bank. The paper only says operands are
  loaded into registers before an iteration.
* Command encodings (`pim_cmd_t`), one-cycle result-read latency, and the
  automatic drain bubbles.
* Which four banks an ACT4 opens (a bank group). tRCD = 14 is assumed.
* The fp16 quantizer's microexponent rule and truncation.
* Score partial sums. In the paper each score partial goes to the GPU, which
  adds them up and applies softmax. Here a COMP with `acc_clr` set on every
  sub-chunk reproduces that. Clearing only on a key's first sub-chunk lets the
  scalar accumulator add the sub-chunks of one key in memory instead.
* Bank capacity. The RTL addresses 2^14 rows of 32 columns per bank
  (`ROW_W`, `COL_W` in the package). The paper does not give the row count.

Not modelled:
- the DRAM cell arrays, sense amplifiers and I/O;
- the host GPU and its software, which splits the model between GPU and
  memory and adds up the partial outputs.

The testbench bank model is a plain array with a row buffer. It does not
check DRAM timing itself; the scheduler enforces the timing.
