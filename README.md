# PIM-GPT in SystemVerilog

Generating one token with a GPT model means multiplying one vector by every
weight matrix of the model. Each weight is used once per token. So a GPU or CPU
spends most of its time moving weights out of DRAM, not computing. PIM-GPT
(processing in memory) leaves the weights where they are. A small
multiply-accumulate (MAC) unit beside every DRAM bank computes the
vector-matrix products (VMM) inside the memory chips. Only the input and
output vectors cross to a small companion ASIC. The ASIC does everything that
is not a multiply-accumulate: adding partial sums, Softmax, LayerNorm, GELU,
and writing each new token's Key and Value vectors back into DRAM.

This repository holds synthesizable RTL for that system, built after the
PIM-GPT paper (Wu et al.), with self-checking testbenches. It includes:

- the eight PIM channels;
- the ASIC's interconnect, queues, packetizers, SRAM, computation engine and
  instruction scheduler;
- the BF16 arithmetic units.

The paper describes the hardware at block level. It gives sizes, timing and
the approximation algorithms, but no instruction set, no packet format and no
control details. This design supplies those. Every such choice is marked below
and in the opening comment of each file.

## The system at a glance

```
             host: loads the instruction memory and SRAM, pulses start, waits for done
                |
  +-------------v--------------------------------------------------------------+
  | ASIC (pim_gpt_asic)                                                        |
  |   instruction memory -> instr_scheduler --+--> compute_engine <--> SRAM     |
  |                                           |     (128 mul, 256 add,         |
  |                                           |      Taylor, 1/x, 1/sqrt x)    |
  |                                           v                                |
  |   SRAM --> addr_map_packetizer --> request queue --> request xbar ---------+--> 8 channels
  |                                       ^                                    |
  |             wb_packetizer ------------+ (Key/Value write-back)              |
  |                  ^                                                         |
  |   SRAM <--+--- data queue <-- response xbar <------------------------------+--- 8 channels
  |           +-> (or wb_packetizer, by the tag's route)                        |
  +----------------------------------------------------------------------------+
  PIM channel (pim_channel) x 8: global buffer 2 KB + 16 x (DRAM bank + MAC unit)
```

| Quantity | Value | Origin |
|---|---|---|
| Clock | 1 GHz; all timings below are in cycles | paper |
| Channels | 8; 16 banks each | paper |
| Bank | 16384 rows of 2 KB; a row is 64 words of 256 bits | paper (4 Gb per channel) |
| Global buffer | 2 KB per channel, 64 words | paper |
| MAC unit | 16 multipliers and an adder tree per bank | paper |
| DRAM timing | tRCD 12, tRP 12, tCCD 1, tWR 12, tRFC 455, tREFI 6825 | paper |
| ASIC SRAM | 128 KB as 512 rows of 2048 bits (128 BF16 per row) | size from the paper, shape own |
| Engine | 128 multipliers, 256 adders | paper |
| Taylor unit | 16 lanes, 7 pipeline stages | own |
| Queues | request and data queues, 16 entries each | own |
| Outstanding reads | at most 16 | own |

A 256-bit word (16 BF16 values) is the unit of transfer everywhere on the PIM
side. It models a channel's 16 pins at 16 Gb/s, which carry 256 bits per
1 GHz cycle. The GDDR6 PHY itself is not modelled.

## Numbers

All data is bfloat16: 1 sign bit, 8 exponent bits, 7 fraction bits. The adder
(`bf16_add`) and multiplier (`bf16_mul`) are combinational. Their behaviour:

- They round to nearest, ties to even.
- Subnormal inputs and results are flushed to zero.
- An exponent of 255 is treated as infinity; there are no NaNs.

The paper asks only for standard floating-point units. The flushing and the
missing NaNs are this design's simplifications.

## Inside a PIM channel

A channel (`pim_channel`) takes one command per cycle on a valid/ready port.
The commands are defined in `pimgpt_pkg::pim_cmd_e`:

| Command | Effect |
|---|---|
| `ACT` | open a row in one bank, or in all 16 banks (`ab` = 1) |
| `PRE` | close the open row in one bank, or in all banks |
| `WR` | write the lanes selected by `mask` into column word `col` of one bank's open row |
| `RD` | read column word `col` of one bank's open row |
| `WR_GB` | write a word into the global buffer |
| `MAC_AB` | every bank multiplies column word `col` of its open row by global-buffer word `col` and accumulates |
| `RD_MAC` | return the 16 bank accumulators as one word (bank b in lane b) and clear them |

A command that DRAM timing does not yet allow is simply held, with `cmd_ready`
low. The channel enforces these rules:

- tRCD from an `ACT` to a column command;
- tRP from a `PRE` to the next `ACT`;
- tWR from a write to a `PRE`;
- tCCD, by accepting at most one command per cycle.

Every tREFI cycles the channel refreshes. It then takes no command for
tRP + tRFC + tRCD cycles: the time to close the rows, refresh, and reopen
them. The model keeps the open rows, so the command stream needs no change
around a refresh. The paper gives tRFC and tREFI but says nothing about how
refresh is scheduled; this scheme is this design's choice.

Reads (`RD`, `RD_MAC`) and `MAC_AB` use a two-stage pipeline. Read data is
valid in the third cycle after the command. It enters a 4-entry response
queue together with the command's tag and the channel number.

**MAC unit** (`pim_mac_unit`). The 16 products go through a tree of
8 + 4 + 2 + 1 adders that sums neighbouring lanes. That is the structure of
the paper's bank figure. After the tree this design adds an accumulator
register and adder. With it, one `RD_MAC` returns the dot product of a whole
row segment (many `MAC_AB`s) instead of one 16-element partial sum.

**Bank** (`dram_bank`). This is a behavioural model: a memory array plus an
open-row register. The real cell array, sense amplifiers and decoders are
analog parts of the DRAM process.

## How a matrix-vector product runs

Matrix row r lives in one bank. All 128 banks (8 channels × 16) therefore each
produce one output element per pass. A pass has four steps:

1. `OP_GBLOAD` copies up to 64 words of the input vector from the SRAM into
   the global buffer of every channel, by broadcast.
2. `ACT` (all banks, broadcast) opens the row holding the current weight
   segment.
3. One broadcast `MAC_AB` per column word makes all 128 banks work at once.
4. A broadcast `RD_MAC` returns eight words, one per channel. The tag says
   where they go. For the SRAM, channel c's word is written to SRAM word
   `tag.addr + c`, so eight channels fill one 128-element SRAM row.

When a matrix row is longer than a DRAM row, or a vector longer than the
global buffer, the product is split into chunks. Each chunk's partial result
vector lands in its own SRAM row. The engine adds them with `V_ADD`. This is
the paper's weight tiling with partial sums accumulated on the ASIC.

## The ASIC's data paths

Read data from PIM takes one of two paths. The route field of the read's tag
chooses which one:

- `RT_SRAM`: to the SRAM, for work on the ASIC.
- `RT_KWB` / `RT_VWB`: to the write-back packetizer (`wb_packetizer`), which
  turns a new token's Key or Value results into DRAM writes at once, without
  passing through the SRAM.

**Key and Value layout.** Keys are stored row-major and Values column-major.
Both are spread over all channels and banks, so that later attention VMMs use
every bank. The paper shows this spread only as a picture; the formulas are
this design's own.

A response holds element group g (elements 16g … 16g+15) of token t, where
g = `tag.addr` + channel.

| | Where element j of token t goes |
|---|---|
| Key | bank t mod 16, channel (t/16) mod 8. DRAM row `base + (t/128)·rpt + g/64`, column word g mod 64. One `WR` of 16 lanes. |
| Value | bank j mod 16, channel g mod 8. DRAM row `base + (g/8)·rpt + t/1024`, element t mod 1024. Sixteen single-lane `WR`s, one per bank. |

The target rows must be open when the writes arrive. The program arranges
that: the write-back rows share a DRAM row with weights that are in use, or
the program opens them beforehand.

**Interconnect.**

- The request crossbar (`req_xbar`) sends a packet to one channel, or to all
  eight for a broadcast. A broadcast is complete only when every channel has
  taken it, and channels may take it in different cycles.
- The response crossbar (`rsp_xbar`) takes one response per cycle from the
  channels, by round-robin, into the data queue.
- The write-back packetizer has priority into the request queue over the
  address-mapping packetizer (`addr_map_packetizer`). Responses can therefore
  always drain.

**Avoiding deadlock.** A read's data needs space in the data queue. If the
data queue is full, requests stall behind it. The scheduler therefore never
lets more reads be outstanding than the data queue holds (`MAX_OUT` = 16, and
a broadcast read counts 8). This limit is this design's addition; the paper
does not discuss flow control.

## Instructions and the scheduler

The paper names an instruction scheduler but defines no instructions. This
design uses a 1024-entry instruction memory of `instr_t` words (see
`pimgpt_pkg`), issued in order, one every two cycles at best:

| Opcode | Meaning | Issues when |
|---|---|---|
| `OP_PIM` | one PIM command, unicast or broadcast, with its read tag | the packetizer is free and the outstanding-read limit allows |
| `OP_GBLOAD` | copy `len` SRAM words into global-buffer words (`WR_GB`) | packetizer free |
| `OP_STORE` | copy one SRAM word into a bank (`WR`), e.g. to load weights | packetizer free |
| `OP_VOP` | one computation-engine operation | no read outstanding, engine idle |
| `OP_SETS` | scalar register ← immediate | same as `OP_VOP` |
| `OP_WAIT` | barrier: all reads back, all queues empty | — |
| `OP_HALT` | stop and raise `done` | — |

`stall_cycles` counts the cycles an instruction waited to issue.

Because engine operations wait for every outstanding read, the engine never
reads a half-written SRAM row. The price is that the engine does not overlap
with PIM reads. The paper's pipelining of computation with transfer is not
implemented.

## The computation engine

`compute_engine` works on whole SRAM rows of VL = 128 BF16 values. It has:

- 128 multipliers;
- 128 element-wise adders;
- a 127-adder reduction tree and one accumulating adder. With the element-wise
  adders this makes the paper's 256 adders; the split is this design's
  reading.
- a 16-lane Taylor unit;
- the reciprocal and inverse-square-root units;
- eight scalar registers S0–S7.

| Operation | Result | Time |
|---|---|---|
| `V_ADD`, `V_MUL` | row by row A+B, A·B | 2 cycles per row |
| `V_SADD`, `V_SMUL` | A + S[sa], A · S[sa] | 2 cycles per row |
| `V_SUM` | S[sd] = sum of the first n elements of A | 2 cycles per row |
| `V_EXP`, `V_TANH` | eˣ, tanh x of each element | 8 cycles per row + 7 latency |
| `S_ADD`, `S_MUL` | scalar | 1 cycle |
| `S_RECIP` | 1/S[sa] | 5 cycles |
| `S_RSQRT` | 1/√S[sa] | 3 cycles |

The GPT functions are built from these operations:

- **Softmax:** `V_EXP`, `V_SUM`, `S_RECIP`, `V_SMUL`. Division is a
  reciprocal followed by a multiply, as the paper does it.
- **LayerNorm:** `V_SUM` and a multiply by 1/n for the mean; `V_SADD` of −mean;
  `V_MUL` to square; `V_SUM` and a multiply by 1/n for the variance; `S_ADD`
  of ε; `S_RSQRT`; `V_SMUL`.
- **GELU:** the tanh form 0.5·x·(1 + tanh(0.79788·(x + 0.044715·x³))), with
  `V_MUL`, `V_SMUL`, `V_ADD`, `V_TANH`, `V_SADD`.

The end-to-end testbench contains each of these sequences as a working program.

**Taylor unit** (`taylor_unit`). It evaluates six terms of each series in
Horner form:

- eˣ ≈ 1 + x + x²/2 + x³/6 + x⁴/24 + x⁵/120;
- tanh x ≈ x − x³/3 + 2x⁵/15 − 17x⁷/315 + 62x⁹/2835 − 1382x¹¹/155925,
  evaluated in x².

The unit is pipelined over seven stages and takes 16 lanes per cycle. There
is no range reduction. The results are good for |x| up to about 1 (eˣ) and
0.8 (tanh), and degrade beyond that. Softmax does not subtract the maximum,
following the paper's formula. Inputs must therefore stay small.

**Reciprocal** (`fast_recip`). This is Newton–Raphson division. The exponent
of D is replaced so that D′ lies in [0.5, 1). The first guess is
X = 48/17 − 32/17·D′. Three iterations X ← X + X(1 − D′X) follow. Finally the
exponent is shifted back by the amount removed. The paper prints the last
step with the same scaling as the first, which cannot be right for a
reciprocal; the inverse scaling is used. The unit has one pipeline stage per
step (5 cycles).

**Inverse square root** (`fast_invsqrt`). This is the classic integer trick:
place the BF16 bits in the top half of a 32-bit word, compute
0x5f3759df − (L >> 1), keep the top 16 bits, then do two Newton steps
X ← X(1.5 − D′X²) with D′ = D/2. The paper's algorithm listing builds L from
D′, but its text and the original trick build it from D. Building it from D′
would give a starting guess off by about √2. This design follows the text
(L from D). Latency is 3 cycles.

## Where this design departs from, or adds to, the paper

- **Own additions:**
  - the instruction set;
  - the command set and packet format;
  - tags and routes;
  - the Key/Value address formulas;
  - refresh handling;
  - the outstanding-read limit;
  - the bank accumulator;
  - SRAM shape and ports;
  - the host interface;
  - queue depths.
- **Paper's two conflicting readings:** the reciprocal's final scaling and
  the inverse square root's starting value (both described above).
- **Not built:**
  - the GDDR6 PHY (replaced by a 256-bit parallel link);
  - the DRAM cell circuits (behavioural model);
  - the offline model mapper;
  - overlap of engine work with PIM transfers;
  - range reduction in the Taylor unit;
  - a maximum operation for Softmax.
- **Not synthesis-ready:** the DRAM model is a 4 GB array at full size. Only
  the ASIC and the MAC units are meant for synthesis.

## Capacity

At its default size the model has 8 × 16 × 16384 × 2 KB = 4 GiB of DRAM. The
paper evaluates four GPT-2 and four GPT-3 models generating 1024 tokens. The
model shapes below are the public GPT-2/GPT-3 figures, not the paper's.

| Model | Weights (BF16) | Key+Value, 1024 tokens | Total | Fits |
|---|---|---|---|---|
| GPT2-small | 0.23 GiB | 36 MiB | 0.27 GiB | yes |
| GPT2-medium | 0.66 GiB | 96 MiB | 0.75 GiB | yes |
| GPT2-large | 1.44 GiB | 180 MiB | 1.62 GiB | yes |
| GPT2-XL | 2.90 GiB | 300 MiB | 3.19 GiB | yes |
| GPT3-small | 0.23 GiB | 36 MiB | 0.27 GiB | yes |
| GPT3-medium | 0.65 GiB | 96 MiB | 0.75 GiB | yes |
| GPT3-large | 1.42 GiB | 144 MiB | 1.56 GiB | yes |
| GPT3-XL | 2.42 GiB | 192 MiB | 2.61 GiB | yes |

The other limits also hold for every model:

- the largest vector (the FFN's 4·d, at most 8192 elements) fits in the
  128 KB SRAM;
- the 12-bit token field in the tag allows 4096 tokens;
- a Key row of up to 2048 elements spans at most two DRAM rows, within the
  tag's rows-per-token field.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The reference arithmetic is in
`tb/bf16_ref_pkg.sv`: BF16 rounding is done from real (double) arithmetic,
independently of the RTL.

- **Arithmetic.** The adder and multiplier are checked bit-exact on random and
  corner-case values. The MAC unit is checked bit-exact with the same tree
  order. The Taylor, reciprocal and inverse-square-root units are checked
  against real eˣ, tanh, 1/x and 1/√x within a tolerance.
- **Memories and queues.** Models compare write masks, both read ports, FIFO
  order and full/empty behaviour.
- **Channel.** Checked against tRCD and tRP, the 3-cycle read latency, a
  refresh, and MAC results.
- **Interconnect and packetizers.** Checked for routing, broadcast completion,
  round-robin fairness, and every Key/Value write address.
- **Engine and scheduler.** Every engine operation is run on a model SRAM. The
  scheduler is run with random programs against models of the packetizer and
  engine. Its checks: program order, the outstanding-read limit, that no
  engine operation starts with reads outstanding, and that the barrier holds.
- **Whole system** (`tb_pim_gpt_top`, reduced size: 16 rows per bank, 32
  engine lanes, 8 Taylor lanes, refresh every 700 cycles). The program:
  1. loads 1024 weight words into DRAM with `OP_STORE`;
  2. runs two broadcast VMM passes over 128 banks;
  3. checks both partial sums and their `V_ADD` bit for bit;
  4. runs Softmax, LayerNorm and GELU on the result and checks them against
     real arithmetic;
  5. writes one Key and one Value back into DRAM and checks them in the bank
     arrays.

  The testbench also counts each mechanism and fails if any never happens:
  refreshes, commands blocked by refresh, tRCD/tRP/tWR stalls, broadcasts,
  outstanding-read stalls, engine-busy stalls, Key and Value write-backs, and
  each engine operation.
- **Full size** (`tb_pim_gpt_full`). The same program and checks run with the
  top at its default parameters: 8 channels of 16384-row banks, 128 engine
  lanes, refresh every 6825 cycles. The model needs about 4.2 GB of memory and
  about 3 minutes to build with Verilator; the run itself takes seconds.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing -Wno-fatal --top-module tb_pim_gpt_top \
    -y rtl -y tb +libext+.sv rtl/pimgpt_pkg.sv tb/bf16_ref_pkg.sv tb/tb_pim_gpt_top.sv
./obj_dir/Vtb_pim_gpt_top
```

The testbenches assume a two-state simulator with random initial values. They
reset or initialise everything they read.

## Files

- `rtl/pimgpt_pkg.sv`: sizes, timing, command, packet and instruction types.
- `rtl/pim_gpt_top.sv`: the whole system.
- `rtl/pim_gpt_asic.sv`: the ASIC.
- `rtl/pim_channel.sv`: a PIM channel.
- The remaining `rtl/` files each hold one block named above.
- `tb/tb_<module>.sv`: the testbench of each module.
- `tb/tb_pim_gpt_full.sv`: the full-size system test.
