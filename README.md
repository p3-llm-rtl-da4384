# P3-LLM processing-in-memory datapath: RTL

## The idea

Decoding an LLM (a large transformer text model) at small batch sizes is bound by memory
bandwidth: every weight and every cached key/value is read once per generated
token and used for only one to a few multiply-accumulates. Processing-in-memory
(PIM) puts small compute units next to the DRAM banks so that those reads never
cross the memory bus. Earlier PIM designs (HBM-PIM) used FP16 units that keep
up only with single-batch, multi-head attention. Modern models use grouped-query
attention, and edge serving runs batches of 2 to 8, so each column read from a
bank should feed more than one multiply.

This design does two things to raise the PIM compute rate:

1. **Narrow operands.** Each operand class gets its own format:
   - Weights are 4-bit BitMoD FP4. This is E2M1 in which the unused "minus zero"
     code stands for a per-group special value, one of ±5 or ±8.
   - The KV-cache is 4-bit asymmetric integers (`INT4-Asym`), stored as code
     minus zero point.
   - Activations and queries are FP8-E4M3.
   - Softmax attention scores are FP8-S0E4M4. Scores lie in [0, 1], so the sign
     bit is dropped and spent on a fourth mantissa bit.

   A processing unit that multiplies a 4-bit operand by an 8-bit float is much
   smaller and faster than an FP16 one.
2. **Temporal reuse.** The small processing unit (PCU) runs at twice the rate of
   an HBM-PIM one: one cycle per tCCD_S = 2 DRAM clocks instead of
   tCCD_L = 4. A bank still delivers only one column per tCCD_L. The PCU
   therefore keeps the column it has just read and multiplies it again, in the
   next cycle, with a second input vector. That second vector is the second
   batch row, or the second query head of a GQA group. The result is two GEMV
   operations for the price of one column read.

The RTL here covers the PIM side: the casts of NPU data to FP8, the PCU with its
input registers, decoders, multipliers and adder tree, the command timing in a
pseudo channel, and the 16-channel top. The DRAM array and the NPU are not RTL.
The testbenches replace the DRAM with a behavioural column model and drive the
host side directly.

## Number formats and the fixed-point datapath

Every product is formed as a signed integer. Each operand format is mapped to a
fixed-point scale that makes all of its values integers:

| operand | format | decoded as | scale |
|---|---|---|---|
| weight | BitMoD FP4: s, e[1:0], m | signed 6-bit value in half units; magnitudes {0,.5,1,1.5,2,3,4,6}, and code 1000 is the special value ±5 or ±8, picked by a 2-bit side field | ×2 |
| KV-cache | INT4-Asym | code − zero point, signed 6 bit | ×1 |
| activation / query | FP8-E4M3, bias 7 | sign, 4-bit exponent, 5-bit significand (hidden bit included) | ×2^10 |
| attention score | FP8-S0E4M4, bias 15 | sign 0, 4-bit exponent, 5-bit significand | ×2^18 |

A multiplier forms the 6×6 signed product (12 bits) and shifts it left by
`max(e,1) − 1`, which is 0 to 14. Subnormal inputs (e = 0) then share the scale
of e = 1. The shifted product fits in 26 bits. Four shifted products go through
a 4:2 compressor (28 bits) and into a 32-bit accumulator. These widths are the
ones in the paper's PE drawing. The shift rule is this design's reading of how
26 bits suffice.

An accumulator holds `Σ x·w` times the product of the two scales. A BitMoD ×
E4M3 result, for example, is the true dot product × 2^11. The host applies the
per-group and per-token scale factors, the same way it applies quantization
scales. Accumulators wrap at 32 bits.

The casts sit at the PIM side of the NPU interface (`fp8_e4m3_cast`,
`fp8_s0e4m4_cast`):

- **FP16 → E4M3:** round to nearest, ties to even. Results above 448 saturate
  to ±448, and NaN stays NaN.
- **FP16 → S0E4M4:** FP16 has exponent bias 15, and so does S0E4M4. The cast
  is therefore FP16 bits [13:6], rounded on bits [5:0]. Negative inputs give 0.
  Inputs of 2 or more give the largest code.

Rounding and saturation are not specified in the paper. They are this design's
choices.

## The PCU and its reuse schedule

One PCU (`pcu`) sits between an even and an odd bank and consumes a 256-bit
column: 64 four-bit weights or KV codes. It has 16 PEs (`pcu_pe`) of 4
multipliers each (`pe_multiplier`). Per MAC it computes a 1×4 by 4×16 GEMV
tile: PE p takes column bits `[(p*4+k)*4 +: 4]` for k = 0..3, and all PEs share
the same 4 input values.

State in a PCU:

- **Input register** (`pcu_input_reg`): two slots, A and B. Each slot holds 32
  FP8 inputs, which is 8 tiles of 4 and is written by one 256-bit command. Each
  slot also holds a format bit that says whether it contains E4M3 or S0E4M4.
- **Side register:** 64 four-bit fields, one per weight position. A field holds
  the KV zero point in INT4-Asym mode, or the BitMoD special-value select in
  bits [1:0] (0: +5, 1: −5, 2: +8, 3: −8).
- **Column register:** the last column read from a bank.
- **Two accumulators per PE**, one per input slot.

Commands (`p3_pkg::cmd_op_e`) are this design's own encoding:

| command | effect |
|---|---|
| `WR_IN` | write 32 cast FP8 inputs into slot A or B of the PCUs selected by a mask |
| `WR_META` | write the side register of the masked PCUs |
| `MAC_RD` | read column `col` of the even or odd bank, keep it, MAC with tile `tile` of slot `slot` |
| `MAC_REUSE` | MAC the kept column with tile `tile` of slot `slot` (normally B) |
| `CLR` | clear the accumulators of one slot |
| `RD` | present all 16 accumulators of one slot on the output, one cycle later |

A batch-2 linear layer, or a GQA group of 2, then runs as
`MAC_RD(A) MAC_REUSE(B) MAC_RD(A) MAC_REUSE(B) ...`. That is one command per PCU
cycle and one column read per tCCD_L, so the bank runs at its full rate and the
PCU does twice the work of an HBM-PIM unit. Batch 1 issues only `MAC_RD`, and
every read waits for tCCD_L.

The paper's text speaks of only a 16-bit extra input register per PCU. Its
timing figure, however, shows both input registers loaded by their own write
before the column reads. This design follows the figure and keeps a second full
256-bit slot. This is a known difference in area from the paper's estimate.

## Pseudo channel and command timing

A pseudo channel (`pim_channel`) has one command controller (`pim_cmd_ctrl`)
and 8 PCUs, which together cover 16 banks. A command is broadcast to all
PCUs, as in all-bank PIM mode. The write mask selects which PCUs take
`WR_IN`/`WR_META` data. This lets P·V give every PCU the attention scores of
its own tokens.

The controller clocks at the PCU rate, one cycle per tCCD_S. It enforces the
bank timing with a valid/ready handshake:

- A `MAC_RD` is accepted only when at least `RD_GAP = ceil(TCCD_L / TCCD_S)` =
  2 cycles have passed since the previous column read.
- Every other command, `MAC_REUSE` included, is accepted at once.
- While a read is held back, `stall_o` is high.

The accepted command goes to the bank interface (read strobe, odd/even, column)
and to a one-cycle execute register that feeds the PCUs. Bank data must
therefore arrive in the cycle after the strobe; the behavioural bank model
answers combinationally from that address. An assertion checks that two reads
are never closer than `RD_GAP` cycles.

Timing, in PCU cycles:

| sequence | duration |
|---|---|
| 8 columns × 2 inputs (`MAC_RD`, `MAC_REUSE` alternating) | 16 cycles |
| 8 columns × 1 input | 15 cycles from first to last acceptance |
| `RD` to valid output | 1 cycle after execute |

## Top level

`p3llm_top` holds `NUM_CH = 16` pseudo channels. Per channel it takes:

- a command;
- 256 bits of raw data, used for side-register writes;
- 32 FP16 values from the NPU. These pass through 32 E4M3 and 32 S0E4M4
  casters, and the command's format bit chooses which result is written by
  `WR_IN`.

Per channel it returns:

- the bank interface, with 256-bit column inputs from 8 even and 8 odd banks;
- the 8 × 16 accumulators with their valid flag;
- the stall flag.

The NPU's own work (softmax, scale factors, key smoothing, layer control)
happens outside, as in the paper.

## Files

`rtl/` (one unit per file):

- `p3_pkg.sv`: widths and command types.
- Casts: `fp8_e4m3_cast.sv` and `fp8_s0e4m4_cast.sv`.
- PE datapath: `wkv_decoder.sv`, `pe_multiplier.sv`, `compressor_4to2.sv` and
  `pcu_pe.sv`.
- PCU: `pcu_input_reg.sv` and `pcu.sv`.
- Channel: `pim_cmd_ctrl.sv` and `pim_channel.sv`.
- Top: `p3llm_top.sv`.

`tb/`:

- One self-checking testbench per unit: `tb_<unit>.sv`.
- `p3_ref_pkg.sv`: a real-number reference. It decodes all formats and casts
  by searching for the nearest representable value.
- `hbm_bank_model.sv`: the behavioural column store.
- `tb_p3llm_top.sv`: the end-to-end test. It runs four GEMV phases per
  channel: batch-2 BitMoD × E4M3, batch-1, Q·Kᵀ with INT4-Asym keys, and P·V
  with S0E4M4 scores. A reference model predicts every read-out, and the test
  checks the cycle counts and counts every mechanism.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one:

```
verilator --binary --timing --assert -Irtl -Itb rtl/p3_pkg.sv tb/p3_ref_pkg.sv \
    tb/tb_pcu.sv --top-module tb_pcu -Mdir obj_pcu && obj_pcu/Vtb_pcu
```

## Sizes simulated

Every unit is simulated at the paper's sizes: 256-bit columns, 16 PEs × 4
multipliers, 8 PCUs per channel, tCCD_S = 2 and tCCD_L = 4.

The end-to-end testbench instantiates the top with 2 pseudo channels instead
of 16. The channels are identical and independent, and a 16-channel build
produces a simulator model too large to compile in reasonable time. So 2
channels are the largest size simulated as a whole. Each bank model holds 16
columns.

## Where this departs from the paper, and what is missing

- The second input slot is a full 256-bit register (see above). The paper
  mentions a 16-bit one.
- The following are this design's own choices; the paper does not specify
  them:
  - the command set and handshake;
  - the side register that carries zero points and BitMoD selects;
  - the write mask;
  - the two accumulators per PE;
  - rounding and saturation in the casts;
  - the exponent-shift rule.
- The DRAM array, row activation and refresh are not modelled in RTL. Row
  opening is left to the host.
- The NPU (systolic array, vector unit, softmax, key-cache smoothing, scale
  handling) is not part of this RTL.
- Batches or GQA groups larger than 2 are run as repeated passes over the same
  columns. The hardware keeps only two input slots.
