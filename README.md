# Fully parallel, interleaved min-sum decoder for a short rate-compatible QC-LDPC code

This is synthesizable SystemVerilog for a low-latency LDPC decoder. It targets
codes short enough for ultra-reliable, low-latency links: 64, 128 or 192
information bits carried in 128, 192 or 256 transmitted bits (rates 1/2, 2/3
and 3/4). Every variable node and every check node of the 96 x 288
parity-check matrix has its own hardware. One decoding iteration therefore
takes two clock cycles: one for the check-node half and one for the
variable-node half. With 10 iterations a codeword is decoded in 20 cycles.

The check-node half and the variable-node half have a register between
them. That register lets the decoder work on **two independent codewords at
once**: while codeword A is in its check-node cycle, codeword B is in its
variable-node cycle, and the next cycle they swap. The datapath is busy every
cycle, throughput doubles, and the latency of each codeword does not change.

An early-termination (ET) unit checks all parity equations on the current
hard decisions after every iteration. A codeword stops as soon as it is
valid. Registers that have no valid work to do hold their value, which saves
switching power.

## The code

The code is quasi-cyclic with lifting factor Z = 8. Its base matrix has 12
rows and 36 columns. Each entry is either empty or an 8 x 8 identity matrix
rotated by a shift s of 1 to 8. Row `8r+i` of H has its one in block column
`c` at column `8c + ((i+s) mod 8)`, so s = 8 is the plain identity. The base
matrix sits in `base_row()` in `rtl/ldpc_pkg.sv`, one hex digit per block.
All wiring of the decoder is derived from it during elaboration.

The matrix comes from lifting a 3 x 9 protograph twice (by 4, then by 8):

```
0 0 0 0 2 0 2 0 0
3 1 3 1 0 1 3 2 0
1 3 1 3 0 3 1 0 2
```

Base row r belongs to protograph row r/4, and base column c belongs to
protograph column c/4.

**Rates.** Rates are set by removing leading columns.

| Rate | Removed columns | k | n | n' (transmitted) | punctured columns (0-based) |
|------|-----------------|---|---|------------------|-----------------------------|
| 3/4  | none            | 192 | 288 | 256 | 128..159 |
| 2/3  | 0..63           | 128 | 224 | 192 | 128..159 |
| 1/2  | 0..127          | 64  | 160 | 128 | 128..159 |

In every rate, the same 32 columns are punctured: they are never
transmitted. These are the four block columns 16..19, whose columns have
degree 1. They start with LLR 0 and are recovered by decoding.

The i-th received LLR goes to the i-th column that is neither removed nor
punctured, in increasing order.

**How far the matrix can be trusted.** The shifts were copied square by
square from a colour-coded drawing of the base graph. The protograph
implies 128 non-empty blocks, but only 122 could be seen:

- Block (0,4) has one entry per column instead of two.
- Blocks (0,6), (1,7) and (2,8) each lack one entry in their first base row.
- Block (2,7) has one entry too many.

Missing blocks may simply have been drawn in a colour that is not visible,
for example a shift drawn as white. The direction of rotation is also a
convention that cannot be checked.

The decoder decodes whatever matrix `base_row()` holds. The testbenches
rebuild H bit by bit from the same table, so a corrected matrix needs only
that function changed. The degree limits `DC_MAX` and `DV_MAX` may need
raising too.

## Arithmetic on one edge

All messages are 7-bit two's complement: 1 sign bit, 4 integer bits and 2
fractional bits, range [-16, 15.75]. The variable-node sum has one extra
integer bit (8 bits), and it saturates.

Each edge of the graph is one processing unit (PU, `ldpc_pu`). There are 976
of them, and each lives inside the variable node it belongs to. One
iteration of a PU runs as follows.

```
 CN cycle:  R1 --MUX1--> SM --> q ------------------> check node
            (channel LLR in        |                     | sign parity, min1, min2
             iteration 1)          +--(|q| == min1 ?)--> MUX2: min2 : min1
                                                         | x alpha, sign = parity ^ sign(q)
                                                         v
                                                         R2
 VN cycle:  R2 --2C--> multi-operand adder (+ channel LLR) = intrinsic LLR l_out
            l_out - (own R2 message), saturated to 7 bits --> R1
```

- **SM and 2C** convert between two's complement and sign-magnitude. The
  check node works on sign-magnitude values. The value -64 has no 6-bit
  magnitude, so it becomes magnitude 63.
- **Check node** (`ldpc_cn`). A balanced tree of two-input merge nodes finds
  the smallest and second-smallest magnitude and the XOR of all signs.
  Unused tree leaves hold magnitude 63. Only these three values go back to
  the PUs. Each PU picks its own "minimum over the others" by comparing its
  own magnitude with min1. If the minimum value occurs twice, min2 equals
  min1, so the result is still exact.
- **Scaling.** The normalised min-sum rule multiplies each check-to-variable
  message by a per-edge constant alpha. Here alpha is a 4-bit fraction
  `ALPHA/16`, and the scaled magnitude is truncated. Each PU takes its value
  from `alpha_of(v, j)`.
- **Variable node** (`ldpc_vn`, `ldpc_vn_adder`). The adder sums the channel
  LLR and all incoming messages at full width, then saturates to 8 bits. The
  sign of the sum is the hard decision; a negative LLR means bit 1. The
  message sent back on each edge is this sum minus that edge's own incoming
  message, clipped to 7 bits.

## Two codewords in one pipeline

A phase bit toggles every cycle. In phase p, slot p is in its check-node
cycle and the other slot is in its variable-node cycle. R2 captures the
check-node-stage slot. R1 captures the variable-node-stage slot. The input
memory has one read port per stage, so MUX1 and the adder each see the LLRs
of the codeword they are working on.

```
cycle      t    t+1   t+2   t+3  ...  t+19  t+20
slot 0:    CN1  VN1   CN2   VN2  ...  VN10  result ready
slot 1:    --   CN1   VN1   CN2  ...  CN10  VN10  result ready
```

The controller (`ldpc_ctrl`) keeps a busy flag, a started flag and an
iteration counter for each slot. A codeword terminates in its
variable-node cycle in either of two cases:

- its 10th iteration is done; or
- ET is enabled and the ET unit reports that all 96 checks are satisfied.

On termination the 288 intrinsic LLRs are written, saturated to 7 bits, into
that slot's half of the output memory, and the slot becomes free.

**Freezing.**

- R2 loads only when the check-node-stage slot is busy.
- R1 loads only when the variable-node-stage slot is busy, has started, and
  is not terminating.

So when one codeword finishes early, the registers of the remaining codeword
hold their values through the cycle its partner would have used. When both
slots are idle, no pipeline register changes. Removed columns are switched
off in a similar way: their PUs send a neutral message (sign 0, magnitude
63) that never becomes a minimum, and their output is 0.

**Where ET fits.** The ET unit is purely combinational. It XORs the sign bits
of each check's columns in the same cycle as the variable-node addition. That
puts it on the critical path, which is the price of stopping without an extra
cycle.

A word that becomes valid exactly in the last iteration is reported as
stopped by the iteration limit.

## Interface and timing (`ldpc_decoder`)

| Port | Meaning |
|------|---------|
| `rate_i` | `RATE_1_2`, `RATE_2_3`, `RATE_3_4`. Keep it constant while a slot is busy. |
| `et_en_i` | Enables early termination. Keep it constant while a slot is busy. |
| `in_valid_i`, `in_slot_i`, `in_llr_i[256]` | Loads the first n' LLRs into a slot and starts decoding it. |
| `in_ready_o` | The addressed slot is free: idle, or its codeword terminates in this cycle. |
| `busy_o[1:0]` | Busy flag of each slot. |
| `out_valid_o` | One-cycle strobe: slot `out_slot_o` has a result. |
| `out_iters_o`, `out_et_o` | Iterations used, and whether ET ended decoding. |
| `out_llr_o[2][288]` | Both halves of the output memory. A result stays there until that slot finishes again. |
| `et_syndrome_o[96]` | Per-check ET result for the word currently in the variable-node stage. |

**Load-to-result timing.** A codeword loaded in cycle t starts in cycle t+1
or t+2, depending on its slot's phase. Its result strobe comes
2·iterations + 1 (or + 2) cycles after the load. Decoding itself takes 2
cycles per iteration, so 20 cycles at the 10-iteration limit.

**Back-to-back loading.** A slot can be reloaded in the same cycle its
codeword terminates. The new LLRs replace the old ones at that clock edge,
and the new codeword's first check-node cycle follows immediately. With
both slots reloaded this way, each slot delivers a result every 20 cycles,
so the decoder as a whole delivers one codeword every 10 cycles. That is
the rate k·f/I_max.

`in_ready_o` therefore depends combinationally on the termination decision,
which includes the ET result.

**Reset.** Reset is asynchronous and active low, and it clears all
registers.

## Files

| File | Content |
|------|---------|
| `rtl/ldpc_pkg.sv` | Sizes, fixed-point types, base matrix, connectivity tables (`ROW_TAB`, `COL_TAB`), rate mapping |
| `rtl/ldpc_decoder.sv` | Top level: 288 VN blocks, 96 CN blocks, memories, ET, control, and the wiring between them |
| `rtl/ldpc_vn.sv`, `ldpc_pu.sv`, `ldpc_vn_adder.sv` | Variable node, its per-edge PUs, and its adder |
| `rtl/ldpc_cn.sv` | Check node (min1/min2/parity tree) |
| `rtl/ldpc_sm.sv`, `ldpc_tc.sv` | Sign-magnitude and two's complement converters |
| `rtl/ldpc_et.sv` | Parity-check evaluation for early termination |
| `rtl/ldpc_im.sv`, `ldpc_om.sv` | Two-slot input and output LLR memories (7 x 288 bits per slot) |
| `rtl/ldpc_ctrl.sv` | Phase, iteration counters, register enables, termination |
| `tb/ldpc_ref_pkg.sv` | Reference models: H built bit by bit, GF(2) encoder, AWGN channel, golden min-sum decoder |
| `tb/tb_*.sv` | One self-checking testbench per module |

## Verification

Each module has a self-checking testbench. Each prints
`TB_RESULT checks=.. failures=..` and has a watchdog.

- **Unit testbenches.** The converters are tested exhaustively. The adder,
  check node and PU get random and corner-case tests against integer models.
- **Variable-node testbench.** It runs a full-degree variable node through a
  two-stage schedule.
- **Memory testbenches.** They check LLR placement for every rate and slot,
  and saturation on write.
- **ET testbench.** It uses random codewords and every possible single-bit
  error.
- **Controller testbench.** It is cycle-accurate against a separate model of
  both slots.

`tb_ldpc_decoder` runs the full decoder at its default size. For each rate,
with ET off and then on, it:

- encodes random codewords and sends them through a BPSK/AWGN channel at
  several noise levels;
- streams them into whichever slot is free;
- compares every output LLR, the iteration count and the ET flag with the
  golden model in `ldpc_ref_pkg`, which searches the minimum over the other
  edges explicitly;
- checks the latency against 2 cycles per iteration.

It fails if any of these never happened: both slots busy together, a lone
codeword, ET stops, stops at the limit, corrected channel errors, output
saturation, each rate, and a slot reloaded as it terminates. A final
back-to-back run checks that each slot delivers a result every 20 cycles. A
typical run decodes 76 codewords: 18 stop early, both slots are busy for
about 500 cycles, and there are no mismatches.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_ldpc_decoder \
    rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv rtl/*.sv tb/tb_ldpc_decoder.sv
./obj_dir/Vtb_ldpc_decoder
```

The full decoder takes about a minute to build and seconds to simulate.

## Departures and open points

- **Edge weights.** The design was meant for per-edge weights trained
  offline. Those values are not available, so every edge uses 0.75
  (`ALPHA_DEFAULT`). The hardware already takes one constant per edge:
  fill in `alpha_of()` to use trained weights. Error-rate results depend on
  these weights.
- **Base matrix.** See "How far the matrix can be trusted" above.
- **I/O.** The surrounding chip's load and unload path is not part of this
  design. Whole-vector parallel ports stand in for it.
- **Output memory width.** The output memory is 7 bits wide, so the 8-bit
  intrinsic LLRs are saturated when they are stored.
- **Error rate.** Error-rate curves need about 10^5 codewords per point. The
  RTL testbench checks bit-exactness against the golden model instead.
