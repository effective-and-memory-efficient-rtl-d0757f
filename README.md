# Zero-space parameter protection: MSET and CEP read-path decoders

Large DNNs keep hundreds of millions of parameters in DRAM and SRAM. A soft
error in one of them can change a weight from 0.3 to 10^38 and ruin inference.
SECDED ECC is the usual defence. It costs 12.5 % extra memory on 64-bit lines,
corrects only one bit per line, and its decoder is slow. The two schemes here
add **no memory at all**. Each floating-point parameter gives up a few of its
least significant mantissa bits, which barely affect accuracy. Those bits are
reused to protect the bits that matter:

* **MSET** (Most Significant Exponent Triplication) stores two extra copies of
  the exponent MSB in the two mantissa LSBs. A majority vote repairs any single
  flip among the three copies.
* **CEP** (Chunk-wise Embedded Parity) cuts the word into 3-bit chunks. Each
  chunk gets its own even-parity bit, held in the space freed by dropping LSBs.
  A chunk whose parity fails is set to zero. A zeroed chunk is a small error in
  a value, whereas a wrong high bit can be a huge one.

Parameters are encoded offline, before the model is loaded. In hardware, only
a decoder is needed. It sits in the memory controller, between main memory and
the accelerator, and fixes every line on its way out. This RTL implements that
decoder for 64-bit lines (default) and 128-bit lines, for FP16 and FP32.

The schemes and the bit layouts come from Ahmadilivani et al., "Effective and
Memory-Efficient Alternatives to ECC for Reliable Large-Scale DNNs". The
controller wrapper and its handshakes, the error flags and the mode select
were added here. "Departures and additions" below lists what is taken from the
publication and what was chosen for this RTL.

## Where the decoder sits

```
 main memory ──encoded line──▶ zs_mem_ctrl ──decoded line──▶ accelerator
  (soft errors)                 ├ mset_decoder (FP16)
                                ├ mset_decoder (FP32)
                                ├ cep_decoder  (FP16 reordering)
                                └ cep_decoder  (FP32 reordering)
                                   → mode mux → output register
```

A line of `LINE_W` bits holds `LINE_W/16` FP16 or `LINE_W/32` FP32 words, with
word 0 in the least significant bits. Every word is decoded independently and
in parallel, so the decoders' logic depth does not depend on `LINE_W`.

## MSET: one bit, three copies

Let `E = DATA_W-2` be the exponent MSB: bit 14 for FP16, bit 30 for FP32 (the
sign is the top bit).

| stored bit | FP16 | FP32 | content                        |
|------------|------|------|--------------------------------|
| `E`        | 14   | 30   | exponent MSB                   |
| 1          | 1    | 1    | copy of exponent MSB           |
| 0          | 0    | 0    | copy of exponent MSB           |
| others     |      |      | unchanged                      |

Encoding: `w[1] = w[0] = w[E]`. Decoding (`mset_decoder`, one `mset_voter` per
word):

```
out      = stored
out[E]   = majority(stored[E], stored[1], stored[0])
out[1:0] = 2'b00
```

A flip in any one of the three copies is corrected. Two flips among the copies
give the wrong exponent MSB. All other bits are not protected. The
exponent MSB is the one that matters most: flipping it takes a weight with
|w| < 2 to about 2^128 (FP32) or 2^16 (FP16). The decoder keeps
only the exponent MSB and the two cleared LSBs; everything else is wiring. So
a synthesis report shows most MSET output bits as wired straight to inputs.
That is correct.

## CEP: interleaved parity, then reordering

This is the part that takes some care. A stored word is a run of 4-bit
*groups*. Group `g` occupies stored bits `4g+3 .. 4g` and holds
`{b2, b1, b0, p}`: a 3-bit chunk and its even parity, `p = b2 ^ b1 ^ b0`. The
chunks are the top `3·DATA_W/4` bits of the original value, in order. The
bottom `DATA_W/4` bits of the original are dropped to make room for the
parity bits.

FP16 (4 chunks, 4 LSBs dropped); the numbers are original bit positions:

```
stored bit : 15 14 13 12 | 11 10  9  8 |  7  6  5  4 |  3  2  1  0
content    : 15 14 13 p3 | 12 11 10 p2 |  9  8  7 p1 |  6  5  4 p0
decoded    : 15 14 13 12   11 10  9  8    7  6  5  4    0  0  0  0
```

FP32 has the same pattern: 8 chunks covering original bits 31..8, and 8 LSBs
dropped. In general, chunk `g` is original bits
`DATA_W/4+3g+2 .. DATA_W/4+3g`.

Decoding has two steps.

1. **Check** (`cep_chunk_decoder`, one per group): `err = ^group`. If `err`
   is 1, the chunk output is `3'b000`; otherwise it is `group[3:1]`. The check is
   identical for every data type. A 64-bit line has 16 independent chunk
   checks, a 128-bit line has 32.
2. **Reorder** (`cep_decoder`): chunk `g` goes back to output bits
   `DATA_W/4+3g+2 .. DATA_W/4+3g`, and the `DATA_W/4` output LSBs are 0. This
   step is pure wiring, but the wiring depends on the word width. An FP16
   line and an FP32 line therefore need different reordering, even though the
   checks are shared.

Each group catches any odd number of flips within it, so a 64-bit line can
detect and neutralise up to 16 flips at once, one per group. An even number
of flips in one group goes undetected. Zeroing a damaged chunk of exponent
bits makes the value smaller, never larger, which is why this mitigation
works for DNN weights.

## The controller: `zs_mem_ctrl`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; active-low synchronous reset |
| `mode_i` | in | 2 | `zs_pkg::zs_mode_e`: `MODE_MSET_FP16`=0, `MODE_MSET_FP32`=1, `MODE_CEP_FP16`=2, `MODE_CEP_FP32`=3 |
| `mem_rvalid_i` / `mem_rready_o` | in/out | 1 | read-data handshake with main memory |
| `mem_rdata_i` | in | `LINE_W` | encoded line |
| `acc_valid_o` / `acc_ready_i` | out/in | 1 | handshake with the accelerator |
| `acc_data_o` | out | `LINE_W` | decoded line |
| `acc_mode_o` | out | 2 | scheme used for this line |
| `acc_mset_err_o` | out | `LINE_W/16` | MSET: bit `w` set if word `w`'s three copies disagreed (corrected) |
| `acc_cep_err_o` | out | `LINE_W/4` | CEP: bit `c` set if group `c` (line bits `4c+3..4c`) failed parity (zeroed) |

**Timing.** All four decoders are combinational and decode every incoming
line at once. `mode_i` selects one result, which is loaded into a single
output register. A line accepted in cycle *t* (`mem_rvalid_i && mem_rready_o`)
is presented to the accelerator from cycle *t+1*. While `acc_ready_i` stays
high, one line per cycle is sustained. When the accelerator stalls, the
output is held and `mem_rready_o` falls the same cycle
(`mem_rready_o = !acc_valid_o || acc_ready_i`). `mode_i` is sampled together
with each line, so the mode can change from one line to the next. An
assertion checks that a presented line stays stable until it is taken.

After synthesis, with yosys coarse cells and `LINE_W=64`, the controller has
95 cells and 87 flip-flop bits. The two CEP instances share their parity
checks, so they cost little more than one.

## Encoding, for building memory images

The encoder is not part of the hardware: parameters are encoded once, offline.
For a word `v` of width `dw`:

* MSET: `v[1] = v[dw-2]; v[0] = v[dw-2];`
* CEP: for `k = 0 .. dw/4-1`, let `c = v[dw/4+3k +: 3]`. Then
  `enc[4k +: 4] = {c, ^c}`.

`tb/zs_ref_pkg.sv` contains both encoders and reference decoders, written bit
by bit and independently of the RTL.

## Departures and additions

Taken from the publication:

* the MSET and CEP decoding rules;
* the FP16 bit layouts above;
* 3-bit chunks with even parity;
* zeroing of a failed chunk and of the freed LSBs;
* 64- and 128-bit lines;
* FP16 and FP32;
* the decoder's place in the memory controller's read path.

Choices made here where the publication is silent:

* **FP32 layouts.** The publication draws only FP16. For FP32, the exponent
  MSB is bit 30, from IEEE 754. The CEP layout extends the FP16 pattern
  without change.
* **Word order.** Word 0 is in the line's low bits. The figures only label
  words W1..W4 from left to right. Every word is decoded the same way, so this
  changes only the numbering of the error flags.
* **One controller for all schemes.** `mode_i` selects the scheme and data
  type at run time. A fixed deployment can tie `mode_i` to a constant, and
  synthesis then removes the unused decoders. The publication calls CEP
  type-agnostic. That holds for the parity checks, but the final reordering
  depends on the word width, so the CEP decoder takes `DATA_W` as a parameter.
* **Handshakes, output register, reset and error flags.** These are all
  additions. The publication treats the decoders as combinational blocks and
  gives only their gate delays (tens to about a hundred picoseconds in a
  45 nm library).
* **Not built.**
  * SECDED ECC, and the combinations MSET+ECC and CEP+ECC: the publication
    uses them only for comparison.
  * The encoder: it is offline software.
  * The memory request path: addresses and commands.

## Verification

| testbench | what it does |
|-----------|--------------|
| `tb_mset_voter` | all 8 input patterns of the voter |
| `tb_cep_chunk_decoder` | all 16 stored groups |
| `tb_mset_decoder` | 64/128-bit lines × FP16/FP32; random lines, no flip, one flip on a protected bit, 1–8 random flips; compared with the reference decoder and, where the scheme must recover it, with the original value |
| `tb_cep_decoder` | same for CEP |
| `tb_zs_mem_ctrl` | whole controller at default parameters. Phase 1 checks one-cycle latency and one line per cycle. Phase 2 uses random modes, random faults and random stalls on both sides. It checks every line in order and counts MSET corrections, CEP zeroing, mode switches, accelerator stalls and memory back-pressure; each must occur. |
| `tb_workload_fi` | synthetic FP16/FP32 weights (\|w\| < 1), 128-bit lines, random flips at a BER of 2·10⁻³, all four modes. It checks every line and compares "blow-ups" (decoded weights with the exponent MSB set) against an unprotected copy hit by the same flips. |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/zs_pkg.sv tb/zs_ref_pkg.sv tb/tb_zs_mem_ctrl.sv --top-module tb_zs_mem_ctrl
./obj_dir/Vtb_zs_mem_ctrl
```

Substitute any testbench name. All of them finish in well under a second.

A typical `tb_workload_fi` run shows 26–70 blow-ups per mode in the
unprotected copy and 0–2 after decoding. The remaining ones come from two
flips in the same MSET triple or in the same CEP group, which neither scheme
can handle.

## Files

| file | content |
|------|---------|
| `rtl/zs_pkg.sv` | mode enum, CEP group geometry, default line width |
| `rtl/mset_voter.sv` | 2-of-3 majority with disagreement flag |
| `rtl/mset_decoder.sv` | MSET line decoder, parameters `LINE_W`, `DATA_W` |
| `rtl/cep_chunk_decoder.sv` | parity check and zeroing of one chunk |
| `rtl/cep_decoder.sv` | CEP line decoder, parameters `LINE_W`, `DATA_W` |
| `rtl/zs_mem_ctrl.sv` | top: four decoders, mode mux, output register, parameter `LINE_W` (64) |
| `tb/zs_ref_pkg.sv` | reference encoders and decoders |
| `tb/tb_*.sv` | testbenches listed above |
