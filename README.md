# XR-NPE: a mixed-precision SIMD MAC engine and an 8x8 matrix co-processor

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for two things:

- **XR-NPE**, a multiply-accumulate (MAC) unit. Each cycle it takes two 16-bit words and treats them as SIMD lanes in one of four small formats:
  - 4 lanes of FP4 (E2M1)
  - 4 lanes of Posit(4,1)
  - 2 lanes of Posit(8,0)
  - 1 lane of Posit(16,1)

  It accumulates the lane products exactly in a wide fixed-point register (the *quire*) and rounds the result back into the same format.
- **A matrix-multiplication co-processor** built from 64 of these engines. A host processor drives it over AXI4-Lite.

This document explains the design for an engineer who has not read the paper. It says what comes from the source publication and what was decided here.

## 1. Number formats

| prec | Format | Lanes per 16-bit word | Lane bits | Value |
|---|---|---|---|---|
| `2'b00` | FP4 E2M1 | 4 | [4l+3:4l] | 1 sign, 2 exponent bits (bias 1), 1 mantissa bit. Subnormal at exponent 0. No Inf/NaN. Range ±0.5 … ±6 |
| `2'b01` | Posit(4,1) | 4 | [4l+3:4l] | Posit with es = 1. Values 1/16 … 16, plus 0 and NaR |
| `2'b10` | Posit(8,0) | 2 | [8l+7:8l] | Posit with es = 0. Values 2^-6 … 2^6 |
| `2'b11` | Posit(16,1) | 1 | [15:0] | Posit with es = 1. Values 2^-28 … 2^28 |

A posit is a sign, then a run-length *regime*, then es exponent bits, then fraction bits. Its value is (-1)^s · 2^(k·2^es + e) · 1.f.

The two special posit codes are:

- `100…0`, which is NaR ("not a real").
- `000…0`, which is zero.

Negative posits are stored as the two's complement of the code.

The precision codes come from the paper's block diagram. That figure calls the 4-bit float "HFP-4", while the results figure calls it "FP4 (E2M1)". E2M1 is used here.

## 2. The NPE datapath (`rtl/xr_npe.sv`)

```
 a,b (16) ─► input processing ─► sign XOR ─────────────┐
             (lane split, decode, ► scale sum ─► shift │
              zero/NaR check)    ► RMMEC multiplier ─► MUX (P / -P) ─► rearrange ─► SIMD add ─► quire
                                                                                               │
 mac_out, pe_out ◄─ round/encode ◄─ normalise (LOD) ◄─ sign / |PS| select ◄────────────────────┘
```

| Stage | Module | What it does |
|---|---|---|
| Input processing | `xr_input_proc`, `xr_operand_decode`, `xr_posit_decode`, `xr_fp4_decode` | Splits each word into lanes and decodes each lane into sign, signed scaling factor, mantissa with hidden bit, zero flag and NaR flag. The mantissas of all lanes are packed on a 13-bit bus: 4×2 bits, 2×6 bits or 1×13 bits. Posit(4,1) has no fraction bits, so its mantissa is the constant `10`. |
| Sign / scale | `xr_sign_scale` | Product sign = sign_a XOR sign_b. Quire shift = sf_a + sf_b + bias (the bias depends on the format). |
| Multiplier (RMMEC) | `xr_rmmec`, `xr_rmmec_cell` | Described in section 3. Gives the packed product P (26 bits: 4×4, 2×12 or 1×26) and its lane-wise two's complement. |
| MUX-ed datapath | `xr_mux_datapath` | Per lane, picks P or −P by the product sign and gives a signed product bus. |
| Rearrangement | `xr_mant_rearrange` | Shifts each signed lane product into its quire lane: arithmetic left shift, or right shift for negative amounts (only zero bits are lost). |
| SIMD adder | `xr_simd_addsub` | A 128-bit adder whose carry is cut at the lane borders. |
| Quire | `xr_quire` | 128-bit register. `accumulate` adds the addend. `clear` empties the quire first, so clear + accumulate starts a new dot product. Each lane has a sticky NaR flag. |
| Output selection | `xr_quire_out_sel` | Per lane, the resultant sign and the magnitude: PS or the two's complement of PS. |
| Normalise | `xr_out_norm` | Leading-one detection per lane. Gives the resultant scaling factor, a mantissa with its leading one at bit 31, and a sticky bit. |
| Output processing | `xr_out_proc`, `xr_posit_encode`, `xr_fp4_encode` | Round to nearest, ties to even, into the lane format. Posits saturate at maxpos/minpos; a non-zero value never rounds to 0. FP4 saturates at 6 and very small values flush to +0. The results are `mac_out` and `pe_out`; `pe_out` is ReLU(mac_out) per lane, with NaR passed through. |

### Quire layout (this design's choice)

The paper does not give the quire width. Here it is 128 bits, wide enough that every product and long sums stay exact.

| Format | Quire lanes | Fraction bits QF | Shift bias | Product width |
|---|---|---|---|---|
| FP4 | 4 × 32 | 2 | 0 | 4 |
| Posit(4,1) | 4 × 32 | 8 | 6 | 4 |
| Posit(8,0) | 2 × 64 | 12 | 2 | 12 |
| Posit(16,1) | 1 × 128 | 56 | 32 | 26 |

### Pipeline and timing

There are three register stages. Operands presented with `in_valid` in cycle t are multiplied and registered (S1), added into the quire at the next edge, and rounded into the output register at the edge after that. `out_valid`, `mac_out` and `pe_out` for that operation are visible 3 cycles later, and one MAC per lane is accepted every cycle. The paper reports 1.72 GHz in 28 nm for its version. No timing closure was attempted on this code.

## 3. RMMEC: reconfigurable mantissa multiplier

The basic cell is a 2-bit × 2-bit multiplier written from its Karnaugh map:

- p0 = a0·b0
- p1 = a1·b0 ⊕ a0·b1
- p2 = a1·b1·¬(a0·b0)
- p3 = a1·b1·a0·b0

The 13-bit mantissas are cut into 7 two-bit digits each, which gives a 7×7 grid of 49 cells. Each precision uses only some of the cells:

- **4 lanes (FP4 / Posit(4,1))**: the four diagonal cells (0,0), (1,1), (2,2), (3,3). Each is one complete 2×2 lane product.
- **2 lanes (Posit(8,0))**: two 3×3-digit diagonal blocks. Each block is a 6×6 multiplier whose partial products are added with digit weights.
- **1 lane (Posit(16,1))**: all 49 cells form a 13×13 multiplier (14×14 with the top digit padded).

Lanes whose operand is zero or NaR have their digits forced to zero. This is operand isolation, the logic-level stand-in for the paper's power gating of idle multipliers. The unused cells of a mode also see only zeros.

## 4. The co-processor (`rtl/xr_coproc.sv`, top level)

```
 AXI4-Lite ─► xr_axi_lite_slave ─► xr_addr_mapper ─┬─► xr_csr ◄──► xr_ctrl_fsm
                                                   │                  │ feed strobes, of_col
                                                   └─► IF banks (8) ──► xr_npe_array (8x8 NPEs)
                                                       Wt banks (8) ──►   IF regs / Wt regs / OF regs
                                                       OF banks (8) ◄──
```

- **Memories** (`xr_sram_bank`): each bank is 256 words × 16 bits with a one-cycle synchronous read.
  - There is one IF bank per array row, one Wt bank per column and one OF bank per row.
  - Each memory (IF, Wt or OF) is therefore 4 KiB.
- **Array** (`xr_npe_array`): the array is output-stationary.
  - In each step, IF register i is broadcast along row i and Wt register j is broadcast down column j.
  - NPE (i,j) accumulates output (i,j), one 16-bit word of 4, 2 or 1 lanes.
  - Lane l of the result is the dot product of lane l of the IF words and lane l of the Wt words.
- **Control FSM** (`xr_ctrl_fsm`): it runs in four states, IDLE → FEED → WAIT → DRAIN.
  - FEED reads word `IF_BASE+k` of every IF bank and word `WT_BASE+k` of every Wt bank for k = 0…K−1.
  - The first step also clears the quires.
  - Five cycles after the last word is presented, the NPE results are in the OF registers.
  - DRAIN writes column j of the OF registers to word `OF_BASE+j` of every OF bank.
  - A tile takes **K + 7 + COLS** cycles from start to done (K + 15 at 8×8).
- **Address map** (byte addresses, 32-bit data, the low 16 bits used for bank words):

| addr[15:14] | Region | addr[13:10] | addr[9:2] |
|---|---|---|---|
| 0 | registers | – | index in [4:2] |
| 1 | IF banks | row | word |
| 2 | Wt banks | column | word |
| 3 | OF banks | row | word |

- **Registers**:

| Index | Name | Contents |
|---|---|---|
| 0 (0x00) | CTRL | write bit 0 = 1 to start a tile |
| 1 (0x04) | CONFIG | [1:0] precision, [2] store ReLU output |
| 2 (0x08) | K | dot-product length in words (0…256) |
| 3 (0x0C) | IF_BASE | first IF word |
| 4 (0x10) | WT_BASE | first Wt word |
| 5 (0x14) | OF_BASE | first OF word |
| 6 (0x18) | STATUS | [0] busy, [1] done (read only) |
| 7 (0x1C) | CYCLES | cycles of the last tile (read only) |

While a tile runs, the FSM owns the bank ports. Host bank accesses then answer SLVERR, as do accesses to a bank number beyond the array. Configuration writes are ignored while busy. The AXI slave handles one transaction at a time and has no byte strobes.

A typical host sequence is:

1. Write the IF and Wt banks.
2. Write CONFIG, K and the three base registers.
3. Write CTRL = 1.
4. Poll STATUS until done is set.
5. Read the OF banks.

Convolutions are lowered to such matrix tiles by the host. Pooling, stride handling and activations other than ReLU are host work.

## 5. What follows the paper and what is this design's own

Taken from the paper:

- The four formats and their lane counts.
- The prec codes.
- The 16-bit A/B words.
- The stage order of the NPE and the stage names: input processing with zero/NaR checks, sign XOR, scaling-factor sum, RMMEC from 2-bit K-map cells with zero-operand gating, MUX-ed P / 2's-complement datapath, precision-adaptive rearrangement, SIMD add/sub, quire with accumulate and clear, resultant sign, LOD, rounding and restructuring, ReLU and MAC outputs.
- The printed bus widths: 13-bit mantissas, 26-bit P, 4-bit product sign.
- The 8×8 array of 64 NPEs.
- IF, Wt and OF banks with their bank registers.
- An AXI interface.
- A control unit made of an address mapper, config/status registers and an FSM.

Own choices or deviations:

- **4-bit float**: E2M1 is used, because the paper labels the format both "HFP-4" and "FP4 (E2M1)".
- **Quire**: the width, lane split, binary point and shift bias are own choices (section 2).
- **Pipeline**: the three-stage split and the synchronous active-high reset are own choices.
- **Signed product bus**: it is 32 bits (8/16/32-bit lanes), so that each 4-bit lane product keeps its sign. The figure prints 26 after the MUX-ed datapath.
- **Decoders**: a separate decoder is built for each format, selected by prec, instead of one shared decoder, because the paper does not describe the decoder circuit.
- **Rounding and overflow**: round-to-nearest-even and saturation are assumed.
- **Array and control**: the output-stationary broadcast dataflow, bank sizes, address map, register set, FSM sequence and AXI4-Lite are own choices.
- **Mantissa width of Posit(16,1)**: the text speaks of 12-bit multiplication while the block diagram prints 13-bit mantissa buses and a 26-bit product. The 13 bits are followed: 12 fraction bits plus the hidden one.
- **Comparator**: the text mentions a unified comparator next to the leading-one detector, without saying what it compares. The only comparison this datapath needs is the ReLU sign test in output processing; no separate comparator block is built.
- **Power gating**: modelled as operand isolation. The power switches themselves belong to physical design.
- **Morphable sub-array**: the paper's figure marks a dashed "morphable" sub-array. Its behaviour is not described, so no sub-array reconfiguration is built.

Not built:

- The RISC-V host (CVA6 in the Cheshire SoC), its UART/camera link and its DMA. These belong to the host platform; the AXI4-Lite port is where they attach.
- The software API (p-type SIMD instructions).
- Quantisation-aware training.

## 6. Workloads

The paper evaluates UL-VIO (visual-inertial odometry on KITTI, 1241×376 images, 2.42 MB in mixed precision), EfficientNet classification and gaze estimation. None of these models fits in the 4 KiB weight memory. Each layer runs as a series of 8×8-output tiles, with K ≤ 256 words each, that the host loads and reads back. A full K = 256 tile in FP4 is 64 NPEs × 4 lanes × 256 = 65,536 MACs in 271 cycles.

A small workload of this kind is simulated end to end by `tb/tb_xr_workload_conv.sv`:

- Layer 1 is a 3×3 convolution of two 10×10 patches with 8 filters, in Posit(8,0) with ReLU. It runs as 8 tiles with K = 9.
- The host re-quantises the feature map to FP4.
- Layer 2 is a 1×1 convolution, 8 → 8 channels, in FP4. It runs as 8 tiles with K = 8.

That is 17,408 MACs in 376 array cycles, checked output by output against the reference.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each one:

- compares against a reference model written with `real` arithmetic (`tb/xr_ref_pkg.sv`);
- checks latency and handshakes;
- has a watchdog;
- ends with a `TB_RESULT checks=… failures=…` line.

`tb/tb_xr_coproc.sv` is the end-to-end test. It runs the top at its default size (8×8, 256-word banks) through a behavioural AXI4-Lite master (`tb/xr_axi_master.sv`). It covers:

- tiles in all four precisions, with precision switches between tiles;
- ReLU and MAC outputs;
- zero operands, NaR propagation and saturation;
- the cycle count K + 15;
- SLVERR for bank access while busy.

Posit(16,1) test operands are limited to scales where the double-precision reference stays exact.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/xr_npe_pkg.sv tb/xr_ref_pkg.sv \
  tb/tb_xr_coproc.sv --top-module tb_xr_coproc && ./obj_dir/Vtb_xr_coproc
```

Replace `tb_xr_coproc` with any other `tb_*` file to run that block's testbench. `-Wno-fatal` is needed only because Verilator warns about width extension in the testbenches' integer arithmetic; the RTL itself lints clean under `-Wall` apart from the unused bits listed in the module headers.
