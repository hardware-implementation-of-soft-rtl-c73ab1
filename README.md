# EP soft mapper/demapper accelerator

This is synthesizable SystemVerilog for the soft mapper/demapper of an iterative
receiver based on Expectation Propagation (EP). The receiver is a
frequency-domain self-iterated linear equalizer (FD-SILE) for QPSK, 8-PSK and
16-QAM. The design follows the paper "Hardware Implementation of Soft
Mapper/Demappers in Iterative EP-based Receivers".

The FFT/IFFT, the MMSE filtering, rate dematching and the turbo decoder are not
part of this design. In the paper they run in software on a host computer.
Only the part that the paper puts in the FPGA is implemented here.

## What the block computes

After each pass, the equalizer delivers time-domain estimates `x^e` and one
common variance `v_x^e` per block. For every symbol the accelerator computes:

1. **Extrinsic LLRs** `L_e(d_q)`, using bitwise max-log-MAP with closed forms:
   * QPSK: `L_e(d_1) = 2*sqrt(2) R(x^e)/v`, `L_e(d_2) = 2*sqrt(2) I(x^e)/v`.
   * 16-QAM, with `d = 1/sqrt(10)`:
     * `L_e(d_1) = 4d(2d - |I|)/v` and `L_e(d_2) = 4d(2d - |R|)/v`.
     * `d_3` and `d_4` use `4d*I/v` (or `4d*R/v`) in the inner region.
     * In the outer regions they use `8d(I -+ d)/v`.
   * 8-PSK, semi-analytical:
     * A hard decision gives the label
       `m = 4(I<0) + 2(R<0) + (|R|<|I|)`.
     * A table gives three complex vectors `Delta_{m,q}`.
     * `L_e(d_q) = (R(x^e) R(Delta) + I(x^e) I(Delta)) / v`.
2. **Soft bits** `p_q = tanh(L_e/2)`. tanh uses a piecewise-linear
   approximation. Its slopes are 1, 1/2 and 1/4, with breakpoints at 0.5, 1
   and 2.
3. **Soft symbols** `mu^d`, using bitwise soft mapping:
   * QPSK: `p/sqrt(2)`.
   * 8-PSK: `R = (b8 + a8 p_1) p_2` and `I = (b8 - a8 p_1) p_3`.
   * 16-QAM: `R = (2 - p_2) p_4 / sqrt(10)` and `I = (2 - p_1) p_3 / sqrt(10)`.
4. **EP feedback**:
   * `x^d = mu^d + C_EP(v) (mu^d - x^e)`.
   * `v_x^d = v C_EP(v)`.
   * `C_EP` is read from a table addressed by `v_x^e`.

The equalizer uses `x^d` and `v_x^d` in its next self-iteration. The LLRs of
the last self-iteration go to the decoder. The accelerator produces both for
every input word, and the consumer keeps what it needs.

## Bit labelling

The Gray labels are taken from the constellation figures. The first label bit
is `d_1`.

* **QPSK:** `d_1 = (R<0)` and `d_2 = (I<0)`.
* **16-QAM:**
  * `d_1 = 1` on the outer imaginary levels (±3d).
  * `d_2 = 1` on the outer real levels.
  * `d_3 = (I<0)` and `d_4 = (R<0)`.
* **8-PSK:** `d_1` is the leftmost bit of the printed label and `d_3` the
  rightmost.
  * With this reading, the LLR table and the soft-mapping expressions are
    consistent with each other.
  * `d_1` separates the points near the real axis from those near the
    imaginary axis.
  * `d_2 = (R<0)` and `d_3 = (I<0)`.
  * The LLR table was recomputed from the geometry (`2(1-2d)(alpha - alpha_bar)`).
    It matches the printed values.
  * The printed table omits the "j" on the last entry. It is read as
    `-1.0824 + 2.6131j`.

A positive LLR means the bit is more likely to be 0. The soft bit is then
positive too.

## Files

| File | Content |
|---|---|
| `rtl/smd_pkg.sv` | Types, fixed-point formats, saturation, rounding, division and C_EP-scaling helpers |
| `rtl/qpsk_demap.sv` | QPSK component LLR (one real value → one LLR) |
| `rtl/qam16_demap.sv` | 16-QAM component LLRs (one real value → amplitude-bit and sign-bit LLRs) |
| `rtl/psk8_lut.sv` | 8-PSK `Delta` table (8 labels × 3 bits, complex, s2.5) |
| `rtl/psk8_demap.sv` | 8-PSK hard decision, table lookup, three projections |
| `rtl/tanh_pwl.sv` | Piecewise-linear `tanh(L/2)` |
| `rtl/qpsk_softmap.sv`, `rtl/qam16_softmap.sv`, `rtl/psk8_softmap.sv` | Bitwise soft mappers |
| `rtl/cep_lut.sv` | `C_EP` table, 256 × 8 bits, host-writable, synchronous read |
| `rtl/ep_soft_est.sv` | `x^d = mu + C_EP (mu - x^e)` for one real component |
| `rtl/ep_var_est.sv` | `v^d = v^e C_EP` |
| `rtl/ep_smd_top.sv` | Streaming top: 2 symbols per 32-bit word, 4-stage pipeline |
| `tb/tb_<block>.sv` | Self-checking unit testbench per block |
| `tb/tb_smd_model_pkg.sv` | Floating-point reference model (max-log-MAP, tanh, mapping) |
| `tb/tb_smd_env.sv` | Stream driver, scoreboard and mechanism counters for the top |
| `tb/tb_ep_smd_top.sv` | Top-level test of all three constellation builds |
| `tb/tb_ep_smd_full.sv` | Long test of the top with default parameters |

## Fixed-point formats

The study that the design comes from gives two rules:
* all named variables take 8 bits;
* the equalized symbols use 1 sign bit, 2 integer bits and 5 fractional bits.

The other formats are choices made here. They are collected in `smd_pkg.sv`:

| Quantity | Format | LSB | Range |
|---|---|---|---|
| `x^e`, `x^d`, `mu^d`, `Delta` | s2.5 | 1/32 | [-4, 3.97] |
| `v_x^e`, `v_x^d` | u3.5 | 1/32 | [0, 7.97] |
| `L_e` | s4.3 | 1/8 | saturated to ±127 LSB (±15.9) |
| `p_q` | s1.6 | 1/64 | [-1, 1] |
| `C_EP` | u2.6 | 1/64 | [0, 3.98] |

Intermediate products are kept at full width. Each result is then rounded
(`rshift_rnd`, round half up) or saturated back to 8 bits. A variance of 0 gives
the saturated LLR with the sign of the numerator.

## Top-level interface and timing

```
ep_smd_top #(.MOD(MOD_QAM16), .DATA_W(32), .NSYM(2))
```

* **Input stream.** `s_valid`, `s_ready`, `s_data[31:0]`, and `s_ve`
  (`v_x^e`, u3.5, sampled with each word).
  * The word layout is `[7:0] R(x_0)`, `[15:8] I(x_0)`, `[23:16] R(x_1)`,
    `[31:24] I(x_1)`.
  * Two symbols with 8-bit real and imaginary parts per 32-bit word match the
    DMA width described for the prototype.
* **Output stream.** `m_valid`, `m_ready`, `m_llr[s][q]`, `m_xd` and `m_vd`.
  * `m_llr[s][q]` is `L_e(d_{q+1})` of symbol `s`. Unused LLR slots are 0: 2
    for QPSK, 1 for 8-PSK.
  * `m_xd` is packed like `s_data`.
* **Table port.** `cep_wr_en`, `cep_wr_addr`, `cep_wr_data`. It loads the
  `C_EP` table.
* **Pipeline.** Four register stages:
  1. demap;
  2. tanh;
  3. soft map, plus the synchronous `C_EP` read;
  4. EP estimate.
* **Latency and throughput.** A word accepted at clock edge *k* is on the
  outputs after edge *k+3*, so it is consumed at edge *k+4* at the earliest.
  Throughput is one word (two symbols) per cycle.
* **Back-pressure.** When `m_valid && !m_ready`, the whole pipeline holds and
  `s_ready` is low. This is a global stall with no skid buffer. An assertion
  checks that outputs stay stable while stalled.
* **Reset.** `rst_n` is synchronous and active-low. It clears only the valid
  bits. The table contents survive reset.

Parallelism follows the paper:
* four component demappers for QPSK and 16-QAM;
* two symbol demappers for 8-PSK;
* four EP estimate units for every constellation.

One accelerator is built per constellation. The paper also reports one
implementation per constellation.

## Loading C_EP

`C_EP(v) = g(v)/(v - g(v))`. Here `g` is the asymptotic a posteriori MSE of the
constellation as a function of the equalizer variance. The paper defines the
quantity but prints no values. The table is therefore a RAM.

The host writes all 256 entries (u2.6, index = `v_x^e` code) before streaming
data. It can reload the table between blocks when the constellation or the
operating point changes. The testbenches load a smooth test curve, not the true
MSE-based table.

## Verification

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Each
has a watchdog.

* **Demappers.** They are compared with a floating-point model:
  * QPSK and 16-QAM against the closed forms;
  * 8-PSK against brute-force max-log-MAP over all 8 points, away from exact
    decision ties.
* **Table.** The 8-PSK table is recomputed from the geometry.
* **tanh.** It is bit-exact against the piecewise definition, and within a few
  LSB of the true `tanh`.
* **Soft mappers and EP units.** They are checked exhaustively or over random
  inputs against rounded references.
* **Top.** It is checked by a scoreboard over streams with random stalls and
  bubbles, table reloads and exact latency. It counts each mechanism it
  exercises:
  * stalls, bubbles and reloads;
  * LLR and `x^d` saturation;
  * the four tanh segments;
  * all 8-PSK decision regions.
  * `tb_ep_smd_top` runs the QPSK, 8-PSK and 16-QAM builds.
  * `tb_ep_smd_full` streams 4096 words through the default build.

Simulation with Verilator, for example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
  rtl/smd_pkg.sv tb/tb_smd_model_pkg.sv tb/tb_ep_smd_top.sv \
  --top-module tb_ep_smd_top
./obj_dir/Vtb_ep_smd_top
```

Unit testbenches only need `rtl/smd_pkg.sv` and, where they use it,
`tb/tb_smd_model_pkg.sv`.

## Differences from the paper and open points

* **tanh input.** The paper's tanh expression has a typo (`tanh(L(d_q))/2`).
  The intended `tanh(L/2)` is implemented.
* **C_EP contents.** They are not given. The table is host-loaded, and its
  size (256 × 8, addressed by the 8-bit variance) is a choice made here.
* **Division by `v_x^e`.** The paper does not say how it divides. Here each
  LLR uses an exact integer divide with truncation and saturation.
  * This is more logic than a reciprocal table would need.
  * The paper reports no DSP use and internal widths of at most 10 bits. This
    design's intermediate products are wider, so resource figures will differ.
  * A shared reciprocal `1/v_x^e` per word would be the obvious reduction.
* **Formats.** Fixed-point formats other than that of `x^e` are assumptions
  (see above). `x^e` saturates at ±4. The study reports peaks of about 6.3 at
  0 dB and chose 2 integer bits regardless.
* **Interface.** It is a plain valid/ready stream, not the AXI DMA and Zynq
  processing-system wrapper of the prototype. `v_x^e` travels beside the data
  rather than in the data words.
* **Timing and resources.** The 100 MHz target and the resource numbers were
  not checked on the XC7Z020. The pipeline has one multiply or
  multiply-and-divide per stage.
* **Scope.** No exponential smoothing across iterations and no a priori LLRs
  from the decoder. The paper leaves both out too.
* **Error rates.** The MCS1–MCS6 error-rate curves (Proakis-C channel, LTE
  turbo code, one self-iteration) cannot be reproduced with this block alone.
  The channel, equalizer and decoder are outside it.
