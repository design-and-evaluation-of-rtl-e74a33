# Frequency-spread filter stage for FBMC/OQAM with the NPR1 short prototype filter

FBMC/OQAM (filter-bank multicarrier with offset QAM) is a multicarrier scheme like
OFDM. It needs no cyclic prefix. Instead, every sub-carrier is shaped by a prototype
filter, and orthogonality holds only for the real parts. Each QAM symbol is sent as two
real PAM values, staggered by half a symbol in time. A receiver can apply the
prototype filter in the time domain (a polyphase network in front of the FFT) or in the
frequency domain after the FFT. The frequency-domain form is called *frequency spread*
(FS). The FS form tolerates timing offsets and multipath better, because equalisation
happens before filtering. Its cost is a convolution across sub-carriers for every
output.

This RTL implements the FS filtering stage for the *NPR1* prototype filter. NPR1 is a
short filter, one OFDM symbol long, obtained by swapping the time and frequency axes of
the filter-bank response of the long MMB4 filter. The design follows the paper "Design
and Evaluation of a Novel Short Prototype Filter for FBMC/OQAM Modulation" (Nadal,
Abdel Nour, Baghdadi). Because NPR1 is well localised in frequency, its frequency
response can be cut to 7 taps and still leave a residual interference about 55 dB
below the signal. The architecture uses three further properties of the problem:

* The 7 taps are real and symmetric. Every product is therefore a real constant
  times a real number.
* OQAM keeps only the real or only the imaginary part of each filter output,
  depending on the parities of the symbol and the sub-carrier. Half the arithmetic
  is never needed.
* The taps are constants, so all multiplications become shift-and-add networks
  (multiple constant multipliers, MCM). No general multipliers are used.

The result processes one complex sample per clock and produces one real OQAM symbol
per clock.

## The filter

The NPR1 impulse response of length M is

    g(k) = sqrt( 1 - 2 * sum_{l=0..2} Pg(l) * cos(2*pi*k*(2l+1)/M) )
    Pg = { 0.564447, -0.066754, 0.002300 }

Its frequency response `G(l) = sum_k g(k) e^{i 2 pi k l / M}` is real and `G(-l) = G(l)`.
The filter stage uses the rescaled response `G'(l) = G(l)/G(0)`, truncated to
`|l| <= 3`. The factor `G(0)` can be absorbed by the equaliser or the QAM demapper. For
M = 512:

| l | G'(l) | 12-bit value (Q1.10) |
|---|-------|----------------------|
| 0 | 1.0000 | 1024 |
| ±1 | -0.4202 | -430 |
| ±2 | -0.0837 | -86 |
| ±3 | 0.0107 | 11 |

The taps alternate in sign because g(k) is centred at k = M/2. Coefficients are 12-bit,
as in the paper's hardware comparison. The Q1.10 format (10 fractional bits, so that
1.0 is representable) is this design's choice. The values live in `fbmc_fs_pkg`. If the
filter or M changes, recompute them from the formula above and round `G'(l) * 1024`.

## What is computed

For one received symbol with index N, let X'(k), k = 0..M-1, be the equalised FFT
output. The filter stage returns, for every sub-carrier k,

    Y(k) = sum_{l=-3..3} G'(l) * X'(k - l)        (circular in k)
    a(k) = Re( i^-(N+k) * Y(k) )

This is the OQAM demodulation `a = Re(phi* Y)` with `phi = i^(N+k)`. Writing N = 2n or
2n+1 and k = 2m or 2m+1, a(k) is just a signed real or imaginary part:

| symbol | sub-carrier | kept part | sign |
|--------|-------------|-----------|------|
| 2n     | 2m          | Re Y      | (-1)^(n+m) |
| 2n     | 2m+1        | Im Y      | (-1)^(n+m) |
| 2n+1   | 2m          | Im Y      | (-1)^(n+m) |
| 2n+1   | 2m+1        | Re Y      | (-1)^(n+m+1) |

**Departure from the paper's text.** The paper's expanded per-parity equation prints
the sign `(-1)^(n+m+1)` for the two mixed rows (even symbol with odd sub-carrier, odd
symbol with even sub-carrier). Its prose repeats that for the second phase. But the
rule that the equation is derived from, `a = Re(phi* Y)` with `phi = i^(n+m)`, gives
the table above. A link simulation with the paper's own modulator confirms the table:
with the printed signs, every symbol on those sub-carriers comes out negated. The RTL
follows the table.

## The two-phase architecture

Split the taps by the parity of l: the *even* FIR holds G'(-2), G'(0), G'(2) and the
*odd* FIR holds G'(-3), G'(-1), G'(1), G'(3). For an even symbol:

* An even sub-carrier needs Re Y(2m). That is the sum of G'even times Re X' at even
  sub-carriers and G'odd times Re X' at odd sub-carriers.
* An odd sub-carrier needs Im Y(2m+1). That is the sum of G'even times Im X' at odd
  sub-carriers and G'odd times Im X' at even sub-carriers.

So from every input sample, exactly one part goes to the even taps and the other part
goes to the odd taps. Which part goes where depends only on the parity of k. The
hardware therefore has:

* **Two input multiplexers and registers.** One feeds the even MCM (EMCM), the other
  the odd MCM (OMCM). In the even phase, Re X' goes to EMCM and Im X' to OMCM. In the
  odd phase they are swapped.
* **Two MCMs.** EMCM makes the 3 even-tap products and OMCM the 4 odd-tap products of
  their input. Both use CSD shift-and-add.
* **Four data paths.** Each is a transposed-form FIR, `REG -> (+) -> REG -> ... -> REG`,
  and is fed by one MCM:

  | data path | fed by | loads when select_DP is | collects |
  |-----------|--------|-------------------------|----------|
  | ERDP (even real) | EMCM | 1 | G'even x Re X'(even k) |
  | OIDP (odd imaginary) | OMCM | 1 | G'odd x Im X'(even k) |
  | EIDP (even imaginary) | EMCM | 0 | G'even x Im X'(odd k) |
  | ORDP (odd real) | OMCM | 0 | G'odd x Re X'(odd k) |

  A data path loads only in its phase. Consecutive registers in it are therefore two
  sub-carriers apart, which is exactly the tap spacing within one parity class.
* **select_DP.** A phase flip-flop that alternates every clock cycle.
* **The output combiner.** With select_DP = 1 it adds ERDP + ORDP (a real output); with
  0 it adds EIDP + OIDP (an imaginary output). It then registers the sum, applies the
  sign, rounds and saturates.

For an odd symbol the kept parts swap. The same hardware is used with the phase
started the other way round: at sub-carrier 0, Im goes to EMCM. This is the
`ODD_SYMBOL` parameter.

Timing inside the stage, with X'(k) presented in clock cycle t:

| cycle | what happens |
|-------|--------------|
| t     | X'(k) at the input; the mux picks its parts; the input registers load at the end of the cycle |
| t+1   | the MCMs see X'(k); one pair of data paths loads |
| t+4   | the MCMs see X'(k+3); the last contribution to Y(k) is loaded |
| t+5   | the MCMs see X'(k+4), whose phase equals that of k; the combiner adds the pair that holds the complete Y(k) and registers it |
| t+6   | a(k) is on `out_a` |

The latency is therefore 6 cycles. It comes from the input register, the 3-sample
look-ahead of the 7-tap filter and the output register. A sideband pipeline of the same
length carries valid, the first-sample flag, k and the sign bit alongside the data.

## Streaming, symbol boundaries and the circular convolution

The stage filters a continuous stream. The samples of one symbol enter in sub-carrier
order. `in_first` marks k = 0 and restarts both the sub-carrier counter and the
select_DP phase. Symbols may follow each other back to back or with idle cycles in
between. An idle cycle feeds a zero sample and the pipeline never stalls. The OQAM
half-symbol index n, used in the sign, is counted by the stage itself from the
`in_first` strobes. The first symbol after reset has n = 0.

The convolution is circular in k, but a streaming FIR computes a linear one. The two
agree for every output at least 3 sub-carriers from either end of the stream. Near the
ends, the streamed filter uses the neighbouring symbol's (or idle) samples instead of
the wrapped ones. Keep the spectrum in natural frequency order, with the guard bands at
both ends of the stream (an FFT-shifted output). Then those outputs are guard
sub-carriers that the demapper discards. In the LTE-like setting (300 active
sub-carriers of 512), 106 guard sub-carriers sit on each side. The paper does not say
how the wrap-around is handled.

## Interfaces

`fbmc_fs_filter_top` (parameter `M = 512`) holds two branches in parallel: `ev_` for
even symbols and `od_` for odd symbols. This is the two-branch receiver structure of
FS-FBMC, with the two filter stages side by side as in the paper's hardware
comparison. Each branch is a zero-forcing equaliser (`zf_equalizer`) followed by a
filter stage (`fs_filter_stage`). The equaliser multiplies each FFT output sample by a
per-sub-carrier coefficient C(k) = 1/H(k), which can also carry the scale G(0). It is
a 4-multiplier complex product with 1 cycle of latency. Per branch:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `*_in_valid` | in | 1 | a sample is present |
| `*_in_first` | in | 1 | this sample is sub-carrier 0 of a symbol |
| `*_in_x` | in | 2x16 (`cplx_t`: `re`, `im`) | FFT output X(k), two's complement |
| `*_in_c` | in | 2x16 (`cplx_t`) | equaliser coefficient C(k), 12 fractional bits (4096 = 1.0) |
| `*_out_valid` | out | 1 | an output is present |
| `*_out_first` | out | 1 | the output is sub-carrier 0 |
| `*_out_k` | out | log2(M) | sub-carrier index of the output |
| `*_out_a` | out | 16 | real OQAM symbol a(k), same scale as the input |
| `*_out_sat` | out | 1 | a(k) was clipped to the 16-bit range |

Latency from `in_x` to `out_a` is 7 cycles: 1 for the equaliser and 6 for the filter
stage. `clk` is the rising-edge clock. `rst_n` is an active-low reset, sampled on the clock
edge, that clears all state.

Number format: the output is `round((±) sum G'_q(l) * Part(X'(k-l)) / 1024)`, rounded
half up and saturated to 16 bits. Because the sum of |G'| is about 2.02, full-scale
inputs can overflow, which is why the saturation flag exists. The scale factor G(0)
and the FFT scaling belong to the surrounding receiver. For example, scale X' so that a
unit PAM symbol gives 2048 at the output.

## Numbers

* The testbench simulates a link with the paper's modulator, the NPR1 filter and 4-PAM
  (16-QAM) on 300 of 512 sub-carriers. It applies a random static gain and phase per
  sub-carrier, and the equaliser undoes them. Receiver input is 16-bit, filter
  coefficients are 12-bit. The recovered symbols have a signal-to-interference ratio
  of 54.9 dB, with no wrong decision in 3000 symbols. Without the channel the figure
  is 55.1 dB, which is the 55 dB that 7 taps give for NPR1. Quantisation costs almost
  nothing at this scale.
* Register width inside the data paths is 31 bits: the full 28-bit product plus 3 bits
  of growth. The output register holds the full sum. The paper gives only the 16-bit
  input and output widths. Its reported 520 flip-flops for two stages suggests about
  16-bit data paths, so this RTL has about twice the flip-flops. Narrowing `ACC_W` (with
  truncated products) is the obvious change if area matters.
* The paper's MCMs come from a code generator that shares partial sums between
  coefficients. Here every product is its own CSD sum. That costs a few more adders for
  the same result.
* The paper reports 218 MHz on a Xilinx XC7Z020 for its version. No timing analysis was
  done for this RTL.

## What is outside this RTL

The FFTs, the half-symbol delay of the odd branch, the channel estimation that
provides the equaliser coefficients, and the QAM demapper complete the receiver. They
are ordinary blocks that the paper does not design: their streams are the ports of
`fbmc_fs_filter_top`. Also
not included are the polyphase-network receiver and the baseline FS stage built from
two full complex FIRs, which the paper uses only for comparison. The design is fixed
to NPR1 with 7 taps. The paper's higher SIR targets (15, 23 or 35 taps) and the TFL1
and QMF1 filters (31 and 41 taps) would need new coefficient sets and longer data
paths.

## Files

| file | content |
|------|---------|
| `rtl/fbmc_fs_pkg.sv` | widths, tap values, `cplx_t`, CSD digit function |
| `rtl/mcm_csd.sv` | multiple constant multiplier (EMCM / OMCM) |
| `rtl/fs_data_path.sv` | one enabled transposed-FIR chain (ERDP, EIDP, ORDP, OIDP) |
| `rtl/fs_out_stage.sv` | output mux, adder, register, sign, rounding, saturation |
| `rtl/fs_filter_stage.sv` | one complete filter stage with select_DP and sideband |
| `rtl/zf_equalizer.sv` | per-sub-carrier complex equaliser |
| `rtl/fbmc_fs_filter_top.sv` | even and odd branch side by side, each equaliser + filter stage |
| `tb/fs_ref_pkg.sv` | reference model: circular convolution and OQAM demodulation |
| `tb/tb_*.sv` | self-checking testbenches, one per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and stops. For example, the
end-to-end test at full size:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/fbmc_fs_pkg.sv rtl/mcm_csd.sv rtl/fs_data_path.sv rtl/fs_out_stage.sv \
      rtl/fs_filter_stage.sv rtl/zf_equalizer.sv rtl/fbmc_fs_filter_top.sv \
      tb/fs_ref_pkg.sv tb/tb_fbmc_fs_filter_top.sv --top-module tb_fbmc_fs_filter_top
    ./obj_dir/Vtb_fbmc_fs_filter_top

It builds the link in a few seconds and simulates it in under a second. What each
testbench checks:

* `tb_mcm_csd`: every product of both coefficient sets against plain integer
  multiplication, for extreme and random inputs.
* `tb_fs_data_path`: the chain output against a model of the enabled taps, with a
  random enable pattern.
* `tb_fs_out_stage`: selection, sign, rounding and saturation in both directions.
* `tb_fs_filter_stage`: an even and an odd stage on four 512-sample symbols,
  back to back and with gaps. Every output is compared bit for bit with the reference,
  and the 6-cycle latency is checked.
* `tb_zf_equalizer`: complex products, rounding, saturation and strobes against an
  integer model.
* `tb_fbmc_fs_filter_top`: the full link described under *Numbers*. It checks
  bit-exactness against the reference (except the 3 guard outputs at each end of a
  symbol), the 7-cycle latency, decisions and SIR. It also counts how often each mechanism
  happened: back-to-back symbols, idle gaps of odd length (where the phase restart
  matters), all four sign/part combinations in both branches, and saturation on a
  full-scale stress symbol.
