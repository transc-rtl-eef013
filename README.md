# Transcendental functions from one counter: stochastic logic with Van der Corput streams

Stochastic computing (SC) represents a number p in [0, 1] as a bit-stream of
length N whose fraction of 1s is p. A single AND gate then multiplies two
independent streams, and a NAND gate computes 1 - a·b. A polynomial written in
Horner form, such as

    sin(x) ≈ x · (1 - x²/6 · (1 - x²/20 · (1 - x²/42)))

therefore becomes a short chain of AND/NAND gates. The only costly part is
making the streams. Each input and each coefficient needs its own stream, and
those streams must be mutually uncorrelated. Earlier designs used one LFSR or
Sobol generator per stream. They also put D flip-flops ("delay elements") into
the chain to break the correlation between copies of the same stream.

This design makes every stream from **one M-bit up counter**. A stream bit is a
comparison of a binary value against a random number. Here the random number
is a Van der Corput (VDC) sequence of radix 2^n. For a radix that is a power of
two, that sequence is just the counter's bits, cut into n-bit digits and
written in reverse digit order: pure wiring. Different radices (VDC-2,
VDC-4, ..., VDC-1024) give different, nearly uncorrelated orderings of the same
counter. So an input and three or four coefficients can each get their own
stream without a second random source. Because these streams are low-discrepancy
and mutually uncorrelated, most delay elements can be removed. Only one delay is
kept: the one that squares the input by ANDing it with a shifted copy of itself.

The RTL implements nine such circuits: sin, cos, tan, tanh, arctan, sigmoid,
Sinc, e^-x and ln(1+x). They use the configuration for N = 1024 (M = 10) that
was chosen for accuracy, including each function's own choice of radices and
delays. A small controller evaluates all nine for one input. It also
converts the output streams back to binary numbers.

## Streams from one counter

`vdc_counter` is an M-bit synchronous up counter. It is the only sequential
element in stream generation. It advances once per enabled cycle, and one stream
period is 2^M cycles.

`vdc_reorder` turns the counter value into the VDC-2^n number for n = `NB`:

1. Split the M counter bits into n-bit digits, starting at the LSB. If n does
   not divide M, zero-pad the last (most significant) digit to n bits.
2. Reverse the digit order: the least significant digit becomes the most
   significant.
3. Read the result, W = n·⌈M/n⌉ bits, as a binary fraction in [0, 1).

For example, with M = 10 and n = 3, the digits are counter bits [2:0], [5:3],
[8:6] and {00, bit 9}. The VDC-8 number is 0.[2:0][5:3][8:6][00 9]. That
fraction is 12 bits long, not 10. To keep every radix in one format, the
module left-aligns its output in a 2M-bit word. Nothing is computed: the module
synthesises to wires only, and its low output bits are constant 0.

`sc_sng` compares `{value, M zeros}` with that 2M-bit word and emits
`value/2^M > R`. For a radix whose digit size divides M, the sequence visits
every M-bit fraction exactly once per period, so a period holds exactly `value`
1s. For a zero-padded radix (VDC-8 and VDC-64 with M = 10) the count can be
off by one.

Coefficients (1/6, 17/42, ...) are rounded to M bits as round(c·2^M). This is
done at elaboration time by `transc_pkg::coef_q`. Each coefficient has its own
comparator, fed by the radix chosen for it.

## The function circuits

All circuits have the same interface (`clk`, `rst_n`, `clr`, `en`, the shared
`count`, the M-bit input `x`) and one output stream bit `y`. `y` is
combinational from the counter, the input and the delay registers. One valid
bit appears per enabled cycle, starting on the first cycle after `clr`. A
"D" entry below is the length of an `sc_delay` shift register. Depth 0 is a
wire.

The table gives each default configuration and the mean squared error over all
1024 inputs x = k/1024. The error column was measured in simulation of this RTL.
The last column is the value published for this configuration.

| circuit | series (Horner) | input radix | coefficient radices | delays D1..D4 | MSE ×10⁻⁴ here | published |
|---|---|---|---|---|---|---|
| `sc_sin` | x(1-x²/6(1-x²/20(1-x²/42))) | VDC-4 | 1/42: 128, 1/20: 256, 1/6: 512 | 2,0,0,0 | 0.511 | 0.523 |
| `sc_cos` | 1-x²/2(1-x²/12(1-x²/30(1-x²/56))) | VDC-8 | 1/56: 8, 1/30: 4, 1/12: 16, 1/2: 256 | 2,0,0,0 | 1.073 | 1.073 |
| `sc_tanh` | x(1-x²/3(1-2x²/5(1-17x²/42))) | VDC-16 | 17/42: 32, 2/5: 16, 1/3: 2 | 3,0,0,0 | 3.046 | 2.881 |
| `sc_arctan` | x(1-x²/3(1-3x²/5(1-5x²/21))) | VDC-8 | 5/21: 512, 3/5: 8, 1/3: 256 | 2,0,0,0 | 1.212 | 0.835 |
| `sc_sigmoid` | 1-½(1-½x(1-x²/12(1-x²/10))) | VDC-1024 | 1/10: 2, 1/12: 4, ½: 32, ½: 4 | 2,0,0 | 0.072 | 0.072 |
| `sc_sinc` | 1-x²/6(1-x²/20(1-x²/42)) | VDC-8 | 1/42: 256, 1/20: 32, 1/6: 1024 | 2,0,0 | 0.121 | 0.124 |
| `sc_exp_neg` | 1-x(1-x/2(1-x/3(1-x/4(1-x/5)))) | VDC-128 | 1/5: 16, 1/4: 1024, 1/3: 512, 1/2: 512 | 0,0,0,0 | 6.240 | 3.032 |
| `sc_ln1p` | x(1-x/2(1-2x/3(1-3x/4(1-4x/5)))) | VDC-64 | 4/5: 4, 3/4: 512, 2/3: 1024, 1/2: 512 | 0,0,0,0 | 45.0 | 0.996 |
| `sc_tan` | sin/cos, see below | sin: VDC-8, cos: VDC-4 | sin: 128,128,128; cos: 16,8,2,128 | sin 3,0,0,1; cos 3,0,0,2 | 0.852 (x < π/4) | 0.721 |

The circuits with a squaring stage (sin, cos, tanh, arctan, Sinc) follow one
pattern:

    i1 = X & X(D1)                 x²: the stream ANDed with its own delayed copy
    i2 = ~(c_inner & i1)           1 - c·x²
    i3 = ~(c_next  & i1(D2) & i2)  1 - c'·x²·i2
    ...
    y  = X(D4) & i_last            odd series: multiply by x
    y  = ~(c_last & i1(D4) & ...)  even series (cos, Sinc): one more NAND

In the sigmoid circuit the outer stages use x rather than x². Its last gate,
NAND(½, t), adds the constant ½. The two ½ constants need independent streams;
otherwise the result would be ½ + x·g/2. Of the four coefficients only three
radices are published. The fourth radix here (VDC-4, reused) is this design's
choice. It gives the published error.

e^-x and ln(1+x) use powers of x itself. Each gate takes the input, a
coefficient and the previous stage. The published configuration removes all
four delays on the input branches. With zero delays every gate sees the same X
bit, so the series collapses. Where X = 1 the inner stages see only the
constants; where X = 0 the chain's output is fixed. The circuits then compute
straight lines: e^-x ≈ 1 - 0.633x, and about 0.633x for ln(1+x). That explains
the large errors in the table. The published errors for these two functions
could not be reproduced with any ordering of the published radices. The delays
are parameters, so a decorrelated variant can be built by setting `D1..D4`.

## tan: division by correlation

tan(x) = sin(x)/cos(x). A stochastic divider, CORDIV, needs a dividend stream
that is *maximally correlated* with the divisor: every dividend 1 must fall where
the divisor is also 1. CORDIV is one flip-flop and a multiplexer: where the
divisor bit is 1, output the dividend bit; otherwise repeat the previous output
bit. The sin and cos circuits produce streams with no such alignment.
`sc_correlator` re-encodes the sin stream to supply it:

* **Period 1** (`phase2 = 0`, N cycles): an up counter counts the 1s of the sin
  stream.
* **Load** (one cycle): the count moves into a down counter.
* **Period 2** (`phase2 = 1`, N cycles): the sin and cos circuits run again. Each
  time the cos bit is 1 and the down counter is not empty, the correlator emits
  a 1 and decrements. The re-encoded sin stream is a subset of the cos stream,
  and it has the same number of 1s as long as sin ≤ cos.
* CORDIV divides the re-encoded stream by the cos stream. The result is counted
  in period 2 only.

A unipolar stream cannot exceed 1, so tan is correct only for x < π/4. Above
π/4 the correlator never empties and the quotient saturates near 1. Over the
805 inputs below π/4 the error is 0.852·10⁻⁴. Over all 1024 inputs it is
192·10⁻⁴, all of it from saturation. `tan_corr_zero` on the top level shows the
correlator's empty flag. It is normally set before the end of period 2 when
x < π/4.

The two counters are M+1 bits wide, so a stream of N ones fits. The period-1 /
period-2 sequencing belongs to this design. The published design gives the
circuit but not how it is sequenced.

The tan circuit has its own sin and cos sub-circuits because its published
configuration differs from the stand-alone ones. Its delay lists "3,0,0,1" and
"3,0,0,2" are read with the same stage positions as the stand-alone circuits.
The first entry is the squaring delay. The last is the delay on X (sin) or on
x² (cos) at the final gate.

## The evaluation unit and its timing

`transc_top` connects `transc_ctrl`, the shared `vdc_counter`, the nine
circuits and nine `sc_decoder` ones counters.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | begin an evaluation; `x` is latched when `start` is seen while idle |
| `x` | in | M | input, value x/2^M |
| `busy` | out | 1 | evaluation in progress; `start` is ignored |
| `done` | out | 1 | one-cycle pulse; `result` is valid from here until the next start |
| `tan_corr_zero` | out | 1 | tan correlator empty |
| `result[9]` | out | M+1 each | count of 1s; function value ≈ result/2^M. Index order (`transc_pkg::func_e`): sin, cos, tan, tanh, arctan, sigmoid, Sinc, e^-x, ln(1+x) |

One evaluation takes 2N + 3 cycles from the cycle that samples `start` to
`done` (2051 cycles for N = 1024):

    cycle 0            start sampled, x latched           (IDLE)
    cycle 1            clear counter, delays, decoders     (CLEAR)
    cycles 2..N+1      period 1: counter 0..N-1            (RUN1)
                       all circuits stream; eight decoders count
                       tan correlator counts sin 1s
    cycle N+2          correlator load, counter is 0      (LOAD)
    cycles N+3..2N+2   period 2: counter 0..N-1            (RUN2)
                       tan decoder counts the quotient
    cycle 2N+3         done pulse                          (FINISH)

If `start` is held high, evaluations run back to back with one idle cycle
between them. The eight single-period circuits keep running during period 2,
but their decoders no longer count. The delays and counters are cleared at the
start of every evaluation, so a result depends only on its own input.

At M = 10 the whole unit synthesises (generic yosys cells, before technology
mapping) to about 440 cells with 167 flip-flops:

* 10 flip-flops in the counter
* 99 in the nine result counters
* 22 in the tan correlator
* 22 in delay elements (13 in the eight single-period circuits, 9 in tan)
* 14 in the rest: 10 in the input register, 3 in the controller, 1 in CORDIV

Each function circuit is 33 to 41 cells. Nearly all of them are comparators.

## Where this RTL departs from, or adds to, the published design

* **arctan coefficient.** The published series text has 5/7 as the innermost
  coefficient, as in the Maclaurin series. The circuit drawing prints 5/21. This
  RTL uses 5/21, which gives 1.21·10⁻⁴. Using 5/7 gives 39.5·10⁻⁴, far from the
  published 0.835·10⁻⁴.
* **sigmoid fourth coefficient radix.** Not published; VDC-4 is used (above).
* **Coefficient-to-radix assignment.** The radices in each list are assigned to
  the coefficients in drawing order, from the innermost stage out. For sin, cos,
  sigmoid and Sinc this reproduces the published errors to within 3 %.
* **e^-x and ln(1+x).** These are built exactly as configured (no delays), so
  they reproduce neither the published accuracy nor the function (above).
* **Zero-padded radices.** How a padded result maps to [0, 1) is not specified.
  Here it is read as a W-bit fraction.
* **Coefficient precision.** round(c·2^M) is an assumption.
* **All nine side by side.** The published work evaluates each function as a
  separate circuit. Sharing one counter among all of them follows the idea
  that every stream comes from the same source. The controller, handshake,
  latching and result counters are this design's additions.
* **Other stream lengths.** The published tables also give configurations for
  N = 512 ... 64, which often use different radices. They are not the defaults.
  Every module takes `M` and every radix and delay as parameters, so such a
  configuration is an instantiation away. There is no run-time switch.
* **Not built.** The LFSR/Sobol comparison designs and the two application
  studies (image rotation correction, robot-arm kinematics) are outside the
  hardware.

## Files

`rtl/` holds one module or package per file:

* `transc_pkg`: function index enum, coefficient rounding
* `vdc_counter`, `vdc_reorder`, `sc_sng`: stream generation
* `sc_delay`
* the nine circuits `sc_sin`, `sc_cos`, `sc_tanh`, `sc_arctan`, `sc_sigmoid`,
  `sc_sinc`, `sc_exp_neg`, `sc_ln1p`, `sc_tan`
* `sc_correlator`, `sc_cordiv`, `sc_decoder`
* `transc_ctrl`, `transc_top`

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each ends
by printing `TB_RESULT checks=<n> failures=<n>`. The shared package
`tb/sc_ref_pkg.sv` computes the VDC radical inverse arithmetically (digit
reversal in integer arithmetic, independent of the RTL wiring). It also
provides a cycle model of every function circuit, including correlator and
CORDIV.

* The function testbenches sweep all 1024 inputs. They compare every output
  count bit-exactly with that model, check the cycle count, and check the mean
  squared error against the table above.
* `tb_transc_top` runs the complete unit at its default size. It runs 64
  evaluations, including disturbing `x` and `start` while busy and a
  back-to-back pair. It checks:
    * all nine results bit-exactly, and against the real functions to 0.2
    * the 2N + 3 latency and the one-cycle `done` pulse
    * that every mechanism occurred: period 1, load, period 2, ignored start,
      back-to-back start, correlator emptied, correlator not emptied, CORDIV
      hold

Simulating with Verilator 5 (two-state; all state is reset or cleared before
use):

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/transc_pkg.sv tb/sc_ref_pkg.sv tb/tb_transc_top.sv --top-module tb_transc_top
    ./obj_dir/Vtb_transc_top

Replace `tb_transc_top` with any other testbench name. The end-to-end run
takes well under a minute. To try another configuration, override the radix
(`*_NB`) and delay (`D*`) parameters of a circuit. `NB = n` selects VDC-2^n,
and `n` may be 1..M.
