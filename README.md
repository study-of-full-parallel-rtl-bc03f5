# A 3.2 Gb/s serial transmitter with a full parallel RS(31,27) encoder

A pixel-sensor readout chip sends its data over an optical fibre at 3.2 Gb/s.
Fibre links in a radiation environment see bursts of bit errors, so each frame
carries Reed-Solomon check symbols. Every 100 ns the transmitter takes 270 bits
of sensor data and turns them into one 320-bit frame:

    | header 10 | code A and code B, symbol-interleaved, 2 x 155 = 310 |
      bit 319 ...                                                  ... bit 0   (bit 319 is sent first)

Each of the two codes is an RS(31,27) word over GF(32). It has 27 information
symbols (135 bits) and 4 check symbols (20 bits), and can correct any 2
symbols. The codes are interleaved symbol by symbol. A burst of 20 wrong bits
that starts on a symbol boundary therefore touches only two symbols of each
code, and both codes can still be corrected.

The interesting part is the encoder. A Reed-Solomon encoder is usually a
linear feedback shift register (LFSR) that takes one symbol per clock. For
RS(31,27) it needs 31 clocks per code, which at this frame rate means 320 MHz.
In 0.18 um CMOS that does not meet timing. This design uses a *full parallel*
encoder instead: each of the 20 check bits is written as a fixed XOR of
information bits, and the whole codeword is computed in one 10 MHz cycle.

The architecture is the one described by G. Zhang et al. in "Study of Full
Parallel RS(31,27) Encoder for a 3.2 Gbps Serial Transmitter in 0.18 um CMOS
Technology". That paper gives the block chain, the sizes and rates, and the
method for deriving the encoder. Everything it leaves open was chosen for this
RTL; the choices are listed below.

The RTL is written in SystemVerilog (IEEE 1800-2017). It lints cleanly with
Verilator and elaborates with the slang front end of Yosys. Each block has a
self-checking testbench, and one testbench runs the whole transmitter at its
real size.

## Block chain

    sensor_data_i[269:0]
        |  (10 MHz: one frame per 100 ns)
    scrambler ------------- 270 bits, self-synchronous, 1 + x^39 + x^58
        |  [269:135]            [134:0]
    rs_encoder (code A)    rs_encoder (code B)  --- 135 -> 155 bits each, one clock
        |                        |
    interleaver ----------- 310 bits: A30 B30 A29 B29 ... A0 B0 (5-bit symbols)
        |
    frame_builder --------- {header, 310 bits} as ten 32-bit words at 100 MHz
        |
    serializer ------------ 32 -> 1 bit, DDR at 1.6 GHz = 3.2 Gb/s -> ser_o

| module | file | what it does |
|---|---|---|
| `rs_transmitter` | `rtl/rs_transmitter.sv` | top level: the chain above |
| `scrambler` | `rtl/scrambler.sv` | DC balance of the sensor bits |
| `rs_encoder` | `rtl/rs_encoder.sv` | full parallel RS(31,27) encoder, used twice |
| `interleaver` | `rtl/interleaver.sv` | symbol interleaving of the two codewords |
| `frame_builder` | `rtl/frame_builder.sv` | header, 320-to-32 width conversion, frame strobe |
| `serializer` | `rtl/serializer.sv` | 32:1 DDR serializer and the clock divide-by-16 |
| `tmr_reg` | `rtl/tmr_reg.sv` | triple-redundant register used for all state |
| `rs_tx_pkg` | `rtl/rs_tx_pkg.sv` | sizes, GF(32) arithmetic, derivation of the encoder equations |

## The parallel encoder

### From the LFSR to XOR equations

The starting point is the ordinary systematic encoder. It has four 5-bit
registers C0..C3 and the generator polynomial

    g(x) = (x + a)(x + a^2)(x + a^3)(x + a^4) = x^4 + g3 x^3 + g2 x^2 + g1 x + g0

Here a is a root of the field polynomial x^5 + x^2 + 1. The coefficients are
g0 = 17, g1 = 9, g2 = 6, g3 = 30 as 5-bit values, where bit b is the
coefficient of a^b. The information symbols go in highest degree first. In each
cycle the feedback symbol `fb = data ^ C3` is multiplied by g0..g3 and added
into the register chain. After 27 symbols, C3..C0 hold the check symbols.

Every operation in this register chain is linear over GF(2). An addition is an
XOR. Multiplying by a constant c is a fixed 5x5 bit matrix: column j is
c·a^j. So after the 27 data cycles, each bit of C0..C3 is the XOR of some
subset of the 135 information bits. The encoder only needs those 20 subsets.

`rs_tx_pkg::rs_parity_masks()` finds the subsets by running the LFSR
*symbolically*. Each register bit is held as a 135-bit mask that says which
information bits it is the XOR of:

* At the start every mask is empty.
* Feeding data symbol d toggles bit `5d+b` of feedback bit b.
* Multiplying by `g[k]` XORs together the masks of the feedback bits that
  column j of the matrix selects.
* The shift simply moves masks from one register to the next.

After 27 steps the 20 masks are the encoder. This is a constant function, so
elaboration evaluates it. No generated file is involved, and changing the field
polynomial, the first root `FCR` or the header means editing a constant in the
package.

`rs_encoder` is then only

    parity[j] = ^(info_i & MASKS[j]);     // j = 0..19
    codeword  = {info_i, parity}          // registered

### Size of the XOR network

With these polynomials the 20 equations have the following number of inputs:

    check bit  0..4  (C0):  71 67 75 75 79
    check bit  5..9  (C1):  59 63 63 63 59
    check bit 10..14 (C2):  75 71 71 75 75
    check bit 15..19 (C3):  71 67 75 75 79

That is 1388 two-input XORs before any sharing. The widest equation has 79
inputs. A tree of 3-input XOR gates covers up to 3^4 = 81 inputs in 4 levels,
so every check bit is at most 4 XOR3 gates deep.

The published version of this encoder reports a longest chain of 70 inputs and
a depth of 4. It does not name its polynomials. No combination of the six
primitive polynomials of degree 5 with a first root of a^0 or a^1 gives exactly
70; all give 76 to 85. The depth of 4 is reproduced.

### Codeword layout

Bits `[5d+4:5d]` of a codeword hold the coefficient of x^d:

* `[154:20]` holds the information symbols. Information symbol i, `info_i[5i+4:5i]`,
  is at degree i+4.
* `[19:0]` holds the check symbols, degrees 3..0.

Encoder A gets sensor bits `[269:135]` after scrambling, and encoder B gets
bits `[134:0]`.

The encoder's only state is its 155-bit codeword register. This is the same
number as the 155 sequential cells reported for the published parallel
encoder. The same source gives 1005 cells in total for it, against 203 for the
serial LFSR encoder. The serial encoder would also need to be duplicated and
given width converters to reach the frame rate. That serial encoder is the
reference the parallel one was derived from; it is not part of this design,
though the testbenches use a model of it.

## Scrambler

The sensor bits are scrambled before encoding so that long runs of identical
data do not unbalance the optical link. The scrambler is self-synchronous with
polynomial 1 + x^39 + x^58, over the continuous stream of sensor bits (bit 269
of a frame first):

    s[t] = d[t] ^ s[t-39] ^ s[t-58]        receiver:  d[t] = s[t] ^ s[t-39] ^ s[t-58]

All 270 steps are unrolled in one `always_comb` loop. The loop starts from the
last 58 scrambled bits of the previous frame. The receiver needs no seed: it
is in step after 58 bits. Only the sensor bits are scrambled. The header and
the check symbols are not, but the check symbols are functions of scrambled
data. The history resets to all ones.

## Framing, clocks and timing

Only one clock comes in: `clk_ser` at 1.6 GHz. The serializer divides it by 16
to make the 100 MHz word clock `clk_word_o`, which clocks all the other blocks.
There is no separate 10 MHz clock. The frame builder's word counter (0..9)
raises `frame_strobe` in word 9, and every "10 MHz" register loads on a word
clock edge where that strobe is high. The top brings the strobe out as
`data_req_o`.

| event | time |
|---|---|
| sensor data sampled | rising `clk_word_o` edge E at the end of the `data_req_o` cycle |
| scrambled | register updated at E |
| encoded | E + 1 frame (10 word cycles) |
| interleaved | E + 2 frames |
| frame loaded in frame builder, word 0 on `word` | E + 3 frames |
| word loaded in serializer | 8 serial cycles after the word clock edge (word stable by then) |
| first header bit on `ser_o` | high phase of `clk_ser` after serial edge E + 3·160 + 8 |
| frame duration | 160 serial cycles = 320 bits = 100 ns |

The serializer shifts two bits per `clk_ser` cycle. The first bit goes to a
register that shows it during the high phase. The second goes through a
falling-edge register that shows it during the low phase. The output is
`ser_o = clk_ser ? q_rise : q_fall`. In silicon that final multiplexer is a
custom high-speed cell; here it is a behavioural multiplexer on the clock.

The header is a parameter, `HEADER = 10'b0011111010` (the K28.5 comma
pattern). The receiver finds frame boundaries with it.

Reset (`rst_n`, active low) is asynchronous. The word clock stops while reset
is held, so the word-clock registers rely on the asynchronous path. After
reset the frame builder sends frames that are the header followed by zeros,
until the first real frame arrives three frames later.

## Protection against single event upsets

Every state register is a `tmr_reg`, with two exceptions: the serializer's
shift register, which is reloaded every 10 ns, and its two DDR output
registers. A `tmr_reg` has three copies and a bitwise 2-of-3 majority output.
In each cycle it is not loaded, it writes the voted value back into all three
copies, so a single upset is repaired in one clock. An `err` output shows that
the copies disagree.

Synthesis tools merge identical registers by default, and they will fold the
three copies into one unless told not to. The open-source synthesis flow used
for sizing this code does exactly that, so its flip-flop counts are those of
an unprotected design. A production flow must keep the copies, with
tool-specific constraints. Setting `TMR = 0` on a block builds plain registers.

## What follows the source design and what is this design's own

The following come from the published design:

* RS(31,27) with 5-bit symbols.
* Two codes per frame, interleaved.
* A 10-bit header and a 320-bit frame at 10 MHz.
* A 310-bit interleaved port, a 32-bit port at 100 MHz, and a 1-bit DDR output
  at 1.6 GHz.
* Scrambling before encoding.
* A one-cycle, XOR-only parallel encoder derived by symbolic simulation of the
  LFSR encoder.
* TMR of the logic.

The following are choices made here, because the source does not give them:

* The field polynomial x^5+x^2+1 and the generator roots a^1..a^4.
* The scrambler polynomial and its self-synchronous form.
* Interleaving by symbols, in the order A30 B30 ... A0 B0.
* The header value.
* All bit orders.
* The clock-enable scheme and the divide-by-16 word clock.
* The serializer's internal structure.
* The TMR form: voter, scrubbing, and which registers are protected.
* The reset.

Known differences and limits:

* **Longest XOR chain.** It is 79 inputs here, against 70 in the source (see
  above). The depth of 4 agrees.
* **The 20-bit burst claim.** It holds only for bursts that start on a symbol
  boundary. A 20-bit burst that starts mid-symbol touches three symbols of one
  code, which that code cannot correct.
* **Not included.** The receiver's decoder, the clock generator for
  `clk_ser`, and the optical driver are not part of this RTL. The receiver
  described with the source design is a Berlekamp-Massey decoder on an FPGA.
  Check bits are verified here by computing syndromes.

## Behaviour under bit errors

`tb_error_sweep` runs the transmitter at full size for 60 frames of random
data and sends the output through a channel that flips each bit at random at
a fixed rate. A receiver model, `decode()` in `tb/rs_ref_pkg.sv`, then
corrects the frames. It is a direct (Peterson) solver that corrects up to two
symbol errors per code. One run gave:

    BER(ppm)  bit errors  frames wrong before  after  codes flagged  codes undetected
        1000          25                   23      0              0                 0
        3000          59                   39      3              2                 1
       10000         225                   60     30             20                11
       20000         393                   60     54             54                25
       40000         761                   60     59             69                42

At low error rates almost every damaged frame is repaired. Near the point
where frames start to fail, an important share of the codes with three or
more wrong symbols are not flagged: they are "corrected" into a different
valid codeword. This is expected for a code with t = 2. Roughly 43 % of all
31-symbol words lie within two symbols of some codeword. So the decoder's own
failure flag misses many bad frames, and a link that must know about every
bad frame needs an extra check such as a CRC.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. The
testbenches use fractional-nanosecond delays, so give a time scale:

    verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
        rtl/rs_tx_pkg.sv tb/rs_ref_pkg.sv tb/tb_rs_transmitter.sv \
        --top-module tb_rs_transmitter -o sim
    ./obj_dir/sim

The other testbenches build the same way: replace the testbench file and the
top module name. All of them run in well under a second.

| testbench | checks |
|---|---|
| `tb_rs_transmitter` | The whole transmitter at full size, 40 frames. It samples `ser_o` in every half period, checks the frame position against the latency above, then checks the header and the syndromes of both codes. It compares the information symbols with a bit-serial scrambler model, then descrambles back to the sensor data, including ten all-zero frames, which must come out with a 40-60 % density of ones. It also injects upsets into one copy of four different TMR registers (they must be flagged and the output must stay correct), and applies 40 symbol-aligned 20-bit bursts to received frames (each must touch at most two symbols per code). |
| `tb_error_sweep` | The bit-error sweep above. Every code with at most two wrong symbols must be restored exactly, the decoder model is tested with one and two injected symbol errors per code, and correction must never increase the number of wrong frames. |
| `tb_rs_encoder` | The zero word, all 135 single-bit words and 300 random words, against a symbol-serial LFSR encoder and against the syndromes. Also checks the one-cycle latency and hold. |
| `tb_scrambler` | 300 frames at random enable times, against a bit-serial scrambler and descrambler. |
| `tb_interleaver` | 300 random pairs, symbol order and hold. |
| `tb_frame_builder` | 40 frames word by word, strobe period, start-of-frame flag. |
| `tb_serializer` | Exact bit positions of 200 words, and the 16-cycle word clock. |
| `tb_tmr_reg` | Load, hold, upsets of random bits in a random copy masked, flagged, and repaired. |

`tb/rs_ref_pkg.sv` holds the reference models. Its GF(32) arithmetic uses
exp/log tables, its encoder is the symbol-serial LFSR, and it also has a
syndrome calculator, a two-error decoder (the receiver model) and bit-serial
scrambler and descrambler models. None of
it shares code with the RTL.

## Changing the design

* **Field, generator or header.** Edit `PRIM_POLY`, `FCR` or `HEADER` in
  `rtl/rs_tx_pkg.sv`. The encoder equations follow automatically. The
  reference package in `tb/` has the field polynomial and roots written out,
  so change it as well.
* **Other code lengths.** `rs_parity_masks()` is written in terms of `RS_N`,
  `RS_K` and `SYM_W`, so other short RS codes need only the package constants.
  The frame sizes follow from them: `WORDS_PER_FRAME = FRAME_W / WORD_W` must
  stay an integer.
* **Scrambler.** `TAP_A` and `TAP_B` are parameters of `scrambler`.
