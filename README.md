# Chirp spread spectrum link for power lines (LoRa-Mod / LoRa-Mod-Enhanced)

Medium-voltage and low-voltage power lines are hostile channels: echoes that
last hundreds of microseconds, deep frequency notches, transformer losses of
tens of dB and strict limits on transmit power. This design sends data over
such a line with LoRa-style chirps and changes only the receiver's decision
rule, in two steps:

* **LoRa-Mod.** A LoRa receiver dechirps a symbol and looks for the single
  strongest of 2^SF FFT bins. Multipath turns that single peak into a cluster
  of peaks, one per echo, each at a lower bin (a delayed chirp dechirps to a
  lower frequency). Here the 2^SF bins are grouped into G *superbins* of P
  adjacent bins, the power of each superbin is summed, and the decision is the
  strongest superbin. Only G = 2^SF / P symbols are used, so each carries
  SF - log2(P) bits, but all echoes that fall inside a superbin now add to the
  wanted symbol instead of competing with it.
* **LoRa-Mod-Enhanced.** The transmitter repeats each data symbol Q times. The
  receiver keeps, for every superbin, a running sum of its power over the last
  Q symbols and decides on that. Noise averages out while the symbol's energy
  accumulates, so the link keeps working far below the SNR at which a single
  symbol can be decided, at the cost of a Q times lower data rate.

The RTL holds a complete transmitter (symbol mapper, chirp table, address
counter, NCO and quadrature mixer to a DAC code) and a complete receiver
(test channel and noise injection, downconversion, decimation, dechirping,
FFT, superbin sums, running sums, both decisions, and a UART report of all
superbin statistics), plus a top level that holds one of each.

## Numbers at a glance

| quantity | value | where it comes from |
|---|---|---|
| spreading factor SF, chips per symbol N | 10, 1,024 | paper's prototype |
| oversampling of the TX chirp table U | 32 (32,768-entry table) | paper's prototype |
| sample rate (ADC and table), chip rate | 1.6 MHz, 50 kHz | paper's prototype |
| decimation in the receiver R | 32 | paper's prototype |
| superbin size P, number of symbols G | 64, 16 (4 bits per symbol) | P assumed, see below |
| running-sum length Q | 64 | paper's prototype |
| datapath width DW | 16 bits (complex: 2 x 16) | own choice |
| ADC width, DAC width | 14 bits, 14 bits | ADC from paper, DAC own choice |
| NCO | 32-bit phase, 1,024-entry sine table | own choice |
| system clock, UART | 50 MHz, 115,200 baud 8N1 | clock assumed, baud rate from paper |

All sizes are parameters in `rtl/css_pkg.sv` and in the module headers; the
top level uses the package values.

## The chirp, and why its sampling instants are offset

The base chirp is stored as

    c(x) = A * exp(j*pi*x*(x - N)/N),   x = time in chips, 0 <= x < N

Its frequency sweeps linearly from -B/2 to +B/2 (B = chip rate = 50 kHz)
once per symbol, so after mixing it occupies fc +- 25 kHz. Symbol k is the
same chirp started k chips late, cyclically: the transmitter simply reads the
table from address k*U onwards and wraps around. Multiplying by the conjugate
chirp leaves exp(j*2*pi*k*n/N) (times a constant), a tone in FFT bin k.

Symbol g (0..G-1) is sent as chirp shift k = g*P + P - 1: the *top* bin of
superbin g. An echo delayed by d chips dechirps to bin k - d, so every echo
shorter than P chips stays inside the superbin. This is why the superbin must
be at least as long as the channel's delay spread.

The receiver's decimator averages 32 table samples per chip. Its output
therefore describes the middle of the averaging window, not the start of the
chip. With the symmetric chirp above, a cyclic shift by a *fractional* number
of chips is not a clean shift: at the wrap point the phase jumps by 2*pi times
the fraction, which spreads the dechirped tone over its neighbours, and for a
symbol at the top of its superbin about a third of the energy then lands in
the next superbin. The transmitter table is therefore sampled at
x = (m - (U-1)/2) / U (parameters `OFS_NUM = 1 - U`, `OFS_DEN = 2` of
`chirp_rom`), which places the centre of every decimation window exactly on an
integer chip time; the receiver's reference chirp is then sampled at integer
chips. With this, about 98 % of a clean symbol's energy stays in its superbin.

The table contents are computed when the design is elaborated. The phase
x*(x - N)/N is evaluated as an integer modulo 2*N*U^2 (times the square of the
offset denominator) before the cosine is taken, so a 32,768-entry table loses
no precision.

## Transmitter (`css_tx`)

Everything runs on one sample enable `ce` (1.6 MHz in the prototype; the TX
table is played one entry per enable, which is what makes the chip rate
50 kHz).

1. `choose_symbol` takes a data word every Q symbols (a repetition counter),
   turns it into the shift (g*P + P - 1)*U and reports the symbol on air
   (`cur_sym`) and a pulse when a new word was taken (`new_word`).
2. `address_counter` (15 bits) counts table samples and adds the shift. The
   shift is latched only at a symbol boundary, so a symbol never changes
   part-way. `restart` starts a symbol at once.
3. Two `chirp_rom` instances hold the real and imaginary table.
4. `nco` produces cos and -sin of the carrier phase; its phase is cleared by
   `restart` so that the transmitted waveform is reproducible.
5. `tx_upconverter` forms ch_re*cos(wt) - ch_im*sin(wt) = Re{c * exp(+j*w*t)},
   the chirp moved up to fc, and outputs it as a 14-bit offset-binary DAC
   code.

Latency: with `ce` high on every clock, the DAC code after clock edge e
(counting the edge that samples `restart` as 0) is table sample e - 3.
The carrier is set by `fcw` = fc / fs * 2^32.

## Receiver (`css_rx`)

### Front end (1.6 MHz)

* The 14-bit ADC sample (two's complement) is extended to 16 bits.
* `channel_emulator` is a test aid: a 4-tap FIR with taps 4 chips
  (128 samples) apart and run-time Q1.14 gains, to imitate a multipath line
  on a bench. `chan_en` selects it.
* `awgn_gen` is a test aid that adds noise of programmable level
  (`noise_level`, Q8.8; sigma = 1.155 * level LSB). It sums the 16 bytes of four
  steps of a combined Tausworthe generator ("taus88"), which gives an almost
  Gaussian value within +-6.9 sigma. `awgn_en` selects it.
* `nco` and `complex_multiplier` mix the real sample down by fc.
* Two `fir_decimator`s (I and Q) average 32 samples and keep one: a boxcar
  filter whose nulls at multiples of 50 kHz also remove the 2*fc mixing image
  when fc is a multiple of 25 kHz.

### Symbol timing

`sync` marks the start of a received symbol. It restarts the decimators, the
10-bit chip address counter and the FFT's input, so that the next decimated
sample is chip 0. With `ce` on every clock, `sync` must be high on the clock
after the one that presents the symbol's first sample on `adc` (the sample is
registered twice before it reaches the decimators). Because a superbin
tolerates a few chips of offset, sync only has to be roughly right, and early
rather than late: late sync moves the tone up, towards the next superbin. No
synchronisation circuit is included; a zero-crossing detector on the mains
waveform is one source of such a pulse.

### Dechirp and FFT (50 kHz)

The decimated sample is multiplied by the 1,024-point conjugate chirp (a
second pair of `chirp_rom`s, addressed by the chip counter) and fed to `fft`.

`fft` is an in-place radix-2 decimation-in-time transform with one butterfly
per clock. Samples are written in bit-reversed order into one of two banks;
when a symbol is complete the banks swap, the engine runs 10 stages of 512
butterflies on the full bank while the next symbol fills the other, and then
streams bins 0..1023 out one per clock. Every butterfly halves its outputs
(rounded to nearest), so the result is the DFT divided by N and fits in 16
bits. Throughput budget: a symbol needs N/2*log2(N) + N + 2 = 6,146 clocks,
against 32,768 sample enables per symbol; if symbols come faster, `overrun`
is raised and the symbol is dropped.

### Superbins, running sums and decisions

* `mag_sq` forms re^2 + im^2 of each bin.
* `superbin_sum` adds the P powers of each superbin as they stream past
  (one accumulator serves all superbins because the bins arrive in order)
  and emits S(0), ..., S(G-1) on `s_*`.
* `find_max` on S gives the LoRa-Mod decision `mod_sym`.
* One `moving_sum` per superbin keeps H(g) = sum of S(g) over the last Q
  symbols, recursively: H <= H + S_new - S_(new-Q), with a Q-deep shift
  register supplying S_(new-Q). H is not divided by Q (the argmax is the
  same). The registers start at zero, so for the first Q - 1 symbols H is a
  partial sum.
* `find_max` on H gives the LoRa-Mod-Enhanced decision `enh_sym`.
  Ties go to the lower index.

Both decisions pulse about 6,200 clocks after a symbol's last chip.

### Report over UART

`report_framer` captures the G values of S and the G values of H of each
symbol and sends a frame of 2 + 2G*6 = 194 bytes through `uart_tx`: the
header bytes A5 5A, then S(0..15) and H(0..15), each as 6 bytes, most
significant byte first. A frame takes 16.8 ms at 115,200 baud, shorter than a
20.5 ms symbol at a 1.6 MHz sample rate. If a new symbol's statistics arrive
while a frame is still being sent, they are not sent and `report_dropped`
pulses for one clock.

## Top level (`css_plc_link`)

One transmitter and one receiver sharing clock, reset and sample enable. The
analog path between them (DAC, power amplifier, coupler, line, coupler, ADC)
is outside: the transmitter's `dac` code is an output and the receiver's
`adc` sample an input. Other ports: `tx_restart`, `tx_fcw`, `tx_data`,
`tx_new_word`, `tx_sym`, `tx_sym_start`; `rx_sync`, `rx_fcw`, the test aids
(`chan_en`, `taps[4]`, `awgn_en`, `noise_level`); the S and H streams
(`s_*`, `h_*`), the decisions (`mod_*`, `enh_*`), `fft_overrun`,
`report_dropped` and `uart_txd`.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with an
independent model written in the testbench (closed-form chirp and carrier,
a floating-point DFT, a taus88 model, a UART receiver, and so on) and ends
with a `TB_RESULT checks=... failures=...` line. The FFT test also checks the
latency and the overrun flag. `tb_css_tx` and `tb_css_rx` run the transmitter
and receiver at reduced sizes (SF = 6 and 8) against closed-form waveforms.

`tb_css_plc_link` runs the whole link at the default sizes, the transmitter's
DAC looped back to the receiver's ADC through an attenuator, for 136 symbols
(about 4.5 million clocks, roughly 20 s of run time with Verilator):

* 64 symbols of one value over a 4-tap multipath channel without noise: every
  LoRa-Mod decision must be right;
* 72 symbols of the next value, attenuated by 2^8 with noise added for an
  in-band SNR of about -19 dB: here LoRa-Mod decides only about a third of the
  symbols correctly, while every LoRa-Mod-Enhanced decision taken once the
  64-symbol window holds only the new symbol is right. The symbol's superbin
  stands only about 10 % above the mean of the other superbins in S, but
  13-30 % above it in H, where the other superbins' values vary by only a few
  per cent.

It also decodes the UART line and requires that every mechanism occurred at
least once (multipath, noise, new data word, decision change, full window,
report frame, dropped report).

To run a test with Verilator 5:

    verilator --binary --timing -Wno-fatal --top-module tb_css_plc_link \
        -y rtl -y tb +libext+.sv rtl/css_pkg.sv tb/tb_css_plc_link.sv
    ./obj_dir/Vtb_css_plc_link

## Where this design departs from the paper's description

* **Chirp formula.** The paper's symbol equation, read literally, places
  symbol k at bin 2k and sweeps 0..B. The table here sweeps -B/2..+B/2 and
  places symbol k at bin k, and its sampling instants are offset by
  -(U-1)/(2U) chip (see above).
* **TX table size.** The text gives 32,708 points and the block diagram
  32,768; 32,768 (= 32 x 1,024, a 15-bit counter) is used.
* **Bin power.** The block diagram shows sqrt(re^2 + im^2), the equations
  |y|^2; |y|^2 is used.
* **Noise injection.** The block diagram shows a multiplier at the noise
  input, the text says the noise is added; it is added.
* **Noise quality.** The paper's noise core spans +-9.1 sigma with a period of
  2^176; this generator spans +-6.9 sigma with a period near 2^88.
* **Reporting.** In the prototype a soft processor sends S and H over the
  UART; here a fixed frame builder does it.
* **Decisions in hardware.** The prototype leaves the maximum search to the
  host; both "find max" steps are built here, as in the paper's receiver
  diagram.
* **Unspecified internals**, chosen here: the superbin size P = 64, the
  decimation filter (boxcar), the FFT architecture and its scaling, all
  widths and number formats, tap gain format, reset behaviour, the symbol
  placement at the top of its superbin, and a single shared clock and sample
  enable for transmitter and receiver. The paper's DAC runs at 125 MS/s; here
  the DAC code changes once per 1.6 MHz sample enable.
* **Not included:** the analog parts, the converters, the transducer ADC on
  the transmitter side (its value enters as `tx_data`), the processor, and
  symbol synchronisation (`rx_sync` is an input).

## Sizes the design does not cover at its defaults

The paper's network simulations use SF = 13 with a 25 kHz bandwidth and
Q = 1, 10 and 100, and its statistical studies SF = 12 and 14 and Q up to
500. The receiver and transmitter take SF, decimation, P and Q as parameters
(`css_rx`, `css_tx`), but only SF = 10, Q = 64 (full size) and the small test
sizes have been simulated.
