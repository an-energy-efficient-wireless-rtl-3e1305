# Compressed-sensing encryption core for a wireless neural recorder

A battery-powered neural recorder has little energy for encrypting what it sends. This
core compresses the signal and enciphers it in one operation. Every N samples x of the
amplified neural signal become M numbers y = Φ x, with M < N. Φ is a pseudo-random
M × N matrix. A receiver that knows Φ can recover x by sparse reconstruction. A receiver
that does not know it cannot. So Φ is the cipher key. It is never transmitted. Both ends
regenerate it from a 256-bit shared secret K_S, which a microcontroller next to the chip
agrees with the receiver by elliptic-curve Diffie–Hellman. The compression ratio is
CR = N / M, from 2× to 16×.

The SystemVerilog here implements the digital part of that compressed-sensing chip:

- the sequencing of the analog front end;
- the multiplier-free matrix–vector product;
- the key-derived matrix generator with its shuffle and key update;
- the 16-bit accumulators;
- the serial output.

The programmable-gain amplifier (PGA) and the 10-bit SAR ADC are included as simple
behavioural models so that the whole chain can be simulated. The design follows the paper
"An Energy-efficient Wireless Neural Recording System with Compressed Sensing and
Encryption" (X. Liu, A. G. Richardson, J. Van der Spiegel). Where that paper gives only a
block's purpose, the choices made here are stated below. A receiver must copy those
choices exactly.

## The product Φ·x without a multiplier

Each matrix element is a 4-bit number from {0, ±1/8, ±2/8, …, ±7/8}. The common factor
1/8 is absorbed into the front-end amplifier gain, so the core only has to form
k · x_i for k in −7…7. It avoids a digital multiplier by sharing the work between the
analog front end and a few gates:

1. During the period of one input sample x_i, the PGA amplifies the signal by 4, 5, 6
   and 7 in turn. The ADC converts each result. By default the signal is also converted
   once with the PGA bypassed (gain 1). That gives up to five codes:
   x, 4x, 5x, 6x and 7x.
2. The codes are kept in the result registers (`result_reg`).
3. For every element the digital processor (`digital_processor`) selects one code,
   optionally halves it, and negates it for a negative element:

| \|k\| | code used | digital operation |
|---|---|---|
| 0 | none | result 0 |
| 1 | x (direct) | none; or 4x >> 2 when `x1_bypass` = 0 |
| 2 | 4x | >> 1 |
| 3 | 6x | >> 1 |
| 4 | 4x | none |
| 5 | 5x | none |
| 6 | 6x | none |
| 7 | 7x | none |
| negative k | as above | two's-complement negation |

The ADC codes are offset binary: code 512 is zero. Inverting the MSB turns a code into a
signed 10-bit value. The shift is arithmetic, so halving rounds towards −∞. The product
is 11 bits wide and counts in LSBs of the direct (x1) conversion. Because the x1 and
4x>>2 values differ by the ADC rounding, y depends on the `x1_bypass` mode. A receiver
must know which mode was used.

The accumulators (`accumulator_regs`) are M signed 16-bit registers. Row j adds
k_ij · x_i for i = 1…N. On the first input of a measurement the row is loaded instead of
added to. That clears the accumulators without a separate pass. A sum that would leave
the 16-bit range saturates, and `acr_sat` pulses for one cycle. The paper does not say
how overflow is handled; saturation is this implementation's choice.

## Where the matrix comes from

The matrix is never stored; at M = 128 and N = 2048 it would be 1 Mbit. `phi_gen`
regenerates it one element per clock, in the order the datapath uses it: column by
column, that is Φ_i,1 … Φ_i,M for input x_i. The paper asks for Gaussian-distributed
elements derived from K_S, with a pseudo-random shuffle and a synchronised key update. It
does not give the generator, so the following rules are this implementation's own:

- **Matrix set.** The 256-bit key is cut into eight 32-bit words w_0…w_7. Word w_k
  seeds matrix k.
- **Element stream.** This is a 32-bit xorshift generator:
  s ← s ^ (s << 13); s ← s ^ (s >> 17); s ← s ^ (s << 5).
  At the start of a measurement, s = xorshift(w_idx), with a zero word replaced by 1.
  The element is read from s, then s steps once per element.
- **Decoder** (`phi_decoder`). The element is (number of ones in s[13:0]) − 7. This is a
  binomial distribution over −7…+7: bell-shaped, mean 0, standard deviation about 1.87.
  It is stored as sign and magnitude.
- **Shuffle.** A second xorshift generator h picks the matrix for each measurement. When a
  new key takes effect, h is reset to the XOR of the eight key words (zero replaced by 1).
  h then steps once per measurement, and idx = h mod 8 picks the matrix. Consecutive
  measurements therefore use a pseudo-random sequence of the eight matrices. This hides
  the signal-energy feature that a fixed linear projection would leak.
- **Key update.** `key_load` stores a new key as *pending*. It takes effect at the start
  of the next measurement (`key_updated` pulses). So no measurement is computed with two
  keys, and the receiver can switch at the same frame boundary.

The reference model in `tb/tb_cs_ref_pkg.sv` (class `phi_ref`) is a plain software
statement of these rules. It is what a receiver has to run.

## One input period, one measurement

`cs_controller` runs everything from a sample tick every `SAMPLE_DIV` clocks. The default
is 8000, which gives 500 samples/s from a 4 MHz clock. For each tick it does:

| phase | clocks (defaults) | what happens |
|---|---|---|
| CONV | 5 × (CONV_CYCLES + 2) = 510; 408 without x1 | PGA and ADC powered up (`pga_pwr_en`, `adc_pwr_en`). Conversions at gain x1 (only when `x1_bypass`), then x4, x5, x6 and x7. Each code goes into its result register. |
| DP | M (64, 96 or 128) | Analog blocks powered down. One element per clock: product, then accumulate into row j = 0…M−1. |
| DONE | 1 (after the N-th input only) | `meas_done` pulses. The serializer captures y. The next tick starts a new measurement. |
| SLEEP | the rest of the 8000 | Nothing runs. |

At the defaults an input needs about 640 of the 8000 clocks, so the analog blocks are off
about 94 % of the time. M, N and `x1_bypass` are sampled when a measurement starts
(`m_sel`: 0 → 64, 1 → 96, 2 or 3 → 128; N up to 4095). Changing them mid-measurement has
no effect until the next one. A tick that comes while the previous input is still busy is
lost and reported on `sample_miss`. At the default timing this cannot happen.

The paper's timing diagram shows the same order per input: conversions at x4, x5, x6 and
x7, then the M accumulations, then sleep. It does not fix exactly where the processing
pass sits against the next input's conversions. Here the pass always follows the
conversions of its own input. That needs only one set of result registers, and the pass
is far shorter than the sample period.

## Serial output

`y_serializer` copies the M sums into a frame buffer at `meas_done`. The accumulators are
then free for the next measurement while the frame is sent. A frame is y_1 … y_M, each
16 bits in two's complement, most significant bit first. A bit is presented on `tx_data`
with `tx_valid` high. It is consumed on a clock edge where `tx_ready` is high.
`tx_sof` marks the first bit of a frame. If the transmitter has not taken a whole frame
when the next measurement ends, the new frame is dropped and `tx_overrun` pulses.

At compression ratio 8 and M = 128, a 2048-bit frame is produced every 2.048 s, about
1 kbit/s.

## Top-level interface (`cs_asic_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (up to 4 MHz); asynchronous active-low reset |
| `vin` | in | 16 signed | output of the amplifier and filters, in units of 1/16 ADC LSB |
| `cs_en` | in | 1 | run; when low, the sample timer stops and a partial measurement is discarded |
| `m_sel`, `n`, `x1_bypass` | in | 2, 12, 1 | M select, N, direct x1 conversion |
| `key`, `key_load` | in | 256, 1 | shared secret K_S and its load strobe (from the microcontroller) |
| `tx_ready`, `tx_data`, `tx_valid`, `tx_sof` | in/out | 1 | serial y to the radio transmitter |
| `pga_pwr_en`, `adc_pwr_en` | out | 1 | power gates of PGA and ADC |
| `meas_done`, `mat_idx` | out | 1, 3 | end of a measurement; matrix of the current measurement |
| `key_valid`, `key_pending`, `key_updated` | out | 1 | key state |
| `acr_sat`, `tx_overrun`, `sample_miss` | out | 1 | exception pulses |

Top parameters: `M_MAX` = 128, `N_W` = 12, `SAMPLE_DIV` = 8000, `CONV_CYCLES` = 100
(40 kS/s at 4 MHz), `NUM_MATRICES` = 8. After coarse synthesis the core, models included,
has about 4850 flip-flops. Most of them are the 128 × 16 accumulators and the 128 × 16
frame buffer.

## Files

| file | content |
|---|---|
| `rtl/cs_pkg.sv` | widths, element type `phi_t`, gain enum `gain_e`, result-register struct, xorshift step |
| `rtl/phi_decoder.sv` | random bits → element |
| `rtl/phi_gen.sv` | key-derived matrix stream, shuffle, key update |
| `rtl/result_reg.sv` | the five ADC codes of one input |
| `rtl/digital_processor.sv` | select / shift / negate product |
| `rtl/accumulator_regs.sv` | M saturating 16-bit sums |
| `rtl/y_serializer.sv` | frame buffer and bit-serial output |
| `rtl/cs_controller.sv` | sample timer, conversion sequence, power gating, N/M counting |
| `rtl/pga_model.sv`, `rtl/sar_adc_model.sv` | behavioural models of the analog blocks |
| `rtl/cs_asic_top.sv` | the core |
| `tb/tb_cs_ref_pkg.sv` | integer reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_cs_asic_full` |

## How far it can be trusted

Every module has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=F` and stops itself through a watchdog.

- The product, accumulator, decoder and result-register tests compare against integer
  arithmetic written separately from the RTL. The decoder test is exhaustive over all
  16384 inputs.
- `tb_cs_asic_top` runs six measurements through the whole core, with a shortened sample
  period. It compares every received frame bit-exactly with the reference model. It makes
  each mechanism happen and counts it:
  - all three M settings and both x1 modes;
  - a key loaded mid-measurement;
  - the matrix shuffle;
  - accumulator saturation and ADC clipping;
  - transmitter back-pressure and a frame overrun;
  - power-down between inputs.
- `tb_cs_asic_full` runs the core at its default sizes and timing: 4 MHz, 500 S/s,
  M = 128. It does two measurements at N = 1024 (CR 8×) and one at N = 512 (CR 4×), and
  checks the frames and the exact measurement period. This is about 21 million clocks,
  roughly 15 s in Verilator.

Each testbench is known to fail on a deliberately broken variant of its module. Examples: 3/8 taken from 4x instead of 6x; the x7 conversion skipped; bits
sent LSB first; the shuffle frozen.

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/cs_pkg.sv tb/tb_cs_ref_pkg.sv tb/tb_cs_asic_top.sv --top-module tb_cs_asic_top
./obj_dir/Vtb_cs_asic_top
```

## Departures from the paper and open points

- **Matrix generation, shuffle protocol, key-update timing.** These are this
  implementation's own, as described above. The paper gives the purpose, not the
  algorithm. A receiver built to the paper alone would not interoperate with this core.
- **Direct x1 conversion.** The paper says the ×1 sample is taken directly, bypassing the
  PGA, by default. Its timing diagram shows only the four PGA conversions. Both are
  supported (`x1_bypass`); the default is the direct conversion.
- **Conversion and processing in sequence.** The processing pass of an input always
  follows that input's conversions. Overlapping it with the next input's conversions, as
  the paper's timing diagram may show, would need a second set of result registers.
- **Programming.** M, N, the key and the mode are plain ports. The paper does not describe
  the register interface between chip and microcontroller. N is any value 1…4095; the
  2×–16× ratio range is not enforced.
- **Analog models.** The PGA and ADC models are ideal: exact gain, ideal quantiser, no
  noise, no settling. The 9.3-bit effective resolution of the real ADC is not modelled.
  The ADC is assumed to produce offset-binary codes.
- **Not included.** These are outside this RTL, and their signals are the top's ports:
  - the 16-channel instrumentation amplifiers and filters. The core processes one
    channel, as in the paper's measurements;
  - the radio transmitter;
  - regulators and references;
  - the Cortex-M0 microcontroller, its SRAM and its 2.4 GHz transceiver;
  - the Curve25519 key exchange. That is firmware on the microcontroller: a
    constant-time Montgomery ladder with Karatsuba multiplication.
