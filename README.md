# Maximum-likelihood NPSS detector for NB-IoT timing acquisition

An NB-IoT device that wakes up has lost its timing and frequency lock. To
find it again it must detect the Narrowband Primary Synchronization Sequence
(NPSS). The base station sends this known sequence once in every 10 ms
sub-frame. While the device searches, its RF receiver stays on, and the
receiver uses far more power than the baseband. A detector that decides
faster therefore saves energy, even if it does much more arithmetic.

This RTL implements such a detector. It uses maximum-likelihood
cross-correlation: the received signal is correlated with the known NPSS
for every timing offset and for 31 frequency-offset hypotheses. The
correlations are computed in the frequency domain with the overlap-save
method. Results from several sub-frames are combined non-coherently. After
each sub-frame a peak detector decides whether the NPSS was found. If so, it
reports the timing offset and the frequency hypothesis.

The architecture follows a published design: a single-port 1,360-word FFT
buffer, a four-bank IFFT, a 37,200 x 9-bit correlation memory and a
four-largest peak detector. The publication gives the block diagram, the memory
sizes and the throughput rules. Several inner details are not given there.
This design chooses them itself: bank mapping, buffer layout, scaling,
decision rule and sequencing. Each choice is marked below.

## 1. The computation

The detector works on the received baseband `r[k]`, sampled at 240 kHz. One
sub-frame is 2,400 samples. The NPSS lasts 189 samples at this rate. It
consists of 11 OFDM symbols, each carrying a length-11 Zadoff-Chu sequence
multiplied by a ±1 code cover. For a timing hypothesis θ (0..2,399) and a
frequency hypothesis f, the metric is

    C(θ, f) = | Σ_{k=0}^{188} r[θ+k] · s*[k] · e^{-j2π f k / 240 kHz} |²

Computing this directly costs 2,400 × 31 correlations of length 189 per
sub-frame. Instead:

* **Overlap-save.** The input is cut into blocks of N = 1,024 samples. Each
  block starts 836 samples after the previous one, so consecutive blocks
  overlap by N_O = 188 samples. The circular cross-correlation
  `IFFT(R[m] · S*[m])` of a block is correct for lags 0..835, which is
  exactly the step. Every lag of the stream is therefore computed exactly
  once.
* **Frequency hypotheses are cyclic shifts.** A frequency offset of d FFT
  bins moves the block spectrum R by d bins. The detector therefore reads the
  stored reference spectrum S* at `(m − d) mod 1,024` instead of
  frequency-shifting the signal. One FFT bin is 234.4 Hz. The correlation
  peak is wide enough that only every 4th bin is needed, so hypothesis h
  (0..30) uses d = 4·(h − 15). The hypotheses lie at −14.06 … +14.06 kHz in steps of 937.5 Hz, so together they cover about ±14.5 kHz.
* **Non-coherent combining.** `|C|²` is decimated by two in time, giving
  1,200 bins per sub-frame. It is then added, across sub-frames, into a
  memory of 31 × 1,200 words.

Per block this takes one 1,024-point FFT, 31 point-wise products and 31
1,024-point IFFTs. At 240 kHz that is 287 FFTs/s and 890 IFFTs/s.

## 2. Data path

```
 r[k] ─► fft1024 ──────────► spectrum_buffer ──► × ──► ifft1024_4bank ──► mag_decim ──► corr_accum ──► peak_detect ─► hit, f_o_hat, t_o_hat
         (ring RAM 1,360x44,   (2 x 1,024x44,    ▲    (4 x RAM 256x54,    |c|², max of   (RAM 37,200x9,   (four largest)
          radix-2 / 4 clocks)   ping-pong)        │     radix-2 / clock)   lag pairs)      saturating +)
                                              pss_lut (S*, shifted address)
                  control_unit: start, ping-pong select, hypothesis, timing address, end-of-sub-frame
```

| module | role |
|---|---|
| `npss_detector` | top level, wiring as above |
| `fft1024` | overlap-save input ring and in-place 1,024-point FFT on one single-port RAM |
| `spectrum_buffer` | two 1,024 x 44 RAMs: the FFT fills one while the correlations read the other |
| `pss_lut` | ROM of S*[m] (`pss_lut.hex`) with the shift-related address conversion |
| `ifft1024_4bank` | product with S*, in-place IFFT at one butterfly per clock on four banks, lag read-out |
| `mag_decim` | squared magnitude, scaling to 9 bits, decimation by 2 |
| `corr_accum` | read-modify-write non-coherent combining into the 37,200-word RAM |
| `peak_detect` | running four-largest list and decision |
| `control_unit` | sequencing and address generation |
| `radix2`, `twiddle_rom`, `sp_ram`, `npss_pkg` | butterfly, twiddle table computed at elaboration, single-port RAM model, shared constants |

## 3. The FFT input ring (`fft1024`)

The FFT has one single-port RAM of 1,360 complex words. Three things must
live in it at once:

* the 1,024 words being transformed in place;
* the 188 overlap samples, which the next block needs but which the in-place
  transform destroys;
* the samples that keep arriving during the transform.

The RAM is used as a ring, and block b occupies the words `base .. base+1023`.
When the block is started:

```
 base            base+836     base+1024      base+1212          base+1360 = base
 |<-- block b (1,024) -------->|<- copy (188) ->|<- new samples (148) ->|
                  |<- overlap ->|  becomes head of block b+1
```

1. **Copy.** The last 188 samples of the block are copied to the 188 words
   after it. This takes 376 clocks: read, then write.
2. **Transform.** A radix-2 decimation-in-frequency FFT runs in place. Each
   butterfly takes four clocks (read a, read b, write a+b, write (a−b)·W),
   because the RAM has only one port.
3. **Read-out.** The result is read in bit-reversed order and written to the
   spectrum buffer in natural bin order.
4. `base` advances by 1,024. Block b+1 then already holds its 188 overlap
   samples plus whatever arrived in the meantime.

Input samples always win the RAM port. An arriving sample is written in its
own clock, and the FFT sequencer holds for that clock. The read register of
the RAM keeps its value over such a write, so a stalled butterfly does not
lose its operand. After the 1,024th sample of a block, new samples are written
behind the copy area (from `base+1212`). That leaves 148 words of slack.
A transform takes about 21,900 clocks; at 258 clocks per sample that is
about 85 samples. The `overflow` flag is set if the slack is ever exceeded.

## 4. The four-bank IFFT (`ifft1024_4bank`)

There are 31 IFFTs per block of 836 samples. At 62 MHz a block lasts 215,967
clocks, so each IFFT gets under 7,000 clocks. That means one butterfly per
clock, which needs two reads and two writes per clock. The memory is four
single-port banks of 256 x 54 bits.

**Bank mapping.** Word `a` (10 bits) is stored in bank `{a[0], ^a}` at row
`a[9:2]`. The mapping is one-to-one: given a[0], the parity and a[9:2],
a[1] is fixed.

* The two words of a butterfly differ in exactly one bit. Their parities
  therefore differ, so they are always in different banks.
* For spans 512..2, the two words of butterfly j have the same a[0], equal to
  j[0]. Consecutive butterflies alternate a[0], so butterfly j uses one pair
  of banks and butterfly j+1 the other pair.
* For span 1, the words are 2j and 2j+1, in banks `{0, ^j}` and `{1, ~^j}`.
  The butterflies are issued in Gray-code order. Consecutive j then differ in
  parity, and again use disjoint banks.

A butterfly's operands are read in clock t. Its results are written in clock
t+1, together with the reads of the next butterfly, so all four banks are
busy and none twice. One idle clock between stages resolves the
read-after-write dependency. An assertion checks for bank conflicts in every
clock.

**Loading merged with the first stage.** Spectrum bins are fetched in the
order 0, 512, 1, 513, … . Each is multiplied by its shifted reference
S*[(m − d) mod 1,024] and scaled by 2⁻⁶. The pair then goes straight through
the span-512 butterfly before both results are written. This saves a full
stage of 512 clocks.

Pass timing, measured: 1,025 (load) + 9 × 513 (stages) + 837 (read-out of
lags 0..835) = 6,483 clocks. 31 passes take 200,973 clocks, which is 93 % of
the block budget at 62 MHz.

## 5. Correlation memory and the timing address

For block b, lag l corresponds to the NPSS starting at stream sample
836·b + l. The control unit keeps `block_pos = 836·b mod 2,400`, so the
sub-frame position is `(block_pos + l) mod 2,400`. The timing bin is that
position divided by two. The correlation RAM address is
`hyp · 1,200 + bin`. Both lags of a pair (2i, 2i+1) fall into the same bin,
because 836 and 2,400 are even. `mag_decim` keeps the larger of their two
powers.

`corr_accum` reads the word, adds the new power with saturation at 511 and
writes it back in the next clock. The RAM is single-port, and a new value
arrives at most every second clock. During the first 2,400 lags of an
acquisition each bin is written for the first time, and the old contents are
ignored. The memory therefore needs no clearing pass.

## 6. Peak detection

A plain peak-to-average test would trigger on the side lobes of the
correlation over frequency. The detector instead looks at the four largest
combined values. `peak_detect` sees every value written to the correlation
RAM and keeps a sorted list of the four largest, with their addresses. A new
value for an address already in the list replaces that entry. Combined values
never decrease, so this list is always exactly the four largest values of
the whole RAM, without reading the RAM back.

A sub-frame is complete after the block that crosses the next multiple of
2,400 lags, normally every third block. At that point the control unit
strobes `eval`, and the decision is

    hit = top1 > 0  and  16 · top1 ≥ thresh · top4

with `f_o_hat = hyp(top1) − 15` and `t_o_hat = 2 · bin(top1)`. This ratio
test is this design's own rule. The original design analyses the four
largest values, but its exact test is not published. After a hit the
detector stops and holds the result until reset.

## 7. Number formats

| signal | format | origin |
|---|---|---|
| input r[k] | 12-bit signed I and Q | own choice |
| FFT words | 22 + 22 bit, no scaling (12 + 10 bits of growth) | 44-bit RAM words of the original |
| reference S* | 8 + 8 bit, largest component 127 | own choice |
| twiddles | 16 bit, Q1.14, rounded | own choice |
| product R·S* | 31 bit, shifted right by `PROD_SHIFT` = 6 | own choice |
| IFFT words | 27 + 27 bit, no scaling | 54-bit RAM words of the original |
| correlation power | 54 bit, shifted right by `mag_shift` (input), saturated to 9 bit | 9-bit RAM words of the original |

Adders wrap on overflow. The FFT is sized for unscaled growth. A full-scale
12-bit input that is coherent over the whole block could still overflow the
real or imaginary part, which is not expected for received noise-like
signals. `mag_shift` must be chosen for the input level. Combining saturates
at 511, so a run of many sub-frames needs a larger shift.

The reference ROM `rtl/pss_lut.hex` holds `conj(DFT_1024(s))`, scaled so that
the largest component is 127 and rounded. One word `RRII` (two's complement
bytes) per line, bin 0 first. Here `s[k] = s(8k)`, k = 0..188, and s(τ) is
the NPSS on the 1.92 MHz grid (τ in samples):

* symbol q = 0..10 carries `exp(−j5πn(n+1)/11) · c[q]` on subcarriers
  n = 0..10, at frequencies (n − 5.5)·15 kHz;
* code cover c = [1,1,1,1,−1,−1,1,1,1,−1,1];
* 128 samples per symbol, with cyclic prefixes of 9 samples (10 for q = 4).

The testbench package `npss_ref_pkg` computes the same s[k] independently.

## 8. Top-level interface (`npss_detector`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (starts an acquisition) |
| `in_valid`, `in_re`, `in_im` | in | 1, 12, 12 | one pulse per 240 kHz sample |
| `mag_shift` | in | 6 | power scaling before the 9-bit combining |
| `thresh` | in | 8 | decision ratio top1/top4 in 1/16 steps (32 = 2.0) |
| `res_valid` | out | 1 | one clock per sub-frame decision |
| `hit`, `f_o_hat`, `t_o_hat` | out | 1, 5 (signed), 12 | decision, frequency hypothesis −15..15 (×937.5 Hz), NPSS start sample in the sub-frame |
| `done` | out | 1 | a hit was found; the detector is halted |
| `busy`, `fft_wait`, `fft_overflow` | out | 1 | FFT or IFFT active; a block waits for a free spectrum half; input ring overrun (sticky) |

The real-time budget assumes about 258 clocks per input sample (62 MHz /
240 kHz). A slower clock is fine as long as 31 × 6,483 + a few clocks fit
into 836 sample periods.

## 9. Where this RTL departs from, or adds to, the original design

* **Taken from the original design:**
  * the block structure, N = 1,024, N_O = 188 and N_f = 31 with every 4th
    bin;
  * the memory sizes and word widths (1,360x44 single-port, 2 × 1,024x44,
    4 × 256x54, 37,200x9);
  * one radix-2 operation per 4 clocks in the FFT and one per clock in the
    IFFT;
  * the rule that consecutive IFFT butterflies use different banks;
  * decimation by 2 before combining, and peak detection over the four
    largest values.
* **This design's choices:**
  * the ring layout and the overlap copy;
  * arbitration in favour of input samples;
  * the bank mapping and Gray-code order;
  * merging the first IFFT stage into the load;
  * all scaling and the input and reference widths;
  * max-of-pair decimation and saturating combining;
  * the first-write rule instead of clearing;
  * the decision rule, and halting on a hit;
  * the sequencing in `control_unit`.
* **Not included:**
  * the fine frequency- and timing-offset estimation that follows coarse
    detection in the original design (its method is not published with it);
  * the RF front end and the decimation filter to 240 kHz (`r[k]` is an
    input).
* **A throughput figure that does not add up.** The original quotes 45.6
  million radix-2 operations per second for the IFFTs. 890 IFFTs/s × 5,120
  butterflies is 4.56 million. This RTL is dimensioned from the architecture,
  one butterfly per clock, and meets the real-time budget either way.

## 10. Verification

Each module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_radix2` | 2,000 random butterflies, bit-exact against a rounded floating-point model |
| `tb_fft1024` | two overlap-save blocks of random samples against a floating-point DFT (≤ 48 LSB), the overlap, and the exact cycle count |
| `tb_spectrum_buffer` | simultaneous write of one half and read of the other, both directions |
| `tb_pss_lut` | all 1,024 ROM words against an independently computed NPSS spectrum (≤ 1 LSB), and the cyclic shift for 3 hypotheses |
| `tb_ifft1024_4bank` | two passes against a floating-point IDFT (≤ 256 LSB on values up to 2²¹), lag order, 6,483-clock pass time, bank-conflict assertion |
| `tb_mag_decim` | power, shift, saturation, max of pair, tag |
| `tb_corr_accum` | 5,160 read-modify-writes on the full 37,200-word RAM, with saturation, against an array model |
| `tb_peak_detect` | list contents, argmax and decision against a full model, with a decision every 25 updates |
| `tb_control_unit` | hypothesis order, ping-pong order, timing addresses, sub-frame boundaries, `fft_wait`, halt after a hit |
| `tb_npss_detector` | whole detector at full size (see below) |

`tb_npss_detector` feeds noise at one sample per 258 clocks. From sample
3,000 on, an NPSS with a −2,812.5 Hz offset, starting at sample 1,234 of each
sub-frame, is added. The first decision, made on noise alone, must not hit.
The second must hit, with `f_o_hat = −3` and `t_o_hat` within 2 of 1,234
(it reports 1,234). The test also checks that the 31 correlations of a block
stay within the real-time budget. It counts the design's mechanisms (FFT
stalls by input writes, ping-pong swaps, first writes, combining writes,
decisions with and without hit) and fails if one never occurred. It runs in
a few seconds.

Running a testbench with Verilator (from the directory holding `rtl/` and
`tb/`, since the ROM file is read as `rtl/pss_lut.hex`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/npss_pkg.sv tb/npss_ref_pkg.sv tb/tb_npss_detector.sv --top-module tb_npss_detector -o sim
./obj_dir/sim
```

Replace `tb_npss_detector` with the name of any other testbench.

**Not verified:**

* detection statistics under fading at low SNR, i.e. the −12.6 dB TU1.2
  latency figures of the original work;
* synthesis timing at 62 MHz. The IFFT butterfly is a combinational path from
  bank output through a 27 x 16 multiplier to the bank input.
