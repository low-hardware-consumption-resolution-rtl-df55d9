# Gray code oscillator TDC with virtual-bin calibration

This design is a 16-channel time-to-digital converter (TDC). It uses almost no
FPGA carry logic. The usual FPGA TDC sends the STOP signal down a long carry
chain and samples the chain. Here each channel uses a tiny ring-like oscillator
built from five LUTs. It counts in 5-bit Gray code and starts at the STOP edge.
At the next clock edge it is sampled by eight groups of flip-flops that see
the oscillator with eight different routing delays. The sum of the eight
decoded samples is a fine code with roughly 8x finer steps than one
oscillator state.

Those steps are very uneven, because the oscillator and routing delays are
uneven. A shared calibration core fixes this automatically. It measures every
channel with random hits and then builds a mapping table for each channel.
The table turns the channel's uneven raw bins into `n_vir` equal *virtual
bins* per clock period. `n_vir` is a run-time input, so the resolution is set
by writing a number and starting a calibration. No rebuild and no manual
tables are needed.

The RTL is SystemVerilog (IEEE 1800-2017). The parts that are really
placement and delay (oscillator, input pulse, routing) are behavioural
models. Everything from the sampling flip-flops onward is synthesizable.

## 1. Measuring one hit

```
STOP -> input shaper --EN--> GCO (5 LUTs) --g[4:0]--> switch-matrix routing
                                                      | group 0 .. group 7
                                         8 x 5 DFFs on the sampling clock
                                                      |
                          8 x gray->binary, sum  ->  fine code (0..248)
coarse counter (clock periods since START) ------->  coarse code N_c
```

* **Input shaper** (`input_shaper`). This is a flip-flop with an asynchronous
  set. A short pulse made from the rising STOP edge sets EN. The next clock
  edge clears it, because D is tied to 0. So EN is high from the STOP edge to
  the next sampling edge. The pulse width (`PULSE_PS`, 60 ps) is a model
  value.
* **GCO** (`gco`). While EN is high, the 5-bit code steps through the
  reflected Gray sequence 0, 1, 3, 2, 6, ... with about 158 ps per step. When
  EN falls the code returns to 0. Only one bit changes per step, so a sample
  taken during a transition is off by at most one state. The model gives each
  state its own delay (158 ps ± `SPREAD_PS`/2, from a seeded pattern) to mimic
  real uneven bins. At 226 MHz (4425 ps) about 28 of the 32 states are used,
  so the code never wraps inside one period.
* **Switch-matrix routing** (`sm_route`). Group *k* sees the code delayed by
  about *k*·20 ps. 20 ps is one oscillator step divided by the 8 groups,
  plus a small fixed skew per group (`SKEW_PS`). On the FPGA this is routing
  through switch matrices. In simulation it is a transport delay.
* **Sampling matrix** (`sampling_matrix`). This is 8 × 5 flip-flops on the
  sampling clock.
* **Fine encoder** (`fine_encoder`). It converts each group's Gray code to
  binary and adds the eight values: fine = Σ gray2bin(q_k). Because the groups
  are staggered by 1/8 of a step, the sum changes about eight times per
  oscillator step. It is registered
  twice, so it has 2 clocks of latency. A value of 0 means no STOP was seen in
  that period.
* **Coarse counter** (`coarse_counter`). It is cleared by the synchronous
  START and counts clock periods. The channel delays the count by three
  stages so that it lines up with the fine code of the same STOP.

A larger fine code means the oscillator ran longer, so STOP came earlier
before the sampling edge. With period *T* the measured interval is

    TI = (N_c + 1) · T − τ_fine ,

where τ_fine is the STOP-to-edge time. The fine code measures τ_fine through
the calibrated histogram bins described next. The raw channel outputs
`ts_valid`, `ts_coarse` and `ts_fine` three clocks after the sampling edge.

## 2. Virtual-bin calibration (VBCM)

This part is the least obvious, so it gets the most detail here.

### 2.1 Code density and cumulative counts

Hits that are random with respect to the clock land in each raw bin in
proportion to its width. After a *code density test* of Ñ hits,
`hit_raw[k]` is proportional to the width of raw bin *k*. The cumulative
count

    T_raw[k] = Σ_{j ≤ k} hit_raw[j]

is therefore a "timestamp" of the right edge of bin *k*, in units of hits.
An ideal set of `n_vir` equal bins would have edges at

    hit_vir = Ñ / n_vir ,      T_vir[m] = m · hit_vir ,   m = 1 .. n_vir .

### 2.2 The compare rule (address factors)

Each raw bin *k* is assigned up to three virtual bins: `Addr_l`, `Addr_m` and
`Addr_r`. The rule takes a start point `sp`, the highest virtual bin given to
raw bin *k−1* (1 for the first raw bin), and compares T_raw[k] with the next
virtual edges:

| condition               | Addr_l | Addr_m | Addr_r |
|-------------------------|--------|--------|--------|
| T_raw[k] ≤ T_vir[sp]    | sp     | –      | –      |
| T_raw[k] ≤ T_vir[sp+1]  | sp     | sp+1   | –      |
| T_raw[k] ≤ T_vir[sp+2]  | sp     | sp+1   | sp+2   |
| otherwise               | sp+1   | sp+2   | sp+3   |

A raw bin that straddles a virtual edge is therefore split over two or three
virtual bins. A raw bin wider than the room its three addresses give is
finished by the next raw bin.

**Example.** Take Ñ = 1000 hits and n_vir = 10, so hit_vir = 100. Raw bins
hold 60, 70, 30 and 150 hits, giving T_raw = 60, 130, 160 and 310.

* k=1: sp=1 and 60 ≤ 100, so Addr_l = 1.
* k=2: sp=1 and 130 ≤ T_vir[2] = 200, so Addr_l = 1 and Addr_m = 2.
* k=3: sp=2 and 160 ≤ 200, so Addr_l = 2.
* k=4: sp=2 and 310 ≤ T_vir[4] = 400, so Addr_l = 2, Addr_m = 3 and
  Addr_r = 4.

### 2.3 Compensated test and width factors

Sending each hit of raw bin *k* with weight 1 to each of its addresses
over-counts the split bins. A second code density test is therefore run
through the address mapping alone (every weight 1). Virtual bin *i* then
collects `hit_com[i]` hits. The width factor of a pair is

    Coe[k] = (Ñ / n_vir) / hit_com[Addr]

It scales each virtual bin's total to exactly Ñ/n_vir in a third test. From
then on every hit adds `Coe_l` to bin `Addr_l`, `Coe_m` to `Addr_m` and
`Coe_r` to `Addr_r`. The histogram is then a uniform-bin histogram with
`n_vir` bins per period: the raw non-linearity is largely removed and the
resolution is *T*/`n_vir`.

### 2.4 Fixed point

Factors are integers scaled by 2^MBAR with MBAR = 5, so a factor of 32 is
one hit:

    Coe = (Ñ · 2^5) / (n_vir · hit_com)      (integer division, truncated)

Histogram bins therefore count in 1/32 hit. hit_vir and T_vir are kept in
the same unit: hit_vir = (Ñ·32)/n_vir. T_raw is the cumulative sum of
histogram words, which are already in 1/32 hit. hit_com is the histogram word
shifted right by 5. `Coe = 0` marks an unused pair.

### 2.5 Limits of the rule as stated

* **Virtual bin 1.** If raw bin 1 alone reaches past T_vir[3], the
  "otherwise" row gives it bins 2, 3 and 4, and virtual bin 1 never receives
  a raw bin. This happens with very narrow virtual bins (high `n_vir`)
  against a wide first raw bin.
* **The tail.** The last one to three virtual bins can stay empty if the
  last raw bins end before T_vir[n_vir] after rounding.
* **Truncation.** It biases every Coe downward by less than one unit, which is
  1/32 of a hit weight.

The end-to-end test shows all virtual bins 1..n_vir within ±0.5 LSB for
n_vir = 55. The unit test of the compare rule checks coverage of bins
1..n_vir−3 over random raw histograms.

## 3. Histogram path of a channel

Each channel has two memories and a pipeline register between them.

* **C&C BRAM** (`cc_bram`). It has 256 words, indexed by fine code, and a
  synchronous read. The 72-bit word is the packed struct `cc_word_t`:

  | bits  | 71:64  | 63:56  | 55:48  | 47:32 | 31:16 | 15:0  |
  |-------|--------|--------|--------|-------|-------|-------|
  | field | Addr_l | Addr_m | Addr_r | Coe_l | Coe_m | Coe_r |

* **Factor pipeline** (`factor_pipeline`). It loads one word and sends the
  (Addr_l, Coe_l), (Addr_m, Coe_m) and (Addr_r, Coe_r) pairs on three
  consecutive clocks to the single update port of the histogram. It skips
  pairs with Coe = 0.
* **Histogram BRAM** (`hist_bram`). It has 256 × 32-bit bins. Each update is
  a two-stage read-modify-write (`bin += Coe`), with forwarding when
  consecutive updates hit the same bin. A second port, used by the
  calibration core and by the host, reads with one clock of latency and
  writes, for example to clear.

**Dead time.** A channel accepts at most one hit every three clocks. A hit
that arrives while the pipeline register still holds pairs to send is not
histogrammed, and the channel pulses `hit_drop`. Its timestamp is still
output. The source material does not discuss this case; dropping and
flagging is this design's choice.

Timing from the sampling edge E:

* the fine code is valid after E+3;
* the C&C BRAM is read at E+4;
* the histogram updates happen at E+5 to E+7.

## 4. The calibration core

`cc_core` serves all channels. It calibrates them one after another.
`gco_tdc_top` routes the random hit input to the selected channel through
`input_selector`. For each channel the core runs these steps:

1. **Initialise.** Write identity factors: Addr_l = fine code and Coe_l = 32,
   with the other pairs unused. The histogram is then the raw histogram.
2. **Raw test.** Clear the histogram. The channel takes exactly Ñ hits
   (`n_cdt`), counts them itself and raises `cdt_done`. Counting in the
   channel makes Ñ exact even though hits are random.
3. **Compensation factor calculation (CFC).**
   * Read the histogram and accumulate T_raw into BRAM-1.
   * Compute hit_vir with the divider.
   * Accumulate T_vir into BRAM-2's lower half.
   * For k = 1..255, read T_raw[k], T_vir[sp], T_vir[sp+1] and
     T_vir[sp+2], apply the compare rule (`vbcm_compare`), and write the
     addresses with Coe = 32 into the C&C BRAM. The same addresses also go to
     BRAM-2's upper half.
4. **Compensated test.** Clear the histogram, take Ñ more hits, and copy
   hit_com into BRAM-1, over T_raw.
5. **Width factor calculation (WCFC).** For every used pair of every raw bin,
   compute Coe = (Ñ·32)/(n_vir·hit_com[Addr]) and write the final word.

BRAM-1 and BRAM-2 are 512 × 32. There is one multiplier and one 40-bit
bit-serial restoring divider (`seq_divider`, 41 clocks per quotient). The
divider is shared by hit_vir and all the width factors.

The arithmetic per channel is a few thousand clocks plus about 50 clocks per
used address pair. The two code density tests are set by Ñ and the hit rate.
In the full-size test (Ñ = 8000 hits per test) 16 channels took about
1.4 M clocks.

During calibration the channels do not histogram ordinary hits (`meas_en`
is low).

## 5. Top level and how to use it

`gco_tdc_top` has the parameters NCH = 16, NG = 8 and NW = 24. Its ports:

| port | meaning |
|------|---------|
| `clk`, `rst_n` | sampling/system clock, asynchronous active-low reset |
| `start` | synchronous START; clears all coarse counters |
| `stop_in[NCH]` | asynchronous STOP inputs |
| `cdt_hit` | random hit source for calibration (an external generator, not part of the RTL) |
| `cal_start`, `n_vir`, `n_cdt` | start a calibration with `n_vir` virtual bins per period and `n_cdt` hits per test |
| `cal_busy`, `cal_done` | core busy; one-clock pulse when all channels are done |
| `ts_valid`, `ts_coarse`, `ts_fine`, `hit_drop` | per-channel timestamps and dead-time flag |
| `host_en`, `host_ch`, `host_we`, `host_addr`, `host_wdata`, `host_rdata` | host access to any channel's histogram while `cal_busy` is low; data one clock after the address |

To use it:

1. Apply reset.
2. Drive random hits on `cdt_hit`.
3. Set `n_vir` (1..255, up to the number of raw bins, about 228 at
   226 MHz) and `n_cdt`.
4. Pulse `cal_start` and wait for `cal_done`.
5. Clear the histograms through the host port.
6. Measure. Histogram bin *i* (1..n_vir) holds the count, in 1/32 hit, for
   STOP-to-edge times in the *i*-th of `n_vir` equal slices of the period.

While the host port is in use (`host_en`) hits are not histogrammed, so that
its accesses never collide with updates.

`tdc_pkg` holds the shared constants:

* M = 8, MBAR = 5 and N_CH = 16;
* the widths: fine code 8, address 8, Coe 16, histogram 32 and coarse 16;
* `cc_word_t`, `bin2gray` and `gray2bin`.

## 6. Simulating

Every block has a self-checking testbench in `tb/<block>_tb.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tdc_pkg.sv \
    tb/gco_tdc_top_tb.sv --top-module gco_tdc_top_tb -o sim
./obj_dir/sim
```

Replace `gco_tdc_top_tb` with any other testbench name. The behavioural
models need `--timing`.

| testbench | what it checks |
|---|---|
| `gco_tb`, `input_shaper_tb`, `sm_route_tb` | state sequence and step timing, EN window, per-group delays |
| `sampling_matrix_tb`, `fine_encoder_tb`, `coarse_counter_tb` | register behaviour, Gray decode and sum, 2-clock latency |
| `cc_bram_tb`, `hist_bram_tb`, `factor_pipeline_tb` | memories, forwarding on back-to-back updates, three-slot timing, busy |
| `seq_divider_tb` | random quotients against `/`, 41-clock latency, divide by zero |
| `vbcm_compare_tb` | the four rows of the rule, and full mappings over random histograms |
| `cc_core_tb` | 2 channels, synthetic raw histograms; replays the core's own factors against Eq. (3)–(7) computed in the testbench |
| `tdc_channel_tb` | STOPs at known times → fine code against M·τ_fine/158 ps, coarse alignment, dead time |
| `gco_tdc_top_tb` | full size, default parameters |
| `resolution_sweep_tb` | two-channel top recalibrated to n_vir = 211, 148, 111, 88 and 55 (21–80 ps bins at 226 MHz); DNL of every virtual bin within ±0.5 LSB |

`gco_tdc_top_tb` runs the top at its default parameters:

* it calibrates all 16 channels with n_vir = 55 and Ñ = 8000;
* it then measures about 8000 random STOPs per channel and reads all
  4096 histogram bins through the host port;
* it requires every virtual bin within ±0.5 LSB of uniform, and measured
  ±0.3;
* it counts every mechanism: calibrations, ends of code density tests,
  raw bins split over several virtual bins, dropped hits, START pulses and
  host reads. One that never happened is a failure.

It runs in about 2–3 minutes.

## 7. Where this departs from the source design

These points follow the published design:

* the channel structure: shaper, GCO, M = 8 switch-matrix-delayed sampling
  groups, Gray-to-binary sum, C&C BRAM, a three-slot pipeline register and a
  histogram BRAM with an adder;
* 16 channels sharing one calibration core;
* the steps of the calibration and its equations;
* the compare rule;
* MBAR = 5;
* the three-address/three-factor word.

These are this design's own choices:

* **Behavioural front end.** The GCO's LUT equations, the shaper's pulse and
  the switch-matrix delays exist only as placement on a real FPGA. They are
  modelled with delays here: 158 ps steps with spread, 20 ps group spacing
  with skew. They are not synthesizable, and nothing here pins LUTs or routes.
* **Serial calibration** of channels, exact-Ñ tests counted in the channel,
  identity start factors, the memory layout of the core, a single shared
  divider, and all handshakes and port names.
* **Dead time.** Hits closer than three clocks are dropped and flagged.
* **Timestamps.** The raw (coarse, fine) pair is output for every hit. The
  calibrated result exists only as histograms: there is no per-hit
  calibrated timestamp, and the source does not describe one.
* **One front-end model.** The oscillator and routing models are set for
  the 226 MHz, 158 ps-step case. The 156 MHz families, which have about
  260 ps steps, would need other `STEP_PS` and `TAU_PS` values in
  `tdc_channel`. The top does not pass those through.
* **Compare-rule edge cases** (section 2.5) are kept as stated, not patched.
* **Timing closure.** The sizes fit all three target families (up to 248 raw
  bins and n_vir ≤ 255; the published raw-bin counts are about 228, 181 and
  197). Timing closure at 156–226 MHz was not checked, because no FPGA tools
  are involved here.
