# Wave-union sub-TDL time-to-digital converter for CARRY8 delay lines

A time-to-digital converter (TDC) built from an FPGA carry chain measures
where a hit's edge has reached along a tapped delay line (TDL) when the
clock samples it. In 20 nm UltraScale devices the taps are so closely spaced
that their sampled thermometer code is full of bubbles, and some bins are
ultra-wide while others have almost no width. This design combines three
remedies. It still reaches a bin of about 1.2 ps with a single delay line.

* **Sub-TDLs.** The sampled line is split into interleaved sub-lines whose
  taps lie a whole CARRY8 cell apart. Each sub-line is a clean thermometer
  code. The fine code is the sum of their encoded positions, so bubbles
  between neighbouring taps never reach an encoder.
* **Wave union (WU-A).** A one-LUT launcher turns each hit into a short
  negative pulse. Both of its edges travel down the same line. Summing the
  rising-edge code and the falling-edge code doubles the number of bins and
  splits the wide ones.
* **Dual sampling (DS).** Both the carry outputs (C) and the sum outputs (S)
  of every CARRY8 element are registered. That gives 16 taps per cell
  instead of 8.

A calibration table then maps each raw code to an ideal bin (bin
compensation). For the main, *binned* configuration the table maps to a grid
of ideal bins merged in pairs. This halves the resolution to about 2.5 ps but
removes most of the non-linearity.

The RTL follows the architecture of Xie, Chen and Li, "Are wave union methods
still suitable for 20 nm FPGA-based high-resolution (< 2 ps) time-to-digital
converters?". It fills in the details that publication leaves open; they are
listed below.

## Signal path

```
 hit ─► wu_launcher ─► tdl_carry8 (60 x CARRY8, S+C taps, sampled on clk)
                           │ c_q[60][8], s_q[60][8]
                           ▼
              wu_fine_code ┌─ subtdl_encoder (rising)  ─┐
                           │    16 x (tm2oh → oh2bin) → Σ│─► + ─► raw fine code
                           └─ subtdl_encoder (falling) ─┘        + event strobe
                                                                  │
                 coarse_counter ◄─── event ───────────────────────┤
                        │                                         ▼
                        │                             bin_calibration (table)
                        ▼                                         │
                    ev_coarse ─────────── ev_* event port ◄────────┤
                                                                  ▼
                                                           histogram (BRAM)
```

| stage | module | cycles after the sampling edge |
|---|---|---|
| taps registered | `tdl_carry8` | 0 (the sampling edge) |
| TM2OH + OH2BIN per sub-line, registered | `subtdl_encoder` | 1 |
| sum of the sub-line codes | `subtdl_encoder` | 2 |
| rising + falling, event strobe | `wu_fine_code` | 3 |
| table read, then choice of BCF_m or BCF_c | `bin_calibration` | 5 (`ev_valid`) |
| counter read-modify-write | `histogram` | 7 |

The channel accepts one event per clock cycle. Physically a hit can appear at
most once every two or three cycles.

## The delay line and its taps

`tdl_carry8` stands for 60 cascaded CARRY8 cells (480 carry elements) and the
flip-flops that sample them. It is a behavioural model, because vendor
carry-chain timing has no portable RTL form. Element *j* of cell *k* has two
taps. `s_q[k][j]` is taken part-way through the element (the S output comes
before the carry multiplexer). `c_q[k][j]` is its carry output. Read in line
order, the taps run

```
S0 C0 S1 C1 ... S7 C7 | S0 C0 ... (next cell) ...
```

Every element gets a fixed pseudo-random delay: 5 ps mean, ±60 %. A falling
edge is 3 % slower than a rising one. The line spans about 2.4 ns, so at the
500 MHz clock of the testbenches it covers one period plus the pulse. These
numbers are the model's own; the architecture does not depend on them.

## Sub-TDLs: why summing sub-line codes is the same as reading the line

Sub-TDL *q* collects tap *q* of every cell. With DS the sub-lines are ordered
`S[0], C[0], S[1], C[1], ..., C[7]` (16 of them); without DS there are 8
(`C[0]..C[7]`). Bit *k* of each sub-line comes from cell *k*, so its
neighbours are 16 taps apart in the line. That is much further than the
distance over which taps swap their order, so each sub-line holds a clean
thermometer code.

Suppose an edge has passed the first *r* taps of the line. Sub-line *q* then
shows `ceil((r - q) / 16)` passed taps. Summed over the 16 sub-lines this
gives exactly *r*. So the sum of the 16 sub-line positions is the position of
the edge, whatever bubbles the full-resolution line had near it. Two
neighbouring taps that swap places sit in different sub-lines, and each of
those sub-lines still counts one passed tap. `tb_subtdl_encoder` checks this
with swapped taps at both edges.

`tm2oh` turns a sub-line into a one-hot position and `oh2bin` encodes it,
which is the two-stage encoder of the original design. With the line idle high
(the wave-union pulse is negative), a sub-line reads `1..1 0..0 1..1`:

* the **rising** (trailing) edge is at the first 0: one-hot where `1 → 0`;
* the **falling** (leading) edge is just after the last 0: one-hot where `0 → 1`.

The code is padded with a 1 at both ends. Zeros that reach the end of the
line therefore give position N for the falling edge. A sub-line with no zero
gives no hot bit, and so position 0.

## Two edges from one hit

`wu_launcher` is one LUT. The hit drives input B directly and input A through
a buffer; in the original that buffer is a CARRY8 placed just before the
line. The LUT implements the truth table (A,B) = 00→1, 01→0, 10→1, 11→1.
A rising hit pulls the output low until the buffered copy arrives, which makes
one negative pulse (120 ps in the model). Its falling edge leads down the
line and its rising edge follows. `wu_fine_code` runs one encoder per edge on
the same taps and adds the two codes. A hit sampled Δ after it arrived
therefore gives about `2·(Δ − t_rise)/LSB_DS + 2·(Δ − t_fall)/LSB_DS'`.
Because the two edges travel at different speeds, their bin boundaries do
not line up, and that is what splits the wide bins.

**Which sample is the event.** The line is longer than a clock period, so a
pulse can be seen in two consecutive samples. A sample *holds* a hit when the
first tap is high again (the trailing edge has entered) while some tap is
still low. The event is the first sample that holds a hit after one that did
not. This rule and its limits are choices of this design:

* the pulse must be wider than one sub-line step (8 elements) so that every
  sub-line sees a zero;
* the line must be longer than one clock period plus the pulse, so that both
  edges are inside it in the event sample;
* after reset the detector treats the line as already holding a hit, so a
  pulse already in flight is not reported.

Without wave union (`USE_WU = 0`) the hit enters the line directly and the
line idles low. The falling encoder is not built, and the same rule detects
the step while its edge is in the line. The hit must then stay high for more
than a clock period.

## Calibration: bin compensation and binning

A code-density test (hits uncorrelated with the clock) fills the histogram
with counts proportional to each raw bin's width. Each raw bin *k* covers
`[L_k, R_k)` of the cumulative histogram. The ideal grid has boundaries
`i·W`, where `W = total / (non-empty raw bins)`; with binning `W` is doubled.
`bin_calibration` holds one `cal_entry_t` per raw code:

| field | meaning |
|---|---|
| `bcf_m` | main ideal bin (BCF_m) |
| `bcf_c`, `c_valid` | compensation ideal bin (BCF_c), if the raw bin straddles a boundary |
| `split` | share of hits to send to `bcf_c`, in 1/256 |

The rule used by the testbenches to fill the table is this. Let `j` be the
ideal bin that holds `R_k`. If `L_k` lies in `j` too, then `bcf_m = j` and
there is no BCF_c. Otherwise `bcf_m = j−1`, `bcf_c = j` and
`split = 256·(R_k − j·W)/(R_k − L_k)`. A raw bin wider than one ideal bin
thus gives up part of its counts to at most two ideal bins, and an ideal bin
it spans completely receives nothing: a missing code, as the method accepts.

The original method only says that a *proportion* of a raw bin's counts goes
to BCF_c. Here that is done hit by hit: a 16-bit LFSR (x¹⁶+x¹⁴+x¹³+x¹¹+1)
advances once per code, and the code goes to `bcf_c` when `lfsr[7:0] < split`.
The table starts as the identity map. `cal_en` is taken with each code, so
codes already in the pipeline are not affected when it changes. Computing the
table from the histogram is left to the host.

**Binning** uses the same hardware. Only the grid changes: two ideal bins are
merged into one, and the table targets the merged grid.

## Coarse counter, histogram, event port

* `coarse_counter`: a free-running 16-bit count of clock cycles. Each event is
  stamped with the count of the cycle its taps were sampled in. `coarse_wrap`
  pulses on rollover.
* `histogram`: 2048 × 32-bit counters in a dual-port RAM. The read-modify-write
  takes two cycles, with one-deep forwarding so that back-to-back hits on
  the same code are both counted. Counters saturate and set `hist_sat`.
  `hist_clr` zeroes all counters in a 2048-cycle sweep (`hist_busy`), and
  events during the sweep are dropped. `hist_rd_addr` → `hist_rd_data` has
  one cycle of latency.
* Event port: `ev_valid`, `ev_coarse`, `ev_raw` (raw fine code) and `ev_code`
  (calibrated code), all aligned.

A larger time value is `ev_coarse · T_clk − t(ev_code)`. In this sign
convention the fine code grows with the time from the hit to the sampling
edge.

## One RTL, four converters

| converter | `USE_WU` | `USE_DS` | table | raw codes |
|---|---|---|---|---|
| binned DSWU (default) | 1 | 1 | merged grid (2 bins) | 0..1920 |
| DSWU | 1 | 1 | ideal grid | 0..1920 |
| WU | 1 | 0 | ideal grid (compensation) | 0..960 |
| DS | 0 | 1 | none or ideal grid | 0..960 |

`N_CARRY8` (60) sets the line length. All codes fit the 11-bit code width up to
64 cells.

## Top-level interface (`tdc_top`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | sampling clock, asynchronous active-low reset |
| `hit` | in | 1 | hit input (asynchronous) |
| `cal_en` | in | 1 | 1: calibrated codes, 0: raw codes |
| `tbl_we`, `tbl_addr`, `tbl_wdata` | in | 1, 11, 31 | calibration table write |
| `hist_clr`, `hist_busy`, `hist_sat` | in/out | 1 | histogram clear and status |
| `hist_rd_addr`, `hist_rd_data` | in/out | 11, 32 | histogram read |
| `ev_valid`, `ev_coarse`, `ev_raw`, `ev_code` | out | 1, 16, 11, 11 | event stream |
| `coarse_wrap` | out | 1 | coarse counter rollover |

The clock source (an external generator plus an MMCM) and the link to the
host computer are outside this RTL.

## Simulating

Every file declares `timeunit 1ps; timeprecision 1fs`. The models need
`--timing`. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/tdc_pkg.sv \
          tb/tb_tdc_top.sv --top-module tb_tdc_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; each
has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_wu_launcher` | truth table, one 120 ps negative pulse per hit |
| `tb_tdl_carry8` | every S/C tap against its position on an even line; one clean step on the uneven line |
| `tb_tm2oh`, `tb_oh2bin` | all pulse positions, edge cases |
| `tb_subtdl_encoder` | codes equal the passed-tap counts with and without DS, with bubbles |
| `tb_wu_fine_code` | one event per pulse, 3-cycle latency, rise + fall, non-WU variant |
| `tb_coarse_counter` | stamps, latency correction, wrap |
| `tb_bin_calibration` | exact codes against a reference LFSR, share of BCF_c picks, latency |
| `tb_histogram` | counts against a reference, forwarding, clear, saturation |
| `tb_tdc_top` | full-size binned DSWU channel, end to end (below) |
| `tb_tdc_variants` (with `tdc_flow_bench`) | the same flow for the WU, DS and unbinned DSWU settings |

`tb_tdc_top` leaves every parameter of the top at its default. It places
40 000 hits at random phases and checks each event's coarse stamp, that raw
codes never decrease as the hit-to-edge time grows, and that they lie within
80 codes of the even-line value. It then builds the table from the read-back
histogram with two-bin merging and repeats the run calibrated. With the
default model line the result is σ_DNL 0.64 → 0.19 LSB (pk-pk 3.7 → 1.3 LSB)
over 1497 raw and 749 binned codes. For the WU setting, compensation gives
σ_DNL 0.64 → 0.41 LSB. These numbers describe the behavioural line,
not silicon. The test also requires that every mechanism occurred: events,
pulses visible in two samples, raw and calibrated modes, BCF_c picks, table
writes, histogram clears and coarse-counter wraps. Counter saturation is
exercised only in `tb_histogram`.

## What follows the original design and what does not

Taken from the published architecture:

* the 60-cell CARRY8 line with S and C taps;
* sub-TDLs ordered `S[0], C[0] ... C[7]`, each encoded by TM2OH then OH2BIN,
  with the fine code as their sum;
* the one-LUT WU-A launcher and its truth table;
* the separate rising and falling encoders and their adder;
* calibration by main/compensation bin factors, with binning as compensation
  on a merged grid;
* a coarse counter and a block-RAM histogram.

Choices made here, where the description is silent:

* the one-hot rules and padding for two edges;
* the hit-detection rule;
* all pipeline depths;
* the per-hit LFSR application of the BCF_c share;
* the table format and the rule for filling it. It follows the example of a
  straddling bin and an ultra-wide bin; the published pseudocode compares
  boundaries of the same index and is not followed literally;
* coarse-counter width and wrap pulse;
* histogram size, clearing, saturation and read port;
* every delay in the behavioural launcher and line;
* the 500 MHz test clock.

Not modelled:

* clock skew across the clock region, which causes the INL step of the DS
  converter;
* jitter;
* metastability of the sampling flip-flops;
* placement constraints;
* any use of the coarse count inside the histogram. The original block
  diagram draws the coarse counter feeding the histogram but does not say
  what it contributes there; its text only says a coarse counter can be
  added for a longer range. Here the histogram counts fine codes only, and
  the coarse stamp goes out on the event port.

The original numbers for comparison: about 2.5 ps LSB for the DS and WU
converters, 1.23 ps for DSWU and 2.48 ps after binning. Compensation takes
the WU converter's σ_DNL from 0.82 to 0.43 LSB, and the binned DSWU
converter reaches 0.35 LSB (DNL pk-pk 2.60 LSB).

The linearity figures above are consequences of the model's random delays.
They show that the mechanisms work, not what the converter achieves on a
device.
