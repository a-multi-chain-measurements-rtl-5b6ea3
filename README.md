# Multi-chain averaging TDC: SystemVerilog model and RTL

A time-to-digital converter (TDC) built from an FPGA carry chain cannot resolve
time more finely than the delay of one carry tap, about 24 ps in a 40 nm
Virtex-6. This design gets past that limit without adding dead time. The hit is
sent into **M tapped delay lines at once**. Each line's input is delayed a little
more than the previous one's, so the eight lines quantise the same instant on
grids shifted against each other. Each line gives its own time, and their mean is
the result. With M = 8 and shifts of 1/8 of a bin, the effective bin shrinks from
about 24 ps to about 3 ps, and the independent quantisation errors partly cancel.

The architecture follows the two-channel, eight-chain, 160 MHz TDC published by
Shen et al., "A Multi-chain Measurements Averaging TDC Implemented in a 40 nm
FPGA". In that work the per-chain calibration and the averaging run in PC
software on raw codes read from the FPGA, and the authors note that these steps
could equally well run in the FPGA. Here they are hardware: the design takes a
hit in and gives a calibrated, averaged time stamp out.

## One measurement, step by step

```
hit_in ──┬──────────────► chain 1 (276 taps) ─► plain_tdc ─► inl_cor ─┐
        [d]                                                            │
         ├──────────────► chain 2            ─► plain_tdc ─► inl_cor ─┤
        [d]                                                            ├─► hit_aligner ─► averager ─► t_final
         ┆                                                             │         │
        [d]                                                            │         └─► offset_estimator (T_D)
         └──────────────► chain M            ─► plain_tdc ─► inl_cor ─┘
                 code_density_cal per chain writes the inl_cor table
coarse_counter (160 MHz, shared by all chains and both channels)
```

1. **Delay lines.** The hit edge travels along a carry chain of 276 taps, two
   per CARRY4 cell. A flip-flop on every tap samples the chain on each rising
   clock edge. The sample is a thermometer code: taps 0..n-1 are high when the
   edge has travelled n taps. One clock period (6.25 ns) is about 260 taps. The
   spare taps cover process spread and temperature drift.
2. **Plain TDC** (`plain_tdc`). A hit is recognised when tap 0 is high at an
   edge and was low at the edge before. The fine code is the number of high
   taps (`therm_encoder`, a ones count, so isolated wrong taps near the edge do
   no harm). The coarse code is the count of the sampling edge. Together they
   form the raw code `{coarse, fine}`.
3. **INL correction** (`inl_cor`). The chain's calibration table turns the fine
   code into the time the edge needed to get that far. The plain time is
   `t_Plain = coarse·T − table[fine]`, the sampling edge minus the travel time.
4. **Alignment** (`hit_aligner`). A chain whose input lags by up to 7 delay
   cells can see the hit one clock edge later than chain 1. The aligner holds
   each chain's time until all M have arrived. If the set is still incomplete
   3 clocks after its first member, it drops the set and pulses `drop`.
5. **Averaging** (`averager`):
   `t_Final = (1/M) · Σ_i (t_Plain(i) − T_D(i))`, where T_D(i) is chain i's
   mean offset against chain 1 and T_D(1) = 0.

Latency from the sampling edge to `t_valid` is 4 clocks, or 5 when the chains
split across two edges. A channel accepts a new hit once tap 0 has been seen low
again. The hit must stay high for longer than the chain (more than about
6.6 ns), and consecutive hits should be at least 3 clocks apart.

## Why the average is finer than one chain

Take chain m, whose input lags chain 1 by (m−1)·d. Seen from chain 1's time
axis, its bin edges sit (m−1)·d later. The design uses d = 9/8 of the mean tap
delay, so modulo one bin the eight chains are offset by 0, 1/8, 2/8 … 7/8 of a
bin. As the hit moves forward, the chains change code one after another, and
their mean steps about every bin/8. Measured on the behavioural chains it steps
every ~3 ps, against 24 ps for one chain.

The offsets between chains are constants, so averaging raw codes would add a
constant error. Subtracting T_D(m) removes that constant and puts every chain on
chain 1's axis before the mean is taken. The INL correction matters more than
the offsets. Carry taps are very unequal in width, and averaging chains that each
have large, different non-linearities leaves a large error in the result. Each
chain is therefore linearised on its own first. The order is fixed: tables
first, then offsets, then averaging.

## Calibration

Each channel has a small sequencer (in `mcatdc_core`) with four states
(`ch_state_e`):

| state        | what happens                                                               |
|--------------|----------------------------------------------------------------------------|
| `CH_UNCAL`   | after reset: fine codes converted with a nominal bin of T/260, no offsets  |
| `CH_DENSITY` | after a `cal_start` pulse: every chain builds its table from 2^16 hits     |
| `CH_OFFSET`  | with the tables in use, 2^10 hits give T_D(2..M)                           |
| `CH_READY`   | tables and offsets applied to every hit                                    |

**Code density** (`code_density_cal`). If hits arrive at random relative to
the clock, the number landing in a bin is proportional to that bin's width.
After N = 2^LOG2_NCAL hits, bin n is count(n)/N of a clock period wide. The
table entry is the time to the bin's centre:

    table[n] = (cum(n) + count(n)/2) · 2^FRAC_W / N,     cum(n) = Σ_{j<n} count(j)

N is a power of two, so the division is a shift. The block clears its 512
histogram bins (one per clock), counts N codes, then writes one table entry per
clock. Every chain sees every hit, so all M calibrators of a channel finish
together.

**Offsets** (`offset_estimator`). The block averages t_Plain(m) − t_Plain(1)
over 2^LOG2_NOFF hits, as DIFF_W-bit signed differences, so a wrap of the
coarse counter does no harm.

The hits used for calibration must be uncorrelated with the 160 MHz clock, for
example from a free-running source. Statistical error in the tables falls as
1/√N. The testbenches feed equidistributed phases (a Weyl sequence), which gives
accurate tables from fewer hits.

## Time format

All times are unsigned fixed-point numbers of TIME_W = 40 bits. The upper
COARSE_W = 24 bits count clock periods. The lower FRAC_W = 16 bits are a
fraction of the period. One unit is 6.25 ns / 65536 ≈ 0.095 ps. This is far below
the ~3 ps bin, so the stored number adds no quantisation of its own. The averager
works relative to chain 1's time, so it stays exact across counter wrap. The
difference of two channels' stamps, taken modulo 2^40, is a time interval,
because both channels share one coarse counter.

## Modules

| file | role | kind |
|------|------|------|
| `mcatdc_pkg.sv` | constants (M = 8, 276 taps, widths), `raw_code_t`, `ch_state_e` | package |
| `mcatdc_top.sv` | two channels and the shared coarse counter | top (contains models) |
| `mcatdc_channel.sv` | M delay-line models, delay cells, and one `mcatdc_core` | contains models |
| `mcatdc_core.sv` | everything after the tap flip-flops of one channel, plus the sequencer | synthesizable |
| `tdl_chain.sv` | carry-chain tapped delay line with its tap flip-flops | behavioural model |
| `chain_delay_cell.sv` | delay between adjacent chain inputs | behavioural model |
| `plain_tdc.sv`, `therm_encoder.sv` | hit detection, fine code, coarse stamp | synthesizable |
| `code_density_cal.sv`, `inl_cor.sv` | per-chain calibration table, and its use | synthesizable |
| `hit_aligner.sv`, `offset_estimator.sv`, `averager.sv` | gathering, T_D, mean | synthesizable |
| `coarse_counter.sv` | 24-bit free-running clock counter | synthesizable |

The delay lines and delay cells are timing structures, not logic. They are
behavioural models with the real parts' ports. `tdl_chain` remembers the last
rising and falling edge of its input. At each clock edge it sets tap k to the
level the input had D(k) earlier, where D(k) is the cumulative tap delay. Tap
delays are drawn uniformly from 0.4–1.6 × 24.04 ps, a different sequence for
every chain, which gives each chain its own strong non-linearity. No jitter is
modelled. To build this on an FPGA, replace `tdl_chain` with a column of CARRY4
primitives and their slice flip-flops. Replace `chain_delay_cell` with one carry
element. Both need placement constraints. `mcatdc_core` takes the sampled taps
and is plain synthesizable logic. Each channel holds 16 tables of 512 × 17
bits, two per chain.

## Parameters

| parameter | default | where | note |
|-----------|---------|-------|------|
| `N_CH` | 2 | top | channels, as published |
| `M` | 8 | top, channel, core | chains per channel, as published |
| `N_TAPS` | 276 | top, channel, core | taps per chain, as published |
| clock | 160 MHz | — | as published; 6.25 ns ≈ 260 taps |
| `LOG2_NCAL` | 16 | top, channel, core | code-density hits per calibration, own choice |
| `LOG2_NOFF` | 10 | top, channel, core | offset-estimation hits, own choice |
| `COARSE_W`, `FRAC_W` | 24, 16 | package | time format, own choice |
| `TAP_PS`, `SPREAD` | 24.04 ps, 0.6 | `tdl_chain` | model only |
| `DELAY_PS` | 27.04 ps | `chain_delay_cell` | model only; 9/8 of a tap |

## What is this design's own

The published design defines the chain structure, the tap count, the clock, the
chain count, and the calibration and averaging mathematics. It gives no logic
for the hardware around them. The following are therefore choices made here:
- the ones-count encoder;
- the edge-detection rule and the dead time;
- the coarse counter width;
- the fixed-point time format;
- the 2^16 / 2^10 hit counts;
- the bin-centre rule for the table;
- the nominal-bin mode before calibration;
- the aligner and its 3-clock window;
- the sequencer;
- the delay-cell value.

The published design converts and averages in software. Here that work is
hardware. Re-quantising results to a coarser LSB, as done there for
non-linearity plots, is left to whoever reads the time stamps.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=F`.
- `tb_mcatdc_top` runs the full default design: 2 channels × 8 chains × 276
  taps, with 2^16 calibration hits. It is a cable-delay test: channel 1 sees
  each hit a fixed delay after channel 0. Results: single-channel RMS 12.0 ps
  uncalibrated and 2.85 ps calibrated. Stepping the delay by 37.3 ps moves the
  mean interval by 37.4 ps. It also makes one chain miss a hit and checks the
  drop path. The run takes about 20 s.
- `tb_mcatdc_chain_sweep` builds channels with M = 1, 4 and 8 on the same hits.
  RMS falls from 8.2 ps to 3.8 ps to 3.0 ps. Over a 48 ps sweep in 0.25 ps
  steps the output changes once for M = 1, 7 times for M = 4 and 15 times for
  M = 8, i.e. a mean bin of about 6.9 ps and 3.2 ps for the last two. This is
  the trend of the published measurements (18, 9.2 and 6.5 ps RMS; 24 and
  2.93 ps bins). Their values are higher because real chains add jitter, which
  the model does not have.
- `tb_mcatdc_nonlinearity` re-quantises the time stamps of 2^14
  equidistributed hits to an LSB of T/260 (24.04 ps) and computes DNL and INL
  for M = 1 and M = 8. Results: M = 1 gives DNL (−1.00, 1.05) and INL
  (−0.76, 0.80) LSB; M = 8 gives DNL (−0.56, 0.40) and INL (−0.33, 0.31) LSB.
  The published hardware gave (−0.7, 0.8) and (−1, 0.7) LSB for M = 8 at
  24 ps.
- `tb_mcatdc_channel` runs one channel through all four calibration states. It
  checks precision against a single chain, output resolution, the drop path and
  hits split across clock edges.
- The unit testbenches check each block against values worked out in the
  testbench. Examples: bit counts, table entries computed in floating point,
  64-bit reference sums.

To run a testbench with Verilator 5 (from the directory holding `rtl/` and
`tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/mcatdc_pkg.sv \
        tb/tb_mcatdc_top.sv --top-module tb_mcatdc_top -Mdir obj -o sim
    obj/sim

Replace `tb_mcatdc_top` with any other testbench name. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/mcatdc_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are harmless. `SYNCASYNCNET` comes from the
lockstep assertion in `mcatdc_core`, which uses the asynchronous reset as its
disable condition. `BLKSEQ` comes from the edge timestamps in the `tdl_chain`
model. `UNUSEDPARAM` marks package constants a given module does not use.
`UNUSEDSIGNAL` marks the upper bits of the wide product in `code_density_cal`,
which are zero by construction.

## Limits

- The delay lines are idealised: there is no jitter, no temperature drift and
  no bubbles. Measured precisions are therefore lower bounds for real silicon.
- A hit must be a pulse longer than one chain, and hits at least 3 clocks apart.
  Shorter pulses, or hits during the dead time, are lost or mis-measured.
- Calibration is started explicitly and is not repeated automatically to follow
  temperature.
- No readout interface is included. Time stamps leave on `t_final`/`t_valid`.
