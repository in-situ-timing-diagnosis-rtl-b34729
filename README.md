# In-situ timing diagnosis for SRAM-based FPGA routing

Two physical effects slow down routed signals inside an SRAM-based FPGA while it runs:

- **Supply-network (PDN) droop.** Heavy switching activity lowers the core voltage. Every net then becomes slower by roughly the same amount.
- **Configuration upsets in routing.** A flipped configuration bit can attach an unused wire segment or switch to a net. The parasitic load slows down that one net. Each further upset on the same path adds to the delay.

Both effects make paths slower, so a pass/fail timing monitor cannot tell them apart. This design measures the delay *distribution* of many routed nets while the user design keeps running. It then compares each distribution with a reference taken earlier:

- If every location moved by the same amount and the spread stayed the same, the cause is supply-like.
- If only some locations moved, or a distribution became wider, the cause is routing-like.

The RTL contains the complete measurement and diagnosis chain:

- observation branches at switch-matrix nodes;
- monitoring elements that sample with a phase-swept clock;
- a network that sweeps, synchronises and collects;
- a buffering aggregator;
- a controller that reconstructs the delay histograms and classifies the change.

It also contains the user design being observed (a 64-tap FIR filter) and an activity stressor used to create supply droop. The routing fabric and the clock phase shifter are physical parts, not logic. They appear as behavioural models so that the whole system can be simulated end to end.

## 1. Turning a routing delay into counts

A routed net carries a signal launched by a functional clock edge. The signal reaches an observation point after a delay D. A delay monitoring element (DME, `rtl/dme.sv`) has a sampling flip-flop clocked by a copy of the functional clock shifted by φ:

- If φ > D, the sample already holds the new value.
- If φ < D, the sample still holds the old value.

A second flip-flop captures the value once more at the next functional edge, when it is certainly settled. That copy is the reference. A sample that differs from the reference is an **incorrect sample**.

The DME counts only cycles in which the signal actually changed. Its error rate at phase φ is

    b(φ) = err / (err + ok)

This is the probability that a transition arrives after the sampling edge. It falls from 1 to 0 as φ passes through the spread of arrival times.

A phase-shifting clock manager (`rtl/mmcm_phase_model.sv`, 18 ps per step) produces the sampling clock. The sweep moves φ one step per measurement window. The resulting curve b(φ) is the complementary cumulative distribution of the node's delay. Its drop between neighbouring phase points,

    p(φ) = b(φ_prev) − b(φ),

is a histogram of the delay. No knowledge of what the signal means is needed, only that it toggles.

Two points about this definition:

- **Noise.** Counting only transition cycles makes the rate independent of how often the data toggles. Counting all cycles would let data-dependent toggle rates leak into the curve as noise.
- **Direction of the curve.** With this definition the curve *falls* with phase. A curve drawn as "errors of the new value" would rise instead; the information is the same.

Timing inside the DME:

| cycle | event |
|---|---|
| edge of `clk_samp` | sample taken |
| next `clk` edge | sample retimed into `clk`; reference captured |
| following `clk` edge | compared and counted |

`meas_en` is delayed by two cycles so that the counters cover exactly as many cycles as the window was open. The retiming requires the phase shift to stay below one clock period. The default sweep limit of 184 steps (3312 ps) keeps it inside a 300 MHz period.

## 2. Where the signal is observed: delay-tap chains

A routed net passes through a series of switch-matrix blocks. `rtl/route_fabric_model.sv` models one such net with eight nodes, one after each switch-matrix block. Each node can be tapped by a configuration-controlled fan-out branch, buffered by a global buffer. Such a branch is a delay tap (DT).

One region's DT chain (`rtl/dt_chain.sv`) has eight taps:

- It enables exactly one branch, or none.
- It merges the enabled branch onto the single line that runs to that region's DME.
- A load pattern with more than one bit set is refused and flagged. Two enabled branches would mix two delays on one line.
- The DME records which tap it watched, so every count carries its observation point.

The fabric model's delay for tap k (0-based) is:

    d_k = 300 ps + (k+1)·150 ps + load·20 ps + n·40 ps·LOC + U(0, (k+1)·20 ps + n·60 ps)

- `load` is the number of active stressor slices. It acts globally.
- `n` is the number of parasitic attachments enabled in this region. It acts locally.
- `LOC` = 1..4 is a fixed, region-dependent sensitivity. Upsets therefore hurt different regions by different amounts.
- `U` is uniform jitter. It grows with depth and with the number of attachments. This is what widens the histogram under a routing perturbation.

These numbers are the model's own. They were chosen so that eight taps plus worst-case stress fit inside the sweep range.

## 3. The delay and control network (DCN)

`rtl/dcn.sv` is the only block that talks to the DMEs. Its parts:

- `phase_sweep_ctrl` holds the phase index. It is loaded at START and stepped between windows. The sweep ends at the last grid point not beyond `phase_stop`.
- `meas_enable_gen`: after each phase update it waits `settle`+1 cycles, then holds `meas_en` high for exactly `window` cycles.
- `routing_configurator` sets the tap enables and the per-region perturbation thermometer. It does this only while no window is open.
- A collection FSM:
  - after each window it waits 4 cycles (drain) while the DMEs freeze their summaries;
  - it reads each enabled DME in index order: 9 read strobes move out a 36-bit summary `{tap, err, ok}` four bits at a time;
  - it forms a 56-bit record `{dme_id, phase, tap, route_state, err, ok}` and offers it with valid/ready.

Because the DMEs are read one at a time in a fixed order, they never contend for a shared line. The narrow DME interface is 5 bits in (`meas_en, rpt_rd, tap_sel[2:0]`) and 4 bits out.

### Control path

The controller drives the DCN over a 7-bit command word `{valid, op[1:0], data[3:0]}`:

| op | meaning |
|---|---|
| SHIFT (0) | shift `data` into a 32-bit staging register |
| WRITE (1) | copy staging into register number `data` (ignored while a sweep runs) |
| START (2) | apply the configuration, begin the sweep |
| ABORT (3) | stop at once |

The DCN answers with a 4-bit status `{busy, meas_active, reporting, sweep_done}`.

| reg | name | reset value |
|---|---|---|
| 0 | PHASE_START | 0 |
| 1 | PHASE_STOP | 184 |
| 2 | SETTLE | 16 cycles |
| 3 | WINDOW | 1024 cycles |
| 4 | TAP_SEL | 0 |
| 5 | PERT_MASK | 0 (one bit per region) |
| 6 | PERT_LEVEL | 0 (attachments, capped at 4) |
| 7 | DME_EN | all ones |
| 8 | PHASE_STEP | 1 |

Time per phase point: 1 + (settle+1) + window + 4 cycles, then 10 or more cycles per enabled DME (9 reads and a handover), then 2 cycles to step.

With 32 DMEs, a 256-cycle window and 131 phase points, one sweep takes about 80 000 cycles. That is 0.27 ms at 300 MHz.

## 4. Aggregation

`rtl/delay_data_aggregator.sv`:

- buffers up to 64 records (two sweep points of 32 DMEs);
- emits packets `{0xD5, seq[15:0], record}`, where the sequence number counts packets since reset;
- has valid/ready on both sides, so a slow consumer never loses a record (the DCN simply waits);
- is first-word fall-through: a record written in cycle t can leave in cycle t+1.

## 5. Diagnosis: from packets to a class

`rtl/diag_controller.sv` contains four stages.

**Timing data processor** (`timing_data_processor.sv`). For each packet it:

- computes b = err·4096/(err+ok);
- takes the drop p against the same DME's previous point;
- accumulates per DME

      S0 = Σ p,   S1 = Σ p·φ,   S2 = Σ p·φ²

The sums are signed, so noisy negative drops cancel correctly. Storing every profile would take 32 × 256 words; the sums take 3 × 32 words. One chosen DME's raw error profile is also kept in a 256-word memory for inspection. The processor also checks the packet marker and sequence numbers and counts records.

**BER analyzer** (`ber_analyzer.sv`). Using one 64-bit serial divider, it computes per DME, in phase steps with 8 fraction bits:

    μ = S1/S0        (mean delay)
    v = S2/S0 − μ²   (variance of the delay)

A baseline run stores μ and v as the reference. A measurement run forms Δμ and Δv against it, which cancels fixed offsets such as clock skew or the static delay of each path. The class is decided over all DMEs that saw transitions in both runs:

| condition | class |
|---|---|
| no usable DME | INVALID |
| all \|Δμ\| < 2 steps and all Δv < 4 steps² | NONE |
| min Δμ ≥ 2 steps, max Δμ − min Δμ ≤ 4 steps, all Δv < 4 steps² | PDN |
| anything else | ROUTING |

The 2-step tolerance is twice the ±1 step accuracy expected from the method. A full analysis of 32 DMEs takes about 4 500 cycles.

**Fault injector** (`fault_injector.sv`) holds the emulated upsets: a region mask and an attachment level. In cumulative mode the level rises by one after each measurement campaign. This emulates upsets accumulating on the same paths.

**Spatial correlator** (`spatial_correlator.sv`). It relates locations to each other over a *series* of measurement campaigns, for example a stress level raised step by step, or repeated exposure to upsets. After each measurement campaign it reads every location's Δμ = x and that of a chosen reference location, r. For each location whose x and r are both valid, it adds to six sums:

    n, Σx, Σx², Σr, Σr², Σx·r

From these the host forms the Pearson coefficient

    ρ = (n·Σxr − Σx·Σr) / √((n·Σx² − (Σx)²)(n·Σr² − (Σr)²))

This gives one row of a spatial correlation map:

- a supply-driven change gives ρ ≈ 1 everywhere;
- upsets that land on different locations in different campaigns give low or negative ρ.

The square root and the division are left to the host. `corr_clear` starts a new series and `corr_ref` picks the reference location.

**Sequencer.** On `host_start` the controller:

1. clears the processor;
2. writes all nine DCN registers (8 SHIFT + 1 WRITE each, 81 commands); a baseline run always writes an empty perturbation mask;
3. issues START;
4. waits for `sweep_done` and an empty aggregator;
5. runs the analyzer; after a measurement run it also steps the injector and updates the correlation sums;
6. raises `host_done`.

## 6. The observed design and the stressor

- `fir_dut.sv` is a transposed-form 64-tap filter: 16-bit signed samples and coefficients, full-precision 38-bit output, one sample per clock, two-cycle latency. 32 of its internal register bits (spread along the tap line) are the nets the DT chains observe.
- `pdn_stressor.sv` has 16 slices. Each slice has two 32-bit LFSRs whose XOR feeds a 40-bit multiply-accumulate. `n_active` slices toggle while `en` is high, and the active count is the `load` that drives the droop term of the fabric model. The XOR of all stressor state is brought out so that synthesis keeps the logic.

## 7. Parameters

| parameter | default | where |
|---|---|---|
| NUM_DME | 32 | top, dcn, controller (at most 32: mask registers are 32 bits) |
| N_TAPS | 8 | taps per DT chain |
| FIR_TAPS / DW / CW | 64 / 16 / 16 | fir_dut |
| NUM_SLICES | 16 | stressor |
| AGG_DEPTH | 64 | aggregator |
| STEP_PS | 18 | phase shifter model |
| PHASE_W / CNT_W | 8 / 16 | diag_pkg |
| TOL_MU / TOL_SPREAD / TOL_VAR | 2 / 4 / 4 steps (Q8) | ber_analyzer |

## 8. What is modelled, and how far to trust it

- **Behavioural parts.** `route_fabric_model` and `mmcm_phase_model` use `#` delays. They stand for silicon, not for logic to be built, and their delay numbers are illustrative. On a real device the taps are routing branches selected by configuration bits, and the phase shifter is the clock manager's fine phase shift. Everything else is synthesizable, single-clock logic, apart from the DME's sampling flip-flop on the shifted clock.
- **Input multiplexer.** The DME's input selection is done by the branch enables in the DT chain, because only one line reaches each DME. The tap identifier still travels in the DME control word and in every record.
- **Only the enabled branch is loaded.** Perturbations are applied to the tapped branch. The model delays only the observed replica, never the functional net, in line with the rule that the functional path must not change.
- **Classification rule.** The rule in section 5 is this design's own concrete reading of the two signatures. The thresholds suit the model's delays. On hardware they would have to be set from the repeatability of baseline sweeps.
- **Spatial correlation.** The chip keeps the correlation sums against one reference location per series. A full location-by-location map needs one series per reference, or offline processing of the packet stream (each record carries DME id, phase, tap and perturbation state). Drawing the map over the physical layout needs placement coordinates, which are outside the logic.
- **Deliberate departures and open points:**
  - The DCN-to-aggregator path is a full 56-bit record with valid/ready, rather than a narrow per-DME bus.
  - The command encoding, register map, packet format and all counter widths are this design's own.
  - The result store inside the controller (per-DME μ, v, Δμ, Δv and one raw profile) is what the host reads. No further "delay data" block is built.
  - The FIR uses 64 multipliers (no coefficient-symmetry folding).

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and stops by itself. For example, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/diag_pkg.sv tb/tb_dcn.sv --top-module tb_dcn -o sim
    ./obj_dir/sim

The end-to-end test `tb/tb_insitu_diag_top.sv` runs the top at its default size: 32 regions × 8 taps, the 64-tap FIR, 16 stressor slices. It takes about 2.5 minutes on a desktop CPU and runs these campaigns:

1. tap-0 baseline, with every mean checked against the model formula;
2. 16-slice supply stress, which must give class PDN with every mean shifted by 16·20 ps;
3. level-4 upsets on three regions, which must give class ROUTING, with only those regions shifted and their variance grown;
4. two cumulative-upset campaigns, in which the level steps and the shift grows;
5. a tap-7 baseline, which must be later than tap 0.

Along the way it checks the FIR output against a reference convolution and the stored profile. It counts each of these mechanisms and fails if one never happened.

`tb/tb_workload_locations.sv` runs the evaluation workload with eight locations L1..L8 (NUM_DME = 8, about 40 s):

- three unchanged sweeps after the baseline, in which every mean must stay within ±1 phase step;
- supply stress at 4, 8, 12 and 16 slices, which must give class PDN, an equal shift everywhere and unchanged variance;
- four campaigns that each upset a different pair of locations, which must give class ROUTING, shift only where upset and a wider spread there;
- the L1-to-Lk correlation from the on-chip sums: 1.00 at every location under stress, between −0.6 and +0.6 under the rotating upsets, matching the testbench's own calculation.

The block testbenches use smaller sizes (for example 4 DMEs) and compare against models written in the testbench:

| testbench | what it checks |
|---|---|
| `tb_dme` | error counts at phases before, inside and after the transition |
| `tb_dcn` | register protocol, phase grid, window length, enable gating, record contents under backpressure, ABORT |
| `tb_delay_data_aggregator` | order, sequence numbers, full condition |
| `tb_timing_data_processor` | moment sums against 64-bit reference arithmetic |
| `tb_ber_analyzer` | μ, v and each class on synthetic histograms, plus cycle budget |
| `tb_diag_controller` | programmed registers, class of each run, cumulative stepping, correlation sums |
| `tb_spatial_correlator` | the six sums against 64-bit reference arithmetic, ρ = ±1 cases, invalid pairs, clear |
| `tb_fir_dut`, `tb_pdn_stressor`, `tb_dt_chain`, `tb_phase_sweep_ctrl`, `tb_meas_enable_gen`, `tb_routing_configurator`, `tb_fault_injector`, `tb_route_fabric_model`, `tb_mmcm_phase_model` | the corresponding block |

## 10. Files

| file | content |
|---|---|
| `rtl/diag_pkg.sv` | shared constants, command/status/record/packet types, register numbers |
| `rtl/insitu_diag_top.sv` | the complete system |
| `rtl/fir_dut.sv`, `rtl/pdn_stressor.sv` | observed design and stressor |
| `rtl/route_fabric_model.sv`, `rtl/mmcm_phase_model.sv` | behavioural fabric and phase shifter |
| `rtl/dt_chain.sv`, `rtl/dme.sv` | observation branches and monitoring element |
| `rtl/dcn.sv`, `rtl/phase_sweep_ctrl.sv`, `rtl/meas_enable_gen.sv`, `rtl/routing_configurator.sv` | delay and control network |
| `rtl/delay_data_aggregator.sv` | record FIFO and packetiser |
| `rtl/diag_controller.sv`, `rtl/timing_data_processor.sv`, `rtl/ber_analyzer.sv`, `rtl/spatial_correlator.sv`, `rtl/fault_injector.sv`, `rtl/seq_divider.sv` | diagnosis controller |
