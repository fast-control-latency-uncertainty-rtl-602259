# Fixed-latency re-capture of SerDes fast-control data

Fast control signals (level-1 trigger, resets and the like) reach the
end-cap time-of-flight (ETOF) readout crates of the BESIII detector over a
fibre link. A SerDes chip (TLK1501) recovers the 16-bit data words and a
clock `rx_clk` from the bit stream. Each time the SerDes powers up, `rx_clk`
locks onto one of ten phases, spread over about 10.2 ns of the 24 ns clock
cycle. The rest of the module works on the global clock `ref_clk`. If the
data are re-timed straight into `ref_clk`, one power-up may deliver a word a
whole cycle later than another. For trigger distribution that is not
acceptable: the latency must be the same every time.

This RTL removes that uncertainty without manual calibration. It works in
three parts:

* It measures where the `rx_clk` edge falls relative to `ref_clk`, with a
  small time-to-digital converter (TDC) with 3 ns bins.
* It power-cycles the SerDes many times to learn the whole range over which
  the edge can wander.
* It moves a copy of `ref_clk`, called `phi`, so that its sampling edge sits
  in the middle of the window in which the data are stable for every
  possible `rx_clk` phase.

The data are then sampled with `phi` and handed to `ref_clk`. Because `phi`
is derived from the global clock and not from `rx_clk`, the latency does not
depend on which phase the SerDes chose.

## The timing problem in numbers

| quantity | value |
|---|---|
| clock period T | 24 ns |
| recovered-clock phases | 10, spread over 10.2 ns |
| phase-shift step of `phi` | 200 ps, 120 steps per cycle |
| TDC bin | 45 degrees = 3 ns = 15 steps |
| capture offset | 81 degrees = 5.4 ns = 27 steps |

Look at one power-up. The recovered data change on the rising edge of
`rx_clk`, which comes `Δ + δ` after the `ref_clk` edge:

* `Δ` is the fixed skew of the channel.
* `δ` is the random SerDes phase, 0 to 10.2 ns.

Over many power-ups, the region where the data may change is at most about
10.2 ns wide. That leaves a stable window of at least 13.8 ns. The TDC gives
the bin of the earliest edge seen, `min`. The sampling clock is then set to
`phi = ref_clk + min·45° + 81°`, and data are captured on the falling edge of
`phi`. That edge lies `min·3 ns + 17.4 ns` after the reference edge:

* at least 17.4 − 3 − 10.2 = 4.2 ns after the last possible data change;
* at least 24 − 17.4 = 6.6 ns before the next one.

This holds for any `Δ`.

## The wrap-around case and `rf`

The TDC measures modulo one cycle. If the swing of the edge crosses the
cycle boundary, the codes seen wrap round, and `<min,max>` is `<0,7>`
whatever `Δ` is. In that case the controller works as follows:

1. It shifts `phi` by 180 degrees.
2. It sets the flag `rf` ("reversed").
3. It measures again. Relative to the reversed clock, the swing no longer
   wraps.
4. It sets `phi` to `min'·45° + 81°`, using the new `min'`.

The re-capture path has two sample registers:

* one clocked by the falling edge of `phi`;
* one clocked by the falling edge of `phi_180` = `phi` + 180 degrees.

`rf` selects which one feeds the output register. With `rf = 1`, the capture
edge is the falling edge of the reversed clock shifted by `min'·45° + 81°`.
That puts it in the middle of the stable window, exactly as in the
non-wrapping case.

A swing longer than one cycle (`Δ > T`) needs nothing extra, because the TDC
folds it into one cycle.

## Block structure

```
              rx_clk ─┬──────────────────────────────┐ (hit = rx_clk/2)
 rxd[15:0] ─► [align FF]─┬─► [sample FF, ↓phi    ]─┐ │
                         └─► [sample FF, ↓phi_180]─┤MUX(rf)─► [FF ↑ref_clk] ─► stable_data
 ref_clk ─► pll_phase_shift ─► phi, phi_180        │ │
               ▲ step/done      │                  │ ▼
               │                └► pll_x2_4phase ─► tdc ─► phase_monitor ─► <min,max>
               │                   (df_clk[3:0])                              │
          phase_align_ctrl ◄──────────────────────────────────────────────────┘
           │ serdes_en (power-cycles the SerDes), rf, locked
          fc_csr ◄─► register bus (from the board's VME interface)
```

| module | role |
|---|---|
| `etof_fctl_top` | wires everything together; top of the design |
| `recapture_path` | alignment register (rising `rx_clk`), two sample groups (falling `phi` / `phi_180`), `rf` multiplexer, output register (rising `ref_clk`) |
| `pll_phase_shift` | behavioural model of the FPGA PLL with dynamic phase shift: `phi` = `ref_clk` + phase × 200 ps |
| `pll_x2_4phase` | behavioural model of the TDC's PLL: `phi` doubled, four phases 0/90/180/270° |
| `tdc` | multi-phase interpolating TDC: hit generation, valid generation, four sample blocks, output register |
| `tdc_sample_block` | one sample block, five flip-flops |
| `phase_monitor` | decodes TDC codes into bins 0..7; running `<min,max>`; cleared when disabled |
| `phase_align_ctrl` | the calibration sequence |
| `fc_csr` | control and status registers |
| `etof_fc_pkg` | shared constants, controller states, CSR map, status struct |

## The TDC

The TDC measures the `rx_clk` edge against the TDC work clock `phi`.

* `hit` is `rx_clk` divided by two, so it changes once per cycle.
* `pll_x2_4phase` produces `df_clk[3:0]`: `phi` doubled (12 ns period),
  with edges at 0, 3, 6 and 9 ns after each `phi` edge.
* Sample block `i` samples `hit` on `df_clk[i]`, shifts the sample once in
  that domain, then retimes it through three flip-flops on `df_clk[0]`. The
  outputs `q[1]` (fourth flip-flop) and `q[0]` (fifth flip-flop) are two
  samples taken half a `phi` period apart.
* The output register stores `v = {q3[1], q2[1], q1[1], q0[1], q3[0], q2[0], q1[0], q0[0]}`.
  Bit `v[k]` is `hit` sampled at `(k·45° − 180°)` relative to a `phi` edge,
  so `v` is an 8-sample thermometer code covering one cycle.
* The valid generator passes `hit` through three flip-flops on `phi` and
  detects its rising edge. This enables the output register once every two
  `phi` cycles. `v_valid` then pulses for one cycle.

`hit` changes exactly once per cycle, so every code has one transition.
`phase_monitor` turns the code into a bin:

    value = (number of bits of v equal to v[0] + 3) mod 8

This equals `floor(delay from the phi edge to the rx_clk edge / 3 ns)`. The
result is the same whether the window saw a rising or a falling `hit`. An
`rx_clk` edge less than one bin after the `phi` edge reads 0.

## Calibration sequence (`phase_align_ctrl`)

The controller runs on `ref_clk`. It starts once after reset, and again on
every write of 1 to bit 0 of CTRL.

1. Set `rf = 0` and step `phi` back to 0°.
2. Clear the monitor. Then repeat `N_RESETS` times:
   * drop `serdes_en` for `OFF_CYCLES`;
   * raise it and wait `LOCK_CYCLES`;
   * let the monitor collect codes for `MEAS_CYCLES` (`mon_gate`).
3. Wait `EVAL_WAIT` cycles, so that `<min,max>` (which lives in the `phi`
   domain) is static. Then read it.
4. If the pair is not `<0,7>`, step `phi` to `min·15 + 27` steps (mod 120)
   and raise `locked`.
5. If the pair is `<0,7>` and `rf = 0`, set `rf = 1`, step `phi` to 60
   steps (180°) and go back to step 2.
6. A second `<0,7>`, or no code at all, raises `error`. The shift of step 4
   is still applied.

The PLL is stepped one step at a time, always upwards, modulo 120. After
each `ps_step` the controller waits for `ps_done`. A step takes about four
cycles.

With the defaults (64 power cycles of 16 + 64 + 64 cycles each), one
measurement takes 9,216 cycles, about 221 µs. A wrapping swing takes two
measurements. Stepping adds at most about 600 cycles.

## Registers (`fc_csr`)

| addr | name | content |
|---|---|---|
| 0 | CTRL | write bit 0 = 1: start a calibration; reads 0 |
| 1 | STATUS | `{12'b0, error, locked, busy, rf}` |
| 2 | MINMAX | `{9'b0, seen, max[2:0], min[2:0]}` |
| 3 | PHASE | `{9'b0, phase[6:0]}`, in 200 ps steps |

The bus is synchronous to `ref_clk`. A write takes one cycle. Read data
appear the cycle after the address.

## Clocks, reset and crossings

There are four clock domains: `ref_clk`, `rx_clk`, `phi`/`phi_180`, and
`df_clk[3:0]`.

* All flip-flops share one asynchronous active-low reset, `rst_n`.
* `mon_en` and `mon_gate` enter the `phi` domain through two-flip-flop
  synchronisers.
* `<min,max>` is read by the controller only while it is frozen.
* The crossings inside the TDC and the re-capture path are deliberate
  sampling points. On an FPGA, their flip-flops must be placed together, the
  16 sample bits with equal skew, as the original work requires.
* No metastability is modelled: the simulator has two states.

## What follows the published design and what is this design's own

Taken from the published design:

* the block diagram of the re-capture path and of the TDC;
* the 16-bit width and the 24 ns clock;
* 200 ps / 120 steps, 8 bins of 45°, and the `min·45° + 81°` rule;
* the 180° reversal with `rf`, and capture on a falling edge;
* `<min,max>` cleared by disabling the monitor;
* SerDes power-cycling during calibration.

This design's own choices:

* **Source of `hit`.** One description says the TDC hit comes from
  `ref_clk` divided by two and that `phi` is the TDC's main clock. The timing
  description says `ref_clk` starts the measurement and `rx_clk` stops it.
  With `phi` as the work clock, `rx_clk` can only reach the TDC through
  `hit`, so here `hit = rx_clk / 2`.
* **Valid generator.** The gate in the valid generator is a rising-edge
  detector.
* **Bit mapping.** `q[1]` maps to `v[4+i]` and `q[0]` to `v[i]`. The
  decoding formula above follows from this mapping.
* **Counts.** `N_RESETS`, `OFF_CYCLES`, `LOCK_CYCLES`, `MEAS_CYCLES` and
  `EVAL_WAIT` are not given in the source. The hardware spent one minute per
  point in its characterisation.
* **Interfaces and behaviour.** The PLL step/done handshake, the upward
  stepping and the error flag are this design's own. So are the CSR map and
  register bus, and the reset-to-zero.
* **PLL models.** Both PLLs are behavioural, with delays. They are not
  synthesizable. On an FPGA, replace them by the vendor's PLL primitives
  with a dynamic-phase-shift port. `etof_fctl_top` is synthesizable only
  after that swap.
* **Width of the unstable region.** The figures give 10.8 ns where the text
  gives 10.2 ns. The SerDes model uses 10.2 ns. With 10.8 ns the margin
  above drops from 4.2 ns to 3.6 ns.
* **Sweep direction.** In the published TDC sweep the code rises with step
  number. Here the code falls when `phi` is moved later. The direction of
  that sweep is not stated, so only its bin widths (about 15 steps) are
  compared.

Not included: the VME slave logic (only its register-bus side is a port), the
SerDes and optical transceiver, and the fast control system upstream.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_recapture_path` | random clock delays and `rf`; `stable_data` predicted from edge times |
| `tb_pll_phase_shift` | edge of `phi` at phase × 200 ps, wrap at 120, `ps_done` latency |
| `tb_pll_x2_4phase` | `df_clk` edges at 0/3/6/9 ns (+12 ns), 50 % duty |
| `tb_tdc` | code for every bin and for random delays; a code every two cycles |
| `tb_phase_monitor` | decoding, running `<min,max>`, gate, clear |
| `tb_phase_align_ctrl` | final phase, `rf`, error, number of SerDes power cycles, duration |
| `tb_fc_csr` | start pulse, register layout |
| `tb_tdc_sweep` | full 120-step sweep: 15 steps per bin, `max − min = 0` at every step |
| `tb_etof_fctl_top` | end to end at default parameters (details below) |
| `tb_delta_sweep` | channel delay swept over one cycle in 600 ps steps: branch taken (`rf`) and constant latency over all ten phases, for each delay |

`tb_etof_fctl_top` uses two models in `tb/`:

* `tlk1501_model`: one of ten phases over 10.2 ns per power-up.
* `fc_test_gen`: 4-clock pulses, gaps from a 7-bit LFSR.

It runs six calibrations, with channel delays that stay inside a cycle, wrap
round it, or exceed it. It checks each of the following:

* `rf` and the chosen phase match the prediction;
* over 80 power-ups, through all ten phases, the latency to `stable_data`
  never changes;
* pulses stay 4 cycles wide.

It also shows that plain re-timing of `rxd` into `ref_clk` would change its
latency between power-ups for the wrapping delays.

`tb_delta_sweep` covers every channel delay over one cycle, 40 values in
all. It recalibrates the full design for each delay. It then checks that
`rf` is set exactly when the swing wraps round the cycle, and that all ten
recovered-clock phases give the same latency. With the 10.2 ns swing, 23 of
the 40 delays calibrate without reversal and 17 with it. This takes a few
seconds.

Run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/etof_fc_pkg.sv tb/tb_etof_fctl_top.sv --top-module tb_etof_fctl_top -o sim
    obj_dir/sim

The end-to-end run simulates about 3 ms and finishes in under a second.

Limits of trust:

* The simulation is noiseless, with ideal clocks.
* The TDC's transition region and real PLL behaviour (lock time, glitches
  while stepping) are not represented.
* The method's timing margins on silicon depend on placement constraints,
  which are outside the RTL.
