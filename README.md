# Time-domain in-memory computing with a FeFET CAM array

This macro computes a binary dot product by racing a pulse down a chain of delay stages.
Every column of a small FeFET memory array throttles one stage. A stage is fast when the stored
bit and the input bit "agree" (for XOR), or when both are 1 (for AND). It is slow otherwise. The
total delay of the chain is therefore a linear function of the number of fast stages. A
flash time-to-digital converter (TDC) turns that delay into a code. Weights never leave the array,
and the only data that move are one pulse and a few result bits.

The same array and chain also compute in-memory AND and OR over a chosen subset of a row's
bits, and a one-bit full adder. Because the result is read as time, every fast stage has to be
equally fast. FeFET threshold voltages scatter from device to device, so each cell's "fast" delay
is trimmed after programming. This is done with small partial-erase steps through the cell's
bulk, until a TDC read of that cell alone lands in a narrow window.

The RTL describes the test-chip configuration:

| Item | Value |
|------|-------|
| array size | 3 rows × 3 columns of two-FeFET cells |
| delay chain | 3 stages |
| reference taps | 4 (`REF[3:0]`) |
| TDC output | 2 bits |

Everything is parameterised by `N_ROWS` and `N_COLS`.

The digital parts are synthesizable:

- sequencer
- line decoders
- scan chain
- TDC flip-flops
- thermometer decoder
- result decoder

The FeFET array, the delay stages and the reference delay line are analog in silicon. Here they
are behavioural models with real-valued state and `#` delays. They reproduce the mechanisms that
the digital logic depends on, not the transistor-level waveforms.

## Block map

```
            scan_in ─► scan_chain ─► configuration word
                                         │
 start/cmd ─────────────────────► op_sequencer ──► line_decoder ──► fefet_cam_array
                                   │  │   ▲   wr_pulse ───────────────────►│  (VT per device)
                                   │  │   │                                │ g_sl[j] per column
                          DEC_I ───┘  │   │                                ▼
                            ├──────────────────────► de_chain (delay_element × N_COLS) ─► DEC_O ─► pulse_out
                            └─► ref_delay_line ─► REF[M:0] ─► tdc ◄──────────────────────┘
                                      │           TDC_Th (live)  │
                                      └── th_q (captured) ◄──────┘
                                             │
                                   therm2bin (TDC_O) ─► result_decoder ─► mac_val / logic_out / fa_sum, fa_carry / overrange
```

| File | Role |
|------|------|
| `rtl/tdimc_pkg.sv` | enums for compute modes, line operations, line levels, commands; the write voltages |
| `rtl/fefet_cam_array.sv` | behavioural array: per-device threshold voltage, write physics, source-line conductance |
| `rtl/delay_element.sv` | behavioural current-starved delay stage |
| `rtl/de_chain.sv` | chain of `N_COLS` delay stages, stage *j* starved by column *j* |
| `rtl/ref_delay_line.sv` | behavioural reference line with *shift* and *step* biases |
| `rtl/tdc.sv` | flash TDC: one flip-flop per reference tap |
| `rtl/therm2bin.sv` | thermometer to binary (counts zeros, saturates) |
| `rtl/result_decoder.sv` | TDC result to the answer of the current mode |
| `rtl/line_decoder.sv` | chooses the rail of every WL, WL‑bar, BL and BuL |
| `rtl/op_sequencer.sv` | write, calibration and compute procedures |
| `rtl/scan_chain.sv` | serial configuration register with shadow copy |
| `rtl/td_nvimc_macro.sv` | top level |

## The cell and its lines

Each cell has two FeFETs:

- a **main** device, whose gate is on the column's word line WL;
- a **complementary** device, whose gate is on the column's WL‑bar.

Both sources connect to the column's source line SL. SL is the pull-down tail of that column's
delay stage. Both drains connect to the row's bit line BL. Both bodies connect to the row's bulk
line BuL, which sits in a triple well. A row takes part in a computation only when its BL is at
0 V; all other BLs float. A column stage is therefore fast only if a device of the selected row
in that column conducts.

A device is either LVT (conducts at the read level V_H) or HVT (does not). Writes use these
levels:

| Operation | WL of target column | BuL, selected row | BuL, other rows | Effect |
|-----------|-------------------|-------------------|-----------------|--------|
| program | +4 V | 0 V | 0 V | every device on that line → LVT (whole column at once) |
| erase | −4 V | 0 V | −2 V (inhibit) | only the selected row's device → HVT |
| partial erase | −4 V | −2 V … 0 V (6-bit code) | −2 V | the device's VT rises part way |
| compute/read | V_H or 0 V | 0 V | 0 V | no change |

The inhibit works because a device switches only when its gate-to-bulk voltage exceeds about
2 V in magnitude. With the bulk at −2 V, the erase pulse leaves only −2 V across the other rows'
devices, so they are not disturbed.

The array model applies three rules on each write pulse, using the gate-to-bulk voltage Vgb:

- **Vgb ≥ 3.5 V:** the device's VT becomes its own LVT. Each device has its own LVT, which is the
  nominal 0.30 V plus a fixed spread of up to ±0.15 V. The spread is a deterministic function of
  the device's position, so the mismatch is repeatable.
- **Vgb < −2 V:** the device's VT rises to `VT_LVT + (VT_HVT − VT_LVT)·(|Vgb| − 2)/2`, with
  VT_HVT = 1.5 V. It never goes down, and a full −4 V erase reaches HVT.
- **Reads:** a device conducts `K_FE·(Vg − VT)` when Vg is above VT, and a tiny off conductance
  otherwise.

### How weights are stored

| Encoding | Stored bit | Main device | Complementary device |
|----------|-----------|-------------|----------------------|
| XOR (±1 weights) | +1 (bit 1) | LVT | HVT |
| XOR (±1 weights) | −1 (bit 0) | HVT | LVT |
| AND (0/1 weights) | 1 | LVT | HVT |
| AND (0/1 weights) | 0 | HVT | HVT |

Writing a column always uses the same sequence:

1. Program the WL line.
2. Program the WL‑bar line.
3. For each row, erase whichever devices must be HVT, with the other rows inhibited.

### How inputs are applied

| Mode | WL of column *c* | WL‑bar of column *c* | Stage *c* is fast when |
|------|----------------|--------------------|------------------------|
| XOR‑MAC | V_H if x[c]=1 | V_H if x[c]=0 | x[c] = w[c] |
| AND‑MAC | V_H if x[c]=1 | 0 V | x[c] = w[c] = 1 |
| logic AND/OR | V_H if column selected | 0 V | column selected and w[c] = 1 |
| full adder | V_H if selected and x[c]=1 | 0 V | selected, x[c] = 1 and w[c] = 1 |
| calibration read | V_H on the target column only, both lines | — | target cell has an LVT device |

## Delay stage and chain

Each stage is a current-starved inverter followed by a restoring inverter. The starving tail is
the column's SL in parallel with an NMOS leaker, and the stage drives a small capacitor bank
C_B. The model's rising-edge delay is

```
t_d = T_INTR + (R_NMOS + 1/(g_sl + g_leak)) · C_B
g_leak = K_LEAK · (v_leak − VT_LEAK)
C_B = CB_BASE + cb_code · CB_STEP
```

Conductances are in mS, resistances in kΩ, capacitances in fF, and times in ns; kΩ·fF = ps.

The leaker alone sets the slow delay t_dH, which is why t_dH is stable. A conducting cell sets
the fast delay t_dL. Falling edges pass with T_INTR only, so the chain recovers quickly.

With the default constants, v_leak = 0.70 V, V_H = 0.65 V and `cb_code` = 4:

| Quantity | Value |
|----------|-------|
| t_dH | ≈ 0.97 ns |
| nominal t_dL | ≈ 0.36 ns |
| step between adjacent results | ≈ 0.50 ns after calibration (calibrated t_dL ≈ 0.47 ns) |

The measured chip's step is 550 ps. These constants were picked to land near it; they are not
extracted from silicon.

## Reading the delay: reference line, TDC and decoding

The same DEC_I edge that starts the chain also starts the reference delay line. Its first stage
is biased by `v_shift` and places REF[0]. Each further stage is biased by `v_step` and sets the
tap spacing. In the model, a stage's delay is `RDL_T0 + RDL_C/(RDL_K·(V − RDL_VT))`.

Flip-flop *i* of the TDC samples DEC_O on the rising edge of REF[i]. So `TDC_Th[i] = 1` means
DEC_O arrived before REF[i]. TDC_O is the number of zeros in TDC_Th, saturating at M, so an
earlier arrival gives a smaller code.

**Tap alignment is the key convention of the whole design.** The biases are chosen so that REF[i]
lies midway between T(i) and T(i+1), where

```
T(s) = s·t_dH + (M − s)·t_dL     (arrival time with s slow stages)
```

Then `TDC_Th[i] = 1` exactly when at most *i* stages were slow, and TDC_O equals the number of slow
stages. Results are decoded from that:

| Mode | Result |
|------|--------|
| XOR‑MAC | `mac_val = M − 2·TDC_O` (codes 0,1,2,3 → +3,+1,−1,−3) |
| AND‑MAC | `mac_val = M − TDC_O` (codes 0,1,2,3 → 3,2,1,0) |
| AND over *k* selected columns | `logic_out = TDC_Th[M − k]`: the *M − k* unselected stages are always slow, so the AND holds if nothing else is slow |
| OR over the selected columns | `logic_out = TDC_Th[M − 1]`: 0 only when all M stages are slow |
| full adder (three selected inputs) | n = M − TDC_O fast stages; `fa_sum = n[0]`, `fa_carry = (n ≥ 2)` |
| any mode | `overrange = !TDC_Th[M]`: DEC_O later than every reference, so the biases are wrong |

A board-level user sets `v_shift` and `v_step` from two measured delays, t_dH and the calibrated
t_dL:

```
shift delay = M·t_dL + (t_dH − t_dL)/2
step delay  = t_dH − t_dL
```

The end-to-end testbench shows how to do this by timing `pulse_out`.

## Delay calibration by partial erase

Calibration runs right after a column is written, if `cal_en` is set. It handles one row at a
time, and only rows that hold an LVT device. In AND encoding, a 0 weight has none.

1. Put only the target column's WL and WL‑bar at V_H. All other stages are then slow, and the
   arrival time is `2·t_dH + t_dL(cell)`.
2. Fire a pulse and compare TDC_O with `cal_target`. Its default is M−1, with the reference line
   biased so that the window between REF[M−2] and REF[M−1] is the accepted range of t_dL.
   The measured chip used the window between the last two taps instead. Here the target is kept
   one tap lower. Code M also means "later than every tap", because the code saturates, so an
   overshoot past the last tap would otherwise pass as success.
3. If the code is below target (cell too fast), apply one partial-erase pulse with the next BuL
   code (BuL one step closer to 0 V), raising VT by about 19 mV, and go back to step 2.
4. If the code equals the target, the cell is done. If it is above the target (overshoot), or the
   6-bit BuL code runs out, the row's `cal_fail` bit is set.

`mls_pulses` counts partial-erase pulses since reset.

In the model, a partial erase sets an absolute threshold level: about 0.30 V plus 19 mV per BuL
code. It does not add an increment to the device's own scattered LVT. Cells therefore converge to
the same level, whatever their starting point. In the end-to-end test, the LVT cells' fast delays
start spread over 0.30–0.47 ns. After calibration into a 0.45–0.55 ns window, they all sit at
0.465–0.467 ns, and one code step moves a cell by about 25 ps near that point. Real devices
will not converge this tightly. The residual spread is then bounded by the window width and the
step size.

During calibration the reference biases differ from the compute biases. They are chosen so that
`REF[M−2] = 2·t_dH + t_dL,target` and the step equals the window width. Switching between the two
bias sets is the user's job, as on the real chip, where the biases are analog pins.

## Sequencer, configuration and timing

All settings come from a 22-bit configuration word (3×3 build). It is shifted into `scan_chain`
most significant bit first while `scan_en` is high, and copied to the active register by
`scan_update`. Layout, from bit 0 up:

| Bits | Field |
|------|-------|
| 2:0 | mode (0 XOR‑MAC, 1 AND‑MAC, 2 logic AND, 3 logic OR, 4 full adder, 5 calibration read) |
| 4:3 | row |
| 6:5 | column (for writes and calibration reads) |
| 9:7 | x, input bits, bit *c* for column *c* |
| 12:10 | column mask for logic and full adder |
| 15:13 | w, weight bits of the column being written, bit *r* for row *r* |
| 18:16 | cb_code, capacitor-bank setting shared by all stages |
| 19 | cal_en |
| 21:20 | cal_target |

For other sizes, the field widths follow from `N_ROWS` and `N_COLS` (see `CFGW` in the top).

Commands are strobed with `start` and `cmd` while `busy` is low:

- `CMD_WRITE_COL` writes and, optionally, calibrates one column. The mode field picks XOR or AND
  encoding.
- `CMD_COMPUTE` runs one operation on one row.

`done` pulses when the command ends. Results stay valid until the next command.

Timing at the defaults (`WR_CYC` = 2, `SETTLE_CYC` = 4):

- A write pulse is one set-up cycle plus two cycles high.
- A measurement is one cycle that clears the TDC, `SETTLE_CYC − 1` cycles with DEC_I high, and a
  capture of the flip-flops into `tdc_th` on the edge that lowers DEC_I. Then follow
  `SETTLE_CYC` cycles of recovery.
- A compute raises `done` on the 10th clock edge after the edge that accepts `start`.
- The clock period times `SETTLE_CYC − 1` must exceed the last reference delay: about 3 ns here,
  against the testbench's 10 ns clock.

Assertions in the sequencer check two rules:

- a write pulse never overlaps a compute pulse;
- the line set-up does not change while either pulse is high.

## Where this RTL departs from, or goes beyond, the chip description

- **Tap alignment and the OR tap.** The chip description reads AND over *k* columns from tap
  `REF[M−k]`, and OR from "the last tap, REF[M]". Under an alignment where `REF[M−k]` is correct
  for AND, the last tap is always 1, and the OR result is found one tap earlier. This RTL uses
  `TDC_Th[M−1]` for OR. The two readings differ only in where the *shift* bias puts REF[0].
- **Full-adder readout.** The description says only that the full adder runs like the AND‑MAC
  with unselected word lines grounded. Reading sum and carry from the count of fast stages is this
  design's choice.
- **Control logic.** On the test chip, writes and calibration were driven by bench instruments.
  `op_sequencer` is an on-chip version of the same procedures. Its cycle counts, the overshoot
  rule and `cal_fail` are this design's own choices.
- **Configuration path.** The chip has a scan chain, but its contents are not published. The word
  layout here is invented.
- **Overrange flag.** `overrange` is an addition.
- **Analog constants.** All constants in the three behavioural models are illustrative. They are
  tuned to give steps near 0.55 ns and a calibration resolution below 0.1 ns. They are not fitted
  to measurements.
- **Output driver.** The 50 Ω output driver is not modelled. DEC_O leaves the top as `pulse_out`.
- **XOR step size.** On silicon, the XOR-MAC levels were about 1.3 ns apart and the AND-MAC
  levels 0.55 ns apart. In this model, a stage's fast and slow delays do not depend on which of
  the two devices conducts. Both modes therefore step by the same t_dH − t_dL, about 0.5 ns.
  A wider XOR step needs no change to the digital part, only different reference biases.

## Verifying and changing it

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F` and stops itself with a watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `fefet_cam_array_tb` | program, inhibited and uninhibited erase, read conductances, partial-erase sweep |
| `delay_element_tb` | the stage formula, fast/slow ordering, falling edge |
| `de_chain_tb` | each stage follows its own column |
| `ref_delay_line_tb` | tap times for several bias pairs |
| `tdc_tb` | DEC_O placed in every interval between taps, and clear |
| `therm2bin_tb` | exhaustive, M = 3 and 6 |
| `result_decoder_tb` | every mode, mask and code |
| `line_decoder_tb` | every operation and selection against a reference table |
| `op_sequencer_tb` | pulse order for all weight patterns and both encodings; calibration end on target, overshoot and exhausted code; compute latency |
| `scan_chain_tb` | shift, update, scan-out |
| `td_nvimc_macro_tb` | end to end at the default size (see below) |

The end-to-end test runs with no parameter overrides, in under a second. It does the following:

- measures t_dH and t_dL from `pulse_out` and derives the reference biases from them;
- writes and calibrates three weight loads per encoding, so that all 8 weight patterns appear;
- runs all 64 input/weight pairs of XOR‑MAC and of AND‑MAC;
- runs logic AND/OR on every 2- and 3-column selection, and the full adder;
- provokes an overrange and a calibration overshoot.

It counts each mechanism and fails if any never occurred: program, inhibited erase,
partial-erase pulses, calibrated cells, calibration failures, each mode, mode switches, overrange
scan loads and a capacitor-bank change.

To build with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
    rtl/tdimc_pkg.sv tb/td_nvimc_macro_tb.sv --top-module td_nvimc_macro_tb
./obj_dir/Vtd_nvimc_macro_tb
```

The behavioural models need `--timing`, and they use `real` ports, so a synthesis flow will see
only the digital blocks. To use the digital part with a real array, replace the three models with
the analog macro and keep the same ports. The line-level enums in `tdimc_pkg` are then the
select lines of the bias switches.
