# IMAGINE: a charge-domain compute-in-memory CNN accelerator in SystemVerilog

IMAGINE runs the 3×3 convolutions and fully-connected layers of a small CNN inside
an SRAM. Inputs are 1 to 8 bits, weights 1 to 4 bits, outputs 1 to 8 bits. A
1152 × 256 array of capacitively coupled bitcells does the multiplications.
Every column of the array adds its products as charge on one wire, the dot-product
line (DPL), so one operation computes 256 dot products of up to 1152 terms. A
small charge-sharing unit below every four columns combines the input bits and
the weight bits. A successive-approximation ADC per column turns the DPL voltage
back into a code. That ADC also applies the batch-normalisation gain and offset
of the layer (analog batch normalisation, ABN).

Two ideas make the analog result use the ADC's range well:

* **Split dot-product line.** The 1152 rows form 32 units of 36 rows. Each unit
  covers 4 input channels × 3 × 3 kernel positions. Units that a layer does not
  use are disconnected from the DPL, so they add no capacitance. A layer with
  few channels therefore still produces a large voltage swing.
* **Gain and offset in the ADC.** The ADC's per-step charge injection is
  scaled by 1/γ (γ = 1 … 32). This zooms the conversion range onto the narrow
  distribution of dot products. A 5-bit offset shifts the DPL before the
  conversion, and a 7-bit calibration code cancels the comparator offset.

A digital datapath around the macro moves 128-bit words between two 32 kB local
memories (LMEMs) and the macro. It reshapes the input map into kernel windows
(im2col), applies zero padding, and overlaps fetching, computing and storing.

This RTL models the whole accelerator. Digital parts are synthesizable. The analog
parts (array, accumulation units, reference, ADCs) are behavioural models with
`real` voltages that follow the charge equations phase by phase.

## Block map

```
            host_* (LMEM access when idle)         rw_* (weights, ABN offsets)
                 |                                      |
 +------+   +----v----+  128b  +------------+  +--------v------------------------------+
 |LMEM A|<->| fetch   |------->| im2col_unit|->| cim_macro                             |
 |LMEM B|<->| (stage1)|        | +cim_decoder  |  input_shift_reg -> bitseq_driver     |
 +------+   +---------+        +------------+  |  -> dp_array -> 64 x mbiw_unit         |
     ^                                          |  -> 256 x dsci_adc (+ ref_gen)        |
     |            +------------+  128b          |  -> output_reg     time_gen (clk_tg)  |
     +------------| output_mux |<---------------+---------------------------------------+
                  +------------+
                  control_unit: layer walk, handshakes, addresses, counters
```

| File | Kind | Role |
|---|---|---|
| `imagine_pkg.sv` | package | sizes, config/control structs, capacitances and voltages, transfer counts |
| `imagine_top.sv` | RTL | two LMEMs with ping-pong swap, host ports, datapath, macro |
| `control_unit.sv` | RTL | walks a layer; fetch → buffer → shift register → CIM → store |
| `lmem.sv` | RTL | 2048 × 128b synchronous RAM |
| `im2col_unit.sv` | RTL | 128b data buffer, routes values to shift-register groups, padding, signed→unsigned |
| `cim_decoder.sv` | RTL | CH_31:0 / CS_K,2:0 group enables for each transfer |
| `input_shift_reg.sv` | RTL | 32 × 3 × 4 × 3 registers of 8 bits, kernel-column shift |
| `bitseq_driver.sv` | RTL | drives one input bit per DP phase, only in connected units |
| `time_gen.sv` | RTL | phase sequencer of the macro on the fast clock `clk_tg` |
| `output_reg.sv` | RTL | 256 × 8b master (written by the SAR) / slave (read by the datapath) |
| `output_mux.sv` | RTL | picks the result columns and packs them into 128b words, unsigned→signed |
| `cim_macro.sv` | behavioural | the macro: all of the above plus the analog models |
| `dp_array.sv` | behavioural | weight storage (R/W port) and DPL voltage of each column |
| `mbiw_unit.sv` | behavioural | input-bit and weight-bit charge sharing of a 4-column block |
| `ref_gen.sv` | behavioural | per-gain voltage step of each SAR cell |
| `dsci_adc.sv` | behavioural | offset, calibration, SAR conversion and comparator of one column |

## The analog core, as modelled

### Dot product of one input bit

During the DP phase, row *i* is driven when bit *k* of its input is 1. Its
cell couples +C_c or −C_c onto the column's DPL, depending on the stored weight
bit (1 counts as +1, 0 as −1). With *n* connected units, the DPL moves from the
precharge level V_DDL = 0.4 V to

```
V_DP = V_DDL · (1 + a · Σ_i x_i[k]·(2W_i − 1)),   a = C_c / (36·n·C_c + n·C_p,loc + C_L)
```

Here C_c = 0.7 fF and C_L = 40 fF (ADC and accumulation load) are the chip's
published values. C_p,loc = 2 fF of wiring per unit is this model's choice.
With it, the usable swing grows with the channel count: about ±0.15 V full
scale at 4 channels and ±0.35 V at 128. Only the units below C_in/4 connect.

### Multi-bit inputs and weights (`mbiw_unit`)

Inputs are applied LSB first. After each bit, the DPL shares its charge with an
accumulation capacitor of equal size (α_mb = ½):

```
V_acc,k = ½·V_DP,k + ½·V_acc,k−1,   V_acc,−1 = V_DDL
```

After r_in bits, bit *k* carries weight 2^(k−r_in). A multi-bit weight occupies
2 or 4 adjacent columns, one bit per column, LSB in the lowest column. They are
combined the same way: first the LSB column shares with a freshly precharged
capacitor, then neighbouring columns share pairwise. The result ends on the
MSB column of the group, with weight bit *k* scaled by 2^(k−r_w). Blocks of four
columns give 256, 128, 64 or 64 output channels for r_w = 1, 2, 3, 4. A 1-bit
input or weight skips its stage.

The golden model used by the testbenches (`tb/tb_golden_pkg.sv`) is the closed
form of the same arithmetic. For column group *o*:

```
dV = V_DDL · a · Σ_k 2^(k−r_w) · S_k / 2^r_in     (no /2^r_in if r_in = 1, no 2^(k−r_w) if r_w = 1)
S_k = Σ_i x_i · (2W_i,k − 1)                       (x_i the unsigned input value)
```

### ADC with gain and offset (`dsci_adc`, `ref_gen`)

At the end of the accumulation, the ABN offset β (5-bit signed, ±30 mV range,
30/16 mV per step) and the calibration code (7-bit signed, 0.47 mV per step)
shift the DPL. The SAR then decides r_out bits, MSB first. Each decision compares
V_DPL plus the comparator offset against V_DDL. Each update moves V_DPL by ∓ the
step of the next SAR cell:

```
v_step[m] = α_adc · V_DDH · 2^(m−7) / γ,   m = 6 … 0,   V_DDH = 0.8 V, α_adc = 0.5 (assumed)
```

The resulting code is

```
D = clip( floor( 2^(r_out−1) + γ · dV / (α_adc · V_DDH / 2^(r_out−1)) ), 0, 2^r_out − 1 )
```

so γ narrows the full scale from ±0.4 V to ±0.4/γ V. Calibration precharges the
DPL to V_DDL and runs seven decide/update steps of 32, 16, 8, 4, 2, 1 and 1
codes on the calibration capacitor. This cancels the comparator offset to within
about one 0.47 mV step. The comparator offset of each column is the
`SA_OFFSET` parameter of `dsci_adc`. `cim_macro` and `imagine_top` set it per
column from a fixed pseudo-random pattern scaled by `SA_SIGMA` (default 0).

### Phase sequence (`time_gen`)

The macro runs on a second clock, `clk_tg`, with one phase per cycle:

```
for each input bit:   PRE (precharge DPL; also C_acc on the first bit)  DP  ACC (skipped if r_in = 1)
if r_w > 1:           WINIT (precharge C_acc)  LSB (self-weighting)  ACCW × (1 or r_w−1 pair steps)
ADC:                  offset injection, then DEC (CS_SAR[b]) / UPD alternating, r_out decisions
calibration:          CPRE, then 7 × CSTEP
```

A full 8b × 4b × 8b operation takes 45 `clk_tg` cycles. With `clk_tg` at least 46×
faster than `clk`, one macro operation completes within one datapath cycle.
This matches the published N_cim = 1. Requests cross from `clk` to `clk_tg` as
toggles. Assertions check that a request never arrives while the sequencer is
busy.

The output register has two controls. The SAR writes the master bit by bit. The
datapath copies master to slave with `cs_out`. The next conversion can
therefore start while the previous result is still being stored.

## Datapath and memory layout

### Input map format

The input map is stored as *bands*, one per output row *y*. For each image
column *x* of the band, the three kernel rows y−pad … y−pad+2 are packed into
consecutive 128-bit words, bits first, then channels, then kernel rows:

```
bit position p = (k · C_in + c) · r_in + b,   word = in_base + (y·W + x)·N_in + ⌊p/128⌋
N_in = ceil(3 · r_in · C_in / 128)
```

Rows outside the image are don't-care. The pad rows and pad columns are
replaced by the code of zero in hardware. Storing bands repeats each image row
three times. This is this design's reading of "precision first, channel second,
kernel last". It lets one fetched word feed one or more whole kernel rows (small
layers) or part of one kernel row (large layers).

`cim_decoder` turns the transfer index into the group enables CH_i (which
4-channel unit) and CS_K,j (which kernel row). `input_shift_reg` shifts the
three kernel columns of every enabled group on the last transfer of a column
and loads the new one. Sliding the window by one pixel therefore costs one
kernel column (N_in words), not three. The first window of a row costs 3·N_in.

Supported layer shapes: C_in ∈ {4, 8, …, 128} and r_in, r_out ∈ {1, 2, 4, 8},
so that a value never straddles a word. r_w ∈ {1, 2, 3, 4}, stride 1, 3×3
kernels, padding 0 or 1. A fully-connected layer of 9·C_in inputs is a 3×3 map
without padding (one CIM operation). Signed mode inverts the MSB on the way in
(two's complement → offset binary) and on the way out.

### Outputs

Each output pixel takes N_out = ceil(r_out · C_out / 128) words at
`out_base + (y·W_out + x)·N_out + t`. Word *t* holds channels t·128/r_out
onward, channel *o* at bit (o mod 128/r_out)·r_out.

### Pipeline

`control_unit` issues fetches. A fetched word goes to the data buffer and then
into the shift register. The LMEM read data holds, so any stage can stall. The
macro fires on the cycle that loads the last word of a window. The output
register is copied (`cs_out`) once the previous result's store is finishing.
The store then writes N_out words. In steady state, one output pixel costs:

| mode | cycles per output pixel |
|---|---|
| pipelined, input-dominated | N_in |
| pipelined, output-dominated | N_out (the fetch stalls) |
| serial (`pipelined = 0`) | 2 + N_out with N_in = 1, i.e. the published 1 + N_cim + N_out |

These are the published cycle equations with N_cim = 1. `tb_control_unit`
measures all three.

## Interfaces of `imagine_top`

| Port | Meaning |
|---|---|
| `clk`, `clk_tg`, `rst_n` | datapath clock; macro timing clock (≥ 46× `clk`, in phase); active-low reset |
| `cfg` (`layer_cfg_t`) | r_in, r_w, r_out, C_in, gain code g (γ = 2^g), pad, pipelined, in/out signed, image H × W, input and output base addresses |
| `start` / `busy` / `done` | one-cycle start; busy during the layer; done pulses at the end |
| `swap` | 0: LMEM A is the input and B the output; 1: the reverse |
| `cal_start`, `cim_busy` | ADC offset calibration request; macro sequencer running |
| `host_en/we/sel/addr/wdata/rdata` | 128-bit access to LMEM A (`sel` = 0) or B while idle; read data next cycle |
| `rw_en/we/addr/wdata/rdata` | 32-bit weight port: word `row·8 + col/32` for rows 0…1151; words 9216…9279 hold four 5-bit ABN offsets each (byte lanes) |
| `n_cycles`, `n_cim`, `n_stall`, `n_pad` | per-layer counters: cycles, macro operations, fetch-stall cycles, padded transfers |

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/imagine_pkg.sv tb/tb_golden_pkg.sv rtl/*.sv tb/tb_imagine_top.sv --top-module tb_imagine_top
./obj_dir/Vtb_imagine_top
```

`tb_imagine_top` uses the full default sizes. It writes weights and offsets,
calibrates, and runs three layers:

* L1: 4b, 16 channels, padded, output-dominated, A → B.
* L2: 8b signed, 64 channels, 4b weights, input-dominated, B → A.
* L3: binary inputs, serial mode, gain 4.

It checks every stored output against the closed-form model (±1 code; 2927 of
2944 codes are exact). It also checks that stalls, both pipelining regimes,
serial mode, padding, the swap, calibration, signed conversion, gain,
multi-bit weights and binary inputs all occurred. It runs in about 20 s.
`tb_workloads` runs, on the same full-size design:

* fully-connected layers of 16 channels at gains 1, 4 and 32, and of 128
  channels (all 1152 rows);
* one 256-neuron pass of the first layer of a 784-512-128-10 perceptron,
  with signed 8-bit data;
* a padded 32 × 32 convolution (16 channels, 4-bit inputs, weights and
  outputs). Its input bands and its outputs each fill one whole LMEM. It
  completes 1024 outputs in 2181 cycles, two per output plus the row starts.

All 66816 codes match the model exactly. The run takes about a minute.

`tb_cim_macro` exercises the macro alone over many precision and gain
settings, with a 5 mV comparator-offset spread that calibration must remove.

## How far to trust it

* The digital datapath is cycle-accurate to this design's own choices. The
  published cycle equations hold exactly.
* The analog models are ideal charge equations. They have no noise, leakage,
  transistor charge injection, ladder mismatch, DP-duration dependence or
  supply effects. Measured chips show INL of a few LSB at high gain and
  extra error at high voltage. None of this is modelled.
* Model constants that are not published values: C_p,loc = 2 fF, α_adc = 0.5, one
  `clk_tg` cycle per phase. The ABN offset range uses the ±30 mV from the text.
  A block diagram of the ADC prints a different range (20 mV).
* Not built:
  * the host MCU, SPI/JTAG, power management and off-chip DRAM (their accesses
    appear as the `host_*`, `rw_*` and `cfg` ports);
  * the bias reference circuit;
  * the transistor-level bitcell and sense amplifier;
  * the chip's power-measurement test modes that loop on one input patch or
    one image.
* Departures from the chip: flip-flops with enables replace clock-gated
  latches. A single `clk_tg` replaces the self-timed pulse generator.
* Capacity: a band layout of a 32 × 32 padded map needs 1024·N_in words, so it
  fits a 2048-word LMEM only when r_in·C_in ≤ 64. Layers with more than 128
  input channels or more output channels than columns must be split by
  software. This RTL has no digital partial-sum accumulation.
