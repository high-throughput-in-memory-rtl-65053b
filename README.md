# XNOR-RRAM: binary XNOR-and-accumulate inside a 128×64 RRAM array

A binarized neural network multiplies ±1 activations by ±1 weights and sums
the products. Each product is an XNOR and the sum is a bit count. This macro
does that arithmetic inside a resistive memory array. The array stores a
64×64 matrix of binary weights. All 128 wordlines are driven at once from a
64-bit input vector, so every column computes its bit count in one analog
step. Each column's bit count shows up as a voltage on its read bitline.
Eight 3-bit flash ADCs turn those voltages into codes, and each ADC serves
eight columns. So one vector yields 64 quantized partial sums in eight clock
cycles, which is 1,024 binary operations per clock.

This repository holds SystemVerilog for the whole macro:

- The digital periphery is synthesizable RTL: scan chain, input generator
  with LFSR, row decoder, read column decoder and programming column
  decoders.
- The analog parts are integer-valued behavioural models: the 1T1R array,
  the 8:1 analog multiplexers, the PMOS pull-up header and the
  voltage-mode sense amplifiers that make up the flash ADCs. They are
  precise enough to check the datapath end to end.

## 1. The XNOR bitcell

One weight occupies two one-transistor-one-resistor (1T1R) cells in the same
column. Their wordlines are `WL[2i]` (even) and `WL[2i+1]` (odd). Each cell
is either in the low-resistance state (LRS, 6 kΩ target) or the
high-resistance state (HRS, above 1 MΩ).

| | even cell (WL[2i]) | odd cell (WL[2i+1]) |
|---|---|---|
| weight +1 | HRS | LRS |
| weight −1 | LRS | HRS |
| input +1 (bit = 1) | off | **on** |
| input −1 (bit = 0) | **on** | off |

Exactly one cell of each pair conducts. It is in LRS when input and weight
agree (XNOR = +1) and in HRS otherwise. A column with `m` matches therefore
has `m` LRS and `64−m` HRS cells in parallel. Its bit count is
`b = 2m − 64`, in −64…+64 and always even. `row_decoder` produces the
differential wordlines. `rram_array` holds the cells and reports every
column's pull-down conductance `m·G_LRS + (64−m)·G_HRS`.

## 2. From bit count to bitline voltage

A static PMOS header pulls the selected bitline up. The conducting cells pull
it down. The result is a resistive divider:

    V_RBL = VDD · G_pu / (G_pu + G_pd)

A higher bit count means more LRS cells and so a lower voltage. A stronger
header raises the whole curve. The header has a 4-bit strength code (`pu`,
0 = strongest), and codes 4 and 5 give the steepest curve around bit count
0, which is where the data concentrate.

The models carry analog quantities as integers: voltages in microvolts
(`volt_t`, 21 bits) and conductances in nanosiemens (`cond_t`, 32 bits). The
header law `G_pu = 320 µS · (16 − pu)` is this model's own choice. At code 4
it gives these voltages:

- 0.70 V at bit count −32.
- 0.57 V at bit count −13.
- 0.50 V at bit count 0.
- 0.45 V at bit count 11.

Across the reference range, neighbouring even bit counts are 7–12 mV apart.
The source shows a similar shape: above 0.6 V only below bit count −32.
Its tuned references at code 4 lie between 0.50 and 0.63 V, slightly higher
than the model's. The law is not a fit to measured silicon. Change
`G_PU_STEP_NS` in `xnor_rram_pkg` to reshape it.

## 3. The confined-range 3-bit flash ADC

Each ADC is seven clocked comparators (`vsa`) on one bitline voltage. Their
references sit at the voltages of bit counts −13, −9, −5, −1, 3, 7 and 11.
That is a linear 4-step grid confined to the narrow band where real
workloads put almost all their bit counts, rather than spread over
−64…+64. Because bit counts are even, each reference falls exactly between
two possible values. Comparator `k` of an ADC uses reference bit count
`−13 + 4k`. It outputs 1 when the bitline is below its reference, that is,
when the bit count exceeds the reference. The seven outputs form a
thermometer code. The number of ones (0…7) is the 3-bit result, and it rises
with the bit count.

The references are inputs of the macro, 8 × 7 values in microvolts, because
on the chip they come from an external source. A real comparator has an
input offset. `vsa` models it with the `OFFSET_UV` parameter (default 0), and
`flash_adc` takes one offset per comparator. Section 6 describes how the
references are tuned against the offsets.

**Comparator polarity.** The source describes this in two ways that
disagree. One sentence says a comparator outputs 1 for the bit count below
its reference. The reference-update rule and the ADC waveform say the code
grows with the bit count. The models follow the second reading.

## 4. Column sharing and timing

ADC `k` senses columns `k, k+8, …, k+56` through its 8:1 multiplexer
(`analog_mux8`). One 8-bit one-hot select, from `col_decoder`, drives all
eight multiplexers, so the eight ADCs always look at column group `s`
together. The interleaved assignment is this design's reading of the block
diagram. An adjacent grouping (ADC k on columns 8k…8k+7) would be an
equally small change in `xnor_rram_top`.

Cycle timing, with `scan_en` low:

| edge | event |
|---|---|
| n | input vector / column select change (register outputs) |
| n+1 | all 56 comparators sample the settled bitline voltages (`adc_q`) |
| n+2 | the scan capture register takes the 56 bits |

In LFSR mode the column select advances every clock and the vector every
eight clocks. The ADCs therefore produce eight results per clock, and all 64
columns of a vector are sensed in eight consecutive clocks. On silicon, the
clock period is set by the wordline-to-bitline settling time, about 6.5 ns,
so 154 MHz × 1,024 ops = 157.7 GOPS. The analog settling itself is not
modelled: voltages are valid in the same cycle.

## 5. Scan chain and operating modes

A single scan chain carries all control and observation:

    scan_in → configuration (28 b) → input vector (64 b) → capture (56 b) → scan_out

While `scan_en` is high, every bit moves one place per clock, most
significant bit of each segment first toward `scan_out`. To load a word
`W = {capture, vector, cfg}` (148 bits), shift `W[147]` first. The bits that
come out during the first 56 shifts are the previous capture, MSB first.
Capture bit `7k + j` is comparator `j` of ADC `k`.

The configuration word (`cfg_t`, MSB first):

| bits | field | meaning |
|---|---|---|
| 27:26 | `mode` | 0 idle, 1 programming, 2 XAC with scanned vector, 3 XAC with LFSR vector |
| 25:22 | `pu` | PMOS header strength code |
| 21:19 | `col_sel` | column group sensed in mode 2 |
| 18:12 | `prog_row` | wordline to program |
| 11:6 | `prog_bl` | bitline to program |
| 5:0 | `prog_sl` | source line to program |

The chain order, the field layout and the capture rule are this design's own.
The source only says that vectors go in and ADC codes come out through a scan
chain.

**Programming (mode 1).** `row_decoder` raises one wordline, the two 64:1
decoders (`prog_col_decoder`) select one bitline and one source line, and the
read multiplexers are off. A one-clock pulse on `prog_set` puts the selected
cell into LRS, and one on `prog_reset` puts it into HRS. On silicon these are
SET and RESET voltage pulses from external equipment, through the BL/SL pins.
The write-verify loop that tightens the LRS spread is run by that equipment,
so it does not appear here. Shifting only the 28 configuration bits is enough
between cells.

**Functional test (mode 2).** Shift in `{vector, cfg}` with `col_sel = s`,
hold `scan_en` low for two clocks, then shift again. The next shift returns
the eight codes of columns `8s+k`. Reading all 64 columns of a vector takes
eight such passes.

**Power measurement (mode 3).** The scanned-in vector seeds a 64-bit LFSR
(x⁶⁴+x⁶³+x⁶¹+x⁶⁰+1, XNOR feedback, so the all-zero state is legal). The LFSR
steps every eight clocks while a counter sweeps the column groups.
`vec_update_o` pulses after each step. The polynomial is this design's
choice.

The array cells have no reset and hold whatever they were programmed to. As
on the real part, they must be programmed before use.

## 6. Tuning the references

Comparator offsets of a few tens of millivolts exceed the 7–12 mV
spacing between neighbouring bit counts. One shared set of ideal references
therefore misreads many columns. Each reference is tuned on its own:

1. Start the reference at 0.6 V.
2. Repeat 1,000 times: apply a random vector whose bit count on a random
   column of that ADC is the reference bit count ±1. Then move the reference
   by `α·βⁿ·(Q_ideal − Q_sensed)`, with `α = 5 mV` and `β = 0.995`.

`tb_vref_calibration` runs this on the read path with fixed offsets of
−30…+30 mV:

- With one unified reference set, 376 of 896 neighbour decisions are wrong.
- After tuning, none are.
- Every tuned reference lies between the two neighbouring bitline voltages,
  shifted by its comparator's offset.

The tuned references are not monotonic across an ADC's comparators, for
the same reason.

## 7. Mapping larger networks

One macro holds a 64×64 tile. A 512×512 fully connected layer needs 64 tiles
and a 128-channel 3×3 convolution needs 36. Tiles are indexed by input
channel blocks on the rows and output channels on the columns, and each 3×3
kernel position is a separate tile. Partial sums from the tiles are added
outside the macro, after each 3-bit code is mapped back to a bit count.
Batch normalisation, pooling and binarisation also happen outside.
`tb_workload_bnn` demonstrates this with a 128×128 layer as 2×2 tiles,
reprogramming the one macro per tile. It maps each code to the centre of its
bin, `−15 + 4·code`, which is a testbench choice.

## 8. What is modelled, and how far to trust it

Synthesizable RTL:

- `scan_ctrl`
- `input_gen`
- `row_decoder`
- `col_decoder`
- `prog_col_decoder`
- the wiring in `xnor_rram_top`

These are small and fully specified by this document. Each has a
self-checking testbench.

Behavioural models:

- `rram_array`
- `analog_mux8`
- `pmos_header`
- `vsa`
- `flash_adc`

They reproduce function, not electrical behaviour, and they differ from
silicon in these ways:

- Cell resistances are exactly 6 kΩ and 1 MΩ. There is no device spread,
  read disturb or comparator noise, so the simulated ADC codes are always
  ideal. They do not show the scatter of measured codes around the ideal
  ones.
- The header law and the resulting voltages are illustrative, not the
  measured transfer curves.
- The comparators use the chip clock. The separate sense-enable timing is
  not modelled.
- SET and RESET are one-clock strobes, with no pulse amplitude, width or
  gate voltage. Forming is not modelled: a cell is usable from its first
  SET or RESET.

Not included at all:

- The high-voltage level shifters between the decoders and the array. They
  only translate voltage. The top brings their inputs out as `wl_o` and
  `mux_sel_o`.
- The on-chip clock generator. `clk` is an input.
- Pads and decoupling capacitors.
- The external instruments.

Assertions in `rram_array` and `xnor_rram_top` catch SET and RESET applied
together, a multiplexer select that is not one-hot, and programming with
other than one wordline.

## 9. Files

| file | content |
|---|---|
| `rtl/xnor_rram_pkg.sv` | sizes, analog unit conventions, `mode_e`, `cfg_t` |
| `rtl/xnor_rram_top.sv` | the macro |
| `rtl/scan_ctrl.sv`, `rtl/input_gen.sv` | scan chain, input vector, LFSR, column counter |
| `rtl/row_decoder.sv`, `rtl/col_decoder.sv`, `rtl/prog_col_decoder.sv` | decoders |
| `rtl/rram_array.sv`, `rtl/analog_mux8.sv`, `rtl/pmos_header.sv`, `rtl/vsa.sv`, `rtl/flash_adc.sv` | behavioural analog models |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_xnor_rram_top.sv` | end to end at full size: programs all 8,192 cells, scan-mode vectors at header codes 4 and 5, 64 LFSR vectors checked every clock |
| `tb/tb_workload_bnn.sv` | 2,000-vector characterisation (128,000 code/bit-count pairs, histogram) and a tiled 128×128 layer |
| `tb/tb_vref_calibration.sv` | reference tuning against comparator offsets |

## 10. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a run that hangs. With Verilator 5, name the package file first
and let `-y rtl` find the modules by name:

    verilator --binary --timing --assert -y rtl --top-module tb_xnor_rram_top \
        rtl/xnor_rram_pkg.sv tb/tb_xnor_rram_top.sv -Mdir obj_top -o sim
    ./obj_top/sim

Substitute any other `tb/tb_*.sv` and its module name. Verilator's default
warnings are fatal, and every testbench builds without any. Each one passes
whatever the uninitialised state, for example with
`./obj_top/sim +verilator+rand+reset+2`. Times for build and run on a
current workstation:

- `tb_workload_bnn`: about 30 s.
- `tb_xnor_rram_top`: about 8 s.
- Every other testbench: under 10 s.

A different analog operating point means new values in `xnor_rram_pkg`:
`G_LRS_NS`, `G_HRS_NS`, `VDD_UV` and `G_PU_STEP_NS`. The testbenches keep
their own copy of these numbers, 6 kΩ, 1 MΩ, 1.2 V and 320 µS per code step,
as an independent reference. They must be changed too.
