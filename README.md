# A delay-line power monitor for detecting attacks on FPGA AI accelerators

An AI accelerator that is under attack draws current differently from one that is
running a normal inference. This holds for adversarial inputs, for a model with a
backdoor when its trigger is present, and for the unusual queries of a
model-extraction attack. Power goes to every block on an FPGA through one shared supply
network. A small sensor placed next to the accelerator can therefore record the supply
fluctuation of each inference without touching the accelerator or its software. A
classifier running elsewhere then labels each recorded trace as benign, adversarial,
backdoor or model extraction.

This repository holds SystemVerilog for the hardware half of such a detector: a
time-to-digital converter (TDC) used as a voltage-drop sensor, with an AXI4-Lite
interface for the processor that reads it. It follows the TDC described in *A Unified
Hardware-based Threat Detector for AI Accelerators* (Yan, Qiu, Zhang). That work used
a Zynq-7000 device with a small NVDLA accelerator. The sizes, the register map and the
clock crossing here are this design's own, because the description does not give them.
The classifier and the trace preprocessing are software and are not part of the RTL.

## How a supply drop becomes a number

The sensor clock (150 MHz in the reference setup) feeds two things:

* It clocks a row of flip-flops.
* After an adjustable *initial delay*, it is also the signal that enters a long carry
  chain. Each of the chain's outputs, called taps, goes to one of those flip-flops.

At every rising clock edge the flip-flops capture the chain's state at that moment. A
clock edge launched earlier has had time to travel some distance down the chain. The
taps it has passed show the new level and the taps beyond show the old one. The result
is a thermometer code such as `0000…0001111…1111`. The position of the step says how
far the edge got.

Gate delay is roughly inversely proportional to supply voltage. When the accelerator
switches hard, the local supply dips and every element of the path slows down. The edge
then covers fewer taps before the capture edge, and the step moves towards the start of
the chain. Reading the step position once per sample gives a trace of the supply, and
so of the accelerator's activity.

With the default element delays (below), the sampled value of tap *i* at a capture edge
at time *s* is

    tap[i] = clk( s − D_init − (i+1)·t_tap )

* `D_init` is the initial delay.
* `t_tap` is the delay of one carry bit.
* Every delay is its nominal value × 1000 mV / V<sub>dd</sub>.

The clock is high for half of each period, so across the whole chain at most one step
is visible. The step is visible only if the chain (128 × 15 ps ≈ 1.9 ns) straddles a
point where `D_init + (i+1)·t_tap` is a multiple of half the clock period. At 150 MHz a
1 % dip in V<sub>dd</sub> stretches a ~5 ns initial delay by ~50 ps, which moves the
step by three to four taps. The full-size testbench shows the sum falling from 64 to
about 48 when the supply goes from 1000 mV to 965 mV.

## Signal path

```
                 sensor_clk (150 MHz)
                     │
   ┌─────────────────▼────────────────────┐  coarse select (4 b)
   │ coarse line: 16 × (LUT → latch), MUX │◄──────────────┐
   └─────────────────┬────────────────────┘               │
   ┌─────────────────▼────────────────────┐  fine select  │
   │ fine line: 16 × LUT, MUX             │◄────────────┐ │
   └─────────────────┬────────────────────┘             │ │
   ┌─────────────────▼────────────────────┐             │ │
   │ tapped line: 32 × CARRY4 = 128 taps  │             │ │
   │ one flip-flop per tap on sensor_clk  │             │ │
   └─────────────────┬──── taps[127:0] ───┘             │ │
   ┌─────────────────▼────────────────────┐  mode, en   │ │
   │ output module: raw / sum / exp. sum  │◄──(2-FF)──┐ │ │
   └─────────────────┬──── out_data ──────┘           │ │ │
   ┌─────────────────▼────────────────────┐           │ │ │
   │ snapshot clock crossing (toggle h/s) │           │ │ │
   └─────────────────┬──── aclk domain ───┘           │ │ │
   ┌─────────────────▼────────────────────────────────┴─┴─┴─┐
   │ AXI4-Lite register block (aclk, 10 MHz)                 │◄─► processor
   └─────────────────────────────────────────────────────────┘
```

| File | Role |
|---|---|
| `rtl/tdc_pkg.sv` | output-mode enum, register offsets, AXI constants |
| `rtl/tdc_coarse_delay_line.sv` | coarse part of the initial delay (behavioural model) |
| `rtl/tdc_fine_delay_line.sv` | fine part of the initial delay (behavioural model) |
| `rtl/tdc_tapped_delay_line.sv` | carry chain (behavioural) and its tap flip-flops |
| `rtl/tdc_output_module.sv` | raw / sum / exponential-sum output stage |
| `rtl/tdc_cdc_snapshot.sv` | moves whole output samples into the AXI clock domain |
| `rtl/tdc_sync_bits.sv`, `rtl/tdc_reset_sync.sv` | synchronisers |
| `rtl/tdc_axil_regs.sv` | AXI4-Lite slave and register file |
| `rtl/uniguard_tdc.sv` | top level |

### The three delay lines are behavioural models

In silicon, the coarse line, the fine line and the carry chain get their function from
the physical delay of placed primitives: LUTs, transparent latches and CARRY4 cells.
Synthesizable logic cannot describe that delay, and a synthesis tool would reduce the
chains to wires. The three modules are therefore simulation models with the same ports
as the real lines:

* Every element is a transport delay whose value is recomputed from the `vdd_mv` input
  at each edge.
* Each element is written as a separate process, so the structure of the chain stays
  visible: LUT and latch per coarse stage, LUT per fine stage, one process per carry
  bit.
* The tap flip-flops in `tdc_tapped_delay_line` are ordinary `always_ff` registers.

To build the sensor on a real FPGA, replace the bodies of these three modules with
vendor primitives (for example `LUT1`, `LDCE`, `CARRY4` and `FDRE` on 7-series parts).
Keep them from being optimised away, and fix their placement with location constraints
so that the chain runs up one carry column. Everything else in `rtl/` is
synthesizable as written.

`vdd_mv` is a top-level input only because of these models. It stands for the supply
rail. In a testbench it plays the part of the accelerator's load. On a real device it
has no counterpart and should be left unconnected, or tied to 1000.

Default element delays, all chosen here as typical 28 nm values:

| element | delay |
|---|---|
| LUT | 100 ps |
| latch | 250 ps |
| MUX | 150 ps |
| carry bit | 15 ps |

With these delays:

* The coarse MUX reaches an initial delay of 0.5–5.75 ns in 350 ps steps.
* The fine line adds 0.25–1.75 ns in 100 ps steps.
* Together they cover more than one 6.67 ns sensor period, so any starting phase can
  be brought into the 1.9 ns window of the chain.

## Calibration

Where the step lands depends on the device, the placement and the temperature, so it
must be found at start-up. The driver on the processor does this in software, in two
nested loops:

1. For every coarse setting, and within it every fine setting, write `DELAY`.
2. Wait for a fresh sample and read the sum.
3. Keep the setting whose sum is closest to the middle of the chain (64 of 128).

In the full-size testbench this search visits all 256 settings. For 165 of them the
step is inside the chain; for the other 91 the chain is all ones or all zeros. The
search ends at coarse 11, fine 11, sum 64. The end-to-end testbench contains this
driver loop as a behavioural model. The hardware only provides the two MUX controls in
the `DELAY` register and the `COUNT` register used to wait for fresh data.

## Output forms

The output module turns the 128 tap bits into one of three forms. The forms are taken
from the reference design; the exact definitions are this design's reading of them.

| `mode` | name | `out_data` |
|---|---|---|
| 0 | concatenate | the 128 tap bits as captured |
| 1 | sum | number of taps at 1 (0..128) |
| 2 | exponential sum | `acc`, updated every cycle as `acc ← acc − (acc >> 4) + sum` |

The exponential sum weights a sample *k* cycles old by (15/16)<sup>k</sup>. It is a
cheap low-pass filter, and a constant sum *s* settles to 16·*s*…16·*s*+15. The
accumulator runs in every mode, so switching to mode 2 gives a settled value at once.
The weight shift is the parameter `EXP_SHIFT`.

The mode is a run-time register field. In the reference design the choice is an IP
setting made at build time. Here the parameter `DEFAULT_MODE` gives its reset value.
Outputs are registered: `taps` changes one sensor clock after the capture and
`out_data` one more.

## Register map and reading a trace

AXI4-Lite, 32-bit data, 8-bit byte addresses:

| offset | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] enable (reset 0), [2:1] mode (reset `DEFAULT_MODE`) |
| 0x04 | DELAY | rw | [7:0] coarse select, [15:8] fine select (reset 0); values past the last stage are stored as the last stage |
| 0x08 | INFO | ro | [7:0] N_COARSE, [15:8] N_FINE, [31:16] TAPS |
| 0x0C | COUNT | ro | number of samples that have reached the AXI side |
| 0x10 | OUT0 | ro | output bits [31:0] of the newest sample; the read also latches the whole sample |
| 0x14, 0x18, 0x1C | OUT1..3 | ro | bits [63:32], [95:64], [127:96] of the sample latched by the last OUT0 read |

Responses:

* Unknown or unaligned addresses return SLVERR and data 0.
* Writes to read-only registers return SLVERR and change nothing.

Transfers:

* A write is accepted when AWVALID and WVALID are both high and no response is pending.
* A read is accepted when ARVALID is high and no read data is pending.
* The response follows one cycle later.
* One transaction of each kind is handled at a time.

There is no trace memory; the reference design uses no block RAM either. The driver
builds a trace by reading `OUT0` repeatedly. Each read returns the newest sample that
has crossed into the AXI domain. A lower AXI clock therefore gives fewer points per
trace, not a different sensor.

**Clock crossing.** `tdc_cdc_snapshot` hands samples from the 150 MHz domain to the AXI
domain with a toggle request/acknowledge pair:

* The source copies a sample into a holding register and flips `req`.
* The destination copies the holding register once it sees `req` change, then flips
  `ack`.
* The holding register cannot change until `ack` comes back. An assertion checks this.

Every value the AXI side sees is therefore a single whole sample. A new one arrives
about every three AXI cycles plus three sensor cycles, roughly every 320 ns at
10 MHz/150 MHz. Samples in between are dropped on purpose.

The MUX selects go straight from the register to the delay lines, since they are
static during measurement. Enable and mode pass through two-flip-flop synchronisers.
The sensor-side reset is `aresetn` synchronised to `sensor_clk`. After changing
`DELAY` or `CTRL`, wait until `COUNT` has advanced by two before trusting `OUT0`.

## Sizes and parameters

| parameter | default | origin |
|---|---|---|
| sensor clock / AXI clock | 150 MHz / 10 MHz (testbench) | reference setup |
| 4 flip-flops per CARRY4 | fixed | reference design |
| `N_COARSE` | 16 | this design |
| `N_FINE` | 16 | this design |
| `N_CARRY4` | 32 (128 taps) | this design |
| `EXP_SHIFT` | 4 | this design |
| `DEFAULT_MODE` | sum | this design |
| element delays | see above | this design |

The reference implementation reports 1051 LUTs and 1505 flip-flops, with no block RAM
or DSP. At the defaults this RTL has the 128 tap flip-flops plus about 620 flip-flop
bits elsewhere (a generic synthesis run, before FPGA mapping):

| part | flip-flops |
|---|---|
| tap registers (inside the carry-chain model) | 128 |
| output register, accumulator, valid | 128 + 13 + 1 |
| crossing: holding register and destination register | 2 × 128, plus 7 of handshake |
| AXI side: read latch, read data, configuration, counter, responses | about 210 |
| synchronisers | 7 |

The delay-line LUTs and latches are not included, because they are modelled.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_tdc_coarse_delay_line`, `tb_tdc_fine_delay_line`: measure the delay of
  both edges to the femtosecond for every MUX setting at 1000, 950 and 1050 mV, and
  compare it with the sum of the element delays.
* `tb_tdc_tapped_delay_line`: drives the chain with the sampling clock shifted by
  several initial delays and checks all 128 captured bits against the formula above,
  at three supply voltages.
* `tb_tdc_output_module`: 3000 cycles of random and thermometer tap words, with random
  mode and enable changes, against a reference model.
* `tb_tdc_axil_regs`: register read-back, byte strobes, clamping, SLVERR cases,
  the sample counter, and tear-free 128-bit reads while new samples arrive.
* `tb_uniguard_tdc`: the whole IP at its default sizes with 150 MHz and 10 MHz clocks.
  It runs the calibration loops, checking each of the 256 readings against a delay
  model of the lines to within one tap. It then steps the supply, reads the raw and
  exponential-sum forms, captures a 64-point trace while the modelled accelerator
  alternates between idle (1000 mV) and busy (965 mV), and finally disables the
  sensor. It counts each of these mechanisms and fails if any never happened. It takes
  two to three minutes to simulate, because the carry chain is simulated edge by edge:
  about 360 events per sensor cycle.
* `tb_axi_clock_factors`: the whole IP at its default sizes with the AXI clock lowered
  to 1/2, 1/3, 1/4 and 1/5 of 10 MHz. At every AXI clock each reading of a polled trace
  must equal the predicted idle or busy value. The time a 16-point trace takes must
  scale with the clock: 9.65 µs at 10 MHz, 48.25 µs at 2 MHz.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/tdc_pkg.sv tb/tb_uniguard_tdc.sv --top-module tb_uniguard_tdc
obj_dir/Vtb_uniguard_tdc
```

Each file declares its own `timeunit`. The delay-line models and the testbenches that
time them use 1 fs; the rest use 1 ps.

Verilator warns about the models, and the warnings are expected:

* `ZERODLY`: the element delays are computed at run time.
* `SYNCASYNCNET`: the carry chain's outputs are both driven by delays and sampled by
  flip-flops.

One simulator limitation matters if you change the delays. Verilator can lose updates
when one element has several delayed changes pending at once. Keep every element
delay well below half the sensor period; the defaults are 15–250 ps against 3.33 ns.

## Where this departs from the reference, and what is left out

* **Sizes, element delays, register map, reset values and clock crossing** are this
  design's choices. None of them is published.
* **"Exponential sum"** is only named in the reference. Here it is read as an
  exponentially weighted running sum of the tap count. If the original meant something
  else, only `tdc_output_module` changes.
* **Output form:** in the reference it is an IP setting. Here it is a register field.
* **Tap capture:** one flip-flop rank per tap, as in the reference drawing. No
  metastability filtering is added, so a tap that changes exactly at the capture edge
  may read either way. That costs at most one count.
* **Not in the RTL:**
  * calibration: driver software;
  * averaging and reshaping of the traces: host software;
  * the detection network: a convolution, a five-layer bidirectional GRU of width
    128, GELU and fully connected layers, trained and run on a host GPU;
  * the accelerator being protected.
