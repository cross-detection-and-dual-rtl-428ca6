# CD-DSM TDC: a carry-chain time-to-digital converter with cross-detection and dual-side monitoring

A time-to-digital converter (TDC) on an FPGA usually measures where a hit falls inside a clock period
by launching the hit into a carry chain and freezing the chain's state with a flip-flop on every tap
at the next clock edge. The frozen word is a thermometer code: ones where the edge has already
passed, zeros beyond. The position of the edge is the fine time. A counter of whole clock periods
gives the coarse time.

Two problems limit such a TDC, and this design addresses both at almost no cost in logic:

* **Bubbles.** The carry outputs of a Xilinx CARRY4 do not switch in index order. In a Virtex-7 the
  even output of each pair switches before the odd one below it (P2 before P1, P4 before P3). The
  captured word then holds "bubbles", and two taps that switch at different times give the same
  code. **Cross-detection (CD)** reads every pair of captured bits swapped, as P2 P1 P4 P3. That
  order follows the real switching order, so the code is clean and each tap becomes a bin of its own.
* **Capture-clock jitter and chain speed.** The SOP position is measured against the capture edge.
  Any jitter of that edge, and any drift of the chain's speed with temperature, moves the SOP.
  **Dual-side monitoring (DSM)** ends every input pulse on a clock edge. That falling edge, the end
  of propagation (EOP), runs through one extra CARRY4. Where the EOP sits in that cell shows how
  far the capture edge has moved. The SOP is corrected by half a tap per tap of EOP displacement.
  The correction also splits every bin in two.

The published channel has 43 CARRY4 cells (172 taps) in the delay line, one monitor CARRY4, a 12-bit
coarse counter and a 550 MHz clock. It reports a 6.1 ps average bin. This RTL reproduces that
structure. It computes the time tag in hardware, and it also sends every raw capture over a UART,
as the published measurement setup did.

## Block map

```
 TIME_IN ──► tdc_input_logic ──TDC_IN──┬──► carry4_chain (1 cell, EOP monitor) ──4──► cd_capture ──M2 M1 M4 M3──┐
 CLK ─────►        (SOP on TIME_IN,     │                                                                        │
                    EOP on next CLK)    └──► carry4_chain (43 cells, delay line) ─172─► cd_capture ─P2 P1 P4 P3─┤
 CLK_CAPTURE ─► all flip-flops below                                                                             │
                                          coarse_counter (12 bit) ──────────────────────────────────────────────┤
                                                                                                                  ▼
                                        time_tag_unit = sop_encoder + dsm_correction + register ──► tag_*
                                        readout_packer ──bytes──► uart_tx ──► uart_txd
```

| File | Role |
|---|---|
| `rtl/tdc_pkg.sv` | Shared constants: 43 cells, 4 taps per cell, 12-bit coarse count, record sync byte |
| `rtl/tdc_input_logic.sv` | Two flip-flops that make the SOP/EOP pulse |
| `rtl/carry4_chain.sv` | **Behavioural model** of the CARRY4 chain (ps delays, not synthesizable) |
| `rtl/cd_capture.sv` | Capture flip-flops and the cross-detection read order |
| `rtl/sop_encoder.sv` | Thermometer-to-binary: the highest 1 of the CD word |
| `rtl/dsm_correction.sv` | EOP position, half-tap correction, hit decision |
| `rtl/coarse_counter.sv` | 12-bit free-running counter |
| `rtl/time_tag_unit.sv` | Encoder + correction + output register |
| `rtl/readout_packer.sv` | Raw capture record per hit, as a byte stream |
| `rtl/uart_tx.sv` | 8N1 serial transmitter |
| `rtl/cd_dsm_tdc_top.sv` | One complete channel |

## The pulse: SOP and EOP

`tdc_input_logic` has two flip-flops with D tied high. The first is clocked by TIME_IN and its
output is TDC_IN. The rising edge of TDC_IN is the SOP and marks the hit. The second flip-flop is
clocked by CLK. It is held clear while TDC_IN is low, so the first CLK edge after the hit sets it.
It then clears the first flip-flop; that falling edge of TDC_IN is the EOP. Clearing the first
flip-flop also clears the second one. The pulse is therefore as long as the gap from the hit to the
next CLK edge, between 0 and 1.818 ns. The EOP is locked to CLK and carries no hit information.
The two cross-coupled clears form a deliberate asynchronous loop. Synthesis tools report it as a
combinational loop. It settles after one clear-to-output delay.

The published drawing shows the two flip-flops, a 'HIGH' D input on each and an inverter symbol
before TDC_IN. The wiring of the clear pins is this design's own, chosen to give the stated
behaviour. No inverter is used.

## Delay line and monitor cell

TDC_IN feeds two carry chains in parallel: the 43-cell delay line (taps P1..P172) and one monitor
cell (taps M1..M4). All 176 taps are sampled on the rising edge of CLK_CAPTURE. CLK_CAPTURE runs at
the CLK frequency with a small phase delay, tuned so that the EOP, which left the input logic on
the CLK edge, has entered the monitor cell but not yet left it. At that capture edge the
delay line holds zeros where the EOP has passed, ones from there up to the SOP front, and zeros
beyond. The monitor holds zeros up to the EOP and ones after it.

`carry4_chain` is a model of the FPGA primitive, not logic. Each tap is a transport-delayed copy of
the input, so short pulses pass intact. Cell *c* adds 43 ps. Inside a cell the outputs switch at
14, 8, 36 and 29 ps for P1..P4, so the order in time is P2, P1, P4, P3, as measured on Virtex-7.
The 43 ps cell delay makes the line 1.85 ns long, just over one clock period, as the published line
is. The individual offsets are this model's own numbers. `DELAY_SCALE_PCT` stretches every delay
and stands in for a slower, hotter chain.

## Cross-detection

`cd_capture` registers the taps in physical order (`raw_q`). It exposes the same bits with every
pair swapped (`cd_q[i] = raw_q[i ^ 1]`). The swap happens after the flip-flops, not in the routing
from the carry outputs. That routing is timing-sensitive, and the published design keeps it
untouched for that reason. The swap costs no logic.

In the model's timing the CD word is always a clean thermometer code. In physical order, whenever
the SOP front has passed P2 but not P1 of a cell, the word has a bubble. A code scanned in
physical order then cannot tell those two taps apart, so the physical-order TDC has about half the
bins. The published measurements show the same effect in silicon, with bubbles left in 2.3 % of the
CD codes. This design adds no bubble correction. A remaining bubble below the SOP front does not
change the encoder's result.

## Dual-side monitoring: the half-tap correction

This is the part that needs the most care.

1. **SOP position.** `sop_encoder` returns the index of the highest 1 in the CD word, plus one. This
   is the first transition seen when scanning from the far end of the line. Zero means no 1.
2. **EOP position.** `dsm_correction` counts the zeros in the CD-ordered monitor word M2 M1 M4 M3.
   That count is how many monitor taps the falling edge has already passed (1..4 for a hit).
3. **Correction.** A late capture edge moves the SOP and the EOP further down their chains by about
   the same number of taps, and so does a faster chain. With a reference EOP position `EOP_REF`:

   ```
   fine_half = 2*sop_pos + (EOP_REF - eop_pos)        (units of half a tap)
   ```

   An EOP one tap short of the reference therefore adds half a tap to the SOP. The factor 0.5 is the
   published one. It was found by experiment on silicon, where rising and falling edges travel the
   chain at different speeds. `EOP_REF = 2` (the middle of the monitor cell) is this design's
   choice; the reference is not given.
4. **Half-tap bins.** The correction is an odd or even number of half taps, depending on where the
   EOP landed. The corrected code therefore takes about twice as many values as the SOP position.
   This is where the published design gets its bin count from 147 to 296 per period.

In the model the rising and falling edges travel at the same speed. The correction there removes
only half of a capture-clock shift; a factor of 1 would remove all of it. The end-to-end bench
measures that reduction. With -10..+18 ps of capture jitter, the spread of the measured hit
position falls from about 9.2 ps to 6.0 ps.

### Which capture holds the hit

A capture is taken every clock cycle, but only one per hit holds both edges. `dsm_correction`
declares a hit when two things are true:

* the first monitor tap (M2) is already 0, so the EOP has entered the monitor;
* some tap of the second delay-line cell (CD positions 4..7) is 1, so the pulse is still in the
  line behind the EOP.

This rejects two other captures. In the capture before the EOP only the SOP has entered the line;
the monitor's first tap is still 1. In the capture after the EOP only the tail of a long pulse is
left at the far end of the line. A hit that arrives within about four taps (≈40 ps) before a CLK
edge makes a pulse too short to reach the second cell, and it is lost. In simulation this happens to
about 1.4 % of random hits. This rule is this design's own; the published text does not say how
hits are qualified.

## From codes to a time tag

`time_tag_unit` registers, one CLK_CAPTURE edge after the capture edge:

| Output | Meaning |
|---|---|
| `tag_valid` | one-cycle pulse per hit |
| `tag_coarse` | coarse count after the capture edge (12 bits, wraps every 7.45 µs) |
| `tag_sop_pos` | SOP position, 0..172 |
| `tag_eop_pos` | EOP position, 0..4 |
| `tag_fine_half` | corrected fine code, signed, half-tap units |

A larger fine code means the hit came earlier in the period, so the hit time is

```
t = tag_coarse * 1818 ps - tag_fine_half * (half-tap delay) + constant
```

Taps are not equal in size. A precise ps value for each code comes from a code-density calibration
on the host, as in the published work. The test benches use the model's mean half-tap, 5.375 ps.

## Readout record

For the first hit seen while idle, `readout_packer` latches the CD-ordered line word, the
CD-ordered monitor word and the coarse count. It sends:

```
0xA5, then 24 bytes of {4'b0, coarse[11:0], eop_cd[3:0], sop_cd[171:0]}, least significant byte first
```

Hits that arrive while a record is being sent are dropped and counted in `dropped` (16 bits,
saturating). The published setup sent the 176 bits and the 12-bit count of every hit to a computer
over a UART. Its format, rate and buffering are not given. The sync byte, the byte order, the lack
of a FIFO and the 115200-baud default are this design's own. At that rate one record takes 2.2 ms.
For a code-density run, use the on-chip tag outputs or raise the baud rate.

## Clocks and timing

| Signal | Frequency | Notes |
|---|---|---|
| CLK | 550 MHz (1.818 ns) | input logic only |
| CLK_CAPTURE | 550 MHz, phase delayed | all capture flip-flops and the back end |

Both clocks come from the FPGA's clock manager, which is outside this RTL. The phase of
CLK_CAPTURE must place the EOP inside the monitor cell. With the model's delays that means
about 9 to 40 ps after CLK; the benches use 21 ps ± jitter. `rst` is synchronous to CLK_CAPTURE for the back
end and asynchronous for the input logic. The coarse counter counts CLK_CAPTURE edges. Its clock
is not specified in the published design.

Latency: the hit is captured at the first CLK_CAPTURE edge after the EOP, and the tag is valid one
edge later. A hit's sync byte is offered to the UART one cycle after the capture.

## What is modelled, what is assumed

* **Carry chains**: behavioural model with this model's own tap delays. The top instantiates
  it, so `cd_dsm_tdc_top` simulates the whole channel but is not fully synthesizable. For an FPGA,
  replace `carry4_chain` by placed CARRY4 primitives with the same ports.
* **Clock manager**: not included; both clocks are inputs.
* **Host computer**: not included; the benches decode the serial line.
* **Design choices where the published text is silent**: the clear-pin wiring of the input logic,
  `EOP_REF`, the hit rule, the clock of the coarse counter, the output register stage, the record
  format, UART frame and rate, dropping hits while busy, and all resets.
* **Hardware encoding.** The published channel does its conversion on the host; only about 22 LUTs
  and 198 flip-flops sit in its core. `sop_encoder` here is a plain 172-input priority search. It
  would need pipelining to close timing at 550 MHz on a real FPGA.

## Simulating

Every bench is self-checking and prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing -Irtl -yrtl rtl/tdc_pkg.sv tb/tb_cd_dsm_tdc_top.sv --top-module tb_cd_dsm_tdc_top
./obj_dir/Vtb_cd_dsm_tdc_top
```

The same command works for any bench in `tb/`. The benches use a `1ps/100fs` timescale. Hit times
sit half-way between whole picoseconds, so a tap edge never lands on the same instant as a capture
edge.

| Bench | What it shows | Run time |
|---|---|---|
| `tb_cd_dsm_tdc_top` | Whole channel at default size. It predicts every captured word from the hit time and the tap delays and checks every tag, the drop count and two UART records. It requires each mechanism to occur: a bubble removed by CD, EOP positions 1..4, a rejected early-SOP capture, a rejected tail capture, a coarse wrap, a dropped hit and a serial record. | ~7 s |
| `tb_code_density` | 90,900 random hits. Bins per period: 84 in physical order, 168 with CD, 337 with CD + EOP correction (the published silicon gave 81 / 147 / 296). Average bin 21.6 / 10.8 / 5.4 ps. Codes with bubbles: 56.4 % in physical order, none in CD order (published: 54.2 % and 2.8 %). DNL / INL over the bins that occur, each in its own LSB: [-0.59 0.10] / [-0.07 0.66] physical, [-0.60 0.55] / [-0.59 1.33] CD, [-0.91 0.69] / [-2.03 2.36] CD + EOP correction. | ~20 s |
| `tb_time_difference` | Two channels measure -1989, -1072, +1012 and +2000 ps. The mean is within 0.5 ps of each set delay, with a FWHM of 15–20 ps. | ~2 s |
| `tb_chain_speed` | Three channels whose carry models run at 95 %, 100 % and 106 % of nominal delay. As the chain slows, the EOP and SOP positions both move lower, which is the drift the monitor senses (mean EOP 2.35 / 2.19 / 2.15 taps). | ~4 s |
| `tb_<block>` | One bench per block: input-logic edge timing, carry-model delays and order, CD mapping, encoder against a reference scan, exhaustive DSM table, counter wrap, tag register, record bytes and drops, UART frames. | < 2 s each |

## Parameters

| Parameter | Default | Where | Origin |
|---|---|---|---|
| `N_CARRY4` | 43 | top, `carry4_chain` | published |
| `N_TAPS` | 172 | capture, encoder, tag unit, packer | published (43 × 4) |
| `COARSE_W` | 12 | top, counter, tag unit, packer | published |
| `EOP_REF` | 2 | top, `dsm_correction`, tag unit | this design |
| `CLKS_PER_BIT` | 4774 | top, `uart_tx` | this design (115200 baud at 550 MHz) |
| `DELAY_SCALE_PCT` | 100 | top, `carry4_chain` | model only (chain speed) |
| `CARRY4_PS`, `OFF0..3` | 43, 14/8/36/29 | `carry4_chain` | model only |

`N_CARRY4` can be changed freely. The hit rule reads the second cell, so keep at least two cells.
The monitor is always one cell, and `dsm_correction` assumes four monitor taps.

## Not covered

The temperature sweep and the three placement sites of the published evaluation are properties of
silicon and placement. An RTL simulation cannot reproduce them; `tb_chain_speed` shows only the
first-order trend of the EOP position with chain speed. The DNL and INL printed by
`tb_code_density` describe the carry model, whose tap delays follow a regular pattern, not real
silicon: the published ranges (about [-0.9 2.5] LSB DNL and [-3.2 6.3] LSB INL for the corrected
code) come from the uneven delays of a placed chain. The same limit holds for the coincidence
measurement with photomultiplier tubes. Only the mechanisms behind those results are exercised here.
