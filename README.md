# Error-field feedback electronics for the KTX reversed field pinch — RTL

KTX is a reversed-field-pinch fusion device whose vacuum vessel and copper
shell split into two "C" halves so the machine can be opened. The vertical gap
between the halves cuts the eddy-current paths in the shell, and that leaves
an error field. This RTL is the digital part of an active feedback loop that
cancels it. Sixteen Rogowski coils around the gap measure the shell currents.
A sample board digitises them, corrects each reading for the mutual
inductance of its neighbours, and runs a PID step per coil. It then sends the
16 results over an RS-485 link to a coil control board, which writes them
into 16 DACs. The DACs drive the power amplifiers of the error-field control
coils.

The design follows the paper "The Electronics Design of Error Field Feedback
Control System in KTX" (T. Xu, K. Song, J. Yang, USTC). That paper gives the
architecture, the devices, the correction equation with its inductance
matrix, and the discrete PID equation. It does not give number formats,
timing, the link protocol, the control period or register maps. Those are
filled in here, and each such choice is listed in
[Choices made here](#choices-made-here-not-in-the-source).

```
 Rogowski  2-stage   2 x ADS8528     sample board FPGA (sample_module)                        coil board FPGA (coil_control_module)        16 x DAC8831  op-amp  power amp
 coils x16 ampl.  -> 8 ch, 16 bit -> adc_ctrl x2 -> data_store -> mi_correction -> pid_ctrl -> rs485_tx ==RS-485==> rs485_rx -> frame reg -> dac_spi x16 -> +-5 V -> control coils
                                                     |                                          network in -----^      |
                                                     +-> record port (DDR2 / network)                  echo to host <--+
```

## One control period

Everything runs once per control period: 4000 clocks at 200 MHz, or 20 µs by
default (parameter `PERIOD` of `sample_module`).

1. **Conversion** (`adc_ctrl`, one per ADC). The period tick raises CONVST on
   both ADS8528 devices, so all 16 channels are sampled at the same instant.
   The controller waits for BUSY to rise and fall, then reads channels 0..7
   over the parallel bus (RD low for 4 clocks, high for 3).
2. **Gathering** (`data_store`). The two ADCs deliver their samples in step.
   ADC 0 fills paths 0..7 and ADC 1 fills paths 8..15. When all 16 are in,
   the frame is streamed out one path per clock, path 0 first. Each word also
   goes to a record port with a word address that keeps counting up; the
   board stores these words in DDR2 or sends them to the host.
3. **Mutual inductance correction** (`mi_correction`). The first result comes
   5 clocks after the last sample, then one per clock.
4. **PID** (`pid_ctrl`). Three clocks per path, pipelined at one path per
   clock.
5. **Link** (`rs485_tx` → `rs485_rx`). Each path is one 23-bit word at
   40 Mbit/s. The 16 words take about 9.3 µs.
6. **DAC update** (`coil_control_module`, `dac_spi` ×16). The word for path 15
   closes the frame. All 16 SPI writes then start together and take 350 ns.
   Each DAC output changes on its CS rising edge.

In simulation, with a 1.5 µs ADC conversion, the time from the period tick to
the DAC load is 11.2 µs. That leaves almost half of the period free. The link
uses most of the time, so a shorter period needs a faster link or fewer bits
per word.

## Mutual inductance correction

The paper models the coupling between the coils as

    U_out = v · M · (U_in · β_R + α_0)

`U_in` holds the 16 coil voltages and `β_R` and `α_0` are an adjustable gain
and offset. `v` is the reciprocal of the power amplifier's gain. `M` is the
measured 16×16 mutual inductance matrix (in µH). It is circulant and
symmetric, with only three distinct non-zero entries:

| distance between coils (mod 16) | 0 | 1 | 2 | 3..8 |
|---|---|---|---|---|
| entry | 620 | −7 | −1.67 | 0 |

The indices wrap around: coil 0 and coil 15 are neighbours. So each output
only needs five inputs:

    s_i = c0·y_i + c1·(y_{i−1} + y_{i+1}) + c2·(y_{i−2} + y_{i+2}),   y_j = x_j·β_R + α_0

The hardware works in two phases, as the paper describes:

* **Per sample, as it arrives.** Only the upper 12 bits of the 16-bit ADC code
  are used. That follows the paper's statement that 12-bit data enters the
  multipliers, even though the ADC itself has 16 bits. The sample is scaled
  and offset to `y`. Then `y` is multiplied by `c0`, `c1` and `c2`, and the
  three products are stored under the sample's path number. Samples may
  arrive in any order.
* **After all 16 paths of the period are in.** One output per clock adds its
  five stored products. The sum is shifted down by the matrix scale,
  multiplied by `v`, shifted down again and saturated to 16 bits.

Fixed-point formats:

| quantity | format | reset value |
|---|---|---|
| x (input) | signed 12-bit integer | – |
| β_R | signed 16, Q8.8 | 1.0 (256) |
| α_0 | signed 16, in units of x | 0 |
| c0, c1, c2 | signed 20, Q12.8 | 620, −7, −1.67 (158720, −1792, −428) |
| v | signed 18, Q2.16 | 1/620 (106) |
| output | signed 16, saturated | – |

With the reset values the diagonal gain is about 620/620 = 1. An output is
then roughly the coil's own 12-bit reading minus the small coupling from its
neighbours. The paper's wording ("two different multipliers") suggests that
its implementation treats the diagonal term in some other way, but it does not
say how. Here it has its own multiplier.

## Incremental PID

The error is `e = set point − corrected value`. The controller uses the
velocity form of the discrete PID:

    u_k = u_{k−1} + a0·e_k + a1·e_{k−1} + a2·e_{k−2}
    a0 = Kp(1 + Δt/Ti + Td/Δt)    a1 = −Kp(1 + 2Td/Δt)    a2 = Kp·Td/Δt

`a0`, `a1` and `a2` are registers in Q6.12 format (4096 = 1.0), so a new
Kp, Ti or Td is loaded by computing these three numbers in software. Each of
the 16 paths keeps its own `u_{k−1}`, `e_{k−1}` and `e_{k−2}`. The three
multipliers are shared in a 3-stage pipeline. `u` is kept with 12 fraction
bits and clamped to the 16-bit output range before it is stored, so the
integral cannot wind up while the output is saturated. The `sat` output marks
every clamped result. At reset the gains are Kp = 1 with no integral or
derivative term (a0 = 1, a1 = −1, a2 = 0), which makes `u_k = e_k`. The paper
leaves the gains to be tuned on the machine. Writing bit 1 of the control
register clears every path's history.

## The board-to-board word

The line idles high. Each word is sent least significant bit first:

| bits | start | path[3:0] | data[15:0] | parity | stop |
|---|---|---|---|---|---|
| value | 0 | coil number | signed controller output | even, over path and data | 1 |

Each bit lasts 5 clocks (40 Mbit/s at 200 MHz). With the slightly longer
stop bit, one word takes 116 clocks. The transmitter queues up to 16 words
and raises the transceiver's driver enable `de` while words are on the line.
The receiver runs from the coil board's own clock. It synchronises the line
and resynchronises on every start bit. It then samples each bit near its
centre, so it tolerates a small clock mismatch between the boards. A word
with bad parity or a low stop bit is reported (`par_err`, `frm_err`) and
dropped, and that coil keeps its previous value for one period. Because the
path number travels with the data, one lost word never shifts the other
coils.

## DAC write

`dac_spi` writes one DAC8831:

* CS goes low, then 16 SCLK periods at 50 MHz follow, most significant bit
  first.
* The DAC takes SDI on each rising SCLK edge. The shift register moves left on
  each falling edge (6EAC → DD58 → BAB0 → …).
* CS rises after one more half period, which updates the output.
* A write keeps `busy` high for 70 clocks.

The DAC with its output amplifier spans −5 V to +5 V and takes offset-binary
codes. The coil board therefore inverts the sign bit of each two's-complement
value: −32768 → 0x0000, 0 → 0x8000, +32767 → 0xFFFF.

## Parameter registers (sample board)

The registers are written through `cfg_we`, `cfg_addr` and `cfg_wdata`. The
low bits of each write are used.

| addr | register | width |
|---|---|---|
| 0 | β_R | 16 |
| 1 | α_0 | 16 |
| 2, 3, 4 | c0, c1, c2 | 20 |
| 5 | v | 18 |
| 6 | PID set point | 16 |
| 7, 8, 9 | a0, a1, a2 | 18 |
| 10 | bit 0: run periodic sampling (1 after reset); bit 1: clear PID history (self-clearing) |  |

The coefficients are used while a frame passes through. Write them just after
`period_tick`, or with bit 0 of register 10 cleared (sampling stopped).

## Choices made here, not in the source

* Clock of 200 MHz on both boards, with a separate clock and reset for each
  board. All resets are asynchronous and active low.
* Control period of 20 µs. The paper gives no sampling rate.
* All number formats, reset values of β_R, α_0, v and the PID gains, and the
  output saturation and clamping.
* A third multiplier for the diagonal matrix term (see above).
* The RS-485 word format, parity, FIFO and driver-enable behaviour.
* The ADC bus timing, the read order, and the configuration write after reset.
  `CFG_WORD` is a placeholder: set it from the ADS8528 data sheet for the
  wanted range and mode.
* Mapping ADC 0 to paths 0..7 and ADC 1 to paths 8..15.
* A frame closes on path 15, and all 16 DACs load together.
* A network input on the coil board, chosen by `src_sel`, and an echo stream
  back to the host. The network interface, the DDR2 controller and the host
  protocol are not part of this RTL. Their data streams are ports.
* The parameter register port and its map.

Not built: anything analog or external. That includes the coils, the
amplifiers, the ADC and DAC chips, the RS-485 transceivers, the DDR2 memory
and the Ethernet interface. The testbenches contain behavioural models of the
ADS8528 bus and the DAC8831 serial input.

## Files

`rtl/` (synthesizable):

| file | contents |
|---|---|
| `ktx_pkg.sv` | sizes, number formats, the matrix entries, reset values, register map, `coef_t`, `sat16` |
| `ktx_eff_top.sv` | both boards, joined by the RS-485 line |
| `sample_module.sv` | registers, period timer, ADC controllers, data store, correction, PID, transmitter |
| `adc_ctrl.sv` | ADS8528 parallel-bus controller |
| `data_store.sv` | frame gathering and the ordered stream with record address |
| `mi_correction.sv` | mutual inductance correction |
| `pid_ctrl.sv` | 16-path incremental PID |
| `rs485_tx.sv`, `sync_fifo.sv` | link transmitter and its FIFO |
| `coil_control_module.sv` | receiver, source select, frame register, 16 DAC writers |
| `rs485_rx.sv` | link receiver |
| `dac_spi.sv` | DAC8831 SPI writer |

`tb/`: one self-checking testbench `<module>_tb.sv` per module. Alongside
them are `ads8528_model.sv` and `dac8831_model.sv` (behavioural device
models) and `ktx_ref_pkg.sv`. That package is the reference arithmetic: the
correction as a full matrix-vector product, and the PID as the equation
above. It is written independently of the RTL structure.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, run the whole system end to end at its default sizes (about 0.4 s):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    --top-module ktx_eff_top_tb rtl/ktx_pkg.sv tb/ktx_eff_top_tb.sv -o sim
./obj_dir/sim
```

For any other block, replace `ktx_eff_top_tb` with its testbench name.

`ktx_eff_top_tb` runs 12 control periods through both boards with the clocks
0.4 % apart. It checks all 16 DAC codes after every period against the
reference arithmetic. Along the way it rewrites the parameters, drives the PID
into its clamp, clears the PID history, and finally switches the coil board
to its network input. `ktx_loop_tb` closes the loop around the whole design with a crude static
model of the machine. Each coil's reading is a fixed random error field plus
half its own DAC value plus 2 % of each neighbour's. With a PI setting
(Kp = 0.5, Ki·Δt = 1) the summed error over the 16 coils falls about
600-fold within 40 periods, down to about one ADC step per coil. The model
is this design's own. It shows that the signs, scales and per-coil
bookkeeping agree around the loop. It makes no claim about the real plasma
response.

The block testbenches add cases the system cannot reach
from its pins:

* the link with parity and framing errors and ±0.8 % bit-time mismatch
* FIFO overflow
* a DAC frame arriving while the DACs are still busy
* saturation of the correction
* shuffled sample order
* the SPI shift sequence
* the exact clock counts of each interface

## How far to trust it

* The arithmetic agrees bit for bit with an independent model over thousands
  of random cases, including the extremes of every format.
* The interface timing (ADC strobes, SPI, the link) is checked against this
  design's own choices. It has not been checked against device data sheets.
  Before hardware use, review the ADS8528 strobe widths and configuration word
  and the DAC8831 CS timing against the data sheets.
* The gains and v of the real machine are not known here. The reset values
  only make the loop pass the signal through.
