# CSI fuzzer: an artificial channel response in the Wi-Fi transmitter

A Wi-Fi receiver estimates the channel between itself and the transmitter
on every OFDM subcarrier, from the known training fields of each packet.
That estimate, the channel state information (CSI), changes when people or
objects move between the two radios, so anyone who can receive the packets
can use it to sense the room. The CSI fuzzer takes that away from
unauthorized receivers. It sits in the transmitter, between the 802.11
baseband and the DAC, and filters every transmitted sample with a short
FIR filter whose impulse response is

    h = [1, c1, c2]        y_i = x_i + c1*x_{i-1} + c2*x_{i-2}

Convolution in time is multiplication per subcarrier, so every receiver now
measures

    CSI(k) = H_art(k) * H_env(k),   H_art(k) = DFT_N([1, c1, c2, 0, ..., 0])(k)

where H_env is the real channel and N the OFDM FFT size (64 for a 20 MHz
channel). Only a receiver that knows c1 and c2 can divide H_art out and
sense the real channel. Because the filter is applied to the whole packet
(preamble and data alike), the receiver's equalizer removes it like any
other multipath, and the link keeps working. Changing the taps from packet
to packet (randomly, against analysis of the artificial response, or in an
agreed sequence, as a covert channel readable in the CSI of a static
environment) is left to the host software; the hardware only has to apply
whatever taps the host writes.

## The filter

```
            x_i ────────────────────────────┬───────────►(Σ)──► y_i (to DAC)
(from PHY)       │                          │             ▲ ▲
               [Z^-1]── x_{i-1} ──(×)───────┼─────────────┘ │
                 │                 ▲c1      │               │
               [Z^-1]── x_{i-2} ──(×)───────┼───────────────┘
                                   ▲c2
```

Three properties shape the RTL:

* **The leading tap is fixed at 1 and has no delay.** The current sample
  goes straight to the adder, so the fuzzer adds no latency on the way to
  the DAC. A transmitter must answer within SIFS (16 µs at 5 GHz) with ACK
  or CTS frames; a filter that delayed the main path would eat into that
  budget. In the RTL, `out_iq` is combinational from `in_iq` and the two
  delay registers: the cycle that presents x_i also produces y_i.
* **Each of c1, c2 is purely real or purely imaginary, in [-0.5, 0.5).**
  Multiplying a complex sample by such a tap costs two real multipliers and
  no adder: `x*v = (v*xi, v*xq)` and `x*(i*v) = (-v*xq, v*xi)`. This is
  `tap_mult`. The magnitude bound keeps the output of `[1, c1, c2]` within
  twice the input amplitude and limits how deep H_art can notch a
  subcarrier: |H_art(k)| >= 1 - |c1| - |c2|, which is zero only when both
  taps sit at -0.5 (or -0.5i).
* **Taps act immediately.** The register drives the multipliers directly.
  A write that lands in the middle of a packet changes the response for the
  rest of that packet, which can cost that one packet; latching the taps at
  a packet boundary would avoid it and is not part of this design.

## Number formats

| quantity | format | notes |
|---|---|---|
| I and Q sample | 16-bit two's complement | `IQ_W` in `csi_fuzzer_pkg` |
| tap value v | 8-bit two's complement, value v/256 | `COEF_W`; range [-0.5, 0.5) exactly |
| tap kind | 1 bit | 0 real, 1 imaginary |
| product | 24 bits, exact | still scaled by 256 |
| sum | 27 bits | rounded half-up once, then saturated to 16 bits |

A tap of 0.35i becomes `imag=1, v=90` (0.3516), 0.1 becomes `imag=0, v=26`
(0.1016). Host software should round `c*256` to the nearest integer and
clip it to [-128, 127]. With all taps zero, or with the fuzzer disabled,
the output equals the input bit for bit. Output clipping only happens when
the input is already near full scale: `dac_sat` flags each clipped sample.

## Configuration register

One 32-bit word, written by the host:

| bits | field |
|---|---|
| 7:0 | c1 value (signed, units of 1/256) |
| 8 | c1 imaginary |
| 23:16 | c2 value |
| 24 | c2 imaginary |
| 31 | enable |
| others | reserved, read as 0 |

The port is a plain write strobe with byte enables (`reg_wr_en`,
`reg_wr_strb`, `reg_wr_data`) and a read-back (`reg_rd_data`); wrap it in
whatever register bus the system uses. A write takes effect on samples from
the cycle after the write. Reset clears the register: the fuzzer starts
disabled.

## Interfaces and timing

`csi_fuzzer_top` ports:

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `reg_wr_en`, `reg_wr_strb`, `reg_wr_data` | in | 1, 4, 32 | register write |
| `reg_rd_data` | out | 32 | register read-back |
| `phy_valid`, `phy_iq` | in | 1, 32 | sample from the 802.11 transmitter (`iq_t`: I in [31:16], Q in [15:0]) |
| `dac_valid`, `dac_iq` | out | 1, 32 | filtered sample to the DAC, same cycle |
| `dac_sat` | out | 1 | this sample was clipped |

Samples are qualified by `phy_valid`; the clock may run faster than the
sample rate (for example 100 MHz for 20 Msample/s) and the delay line only
moves on valid samples. It keeps moving while the fuzzer is disabled, so
switching on uses the true previous samples. The only combinational path
from input to output is one three-input adder, rounding and saturation.

## Files

| file | contents |
|---|---|
| `rtl/csi_fuzzer_pkg.sv` | widths, sample/tap/config types, register layout |
| `rtl/tap_mult.sv` | complex sample times a real-or-imaginary tap |
| `rtl/csi_fuzzer.sv` | delay line, tap multipliers, adder with rounding and saturation; `N_TAPS` parameter (default 3) |
| `rtl/csi_fuzzer_reg.sv` | configuration register and field decode |
| `rtl/csi_fuzzer_top.sv` | register plus filter, the unit placed between PHY and DAC |
| `tb/tb_*.sv` | one self-checking testbench per module |

The 802.11 transmitter, the DAC and RF front end, and the host software
that composes and writes the register are not included; their signals are
the top-level ports.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
after a fixed time if it hangs.

* `tb_tap_mult`: corner values (full-scale, zero, ±1) and 3000 random
  samples and taps against integer complex multiplication.
* `tb_csi_fuzzer`: 6000 cycles of random samples with idle gaps, taps that
  change between samples, enable toggled on and off, and full-scale
  samples; every output is compared, in its own cycle, with an integer model.
* `tb_csi_fuzzer_reg`: reset value, field decode, byte enables, reserved
  bits, write-to-output timing.
* `tb_csi_fuzzer_top`: end to end. It generates 802.11a-style OFDM symbols
  (64-point, 52 QPSK subcarriers, 16-sample cyclic prefix) by inverse DFT,
  sends one sample every 5 clocks and programs the taps through the
  register port. Besides checking every sample against the integer model,
  it takes the DFT of each output symbol, divides by the DFT of the input
  symbol and checks that the ratio equals H_art(k) = DFT([1, c1, c2]) on
  all 52 subcarriers within 1e-3: this is exactly what an authorized
  receiver divides out. The cyclic prefix makes the linear filter look
  circular over the FFT window, which is why the check is exact. It covers
  the fuzzer off, the example response [1, 0.35i, 0.1], a tap change in the
  middle of a packet, nine random responses in a row, and an overdriven
  symbol that clips. The top has no parameters, so this run is at full size.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/csi_fuzzer_pkg.sv tb/tb_csi_fuzzer_top.sv --top-module tb_csi_fuzzer_top
./obj_dir/Vtb_csi_fuzzer_top
```

## Departures and open points

* The sample width (16 bits), tap width (8 bits), register layout, bus,
  rounding, saturation, reset behaviour and the valid handshake are choices
  of this implementation; the design fixes the filter structure, the tap
  restrictions and range, the zero-delay main path and the immediate tap
  update.
* The filter length is a parameter of `csi_fuzzer` (`N_TAPS`), but the
  register and top support exactly the three taps [1, c1, c2]. Longer
  filters or wider taps would give more freedom against analysis of the
  artificial response; they need a wider register map.
* No timing analysis was done; the combinational path from `phy_iq` to
  `dac_iq` is an adder tree and should be checked against the clock used.
