# Fault-tolerant FPGA logic for a COTS FPGA + VPU payload processor

A low-cost way to process payload data in orbit is to pair two commercial
chips that were never radiation-hardened: a Zynq SoC FPGA, which receives the
instrument data and runs DSP accelerators, and a Myriad2 vision processor
(VPU), which runs the heavy DSP/AI kernels. Fault tolerance then has to come
from how the two are used. The publication this RTL follows, *Combining Fault
Tolerance Techniques and COTS SoC Accelerators for Payload Processing in
Space* (Leon et al., 2022), combines several techniques. This repository gives
SystemVerilog for the parts of them that are logic in the FPGA fabric:

* a **CRC-protected frame link**. Image frames go to the VPU over its camera
  interface (CIF), and results come back over its display interface (LCD).
  Every frame ends with one extra *footer row* that carries a CRC-16 of the
  frame, so the receiving side can tell when a transfer was corrupted.
* a **triple-modular-redundant (TMR) accelerator**. Three copies of a
  streaming FIR filter sit between two majority voters. The logic also tells
  when one copy has stopped working, so that the copy can be rebuilt by
  partial reconfiguration.
* a **watchdog** that resets the VPU when its status messages stop.

The rest of the paper's techniques are configuration scrubbing (Xilinx SEM
IP), partial reconfiguration (AXI HWICAP and ICAP), and everything running as
software on the ARM cores or inside the VPU. They are vendor IP, hard
silicon or software, so they are not in this RTL. Their signals are ports of
the top module (see *What is outside*).

## Block diagram

```
                         ft_pl_top (programmable logic)
  txp_wr_en/data ─► pixel_fifo ─► cif_crc ─────────────► cif_tx ─► CIF pins ─► VPU
                    (2048 x 24)   3 x crc16_par (8/16/24)  pclk, vsync,
                                  + Frame Footer FSM       href, data[23:0]

  rxp_rd_en/data ◄─ pixel_fifo ◄─ lcd_crc ◄───────────── lcd_rx ◄─ LCD pins ◄─ VPU
                                  3 x crc16_par            2-flop sync,
                                  + Frame Footer FSM       pclk edge detect
                                  └► crc_done, crc_cmp, lcd_status

  acc_in_valid/data[3] ─► tmr_voter ─► 3 x fir_filter ─► tmr_voter ─► acc_out_*
   (3 copies from PS)                                    └► mismatch, dpr_req[2:0]
                                                  dpr_done[2:0] ─► replica reset

  vpu_heartbeat ─► watchdog_timer ─► vpu_reset
```

One clock, `clk`, drives the whole design. The CRC modules move one pixel per
clock. The design was written for the 100 MHz at which the paper's
implementation of the link closed timing. The reset `rst_n` is asynchronous
and active low.

## The CRC footer: how a frame is protected

This is the part that both ends of the link must agree on bit for bit. Most
of its details are not fixed by the paper; the choices made here are listed
below.

**Frame on the wire.** A frame of `width x height` pixels travels as
`height + 1` rows. The extra last row is the footer. Pixels are 24 bits wide
on the bus whatever the frame's bit depth. Frames of 8 and 16 bits use the
low bits, and the other bits are zero.

**CRC.** The code is CRC-16-CCITT with polynomial `x^16 + x^12 + x^5 + 1`
(0x1021) and initial value 0x0000. These two values come from the paper. This
design shifts each pixel in MSB first and neither reflects nor inverts the
result. That is the convention often called CRC-16/XMODEM: the CRC of the
ASCII bytes `"123456789"` is `0x31C3`. A 16- or 24-bit pixel is one word.
Its CRC is therefore the same as that of its bytes sent high byte first. Only
the `width x height` active pixels enter the CRC; the footer row does not.

**Footer layout.** Only the first pixel(s) of the footer row carry the CRC.
All other footer pixels are zero.

| bit depth | footer pixel 0      | footer pixel 1     | pixels 2 .. width-1 |
|-----------|---------------------|--------------------|---------------------|
| 8         | `{16'h0, CRC[15:8]}`| `{16'h0, CRC[7:0]}`| 0                   |
| 16        | `{8'h0, CRC}`       | 0                  | 0                   |
| 24        | `{8'h0, CRC}`       | 0                  | 0                   |

An 8-bit frame must therefore be at least two pixels wide. The layout is in
`ft_pkg::footer_pixel`, and the receiver reads the CRC back from the same
positions.

**Why three CRC calculators.** The bit depth is known only from the
configuration. So each side runs three CRC calculators side by side, fed with
`pixel[7:0]`, `pixel[15:0]` and `pixel[23:0]`. All three absorb every active
pixel, and the Frame Footer FSM picks the result that matches the configured
depth. Each calculator (`crc16_par`) is the serial LFSR unrolled over its
word width, so it absorbs a whole pixel per clock. The CRC is final one clock
after the last active pixel, just when the footer row starts. This structure
is the paper's (its figures of the CIF-CRC and LCD-CRC modules).

**Transmit side (`cif_crc`).** The module is a three-state counter machine:
IDLE, ACTIVE and FOOTER.
* `start` samples `cfg` and moves IDLE to ACTIVE.
* In ACTIVE, the head of the transmit FIFO is offered to the transmitter
  (`tx_wr_en`). When the transmitter takes it (`tx_rd_en`), the same clock
  pops the FIFO and clocks the three CRCs. If the FIFO runs empty, the frame
  simply waits.
* After `width*height` pixels it enters FOOTER and offers the `width` footer
  pixels.
* `done` pulses after the last footer pixel, and `crc_out` keeps the CRC that
  was sent.

With a ready transmitter and a full FIFO, a frame takes exactly
`width*(height+1)` clocks.

**Receive side (`lcd_crc`).** It has the same counters plus a CHECK state.
* Active pixels are written on to the receive FIFO and absorbed by the CRCs.
* Footer pixels are not forwarded. The FSM picks the CRC out of them.
* One clock after the last footer pixel it compares the two values. It then
  pulses `crc_done` with the result on `crc_cmp` and updates the status
  registers (`lcd_status_t`): the last computed CRC, the last received CRC,
  the last result, and 16-bit counters of good and bad frames.
* A frame can be cut short, either by a new start of frame or by `vsync`
  falling before the footer row is complete. Such a frame counts as bad. A
  cut noticed at `eof` also pulses `crc_done`, with `crc_cmp` = 0.

The receive FIFO has no back-pressure. Its sticky `overflow` flag reports a
reader that is too slow.

## Pin timing of the two interfaces

The paper names the CIF transmitter and the LCD receiver but gives no timing.
This design uses a plain parallel-video format for both:

```
clk        _/‾\_/‾\_/‾\_/‾\_/‾\_/‾\_/‾\_/‾\_
cif_pclk   ____/‾‾‾\___/‾‾‾\___/‾‾‾\_______
cif_data   ==X p0    X p1    X p2    X ....      (changes while pclk is low)
cif_href   __/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\___       (high for the width pixels of a row)
cif_vsync  ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾      (high for the whole frame)
```

* **CIF transmitter (`cif_tx`).**
  * Each pixel slot lasts two system clocks. The data changes as `cif_pclk`
    falls, and `cif_pclk` rises one clock later, which is where the VPU
    samples.
  * `cif_vsync` rises `V_BLANK` slots before the first row and falls
    `V_BLANK` slots after the last.
  * `H_BLANK` slots with `cif_href` low follow every row, the footer row
    included.
  * If no pixel is ready when a row needs one, `cif_pclk` stays low until
    one arrives. The VPU therefore never sees a stale pixel. This matters
    because the transmit FIFO can run dry.
  * A frame without stalls takes `2*(2*V_BLANK + (height+1)*(width+H_BLANK)) + 2`
    clocks. With the defaults, a 2048 x 2048 frame takes 8,409,114 clocks
    (84 ms at 100 MHz).
* **LCD receiver (`lcd_rx`).** It samples the pins through a two-flop
  synchroniser. Each rising edge of the LCD pixel clock with `lcd_de` and
  `lcd_vsync` high delivers one pixel, three clocks after the pin edge. The
  edges of `lcd_vsync` give `sof` and `eof`. Because the pins are
  oversampled, the LCD pixel clock must be at most a third of `clk`.

## TMR accelerator

The processing system (PS) writes every input sample three times. In
`tmr_fir` the three copies, with their valid bits, go through a bit-wise
2-of-3 voter (`tmr_voter`). The voted sample feeds three identical FIR
replicas, and a second voter masks a wrong replica. The PS reads the voted
result and votes again in software. This voter → three accelerators → voter
chain, with a further vote on the PS side, is the paper's Zynq-specific TMR.

The FIR itself (`fir_filter`) is the paper's benchmark accelerator: a
pipelined filter with a coefficient ROM. The paper gives neither its size
nor its coefficients. This design uses the following:
* 16 taps;
* 16-bit signed samples;
* coefficients `c[k] = (k+1)*(16-k)`, a triangular low-pass window;
* a full-precision 36-bit output;
* transposed form, one sample per clock, latency one clock.

What this design adds is the link from TMR to partial reconfiguration. The
paper says the design reconfigures a permanently faulty replica.
* Each voter reports which input disagreed (`mismatch`).
* A replica outvoted in `PERM_THRESH` (32) results in a row raises its bit of
  `dpr_req`. A transient upset only increments `acc_masked_count`.
* The reconfiguration is done outside the RTL. Its controller then pulses
  `dpr_done[i]`, which clears the request and empties the replica's filter
  state.
* `PERM_THRESH` is larger than the tap count. A freshly reset replica, which
  disagrees until its 15-sample history refills, is therefore not flagged
  again.

## Watchdog

In the paper each chip watches the other over UART, and an external
microcontroller resets the FPGA when the scrubber's status messages stop.
`watchdog_timer` is that policy as logic:
* each status message is a one-clock `kick`;
* `TIMEOUT` clocks without one (default 10^8, one second at 100 MHz) pulse
  `expired`;
* `dev_reset` is then held for `RST_LEN` (16) clocks.

In `ft_pl_top` it watches the VPU: `vpu_heartbeat` in, `vpu_reset` out. The
UART that would carry the messages is vendor IP and is not included, so
`vpu_heartbeat` is a plain strobe.

## What is outside this RTL

| part | why it is not here | where it connects |
|------|--------------------|-------------------|
| Soft Error Mitigation (SEM) scrubber, Frame ECC, readback CRC | Xilinx IP and hard silicon | — |
| ICAP, AXI HWICAP, configuration memory, QSPI flash | hard primitive / vendor IP / external chip | `dpr_req`, `dpr_done` |
| ARM software (monitoring, PS-side voter, pixel encoding) | software; "data en/decoding" and "input reception" are only named in the paper | `txp_*`, `acc_in_*`, `acc_out_*` |
| AXI UART and the status-message format | vendor IP, format not given | `vpu_heartbeat` |
| Myriad2 VPU: CIF receiver, LCD transmitter, instruction/data-memory CRC recovery (IMR/DMR), N-modular redundancy on SHAVE cores | a commercial chip running software | CIF and LCD pins |

The testbenches use a behavioural VPU (`tb/vpu_model.sv`). It receives CIF
frames and checks their footer, then answers each good frame with its
bit-inverted pixels over LCD. It can corrupt a pixel after computing the
footer, and it sends periodic heartbeats.

## Choices made where the paper is silent

The following follow the paper:
* the CRC polynomial and initial value;
* the footer row with zero padding;
* the three parallel calculators selected by bit depth;
* the counter-based footer FSMs and their signal names (`rd_en`, `wr_en`,
  `crc_cmp`, `enable`);
* the 24-bit pixel bus;
* the voter / three accelerators / voter chain;
* the watchdog policy.

The following are this design's own:
* CRC bit order (MSB first, not reflected) and the position of the CRC in
  the footer;
* the valid/ready meaning of the `rd_en`/`wr_en` pairs;
* first-word-fall-through FIFOs of 2048 pixels (one row of the largest frame);
* CIF/LCD pin timing, blanking lengths (4 slots) and the LCD oversampling
  limit;
* status-register contents;
* FIR size and coefficients;
* the valid bit being voted with the data;
* the permanent-fault rule (32 consecutive outvoted results) and the
  `dpr_req`/`dpr_done` handshake;
* watchdog timeout and reset length;
* 12-bit frame dimensions (frames up to 4095 x 4095).

Known departures and limits:
* **Link rate.** The paper reports the link running reliably at a 150 MHz
  pixel clock on custom hardware. Here the CIF pixel clock is at most
  `clk/2`, and the LCD pixel clock at most `clk/3`. At the 100 MHz the
  paper's implementation reached, that is 50 MHz, which matches its
  1024 x 1024, 16-bit, 50 MHz setup. A 150 MHz link would need a DDR output
  stage and a source-synchronous receiver, which are not built.
* **Same configuration both ways.** One `cfg` describes the frames in both
  directions. A result frame of a different size than the input frame would
  need a second configuration input.

## Parameters (`ft_pl_top`)

| parameter | default | meaning |
|-----------|---------|---------|
| `FIFO_DEPTH` | 2048 | depth of each pixel FIFO (power of two) |
| `H_BLANK`, `V_BLANK` | 4, 4 | CIF blanking, in pixel-clock periods (>= 1) |
| `ACC_DW`, `ACC_CW`, `ACC_TAPS` | 16, 16, 16 | FIR sample width, coefficient width, taps |
| `PERM_THRESH` | 32 | consecutive outvoted results before `dpr_req` |
| `WD_TIMEOUT`, `WD_RST_LEN` | 100,000,000, 16 | watchdog timeout and reset length, in clocks |

Frame width, height (active rows) and bit depth (`BPP8`, `BPP16`, `BPP24`)
are run-time inputs (`cfg`). They are sampled at the start of each frame.

## Files

`rtl/` has one module or package per file:
* `ft_pkg` — types, CRC constants, footer layout;
* `crc16_par`, `pixel_fifo`, `cif_crc`, `cif_tx`, `lcd_rx`, `lcd_crc` — the
  link;
* `fir_filter`, `tmr_voter`, `tmr_fir` — the TMR accelerator;
* `watchdog_timer`;
* `ft_pl_top` — the top.

`tb/` has one self-checking testbench per module or package,
`tb_<module>.sv`. The end-to-end test is `tb_ft_pl_top.sv`, and
`tb_ft_pl_top_full.sv` runs full-size frames. The shared reference models are `tb_crc_pkg.sv` (a
bit-serial CRC and the footer layout) and `vpu_model.sv`. Each testbench ends
by printing `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the repository root, for any testbench `tb_X`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/ft_pkg.sv tb/tb_crc_pkg.sv rtl/*.sv tb/vpu_model.sv tb/tb_X.sv \
    --top tb_X -Mdir obj_tb_X -o sim
./obj_tb_X/sim
```

What the testbenches cover:
* The unit tests compare against independent models: a bit-serial CRC, a
  queue, a direct-form convolution and a per-bit majority. They also check
  the CRC-16/XMODEM check value, the cycle counts (one pixel per clock
  through `cif_crc`, the CIF frame duration, the FIR latency, the watchdog
  delay and reset length) and every error path. The error paths are
  corrupted pixels, corrupted footers, cut-short frames, upsets on the input
  copies, transient and permanent replica faults, and a missing heartbeat.
* `tb_ft_pl_top` runs the whole design against the VPU model at reduced
  sizes. Every mechanism must occur at least once, or the test fails:
  * footers at all three bit depths;
  * a CRC match and a mismatch;
  * the CIF side stalling on an empty FIFO;
  * FIFO back-pressure;
  * masked input and replica errors;
  * a reconfiguration request;
  * a watchdog reset.
* `tb_ft_pl_top_full` keeps every parameter at its default. It sends the
  two frame formats the link is meant for to the VPU model and back:
  * one 2048 x 2048 frame of 24-bit pixels, taking 8,409,114 clocks out;
  * one 1024 x 1024 frame of 16-bit pixels, taking 2,107,418 clocks out.

  The return path takes about twice as long, because the model's LCD pixel
  clock is a quarter of the system clock. The test runs in about half a
  minute.

What has not been checked: no fault was injected into a configuration
memory, and the design has not been run on hardware or against a real
Myriad2. The pin timing has been checked only against the behavioural VPU.
