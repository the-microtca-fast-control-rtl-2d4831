# Board logic of a MicroTCA fast control card (uFC)

The uFC is a double-width AMC card for MicroTCA crates, also usable on a
bench, that gives physics experiments a common platform for clock, trigger,
control and data acquisition. It is built around a Xilinx Kintex-7
XC7K325T FPGA, two high-pin-count FMC slots, two SFP+ cages, a DDR3 SODIMM,
LEMO clock/trigger connectors and an ARM Cortex-M7 module management
controller (MMC). Almost all of it is bought silicon. The logic the board
itself contributes is in two places:

* the **clock tree**: six 4:4 cross-point clock switches that let any of the
  board's clock sources (oscillators, AMC backplane clocks, FMC clocks, the
  LEMO input) reach the FPGA clock pins, the jitter-cleaning PLL and the AMC
  backplane outputs;
* the **CPLD**: it selects which JTAG master drives the scan chain, puts the
  FMC cards into the chain only when they are fitted, reloads the FPGA
  firmware and reports boot status for the MMC, resets the FPGA and forwards
  the 25 MHz oscillator.

The board's main published use is the readout of a hybrid pixel detector
(1M pixels in 16 front-end modules, read at 2.3 GB/s). There the FPGA
passes Ethernet frames between four chains of front-end modules and four
10 Gb Ethernet links to a DAQ server, and fans an external clock and
trigger out to the front-end. That forwarding firmware is included as well
(`heps_forwarder`), in the simplest form that does the job.

This repository gives synthesizable SystemVerilog for these parts, a top
level `ufc_board` joining them, and self-checking testbenches. The rest of
the FPGA firmware (TCP/UDP stack, DDR3 controller, Ethernet MACs) and all
analog and bought parts are not modelled: their pins are ports of
`ufc_board`.

## Module map

```
ufc_board                    top: everything below, bought chips at the ports
├── ufc_cpld                 CPLD logic, clocked by the 25 MHz oscillator
│   ├── jtag_chain_bridge    master select + FPGA -> FMC0 -> FMC1 chain
│   ├── fpga_config_ctrl     PROG_B pulse, INIT_B/DONE status FSM
│   └── payload_reset_gen    reset line to the FPGA
├── clock_distribution       switches A-F
│   └── clk_xpoint_4x4 (x6)  one 4:4 cross-point switch
└── heps_forwarder           detector readout: 4 links x 2 directions
    └── pkt_fifo (x8)        store-and-forward frame buffer
ufc_pkg                      xpt_sel_t (2-bit switch select), cfg_state_t,
                             beat_t (64-bit frame word)
```

## The clock tree

This is the part that takes most care to read. The six switches form two
stages. The first stage (A, B, C, E) sees the raw sources; the second stage
(D and F) sees outputs of the first stage, so a source can reach a
destination either directly or through D or F. Pin 0 of each switch is the
first in the lists below; `sel_x[o]` is the 2-bit number of the input pin
that output `o` of switch `x` carries.

| switch | inputs (pin 0..3) | out0 | out1 | out2 | out3 |
|---|---|---|---|---|---|
| A | 156.25 MHz programmable osc., 125 MHz osc., 200 MHz osc. (`osc_20m`), FPGA output (`fpga_to_a`) | D in0 | FPGA SRCC bank 14 | FPGA bank 116 | F in1 |
| B | AMC FCLKA, TCLKA, TCLKC, LEMO clock in | D in1 | FPGA SRCC bank 14 | 874001 buffer -> FPGA bank 115 (`to_874001`) | F in2 |
| C | FMC0 GBTCLK0, GBTCLK1, CLK0, CLK1 | FPGA bank 118 | FPGA MRCC bank 16 | D in2 | unused |
| E | FMC1 GBTCLK0, GBTCLK1, CLK0, CLK1 | FPGA bank 117 | FPGA MRCC bank 12 | unused | D in3 |
| D | A out0, B out0, C out2, E out3 | PLL reference (`pll_in`) | FPGA MRCC bank 14 | FPGA bank 115 | FPGA bank 116 |
| F | PLL output (`pll_to_f0`), A out3, B out3, PLL output (`pll_to_f3`) | FPGA bank 117 | FPGA bank 118 | AMC TCLKB | AMC TCLKD |

Examples: to send the AMC TCLKA clock, cleaned by the PLL, back onto the
backplane as TCLKB, set `sel_b[0]=1`, `sel_d[0]=1` (so `pll_in` is TCLKA),
and `sel_f[2]=0` (the PLL output on `pll_to_f0`). To feed an FMC0 mezzanine
clock to the FPGA's bank 116 transceiver reference through D, set
`sel_c[2]` to the FMC clock and `sel_d[3]=2`.

The PLL (a CDCE62005, 3 inputs, 5 outputs) also takes the 25 MHz oscillator
and an FPGA output, and drives the LEMO clock output, the FMC0/FMC1 CLK0
inputs and an FPGA MRCC pin in bank 14 directly; those paths have no logic
and are not in the RTL. The FMC CLK1 inputs are driven by the FPGA
directly.

All paths are combinational. A switch setting takes effect at once, so
changing it while a clock runs can produce a runt pulse, as on the real
parts; the board's controller is expected to reprogram the switches only
while the affected clocks are not in use. How the real switch chips are
programmed (pins or serial registers) is not modelled: `sel_*` are static
inputs.

## The JTAG bridge

Two JTAG masters can reach the board: a 14-pin Xilinx cable header and the
JTAG lines on the AMC connector (so a crate controller can program the
FPGA). `jtag_sel_amc` chooses one (1 = AMC). Its TCK and TMS go to the FPGA
and both FMC slots; its TDI enters the FPGA, and the FPGA's TDO goes on to
FMC0, then FMC1, then back to the master. A slot whose card is absent
(`fmc_prsnt_l[i] = 1`, the FMC standard's active-low PRSNT_M2C_L) is
bypassed, so the master sees a chain of one, two or three devices. A card
that is fitted must close TDI to TDO itself. TDO is driven only towards the
selected master; `hdr_tdo_oe` and `amc_tdo_oe` are the enables of the
tri-state CPLD pins. The bridge is combinational and rebuilds the chain as
soon as a present signal changes, so cards should not be plugged during a
scan.

## FPGA reload, boot status and reset

The FPGA configures itself from the SPI flash at power-up (master-SPI mode).
The MMC can ask the CPLD to reload it: a rising edge on `mmc_reload_req`
pulls PROG_B low for `PROG_CYCLES` clocks, after which the FPGA clears its
configuration memory (INIT_B rises) and loads the bitstream (DONE rises).
`cfg_state` reports the progress:

```
          DONE high                     reload_req (any state but PROG)
CFG_IDLE ----------> CFG_DONE            ------------------------------> CFG_PROG
CFG_PROG     --(PROG_CYCLES)-->          CFG_CLEARING
CFG_CLEARING --INIT_B high-->            CFG_LOADING   (timeout -> CFG_ERROR)
CFG_LOADING  --DONE high-->              CFG_DONE      (INIT_B low or timeout -> CFG_ERROR)
CFG_DONE     --DONE low-->               CFG_IDLE
CFG_ERROR    stays until the next reload request
```

`fpga_reset` (active high) is held from power-on until `RESET_CYCLES + 1`
clocks after `por_n` rises, and for exactly `RESET_CYCLES` clocks after each
rising edge of `mmc_reset_req`. Request inputs and the INIT_B/DONE pins pass
two-flip-flop synchronisers; PROG_B falls and the reset rises three clocks
after the request rises.

| parameter | default | meaning |
|---|---|---|
| `PROG_CYCLES` | 25 | PROG_B low time, 1 us at 25 MHz |
| `TIMEOUT_CYCLES` | 25,000,000 | limit on each wait for INIT_B or DONE, 1 s |
| `RESET_CYCLES` | 2500 | payload reset length, 100 us |

All three are this design's choices; the board description only says that the MMC
performs payload reset, firmware reload and boot checking, and that the CPLD
is wired to PROG_B, INIT_B, DONE and an FPGA reset line. The CPLD is clocked
by the 25 MHz oscillator it also forwards to the FPGA (`fpga_clk25`).

## The detector readout application

`heps_forwarder` pairs front-end link *i* with DAQ link *i* (four of each)
and moves whole Ethernet frames both ways: data frames up from the
detector, command frames down to it. Frames arrive as 64-bit words
(`beat_t`: data, byte mask, last-word flag) one per clock from a 10 GbE
receiver, which cannot be stalled; they leave through a valid/ready
interface to a 10 GbE transmitter. At 156.25 MHz one word per clock is
10 Gb/s, so each direction of each link runs at line rate.

Each direction of each link has a `pkt_fifo` of `DEPTH` = 2048 words
(16 KiB). It is store-and-forward: a frame is offered to the transmitter
only once its last word is in, one clock later, so a transmitter never
underruns inside a frame. If the buffer fills while a frame is arriving,
that frame is dropped whole: the write pointer goes back to the frame's
first word, the remaining words are ignored up to the last one, `overflow`
pulses and `drop_count` (per link and direction at the top:
`up_drops`, `down_drops`) counts it. Frames already complete are never
touched, so a stalled DAQ link costs new frames, not corrupted ones.

The LEMO clock input (which also enters clock switch B) and the LEMO gate
input are copied to every front-end connector (`fe_clk`, `fe_trig`).

In `ufc_board` the forwarder runs on `app_clk`, the MACs' 156.25 MHz user
clock, and is held in reset by the CPLD's `fpga_reset`, re-synchronised to
`app_clk`.

Capacity against the published numbers: the prototype needs 2.3 GB/s in
total, 575 MB/s per link; the forwarder carries 1.25 GB/s per link and
direction, 5 GB/s over four links. The planned 16M-pixel system (115 Gb/s
or more, over PCI Express) is beyond one board's four 10 GbE links and is
not modelled.

## Where this RTL departs from, or adds to, the board description

* Which pin of a clock switch each drawn connection uses is read from the
  board's clock diagram; sources, destinations and switch letters are as
  documented, the pin order is an interpretation.
* The third oscillator is labelled 20 MHz in the clock diagram and 200 MHz
  (for the FPGA IO delay blocks) in the text. The port keeps the diagram's
  name `osc_20m`; the testbench runs it at 200 MHz.
* The JTAG chain order (FPGA, FMC0, FMC1), the master-select input and the
  TDO enables are choices; the described behaviour is only "select the
  master, add a fitted FMC card to the chain".
* The whole reload/status state machine, its timeout and error rules, and
  the reset length and polarity are this design's own.
* Everything inside the readout forwarder beyond "forward frames between
  each front-end link and its DAQ link, and distribute clock and trigger"
  is this design's: word format, buffer depth, store-and-forward, drop
  policy, a single clock for both MACs.
* The cross-point switches are modelled by function (any input to any
  output); the real parts' output enables, signal standards and programming
  interface are left out.

## Testbenches

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_clk_xpoint_4x4` | all 256 settings of one switch, random inputs |
| `tb_clock_distribution` | 4000 random source/setting combinations against a path-by-path reference |
| `tb_jtag_chain_bridge` | random static routing, then chain length 1-3 with bypass-register device models, both masters |
| `tb_fpga_config_ctrl` | PROG_B latency and width, successful reload, CRC error, timeout, recovery, DONE loss |
| `tb_payload_reset_gen` | power-on length, request latency and length, restart, held request |
| `tb_ufc_cpld` | the CPLD with device models: clock forwarding, chain lengths, reload, reset |
| `tb_pkt_fifo` | cycle-by-cycle against a queue model: random traffic and stalls, one word per clock throughput, one-clock store-and-forward latency, whole-frame drop on overflow |
| `tb_heps_forwarder` | the detector workload at default sizes: 2.39 GB/s of 1 KiB frames upstream plus command frames downstream on four links, no loss, measured rate at least 2.3 GB/s; then full line rate on all links; clock/trigger fan-out |
| `tb_ufc_board` | end to end at default parameters: 18 free-running clocks of distinct frequencies, 13 switch settings with edge counting on all 17 clock outputs, JTAG chains, reload good and bad, frame forwarding on all links, a stalled DAQ link that overflows and drops two frames, clock/trigger fan-out, payload reset; counts each mechanism and fails if one never occurs |

Helper models: `tb_jtag_bypass_dev` (a JTAG device in BYPASS: one flip-flop
sampled on rising TCK, TDO updated on falling TCK) and `tb_fpga_cfg_model`
(PROG_B/INIT_B/DONE behaviour of a 7-series FPGA, with CRC-error and hang
options).

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    +libext+.sv rtl/ufc_pkg.sv tb/tb_ufc_board.sv --top-module tb_ufc_board
./obj_dir/Vtb_ufc_board
```

`-Wno-fatal` is needed because the testbenches hand narrow values to
32-bit checking tasks, which Verilator reports as width warnings.

`tb_ufc_board` simulates about 0.3 ms and finishes in well under a minute.
For lint only: `verilator --lint-only -Wall -Irtl -y rtl rtl/ufc_pkg.sv
rtl/ufc_board.sv`. The warnings left are the two switch outputs that the
board leaves unconnected (C out3, E out2) and, from the buffer's assertion
being disabled during reset, reset nets used both asynchronously and in an
assertion.

## Not in this RTL

The rest of the FPGA firmware (SiTCP TCP/UDP Ethernet, the 10 GbE MACs,
DDR3 interface, I2C/SPI access, MMC link, clock-chip programming, White
Rabbit timing), the MMC and its IPMI firmware,
the power sequencers, the PLL and 874001 clock chips, oscillators,
memories and connectors. None of these is specified in enough detail to be
written as logic here; the ones that connect to the modelled logic appear
as ports of `ufc_board`.
