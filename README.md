# GBTX emulator firmware: E-Links and control logic

The GBTX is a radiation-hard ASIC that sits on a detector front-end board and
terminates a 4.8 Gb/s optical GBT link. Every 25 ns the link master (the
readout board in the counting room) sends it one downlink frame of commands and
receives one uplink frame of detector data. The GBTX spreads the downlink bits
over slow serial links, the E-Links, that go to the front-end ASICs, and it
gathers the ASICs' E-Link data into the uplink frames. The GBTX is hard to get
and subject to export control. The GBTX emulator replaces it, and the
front-end board around it, with a commercial Artix-7 FPGA module on a
baseboard. The FPGA runs a ported GBT-FPGA core that terminates the link. The
logic in this repository does the GBTX's E-Link work and provides the control
infrastructure around it.

This RTL covers the parts of the emulator firmware that are logic of the
emulator's own:

* the **E-Link block**, which turns frames into E-Link bit streams and back;
* the **skew controls** of the E-Links: an adjustable clock phase with its
  stepping controller, and a per-link input delay with a selectable sampling
  edge;
* the **internal Wishbone bus**, with three masters and four slaves;
* an **I2C master** for the jitter-cleaner PLL chip, and the E-Link register
  file.

Some parts come from other projects: the GBT-FPGA core with its transceivers,
the J1B Forth CPU, the IPbus endpoint, the GBT-SC controller and the
clock-tuning logic. They are not included here. The top module exposes their
connections as ports. Two FPGA primitives are given as behavioural
(simulation-only) models: the MMCM clock manager and the IDELAYE2 input delay
line.

## Frames and E-Links

### Rates

The link side works in GBT frames, one per 25 ns, which is the 40 MHz
bunch-crossing rate:

| direction | mode the emulator uses | bits per frame |
|-----------|------------------------|----------------|
| downlink  | with forward error correction | 80 |
| uplink    | Widebus, no error correction  | 112 |

The E-Links run on a clock f_EL = R x 40 MHz, where R is the parameter
`EL_RATIO`. The uplink E-Links are sampled at double data rate, on both
clock edges. Each uplink E-Link therefore delivers 2R bits per frame, and the
112-bit uplink frame is what limits the number of E-Links:

    N_ELINKS = floor(112 / (2 R))   ->  56 E-Links at 40 MHz, 28 at 80 MHz

The downlink E-Links run at single data rate, so each takes R bits per frame.
That is 56 of the 80 downlink bits in both settings above. Bits 56..79 of the
downlink frame are not used.

### Bit mapping

E-Link i owns these frame bits:

    downlink:  dl_frame[i*R   +: R  ]   sent MSB first
    uplink:    ul_frame[i*2R  +: 2R ]   earliest sample in the MSB

Uplink bits above `N_ELINKS*2R` are zero.

### Timing inside `elinks`

Everything in the E-Link block runs on the E-Link clock. A counter marks one
clock in R with `frame_stb_o`, the frame boundary:

* **Downlink.** On the clock edge where `frame_stb_o` is high, each link's R
  bits are loaded into its shift register (`elink_tx`). The first bit is on
  `elink_dout_o` right after that edge. The following bits come one per clock
  after it. The output comes straight from a flip-flop, so the latency from
  frame to line is fixed.
* **Uplink.** `elink_rx` samples the input on the rising edge (`q_r`) and on
  the falling edge (`q_f`). On every rising edge it forms a bit pair:

  | `edge_sel` | pair formed at rising edge k+1 | effect |
  |------------|--------------------------------|--------|
  | 0 | {sample at rising edge k, sample at falling edge k+1/2} | bit window starts on the rising edge |
  | 1 | {sample at falling edge k-1/2, sample at rising edge k} | window starts half a clock earlier |

  The pairs shift into a 2R-bit register. On a `frame_stb_o` edge the register
  is copied to the link's slice of `ul_frame_o`. `ul_valid_o` marks the clock
  after the copy.

The edge selection comes from the bus clock domain and passes a two-flop
synchronizer, so a change takes effect about three E-Link clocks later.

The E-Link block expects the GBT-FPGA core to present `dl_frame_i` in the
E-Link clock domain and to hold it across the `frame_stb_o` edge. Likewise,
the core must take `ul_frame_o` during the R clocks after `ul_valid_o`.

## Compensating cable skew

The front-end ASICs may sit at the end of long cables: a 10 m copper cable has
been run. To compensate, the emulator can move two things. Both are set
through the E-Link registers.

**Clock phase.** The E-Link clock sent to the ASICs (`elink_clk_o`, the same
clock on every E-Link) is the E-Link clock passed through an MMCM. The MMCM can
shift its output phase in steps of 78.125 ps. At 40 MHz, 320 steps make one
full period. Software writes a signed target in the PHASE register.
`elink_phase_ctrl` then gives one PSEN pulse per step, waits for PSDONE and
counts the step, until the phase it has reached equals the target. Each step
takes two bus clocks plus the MMCM's PSDONE latency. The model uses 12 PSCLK
cycles for that latency, so 100 steps take about 1400 bus clocks (70 us at
20 MHz). The controller does not step while the MMCM reports that it is
unlocked.

**Input delay and sampling edge.** Each uplink input passes through an
IDELAYE2 delay line with 32 taps of 78 ps. That is 0 to 2.418 ns, a span of
2.496 ns. Writing a link's register loads the tap value with a one-clock LD
pulse. The delay moves a link's data against the fixed sampling edges of the
emulator, which lets links whose skew differs from the rest be trimmed. The
same register selects the sampling edge described above. That choice does not
move the sampling instants; it decides whether a bit pair starts at a rising
or a falling edge, which moves the pair boundary by half a clock period.

**A worked case: 10 m of cable.** Twisted pair carries a signal at about
5.2 ns/m, so 10 m delays each line by about 52 ns. The uplink data therefore
come back about 104 ns (more than four clock periods) after the clock edge
that launched them. Only the delay modulo one period affects sampling. The
whole periods add a fixed uplink latency, which the back end absorbs when it
aligns the frames. Two conditions must hold together:

* at the ASIC, the downlink data, which change on the emulator's unshifted
  clock edge, must not change near the edge of the shifted clock the ASIC
  receives. The clock phase must be away from 0.
* at the emulator, the returning DDR data arrive at about phase + 2 x cable
  delay + ASIC clock-to-output, modulo 12.5 ns. They must not change near an
  edge of the emulator's own clock.

`tb_cable_10m` sweeps the phase over one period with 52 ns per cable pair,
+-0.5 ns skew per pair, a 2 ns ASIC clock-to-output time, and set-up/hold
windows of 1 ns at the ASIC and 0.5 ns at the emulator. At 40 MHz with 56
E-Links it finds:

| phase (ns) | 0 | 3.125 | 6.25 | 9.375 | 12.5 | 15.625 | 18.75 | 21.875 |
|---|---|---|---|---|---|---|---|---|
| result | downlink fails | clean | uplink fails | clean | clean | clean | uplink fails | clean |

The uplink failures sit where 6 ns + phase is a multiple of 12.5 ns, as
predicted. At 80 MHz with 28 E-Links, each uplink bit lasts only 6.25 ns, so
the clean range shrinks:

| phase (ns) | 0 | 1.5625 | 3.125 | 4.6875 | 6.25 | 7.8125 | 9.375 | 10.9375 |
|---|---|---|---|---|---|---|---|---|
| result | both fail | both fail on some links | clean | clean | uplink fails | uplink fails on some links | clean | downlink fails on some links |

In both cases one phase serves all links, and the delay lines stay at 0 taps.
With more skew between pairs than modelled here, the per-link delay line
would be needed to trim the links that fall outside the common window.

## Control bus

### Masters and arbitration

Three masters share one Wishbone bus (`wb_interconnect`). In order of index:

0. the J1B Forth CPU. It runs the start-up sequence (clock chips,
   transceivers) and gives an interactive console over a UART;
1. the IPbus endpoint, which gives Ethernet access from a PC;
2. the GBT-SC based controller (IC), which takes commands over the GBT link
   itself, as a real GBTX does.

`wb_arbiter` grants the bus round-robin, starting after the master served
last. The grant takes one clock, and the master keeps it for as long as it
holds `cyc`. Transfers are classic Wishbone single reads and writes, 32-bit
data and word addresses. An assertion checks that a master sees `ack` or `err`
only while it holds the bus. Another checks that no slave answers outside a
cycle.

### Address map

Address bits [15:12] select the slave; each slave has 4096 words.

| bits [15:12] | slave | in this RTL |
|---|---|---|
| 0 | GBT-FPGA registers | port `wbs_gbt_*` |
| 1 | I2C master | `i2c_master` |
| 2 | E-Link registers | `elink_regs` |
| 3 | clock tuning (clock generator) | port `wbs_clk_*` |
| other | none | `err` one clock after `stb` |

### E-Link registers (`elink_regs`, word offsets)

| offset | access | contents |
|---|---|---|
| 0x000 | R | ID: `{8'hE1, N_ELINKS, EL_RATIO, 8'h01}` |
| 0x001 | RW | [15:0] clock phase target, signed, in 78.125 ps steps from reset |
| 0x002 | R | [15:0] phase reached, [16] stepping busy, [17] MMCM locked |
| 0x040 + i | RW | E-Link i: [4:0] delay taps, [8] sampling edge (1 = falling first); reads [20:16] the taps the delay line reports |

### I2C master (`i2c_master`, word offsets)

| offset | access | contents |
|---|---|---|
| 0 | RW | PRESC: quarter-bit period minus one, in bus clocks (reset 49: 100 kHz at 20 MHz) |
| 1 | W | command: [7:0] byte, [8] START, [9] STOP, [10] WRITE, [11] READ, [12] answer NACK |
| 2 | R | [7:0] byte read, [8] busy, [9] NACK received |

A command runs an optional START (or repeated START), then at most one byte,
then an optional STOP. While the master is busy, new commands are ignored.
Software polls bit 8. Writing register 0x0B of a device at address 0x68 thus
takes three commands: `START|WRITE|0xD0`, then `WRITE|0x0B`, then
`WRITE|STOP|data`. Every bit takes four quarter periods. The master waits in
the third quarter until SCL is actually high, so slaves may stretch the clock.
The outputs are open-drain enables: 1 pulls the line low.

## Clocks and reset

| clock | source | runs |
|---|---|---|
| `clk_wb` | start-up clock, 20 MHz (10 MHz on the earliest boards) | bus, registers, I2C, phase controller, MMCM phase port, delay-line control |
| `clk_el` | jitter-cleaned clock recovered from the GBT link | E-Link block, frame interface |

The bus runs on the start-up clock because the link clock only exists after the
CPU has configured the clock chips. The only signals that cross into `clk_el`
are the per-link edge selections, which are synchronized. The MMCM's LOCKED
signal is synchronized into `clk_wb`. All resets are synchronous and active
high.

## What follows the emulator's description and what is chosen here

These points follow the published description of the emulator: the frame
widths and rate, the uplink double data rate, the E-Link counts at 40 and
80 MHz, the 78.125 ps clock-phase step, the 32 x 78 ps input delay with
selectable edge, the three bus masters and the set of bus slaves, and the two
clock domains.

These points are this design's own choices:

* the downlink line rate (single data rate);
* the bit mapping and bit order;
* the frame-strobe clocking;
* one clock phase shared by all E-Links;
* the stepping controller;
* round-robin arbitration, the address map and all register layouts;
* everything inside the I2C master, which is only shown as a block next to the
  jitter cleaner.

The description gives the E-Link count as ceil(112 x 40 MHz / (2 f_EL)). That
formula equals the floor used here at 40 and 80 MHz. At other ratios it would
need more uplink bits than the frame has, so the RTL uses the floor and stops
elaboration if `N_ELINKS` is set too high. The MMCM's PSDONE latency and lock
time in the model are typical vendor values, not emulator figures.

Because of the two behavioural models, `gbtxemu_top` is a simulation model. To
build the FPGA, instantiate the vendor MMCM and IDELAYE2 primitives (with the
same port names) in place of `mmcm_ps_model` and `idelaye2_model`. Every other
module is synthesizable.

## Simulation

Each testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Build any of them with plain Verilator 5:

    verilator --binary --timing --sched-zero-delay --assert -Irtl -Itb -y rtl -y tb \
        rtl/gbtxemu_pkg.sv tb/tb_gbtxemu_top.sv --top-module tb_gbtxemu_top
    ./obj_dir/Vtb_gbtxemu_top

`--sched-zero-delay` is needed because the two primitive models delay
signals by a run-time amount that can be zero (0 taps, phase 0). The
end-to-end test takes well under a second and the cable test about 45 s.

| testbench | what it shows |
|---|---|
| `tb_gbtxemu_top` | whole design at its default size: 56 E-Links at 40 MHz. Three masters configure every link at once, with contention and an unmapped-address error. The clock phase moves 100 steps and the output clock delay is measured (7.8125 ns). A jitter-cleaner register is written over I2C. 300 frames of random traffic are checked bit by bit. A data edge 1 ns before the clock moves to the next sample when 31 delay taps are set. Each of these events is counted and must occur. |
| `tb_elinks` | E-Link block against an independent cycle model, at 40 MHz / 56 links and at 80 MHz / 28 links. Checks frame strobe period, downlink bits, uplink pairs for both edge settings, and unused bits. |
| `tb_wb_interconnect` | three concurrent masters with random traffic to four memory slaves and to unmapped addresses. Checks data, errors, routing and the round-robin bound on waiting. |
| `tb_elink_regs` | every register, the load pulses and the one-clock ack |
| `tb_elink_phase_ctrl` | targets up, down, negative and a full period; the number and direction of steps; no stepping while unlocked |
| `tb_i2c_master` | writes, reads with repeated START, an absent device (NACK), prescaler change, a slave that stretches the clock |
| `tb_cable_10m` | whole design with 10 m of cable to a front-end model on every E-Link, at 40 MHz / 56 links (default size) and at 80 MHz / 28 links: PRBS-7 streams both ways, the clock-phase sweeps shown above, then 2000 error-free frames at the chosen phase |
| `tb_mmcm_ps_model`, `tb_idelaye2_model` | delays of the two primitive models, measured in simulated time |

The testbenches use helpers in `tb/`: `wb_tb_master` and `wb_mem_slave` for the
bus, `i2c_slave_model` for an I2C device, `fee_link_model` for a front-end E-Link port behind a cable, and the two harnesses `elinks_harness` and `cable_harness`. Simulation is
two-state. The testbenches therefore reset everything they read and treat line
activity during reset as noise.

## Files

`rtl/gbtxemu_pkg.sv` holds the shared constants and the Wishbone structs. Each
other file in `rtl/` holds one module of the same name: `gbtxemu_top`,
`elinks`, `elink_tx`, `elink_rx`, `elink_regs`, `elink_phase_ctrl`,
`wb_interconnect`, `wb_arbiter`, `wb_decoder`, `i2c_master`,
`mmcm_ps_model` and `idelaye2_model`. Every file opens with a comment on what
the module does, its interface and its timing.
