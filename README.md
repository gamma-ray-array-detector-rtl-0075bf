# GRAD trigger board in SystemVerilog

The Gamma Ray Array Detector (GRAD) of the HIRFL External Target Facility is a
ball of 1024 CsI scintillators used to measure gamma-ray energies in in-beam
experiments. Most of what its
front end records is noise or unrelated scintillators. The trigger board's job
is to decide fast, for every candidate event, whether it is worth reading out,
and to tell the rest of the experiment why.

The front-end chips (MATE, 64 of them on 32 FEE modules) already reduce the
problem a lot. Each chip compares its 16 scintillator pulses with a threshold
and ORs them into **one hit line per section**. The trigger therefore sees only
64 bits. Two properties of these lines shape the whole design:

* a hit line **stays at 1 once set**, until the trigger resets the chip;
* the lines of one event arrive **spread out in time**, because particles reach
  different parts of the array at different times.

So the trigger waits a programmable *window* after the first hit, takes the
64-bit word once all hits are in, resets the chips, and judges that word in a
three-cycle pipeline. It counts the hits and tests five conditions: one or more
hits, N or more hits, and three kinds of "two neighbouring sections". It then
accepts or rejects the event against a software mask. The physics behind the
neighbour conditions: a gamma ray not fully absorbed in one section leaks into
the next one, most often the outer-ring section behind it. Random noise rarely
produces such pairs.

This repository holds RTL for the logic of both FPGAs on the board. It follows
the design published for this board by Du, Su, Qian and Kong (IMP/CAS), and
fills in the details that description leaves open. Those details are listed in
"Departures and choices" below.

## Block map

```
kernel_fpga  (100 MHz trigger clock)
  hit_in[63:0] ─► hit_sync ─► window_align ─► sync_fifo (64-bit event FIFO) ─► kernel_trigger
                     │             ├─► mate_reset ─► MATE chips                   │ (3-stage pipeline)
                     │             └◄─ gate_in (start detector)                   ├─► daq_trig / daq_reject ─► DAQ
                     └─► hold_timers (32) ─► hold[31:0] ─► FEE modules            ├─► gts_tx ─► gts_sd (40 MHz) ─► GTS
                                                                                  └─► event_writer ─► async_fifo (32-bit)
                                                                                                          │
  link_slave (CLK_33M) ◄── reads the async FIFO, takes parameter words ◄──────────────────────────────────┘
        ▲
        │  32 shared data lines + CLK_33M, Wr/Rd, Enable, Empty
        ▼
transmission_fpga  (33 MHz PCI clock)
  xfer_ctrl ◄── target_ctrl parameter buffer ◄── PCI target writes (host registers)
  xfer_ctrl ─► sync_fifo (32-bit) ─► dma_engine ─► PCI master writes (host ring buffer)
  PCI configuration-file words ─► dma_engine ─► flash_ctrl ◄─► M25P80 serial flash
  reconfigure order ─► ps_config ◄── flash_ctrl reads ;  ps_config ─► trigger-FPGA PS pins
```

`grad_trigger_module` is the board and the top module. It joins the two FPGAs
and brings every off-FPGA part out as ports: the LVDS buffers, the PLL, the
clock fan-out, the PCI core, the flash chip and the configuration pins.

## Sections, neighbours and the five conditions

Bit `i` of the 64-bit hit word is section `i`:

| bits | ring | FEE module |
|---|---|---|
| 0 … 31 | inner ring, section k = bit k | module k |
| 32 … 63 | outer ring, section k = bit 32+k | module k (same module as inner k) |

The 5-bit trigger information (`grad_pkg::trig_info`) is:

| bit | condition | logic |
|---|---|---|
| 0 | at least one hit | `hitnum >= 1` |
| 1 | at least N hits (N set by software, 7 bits) | `hitnum >= N` |
| 2 | two neighbouring inner sections | some k: `h[k] & h[k+1]`, k = 0…30 |
| 3 | two neighbouring outer sections | some k: `h[32+k] & h[33+k]` |
| 4 | inner section and the outer section behind it | some k: `h[k] & h[32+k]` |

By default the rings are open: section 31 is not a neighbour of section 0.
Whether the two ends of a ring touch depends on the detector geometry, which
is not given here. Setting `RING_WRAP = 1` on `kernel_trigger` closes the
rings.

**Decision.** The 5-bit condition mask enables conditions. An event is accepted
when every enabled condition holds: `(info & mask) == mask`, i.e. each
information bit is at least its mask bit. A mask of 0 accepts everything. The
reset values are N = 2 and mask = `00010`, the setting reported for the real
experiment: two or more hit sections, nothing else required.

**L1 word** (12 bits, to the global trigger): `{hitnum[6:0], info[4:0]}`.

## Event alignment (`window_align`)

The hardest part to get right is the timing around one event:

```
hit lines      ___/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_______      (held by the MATE latch)
hit_reg            (2 clocks later)
state          IDLE | COUNT  (window_time+1 clocks) | RESET (4) | HOLD-OFF (3) | IDLE
fifo_we                                             ‾|_
mate_reset                                          ‾‾‾‾‾‾‾‾‾|_
```

* The start is the first non-zero `hit_reg`, or, when `use_gate` is 1, a rising
  edge of the start-detector gate. The gate passes two synchroniser flops first.
* If the start is seen at clock edge t0, `fifo_we` and `mate_reset` rise after
  edge t0 + window_time + 1. The word written is `hit_reg` at that moment. It
  holds every section hit so far, because the MATE latches keep the lines high.
* `mate_reset` lasts `RST_CYCLES` (4). A hold-off of `HOLDOFF` (3) cycles
  follows, so that lines already cleared have left the synchroniser before the
  next event can start.
* Events therefore take at least window_time + 9 clocks each. A hit that comes
  after the window closes is cleared by the reset if the MATE reset is still
  high. Otherwise it starts the next event.

In gate mode, an event with no hit at all is still written. It is then rejected
by any mask that asks for condition 1 or 2.

## Trigger pipeline (`kernel_trigger`) and outputs

| cycle | work |
|---|---|
| 1 | `hitnum = popcount(hits)` (64 → 7 bits) |
| 2 | `info = trig_info(hits, hitnum, N)` |
| 3 | decision; `accept` or `reject`, the L1 word and the hit word registered |

An event read from the event FIFO at edge t gives its decision after edge t+3.
The pipeline takes one event per clock. Counted from the aligned write into the
event FIFO, `daq_trig` or `daq_reject` comes 4 clocks (40 ns) later.
In gate mode the whole path, from the gate's rising edge to the decision, takes
19 clocks with a 10-clock window, and one more clock for each extra window
clock.

* `daq_trig` / `daq_reject`: one-cycle pulses, the fast L1 decision to the DAQ.
* `gts_tx`: the L1 word crosses into the 40 MHz experiment clock by a toggle
  handshake. It goes out as idle-0, one start bit of 1, then 12 bits MSB first:
  13 clocks per frame. While a frame is being sent, one more word may wait. A
  word offered while one is already waiting is dropped and `gts_overrun`
  pulses.
* `event_writer`: for an accepted event, the low half (inner ring) and then the
  high half (outer ring) go into the 32-bit asynchronous FIFO. The event is
  dropped whole (`data_dropped`) if fewer than two entries are free.

## Track-and-hold timers (`hold_timers`)

The MATE's track-and-hold must be frozen at the pulse peak, a fixed time after
the hit. Timer k starts on the first hit of section k or section 32+k (the two
MATEs of FEE module k). Hold line k rises after `hold_time + 1` clocks and stays
high until the event is rejected or the DAQ pulses `hold_release` after reading
the held values. The window-end `mate_reset` clears only the hit latches and
leaves the holds alone.

## Link between the FPGAs

There are 32 bidirectional data lines and four controls, all on CLK_33M, which
the transmission FPGA drives. In this RTL each side has separate in, out and
output-enable signals. The top module resolves the shared lines, and an
assertion checks that the two sides never drive at the same time.

| signal | driven by | meaning |
|---|---|---|
| `wr_rd` | transmission | 0: read trigger data, 1: write parameters |
| `enable` | transmission | in read mode, pop the word on the lines; in write mode, take the parameter word |
| `empty` | trigger | the trigger FPGA's data FIFO is empty |

In read mode the trigger side shows the head of its FIFO on the lines. A word
moves at every edge with `enable` high. `xfer_ctrl` lets parameters go first. It
spends one idle cycle on every change of direction.

**Parameter word** `{addr[7:0], 8'h00, value[15:0]}`:

| addr | register | reset |
|---|---|---|
| 0x00 | window time (clocks, 8 bits) | 10 |
| 0x01 | N of condition 2 (7 bits) | 2 |
| 0x02 | condition mask (5 bits) | 00010 |
| 0x03 | hold time (clocks, 8 bits) | 20 |
| 0x04 | bit 0: gate mode | 0 |

The parameters live in the 33 MHz domain. They reach the 100 MHz logic through
two flops per bit. This is safe only because they are set before a run and not
while events are flowing.

**Host registers** (PCI target writes, `target_ctrl`): 0x00–0x0F go to the
trigger parameters above; 0x10 erases the flash; 0x11 reconfigures the trigger
FPGA; 0x12 sets the configuration file length in bytes; 0x14 sets the DMA ring
base address; 0x15 sets the DMA ring size in words.

**DMA** (`dma_engine`): each trigger data word is offered on the master port
with the address `base + 4*i`. The index i wraps at the ring size, and
`words_sent` counts the words delivered.

## Remote reconfiguration

* **Storing a file.** The host erases the flash (0x10), then streams the file
  as 32-bit words on the PS-file port, least significant byte first, with
  `ps_last` on the final word. `flash_ctrl` writes it from address 0 using the
  M25P80 commands: WREN, then PP, splitting at 256-byte pages, then RDSR
  polling.
* **Loading it into the trigger FPGA.** On a reconfigure order (0x11),
  `ps_config` does the following:
  1. pulses nCONFIG and waits for nSTATUS;
  2. reads the flash from address 0;
  3. shifts each byte out on DATA0 LSB first, one DCLK period per bit;
  4. checks the pins two clocks after each byte;
  5. once CONF_DONE is high, gives 16 more DCLK periods and raises `cfg_done`.

  nSTATUS falling, or `ps_len` bytes sent without CONF_DONE, raises `cfg_error`.

## Clocks and resets

| clock | source | used by |
|---|---|---|
| `clk` 100 MHz | trigger FPGA PLL | all trigger logic |
| `clk_ext` 40 MHz | experiment clock | GTS serial output |
| `clk_pci` 33 MHz | PCI | transmission FPGA, forwarded as CLK_33M |

There are three crossings:

* L1 words cross by a toggle handshake.
* Hit data crosses through the Gray-pointer `async_fifo`.
* Parameters cross as quasi-static registers.

`rst_n` is asynchronous and shared by all domains. Assert it for a few cycles of
the slowest clock.

## Departures and choices

These points are not fixed by the published description. They are this
design's choices:

* **Logic details.** Bit order of the hit word and of the information bits, the
  neighbour relation, and the L1 word layout.
* **Window and timers.** Window, hold and reset lengths are counted in 100 MHz
  clocks with 8-bit registers. The reset length is 4 cycles and the hold-off 3.
* **Decision rule.** The description states it two ways: "each bit ≥ its mask
  bit" and "not equal → invalid". The first is implemented. For the strict
  equality, change the one line `assign pass` in `kernel_trigger`.
* **Reset of the chips.** The description resets the MATE chips after the
  aligned word is stored, and again mentions a reset after an invalid event.
  Here the chips are reset once per event, at the end of the window, so
  accepted and rejected events are treated the same. A reject only clears the
  hold timers.
* **Hit data for the host.** Only accepted events are sent to the host. The
  description stores the hit data after the decision but does not say whether
  rejected events go too.
* **Hold release.** The description does not say when the hold ends. Here it
  ends on reject or on a DAQ release.
* **Board interfaces.** The GTS frame format, the link protocol details, the
  host register map, the DMA ring and the FIFO depths (16) are all this
  design's own.
* **Reconfiguration.** The flash and PS sequences follow the usual data-sheet
  schemes of these parts.
* **Not built.** The MATE chip itself, the LVDS buffers, the PLL, the
  oscillator and clock fan-out, the PCI core (the board sits on PXI, which is
  PCI electrically) and the DDR SDRAM. The SDRAM appears on the board's block
  diagram next to the transmission FPGA, but its use is not described, so
  nothing here talks to it. Testbenches use simple
  behavioural models for the MATE hit latches (`tb/mate_model.sv`), the serial
  flash (`tb/m25p80_model.sv`) and the FPGA configuration pins
  (`tb/fpga_ps_model.sv`).

## Capacity against the experiment

* **Channels.** The full array needs 64 hit lines and 32 hold lines, all built.
  The reported test used 512 scintillators on 16 FEE modules (32 lines), which
  fits, and the unused inputs stay 0.
* **Event rate.** The highest rate reported is 729 Hz. Worst case here, with a
  window of 255 clocks, one event takes 2.64 µs, so about 378 k events/s.
* **Downstream links.** The GTS link carries 3 M frames/s. The data link moves
  one 32-bit word per 30 ns.
* **Latency.** The stated limit is below 50 ns. Here it is 40 ns from the
  aligned word to the decision, plus 20 ns of input synchroniser before it.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. Each has a watchdog. Example with plain
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/grad_pkg.sv tb/tb_grad_trigger_module.sv --top-module tb_grad_trigger_module
./obj_dir/Vtb_grad_trigger_module
```

| testbench | what it covers |
|---|---|
| `tb_grad_trigger_module` | whole board at default sizes: parameters over PCI; directed and random events under every single condition; L1 words and DMA data against a reference model; gate mode; a burst that forces GTS overruns and dropped events; flash programming and trigger-FPGA reconfiguration. It counts each mechanism and fails if one never happens. About 205 µs simulated, seconds of run time. |
| `tb_grad_experiment` | the in-beam test setup: 16 FEE modules (32 hit lines), events opened by the start-detector gate, 600 gamma-ray-like events whose leak probabilities imitate the reported rate table. Checks every decision, L1 word and DMA word, the per-condition counts and their order, and the delays (4 clocks from the event FIFO, 19 clocks from the gate with a 10-clock window) |
| `tb_kernel_fpga`, `tb_transmission_fpga` | each FPGA alone with stand-ins for the other |
| `tb_kernel_trigger` | pipeline against a reference, exact 3-cycle latency, back-to-back events |
| `tb_window_align` | window timing to the cycle, reset length, gate mode |
| `tb_grad_pkg` | condition function against a loop reference, ring wrap |
| `tb_hold_timers`, `tb_gts_tx`, `tb_async_fifo`, `tb_sync_fifo`, `tb_event_writer`, `tb_link_slave`, `tb_xfer_ctrl`, `tb_target_ctrl`, `tb_dma_engine`, `tb_flash_ctrl`, `tb_ps_config`, `tb_hit_sync` | the remaining blocks one by one |

The simulator used has only two logic states, so every register that is read
is reset.
