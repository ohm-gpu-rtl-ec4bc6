# Ohm: an optical memory channel for a GPU with DRAM + 3D XPoint memory

A GPU that wants far more memory than DRAM alone can give pairs a small, fast
DRAM with a large, slow 3D XPoint (phase-change) memory. The trouble is the
data movement between the two: hot pages must be brought from XPoint into
DRAM, dirty lines must go back, and in a conventional design every one of those
copies passes through the memory controller and uses the memory channel twice.

The Ohm design replaces the GPU's electrical memory channels with one optical
waveguide and uses a property of micro-ring resonators to cut those copies
down. A ring that is only *half coupled* takes half of the light and lets the
other half pass. A half-coupled detector can therefore listen to traffic that
is meant for a device further down the waveguide ("snarf"). A half-coupled
modulator that writes a `0` as "half the light" rather than "no light" leaves
enough light for a second transmitter further along to modulate its own data
on it. The memory devices then move data among themselves while the memory
controller carries on, and the controller sees the traffic without asking for
a second copy.

This repository gives synthesizable SystemVerilog for the digital part of that
system: the memory controller, the XPoint controller, the DRAM-side device
interface, the channel arbitration and serialisation, and behavioural models of
the optics so that the whole system simulates as one design.

## System at a glance

```
            GPU side (one request/response port per channel)
                  |  |  |  |  |  |
 ohm_top   +------+--+--+--+--+--+------+
           | ohm_vc x 6 (16 wavelengths each, 96 bits in total)
           |
           |  mem_ctrl --ser--> [MC ring] ~~~> [DRAM fwd ring] --des--> dram_dev --ser--> [DRAM ring]
           |                                                                     ~~~> [XPoint fwd ring]
           |  xpoint_ctrl <--des-- [XPoint fwd ring]      xpoint_ctrl --ser--> [XPoint ring] ~~~ loop turn
           |  ~~~> [DRAM bwd ring] --des--> dram_dev      ~~~> [MC ring] --des--> mem_ctrl
           |
           |  channel_arbiter (who may send)   demux_ctrl (which ring listens, fully or half)
           |  optical_vchannel (light level at every ring)
           +----- DRAM chip port (c_*) ---- XPoint media port (m_*) ---- per channel
```

* **Static channel division.** The 96 wavelengths are split into six
  independent virtual channels of 16 wavelengths, one per GPU memory
  controller. Each channel joins one memory controller to one DRAM device and
  one XPoint device. `ohm_top` is six copies of `ohm_vc`.
* **One clock = one flit.** A flit is 16 bits, one per wavelength. The clock
  period is taken as 1 ns, so the DRAM and XPoint times below are clock
  counts. The optical line rate itself is not modelled.
* **Packets.** Every transfer is a 64-bit header (command, sender, receiver,
  request id, cache metadata, 40-bit line address). Commands that carry a line
  add 512 bits. A packet is 4 or 36 flits. Commands are `ACT`, `PRE`, `RD`,
  `WR`, `RDDATA`, `SWAP`, and `XRD`/`XWR` (DRAM read and write issued by the
  XPoint controller). See `ohm_pkg.sv`.
* **DDR-T side band.** The XPoint device answers asynchronously. It raises a
  ready message (`RDY_DATA`, `RDY_SWAP` or `RDY_RWR` plus an id). The memory
  controller confirms with a one-clock `confirm`. A reverse write ends with
  `rwr_done`.

## The light model

The optics are behavioural models (`photonic_tx`, `photonic_rx`,
`optical_vchannel`). They exist so that the snarf and the dual route are
exercised by the real bit patterns rather than assumed. Light power on each
wavelength is an integer in sixteenths of the laser power, which keeps
1, 1/2 and 1/4 exact.

| element | `1` | `0` |
|---|---|---|
| conventional modulator | passes light | absorbs all |
| half-coupled modulator | passes light | passes half |

A detector is off (detuned), fully coupled (absorbs everything) or half
coupled (absorbs half, passes half). Each detector also sees the level it would
get with every modulator idle. It decides a bit against that reference:

* Conventional sender: any light is a `1`.
* Half-coupled sender: more than 3/4 of the reference is a `1`.

The thresholds are this design's own choice.

`demux_ctrl` decides, from who is sending to whom and from the mode, which
rings are coupled and how:

* The addressed device's detector listens; the others are detuned.
* **Two-level mode:** the DRAM's forward detector is half coupled, so the
  XPoint controller further down the loop also hears the memory controller's
  `RD` and the DRAM's `RDDATA`.
* **Planar mode:** while the memory controller sends to the XPoint, its
  modulator works half coupled. The XPoint detector is then half coupled, and
  the XPoint modulator may put its own packet (swap traffic) on the remaining
  light. `channel_arbiter` allows that "overlay" and nothing else. Otherwise it
  grants whole packets with fixed priority DRAM > XPoint > memory controller,
  so that device responses drain first.

## Planar mode: one address space with page swaps

DRAM and XPoint form one address space with a 1:8 ratio. Memory is split into
groups of one 4 KB DRAM page and eight 4 KB XPoint pages. `remap_table` keeps
one small field per group. That field records which of the group's nine
logical pages currently sits in DRAM, plus an access counter for hot-page
detection.

Each group also keeps a candidate page and a saturating counter of the
accesses that went to XPoint. When the candidate reaches `HOT_TH` (4) such
accesses, it is hot. If another XPoint page already sits in DRAM, that page is
sent home first, and the next hot event brings the new page in. For each swap,
the memory controller:

1. Opens the DRAM row of the group's DRAM page (PRE/ACT under tRP/tRCD/tRRD,
   tracked by `ddr_bank_ctrl`).
2. Sends a `SWAP` packet to the XPoint controller. Its data word holds the DRAM
   line address in bits 39:0, the XPoint line address in bits 79:40, and the
   line count (64) in bits 95:80.
3. Holds back every request that conflicts with the swap: requests to that
   group, and requests to DRAM. Other XPoint requests keep flowing, on the same
   light as the swap traffic.

The XPoint controller first serves the requests it had already buffered. Then
its `ddr_seq_gen` exchanges the two pages line by line: DRAM read (`XRD`), XPoint
read, DRAM write (`XWR`), XPoint write. It generates the DRAM command packets
itself. When the exchange is done it raises `RDY_SWAP`. The memory controller
confirms, commits the new mapping and releases the stalled requests.

## Two-level mode: DRAM as a cache that the XPoint side maintains

DRAM is a direct-mapped cache of XPoint, ratio 1:64. There is no tag array.
Each DRAM line carries its metadata: valid, dirty and a 6-bit tag. This would
live in the ECC bits of a real DRAM; here it is the `meta` field of the DRAM
chip port. `tag_check` compares it with the request.

* **Every access** starts with a DRAM read of the indexed line. The `RD` packet
  carries the request's tag.
* **Read hit:** the data is answered.
* **Write:** the line is written to DRAM marked dirty.
* **Victims (auto-read/write).** The XPoint controller snarfs both the `RD`
  (with the wanted tag) and the DRAM's answer (line plus metadata). If the old
  line is valid, dirty and has a different tag, the XPoint controller writes it
  back to its own media. The memory controller never copies a victim.
* **Read miss (reverse write).** The memory controller sends the read to the
  XPoint device. Once the line is read, the XPoint controller raises `RDY_RWR`.
  The memory controller stops issuing, enables its `ddr_monitor` and confirms.
  The XPoint controller then writes the line into DRAM (valid, clean, new tag)
  and pulses `rwr_done`. The monitor has captured the same transfer, so the
  controller answers the GPU from it without a second read.

While a miss is outstanding, requests to its bank, and all reads, wait. Only
one miss is tracked at a time.

## XPoint controller internals

`xpoint_ctrl` is the logic layer of the XPoint device:

* **Buffers.** A read buffer and a write buffer (`sync_fifo`, 16 entries each)
  and an output buffer.
* **`xp_engine`.** Serves one media access at a time, reads before writes.
  Reads take 190 clocks and writes 763. Before each access, `start_gap`
  translates the address.
* **Wear levelling (`start_gap`).** Start-Gap wear levelling with one spare
  line. Every `PSI` = 100 writes, the gap moves by one line, which costs one
  line copy on the media. The mapping is algebraic, so no table is needed.
* **Back-pressure.** `buf_full` tells the memory controller to stop sending
  when either buffer has 4 or fewer free entries.
* **Not included.** ECC is not included.

`dram_dev` is the DRAM side: deserialised packets wait in an 18 KB input
buffer and drive the DRAM chip's command port. Read data returns as `RDDATA`
packets, with the line's metadata in the header.

## Top-level interface (`ohm_top`)

Every port is an array over the six channels:

| group | signals |
|---|---|
| GPU | `req_valid/req_ready/req_we/req_addr[39:0]/req_wdata[511:0]/req_id[7:0]`; `rsp_valid/rsp_we/rsp_id/rsp_data` (one clock per answer; writes answered when issued) |
| mode | `two_level` (0 planar, 1 two-level); change it only when the channel is idle, contents are not converted |
| DRAM chip | `c_valid, c_cmd, c_addr, c_wdata, c_wmeta` out; `c_rvalid, c_rdata, c_rmeta` in, tCL = 11 clocks after the read |
| XPoint media | `m_en, m_we, m_addr, m_wdata` out; `m_rdata` in, one clock later (the controller applies the media latency) |
| status | `init_busy` (about 2^18 clocks after reset, while the remap table clears), `err` (framing or buffer error), `stats` (`vc_stats_t` event counters) |

Default sizes per channel are 1 GB of DRAM (`IDX_W` = 24 line-index bits) and
64 GB of XPoint (`XP_AW` = 30). Six channels give 6 GB + 384 GB = 390 GB in
two-level mode. Planar mode uses 2^18 groups of nine 4 KB pages per channel,
54 GB in all.

## Where this departs from the published design

* **Planar capacity.** The published planar configuration is 108 GB with twice
  the DRAM; here one DRAM size serves both modes, so planar covers 54 GB. The
  two-level configuration (390 GB, 1:64) is matched.
* **Not given by the design, chosen here.** The hot-page rule and its
  threshold, the packet format, and the arbitration priority. Also the detector
  thresholds, the buffer depths, the `buf_full` margin, and the per-line order
  of the swap sequence.
* **Simplifications.** The memory controller has one request in flight and
  tracks one miss at a time. Requests wait rather than being reordered.
* **Not modelled.** Ring tuning delays, optical losses and power, and the
  30 GHz line rate. Timing is counted in 1 ns clocks.
* **Not included.** ECC is not included. The DRAM chip, the XPoint media and
  the GPU itself are outside: the testbenches have simple models of the first
  two.
* **Run-time mode switching.** This is supported only as a register change on
  an idle channel. The published design treats the two modes as
  configurations.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`, and every testbench has a watchdog.

* **Unit testbenches.** These compare against reference models written
  independently in the testbench: light levels, the Start-Gap mapping, bank
  timing, tag decisions and FIFO order. The XPoint engine testbench checks the
  190/763-clock latencies exactly. The DRAM bank testbench checks tRP, tRCD and
  tRRD.
* **Channel-level testbenches.** `tb_mem_ctrl`, `tb_xpoint_ctrl`, `tb_dram_dev`
  and `tb_ohm_vc` use `vc_driver` with reduced sizes and latencies. The driver
  sends random reads and writes in both modes with a mode change in between,
  and checks every read against a scoreboard.
* **`tb_ohm_top`.** Runs all six channels at full size and default parameters,
  about a million clocks, 262k of them for initialisation (about 10 s of
  simulation). It checks every read answer
  and that every DRAM access found its row open. It also requires every
  mechanism to occur on every channel: a conflict stall, a swap, an eviction
  by the XPoint controller, a reverse write, a mode change, a Start-Gap move
  and an overlay on the memory controller's light.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module tb_ohm_top \
    rtl/ohm_pkg.sv $(ls rtl/*.sv | grep -v ohm_pkg) tb/dram_chip_model.sv tb/xp_media_model.sv \
    tb/vc_driver.sv tb/tb_ohm_top.sv
./obj_dir/Vtb_ohm_top
```

List `ohm_pkg.sv` first. Unit testbenches need only the module under test and
its sub-modules. The simulator is two-state: everything that is read is reset
or initialised.
