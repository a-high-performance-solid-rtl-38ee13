# Double-data-rate NAND flash channel for a multi-channel SSD

Conventional asynchronous NAND flash moves one byte per write-enable or read-enable pulse. That
limits a flash channel to roughly one byte per 25–50 ns. This design doubles the rate of the
interface without raising its clock:

- Data moves on **both edges** of a single strobe.
- The read path gets a **source-synchronous strobe** generated inside the flash chip.

The controller and the flash share the following pins:

| pin | direction | role |
|---|---|---|
| `RWEB` | controller → flash | the only strobe for commands, addresses and write data; also paces read data |
| `DVS` | flash → controller | data-valid strobe; a delayed copy of `RWEB` made by a DLL in the flash; the controller captures read bytes on it |
| `IO[7:0]` | both | command, address and data bytes |
| `CEB[w]`, `CLE`, `ALE`, `RB[w]` | as in ordinary NAND | chip enable per way, command/address latch enables, ready/busy per way |

With an 83 MHz clock (12 ns period), one 8-bit channel carries 2 bytes every 12 ns. That is
about 167 MB/s, against ~40 MB/s for an asynchronous interface at the same pin count.

Several chips ("ways") share one channel and are used one after another in round robin. Several
channels run side by side ("striping"). A page program or read keeps a chip busy for tens to
hundreds of microseconds, so the channel is handed to another way during that time.

The top level, `ssd_nand_top`, builds `CHANNELS × WAYS` flash chips (default 4 × 4). Each channel
has one controller and a board-wiring model.

## Block map

```
             host side (per channel)                        flash side (per way)
  req/wr/rd ──► nand_if ─────────── board_channel ─────────── nand_flash_chip
                 │ sync_fifo  WFIFO0 (even bytes)              │ nand_ctrl_logic  (command FSM)
                 │ sync_fifo  WFIFO1 (odd bytes)               │ nand_io_latches  (WLAT0/1, RLAT0/1, mux)
                 │ async_fifo RFIFO0 (on DVS fall)             │ nand_page_register (page buffer)
                 │ async_fifo RFIFO1 (on DVS rise)             │ nand_cell_array  (behavioural array + tR/tPROG)
                 │ gen_w      (RWEB from CLK)                  │ dll              (behavioural DVS delay)
```

`nand_pkg` holds the command codes, the address-cycle count, the interface timing constants and
the operation type.

## The strobe: `gen_w`

`RWEB` is the system clock gated by a transfer enable: `rweb = clk | ~en_q`. `en_q` is registered
on the rising edge of `CLK`. It therefore changes only while `CLK` is high, and the OR gate
cannot glitch.

Each active cycle gives one low pulse of `RWEB`, during the low half of `CLK`:

- **Command and address cycles** are single data rate. The flash latches the byte on the rising
  `RWEB` edge.
- **Data cycles** are double data rate:
  - The even byte of a pair is launched while `CLK` is high and latched by the flash on the
    falling `RWEB` edge.
  - The odd byte is launched while `CLK` is low and latched on the rising `RWEB` edge.

The paper only says that both edges carry data. Which byte goes on which edge is this design's
choice.

## Controller: `nand_if`

### Write path

The host hands in 16-bit words:

- The low byte goes to WFIFO0 and the high byte to WFIFO1. This matches the paper's pair of
  FIFOs, one per clock edge.
- At each data cycle both FIFOs are popped on the rising `CLK` edge:
  - The even byte goes into `q0`.
  - The odd byte goes into `hold1`. It is copied into `q1` on the falling `CLK` edge.
- The pin driver is `io_out = ddr ? (clk ? q0 : q1) : cmd_byte`.

Each output register is therefore stable for a whole half period around the `RWEB` edge that
samples it.

If the host falls behind and either FIFO is empty, `RWEB` simply stays high for that cycle. This
is a **write stall**: the flash sees a longer gap between pairs, and nothing is lost.

### Read path

In a read burst the controller toggles `RWEB` and the selected flash returns data:

- The DLL output `DVS` comes back with the flash's output delay plus the board delay.
- RFIFO0 is written on the falling `DVS` edge and RFIFO1 on the rising edge.
- Both are dual-clock Gray-code FIFOs: their write clock is `DVS` and their read clock is `CLK`.
  The arrival time of `DVS` therefore never has to be known in the `CLK` domain.

The host drains the two FIFOs as one 16-bit word stream with `rd_valid/rd_ready`:

- The controller keeps a **credit counter** of words requested but not yet taken by the host. It
  issues a read `RWEB` pulse only while that count is below the FIFO depth.
- When the host back-pressures, `RWEB` stops. This is a **read stall**.

The credit counter is the reason the FIFOs can never overflow. It is not in the paper, which does
not describe flow control.

### Command sequencer and way interleaving

Each request names a way, a row (page address), and read or write. The command sequences are
standard NAND:

- Program: `80h`, four address bytes, the page data, then `10h`.
- Read: `00h`, four address bytes, then `30h`. The data is fetched later, once the chip is ready.

The column address is always 0 (whole page).

After a program is sent, or the `30h` of a read, the way is marked busy. Its `RB` line goes low
once the chip has started, and the channel is free for another way at once. This is the
**interleaving**: several chips of one channel run their array operations together.

The controller watches every way's `RB` through a two-flop synchroniser:

- A way with a pending read whose `RB` has risen again is picked in **round-robin** order, and
  its page is streamed out.
- A finished program raises `prog_done` with the way number.

New requests are accepted only when the channel is idle, no read data is waiting, and the named
way has no operation open.

## Flash chip model: `nand_flash_chip`

The flash side is written so that its interface logic is real RTL. Only the parts with no logic
description are behavioural: the cell array and the DLL.

- **`nand_ctrl_logic`** is the command state machine, clocked by the rising edge of `RWEB`.
  - It decodes `80h/10h/00h/30h` and collects the four address bytes.
  - It opens the data-in or data-out window.
  - It requests an array operation from the cell array through a toggle handshake.
  - `RB` is simply "request toggle equals acknowledge toggle".
- **`nand_io_latches`** holds the duplicated latches:
  - On the falling `RWEB` edge WLAT0 takes the even byte. On the rising edge WLAT1 takes the odd
    byte and the pair is written to the page register on the next falling edge.
  - For reads, RLAT0 is the page register's low byte and RLAT1 its registered high byte. A
    multiplexer selected by the **level** of `RWEB` puts one of them on the pins: RLAT0 while
    `RWEB` is low, RLAT1 while it is high. Each byte is thus on the bus for the half period that
    precedes the matching `DVS` edge.
- **`nand_page_register`** is the 2 KB page buffer, organised as 16-bit words.
- **`nand_cell_array`** (behavioural) stores `PAGES` pages.
  - It waits `T_R_NS` for a read or `T_PROG_NS` for a program.
  - It copies between the array and the page register while `RB` is low.
- **`dll`** (behavioural) is a fixed delay `T_DLL_NS` applied to `RWEB` while the output
  window is open. The paper sizes the DLL delay as `t_DLL = t_IOD,max − t_RWEBD,min + t_IOS`: the
  output delay, minus the strobe delay, plus the set-up time. The package computes that value
  from its timing constants.

## Board wiring: `board_channel`

A behavioural model of the PCB traces of one channel:

- It fans the controller's pins out to the ways.
- It ORs the enabled chips' outputs onto the read bus.
- It ANDs the `DVS` outputs. Each chip holds its `DVS` high when it is not driving.

It also adds the delays:

| signal | delay |
|---|---|
| strobe | 1 ns |
| command/address/data and chip enables | 2 ns |
| read data back | 2 + 1 ns |
| `DVS` back | 4.69 ns (the paper's measured strobe-to-data skew, t_DIFF) |

These delays make sampling deterministic in a zero-delay simulator. They also reproduce the
paper's point: read data arrives in a window that only a strobe travelling with it can sample.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `ssd_nand_top` | `CHANNELS` | 4 | channels (striping) |
| | `WAYS` | 4 | chips per channel (interleaving) |
| | `PAGE_BYTES` | 2048 | page size |
| | `PAGES` | 8 | pages modelled per chip |
| | `FIFO_DEPTH` | 16 | entries in each of WFIFO0/1 and RFIFO0/1 |
| | `T_R_NS`, `T_PROG_NS` | 25 000 / 200 000 | SLC array times; MLC is 60 000 / 800 000 |
| `nand_pkg` | `T_P_NS` | 12 | clock period (83 MHz) |

Where these values come from:

- The clock and the 4 × 4 arrangement follow the paper.
- The page size, the page count and the array times are typical SLC/MLC values of that flash
  generation, not the paper's.

## Simulation

Every file is plain SystemVerilog. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

```
verilator --binary --timing --assert -Irtl -Itb rtl/nand_pkg.sv \
    $(ls rtl/*.sv | grep -v nand_pkg) tb/tb_ssd_nand_top.sv --top-module tb_ssd_nand_top
./obj_dir/Vtb_ssd_nand_top
```

The testbenches are:

- **`tb_ssd_nand_top`** runs the end-to-end test on 2 channels × 4 ways with 64-byte pages. It
  does the following:
  - Writes a page to every way, with random host gaps that cause write stalls.
  - Waits for all programs to finish.
  - Reads every page back with random host back-pressure.
  - Counts write bursts, read bursts, write stalls, read stalls, cycles with at least two busy
    ways (interleaving), and cycles with two channels moving data (striping). A mechanism that
    never occurs counts as a failure.
- **`tb_ssd_nand_full`** runs the same test with the top at its defaults. That is 16 chips and
  2 KB pages, about 0.4 ms of simulated time.
- **`tb_nand_if`** tests one controller against two chip models:
  - the exact command and address byte sequences;
  - a burst of `PAGE_BYTES` bytes in `PAGE_BYTES/2` clock periods when the host keeps up;
  - a second way being programmed while the first is still busy;
  - read-back with and without back-pressure.
- The remaining testbenches cover one block each.

## Departures from the paper

These points are this design's own choices or simplifications:

- The assignment of the even byte to the falling edge, the pin-level command set, the four
  address cycles and the ready/busy protocol are assumed. The paper keeps the standard NAND
  command interface but does not spell it out.
- The credit-based read flow control is this design's own. So is the way-selection rule:
  round robin among ready reads, lowest index for finished programs.
- The **legacy mode** is not built. In that mode the same controller drives ordinary
  asynchronous NAND with a separate read enable and a data clock (the paper's `GEN_R` and
  `D_CON` blocks). Only the DDR path exists.
- The SSD's processor, ROM, RAM, host interface, DRAM buffer interface and ECC appear in the
  paper only as surrounding system parts. The chip's X/Y decoders and cell array are analog and
  process-specific. None of these is designed here: the host side is left as ports, and the
  cell array is a behavioural model.
- Each chip models 8 pages rather than a full block structure. There are no erase, status-read
  or multi-plane commands.
- The DLL is an ideal fixed delay. A real DLL locks to the clock period; this model does not
  lock or track voltage and temperature.
