# AHB-to-APB bridge driven over SPI

An AHB-to-APB bridge lets a fast AHB bus master talk to slow, simple APB
peripherals. The bridge is an AHB slave on one side and the only APB master on
the other. It turns each AHB transfer into a two-cycle APB transfer: a
*setup* cycle with PSEL high and PENABLE low, then an *access* cycle with
PENABLE high. While a transfer is being carried out it holds the AHB master
off with HREADYOUT low.

This design puts such a bridge on an FPGA and drives it from a small host
computer over SPI, so the whole bridge can be exercised through four pins:

```
            SPI (SCLK, CSn, MOSI)            100-bit command
 SPI   ──────────────────────────► spi_slave ───────────────► mapper1
 master                               │  ▲                       │ Haddr Hwdata Prdata
       ◄────────── MISO, start_transaction │                     │ Htrans Hwrite Hreadyin
                                      │  │ 104-bit result        ▼
                                      │  └──────────────── mapper2 ◄── bridge_top ──► APB
                                      │                                 (AHB slave,  Pselx Paddr
                                      └──── strobes ────────────────►    FSM)        Pwdata Pwrite
                                                                                      Penable
```

Each SPI frame carries one AHB command. The FPGA decodes it, runs it through
the bridge, and returns a snapshot of the bridge's outputs in the next frame.
The host serialises and checks the commands; it is not part of the RTL.
The APB outputs are also brought out of the top level as pins.

## Modules

| File | Module | Role |
|---|---|---|
| `rtl/ahb_apb_pkg.sv` | `ahb_apb_pkg` | Widths, HTRANS/HRESP codes, FSM state enum, the two frame structs, address decoder |
| `rtl/spi_slave.sv` | `spi_slave` | SPI mode-0 slave, oversampled in the system clock |
| `rtl/mapper1.sv` | `mapper1` | Assembles 100 serial bits and splits them into AHB signals |
| `rtl/ahb_slave_interface.sv` | `ahb_slave_interface` | Qualifies AHB transfers, decodes the peripheral select, holds the pipelined address phase, error response |
| `rtl/apb_fsm_controller.sv` | `apb_fsm_controller` | Eight-state FSM that sequences the APB setup/access cycles and AHB wait states |
| `rtl/bridge_top.sv` | `bridge_top` | The bridge: slave interface + FSM |
| `rtl/mapper2.sv` | `mapper2` | Captures the bridge outputs into a 104-bit result frame and shifts it out |
| `rtl/top_module.sv` | `top_module` | The whole FPGA design |

All logic runs on one clock, with synchronous active-low resets.

## The command and result frames

The host clocks **104 SCLK cycles per frame** (SPI mode 0, MSB first). The
first 100 MOSI bits are the command; the last 4 are ignored. At the same time,
MISO returns the 104-bit result.

Command (`in_frame_t`, 100 bits):

| Bits | Field |
|---|---|
| 99:98 | Htrans |
| 97 | Hreadyin |
| 96 | Hwrite |
| 95:64 | Haddr |
| 63:32 | Hwdata |
| 31:0 | Prdata — the value the APB peripheral "returns" for a read |

Result (`out_frame_t`, 104 bits):

| Bits | Field |
|---|---|
| 103 | Hreadyout |
| 102:101 | Hresp |
| 100 | Penableout |
| 99 | Pwriteout |
| 98:96 | Pselxout |
| 95:64 | Paddrout |
| 63:32 | Pwdataout |
| 31:0 | Hrdata |

The field widths and the two totals are from the paper. The order is this
design's choice:

- The command's three 32-bit fields are placed so that the paper's printed
  test frame `4_8000000C_FFFFFFFF_56781234` splits into address 0x8000000C,
  write data 0xFFFFFFFF and read data 0x56781234. Those are the values the
  paper's waveforms show.
- The result's fields follow the order in which the paper's block diagram
  lists the mapper inputs.

No peripheral sits on the APB side, so read data travels inside the command
(Prdata). The bridge copies it to Hrdata during the read's access cycle.

**Latency of a result.** `mapper2` keeps a snapshot of the bridge outputs. It
updates the snapshot in every cycle that has Penableout high (an APB access
cycle) or a non-OKAY Hresp. At the falling CSn edge that starts a frame, the
snapshot moves into the shift register. So frame *n* returns the result of
frame *n−1*'s command. A command that causes neither an APB access nor an
error leaves the previous snapshot in place.

`mapper1` drives Htrans with the frame's value for exactly one clock cycle,
then IDLE. Every other field holds until the next frame. Each frame is
therefore **one** AHB transfer (or none, if Htrans is IDLE/BUSY or Hreadyin
is 0).

## The APB FSM controller

The controller is the part of the design that is hardest to follow. It
overlaps an AHB address phase with an APB transfer that is still running, so
it needs eight states rather than the three of a plain APB master.

Two registers in `ahb_slave_interface` feed it:

- **Haddr1 / Hwritereg** hold the address and direction of the last address
  phase the master completed (sampled when Hreadyin is high).
- **Valid** is high when the address phase *currently* on the bus is a real
  transfer: Hreadyin high, Htrans NONSEQ or SEQ, and an address that decodes
  to a peripheral.

AHB write data arrives one cycle after its address. A write therefore cannot
start on the APB until the data phase has happened. The W-states handle that,
and the P ("pending") states handle a second transfer that arrives while the
first is still being issued.

| State | Meaning | Next state |
|---|---|---|
| `ST_IDLE` | nothing in flight | Valid & Hwrite → `WWAIT`; Valid & !Hwrite → `READ`; else `IDLE` |
| `ST_WWAIT` | write address seen, waiting for its data | Valid → `WRITEP`; else `WRITE` |
| `ST_READ` | APB setup of a read (Hreadyout 0) | → `RENABLE` |
| `ST_WRITE` | APB setup of a write | Valid → `WENABLEP`; else `WENABLE` |
| `ST_WRITEP` | APB setup of a write with another transfer pending (Hreadyout 0) | → `WENABLEP` |
| `ST_RENABLE` | APB access of a read | Valid & !Hwrite → `READ`; Valid & Hwrite → `WWAIT`; else `IDLE` |
| `ST_WENABLE` | APB access of a write | same as `RENABLE` |
| `ST_WENABLEP` | APB access of a write, a transfer pending | !Hwritereg → `READ`; Valid → `WRITEP`; else `WRITE` |

The paper's state diagram gives all of these arcs except two:

- There is no arc out of `WRITEP`. This design goes straight to `WENABLEP`.
- There is no "Valid = 0" arc out of `WENABLE`. This design goes to `IDLE`.

Without these two, the machine could stick.

**Outputs.** All APB outputs are registered and change on the clock edge
that *enters* a state:

- Entering `READ`, `WRITE` or `WRITEP` loads Paddr, Pselx and Pwrite (APB
  setup) with Penable 0.
  - A write takes Haddr1 and the live Hwdata. Hwdata is the data phase of
    that write.
  - A read takes the live Haddr. The exception is a read entered from
    `WENABLEP`, which takes the queued Haddr1.
- Entering `RENABLE`, `WENABLE` or `WENABLEP` sets Penable (APB access).
- Entering `IDLE` or `WWAIT` clears Pselx and Penable.

**Hreadyout** is combinational from the state:

- 0 in `READ`, because the read data arrives only in the access cycle.
- 0 in `WRITEP`, because a second address phase is already pending.
- In `WENABLEP` it equals Hwritereg, so a queued read is held off.
- 1 everywhere else.

**Timing**, counted from the clock edge that ends the address phase:

| Transfer | Timing |
|---|---|
| Lone read | APB setup +1, access +2; the AHB data phase ends with the access cycle (1 wait state) |
| Lone write | setup +2, access +3; the AHB side sees no wait state |
| Back-to-back writes | one APB transfer every 2 cycles |
| Read behind a write | waits in `WENABLEP`, then runs as a normal read |

The paper gives no latencies. These are the ones this RTL has, and
`tb_bridge_top` checks them.

`bridge_top` also carries two immediate assertions on its APB outputs. One
checks that at most one Pselx bit is set. The other checks that Penable is
never high without a selected peripheral. They live in the bridge rather than
the FSM because that rule holds only when the slave interface decodes the
address. The FSM on its own will pass through whatever select it is given.

## Address decode and errors

The paper gives no address map. This design decodes three 64 MiB windows into
a one-hot Pselx:

| Haddr | Pselx |
|---|---|
| 0x8000_0000 – 0x83FF_FFFF | 001 |
| 0x8400_0000 – 0x87FF_FFFF | 010 |
| 0x8800_0000 – 0x8BFF_FFFF | 100 |

The paper's example addresses 0x8000000C and 0x80000008 fall in the first
window, and the paper shows them with Pselx 1.

A transfer to any other address starts no APB cycle. The next cycle, Hresp
reads `2'b10`. That is the value the paper's result table prints for address
0x8C000000, which it calls an error response.

Real AHB encodes ERROR as `01` and stretches it over two cycles. This design
keeps the paper's value and a one-cycle response.

## SPI slave timing

SCLK, CSn and MOSI are asynchronous to the system clock. Each goes through a
two-flop synchroniser, and edges are found in the clock domain:

- MOSI is taken 2–3 clocks after an SCLK rising edge.
- A new MISO bit appears 3–4 clocks after an SCLK falling edge.

So each SCLK half period must last more than 4 system clocks. Use
**SCLK ≤ clk/10**. The testbenches use half periods of 6 clocks.

After the 100th bit, `frame_done` pulses. `mapper1` latches the command and
`start_transaction` goes high. It stays high until the next frame starts, and
it is also returned to the host as a pin.

## Where this departs from the paper

- **No separate APB interface block.** The paper's bridge has a third
  sub-block that only renames the FSM's outputs to `*out` ports. Here the FSM
  drives those ports directly.
- **No Haddr2 / Hwdata1 / Hwdata2 registers.** The paper's AHB slave lists
  two pipeline stages of address and data. The FSM above needs only the first
  address stage, because it samples write data live in the data phase. As a
  result, a generic synthesis of `bridge_top` has 111 flip-flops against the
  paper's 238 sequential cells. The port count is the same, 206 bits.
- **Hreadyout and Hresp come from the FSM and the slave interface.** The text
  gives them to the APB interface; the block diagram draws them this way.
- **One clock.** The paper speaks of clock-domain synchronisation between AHB
  and APB, but its diagrams give every block the same clock. Only the SPI
  inputs cross a clock boundary here.
- **The printed test frame is not a write.** Under the frame layout above,
  its top nibble `0x4` means Htrans = BUSY with Hreadyin = 0. The paper's text
  describes the same run as a write with Htrans = 3 and Hreadyin = 1. A single
  set bit in 0x4 cannot encode that under *any* order of those four control
  bits. The testbench sends the printed frame as a no-op and sends the
  described write separately.
- **The result table is reproduced only in part.** For the command to
  0x8C000000 the table prints Hrdata 0x12345678, Hresp 10 and Hreadyout 1,
  which this design returns. It also prints an APB write (Paddr, Pwdata,
  Pwrite 1, Penable 1, Pselx "0101"). That contradicts an error response, so
  this design does not issue it.
- **Both HTRANS 10 and 11 start a transfer.** The paper calls each of them
  "non-sequential" in different places. Bursts are handled as back-to-back
  single transfers.
- The SPI mode, bit order, 104-clock frames and the one-frame result latency
  are all this design's own choices.

## Testbenches

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it does |
|---|---|
| `tb_spi_slave` | SPI master model. Checks each received bit, `frame_done`/`start_transaction`, and the MISO bits against a model shift register. Includes a short frame. |
| `tb_mapper1` | Random frames plus the two published ones. Checks every field, the one-cycle Htrans, and that the other outputs hold. |
| `tb_ahb_slave_interface` | Random AHB stimulus against a reference model of Valid, decode, pipeline registers and Hresp. |
| `tb_apb_fsm_controller` | A directed write and read with the published FSM waveform's values. Then random Valid/Hwrite/Hwritereg against a table model of every arc and output. Fails unless all 18 arcs are taken. |
| `tb_bridge_top` | AHB master with Hreadyin = Hreadyout, and an APB monitor. Checks the APB protocol, in-order data, the latencies above, queued reads and error responses. |
| `tb_mapper2` | Checks what is captured and the serialised frame. |
| `tb_top_module` | End to end over SPI at default parameters. Sends the published frame, the published write/read, the result-table command, a frame with Hreadyin low and random commands. Checks every APB transfer and every returned result frame, and counts writes, reads, errors, ignored commands and `start_transaction` pulses. |

To simulate one with plain Verilator (5.x), put the package first and list
every other RTL file once:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    rtl/ahb_apb_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
    tb/tb_top_module.sv --top-module tb_top_module
./obj_dir/Vtb_top_module
```

The testbenches have no `timescale` of their own, so pass one on the command
line as above. `tb_top_module` runs for about 38 k clock cycles and finishes
in well under a second.
