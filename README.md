# An upset-tolerant controller for a calorimeter front-end board

A satellite-borne particle detector reads its BGO calorimeter through
sixteen front-end-electronics (FEE) boards, each run by one flash-based FPGA.
The flash configuration of such an FPGA does not upset in orbit, but its user
flip-flops and block RAMs do: a single heavy ion can flip a bit, and one wrong
bit in a state machine can leave the board hung. This RTL is a controller for
one such board, built around three complementary defences described for that
detector's FPGA (Shen et al., "Study on FPGA SEU Mitigation for Readout
Electronics of DAMPE BGO Calorimeter"):

1. **Multi-domain reset.** The logic that does the work is kept *in reset*
   whenever it is idle, is released only for the duration of one procedure
   (one command, or one triggered event), and is reset by a watchdog if the
   procedure does not end in time. An upset in this logic can spoil at most
   the procedure that is running; it cannot survive into the next.
2. **TMR with write-back.** The few registers that must stay valid all the
   time are triplicated and voted, and the vote is written back into all three
   copies on every clock. An upset in one copy is outvoted at once and
   repaired on the next edge, so upsets never accumulate.
3. **CRC on RAM.** A table RAM carries a CRC of its contents in its last
   words. Each time the table is used, the CRC is recomputed and compared; a
   mismatch raises an indicator bit that the ground can see and answer by
   reloading the table.

Everything is written in synthesizable SystemVerilog and simulated with
Verilator.

## The four parts and how work flows through them

```
          serial commands                         trigger
               |                                     |
        +-------------+   frame     +---------------------------------+
        | cmd_shifter |-----------> |          reset_manager          |
        | (hw reset   |  soft_req   | soft_rstn  cmd_path_rstn        |
        |  only)      |-----------> |            sci_path_rstn        |
        +-------------+             +---------------------------------+
               | frame                  |               |
        +--------------+          +----------+    +-------------+
        | control_part |<-------->|  status  |<-->|   sci_daq   |--> science
        |  (command    |          |  manager |    | (one event) |    packets
        |  procedure)  |--> resp  | TMR regs |    +-------------+
        +--------------+          | CRC RAM  |          ^ ADC
                                  +----------+
                                       ^ v
                                  +----------+
                     housekeeping>| monitor  |
                                  +----------+
```

* **control_part** handles one command: it checks it, executes it, answers
  with one response word and raises `done`.
* **sci_daq** handles one trigger: it reads every channel from the front-end
  ADC, caches the samples, and sends a packet (header, trigger number,
  samples) over a valid/ready word stream.
* **status_manager** holds what must outlive single procedures: the
  front-end configuration register `va_cfgreg`, a trigger counter and two
  watchdog counters (all TMR), and the 256-word table RAM (CRC). It is reset
  only by the global resets.
* **monitor_part** keeps the engineering parameters: the key registers and
  the CRC indicator, copied every cycle, and a housekeeping word from the
  board, sampled every `MON_PERIOD` cycles. It raises `alarm` while the CRC
  indicator is set.

Two small helpers complete the top level `bgo_fee_fpga`: `cmd_shifter`, the
serial command receiver, and `reset_manager`, which owns all the resets.

## Resets: four levels, two domains

This is the least conventional part of the design. There are four active-low
resets, each contained in the one above it:

| reset           | source                                | resets                                   |
|-----------------|---------------------------------------|------------------------------------------|
| `hw_rstn`       | external reset chip (top-level input) | everything                               |
| `soft_rstn`     | reset command, and `hw_rstn`          | everything except `cmd_shifter`          |
| `cmd_path_rstn` | `reset_manager`                       | `control_part`                           |
| `sci_path_rstn` | `reset_manager`                       | `sci_daq`                                |

The two path resets are *windows*, not pulses. At rest both are low, so the
control and science parts sit in reset and no upset can collect in them.

* A complete command frame (`frame_vld`) raises `cmd_path_rstn` on the next
  clock. The control part then leaves reset in its first state and runs the
  procedure. When it raises `done`, `cmd_path_rstn` drops on the next clock
  and the part goes back to sleep. So the control part needs no idle state
  and no "start" input: leaving reset *is* the start.
* A trigger opens `sci_path_rstn` in the same way, and `sci_daq`'s `done`
  closes it.
* Each window has a watchdog. If `done` has not come within `CMD_TIMEOUT`
  (1024) or `SCI_TIMEOUT` (8192) cycles, the window is closed anyway: the
  part is reset, a one-cycle `cmd_timeout`/`sci_timeout` is given, and a TMR
  counter of such events in the status manager advances (engineering
  parameter 3).
* A command or trigger that arrives while its window is open is ignored.
  Commands and events are therefore never queued. The trigger counter only
  counts triggers that were taken.
* Between two procedures the part is held in reset for at least one clock.

The soft reset needs a receiver that it does not reset itself, or a reset
command could never be heard while soft reset is active. That is the
`cmd_shifter`: it alone runs on `hw_rstn`. It recognises the reset command
(reset opcode, a fixed 16-bit key and a correct checksum) and does not wake
the control part for it. `soft_rstn` then stays low for `SOFT_RST_CYCLES`+1
clocks.

All resets are asserted asynchronously and released on a clock edge. The
path resets come straight from `reset_manager` flip-flops.

## TMR register with write-back (`tmr_reg`)

Each bit is stored in three flip-flops `rep0..rep2`. A majority voter
(`tmr_voter`, `(a&b)|(a&c)|(b&c)`) forms the output. In front of each
flip-flop a 2:1 multiplexer chooses the next value:

* `select = 1`: the outside value `d`, loaded into all three copies;
* `select = 0`: the voter output. This is the *write-back* path.

Without write-back, a TMR register only masks errors: a second upset in
another copy, days later, breaks the vote. With write-back, the wrong copy is
overwritten on the next clock, so two upsets would have to hit two copies of
the same bit within one clock period. The published Markov analysis shows
the reliability of plain TMR and of a single flip-flop falling steadily over
30 000 hours, while TMR with correction stays very close to 1. The counters in the status manager use the same
cell: `select` is the increment strobe and `d` is `q+1`.

The three copies carry a `keep` attribute. Without it, a synthesis tool
merges them into one register. In a real FPGA flow they should also be
placed in separate areas, so that one ion cannot upset two copies. That is a
placement constraint and is not expressed in the RTL.

## CRC-guarded table RAM (`crc_ram`)

The table is one 256-word block RAM (the size of the FPGA's 256x9 RAM
blocks), 8 bits wide. Words 0..253 are data. Words 254 and 255 hold a
CRC-16/CCITT (x^16+x^12+x^5+1, initial value 0xFFFF, bytes MSB first) of
the data words, high byte first.

* **write** (`wr_en`): writes one data word and clears `sealed`. Writes to
  the two CRC words are refused.
* **seal** (`seal_req`): reads words 0..253, computes the CRC, and writes it
  to 254/255. It also clears `crc_err`, since the table has just been
  reconfigured.
* **use** (`use_req`): reads all 256 words in order. It streams the data words
  out on `use_data/use_valid` while recomputing the CRC, then compares the
  result with the stored CRC. On a mismatch it sets the sticky `crc_err`. It
  pulses `use_done` at the end.
* **reset**: the RAM is filled with zeros and sealed, so it always starts in
  a consistent default state.

A seal or a use pass takes DEPTH+2 = 258 clocks from request to the end. The
reset fill takes about the same. While `busy` is high, requests and writes
are ignored. The RAM has one write port and one synchronous read port, as a
two-port block RAM does.

The check only runs when the table is used, so an upset is found at the next
use, not when it happens. This is the intended trade-off: continuous scrubbing
of RAM would cost more logic than the table is worth.

## Command link and formats

The board receives commands bit-serially (`cmd_bit`, qualified by
`cmd_bit_vld`), MSB first, in 40-bit frames:

| bits   | field    | value                                        |
|--------|----------|----------------------------------------------|
| 39..32 | sync     | 0xEB                                         |
| 31..24 | opcode   | see below                                    |
| 23..8  | argument |                                              |
| 7..0   | checksum | opcode ^ arg[15:8] ^ arg[7:0]                |

A frame is taken when at least 40 bits have come in since the last frame and
the oldest byte is the sync byte.

| opcode | name        | action                                                   |
|--------|-------------|----------------------------------------------------------|
| 0x01   | WR_CFG      | `va_cfgreg` <= arg                                       |
| 0x02   | WR_TBL      | table[arg[15:8]] <= arg[7:0]                             |
| 0x03   | SEAL_TBL    | compute and store the table CRC                          |
| 0x04   | USE_TBL     | stream the table out on `tbl_data`, check the CRC        |
| 0x05   | RD_ENG      | return engineering parameter arg[7:0]                    |
| 0xA5   | RESET       | soft reset; the argument must be 0x5AA5 (no response)    |

Each command except RESET gets exactly one 32-bit response
`{opcode, status, value}` on `resp`/`resp_valid`. The status is 0x00 (ok),
0x01 (bad sync or checksum), 0x02 (unknown opcode) or 0x03 (the table failed
its CRC check). The value echoes the argument, or is the engineering word for
RD_ENG. The engineering words are: 0 `va_cfgreg`; 1 `{sealed, crc_err}`;
2 trigger counter; 3 `{command timeouts, science timeouts}`; 4 the last
housekeeping sample.

A science packet is NCH+2 16-bit words: 0xEB90, the trigger number (counting
from 1 after reset), then one sample per channel. The ADC port is a simple
request/acknowledge: `adc_req` is held with `adc_ch` until `adc_ack`, which
carries `adc_data`.

## Parameters

| parameter         | default | where             |
|-------------------|---------|-------------------|
| `NCH`             | 16      | channels per event |
| `TBL_DEPTH`       | 256     | table RAM words, including the 2 CRC words |
| `SOFT_RST_CYCLES` | 16      | soft reset length  |
| `CMD_TIMEOUT`     | 1024    | command watchdog, cycles |
| `SCI_TIMEOUT`     | 8192    | event watchdog, cycles; it must exceed the longest legitimate event, including receiver stalls |
| `MON_PERIOD`      | 1024    | housekeeping sample period, cycles |
| `tmr_reg.WIDTH`   | 16      | `va_cfgreg` width  |

All shared types and encodings (frame, opcodes, response, packet header,
engineering word map, CRC routine, control-part states) are in
`rtl/fee_pkg.sv`.

## What comes from the source and what does not

The published work gives these parts of the design:

* the TMR register with per-copy multiplexer, voter and write-back;
* the four reset signals, their scope, the procedure watchdogs, and idle
  parts held in reset;
* a CRC stored at the end of a RAM, rechecked on use, with an indicator bit
  that is monitored;
* the four-part structure of the FPGA;
* the existence of a command shifter that the soft reset spares.

It gives no interface, encoding, width or timing. Everything in the previous
two sections is this design's own choice. That includes:

* the command and packet formats, the command set and the response codes;
* the ADC handshake and the channel count;
* the CRC polynomial;
* the width of `va_cfgreg`;
* the timeout lengths;
* which registers besides `va_cfgreg` are protected.

In the source's block diagram, the peripheral devices connect to the control,
monitor and science parts, but not to the status manager. Here `va_cfg` and
the table stream leave the chip from the status manager, where those values
live, because the control part is asleep between commands and cannot hold an
output. Engineering reads from the control part pass through the status
manager to the monitor, as the diagram has no direct link between the control
and monitor parts.

The "status manager" and the "monitor part" are only named in the source. Their
contents here (key registers, CRC RAM, engineering word table) are one
reasonable reading. The source also says that TMR is applied to vital RAMs,
but it shows no structure for that. This design protects the table RAM by CRC
only.

The resource and speed figures of the hardened logic are not reproduced: they
belong to a particular flash FPGA and its tools. The published text and its
table disagree on which row is the hardened one. The text's reading (more
logic tiles and a lower maximum frequency after hardening, 33.2 MHz) is the
plausible one. Nothing in this RTL depends on the clock frequency.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench            | what it checks |
|----------------------|----------------|
| `tb_tmr_reg`         | writes; single upsets in random copies are masked and repaired in one clock; successive upsets do not accumulate |
| `tb_crc_ram`         | an independent CRC model, verified on "123456789" = 0x29B1; zero fill after reset; seal; stream; upsets in data and CRC words detected; sticky flag; pass lengths in cycles |
| `tb_reset_manager`   | nesting; soft reset length; window open/close timing; starts ignored while busy; exact watchdog lengths |
| `tb_cmd_shifter`     | random frames with gaps and noise; reset command recognition, including a bad key or checksum |
| `tb_control_part`    | all opcodes, bad checksum and unknown opcode; one response per command; procedure lengths |
| `tb_sci_daq`         | packets with random ADC latency and receiver back-pressure; exact event length (2·NCH+4 clocks) |
| `tb_monitor_part`    | engineering word map; housekeeping period |
| `tb_status_manager`  | TMR registers and counters under injected upsets; the table under a RAM upset |
| `tb_bgo_fee_fpga`    | the whole board at default parameters: commands, the table, 20+ events, upsets in `va_cfgreg` and the RAM, a hung control state machine and a hung receiver (each cleared by its own watchdog), and a soft reset. It counts each mechanism and fails if one never occurred. |

`tb_seu_campaign` is a simulated upset campaign, the counterpart of an
ion-beam functional test. The board runs 1000 random commands, table uses and
events at default parameters. Meanwhile upsets are injected at random times:
into single TMR replicas (about 1500), into the state of whichever part is
asleep (about 400), and into the table RAM (about 20). Every response and
every packet must be exact, and every RAM upset must be reported at the next
table use. The testbench then reloads the table, as the ground would. The
campaign does not inject upsets into a procedure that is running. Recovery
from that case, via the watchdogs, is covered by `tb_bgo_fee_fpga`. The
campaign also fails if the TMR write-back is removed.

A few concurrent assertions in the RTL check the interface rules while
every testbench runs (run Verilator with `--assert`). They check that
science words and ADC requests are held until they are taken, that a timeout
always closes its window, that `use_done` comes only from a use pass, and that
a command gets only one response.

Upsets are injected by forcing a flipped value into one storage element and
releasing it between clock edges. The element keeps the wrong value until it
is next clocked, as after a real upset. RAM words are flipped by writing the
array element directly.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/fee_pkg.sv tb/tb_bgo_fee_fpga.sv --top-module tb_bgo_fee_fpga
./obj_dir/Vtb_bgo_fee_fpga
```

Replace the testbench name to run another. Every testbench runs in well
under a second. `-y rtl` lets Verilator find each
module in the file of the same name. Verilator warns about multiple drivers
for the variables that the testbenches force: these are the injected upsets.
