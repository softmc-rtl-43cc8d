# SoftMC controller RTL: a programmable DDR3 command engine for DRAM characterisation

DRAM characterisation means finding out how real chips behave when their timing is pushed past the
datasheet. Typical questions are how long a cell holds its data without refresh, or how far tRCD and
tRAS can be shortened. An ordinary memory controller cannot do this, because it enforces the timing
rules that such experiments must break. A commercial tester runs fixed patterns. SoftMC (Hassan et
al., "SoftMC: A Flexible and Practical Open-Source Infrastructure for Enabling Experimental DRAM
Studies", HPCA 2017) takes a third approach. A host computer builds a *program* of raw DDR commands
and delays. An FPGA then plays that program to a DDR3 module cycle by cycle, exactly as written, and
returns whatever the module answers.

This repository is synthesizable SystemVerilog for the FPGA side of that scheme. It contains:

* the instruction buffer;
* the command sequencer;
* the auto-refresh engine;
* the read-back path;
* the DDR3 command encoding.

It also holds self-checking testbenches, including an end-to-end test that runs SoftMC's
published example experiments against a behavioural DRAM model. The published description covers
what the hardware does, not its internal structure. Each block below says which parts follow
SoftMC and which are choices made here.

## The principle: the program owns the timing

The controller enforces **no** DRAM timing rule and never reorders commands. The program issues
ACTIVATE, READ, WRITE, PRECHARGE or REFRESH. Each one reaches the DRAM pins in program order, and
the gaps between them are whatever the program's WAIT instructions say. A tRCD of 3 cycles, a
precharge 2 cycles after activation, or a row left unrefreshed for seconds are legal programs. Those
are exactly the experiments SoftMC exists for.

Everything else in the design protects this property:

* A program starts only once it is completely in the buffer. Host-link hiccups therefore cannot
  stretch a gap.
* Auto-refresh never interrupts a running program.
* The read path never stalls a READ to make room. It drops data and raises a flag instead.

## Block diagram

```
 host link (PCIe, not included)
   | host_instr_*                         ^ host_rd_*
   v                                      |
 instr_buffer --head--> instr_sequencer --+             readback_buffer
  (FIFO + END count)     (1 instr/cycle)  |                    ^
                                          v                    | phy_rd_*
                   refresh_ctrl ----> command mux ----> encode_cmd ----> ddr_cmd, ddr_wr_en, ddr_wdata
                   (tREFI timer,      (refresh only                        to the DDR3 PHY (not included)
                    PREA + REF)        between programs)
```

| File | Contents |
|---|---|
| `rtl/softmc_pkg.sv` | instruction word, command types, DDR3 truth-table encoder |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO used by both buffers |
| `rtl/instr_buffer.sv` | instruction FIFO plus the END counter that decides when a program may start |
| `rtl/instr_sequencer.sv` | executes instructions and produces one command slot per clock |
| `rtl/refresh_ctrl.sv` | auto-refresh timer, postponement counter, PREA/REF sequence |
| `rtl/readback_buffer.sv` | read-data FIFO to the host, with the overflow flag |
| `rtl/softmc_top.sv` | wiring, command mux, pin encoding |

## Instruction word

Each instruction is 64 bits wide (`instr_t` in `softmc_pkg`):

| Bits | Field | Use |
|---|---|---|
| 63:60 | `op` | 0 END, 1 WAIT, 2 ACT, 3 RD, 4 WR, 5 PRE, 6 PREA (precharge all), 7 REF, 8 RAW, 9 CKE |
| 59:57 | `bank` | DDR3 bank address |
| 56:41 | `addr` | row for ACT, column for RD/WR; A pins for RAW |
| 40:33 | `pattern` | WR: this byte is repeated over all 64 bytes of the burst. RAW: bits 2:0 are `{ras_n, cas_n, we_n}`. CKE: bit 0 is the new clock-enable level |
| 32:1 | `cycles` | WAIT only: the delay, in command-clock cycles |
| 0 | spare | ignored |

The host API's calls map one to one onto these words:

* `genACT(bank,row)` is ACT.
* `genWR(bank,col,data)` is WR.
* `genRD(bank,col)` is RD.
* `genPRE(bank)` is PRE.
* `genWAIT(t)` is WAIT.
* `genEND()` is END.

PREA and REF let a program do its own refresh when auto-refresh is off. RAW issues any other DDR3
command directly from its pin values, for example a mode-register write (`000`) or ZQ calibration
(`110`). Together they give the program every command a DDR3 controller can send. CKE drives the
clock-enable pin (power-down, self-refresh entry and exit). It takes one command slot and sends no
command. The layout, the field
widths and the opcode numbers are this design's own. A write carries one byte pattern, repeated over
the burst, because SoftMC's experiments use byte patterns (0x00, 0xFF, 0xAA, 0x55). Arbitrary
per-burst write data would need a wider instruction or a separate data channel.

## How WAIT turns into command spacing

This is the part a program writer must get right. The sequencer handles one instruction per clock:

* A command instruction drives its command for one cycle. So does CKE, which drives an idle slot.
* `WAIT n` fills the time until the next command, so that the next command is issued
  **n cycles after the previous command**.

The WAIT word itself takes one cycle, so n = 0, 1 and 2 all give a spacing of 2. When WAITs are
chained, each one takes max(n-1, 1) cycles. Two command instructions with nothing between them are
issued on consecutive cycles.

The write-a-row program therefore produces these pin-level distances (DDR3-800 values; the cycle
counts for tRCD and tRAS are the ones used for the tested modules):

```
ACT  b,r          t = 0
WAIT 6  (tRCD)
WR   b,c0         t = 6
WAIT 4  (tBL)
WR   b,c8         t = 10 ...
WAIT 12 (tCL+tWR)
PRE  b            last WR + 4 + 12 - 1      (WAIT 4 then WAIT 12: 3 + 11 cycles + 1)
WAIT 6  (tRP)
END
```

The end-to-end testbench checks these distances on the DDR3 pins. Commands leave `instr_sequencer`
through a register. The top then adds only combinational logic (mux and encoder), so a command
popped at clock edge k is on `ddr_cmd` after edge k.

One cycle of the controller clock is one DRAM command slot. The controller clock is therefore the
DRAM command clock (400 MHz for DDR3-800). A PHY that takes several commands per FPGA clock would
need the sequencer widened to several slots per cycle. That is not done here.

## Starting, streaming and underrun

`instr_buffer` counts the END instructions it holds. The sequencer starts when at least one END is
stored, so it only ever runs complete programs. A program longer than the buffer (1024 words by
default) can never hold its END. For that case a full buffer also starts execution, and the rest of
the program streams in behind it. If the host cannot keep up and the buffer runs dry before END,
the sequencer drives idle cycles and sets the sticky `err_underrun` flag. The timing of that run is
then no longer what was programmed. `prog_done` pulses when END executes.

## Refresh: automatic or under program control

SoftMC offers two modes, and both are built:

* **Auto-refresh** (`cfg_refresh_en = 1`). `refresh_ctrl` counts `cfg_trefi` cycles per refresh
  request. Requests are served only while no program runs. When the bus is free, it issues
  PRECHARGE-ALL, because a program may have left rows open. After `cfg_trp` cycles it issues one
  REFRESH per pending request, `cfg_trfc` cycles apart. It releases the bus `cfg_trfc` cycles after
  the last REFRESH. While a program runs, requests accumulate, up to 8 (the DDR3 postponement
  limit), and are then served back to back. A program that becomes ready while refresh is pending
  waits for it.
  While a program has left CKE low (power-down or self-refresh), the engine stays off the bus, and
  a waiting program is *not* held back. That program is the one that must raise CKE again.
* **Program-controlled refresh** (`cfg_refresh_en = 0`). The hardware never refreshes. Retention
  experiments use this mode: rows sit idle for exactly the time the host chooses, and the host
  refreshes them with PREA/REF instructions or by re-activating them.

Switching auto-refresh off drops pending requests. A refresh sequence already in progress is
completed. Serving refresh only between programs, the PREA before REF, and the postponement limit
are this design's choices. SoftMC specifies only that tREFI is user-set and that auto-refresh can
be disabled.

## Read-back path

Each READ makes the PHY return one 512-bit burst (8 beats of the 64-bit SO-DIMM bus) on
`phy_rd_valid`/`phy_rd_data`. `readback_buffer` queues bursts in the order they arrive, which is
the order the READs were issued, and the host drains them through `host_rd_*`. The buffer holds 512
bursts, which is four full rows of a typical DDR3 x8 module. If it is full when a burst arrives,
that burst is dropped and the sticky `err_overflow` flag is set; READs are never delayed. The host
should read back data between programs, or keep the number of READs per program below the free
space. `err_clear` clears both error flags.

## What connects at the edges

* **Host link.** SoftMC uses PCIe with a host driver. Here the link is two plain valid/ready
  streams: `host_instr_*` (64 bits) and `host_rd_*` (512 bits). The configuration inputs `cfg_*`
  and `err_clear` are registers the host would write, and the status outputs are registers it would
  read. Width conversion to the PCIe core is left to the integration.
* **DDR3 PHY.** `ddr_cmd` is one command slot per clock: `cs_n`, `ras_n`, `cas_n`, `we_n`,
  `ba[2:0]` and `a[15:0]`, encoded by the JEDEC DDR3 truth table. Idle slots are DESELECT. A10 is
  held low on READ/WRITE, so auto-precharge is never used. On a WRITE, `ddr_wr_en` is high with the
  whole burst on `ddr_wdata`. `ddr_cke` is the clock-enable pin. It is high after reset and
  changes only with CKE instructions. The PHY is expected to apply the write latency, drive DQ/DQS and
  capture read data. Initialisation, mode-register setup, ZQ calibration and read leveling are
  left to the PHY's start-up logic. A program can still reprogram mode registers or run ZQ
  calibration with RAW instructions.
* **Not in this design.** The host software API, the PCIe core, the PHY and the DRAM module
  itself.

## Sizes and limits

| Parameter | Default | Where |
|---|---|---|
| `INSTR_DEPTH` | 1024 instructions | `softmc_top`, `instr_buffer` |
| `RB_DEPTH` | 512 bursts | `softmc_top`, `readback_buffer` |
| `MAX_PENDING_REF` | 8 | `softmc_top`, `refresh_ctrl` |
| WAIT count | 32 bits, up to about 10.7 s at 400 MHz | `softmc_pkg` |
| Geometry | 8 banks, 16 address bits, 64-bit bus, burst of 8 | `softmc_pkg` |

None of these sizes comes from the SoftMC description; all are chosen here. They hold SoftMC's
example experiments:

* Writing a whole 1K-column row takes 262 instructions.
* Reading it back returns 128 bursts.
* The per-column tRCD test for one row takes 769 instructions.
* The longest interval studied (8192 ms) fits in one WAIT. The published retention test keeps that
  interval on the host anyway.

Testing many rows interleaved needs several programs, or a streamed program.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_instr_buffer`: FIFO order, END-gated start, the full-buffer start, back-pressure. It uses
  DEPTH 8.
* `tb_instr_sequencer`: fixed and random programs. The spacing rule above is computed
  independently and compared with the issued commands. It also covers hold, done and underrun.
* `tb_refresh_ctrl`: the refresh period, PREA to REF spacing, postponement and its cap at 8,
  disable.
* `tb_readback_buffer`: ordering under random back-pressure, and overflow.
* `tb_softmc_top`: the whole controller at its default parameters. It drives `ddr3_model`, a
  behavioural DDR3 module with a sparse store and read latency CL. The model corrupts data in three
  cases:
  * a READ earlier than `TRCD_MIN` after ACTIVATE (4 here);
  * a PRECHARGE earlier than `TRAS_MIN` (5 here);
  * a row left unrefreshed longer than `RETENTION` cycles (3000 here).

  The model also counts protocol violations. The host side of the testbench runs:
  * write and read-back with standard timing, with pin-level spacing checks;
  * SoftMC's tRCD experiment (tRCD 3 to 6 cycles) and tRAS experiment (tRAS 2 to 14 cycles);
  * the retention experiment with auto-refresh off, for idle times shorter and longer than the
    retention time, and again with auto-refresh on;
  * postponed refresh, a program held while refresh completes, software refresh, read-back
    overflow and streaming underrun;
  * a mode-register write and ZQ calibration via RAW, and power-down via CKE with auto-refresh
    held off.

  It counts how often each of these happens and fails if one never does. The model's thresholds
  are chosen so that each experiment shows both outcomes. They imitate a module whose margins
  resemble those SoftMC reported, but they are not measured data.

To simulate with Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_softmc_top -y rtl -y tb +libext+.sv rtl/softmc_pkg.sv tb/tb_softmc_top.sv
./obj_dir/Vtb_softmc_top
```

Replace the top-module name to run another testbench. The end-to-end test takes well under a
second.

## Departures and open points

* The internal structure is this design's own. Published are: the instruction set, in-order issue
  with program-defined timing, the switchable auto-refresh with user-set tREFI, the return of read
  data to the host, and the host/FPGA/PCIe/DRAM split. Not published: buffers, depths, the word
  layout, the WAIT arithmetic, refresh arbitration, and the error flags.
* Write data is limited to one repeated byte per WRITE.
* A WAIT shorter than 2 cycles cannot be expressed. Back-to-back commands (spacing 1) are written
  without a WAIT.
* One command per clock: the FPGA logic must run at the DRAM command clock.
* Auto-refresh treats every pending request as one REFRESH command and does not track which rows
  each one covers. That is the DRAM's business.
* SoftMC is said to implement every low-level operation of an ordinary controller, including
  enforcing the timing constraints between commands. Here a constraint is enforced only by the
  program's own WAITs. The hardware never checks a program, so one with a timing mistake runs
  as written and simply violates the DRAM's timing.
* RAW and CKE are how this design provides the DDR3 commands that SoftMC's named API calls do not
  cover (mode-register writes, ZQ calibration, power-down, self-refresh). Their encoding is this
  design's own.
