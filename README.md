# Intermodular configuration scrubber (C3) for groups of identical FPGAs

A detector readout often hangs several identical front-end boards on one
concentrator board. Every front-end board carries the same SRAM-based FPGA
loaded with the same bitstream. Radiation flips configuration bits in those
FPGAs. The usual fixes need either a golden copy of the bitstream in
radiation-hard memory, or an error-correcting code that can repair only one or
two bits per frame.

This design uses the redundancy that is already there. Read the same
configuration frame from all N devices and take the majority of each bit. A
device that disagrees with the majority has an upset. Write the voted frame
back to that device. No golden copy is needed, and no extra logic goes into the
front-end devices. Any number of upsets in one frame can be repaired, as long
as a majority of devices still holds the right value of each bit.

The RTL follows the Configuration Consistency Corrector (C3) of R. Giordano et
al., "Intermodular Configuration Scrubbing of On-detector FPGAs for the ARICH
at Belle II". In that system it runs in a Virtex-5 merger FPGA and scrubs six
Spartan-6 LX45 front-end FPGAs. The paper describes what the scrubber does,
not how it is built inside. Everything here below the block level is this
design's own, and it is marked as such. The section "What follows the
published design, and what does not" lists the differences.

## Where it sits

```
                 host PC (UART: commands in, SEU log out)
                          |
   +----------------------+----------------------+
   |  merger FPGA            c3_top              |
   |   core 0 --+                                |
   |   core 1 --+-- 2-of-3 vote --> TCK[5:0], TMS, TDI, TXD
   |   core 2 --+                                |
   |   (BRAMs of the 3 cores voted and repaired) |
   +---------+--------+--------+--------+--------+
             | JTAG   | JTAG   | ...    | JTAG (six chains, TDO[5:0] back)
          FEB #0   FEB #1   ...      FEB #5    (identical FPGAs, same bitstream)
```

Each target has its own TCK and TDO. TMS and TDI are shared. A target whose
TCK is held still ignores TMS and TDI. So a device mask chooses between the two
JTAG modes of the published design:

* **Single mode**: one bit of the mask is set, and one FPGA is read or written.
* **Broadcast mode**: several bits are set, and the same bits go to all of
  those FPGAs at once. On a read, their TDO streams come back in parallel. The
  JTAG engine keeps every device's stream and also gives a majority-voted
  stream.

## One scrubbing core

`c3_core` is the complete scrubber. `c3_top` contains three of them.

| block | job |
|---|---|
| `uart_rx`, `cmd_parser` | receive the host's ASCII commands |
| `scrub_ctrl` | the scrubbing sequence (see below) |
| `frame_addr_gen` | walks every frame address of the target device, driven by a table in BRAM |
| `frame_port` | turns "read frame F from devices M" or "write frame F to devices M" into JTAG operations |
| `jtag_engine` | shifts 1 to 16 bits per operation to the masked devices and captures all TDOs |
| `maj_vote_n` | bitwise majority of one 16-bit word across the enabled devices |
| `seu_log_fmt`, `uart_tx` | print one line per detected upset |
| `dp_ram` x3 | frame buffer (65 words x 6 lanes of 16 bits), frame-address table (256 x 16), scratchpad (16 x 16) |

The frame buffer is one word wide across all devices. Word *i* of the frame
sits at address *i*, and device *d* has bits `[16d+15:16d]`. One parallel read
therefore fills all six copies of the frame at once. One BRAM read gives all
six versions of a word to the voter.

## Reading and writing a frame over JTAG

This is the part with the most detail. The paper does not give it. It is
modelled on the Spartan-6 configuration interface, simplified. Each access
(`frame_port`) is a chain of `jtag_engine` operations:

1. TMS `1 1 1 1 1 0`: every masked TAP goes to Run-Test/Idle, whatever state it was in.
2. IR scan: TMS `1 1 0 0`, 6 IR bits LSB first (CFG_IN = 0x05, TMS=1 on the last bit), TMS `1 0`.
3. DR scan: TMS `1 0 0`, then 16-bit words MSB first, with TMS=1 on the last bit, then TMS `1 0`.
   * read: `AA99 5566` (sync), `3022 FAR_MAJ FAR_MIN` (write frame address),
     `30A1 0004` (command RCFG), `4880 0000 0041` (type-2 read of FDRO, 65 words), `2000` (no-op).
   * write: sync, frame address, `30A1 0001` (command WCFG),
     `5060 0000 0041` (type-2 write of FDRI, 65 words), the 65 data words, `2000`.
4. Read only: IR scan with CFG_OUT = 0x04, then a DR scan of 65 words with TDI=0.
   Every 16-bit TDO word of every device goes into its lane of the frame buffer.

The data of a write come from the frame buffer. They are either one device's
lane, used by injection, or the majority of the enabled lanes, used by
correction. The vote is formed again word by word as the frame is sent, so no
separate voted copy is stored.

**JTAG bit timing** (`jtag_engine`): one bit takes `TCK_DIV` clock cycles.
TCK is low for the first half and high for the second half. TMS and TDI change
at the start of the low half. The targets change TDO on the falling edge. TDO
passes a two-flop synchronizer and is sampled in the last cycle of the high
half. `TCK_DIV` must be even and at least 8. The default of 32 gives
TCK = 3.97 MHz at 127 MHz.

**Cost of one frame**: a read is 1256 TCK bits and a write is 1239. At
`TCK_DIV = 32` a read of a clean frame, vote included, takes 40,632 cycles.
That is 320 µs at 127 MHz. A Spartan-6 LX45 has roughly 11,500 frames. This is
an estimate from the device's bitstream size; the paper does not give it. So a
full pass over six devices in parallel takes about 3.7 s. The paper reports
3.3 s, so the TCK rate chosen here is of the right order.

## The scrubbing cycle

`scrub_ctrl` does the following:

1. At the start of a cycle, it reads three settings from the scratchpad: the
   device enable mask, the number of cycles between resets, and the number of
   rows.
2. For every frame address, it reads the frame from all enabled devices in
   parallel.
3. It goes through the frame word by word. For each word, `maj_vote_n` gives the
   voted word, the bits where each device differs from it, and the bits with no
   strict majority (ties). With six devices a value needs four votes. With five
   devices it needs three.
4. For every differing bit, from the lowest lane and bit upwards, it sends a log
   record and adds one to that device's SEU counter in the scratchpad.
5. If any device differed and no bit of the frame was a tie, it writes the voted
   frame to exactly the devices that differed. That is single mode for one
   device and broadcast mode for several. A frame with a tie, such as three
   devices against three, is left alone and reported by the `tie` event.
6. At the end of the cycle it increments the cycle counter. When the counter
   reaches the programmed period, the counter is cleared. The controller then
   waits until the log formatter and the UART have sent their last character,
   so that the reset never cuts a log line, and raises `rst_req`.

Detection runs beside the front-end logic without stopping it. Frame reads do
not disturb a running Spartan-6. Only frames that need a repair are written.

### Frame-address table

Frame addresses are not contiguous. `frame_addr_gen` walks rows, then columns,
then minor frames, using a table in BRAM with one 16-bit entry per column:

| bits | meaning |
|---|---|
| 15 | last column of a row |
| 14:12 | block type |
| 9:0 | number of minor frames in this column (0 skips the column) |

The address produced is `FAR_MAJ = {0, block, row, column}` and
`FAR_MIN = minor`. The table is written by the host, so the same logic serves
any device whose frames follow this scheme.

### Scratchpad map

| address | content |
|---|---|
| 0 | device enable mask (bit d = device d) |
| 1 | scrub cycles between core resets (0 = never) |
| 2 | rows of the device |
| 3 | cycles since the last reset |
| 4 | bit 0: scrubbing on. It is kept here so that scrubbing resumes after a core reset. |
| 8+d | SEU count of device d |

## Host commands and log

Commands are ASCII with hexadecimal fields and no separators:

| command | effect |
|---|---|
| `S` / `P` | start / stop scrubbing (stop takes effect at the next frame) |
| `I d MMMM mmmm bbb` | inject an upset: read frame (MMMM, mmmm) of device d in single mode, flip bit bbb, write it back |
| `T aa vvvv` | write table entry aa |
| `W a vvvv` | write scratchpad word a |

Example: `I300000001100` flips bit 0x100 of frame (0000, 0001) in device 3.
Commands are taken between frames. A command that arrives while another is
still waiting is dropped.

Every upset found gives one line, `U d MMMM mmmm bbb p` followed by CR LF. The
fields are the device, the frame address, the bit offset in the frame (0 is
the MSB of word 0), and the value the bit was read as. So `p = 1` is a 0→1
upset.

## Triplication inside the merger

The scrubber must itself survive upsets in the merger FPGA. It is therefore
built three times (`c3_top`):

* **Outputs**: the three cores get the same inputs. Each per-target TCK, TMS,
  TDI, TXD, the reset request and the status events is the 2-of-3 vote of the
  three cores (`maj_vote3`).
* **Frame buffers and tables**: these are voted and repaired all the time. A
  `ram_scrubber` per memory type reads the same address from the three copies
  through their second port. If the copies differ, it writes the vote back to
  all three. It takes three cycles per address. A port-A write by any core to
  that address during that time cancels the write-back, and the address is
  read again. A fresh update is therefore never overwritten by a stale vote.
* **Scratchpads**: these are voted and repaired once per core reset. The cores
  are reset at power-up and whenever the voted `rst_req` shows that the
  programmed number of cycles has passed. During the reset, the scratchpad
  scrubber sweeps all 16 words. The cores are held in reset until it has
  finished. Because their state machines then restart together from the same
  scratchpad contents, a core that has drifted out of step is brought back in
  line.
* **Writes during reset**: memory writes from a core, and from the
  scrubbers, are blocked while that unit is held in reset. The registers may
  power up in any state, and nothing may write a memory before the reset has
  taken hold.

With `N = 6` the whole top holds about 2,700 flip-flop bits and 31,776 memory bits:
three copies of a 6,240-bit frame buffer, a 4,096-bit table and a 256-bit
scratchpad. For comparison, the published implementation uses 1,068 flip-flops,
2,005 LUTs and 9 BRAMs. That includes a soft processor in place of
`scrub_ctrl`.

## What follows the published design, and what does not

Taken from the paper:

* Majority voting of configuration frames across up to six identical FPGAs.
* Parallel readback.
* Single and broadcast JTAG modes with majority-voted broadcast reads.
* Correction of any number of upsets per frame.
* BRAMs for frames and for the device-specific frame-address stepping.
* UART commands for injection and for starting scrubbing.
* A log with device, frame address, bit offset and polarity.
* Three redundant cores with voted outputs.
* BRAMs scrubbed continuously through their second port.
* Scratchpads voted at each processor reset.
* A reset after a programmable number of scrub cycles.
* The 127 MHz clock.

This design's own choices:

* **The controller is a state machine.** In the paper it is a picoBlaze 6 with
  firmware that is not published. Its scratchpad is modelled as a 16-word RAM
  with the map above. There is no program BRAM.
* **JTAG protocol.** The JTAG instruction codes, packet words and sequences are
  a simplified form of the Spartan-6 interface: no pad frame, no CRC check and
  no desynchronisation.
* **Rates and formats.** TCK divider 32; 8N1 UART at 115200 baud
  (`BAUD_DIV = 1102`); the command set and the log line format.
* **Majority rule.** Strictly more than half of the enabled devices. Tied bits
  block the correction of their frame.
* **Frame-address table and FAR layout**, as described above.
* **Reset sequencing** of the cores around the scratchpad sweep.
* **Not built**: the optional JTAG command interface mentioned in the paper,
  and the merger's data path and serial link.

Known limits:

* A core that falls out of step stays outvoted until the next periodic reset.
* Commands that arrive while one is pending are lost. The host should wait for
  the effect of a command, or for idle, before sending the next.
* A command that arrives during a core reset, which lasts about 50 clock
  cycles, is lost. A host that sees no effect should send the command again.
* The voter repairs a bit only where at least four of six devices, or three of
  five, agree.

## Files

* `rtl/c3_pkg.sv`: shared constants (device count, frame size, JTAG codes,
  packet words, scratchpad map) and types (`jtag_op_t`, `seu_rec_t`,
  `host_cmd_t`).
* `rtl/*.sv`: one module per file, as listed above. `c3_top` is the top.
* `tb/s6_target_model.sv`: a behavioural target FPGA for simulation. It has a
  TAP controller, a 6-bit IR, a packet parser for the subset above, and sparse
  configuration memory. A word never written holds a golden value that is the
  same in all devices. `flip` injects an upset and `count_bad` counts damaged
  words.
* `tb/tb_<block>.sv`: self-checking testbenches. `tb_uart` covers both UART
  halves. `tb_c3_top` runs the whole design end to end at reduced divider
  values (TCK_DIV 8, BAUD_DIV 16). It counts every mechanism: parallel
  readback, single and broadcast correction, injection, tie, cycles, periodic
  reset, and repairs of each memory. It corrupts single cores' memories behind
  the design's back. `tb_c3_top_full` runs the top at its default parameters
  through one complete injection, scrub and log sequence. It also checks the
  time of one frame readback.
* `tb_c3_inject_campaign` repeats the bench test of the original system at
  reduced dividers. It runs 92 rounds over an 18-frame map. Each round places
  1 to 4 upsets in every frame, at random devices and bits, about 4,000 in
  all. One upset per round goes through the inject command. Each round then
  runs one scrubbing cycle and checks that every upset was logged exactly
  once and repaired. The periodic core resets fall between rounds. The last
  10 rounds disable device 5, as for a group of five boards, so the majority
  is 3 of 5. At the end it checks the SEU counters.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/c3_pkg.sv tb/tb_c3_top.sv --top-module tb_c3_top -o sim
./obj_dir/sim
```

Swap in any other testbench name. Each prints
`TB_RESULT checks=N failures=M` and stops. `tb_c3_top` runs in a few seconds.
`tb_c3_top_full` simulates about 1.5 million cycles of the triplicated design
at the real clock, UART and TCK rates, and takes about 10 s.
`tb_c3_inject_campaign` takes about a minute and a half.

## Changing it

* `N` (devices), `FRAME_WORDS`, `TBL_AW`, `TCK_DIV` and `BAUD_DIV` are
  parameters of `c3_top`. Their defaults live in `c3_pkg`.
* For another device family, change `FRAME_WORDS`, the IR codes and packet
  words in `c3_pkg`, the sequences in `frame_port`, and the FAR packing in
  `frame_addr_gen`.
* `N` up to 8 works with the 3-bit device fields in the log and command
  formats.
