# Preempting FPGA tenants through configuration read-back: an RTL rendering of EPOCH

A multi-tenant FPGA gives each tenant its own partial-reconfiguration slot. To take
a slot away from a running tenant and give it back later, the tenant's complete state
must be saved and then put back. That state includes LUT contents, flip-flop values,
block-RAM contents and DSP registers. An FPGA has no context registers that could be
dumped the way a CPU dumps its stack. Its state lives in the configuration memory,
which the device can already read back and write through its configuration port.

EPOCH builds preemption from that fact and nothing else. To save a slot it follows
four steps:

1. Stop the slot's clock.
2. Read back every configuration frame the tenant's logic occupies.
3. Keep those frames in DRAM.
4. Start the clock again.

To restore the slot it follows five:

1. Stop the clock.
2. Write the frames back as a small partial bitstream built at run time.
3. Pulse the global set/reset (GSR), so that each flip-flop loads the value now held in
   configuration memory.
4. Start the clock again.
5. Carry on from the saved state.

No logic is added to the tenant.

This repository gives that procedure as synthesizable SystemVerilog for a Zynq-7000
class device (XC7Z020). It also includes the two-slot demonstration system the method
was first shown on, and testbenches with a behavioural model of the configuration
logic. The original method runs as software on the Zynq's ARM cores. Here the same
steps are a hardware state machine. The section *Departures* lists what that and other
choices change.

## 1. What is saved: frames, frame addresses and the three kinds of state

The configuration memory of a 7-series device is organised in **frames**. A frame holds
101 words of 32 bits, and word 50 carries a CRC. Each frame is reached through the
**frame address register (FAR)**, which has these fields:

| bits  | field                              |
|-------|------------------------------------|
| 31:26 | reserved                           |
| 25:23 | block type (000 CLB, 001 BRAM content) |
| 22    | top/bottom                         |
| 21:17 | row                                |
| 16:7  | column                             |
| 6:0   | minor frame                        |

A tenant is fully described by the frames its logic touches. That list of frame
addresses is known when the design is implemented, from the tool's logic-location file.
At run time it is an input.

Three kinds of frame need different handling on read-back:

- **LUT and distributed-RAM frames.** In the demonstration device these are CLB minors
  26–29 and 32–35. They read back as zeros unless the GLUTMASK bit is first set in both
  the MASK and CTL0 registers. The read sequence does exactly that.
- **Flip-flop frames.** These are CLB minors 30–31. They hold the live flip-flop values
  only after a GCAPTURE command, which the read sequence issues before the read. The
  clock is already stopped at that point, so every flip-flop in the slot is captured at
  the same instant.
- **BRAM content frames.** Their FAR third byte is 0xC2 for the addresses used here,
  which is block type 001. They read back with bit 18 set in ten particular words. A
  frame written back with those bits still set is refused by the device. The words are
  those with index *w* in 4..95 for which
  `(w < 54 and w mod 10 = 4) or (w > 54 and w mod 10 = 5)`, that is words 4, 14, 24, 34,
  44, 55, 65, 75, 85 and 95. The save path clears bit 18 in exactly those words
  (`bram_fix`), so DRAM holds a frame that can be written back as it is.

## 2. The two command sequences

Everything that crosses the configuration port is a stream of 32-bit words: command
packets followed by data. Both sequences are tables of *rows* in `epoch_pkg`. Each row is
one of:

- a fixed word with a repeat count;
- the FAR of the frame being handled;
- the FAR of the next frame;
- a run of data words;
- a run of zero pad words;
- a receive phase.

One walker, `cfg_seq`, plays either table at one word per clock on a valid/ready
stream.

**Read-back (one frame), 83 words out and 202 words in.** The steps are:

1. Eight dummy words, the bus-width detection pair, the sync word 0xAA995566 and NOOPs.
2. SHUTDOWN.
3. A CRC reset.
4. The two GLUTMASK writes (0x3000C001 and 0x3000A001, each with 0x00000100).
5. GCAPTURE.
6. RCFG.
7. The FAR.
8. The FDRO read header 0x280060CA and the type-2 count 0x480000CA (202 words).
9. 32 NOOPs.
10. The receive phase.
11. START, a CRC reset and DESYNC, each as a command write with NOOPs.

The device returns 202 words: one all-zero pad frame, then the frame itself.
`rb_engine` drops the pad frame and raises `pad_err` if any pad word is not zero. It
treats BRAM frames as above and hands the 101 context words on with their indices.

**Write (one frame), 246 words out.** The steps are:

1. Dummy words and sync.
2. A CRC reset.
3. IDCODE 0x03727093.
4. The FAR.
5. WCFG.
6. The FDRI type-2 header 0x500000CA.
7. The 101 saved words.
8. One all-zero pad frame. Here the pad frame comes *after* the data, the reverse of the
   read-back order.
9. A CRC reset.
10. The FAR of the next frame in the list.
11. A final CRC reset and DESYNC.

The CRC word (word 50) is written back exactly as it was read. The CRC reset that follows
the data sets the device's running CRC back to its default, so no CRC is ever computed.
The trade-off is that a corrupted transfer goes undetected.

The number of NOOPs and dummy words matters. The configuration port refuses a
read-back whose command count is off, so the repeat counts are those of the published
sequences and are not tuned.

## 3. Freezing a tenant

A slot is frozen by stopping its clock, CLK1. The controller itself runs on a separate,
free-running clock, CLK0 (`clk` here), so it does not stop itself. On the Zynq the
clock divider that drives CLK1 sits in a write-protected register space. Changing it
takes three writes:

1. the unlock key to the unlock register;
2. the new clock setting;
3. the lock key, afterwards.

`clk_ctrl` models that space:

| register | address | effect |
|----------|---------|--------|
| LOCK     | 0       | key 0x767B locks the space |
| UNLOCK   | 1       | key 0xDF0D unlocks it |
| HALT     | 2       | bit 0 = 1 stops CLK1; ignored while locked |

A HALT write made while the space is locked is dropped and counted in `cc_blocked`. The
space comes out of reset locked, with the clock running. The key values are the Zynq
SLCR keys.

`clk_gate` turns the enable into a stopped clock. It is a latch-based clock gate: the
enable is latched while the clock is low, so CLK1 never gets a short pulse. This latch
is the design's only latch, and it is intentional.

Because CLK0 and CLK1 come from one source, the controller and the tenants share a
timebase. Freezing and resuming therefore need no clock-domain crossing.

**Stopping at a safe point.** Stopping the clock at an arbitrary edge is safe for the
single-clock tenants used here. A tenant with several interacting clock domains may
need to be stopped only at a point where those domains agree. For that case the
controller has an optional handshake, enabled with `PAUSE_HANDSHAKE = 1`:

1. It raises `pause_req` when a command arrives.
2. It leaves CLK1 running until the tenant answers with `pause_ack`.
3. It drops `pause_req` once the clock runs again.

The handshake is off by default, and the demonstration tenants leave it unused.

## 4. The controller (`epoch_ctrl`)

The controller accepts one command at a time: `cmd_save` or `cmd_restore`, together with
a bit mask of slots.

**Save** runs these steps:

1. Three clock-register writes stop CLK1.
2. For each selected slot in turn, and each frame in that slot's list, `rb_engine` reads
   the frame back. Its 101 words go to DRAM.
3. Three more writes start CLK1 again.

**Restore** runs these steps:

1. CLK1 is stopped.
2. For each frame, the controller reads the 101 saved words from DRAM, one read in
   flight at a time. `wr_engine` wraps them in the write template. Each frame's footer
   names the next frame of the list.
3. GSR is pulsed for `GSR_CYCLES` cycles.
4. CLK1 is started.

**FAR table.** The frame lists are held in a FAR table of `FAR_DEPTH` entries, loaded
through `far_we`, `far_waddr` and `far_wdata`. Slot *s* uses `slot_count[s]` entries
starting at `slot_first[s]`.

**DRAM layout.** DRAM is word-addressed. Frame *k* of slot *s* is stored at
`SLOT_BASE[s] + 101·k`. The defaults place the two slots at 0x0000000A and 0x000B0000.
Only context words are stored: the command words are regenerated on every restore.

**DRAM port.** The port is a simple request/grant interface. A request holds its address
and data until `dram_gnt` is seen, and read data returns later with `dram_rvalid`. An
assertion guards this rule.

**Timing.** All figures below assume no stalls and are measured in the testbenches.

- **Save:** a read-back takes 286 cycles of port traffic, and frame-to-frame overhead
  brings it to 288 cycles per frame.
- **Restore:** port traffic alone is 247 cycles per frame. With one DRAM read in flight
  and a two-cycle DRAM latency it takes about 550 cycles, so the restore is bound by DRAM
  latency, not by the port.
- **Pacing:** `FRAME_GAP` adds idle cycles between frames. It exists because the port has
  been observed to lock up on back-to-back read-backs at its top rate. It defaults to 0,
  since no value for it was published.

For scale, the reference software implementation took 62.2 µs per saved frame and 67.4 µs
per restored frame with the port at 50 MHz. At 50 MHz this hardware needs about 5.8 µs
per saved frame.

Statistics come out of the controller as `frames_saved`, `frames_restored` and
`bram_fixes` (the number of Eq.-1 words cleared). Two error flags come out as well:
`pad_err` for a non-zero pad word, and `data_err` for a restore frame that did not carry
exactly 101 data words.

## 5. The demonstration system (`epoch_top`)

Two slots share CLK1:

- **Slot-1** holds a 4-bit up-counter and an 8-bit LFSR.
- **Slot-2** holds a 4-bit down-counter and a 32-bit LFSR.

Both counters are small state machines. Each steps exactly once per assertion of the
common `update` input, however long the input is held. The LFSRs step on every CLK1 edge
and use maximal-length Fibonacci taps: 0xB8 for 8 bits and 0x80200003 for 32 bits. The
original experiments ran the counters and the LFSRs separately. Placing them side by
side lets one top cover both experiments.

Each tenant flip-flop loads its INIT value (`*_init`) asynchronously while GSR is high.
GSR comes from two places: the controller's pulse, or `startup_gsr`, which stands for
the pulse the configuration logic gives at the end of configuration. The INIT values
come from the configuration memory, which sits outside the top. This is how a restore
reaches the flip-flops: the restored flip-flop frame changes the INIT values, and GSR
loads them.

The configuration port (`pcap_*`), the DRAM (`dram_*`) and the INIT values are top-level
ports, because the parts behind them are vendor hardware. The clock-control status and
the statistics are ports too.

**Reference scenario.** Both slots come out of configuration at 0x0 and 0xF. Three
presses take them to 0x3 and 0xC. A save stores those values; presses made while CLK1 is
stopped have no effect. Four more presses take the counters to 0x7 and 0x8. The slots are
then blanked and reset. After a restore the counters read 0x3 and 0xC again, and the
LFSRs continue from the values they held at the moment the clock stopped.

## 6. Departures from the published method

- **Hardware instead of software.** The published EPOCH is C code on the processing
  system. It drives the PCAP port and costs no fabric area. Here the same sequence is a
  state machine of a few hundred cells and flip-flops, plus a 64×32-bit FAR table.
  Everything it sends on the port is word-for-word the published sequence.
- **Template generated on the fly.** One description has the write template copied into
  DRAM once at power-up and filled in during a save. Another says the header and footer
  are added on the fly. This design follows the second: DRAM holds only the 101 context
  words per frame.
- **FAR list in a table.** The frame addresses are held in a FAR table loaded at set-up
  time. They are not stored in DRAM beside each frame.
- **FAR in the footer of the last frame.** The write template's footer names the frame
  address to be written next. For the last frame of a list none was published; this
  design repeats the frame's own address.
- **MASK and CTL0 naming.** The published read-back table calls both GLUTMASK writes
  "CTL0". By the 7-series packet format the first of them (0x3000C001) addresses the MASK
  register. The words are sent as published; only the names in `epoch_pkg` differ.
- **Clock register simplified.** The throttle/halt register's real encoding was not
  published. A single halt bit stands for it. The lock and unlock key values come from
  the Zynq documentation.
- **Clock gate.** CLK1 is CLK0 passed through a clock gate. On the Zynq it would be a
  separate PS clock output that the register write stops.
- **Timing not reproduced.** The published per-frame times were measured with software
  and include deliberate delays, so they are not reproduced. The published restore times
  for the complex benchmarks (about 0.02 ms) are shorter than one restored frame at the
  published 67.4 µs per frame. The two figures cannot both describe the same operation.

## 7. Capacity against the evaluated workloads

| workload | frames needed | fits in 64 FAR entries? |
|----------|---------------|-------------------------|
| two-slot counter and LFSR benchmarks | a handful per slot | yes |
| complex benchmarks | about 50–52 | yes |
| whole partition | well over 1000 | no |

- **Complex benchmarks.** These run a RISC-V core with about 4K LUTs, 32 BRAMs and 3 DSPs
  per benchmark. Their published save times, 3.07–3.18 ms at 62.2 µs per frame, imply
  about 50–52 frames.
- **Whole partition.** The full two-clock-region partition holds 10K LUTs, 20K FFs,
  40 BRAMs and 60 DSPs. Read in full, it is well over a thousand frames by the 7-series
  frame counts. It would need `FAR_DEPTH` of 2048.

DRAM use is 101 words per frame.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. They run against two behavioural
models.

**`cfg_mem_model`** stands for the configuration port and memory. It decodes the type-1
and type-2 packets and refuses to work out of sequence:

- nothing is accepted before sync;
- FDRI needs WCFG first;
- the IDCODE must be right;
- a write's pad frame must be zero.

It also reproduces the three read-back behaviours of section 1:

- LUT frames read as zero without GLUTMASK;
- flip-flop frames hold live values only after GCAPTURE;
- BRAM frames carry bit-18 artefacts, and a write that still has them is refused.

**`dram_model`** gives random grant stalls and a fixed read latency.

The end-to-end testbench, `epoch_top_tb`, runs the reference scenario at the top's
default parameters. It uses three frames per slot: LUT, flip-flop and BRAM. The models
add random port and DRAM stalls. The testbench counts every mechanism and fails any that
never occurred:

- clock halts;
- updates ignored while halted;
- GCAPTUREs;
- unmasked LUT read-backs;
- Eq.-1 treatments, and BRAM writes accepted;
- CRC resets;
- IDCODE writes;
- DESYNCs;
- GSR pulses;
- re-locking of the clock registers;
- stalls on all three streams.

`epoch_bench_tb` saves and restores 64 frames (52 in Slot-1 and 12 in Slot-2, every
fourth Slot-1 frame a BRAM frame). It checks every word and the cycle counts.

Two module-level testbenches cover paths the end-to-end run does not:

- `epoch_ctrl_tb` runs a controller with `FRAME_GAP` = 25 and the pause handshake beside
  one without either. Its tenant answers `pause_ack` 10 cycles late. The save must take
  exactly 25 cycles more per frame plus the 11 cycles of the handshake, and CLK1 must
  not stop before the answer.
- `rb_engine_tb` makes the model return a non-zero pad word. `pad_err` must rise, and the
  context words must still arrive intact.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/epoch_pkg.sv tb/epoch_top_tb.sv --top-module epoch_top_tb --Mdir obj
./obj/Vepoch_top_tb
```

Replace `epoch_top_tb` with any other testbench name. The lint warnings that remain are
unused package constants and unused bits; none concerns the circuit.

## 9. What is not here

- The vendor parts are outside the RTL: the configuration logic and PCAP port, the DRAM
  and its controller, the AXI interconnect, the AXI-GPIO blocks that read the tenants'
  status and trigger GSR, the STARTUP primitive, and the SD card that holds bitstreams.
  They appear as ports, and the first two as testbench models.
- The complex-benchmark payloads are not included: the CV32E40X RISC-V core and the
  SHA-256 hash chain used to exercise BRAM and DSP state.
- Multiple clock domains per tenant get only the pause handshake. The published work
  also suggests writing a blanking bitstream before a restore, or building the tenant
  with reset-after-reconfiguration (a GRESTORE in its partial bitstream). Both are
  choices about bitstream content and tool settings, not logic, and are not modelled.
- UltraScale devices (123-word frames) are not handled either. Supporting them would mean
  changing the frame size and the command tables in `epoch_pkg`.

## File map

- `rtl/epoch_pkg.sv`: constants, FAR layout, Eq. 1, both command tables.
- `rtl/cfg_seq.sv`: table walker.
- `rtl/rb_engine.sv` and `rtl/bram_fix.sv`: one-frame read-back.
- `rtl/wr_engine.sv`: one-frame write.
- `rtl/clk_ctrl.sv` and `rtl/clk_gate.sv`: freezing CLK1.
- `rtl/epoch_ctrl.sv`: save/restore controller.
- `rtl/tenant_counter.sv` and `rtl/tenant_lfsr.sv`: demonstration tenants.
- `rtl/epoch_top.sv`: two-slot system.
- `tb/`: one testbench per module, the models, `epoch_top_tb` and `epoch_bench_tb`.
