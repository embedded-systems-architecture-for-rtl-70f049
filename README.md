# A two-bank feature buffer with hardware hand-off for mobile SLAM

A visual SLAM pipeline on a phone-class SoC has one producer and several
consumers of the same data. A DSP extracts corner features from every camera
frame. Threads on the CPU cores then consume them: the *update* thread (which
corrects the drifting position estimate) and the *mapping* thread (which grows
the 3-D map). In a conventional SoC the features travel through main memory.
Every access costs on the order of 100 ns, the consumers must poll or be
woken by software, and a CPU core is busy copying.

The architecture this RTL implements, described by Tang, Liu and Gaudiot in
"Embedded Systems Architecture for SLAM Applications", puts a small on-chip
scratchpad between the DSP and the cores. It has two banks of 4 KB. One frame
produces at most about 4 KB of features, so each bank holds one frame. The DSP
fills one bank while the CPU reads the other, and the two swap roles. When a
bank is complete, the buffer's controller writes the bank's number into a
register and raises an interrupt. This notification is called the *SLAM
Trigger*. Woken by it, the CPU:

1. locks the bank;
2. clears the notification;
3. reads the features at on-chip latency;
4. releases the bank back to the DSP.

If the CPU falls behind and both banks are taken, the buffer tells the image
side to slow the frame rate. It does not drop features.

This repository holds synthesizable SystemVerilog for that feature buffer, its
controller and the CPU's access port. It also holds self-checking testbenches
for each of them and for the whole subsystem.

## Where it sits

```
 image sensor ──(direct IO)──► DSP ──dsp_wr_*──►┌──────────────────────────────┐
        ▲                                       │ slam_arch_top                │
        └──────────── frame_throttle ◄──────────│  slam_trigger  (controller)  │
                                                │  feature_scratchpad (2×4 KB) │
 CPU cores 0/1 ◄── irq[1:0] ────────────────────│  fb_cpu_port  (CPU window)   │
 (mapping +    ◄── cpu_rdata / cpu_rvalid ──────│                              │
  propagation, ──► cpu_req/we/addr/wdata ──────►└──────────────────────────────┘
  update)
```

The DSP, the cores, their L2 cache, main memory and the sensor interface
belong to the SoC around this block. They are not part of this RTL. The
top-level ports are where they connect. In the target system, Core 0 runs the
propagation and mapping threads and Core 1 runs the update thread. That is why
there are two interrupt lines. Both carry the same interrupt.

## The bank hand-off

This is the heart of the design. Each bank is always in one of four states
(`bank_state_e` in `fb_pkg`):

| state     | meaning                                        | who may touch the data |
|-----------|------------------------------------------------|------------------------|
| `FREE`    | empty, may be given to the DSP                 | nobody                 |
| `WRITING` | the DSP is filling it with one frame           | DSP writes             |
| `FILLED`  | complete, waiting for the CPU                  | CPU may read           |
| `LOCKED`  | claimed by the CPU                             | CPU reads              |

These transitions happen in `slam_trigger`:

* **FREE → WRITING.** This happens whenever no bank is `WRITING` and a bank is
  `FREE`. The other bank is preferred. The write address restarts at 0 and the
  bank's word count at 0. It happens in the same cycle as a bank closes or is
  released, so the DSP sees no gap when a bank is available.
* **WRITING → FILLED.** The bank *closes* in either of two ways. The DSP may
  write a word with `dsp_frame_end` set, marking the last word of the frame.
  Or the bank's last word may be written. A frame longer than a bank therefore
  continues in the next bank. The CPU sees it as two consecutive banks. A lone
  `dsp_frame_end` with no word also closes the bank, if the bank holds
  something. On an empty bank it is ignored, so empty banks are never
  announced.
* **FILLED → LOCKED.** This happens on the CPU's lock command.
* **LOCKED → FREE.** This happens on the CPU's release command.

A command that does not fit the bank's state is ignored. Examples are locking
a bank that is not `FILLED` and releasing one that is not `LOCKED`.

**The filled-bank-ID register and the interrupt.** The register holds a bank
number and a valid bit. When the register is empty and a bank is `FILLED`, the
bank's number is loaded on the next clock edge. If both banks are `FILLED`,
the one that closed first is loaded. The interrupt lines are the valid bit, so
an interrupt is a level, not a pulse. The CPU's *clear* command empties the
register and drops the interrupt.

The expected software sequence is lock, then clear. After that the bank is
`LOCKED` and will not be announced again. If software clears without locking,
the bank is still `FILLED`. It is announced again one cycle later, so a frame
cannot be lost by a careless clear. After a clear, the register is empty for
one cycle before it loads the next `FILLED` bank. Software therefore sees the
interrupt fall and rise again even when the second bank was already waiting.

**Throttling.** When neither bank is `WRITING`, `dsp_wr_ready` is low and
`frame_throttle` is high. Both banks are then full or being read: the consumer
lags. The DSP must hold its next word. An assertion checks this. The sensor
side is expected to slow the frame rate until the CPU releases a bank. The
release makes that bank `WRITING` at once, and `dsp_wr_ready` is high on the
next cycle.

A typical exchange, one column per clock edge, with a five-word frame going
into bank 0:

```
edge              0     1     2     3     4     5     6 ...
DSP word (bank 0) w0    w1    w2    w3    w4+end
bank 0            WR    WR    WR    WR    WR    FILL  FILL  ... LOCK ... FREE/WR
bank 1            FREE  FREE  FREE  FREE  FREE  WR    WR
irq               0     0     0     0     0     0     1     ... 0 after clear
```

The interrupt rises one edge after the bank closes. The DSP can write its
next word into bank 1 in the cycle right after `w4`.

## Producer interface (DSP side)

| port            | dir | width | meaning |
|-----------------|-----|-------|---------|
| `dsp_wr_valid`  | in  | 1     | a feature word is offered |
| `dsp_wr_data`   | in  | 32    | the word |
| `dsp_frame_end` | in  | 1     | with a word: the frame's last word. Alone: close a partly filled bank |
| `dsp_wr_ready`  | out | 1     | the word is taken this cycle |
| `frame_throttle`| out | 1     | `!dsp_wr_ready`: no bank is available |

A word is taken on a rising edge with `dsp_wr_valid && dsp_wr_ready`. The DSP
does not supply addresses. The controller writes each frame from word 0 up and
counts the words.

## Consumer interface (CPU side)

The bus is a plain word-addressed request port with no wait states. A read
(`cpu_req`, `cpu_we = 0`) is answered on the next cycle on `cpu_rvalid` and
`cpu_rdata`, and reads may follow back to back. A write gets no response. The
12-bit word address has two regions:

* `cpu_addr = {1, bank, word[9:0]}` selects feature words. This region is read
  only; writes to it are ignored.
* `cpu_addr = {0, 0, index[9:0]}` selects the controller registers:

| index | name        | read                                        | write |
|-------|-------------|---------------------------------------------|-------|
| 0     | `FILLED_ID` | bit 1 valid, bit 0 bank                     | any value: **clear** |
| 1     | `LOCK`      | 0                                           | bit 0 = bank to **lock** |
| 2     | `RELEASE`   | 0                                           | bit 0 = bank to **release** |
| 3     | `STATUS`    | [1:0] bank 0 state, [3:2] bank 1 state, [4] throttle, [5] bank the DSP writes | – |
| 4     | `COUNT0`    | words in bank 0 for its frame (0–1024)      | – |
| 5     | `COUNT1`    | words in bank 1                             | – |

The interrupt handler is short:

```
id = rd(FILLED_ID); b = id & 1;      // valid bit (id >> 1) is set
wr(LOCK, b); wr(FILLED_ID, 0);       // claim the bank, drop the interrupt
n = rd(b ? COUNT1 : COUNT0);
for i in 0..n-1: feature[i] = rd({1, b, i});
... wake the update and mapping threads, let them finish ...
wr(RELEASE, b);
```

Both consumer threads share one lock. Software must release the bank only
after both have finished with it.

## Sizes and what they carry

| parameter    | default | origin |
|--------------|---------|--------|
| `BANK_BYTES` | 4096    | source architecture: 8 KB in two banks, at most 4 KB of features per frame |
| number of banks | 2 (fixed, `FB_NUM_BANKS`) | source architecture |
| `WORD_BITS`  | 32      | this design |
| `NUM_IRQ`    | 2       | one line per core running the consumer threads |

At the defaults:

* One bank holds 1024 words. That is one frame's worst-case 4 KB.
* Two frames can be in flight.
* At the 50 frames per second the target system reaches, the stream is about
  51,200 words per second each way. The buffer moves one word per clock on
  each side, so any clock above about 52 kHz keeps up. The source gives no
  clock for this block.
* The source quotes a 0.4 ns access time and 0.15 W dynamic / 0.002 W leakage
  power. These are circuit estimates for a 32 nm macro. RTL cannot show them.
  Here the read takes one clock.

## Choices made here that the source leaves open

The source fixes these points:

* the two 4 KB banks;
* the filled-bank-ID register;
* the interrupt;
* lock, clear and release, in that order;
* the swapping of banks;
* throttling the frame rate when the consumer lags.

Everything else was chosen for this implementation:

* 32-bit words, one write port and one read port, and a one-cycle registered
  read. A read of a word being written in the same cycle returns the old word.
* Write addresses and per-bank word counts generated by the controller.
* Closing a bank either on a frame-end mark or when it is full. Frames longer
  than a bank spill into the next bank.
* Oldest-first announcement, and re-announcement after a clear without a lock.
* A level interrupt equal to the register's valid bit.
* The memory map, the single-cycle bus and the register fields above.
* One clock for both sides, and an asynchronous active-low reset. Reset puts
  bank 0 in `WRITING`, bank 1 in `FREE` and empties the register. Memory
  contents are not reset.
* A single lock shared by both consumer threads, not one per thread.

## What is outside this RTL

These parts are not built here:

* **The DSP** and its feature-extraction software. This is an existing SoC
  block.
* **The direct connection from the image sensor to the DSP.** It is wiring
  with no specified protocol.
* **The CPU cores, L2 cache and main memory.**
* **Batching of IMU samples** while the mapping thread runs. The source
  describes this as a thread-scheduling technique, not hardware.

`frame_throttle` is only a request. How the sensor or the DSP slows the frame
rate is up to them.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints one line
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

* `feature_scratchpad_tb` writes both full banks and reads back every word. It
  checks the one-cycle latency, the separation of the banks and the
  read-during-write behaviour.
* `slam_trigger_tb` uses a 16-word bank and a hand-written expected sequence.
  It covers:
  * the interrupt one edge after a bank closes;
  * the same-cycle swap;
  * throttling;
  * ignored commands;
  * oldest-first announcement;
  * re-announcement;
  * a bank closed by filling up;
  * spilling;
  * lone frame-end marks;
  * reset.
* `fb_cpu_port_tb` checks every register field, command decoding, feature
  reads and read latency against a stand-in memory.
* `slam_arch_top_tb` runs the whole subsystem at full size (2 × 4 KB). A DSP
  model streams 24 frames: short ones, exact-fit ones and over-long ones. A
  CPU model follows the interrupt handler above with random delays. Every word
  the CPU reads must equal the DSP's stream, in order. The test counts and
  requires at least once each of:
  * interrupts;
  * bank swaps;
  * throttling;
  * full banks;
  * spilled frames;
  * re-announcements;
  * both banks waiting at once.

  It runs in well under a second.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/fb_pkg.sv tb/slam_arch_top_tb.sv --top-module slam_arch_top_tb
./obj_dir/Vslam_arch_top_tb
```

Replace the testbench name to run the others. `fb_pkg.sv` must come first
because the other files import it. To lint the design, use
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/fb_pkg.sv rtl/slam_arch_top.sv`.
Lint reports two warnings, and both are expected:

* the unused upper bits of `cpu_wdata`, since register writes carry at most a
  bank number;
* `rst_n` used both as an asynchronous reset and in the assertions'
  `disable iff`.

## Files

| file | contents |
|------|----------|
| `rtl/fb_pkg.sv` | bank states, command type, register indices |
| `rtl/feature_scratchpad.sv` | the two-bank memory |
| `rtl/slam_trigger.sv` | bank controller, filled-bank-ID register, interrupt, throttle |
| `rtl/fb_cpu_port.sv` | CPU register and feature window |
| `rtl/slam_arch_top.sv` | the subsystem |
| `tb/*_tb.sv` | one self-checking testbench per module |
