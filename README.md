# Replaying trigger firmware on an FPGA accelerator card

Trigger firmware for a particle-physics experiment is hard to validate in an
HDL simulator: the designs are large, and the interesting checks (for example,
every entry of a momentum look-up table against simulated physics events) need
thousands of events. This design lets the firmware run on real FPGA fabric
instead, on a PCI-Express accelerator card of the same device family as the
experiment's boards. The host program writes, for each event, what the
trigger logic should see on its inputs clock by clock. The FPGA replays it into
the trigger logic at full speed and records the outputs clock by clock. The
host reads the record back and compares it with its own expectation.

The FPGA side is a wrapper around the trigger logic under test. Two problems
make it more than a DMA loop:

* The card's memory bus delivers 32-bit words at an irregular pace. The
  trigger logic needs a wide input vector on every clock, without gaps. The
  **FIFO buffer** therefore gathers the whole event first, merges words into
  wide per-clock *frames*, and only then plays the frames back to back.
* The trigger logic's ports are not 32 bits wide and are not laid out like
  the bus. The **patch panel** cuts each frame into the bit fields that feed
  each input port, and packs the output ports into output frames.

This RTL follows the published architecture: memory, AXI, FIFO buffer,
patch panel, trigger logic, and back. It also includes the example trigger
logic used to demonstrate the system: a two-detector coincidence whose
combined hit position addresses a look-up table. The insides of each block
(handshakes, register map, frame layout, state machine, table contents) were
not published. They are this design's own choices and are marked as such
below and in each file's header.

## One validation cycle

A *validation cycle* handles one event. Seen from the host:

1. Write the event's frames to the card memory (the input buffer). Each
   frame is `IN_FRAME_WORDS` 32-bit words, frame after frame.
2. Write the control registers:
   * the input and output buffer addresses;
   * `IN_CLKS`, the number of input frames (trigger clocks);
   * `OUT_CLKS`, the number of trigger clocks to record.
   Then write 1 to bit 0 of `CTRL`.
3. Poll `CTRL` until the done bit is 1. The read clears it.
4. Read `OUT_CLKS × OUT_FRAME_WORDS` words from the output buffer.

Inside the FPGA, `vs_sequencer` steps through four phases:

| phase | what happens | ends when |
|---|---|---|
| LOAD  | Both buffers are cleared. `axi_rd_master` reads `IN_CLKS × IN_FRAME_WORDS` words in bursts of up to 256 beats. `fifo_in_buf` merges them into frames. | the read master is done **and** the buffer holds the whole event |
| RUN   | `fifo_in_buf` plays one frame per clock. `patch_panel` registers the fields into inputs A, B and C. `fifo_out_buf` stores the packed outputs 1 and 2 on every clock of the capture window. | `OUT_CLKS` clocks have been captured |
| DRAIN | `fifo_out_buf` splits frames into words. `axi_wr_master` writes them in bursts. | the last write response |
| DONE  | a one-clock done pulse sets the sticky done flag | – |

The LOAD exit requires both conditions. Without the first, a stale
"event ready" left over from the previous event could start playback early.
Without the second, playback could start before the last words had been
merged into a frame.

## Clock alignment and latency

This is the part most worth understanding before using the record.

* Playback is gap-free. If the trigger logic sees input frame 0 in clock *t*,
  it sees frame *k* in clock *t + k*. That holds however the memory stalled
  during LOAD. This is the "latency adjustment" the FIFO buffer is for.
* The capture window opens on clock *t* itself, the first clock in which a
  valid frame is on the trigger logic's inputs. It stays open for `OUT_CLKS`
  clocks. Record entry *k* therefore holds the trigger outputs *k* clocks
  after input frame 0. Record entry *k* of a trigger logic with latency *L*
  belongs to input frame *k − L*. If `IN_CLKS = 0`, the window opens as soon
  as RUN starts.
* Before and after the event, the patch panel drives all trigger inputs to
  zero ("no hit"). The record shows what the logic does with empty input
  while its pipeline fills and drains.
* Choose `OUT_CLKS ≥ IN_CLKS + L` to see every result. If `OUT_CLKS` exceeds
  the output buffer, the excess clocks are dropped and `obuf_overflow` is set.

Pipeline offsets inside the wrapper, relative to the clock in which the
sequencer pulses play:

| clock | event |
|---|---|
| 0 | play pulse; `fifo_in_buf` starts reading |
| 2 | frame 0 on `fifo_in_buf` outputs |
| 3 | frame 0 fields on trigger inputs A/B/C; capture window opens |
| 3 + 4 | result of frame 0 on trigger outputs (example logic, L = 4); stored as record entry 4 |

The example logic has a latency of 4 clocks, as the published example did.
To let the host measure this latency, input C carries a tag that the logic
returns on output 2. The host writes tag *k+1* in frame *k*. The first record
entry holding tag 1 gives the latency directly.

## Memory layout of an event and of a record

Words are little-endian within a frame: word 0 of a frame is its least
significant 32 bits. The default layout matches the example trigger logic:

Input frame, 2 words = 64 bits:

| bits | field | trigger port |
|---|---|---|
| 8:0   | hit in detector A: {valid, eta strip[7:0]} | input A |
| 24:16 | hit in detector B: {valid, eta strip[7:0]} | input B |
| 47:32 | tag | input C |
| others | ignored | – |

Output frame, 1 word:

| bits | field | trigger port |
|---|---|---|
| 8:0   | {coincidence, table value[7:0]} | output 1 |
| 31:16 | tag of the input 4 clocks earlier | output 2 |
| others | 0 | – |

A trigger logic with a wider input needs a wider frame. For example, 25,000
bits spread over 50 clocks need 500 bits per clock, so `IN_FRAME_WORDS = 16`.
The buffer then holds 4096 / 16 = 256 clocks.

The field offsets and widths are parameters of `patch_panel` (`A_OFF`, `A_W`,
…, `O2_W`). Adapting the wrapper to a different trigger logic means changing
them, `IN_FRAME_WORDS` and `OUT_FRAME_WORDS`, and the trigger instance in
`vs_top`.

## Control registers

AXI4-Lite, 32-bit, byte addresses. The layout is this design's choice and
follows the usual accelerator-kernel convention.

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W: bit 0 = start (ignored unless idle). R: bit 0 busy, bit 1 done (cleared by this read), bit 2 idle | |
| 0x10 / 0x14 | IN_LO / IN_HI | R/W | input buffer byte address, 4 KiB aligned |
| 0x18 / 0x1C | OUT_LO / OUT_HI | R/W | output buffer byte address, 4 KiB aligned |
| 0x20 | IN_CLKS | R/W | input frames in the event; values above `BUF_WORDS / IN_FRAME_WORDS` are cut to it |
| 0x24 | OUT_CLKS | R/W | trigger clocks to record |

The 4 KiB alignment keeps a 256-beat burst of 4-byte words from crossing a
4 KiB page, which AXI forbids. The design does not check the alignment. An
`IN_CLKS` larger than the input buffer holds is cut to
`BUF_WORDS / IN_FRAME_WORDS` frames; the rest of the event is not read.

## Blocks

| module | role | from the published system | this design's choice |
|---|---|---|---|
| `vs_top` | the wrapper, all blocks wired as above | block chain; 32-bit transfers; 4096-word events | single clock; status outputs |
| `axil_ctrl_regs` | host control registers and start/done/idle flags | control by flags, parameters from the host program | register map, handshake timing |
| `vs_sequencer` | LOAD / RUN / DRAIN / DONE | cycle = load, compute, return; wait for whole event | states, capture window rule |
| `axi_rd_master` | DDR → word stream | AXI, 32-bit words | INCR bursts ≤ 256, one in flight |
| `fifo_in_buf` | merge words to frames, hold event, play | merge, wait for whole event, then send | frame layout, play timing |
| `patch_panel` | frame fields ↔ trigger ports | three inputs, two outputs, bit distribution | parameter-set map, registered inputs, zero when idle |
| `trig_logic` | example coincidence logic | two detector hits → one table address → value; 4-clock latency | widths, {valid, strip} hit format, tag on input C |
| `trig_lut` | the example's table | a table addressed by the combined hits | contents (see below) |
| `fifo_out_buf` | record per clock, split to words | reverse of the input side | capture/drain handshake, overflow flag |
| `axi_wr_master` | word stream → DDR | AXI, 32-bit words | INCR bursts ≤ 256, one at a time |
| `vs_pkg` | shared constants, register map, types | | |

Not in the RTL, because they are not part of the FPGA design:
* the host PC and its control program;
* the host memory and the card's PCI-Express DMA engine;
* the card's DDR and its memory controller.

The testbenches use `tb/axi_mem_model.sv` to stand in for the DDR.

### The example trigger logic

A particle leaves a hit in detector A and one in detector B. `trig_logic`
has four pipeline stages:

1. Register the inputs.
2. Form the coincidence, both hits valid. Form the address
   `eta_b − eta_a + 256`, a 9-bit address with zero difference at 256.
3. Read the table.
4. Register the outputs. The output is the table value with the coincidence
   bit, or zero without a coincidence.

Using the strip *difference* as the address follows the authors'
description of their example. The published table came from simulation and
is not available. `trig_lut` is filled at elaboration with a stand-in of the
same shape, a transverse-momentum-like value that falls as the hits move
apart:

    value(d) = 255                      for d = 0
    value(d) = min(255, floor(1024/|d|)) otherwise,   d = eta_b − eta_a

To validate a real table, replace `trig_lut`'s contents, or replace
`trig_logic` with the firmware under test.

## Parameters and sizes

| parameter | default | source |
|---|---|---|
| bus word | 32 bits | published |
| `BUF_WORDS`, words per event, each direction | 4096 (32 × 4096 bits) | published |
| `MAX_BURST` | 256 beats | AXI4 limit; own choice |
| address width | 64 bits | own choice |
| `IN_FRAME_WORDS` / `OUT_FRAME_WORDS` | 2 / 1 | own choice, to fit the example logic |
| `ETA_W`, `PT_W`, `TAG_W` | 8, 8, 16 | own choice |
| trigger latency | 4 clocks | published for the example |

Nothing is scaled down. The defaults are the sizes above, and the
end-to-end testbench runs at them. Synthesis of the top gives about 700
flip-flops and two 4096-word (128 Kbit) buffer memories.

Capacity against the published measurements:

* A 25,000-bit event is 782 words, or 391 two-word clocks. It fits the
  4096-word buffer.
* A full 4096-word event also fits.
* One thousand events are one thousand validation cycles; `tb_vs_workload`
  runs exactly that.

In simulation, with 25 % random memory wait states, a 25,000-bit event takes
about 2,400 clocks from start to done.

## Simulation

Every file in `tb/` is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops. Build and run one with Verilator,
from the folder holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_vs_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/vs_pkg.sv tb/tb_vs_top.sv -o sim
    ./obj_dir/sim

| testbench | what it establishes |
|---|---|
| `tb_vs_top` | Five validation cycles end to end through the control port and a stalling memory model, at default parameters. The cycles are a 25,000-bit event, a full 4096-word event with a 4096-clock record, a one-clock event, an over-long record, and an event longer than the input buffer. Every record entry is compared with a reference, and the latency is measured from the tags. Each mechanism is counted and must occur: burst splitting, short last burst, wait states, frame merging, playback held until the event is complete, latency 4, done polling, start ignored while busy, overflow, an over-long event cut to the buffer, back-to-back cycles. |
| `tb_vs_workload` | The published measurement's workload: 1,000 validation cycles of 25,000-bit events, at default parameters. The hits sweep the eta difference so that every reachable table address is checked through the whole system. Every record entry is compared. Prints the average clocks per cycle (about 2,400 with 25 % wait states). |
| `tb_vs_frame16` | The full design built with 16-word (512-bit) input frames. A 25,000-bit event is laid out as 50 trigger clocks, and a whole-buffer event of 256 clocks is also run. Filler bits must be ignored, and records and latency are checked. |
| `tb_axil_ctrl_regs` | Register read-back and byte strobes. One start pulse when idle, none when busy. Done flag is sticky and cleared by reading. |
| `tb_vs_sequencer` | Order of phases. Playback waits for the read to finish even with a stale ready flag. The capture window opens on the first valid input and lasts exactly `OUT_CLKS`. Zero-length cases. |
| `tb_axi_rd_master`, `tb_axi_wr_master` | Data order, burst count, WLAST and RLAST, and done, with random stalls on both sides. |
| `tb_fifo_in_buf` | Ready only after the last word. Frame contents. Frame *k* exactly *k+2* clocks after play. Full buffer. |
| `tb_fifo_out_buf` | Capture with gaps. Word order on drain with back-pressure. Empty drain. Overflow on a small instance. |
| `tb_patch_panel`, `tb_trig_lut`, `tb_trig_logic` | Field slicing and packing. Every table entry against the formula. Trigger output against a reference, exactly 4 clocks later. |

The RTL carries SVA assertions for AXI rules: address and data held while
waiting, responses held until taken, and RLAST on the requested beat. The top
adds phase rules: each AXI master is busy only in its own phase, and the
output buffer finishes draining inside DRAIN.
`--assert` enables them.

## Where this departs from, or goes beyond, the published system

* All block internals are reconstructions from the described function. They
  include the register map, the burst policy (one burst in flight, which
  costs bandwidth on a real DDR controller), the frame layout, the capture
  window, and the zero drive of idle inputs.
* The look-up table contents are a stand-in formula, not the physics table.
* Everything runs on one clock. The trigger logic runs at the bus clock. A
  design whose trigger clock differs would need a clock-domain crossing
  between the buffers and the patch panel.
* The patch panel's map is fixed when the design is built, not at run time.
* Cutting an over-long event to the buffer size, rather than rejecting it,
  is this design's own behaviour.
* Host software, DMA and the card's memory are outside the RTL.
