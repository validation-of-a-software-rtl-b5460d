# ListenToLight programmable-logic datapath

This RTL is the FPGA side of an acquisition system for ultrafast optoacoustic (OA)
and ultrasound (US) imaging. The system streams raw data to a workstation
without pausing. The analog front-ends (AFEs) send their samples over JESD204B
links. The logic receives them, merges all AFEs into one wide stream, and cuts
that stream into triggered frames. It writes the frames into a circular buffer
in fixed-size blocks and raises an interrupt for each finished block. An RDMA
engine (a vendor 100 GbE RoCE core) reads each block through an AXI4 port and
sends it to host memory while the next blocks are still being written.

The buffer does not have to hold a whole frame. It only has to absorb the
difference between the write rate (about 327 Gb/s at 256 channels) and the read
rate (about 96 Gb/s) for the length of one frame.

## Configuration at a glance

| Quantity | Value | Where it is set |
|---|---|---|
| Sample | 16 bit, 80 MSPS | `SAMPLE_W` in `ltl_pkg` |
| Channels per AFE | 16 (two JESD204B links, each with 8 channels on 1 lane) | `CH_PER_AFE`, `LANES_PER_AFE` |
| Lane word | 32 bits (4 octets) at the 320 MHz device clock | `LANE_W` |
| Stream per AFE | 64 bits per device clock | `AFE_W` |
| AFEs | 1 by default, 16 for the 256-channel system | `N_AFE` on `ltl_pl_top` |
| Datapath behind the merge | 1024 bits (256 channels × 16 bit ÷ 4 words) | `AXIS_W` |
| Ring buffer | 4 MiB = 32768 words of 1024 bits | `RING_DEPTH` |
| Block | 2^11 words = 256 KB by default (register, 2^0 … 2^15 words) | `BLOCK_LOG2` register |
| Trigger delay | 60 clocks by default (register) | `TRIG_DELAY` register |

The default build is the 16-channel demonstration system. It has one AFE whose
64 live bits are padded to the full 1024-bit width. Everything after the padding
stage therefore carries the traffic of the 256-channel system.

## Block diagram

```
 dev_clk domain (one copy per AFE)                 sys_clk domain
 ┌──────────────────────────────────────┐  ┌───────────┐
 │ listen_to_jesd204b (2 lanes → 64 b)  │→ │ cdc_fifo  │→┐
 └──────────────────────────────────────┘  └───────────┘ │
                                                         ▼
   stream_coalescer (align on multiframe start, N_AFE×64 b)
        → filler (pad to 1024 b, only when N_AFE×64 < 1024)
        → frame_window  ◄── trigger_ctrl ◄── oa_trig_i / START register
        → block_gen  → ring_buffer (4 MiB) → bram_ctrl (AXI4 read) → RDMA engine
                 └─ block_irq, occupancy, overflow       pl_regs (AXI4-Lite)
```

The top is `ltl_pl_top`. Everything the logic does not contain has a port on
the top. That covers the transceiver PHY, the RDMA engine, the MAC, the
processor and the pulser. The top's ports are:

- one `lane_word_t` (32 data bits plus 4 K-character flags) and a 4-bit
  decode-error vector per lane;
- one `jesd_sync_n` per AFE;
- the trigger input and the pulser trigger output;
- two interrupt outputs;
- an AXI4-Lite slave for the registers;
- a read-only 1024-bit AXI4 slave for the buffer.

## JESD204B reception (`listen_to_jesd204b`)

The PHY (outside this RTL) recovers the clock, finds the comma and decodes
8b/10b. Each clock it delivers four octets per lane, with a flag on each octet
that marks control characters. Every lane then passes through five stages in
this order.

1. **Input register.**
2. **Code-group synchronisation (`jesd_cgs_fsm`).** This stage holds SYNC~ low
   until four /K/ characters (K28.5) arrive in a row. It then releases SYNC~
   for that lane. Three decode errors drop the lane back to the start. Four
   clean words cancel a pending error check. The link's `sync_n` is the AND of
   both lanes.
3. **Octet alignment (`jesd_octet_align`).** The lane word has no fixed octet
   phase. The first non-/K/ octet after synchronisation is the /R/ that starts
   the ILAS. Its byte position is latched. From then on the output is the
   64-bit pair {current, previous} shifted by that many octets. The shift adds
   one clock.
4. **ILAS monitor (`jesd_ilas_monitor`).** The ILAS is checked over its 4
   multiframes of 64 words each. The monitor checks:
   - each multiframe starts with /R/ and ends with /A/;
   - multiframe 2 carries /Q/ and the 14 configuration octets.

   The lane ID, L, F, K and M and the checksum are compared with the expected
   values. The checksum is the 8-bit sum of octets 0 to 12. The SCR bit is taken
   from the configuration and switches the descrambler on or off. After the
   ILAS the monitor marks every word valid and gives its position in the
   multiframe. Word 0 is the multiframe start.
5. **Descrambler (`jesd_descrambler`).** This stage first undoes character
   replacement, which applies to the last octet of a frame:
   - /F/ (K28.7) or /A/ (K28.3) there stands for a data octet;
   - with scrambling on, the octet value itself is the data;
   - with scrambling off, the data is the last octet of the previous frame;
   - a control character anywhere else counts as an error.

   It then descrambles with 1 + x^14 + x^15 over the 32-bit word. A 47-bit
   window of the previous 15 scrambled bits and the current word feeds the
   descrambler. The history is cleared at the first data word, and the matching
   transmitter model starts from the same state.

After these stages each lane writes into a 16-word **elastic buffer**
(`jesd_elastic_buffer`). The buffers are read together once every lane holds
data. Lanes that arrive with different delays leave their first data word, a
multiframe start, in the same read cycle. The **deframer** then:

- swaps each pair of octets into 16-bit samples, because the first octet on the
  link is the MSB;
- registers the result as the 64-bit output.

On the output, `m_tuser[0]` marks the multiframe start and `m_tuser[1]` an
error. The link cannot be stalled, so the output has no ready.

**Sample order in a word.** With F = 16 octets per frame, one frame carries
one sample of each of the lane's 8 channels and spans 4 lane words. Word *w* of
a frame holds, for each lane, channels 2*w* and 2*w*+1 of that lane's ADC bank.
The 64-bit AFE word is {lane 1 sample 1, lane 1 sample 0, lane 0 sample 1,
lane 0 sample 0}, with the lowest bits first. A "sample set" (one time sample
of every channel) is therefore 4 consecutive words. This holds for the 1024-bit
stream too.

## Clock crossing and merging AFEs

`cdc_fifo` is a standard dual-clock FIFO:

- Gray-coded pointers with two-flop synchronisers;
- first-word-fall-through reads;
- a sticky overflow flag.

Each word carries 65 bits: 64 data bits and the multiframe flag. The system
clock must be at least as fast as the device clock, so the FIFO never fills in
normal operation. Its overflow flag is reported in the STATUS register.

`stream_coalescer` pops one word from every AFE FIFO at the same time and
places AFE *a* at bits [64*a+63 : 64*a]. It has two states.

- **Seek.** Each stream discards words until its head is a multiframe start.
  When all heads are starts, the streams are aligned.
- **Aligned.** Pops happen only when every FIFO has data. If some heads are
  multiframe starts and others are not, alignment is lost. The stream that
  already shows its start keeps it, and the others seek again. `realign_cnt`
  counts these events.

All AFEs share a SYSREF, so their multiframes start together. The realignment
therefore only absorbs the different link delays.

The coalescer also produces `m_sset_start`, which is high on the first word of
every 4-word sample set. Frames may start only on those words, so a frame
always holds whole sample sets.

`filler` is built only when the live width is below 1024 bits. It appends
dummy samples above the live bits. Each dummy sample is {8-bit position,
8-bit sample-set counter}, so the padding can be told apart and checked on the
host.

## Triggers and frames

`trigger_ctrl` has two modes, set by `CTRL[0]`.

- **US (0).** Writing START produces a pulse on `pulser_trig_o`, which fires
  the transmit pulser.
- **OA (1).** A rising edge on `oa_trig_i` (from the laser) is accepted. The
  input goes through a two-flop synchroniser.

Either event starts a delay of `TRIG_DELAY` system clocks. At its end one
`win_start` pulse is sent. Triggers that arrive while a delay is running are
counted as missed.

`frame_window` waits for the next sample-set start after `win_start`. It then
forwards `4 × FRAME_LEN` words. The first word carries `tsof` and the last
`tlast`. On the first word it pulses `frame_irq`. Between frames the stream is
discarded.

## Blocks in the ring buffer (`block_gen`, `ring_buffer`, `bram_ctrl`)

`block_gen` writes each framed word to the next address of the 4 MiB buffer. The
buffer is divided into blocks of 2^`BLOCK_LOG2` words. A block is closed when it
is full or when the frame ends. On closing it:

- pulses `block_irq`;
- publishes the block's word address and length in words (the registers give
  both in bytes);
- increments the block count.

A frame that ends inside a block leaves the rest of that block unused. The next
frame starts on the next block boundary, so every block holds data of one frame
only and always starts at a block-aligned address. The write pointer wraps
around the buffer.

**Occupancy and overflow.** The generator counts the blocks that hold data not
yet released by software. A block counts from its first word. Software releases one block by writing the RELEASE
register once the RDMA write has completed. The number of blocks is
32768 / 2^`BLOCK_LOG2`. Suppose a new block is about to be opened while every
block is still occupied. That would overwrite data not yet sent, so the sticky
`overflow` flag is set (STATUS[2]). The write itself still happens: the
acquisition cannot be paused.

This flag is how the leaky-bucket limit shows up in hardware. Take a write rate
R_in, a read rate R_out, a buffer of B bits and a read start-up latency τ. A
frame of L bits is safe when

  L ≤ R_in (B − R_out τ) / (R_in − R_out).

At 256 channels × 16 bit × 80 MSPS (R_in ≈ 327 Gb/s), R_out = 95.6 Gb/s and
B = 4 MiB, a start-up latency of about 0.18 ms gives about 5600 samples per
channel. That is about 4.1 k frames/s when frames are sent back to back. A
2000-sample frame allows about 11.7 k frames/s. If τ = 0, the same formula
allows about 11.6 k samples per frame.

`ring_buffer` is a simple dual-port memory of 32768 × 1024 bits:

- one write port;
- one read port registered one clock after `re`;
- read-before-write when both ports use the same address.

`bram_ctrl` is a read-only AXI4 slave for the RDMA engine. It accepts one INCR
burst at a time with a byte address and up to 256 beats of 128 bytes. It keeps
a two-entry output queue, which is enough to give one beat per clock while
`rready` is high and to hold the R channel stable while it is low. A concurrent
assertion checks that hold. The write channels are left out because the engine
only reads from this memory.

## Register map (`pl_regs`, AXI4-Lite, 32-bit)

| Offset | Name | Access | Reset | Meaning |
|---|---|---|---|---|
| 0x00 | CTRL | RW | 0 | [0] mode (0 US, 1 OA), [1] trigger enable |
| 0x04 | START | W | – | write: software start (US pulse) |
| 0x08 | TRIG_DELAY | RW | 60 | clocks from trigger to window start |
| 0x0C | FRAME_LEN | RW | 3072 | samples per channel per frame |
| 0x10 | BLOCK_LOG2 | RW | 11 | words per block = 2^n (11 → 256 KB) |
| 0x14 | RELEASE | W | – | write: one block has been sent |
| 0x18 | PULSE_LEN | RW | 8 | pulser trigger width in clocks |
| 0x20 | STATUS | R | – | [0] all links up, [1] JESD error, [2] buffer overflow, [3] streams aligned, [4] CDC overflow |
| 0x24 | FRAME_CNT | R | 0 | frames started |
| 0x28 | BLOCK_CNT | R | 0 | blocks closed |
| 0x2C | LAST_BLOCK | R | 0 | byte address of the last closed block |
| 0x30 | LAST_LEN | R | 0 | byte length of the last closed block |
| 0x34 | TRIG_CNT | R | 0 | [31:16] missed, [15:0] accepted triggers |
| 0x38 | OCCUPIED | R | 0 | blocks not yet released |

Link status bits are synchronised from the device clock.

The software loop for a stream works as follows:

1. On each block interrupt, read LAST_BLOCK and LAST_LEN.
2. Post an RDMA WRITE of that range.
3. When it completes, write RELEASE.

## Departures from the source description and open points

- **Alignment reference.** The source describes SYSREF in two ways. One passage
  has it aligning the streams on the FPGA side. Another has it used only by the
  AFEs to set their multiframe clocks, with the FPGA aligning the streams to
  their multiframe starts. This RTL follows the second passage. It has no
  SYSREF input, and the streams are aligned by their multiframe flags.
- **Buffer size.** A resource table lists a 2.2 MB block-RAM buffer. The
  frame-length analysis uses 4 MiB. The RTL implements 4 MiB.
- **Trigger capture.** The original latches the trigger with the 80 MHz sample
  clock. Here it is synchronised into the faster system clock.
- **Choices of this design.** None of the following are specified by the source:
  - the link parameters F = 16 and K = 16;
  - the ILAS checks in detail;
  - the elastic-buffer depth;
  - the sample order in a word;
  - the dummy-data pattern;
  - block closing at frame end;
  - occupancy tracking with a release register;
  - the register map;
  - the pulser pulse width;
  - the AXI ID width.
- **Not included.** The following are vendor or external parts, and their
  interfaces are ports of the top:
  - the transceiver PHY;
  - the RDMA engine;
  - the 100G MAC;
  - the AXI interconnect;
  - the processor software;
  - the clock/SYSREF generator;
  - the AFEs;
  - the pulser.
- **Not built or checked.** Timing closure at 320 MHz was not checked. The
  256-channel configuration (`N_AFE = 16`) is simulated end to end, but it
  was not synthesised.

## Testbenches

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. Two behavioural models support them:

- `afe_jesd_tx_model` is a JESD204B transmitter. It sends CGS, ILAS and
  scrambled or plain data with character replacement. It can add an octet
  offset and skew between the lanes.
- `ernic_reader_model` is a reader that issues AXI bursts for posted requests
  and stalls `rready`.

`tb_ltl_pl_top` runs the whole top at its default parameters. It checks:

- JESD link bring-up;
- a US frame started by software: 3072 samples in six 256 KB blocks, with the
  pulser trigger and the 60-clock delay checked;
- six OA frames of 1000 samples from the external trigger, including a trigger
  that arrives during the delay and must be counted as missed;
- every received word against the expected samples and padding, read back
  through the AXI4 port by the reader model at 29 % duty, which is 95.6 of
  327.7 Gb/s;
- buffer wrap-around and a partial last block;
- read stalls;
- an overflow from a 14000-sample frame, which is longer than the buffer can
  absorb at that read rate.

It counts each of these events and fails if one never happens.

Two further end-to-end tests use more AFEs:

- `tb_ltl_pl_top_2afe` (`N_AFE = 2`), where the padding starts at sample
  position 8;
- `tb_ltl_pl_top_256ch` (`N_AFE = 16`), the full 256-channel system with no
  padding.

Each AFE model in them has its own octet offset, lane skew and extra link
delay. The streams therefore reach the merge stage at different times. Every
host word is checked to carry the same frame number from all AFEs.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ltl_pkg.sv tb/tb_ltl_pl_top.sv --top-module tb_ltl_pl_top
./obj_dir/Vtb_ltl_pl_top
```

Replace the testbench name for the others. Each end-to-end build and run
takes well under a minute. Smaller parameters (for example a 7-bit address for the
block generator) are set only inside the unit testbenches.
