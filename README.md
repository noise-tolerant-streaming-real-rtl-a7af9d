# A noise-tolerant streaming link for pulsed-accelerator data acquisition

A pulsed accelerator has to move large blocks of waveform data from its
device controllers to a central place between two beam pulses (every
8.33 ms at 120 Hz). It also has to deliver small, urgent items, such as a
trigger pattern or a beam-synchronous message, within a few microseconds.
The fibres run through a noisy environment, with klystron modulators firing
next to them.

This link handles that as follows:

- **A stream of fixed-size cells.** Every cell is protected by an
  interleaved Reed-Solomon (RS) code strong enough that a noise burst of
  more than a hundred bytes is simply corrected.
- **Receiver-paced recovery.** Each cell header reports how far the receiver
  got. A cell that is damaged beyond repair is resent by go-back-N after a
  fixed timeout.
- **Backpressure per buffer.** The far end has 16 receive buffers per message
  circuit. A four-phase handshake keeps a transmitter from sending into one
  that is not free.
- **Priority per cell.** Each cell is chosen anew: a retransmission, the
  trigger pattern, a beam-synchronous message segment, a beam-asynchronous
  segment or an empty cell. A long asynchronous transfer is therefore
  interrupted within one cell time.

The RTL here is one end of such a link, `link_top`. It is a synthesizable
design for a 125 MHz local clock and a gigabit-Ethernet style serializer
(1.25 Gbaud, 8B/10B).

The following parts are outside this RTL and appear only as ports:

- the serializer/deserializer and the optical transceiver;
- the local processor;
- the message memory;
- the PCI bridge;
- the switching nodes of a larger fabric.

## The cell

A cell is 608 bytes on the wire, one byte per 8 ns: 4.864 µs.

- **Blocks.** It consists of 32 RS(19,11) code blocks over GF(2^8). Each
  block holds one header byte, ten payload bytes and eight check bytes. Each
  block corrects any 4 bad bytes.
- **Interleave.** Wire byte `w` is symbol `w / 32` of block `w % 32`.
  - A burst of up to 127 consecutive bad bytes therefore hits at most four
    symbols of any block, and is corrected.
  - Symbol 0 of every block is a header byte. This gives a 32-byte (eight
    longword) header that is spread over the whole cell.
- **Payload.** Each cell carries 320 payload bytes, counted in 64-byte
  chunks (five per cell).
- **Byte order before encoding and after decoding.** Inside the encoder and
  decoder stages a cell is kept "block-major": byte `11*b + p` is symbol
  `p` of block `b`.
- **Field polynomial and generator.**
  - The field polynomial is x^8+x^4+x^3+x^2+1 (0x11D).
  - The generator polynomial has roots alpha^0 … alpha^7.
  - Both are this design's choices.

Header longwords (most significant byte first):

| LW | contents |
|----|----------|
| 0 | control[15:0], data offset[15:0] (end of this cell's data, in 64-byte chunks from the start of the message) |
| 1 | data for the far end's link-initialisation register (valid when control.init_we) |
| 2 | flow control, beam-synchronous circuit: rdy[15:0], acq[15:0] |
| 3 | flow control, beam-asynchronous circuit |
| 4 | this cell's sequence number [31:16], next sequence number expected from the far end [15:0] |
| 5–7 | the sender's six 16-bit error counters |

Control field bits, from bit 0 up:

| Bits | Field |
|------|-------|
| [3:0] | destination buffer |
| [5:4] | circuit: 0 no-op, 1 trigger, 2 synchronous, 3 asynchronous |
| [6] | first cell of a message |
| [7] | last cell of a message |
| [8] | init_we |
| [15:9] | unused |

All of these are defined in `rtl/link_pkg.sv`.

Every cell, including an empty one, carries a full header. Acknowledgements,
flow control and error counts therefore flow continuously in both
directions.

## Transmit pipeline

There are three stages on the local clock. Between each pair of stages is a
two-bank cell buffer (`pingpong_buf`), so each stage can work on a whole cell
for up to one cell time.

1. **`tx_cell_builder`** chooses the cell's contents by priority:
   1. retransmission;
   2. trigger pattern;
   3. synchronous message;
   4. asynchronous message;
   5. no-op.

   Then it:
   - reads the payload from message memory (one 32-bit word per clock, one
     clock of read latency);
   - numbers the cell;
   - writes the header.

   A message is started only while flow control says the destination buffer
   is free. The message length is given in 64-byte chunks.
2. **`rs_encoder`** encodes the 32 blocks one after another and writes the
   608 bytes in wire order.
3. **`tx_serial_stage`** does three things:
   - sends K28.5/D21.4 ordered sets while the link is being initialised;
   - sends cells back to back, one byte per clock, through `enc8b10b`;
   - starts a cell only on a symbol-pair boundary, so the receiver's 20-bit
     framing never breaks.

   There is no start-of-cell marker outside the RS-protected bytes. The
   receiver counts cells, so noise cannot fake a cell start.

## Receive pipeline and the clock crossing

The deserializer delivers 20 bits per recovered 62.5 MHz clock (`rx_clk`),
at an unknown bit offset.

1. **`rx_deser_stage`** (on `rx_clk`):
   - `comma_aligner` finds the symbol and pair boundary from the ordered
     sets. This is allowed only while the `align_en` bit of the
     initialisation register is set. Once the link is up, alignment is
     frozen, so noise cannot move it.
   - Two `dec8b10b` units decode the pair.
   - After the ordered sets end, every 304 pairs form a cell. The cell is
     written in wire order into the first receive buffer, with the count of
     8B/10B code errors as a tag.
2. **`rx_rs_stage`** (on `rx_clk`):
   - Eight `rs_decoder` instances share the 32 blocks: decoder `d` takes
     blocks `d`, `d+8`, `d+16` and `d+24`.
   - Each decoder takes one byte every four clocks, so the eight together
     consume exactly the wire rate of two bytes per clock.
   - The decoders write corrected symbols 0–10 into the clock-crossing
     buffer. The cell's tag gains the number of corrected and uncorrectable
     blocks.
3. **`rx_cell_proc`** (on the local clock) handles each cell:
   - It reads the 32 header bytes and updates the error counters.
   - It discards a cell that has any uncorrectable block, because its
     header cannot be trusted.
   - It passes the far end's next-expected number to the retransmission
     logic and its flow-control longwords to `flow_ctrl`.
   - It accepts the cell only if its sequence number is the expected one.
   - For an accepted message cell it writes the payload to message memory
     at the destination buffer's base address plus the offset. On the last
     cell it loads the buffer's length register and raises `rx_irq`.
   - It stores a trigger cell in the trigger-pattern registers.
   - For an `init_we` cell it writes header longword 1 into the local
     initialisation register.

### Pacing of stage 2 (the hardest timing in the design)

The first receive buffer is "paced": the deserializer never waits, because
the wire does not stop. That only works if stage 2 drains a bank in exactly
one cell time of 304 `rx_clk` clocks and starts the next bank at once.

The buffer's `r_more` output says that the next bank is already complete.
At the end of a cell, stage 2 moves on without a gap when `r_more` is set.

Waiting instead for `r_avail` to pass through the synchroniser would lose
one clock per cell. The reader would then drift behind the writer until the
writer overwrote the bank being read.

The decoders' outputs for a cell finish about 30 clocks after its last byte
was read, while the next cell is already being read. The RS decoder accepts
a new block every 30 clocks. Each decoder gets one every 76 clocks.

The crossing from `rx_clk` to the local clock happens only in the second
buffer:

- Its bank counters are 2-bit Gray codes passed through two-flop
  synchronisers.
- Data and tags are read only after the bank's hand-over is seen, so no
  multi-bit value is sampled while it changes.
- Stage 3 needs at most about 370 local clocks per cell against 608
  available, so it keeps up with margin.

## Acknowledgement, timeout and go-back-N (`retx_timeout`)

Every cell sent is numbered (16 bits). A 48-bit description of it goes into
an in-flight FIFO:

- sequence number;
- control field;
- data offset before the cell.

The far end returns, in every good header, the sequence number it expects
next.

- **Acknowledgement.** When that number is 1…TIMEOUT ahead of the FIFO head,
  the head has arrived. It is removed, and its control field is reported back
  to the cell builder, which uses it to complete the request:
  - the last cell of a message ends the message (`msg_irq`, flow-control
    acq);
  - a trigger cell ends the trigger request;
  - an init write ends the far-init request.
- **Timeout.** The timeout is counted in cells, not clocks. It is set at
  run time (`timeout_cells`), up to the `TIMEOUT` parameter that sizes the
  in-flight FIFO. When the number
  being sent is more than the timeout (20 cells by default) ahead of the unacknowledged
  head, the head is taken as lost. Then:
  - the sequence counter is reloaded with the head's number;
  - all in-flight descriptions are copied into a retransmit FIFO;
  - the cell builder rebuilds those cells in order, with their original
    numbers. It re-reads the data from message memory; nothing is kept.

  If the retransmissions run out without any acknowledgement, another
  timeout follows. This covers a far end that stays deaf for a while.
- **Why go-back-N works here.** The receiver drops every cell after a lost
  one (sequence error), so it never reorders. Twenty cells is about 100 µs
  round trip: enough for both pipelines (about six cells), fibre delay and
  the receiver's header processing.

## Flow control (`flow_ctrl`)

Each end has 16 receive buffers per message circuit. The processor arms a
buffer with a base address (`rx_arm`, `rx_base`). The per-circuit header
longword `{rdy, acq}` runs one four-phase handshake per buffer. Every step
reacts to a level, so a lost header only delays it.

1. The receiver raises `rdy[i]` once buffer `i` is armed and the far `acq[i]`
   is low.
2. The transmitter starts a message to buffer `i` while the far `rdy[i]` is
   high and its own `acq[i]` is low.
3. When the last cell of that message is acknowledged, the transmitter
   raises `acq[i]`.
4. The receiver drops `rdy[i]` once it has received that last cell and sees
   `acq[i]` high.
5. The transmitter drops `acq[i]` when it sees `rdy[i]` low.

Step 4 deliberately waits for `acq`. If `rdy` fell on the last cell alone, a
header with `rdy` low that had been built before the transmitter raised `acq`
could end the handshake early.

Per circuit, the cell builder runs one message at a time. A message waiting
for a buffer that is not free therefore holds back that circuit only.

## Link initialisation register

This is a 32-bit register, with reset value 3. The local processor writes it
through `init_wr`. The far end writes it through a cell with `init_we` set,
which `far_init_go` requests.

- **Bit 0, `tx_init`:** send ordered sets instead of cells.
- **Bit 1, `align_en`:** let the receiver re-align on commas.
- **Bit 2, `clear`:** hold sequence numbers, FIFOs, flow control and
  counters at zero.

Bringing a link up takes four steps:

1. Both ends start sending ordered sets.
2. Each receiver locks.
3. Each end clears `tx_init`.
4. Once cells are flowing, each end clears `align_en`.

The meaning of the bits is this design's. The paper gives only the register
and its remote write.

## Error counters

There are six 16-bit counters (`err_cnt`), each of which also travels in the
header:

0. 8B/10B code errors
1. corrected RS blocks
2. uncorrectable RS blocks
3. out-of-order sequence numbers
4. timeouts
5. unexpected next-expected numbers

## Interfaces of `link_top`

| Group | Signals |
|-------|---------|
| Clocks and resets | `clk`/`rst_n` (125 MHz local) and `rx_clk`/`rx_rst_n` (62.5 MHz recovered) |
| SERDES | `tx_sym[9:0]` (one symbol per `clk`, bit 9 first); `rx_word[19:0]` (two symbols per `rx_clk`, bit 19 first) |
| Message send, per circuit (0 sync, 1 async) | pulse `msg_go` with `msg_base` (word address), `msg_len` (64-byte chunks) and `msg_buf` (far buffer). `msg_busy` is high until the last cell is acknowledged. `msg_irq` then pulses, if `msg_irq_en` was set with `msg_go`. |
| Trigger pattern | `trig_go` with eight longwords `trig_data`; on receive, `trig_rx` and `trig_rx_data` |
| Receive buffers | `rx_arm`, `rx_irq_en`, `rx_base`, `rx_len` per circuit and buffer; `rx_irq` with `rx_irq_buf`, only for buffers armed with `rx_irq_en` set |
| Timeout | `timeout_cells`: round-trip timeout in cells, 1…`TIMEOUT`; 0 selects `TIMEOUT` |
| Init register | `init_wr`, `init_wdata`, `init_reg`; remote write with `far_init_go`, `far_init_data`, `far_init_busy` |
| Message memory | `mem_rd_*` (one clock of read latency) and `mem_wr_*`, 32-bit words, `AW` = 20 address bits (4 MB) |
| Status | `tx_seq`, `rx_next`, `err_cnt`, `rx_locked`, `rx_framed`, `tx_sending`, `tx_underflow`, `rx_overrun` |

Parameters of `link_top`:

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `AW` | 20 | word address width of message memory |
| `TIMEOUT` | 20 | largest round-trip timeout, in cells; the run-time value is `timeout_cells` |
| `DEPTH` | 32 | in-flight FIFO entries; must exceed TIMEOUT + 1 |

The cell geometry is fixed by the package constants.

## Capacity against the paper's loads

The built link carries 320 payload bytes per 608-byte cell at 125 MB/s. That
is 65.8 MB/s, or about 548 KB per 8.33 ms pulse. All sizes below are the
paper's.

| Load | Needed | Fits in this design? |
|------|--------|----------------------|
| RF station controller | 256 KB per pulse | fits on one link |
| Beam-position-monitor string | 144 KB per pulse | fits |
| Sector concentrator | 2,880 KB per pulse | does not fit: needs six of these links, or the 10 Gb/s version the paper mentions, which is not built |
| Noise burst | 127 bytes per cell | corrected; this is the design limit of the interleave |
| Round-trip timeout | 20 cells | this is the default |

The paper also quotes a real-time latency of a few microseconds.

- One cell lasts 4.86 µs.
- End-to-end latency here is a few cell times: three pipeline stages on
  each side, plus the fibre.

## Where this design departs from the paper or fills gaps

- **Not built:**
  - the physical layer (SERDES, optical parts);
  - the host processor, the PCI interface and the external SRAM;
  - the switching nodes of a multi-link fabric;
  - the 10 Gb/s link.

  Their signals are ports of `link_top`.
- **Flow control.** The paper has the last cell of a message mark the buffer
  unavailable. Here `rdy` falls only when the last cell has been received
  *and* the transmitter's `acq` is seen (see above); the paper's form can
  race.
- **Far-end counters** in header longwords 5–7 are received but not stored.
- **Interrupt requests.** The paper says the last cell interrupts the
  processor at either end "if so requested", but not how the request is
  made. Here it is made by enable inputs sampled with `msg_go` and
  `rx_arm`.
- **This design's own choices**, where the paper is silent:
  - the RS field and generator polynomial and the decoder algorithm
    (Berlekamp-Massey, Chien, Forney);
  - the bits of the initialisation register;
  - the header byte order;
  - the receive framing rule (at least four ordered sets, then count cells);
  - the Gray-coded buffer hand-over;
  - the in-flight FIFO depth.

  Each module's opening comment says which parts follow the paper.
- **Parameter sizes.** No size was scaled down: every parameter default is
  the paper's number or, where it gives none, the value stated above.

## Verification

Each block has a self-checking testbench in `tb/`. Each one:

- uses `$urandom` stimulus;
- compares the block against an independent model;
- ends with a line `TB_RESULT checks=N failures=M`;
- has a watchdog.

The RS testbenches share `tb/rs_ref_pkg.sv`, a reference encoder.

| Testbench | What it checks |
|-----------|----------------|
| `tb_enc8b10b`, `tb_dec8b10b` | all 256 data and the K codes against the standard tables; running disparity; code-error flags |
| `tb_comma_aligner` | locks at every bit offset; stays frozen with `align_en` low |
| `tb_rs_encoder`, `tb_rs_decoder` | check bytes against the reference; random patterns of 0–4 errors corrected, 5+ flagged; 30-clock block rate |
| `tb_rx_rs_stage` | whole cells with 127-byte bursts; back-to-back cells 304 clocks apart |
| `tb_pingpong_buf` | bank hand-over across unrelated clocks; `r_more`; tags |
| `tb_tx_serial_stage`, `tb_rx_deser_stage` | ordered sets, pair alignment, cell framing and rate |
| `tb_retx_timeout` | acknowledgement, lost cells, repeated timeouts, disconnect |
| `tb_flow_ctrl` | two ends with 40-clock latency and lost headers; one message per grant |
| `tb_tx_cell_builder` | priority order, segmentation, headers, retransmission contents |
| `tb_rx_cell_proc` | against a go-back-N model with corrupted and out-of-order cells |
| `tb_link_top` | two full-size ends (no parameter overrides) through a noisy channel model |

`tb_link_top` is the end-to-end test. It:

- brings the link up through the initialisation register;
- runs 14 messages each way, plus trigger patterns and a far-end register
  write;
- feeds noise bursts both short (corrected) and long (cells lost);
- runs the ends at slightly different clock rates;
- checks every received word.

It fails if any of these mechanisms never happened: RS correction, an
uncorrectable cell, a sequence error, a timeout with retransmission, a
flow-control stall, synchronous traffic preempting asynchronous, a trigger,
a far init write, and transmit backpressure. Each message asks for a
completion interrupt at random, and the test checks that exactly the
requested interrupts occur. It takes about two minutes of
simulation.

To run a testbench with plain Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/link_pkg.sv tb/rs_ref_pkg.sv <rtl files of the block> \
        tb/tb_<block>.sv --top-module tb_<block> -Mdir obj
    ./obj/Vtb_<block>

For example, for the whole link:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/link_pkg.sv \
        $(ls rtl/*.sv | grep -v link_pkg) tb/tb_link_top.sv \
        --top-module tb_link_top -Mdir obj && ./obj/Vtb_link_top

Verilator has only two signal states. Anything read is reset or initialised,
and the testbenches gate their monitors with reset, so they pass with
`+verilator+rand+reset+2`.

## Files

- `rtl/link_pkg.sv`: constants, types and GF(2^8) functions.
- `rtl/link_top.sv`: one end of the link.
- Other modules in `rtl/`, one per file:
  - `enc8b10b`, `dec8b10b`, `comma_aligner`;
  - `pingpong_buf`;
  - `rs_encoder`, `rs_decoder`;
  - `tx_cell_builder`, `tx_serial_stage`;
  - `rx_deser_stage`, `rx_rs_stage`, `rx_cell_proc`;
  - `retx_timeout`, `flow_ctrl`.
- `tb/`: the testbenches above and `rs_ref_pkg.sv`.
