# FECC2 FPGA logic: a front-end CAMAC controller with a preemptive fibre link

SLAC's accelerator devices sit in several hundred CAMAC crates. They are
controlled by front-end computers that must do some CAMAC work on a
particular beam pulse of the 360 Hz linac. Other CAMAC work can happen at
any time. The Front End CAMAC Controller (FECC) is a box in the CAMAC
area. It drives the crates' serial cables and talks over optical fibre to
a PCI link board in a PC in the computer room.

The main idea is that beam-synchronous work never waits behind
asynchronous work for more than a few microseconds. Every shared resource
keeps the two classes apart and gives the synchronous one precedence at a
fine grain:

| resource | unit of preemption | worst wait for synchronous work |
|---|---|---|
| fibre link | one 608-byte cell | 608 clocks = 4.864 us |
| CAMAC cable | one CAMAC cycle | one cable round trip (about 10 us SLAC, 6 us IEEE) |
| DMA memory | fixed time slots | at most 16 clocks, with guaranteed bandwidth |

This RTL implements the logic of the second-generation controller's FPGA
(FECC2): the DMA-memory time slicing, the link transmitter and receiver
with their Reed-Solomon cell code, and the eight CAMAC transfer engines.
The DSP, the memories, the cable protocol engines and the serializer are
outside it and appear as ports. Everything runs on one 125 MHz clock,
which is the link's byte clock.

## The link cell

All link traffic is sent in cells of 608 bytes, one byte per clock, so a
cell takes 4.864 us. A cell holds a 32-byte header and 320 bytes (80
words) of payload. These 352 bytes are protected by 32 interleaved
Reed-Solomon RS(19,11) codewords over GF(2^8):

```
cell byte k  ->  codeword k mod 32, symbol k div 32
bytes   0..31   symbol 0 of codewords 0..31   = the header
bytes  32..351  symbols 1..10                  = the payload
bytes 352..607  symbols 11..18                 = 8 parity bytes per codeword
```

Each codeword therefore carries one header byte, ten payload bytes and
eight parity bytes, and it can correct any four wrong bytes. A burst of
noise on the fibre hits consecutive bytes, which belong to consecutive
codewords. A burst of up to 128 bytes (1.024 us) puts at most four errors
in any codeword, so it is always corrected. The cell length was chosen to
suit the klystron modulator pulse: its noisy edges last under a
microsecond and are 5 us apart.

The code uses the field polynomial x^8+x^4+x^3+x^2+1, with alpha = 2. The
generator is g(x) = (x-1)(x-alpha)...(x-alpha^7). Symbol 0 of a codeword
is its highest-degree coefficient. These choices are this design's own.
Any RS(19,11) code with eight consecutive roots would fit the cell equally
well.

**Encoder (`cell_encoder`).** The encoder keeps 32 division registers of
eight bytes each, one per codeword. Each systematic byte passes through
and steps the LFSR of its codeword. During the parity phase each register
shifts out its top byte every 32 clocks. The encoder adds no latency
beyond one output register. `ending` lets the next cell follow the last
parity byte with no gap.

**Decoder (`cell_decoder`).** While a cell arrives, its 352 systematic
bytes go into one of two cell buffers. The eight syndromes of each
codeword are built by Horner's rule, `S_i = S_i*alpha^i + byte`. After
the last byte the decoder spends 32 clocks, one per codeword, running
three steps:

1. Berlekamp-Massey, which gives the error locator Lambda.
2. A Chien search over the 19 symbol positions, which finds the errors.
3. Forney's formula, `e = X * Omega(X^-1) / Lambda'(X^-1)`, which gives
   each error's value.

A codeword is uncorrectable when the locator's degree is above four, or
when the Chien search finds a different number of roots than that
degree. Such a codeword marks the whole cell bad. Corrections are stored
next to the buffer and XORed in as the cell is read out. The first
decoded byte is offered 33 clocks after the last received byte. The
solver is one large combinational function, used once per clock; a
design that needs a higher clock rate would pipeline it.

### Header

Only bytes 0..7 of the header are used (`cell_hdr_t` in `fecc_pkg`):

| byte | field |
|---|---|
| 0 | class: 0 asynchronous, 1 synchronous, 2 trigger pattern |
| 1 | index of the message in its transmit ring |
| 2-3 | cell number within the message |
| 4 | bit 0: last cell of the message |
| 5 | payload words used in this cell (0..80) |
| 6-7 | message length in words |

The header layout is this design's own. The original protocol also used
header fields for per-buffer flow control, acknowledgement of each cell,
timeout and retransmission, and remote register access. None of these is
implemented here. As a result, a cell that cannot be corrected is dropped
and counted, and it is not sent again.

## Choosing the next cell (`link_tx`)

There are three sources of cells:

- a pending trigger pattern: the 128-bit pattern broadcast at 360 Hz,
  which tells the devices what the next beam pulses will be;
- the ring of synchronous messages;
- the ring of asynchronous messages.

Each ring is a 16-deep ring of pointers (`ptr_ring`). An entry gives a
buffer's word address and its length in words (`ring_entry_t`, 12-bit
length and 20-bit address).

The choice is made once per cell, during the last parity byte of the
previous cell. The order is trigger, then synchronous, then asynchronous.
A message is cut into cells of 80 words, and the transmitter keeps a word
offset and a cell number for each class. An asynchronous message that has
been interrupted resumes where it stopped. A synchronous request that
arrives just after a choice waits at most one cell. The testbench
measures at most 608 + 8 clocks.

Payload words are read through the link-transmit memory slots. These come
once every four clocks, which is exactly the 125 MB/s byte rate. The words
go into a 16-word FIFO, and reading starts when the cell is chosen. The
32 header bytes give the FIFO a head start, so a cell is never held up
waiting for memory.

## Receiving (`link_rx`)

Decoded cells are handled by class:

- **Trigger cell.** The first four payload words become `trig_pattern`,
  and `trig_irq` pulses. The SHARC software then broadcasts the timing
  data to the crates.
- **Message cell.** The payload words are written into the buffer at the
  head of that class's receive ring, at word offset 80 × (cell number).
  After the last cell of a message the buffer leaves the ring. A
  completion `{1, 19'b0, words[11:0]}` then goes into a 16-entry
  completion ring, and `rx_done` pulses.

A cell that finds no buffer, or a buffer that is too small, is dropped
and counted in `lost_cells`. Words are written through the link-receive
slots. A finished word waits in its own register while the next word is
assembled. With this, a whole cell is stored well inside the time of one
cell, and cells can arrive back to back.

## DMA memory time slicing (`dma_slot_arbiter`, `dma_share`)

The DMA memory is four interleaved 32-bit SSRAM parts of 1 MB each. Here
it is treated as one logical port of 1M words (20-bit word address) that
performs one access per clock (500 MB/s). A 4-bit counter walks a table
of 16 slots, and in each clock only the owner named by the slot may use
the memory:

```
slot : 0  1  2  3  4  5  6  7  8  9  10 11 12 13 14 15
owner: TX RX IE SH TX RX IE SH TX RX IE SH TX RX IE SL
```

The shares (4/16 transmit, 4/16 receive, 4/16 IEEE CAMAC, 1/16 SLAC CAMAC,
3/16 SHARC) follow the original design. The order of the slots is this
design's own. Slicing is strict: a slot whose owner is idle is not lent to
anyone else. As a result, every owner's bandwidth and worst-case wait are
fixed whatever the others do. This is the property the design relies on.

A request is held until `gnt`. Read data return `RD_LAT` = 2 clocks after
the grant, the latency of a pipelined SSRAM. The four IEEE cables share
the IEEE slots round-robin, and the four SLAC cables share the single SLAC
slot in the same way (`dma_share`). The PCI board's FPGA uses the same
slicing with a different table (9/16 PCI, 2/16 for each link direction,
3/16 SHARC), and `SLOT_TABLE` is a parameter for that reason.

## CAMAC transfer engines (`camac_unit`)

There is one engine per cable: cables 0..3 are SLAC serial strings and
cables 4..7 are IEEE serial highways. Each engine holds two descriptors,
asynchronous (context 0) and synchronous (context 1). A descriptor
(`camac_desc_t`) contains:

- crate, N, A and F;
- a word count;
- a DMA word address;
- a recovery enable, a recovery subaddress and a pointer base value.

For each word the engine does the following:

- For a write (F16..F23) it reads the data word from DMA memory and
  runs the cycle.
- For a read (F0..F7) it runs the cycle and stores
  `{X, Q, 6'b0, data[23:0]}`.
- For a control code it runs the cycle only.

The engine asks the cable's protocol engine for one cycle at a time
(`cyc_req`/`cyc_naf`/`cyc_wdata`, held until `cyc_ack`).

**Preemption.** After every CAMAC cycle the engine checks whether the
synchronous context has been started. If it has, an asynchronous block
transfer stops where it is, keeping its count and address, and the
synchronous transfer runs to the end.

**Recovery.** Many CAMAC modules keep their own memory pointer, which
advanced during the interrupted block and may have been changed by the
synchronous transfer. If recovery is enabled, the engine issues one
recovery cycle before it resumes. This is F(17) to the recovery
subaddress, with data `pointer base + words already done`. The use of
F(17) is this design's choice; the original design only says that the
pointer is rewritten with correctly advanced data.

The pipelined enhanced block transfer of the IEEE crate controllers (one
word per microsecond) belongs to the cable protocol engine, which is not
part of this RTL.

## SHARC register map (`fecc2_top`)

Word addresses on the 10-bit register port. The map is this design's own.

| address | access | meaning |
|---|---|---|
| 0x000 / 0x001 | W | queue transmit message, async / sync: `{words[31:20], addr[19:0]}` |
| 0x002 / 0x003 | W | post receive buffer, async / sync: `{capacity[31:20], addr}` |
| 0x004 / 0x005 | R | completion at the head of the async / sync ring (0 if none) |
| 0x004 / 0x005 | W | remove that completion |
| 0x008..0x00B | W | trigger pattern to send, words 0..3 |
| 0x00C | W | send the trigger pattern |
| 0x010..0x013 | R | last trigger pattern received |
| 0x014 | R | `{bad cells, cells lost for want of a buffer}` |
| 0x015 | R | `{cells dropped by the decoder, bytes corrected}` |
| 0x016 | R | `{tx ring full[4:3], link transmitter busy[2], completions pending[1:0]}` |
| 0x100 + 16·cable + 8·ctx + 0 | W | `{crate[19:14], N[13:9], A[8:5], F[4:0]}` |
| … + 1 | W | DMA word address |
| … + 2 | W | `{recovery enable[31], A[27:24], pointer base[23:0]}` |
| … + 3 | W | word count; writing it starts the transfer |
| … + 4 | R | `{busy[1], some cycle returned X=0 [0]}` |

The SHARC also has its own DMA memory port (`sharc_req`), which uses the
SHARC slots. Interrupts: `irq_trig`, `irq_link_tx[1:0]`, `irq_link_rx[1:0]`
and `irq_camac[2·cable + ctx]`.

## Files

`rtl/` contains:

- `fecc_pkg.sv`: types, constants and GF(2^8) functions, including the
  generator polynomial computed at elaboration.
- `dma_slot_arbiter.sv` and `dma_share.sv`: DMA memory time slicing.
- `ptr_ring.sv`: the 16-deep pointer ring.
- `cell_encoder.sv`, `cell_decoder.sv`, `link_tx.sv`, `link_rx.sv`: the
  link.
- `camac_unit.sv`: the CAMAC transfer engine.
- `fecc2_top.sv`: the top level.

`tb/` contains one self-checking testbench per module (`tb_<module>.sv`).
It also holds a reference RS encoder written independently of the RTL
(`tb_rs_pkg.sv`, which uses log tables and long division) and two
behavioural models: `ssram_model.sv` for the DMA memory and
`camac_cable_model.sv` for a cable with its crates.

`tb_fecc2_top` runs the whole design at its default size. It loops the
link back on itself with a 100-byte noise burst, and it uses the original
cable round trips (1250 clocks for SLAC, 750 for IEEE). It sends a
300-word asynchronous message, a 60-word synchronous message and a trigger
pattern. It also runs a SLAC block write that is preempted and recovered,
and an IEEE block read. It counts each mechanism (link preemption,
trigger forwarding, ECC correction, CAMAC preemption, recovery cycle, DMA
slot contention) and fails if any of them never happens.

To simulate, for example the top-level test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fecc_pkg.sv tb/tb_fecc2_top.sv --top-module tb_fecc2_top -o sim
./obj_dir/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M`. All of them run
in a few seconds.

## How far to trust it, and where it departs from the original design

The following parts are checked closely:

- The RS encoder is checked byte for byte against the independent
  reference.
- The decoder is checked on:
  - 128-byte bursts;
  - four scattered errors in every codeword;
  - a five-error codeword, which must be flagged.
- The link is checked for cell order, headers, payloads, back-to-back
  timing and preemption latency.
- The CAMAC engine is checked for cycle order, recovery data and
  one-cycle preemption.

The following are this design's own choices, not the original
design's:

- the field and generator of the code;
- the byte order within the cell;
- the header layout;
- the ring entry and completion formats;
- the slot order;
- strict, non-lending slicing;
- round-robin sharing among cables;
- the descriptor and register formats;
- F(17) for recovery;
- one DMA port per cable, shared by its two contexts (the original has
  separate memory interfaces per class);
- a single 125 MHz clock.

The following are not implemented:

- link acknowledgement, timeout and retransmission, flow control, and
  remote register access (so a bad cell is lost);
- CAMAC block modes that stop on Q;
- the cable protocols themselves (SLAC serial, IEEE serial highway,
  Kinetic Systems 3952 enhanced block transfer);
- the BITBUS interface, which the DSP drives by programmed I/O;
- the whole PCI link board apart from the reusable link and arbiter
  modules.

The DMA address is 20 bits, which covers 1M words. The planned 2 MB
memory parts would need a 21-bit address (`DMA_AW`).
