# ARINC 429 bus interface core in SystemVerilog

ARINC 429 is the avionics data bus that links equipment in transport aircraft. It is a
one-way, point-to-point link on a twisted pair: one transmitter, one or more listeners, and
32-bit words sent one at a time at 100 kbit/s (high speed) or 12.5 kbit/s (low speed). This
core sits between a host processor and such buses. Each receive channel turns the line
signals back into words, filters them by label and destination, and queues them for the
processor. Each transmit channel takes words the processor has queued and sends them on the
bus. All channels sit behind one small synchronous register port. The core is meant for an
FPGA or an ASIC. The analog line drivers and line receivers are separate parts outside it.

The design follows the published description of an ARINC 429 core ("VHDL Implementation and
Verification of ARINC-429 Core", M. Kamaraju et al.). That description gives the block
structure, the word format, the bit order, the CPU signals, the FIFO flags and the interrupt
rule. It does not give register layouts, an address map, timing or a clock frequency. Those
were filled in here, and the section *Where this design departs from, or adds to, the
description* lists every such choice.

## The ARINC 429 word and how it travels

A word has five fields. In this RTL, bit *n* of the standard's numbering is `word[n-1]`:

| bits (standard) | `word[...]` | field |
|---|---|---|
| 1-8   | `[7:0]`   | label: what the data is |
| 9-10  | `[9:8]`   | SDI: source/destination identifier, which receiver it is for |
| 11-29 | `[28:10]` | data (BCD, binary or mixed) |
| 30-31 | `[30:29]` | SSM: sign/status matrix |
| 32    | `[31]`    | parity |

**Bit order on the bus.** The label goes first with its bit 8 leading. Then come bits 9, 10,
11 and so on up to 32: the order is 8, 7, ..., 1, 9, 10, ..., 32. Receiver and transmitter
both use the package function `arinc_pkg::wire_to_word_pos(n)`. It returns the word position
of the *n*-th bit on the wire: `7-n` for the first eight bits and `n` after that.

**Line coding.** The bus is bipolar return-to-zero. The line receiver turns it into two
logic signals, `RxHi` and `RxLo`. During the first half of each bit time, one of them is high:
`RxHi` for a one, `RxLo` for a zero. During the second half, both are low. "Both low" is the
null state, and the line rests in it between words. A transmitter leaves at least four bit
times of null between words. A word therefore takes 36 bit times: 360 us at high speed and
2.88 ms at low speed.

**Parity** is odd: bit 32 makes the count of ones in the whole word odd.

## Block structure

```
                +----------------------------- core429 ------------------------------+
 cpu_ren/wen -->|                |--req/rdata--> rx_channel[i]                        |
 cpu_add[8:0]-->| cpu_interface  |                rx_clock_recovery -> rx_word_assembler|<-- rx_hi[i], rx_lo[i]
 cpu_din ------>|                |                  -> parity / label / SDI checks      |
 cpu_dout <-----|                |                  -> arinc_fifo (Rx)                  |
 cpu_wait <-----|                |--req/rdata--> tx_channel[j]                        |
                |                |                arinc_fifo (Tx, 512) -> tx_serializer|--> tx_hi[j], tx_lo[j]
 int_out <------ OR of every channel's interrupt                                     |
                +---------------------------------------------------------------------+
```

| file | block |
|---|---|
| `arinc_pkg.sv` | word type, rates, register structs, address map, bit-order function |
| `arinc_parity.sv` | odd-parity generator (Tx) and checker (Rx) |
| `arinc_fifo.sv` | word FIFO with empty / half-full (programmable level) / full flags |
| `rx_clock_recovery.sv` | RxHi/RxLo synchronisers and bit recovery |
| `rx_word_assembler.sv` | 32-bit shift register, bit counter, word gap timer |
| `label_memory.sv` | label list and label compare, with reload |
| `rx_channel.sv` | one receiver: the above plus the Rx FIFO, control and status registers |
| `tx_serializer.sv` | parallel-to-serial register, parity insertion, waveform shaper |
| `tx_channel.sv` | one transmitter: Tx FIFO, serializer, control and status registers |
| `cpu_interface.sv` | address decode, bus-width adaptation, `cpu_wait` handshake |
| `core429.sv` | top level |

The top parameters and their defaults:

| parameter | default | meaning |
|---|---|---|
| `CPU_DATA_WIDTH` | 16 | CPU data bus: 8, 16 or 32 |
| `NUM_RX`, `NUM_TX` | 1, 1 | receive and transmit channels, 1 to 16 each |
| `CLK_FREQ_HZ` | 10 000 000 | system clock; all bit timing is derived from it |
| `RX_FIFO_DEPTH`, `RX_FIFO_LEVEL` | 64, 32 | Rx FIFO words; half-full threshold |
| `TX_FIFO_DEPTH`, `TX_FIFO_LEVEL` | 512, 256 | Tx FIFO words; half-full threshold |
| `LABEL_DEPTH` | 256 | labels each receiver can hold |

`CLK_FREQ_HZ` must be a multiple of 200 kHz if the two bit times are to be exact. At 10 MHz,
a bit lasts 100 clocks at high speed and 800 clocks at low speed.

## Receiving: from line pulses to filtered words

**Clock recovery (`rx_clock_recovery`).** ARINC 429 sends no clock, so the bit clock is taken
from the data. `RxHi` and `RxLo` each pass through two flip-flops. A rising edge on either one
marks the start of a bit. A quarter bit time later (25 clocks at high speed, 200 at low speed)
both lines are sampled:

* exactly one line high: a bit, with its value;
* both high: a line error;
* both low again: a glitch, ignored.

After that the block waits for the null half of the bit before it accepts the next edge. So a
pulse shorter than a quarter bit never becomes a bit. The bit strobe comes 2 + quarter + 1
clocks after the line edge.

**Word assembly (`rx_word_assembler`).** Bits are shifted into a 32-bit register and counted.
At the 32nd bit the register is put back into word order and presented for one clock. A gap
timer runs while a word is incomplete. If the next bit is more than two bit times late, the
partial word is thrown away and a gap error is reported. Null between complete words is
normal and is not timed.

**Checks and filters (`rx_channel`).** A finished word goes into the Rx FIFO at the end of
the clock in which it is reported, unless one of the enabled checks rejects it:

* *parity check*: the word does not hold an odd number of ones. It is dropped and the sticky
  `parity_error` status bit is set;
* *label compare*: the word's label is not in the label memory;
* *SDI compare*: the word's SDI differs from the programmed value.

A word that passes while the FIFO is full is lost, and the sticky `overflow` bit is set.

**Label memory (`label_memory`).** The processor writes the labels it wants, one per write, to
the label register. They fill a list from entry 0 upward, and an entry counter says how many
are valid. A received label is compared in parallel with all valid entries, so the answer is
ready in the same clock. Writing control bit 7 *reloads* the memory. The counter goes back to
zero, and the old labels stay in the RAM but no longer take part in the compare. New writes
overwrite them from entry 0. Reading the label register returns the number of valid entries.

## Transmitting

`tx_channel` holds a 512-word FIFO. The serializer takes a word as soon as one complete word is
in the FIFO, and keeps taking words until the FIFO is empty. On a 16-bit CPU bus, "complete"
means both halves have been written. The interface pushes the word only with its last piece,
so a half-written word never reaches the bus.

`tx_serializer` loads the head word. When parity insertion is on, it replaces bit 32 by the odd
parity of bits 1 to 31; otherwise bit 32 goes out as written. It then reorders the word into
bus order in its shift register. Each bit time is split in half. The waveform shaper drives
`tx_hi` (for a one) or `tx_lo` (for a zero) during the first half, and both lines are low
during the second half. The register shifts at the end of each bit. After bit 32 the lines
stay null for four bit times. Back-to-back words therefore start 36 bit times plus one clock
apart. The bit rate is sampled when the word is loaded, so changing it never breaks a word.

## Registers and the CPU port

### Handshake

The port is synchronous to `clk`. `cpu_ren` and `cpu_wen` are active low. Every access runs
like this:

1. The CPU sets `cpu_add` (and `cpu_din`) and pulls one enable low. `cpu_wait` goes high in
   the same cycle.
2. At the next clock edge the address is latched.
3. At the edge after that the access happens: a write, or read data captured into `cpu_dout`.
4. `cpu_wait` then drops, and `cpu_dout` stays valid until the next access. The CPU releases
   the enable.

The enable must be high for at least one clock between accesses. Assertions check that the two
enables are never low together and that an enable is not released while `cpu_wait` is high.

### Address map (`cpu_add[8:0]`)

| bits | meaning |
|---|---|
| `[8:5]` | channel number 0-15 (a missing channel ignores writes and reads 0) |
| `[4]` | 0 = receiver, 1 = transmitter |
| `[3:2]` | 0 data (FIFO), 1 control, 2 status, 3 label memory (receivers only) |
| `[1:0]` | byte offset of the piece inside a 32-bit data word |

A 32-bit data word takes 32/`CPU_DATA_WIDTH` accesses at byte offsets 0, W/8, ...:

* *writing*: the pieces collect in a holding register. The last piece pushes the whole word.
* *reading*: each piece shows the head of the Rx FIFO. Reading the last piece removes it.

Control, status and label accesses use bits `[7:0]`.

### Rx registers

| bit | control (read/write) | status (read; bits 3-5 clear when read) |
|---|---|---|
| 0 | low speed (12.5 kbit/s) | FIFO empty |
| 1 | label compare enable | FIFO half full (>= `RX_FIFO_LEVEL` words) |
| 2 | parity check enable | FIFO full |
| 3 | SDI compare enable | parity error (sticky) |
| 4 | SDI value to accept, low bit | gap error or both lines high (sticky) |
| 5 | SDI value to accept, high bit | overflow: a word lost to a full FIFO (sticky) |
| 6 | interrupt enable | - |
| 7 | write 1: reload label memory (reads 0) | - |

### Tx registers

| bit | control | status |
|---|---|---|
| 0 | low speed (12.5 kbit/s) | FIFO empty |
| 1 | parity insertion enable | FIFO half full (>= `TX_FIFO_LEVEL` words) |
| 2 | interrupt enable | FIFO full |
| 3 | - | busy: a word or its trailing gap is on the bus |

### Interrupt

A channel's interrupt is high while its interrupt-enable bit is set and any of its three FIFO
flags (empty, half full, full) is high. `int_out` is the OR of all channel interrupts.

Note that an idle receiver with interrupts enabled therefore interrupts all the time, because
its FIFO is empty. That is the rule as described. Software typically enables the interrupt
only while it is waiting for a threshold.

## Where this design departs from, or adds to, the description

Taken from the description:

* the 32-bit word format and the bit order;
* the two bit rates, selected independently per channel;
* the 512-word Tx FIFO;
* one 8-bit control register and one 8-bit status register per channel;
* bit 7 of the Rx control register reloads the label memory, with the stated reload
  behaviour;
* label compare on or off;
* the three FIFO flags and the interrupt rule built from them;
* the CPU signal names, widths and polarities, and the meaning of `cpu_wait`;
* `int_out` as the OR of the receive and transmit interrupts;
* one channel of each kind as the main configuration, with provision for up to 16.

Chosen here, because the description is silent:

* **Clock and timing.** A 10 MHz system clock and an active-low asynchronous reset. Clock
  recovery samples a quarter bit after the edge. The gap limit is two bit times. The
  transmitter leaves four null bit times between words and encodes bipolar RZ. The null gap,
  the RZ coding and odd parity come from the ARINC 429 standard, not from the description.
* **Register bits.** Every control and status bit except Rx control bits 1 (label compare,
  whose position is a choice) and 7. That covers the interrupt-enable bits, the SDI filter
  and the sticky error bits.
* **Address map.** The address map and the piece order for 8- and 16-bit buses. The
  description names a 9-bit address and 8/16/32-bit buses but gives no map. A schematic
  printed with the description shows a 4-bit address and a 16-bit data bus. The 9-bit address
  was kept, and 16 bits became the default data width.
* **Rx FIFO and label memory.** The Rx FIFO depth (64) and both FIFO levels. The description
  calls the levels "programmed", and here they are synthesis parameters. The label memory is
  a 256-entry list compared in parallel.
* **Rejected words.** A word that fails an enabled parity check is dropped and flagged. It is
  not stored with a mark.
* **SDI filter.** SDI filtering uses a single programmable SDI value. The description says
  words are sorted "by label and destination bits" but gives no format for a combined table.

* **Transmitter output names.** The published transmitter block diagram labels the waveform
  shaper's outputs `RxHi` and `RxLo`. For a transmitter they are taken to be `TxHi` and `TxLo`
  (`tx_hi`, `tx_lo` here).
* **Block boundaries.** The shift register, bit counter and word gap timer, drawn as three boxes
  in the receiver diagram, form one module here. So do the parallel-to-serial register,
  waveform shaper and load/shift control of the transmitter.

Not covered here: the analog line drivers and line receivers, and the host processor. The
description takes both from elsewhere.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the block against
expected values that the testbench works out itself, and each ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_arinc_parity` | parity bit and check against `$countones`, corner words and 2000 random words |
| `tb_arinc_fifo` | random push/pop against a queue model; data, count, all flags, overflow |
| `tb_rx_clock_recovery` | random bits at both rates; exact strobe latency; glitch rejected; line error |
| `tb_rx_word_assembler` | random words in bus order; word order; strobe timing; gap errors at both rates |
| `tb_label_memory` | match for all 256 labels after load, reload, refill; full list |
| `tb_rx_channel` | bus model into one receiver; every check, filter, flag, sticky bit, interrupt |
| `tb_tx_serializer` | independent bus decoder; pulse width, bit period, 36-bit-time word period, parity |
| `tb_tx_channel` | start latency, word order, full FIFO losing a word, flags, interrupt, low speed |
| `tb_cpu_interface` | 16-bit bus, 2 + 2 channel models; decode, piece assembly, pop on last piece, `cpu_wait` = 2 edges |
| `tb_core429` | whole core at default parameters, Tx looped back to Rx (below) |
| `tb_core429_channels` | 16 + 16 channels on an 8-bit bus and 2 + 2 on a 32-bit bus, transmitters cross-wired to receivers, mixed rates; uses the helper `core429_loop_harness` |

`tb_core429` plays the host processor. It loops the transmitter into the receiver and runs,
at the default parameters:

* transfers with parity insertion;
* label compare and label reload;
* SDI compare;
* parity errors injected by turning parity insertion off;
* a broken-off word from a separate bus model (gap error);
* a low-speed transfer, checking the bit period on the wire (100 and 800 clocks);
* 513 words into the 512-word Tx FIFO (full);
* the Rx FIFO reaching half full, then full with overflow;
* each interrupt source on its own.

It counts each of these mechanisms and fails if any of them never happened. It simulates
about 35 ms of bus time in a few seconds.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/arinc_pkg.sv tb/tb_core429.sv --top-module tb_core429
./obj_dir/Vtb_core429
```

Testbenches other than `tb_core429` override parameters to reach the corner cases quickly, for
example 4- or 8-word FIFOs.

**Limits of this verification.** Everything was checked in simulation only. There is no
timing analysis and no gate-level run. The receiver was only fed signals from this core's own
transmitter and from testbench bus models that share its idea of the RZ timing. Bit-rate
tolerance (the 12-14.5 kbit/s low-speed range that ARINC 429 allows) was not tested. Clock
recovery times each bit from its own edge, so moderate rate errors should be harmless, but
that is untested.
