# An SDHCI 1.0 SD-card host controller for an AXI RISC-V SoC

SD cards are the usual boot and storage medium of small Linux-capable systems, but many open
RISC-V SoCs reach them only through an SPI controller. SPI uses one data line and none of the SD
bus's own framing, so it is slow and needs a large driver. This controller speaks the native SD
bus: a CMD line for commands and responses, and one or four DAT lines for data blocks. It
presents the register map of the SD Host Controller standard (SDHCI), version 1.0, so the stock
SDHCI driver of an operating system needs only a small glue layer.

The controller was built for a CVA6-based SoC. That core issues only one register access at a
time, so every byte of a transfer pays the full round-trip latency of the buffer data register.
The controller therefore sits directly on the SoC's main AXI crossbar (64-bit data, 48-bit
address) rather than behind the slower peripheral register bus.

At the operating point it was designed for, the system clock is 50 MHz and the SD clock 25 MHz.
The raw bandwidth of a 4-bit bus is then 12.5 MB/s. In simulation, with a fast bus master,
16-block transfers reach 12.0 MB/s for reads and 11.7 MB/s for writes.

## Structure

```
            AXI4 (64b data, 48b addr)
                    |
              +-----------+      32-bit register bus
              | sdhc_axi  |-----------------------------+
              +-----------+                             |
                                                 +-------------+   irq_o
                                                 |  sdhc_regs  |-------->
                                                 | SDHCI 1.0   |
                                                 +-------------+
               command, start        | transfer setup,     | divider,
               response, errors      | buffer port, events | enable
                    v                v                     v
              +-----------+  done  +-------------------+  +--------------+
              | sdhc_cmd  |------->| sdhc_data         |  | sdhc_clk_div |
              |           |        |  sdhc_fifo        |<-|  rise / fall |
              +-----------+        |   sdhc_sram 256x32|->|  stop        |
                 |  CMD            +-------------------+  +--------------+
                 |                    | DAT[3:0]               | SD CLK
                 v                    v                        v
                              SD card (off chip)
```

| Module | Role |
|---|---|
| `sdhc_pkg` | AXI and register-bus structs, SDHCI offsets and bit numbers, command and transfer descriptors, bit-serial CRC7 and CRC16 steps |
| `sdhc_axi` | AXI4 subordinate; splits each 64-bit beat into 32-bit register accesses |
| `sdhc_regs` | SDHCI 1.0 register file, interrupt logic, software resets |
| `sdhc_clk_div` | integer divider that makes the SD clock; supplies edge strobes; can be stopped |
| `sdhc_cmd` | command channel: sends 48-bit frames, receives 48- or 136-bit responses |
| `sdhc_data` | data channel: block framing on DAT, CRC16, CRC status, busy, flow control |
| `sdhc_fifo`, `sdhc_sram` | the block buffer: an SRAM of 256 32-bit words used as a show-ahead FIFO |
| `sdhc_top` | wires the above together; SD pins as input, output and output-enable triples |

The command and data channels are independent state machines, as they are on the SD bus. They
meet only through one signal, the command-completion pulse. A write must not start before the
card has answered its write command, so the data channel waits for this pulse. A read is armed
as soon as its command is issued, because the card may send the first data block before the
command response has finished.

## One clock domain, two SD clock edges

Everything runs on the system clock `clk_i`; the SD clock never clocks a flip-flop.
`sdhc_clk_div` toggles a register every `max(1, div)` system cycles, so the SD clock period is
`2*max(1, div)` cycles. Alongside it, the divider produces two one-cycle strobes:

- `rise_o` is high in the system cycle whose closing edge raises the SD clock. The command and
  data channels sample CMD and DAT in that cycle, when the card's outputs are stable.
- `fall_o` is high in the cycle that lowers the SD clock. The channels change their outputs
  then, half an SD period before the card samples them.

This is the default-speed timing of the SD bus. The divider field is SDHCI's 8-bit "SDCLK
frequency select". Its standard encoding asks for a divisor of 2N; here a value of N gives a half
period of N cycles, which is the same thing. A value of 0 gives the fastest clock, half the
system clock, because a toggled flip-flop cannot run faster. With `div = 1` and a 50 MHz system
clock, the SD clock is 25 MHz.

The divider also has a `stop_i` input. It lets a high phase that is in progress finish, then
holds the clock low until `stop_i` drops. No rising edge reaches the card meanwhile, so the card
simply pauses. This is the read flow control described below.

## The command channel

`sdhc_cmd` sends one frame per command, MSB first on falling edges:

- a start bit 0 and a transmission bit 1;
- the 6-bit index and the 32-bit argument;
- CRC7 (polynomial x^7 + x^3 + 1) over those 40 bits;
- an end bit 1.

Unless the command has no response, the channel then releases CMD and waits up to 64 SD clocks
for a start bit. It shifts in 48 bits, or 136 bits for an R2 response (CID or CSD). The checks it
can apply are:

- end bit;
- CRC7, over bits 47..8, or over the 120-bit payload of an R2;
- echoed command index;
- timeout.

Software selects the CRC and index checks per command, as SDHCI prescribes. R3 responses (from
ACMD41) carry no valid CRC, for example. A finished command raises `done_o` for one cycle, with
the error flags and the response in the layout of the SDHCI response registers:

- 48-bit responses: frame bits 39..8 in `resp[31:0]`;
- R2: frame bits 127..8 in `resp[119:0]`.

After a frame or response ends, the next frame starts no earlier than 8 SD clocks later, as the
SD bus requires.

## The data channel and its buffer

This is the part with the most interplay. `sdhc_data` owns the DAT lines and a 2 KiB buffer,
which holds two 512-byte blocks. On the host side it is a word FIFO whose head word is always
visible, so a read of the buffer data register can be answered at once. Byte 0 on the bus is
bits [7:0] of a buffer word, and each block starts a new word. On a 4-bit bus a byte travels as
two nibbles, upper first. Each DAT line has its own CRC16 (x^16 + x^12 + x^5 + 1).

### Reads

After the command is issued, the channel waits for a start bit on DAT0. The wait is bounded by
the data timeout of 2^(13+n) system clocks, where n is SDHCI's timeout field. The channel then
does the following for each block:

1. Shift in `block_size` bytes on rising edges.
2. Check the CRC16 of every used line and the end bit.
3. Mark the block complete.

A complete block sets Buffer Read Enable and raises the *buffer read ready* interrupt. The driver
then reads `block_size/4` words from the buffer data register.

Flow control works block by block. Before it waits for the next start bit, the channel compares
the free buffer space with one block. If there is less room, it asserts `clk_stop_o` and the SD
clock halts between blocks, where the SD protocol allows it. As soon as the host has emptied
enough words, the clock resumes and the card sends the next block. A slow host therefore slows
the card down instead of overflowing the buffer. With a fast host, the second buffer half fills
while the first is read, and the bus never stops.

Buffer Read Enable drops for one cycle after every block. The interrupt logic sets buffer read
ready on its rising edge, so every block raises the interrupt again, even when the host is far
enough ahead that the enable would otherwise stay high. The transfer is complete once all blocks
have been received and read out. For an open-ended transfer, which has no block count, the
driver stops it with CMD12.

### Writes

The host pushes words while Buffer Write Enable is set, that is, while a whole free block fits.
The channel waits for two things: the completion pulse of the write command, and a whole block in
the buffer. It then does the following for each block:

1. Wait at least two SD clocks.
2. Drive a start bit, the data, the CRC16 of each line and an end bit, on falling edges.
3. Release the lines and read the card's CRC status token on DAT0. `010` means the card accepted
   the block.
4. Wait while the card holds DAT0 low (busy).

A rejected token is reported as a data CRC error. While one block is on the bus, the host is
already filling the other half of the buffer.

### Busy-only commands

Commands with an R1b response signal busy on DAT0 but carry no data. Examples are CMD7 (select),
CMD12 (stop) and erase. For these, the data channel only waits for DAT0 to go high, and then
reports transfer complete, as SDHCI requires.

### Auto CMD12

A multi-block transfer on the SD bus ends only when the host sends CMD12. SDHCI lets the
controller send it by itself: the driver sets the Auto CMD12 bit in the transfer mode, together
with a block count. The data channel then requests the stop command at the following points:

- for a read, as soon as the last counted block has been received;
- for a write, as soon as the card's busy after the last block has ended.

The register file sends CMD12 (argument 0, R1b) as soon as the command channel is idle, and keeps
Command Inhibit (CMD) set until the response has arrived. The response lands in RESP[127:96] only,
so the data command's response in RESP[31:0] survives. No command-complete interrupt is raised.
Errors go to the Auto CMD12 error status register and to error interrupt bit 8. Transfer complete
comes once the data has moved, the CMD12 response has arrived, and DAT0 shows no busy. The driver
therefore sees one event for data and stop command together.

For a read, the card keeps streaming the block after the last one until CMD12 reaches it. The
data channel ignores those bits.

### Stop at block gap

When the driver sets Stop At Block Gap Request in the block gap control register, a multi-block
transfer is held after the block in progress. The hold point is the same one the buffer-full
clock stop uses:

- a read is held with the SD clock stopped before the next block's start bit;
- a write is held with the bus idle before the next block's start bit.

On the first cycle of the hold, the Block Gap Event interrupt is raised. Data already in the
buffer can still be moved while the transfer is held. The driver resumes the transfer by writing
Continue Request with the stop bit cleared. Continue reads back as 0, and only clearing the stop
bit has any effect. Read wait and interrupt at block gap are stored only.

## Registers

The register file is the SDHCI 1.0 map. Offsets are in bytes; every register is reached as part
of an aligned 32-bit word, with byte strobes.

| Offset | Contents | Notes |
|---|---|---|
| 00 | SDMA system address | stored only; there is no DMA engine |
| 04 | block size, block count | block size up to 512; count decrements per block when enabled |
| 08 | argument | |
| 0C | transfer mode, command | a write to the command byte (byte 3) issues the command |
| 10-1C | response | layout as described under *The command channel* |
| 20 | buffer data port | a read pops one word and waits while the head word is still being fetched; a write pushes one word |
| 24 | present state | command and data inhibit, line activity, buffer enables, card detect, write protect, DAT and CMD levels |
| 28 | host, power, block gap, wakeup control | LED, 4-bit bus, bus power; stop at block gap and continue; read wait, interrupt at gap and wakeup are stored without effect |
| 2C | clock control, timeout control, software reset | internal clock stable reads 1 once enabled; resets clear themselves |
| 30 | normal and error interrupt status | write 1 to clear; bit 15 is set while any error bit is set |
| 34, 38 | status enables, signal enables | |
| 3C | Auto CMD12 error status | timeout, CRC, end-bit and index errors of the last automatic CMD12 |
| 40 | capabilities | `0x010032B2` at 50 MHz: timeout and base clock 50 MHz, 512-byte blocks, 3.3 V only |
| 48 | maximum current | 0 |
| FC | slot interrupt status, version | specification version 1.0 |

An event sets its interrupt status bit only if the matching status-enable bit is set. `irq_o` is
high while any status bit with its signal-enable bit set is high.

While Command Inhibit (CMD) is set, a write to the command register is ignored. Command Inhibit
(DAT) is shown in present state but not enforced, so abort commands can still be sent.

There are three software resets:

- CMD reset clears the command channel.
- DAT reset clears the data channel and empties the buffer.
- Reset-all also returns the registers to their reset values.

## The AXI port

`sdhc_axi` serves one AXI transaction at a time; reads win over writes. A 64-bit beat covers two
32-bit registers.

- A write beat updates each register whose four strobes are not all zero.
- A full 64-bit read beat reads both registers.
- A narrower read reads only the register that `addr[2]` selects.

The address of each beat is computed as follows:

- INCR bursts advance it by the beat size.
- WRAP bursts do the same; they are treated as INCR.
- FIXED bursts keep it, so a FIXED burst of 64-bit reads streams two buffer words per beat.

Only address bits [7:0] are decoded, and every response is OKAY. A 32-bit register read returns
R data three cycles after AR is accepted. A write returns B three cycles after its W beat is
accepted. Assertions check that the AR, AW and W channels hold their payload while valid and
not ready, and that WLAST marks the last beat of a burst.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `SYS_CLK_MHZ` | 50 | `sdhc_top`, `sdhc_regs` | system clock, reported as base and timeout clock (6-bit fields, at most 63) |
| `BUF_WORDS` | 256 | `sdhc_top`, `sdhc_data` | buffer size in 32-bit words; must hold two blocks of the largest size for streaming |
| `RSP_TIMEOUT` | 64 | `sdhc_cmd` | SD clocks to wait for a response start bit |
| `CMD_GAP` | 8 | `sdhc_cmd` | minimum SD clocks between frames |
| `DIV_W` | 8 | `sdhc_clk_div` | divider field width |
| `AXI_AW`, `AXI_DW`, `AXI_IW` | 48, 64, 8 | `sdhc_pkg` | AXI address, data and ID width |

## What follows the original design and what is added here

The original design contributes the following:

- the split into register file, clock divider, command logic and data logic with an SRAM buffer;
- the command-completion notification between the two channels;
- the SD clock stop when the buffer fills during reads;
- the SDHCI 1.0 programming model;
- direct attachment to the 64-bit, 48-bit-address AXI crossbar;
- the 50 MHz / 25 MHz operating point.

The SD bus framing, the CRC polynomials and the response and timing rules come from the public SD
and SDHCI specifications.

Choices made here where the original design gives no detail:

- the buffer size of two blocks;
- block-level flow control;
- the one-transaction-at-a-time AXI adapter and its latency;
- the ID width;
- the data timeout counted in system clocks;
- how Auto CMD12 and stop at block gap are sequenced with the data channel (both are SDHCI 1.0
  features, so only their register-level behaviour comes from that standard);
- the capabilities value;
- the card model's timing.

The following are not implemented:

- DMA of any kind (SDMA, ADMA), which belongs to later versions of the standard;
- read wait, suspend and resume;
- high-speed mode, 1.8 V signalling and 8-bit buses;
- card-detect debouncing, beyond a two-flip-flop synchroniser.

A driver that does not rely on these works unchanged. Area and the latency seen by the CPU
depend on the SoC and the cell library, and are not modelled here.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it checks against an independent reference |
|---|---|
| `tb_sdhc_sram` | every word written and read back, read-during-write returns old data |
| `tb_sdhc_clk_div` | SD clock periods for several divisors, strobes predicting each edge, stop holding the clock low |
| `tb_sdhc_cmd` | frames bit by bit against a CRC7 computed by long division; R1, R2, no-response, timeout, CRC, end-bit and index errors; frame gap |
| `tb_sdhc_data` | 1- and 4-bit reads and writes against a reference CRC16; clock stop with a slow reader; CRC, end-bit and timeout errors; CRC status token and busy; when Auto CMD12 is requested and how completion waits for it; holding reads and writes at a block gap |
| `tb_sdhc_regs` | reset values, capabilities, strobes, command decoding and inhibit, interrupts, resets, present-state bits, one-cycle latency; Auto CMD12 issue, response placement and error status; block gap stop, event and continue |
| `tb_sdhc_axi` | beat splitting, strobes, INCR and FIXED bursts, lane addressing, three-cycle read latency |
| `tb_sdhc_top` | end to end at the default parameters (below) |

`tb_sdhc_top` connects the whole controller to a behavioural SD card, `tb/sd_card_model.sv`,
and plays the driver over AXI:

- bring-up with CMD0, CMD8, ACMD41, CMD2, CMD3, CMD7 (with busy) and ACMD6 to a 4-bit bus;
- single-block and 16-block writes and reads, with the data checked against the card's memory;
- a slow reader that forces the SD clock to stop;
- a corrupted block, a command without answer and a wrong response index;
- a 3-block write and read ended by Auto CMD12;
- a 3-block read stopped at the block gap after its first block, then continued;
- the interrupt pin.

It counts each of these mechanisms and fails if one never happened. It also measures the bus
time of one 4-bit read block: 2083 system cycles, which is two per SD clock for 1024 data
nibbles, 16 CRC clocks and the end bit, plus one cycle. The 16-block workload gives:

```
write 16 blocks: ... 11705 kB/s at 50 MHz
read 16 blocks:  ... 12017 kB/s at 50 MHz
```

These figures are measured from the command response to transfer complete, with a bus master
that issues register accesses back to back. They show the controller's own ceiling. A CPU that
waits for each register read pays its own latency on top, so a real system is slower.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv --top-module tb_sdhc_top rtl/sdhc_pkg.sv tb/tb_sdhc_top.sv
./obj_dir/Vtb_sdhc_top
```

Replace `tb_sdhc_top` with any other testbench name. The end-to-end run takes well under a
second.

The card model is written for this testbench, not as a reference card:

- it answers after 2 SD clocks;
- it starts read data 4 clocks after the command;
- it is busy for 12 clocks after each written block;
- it stores 16 blocks, addressed modulo 16.

Real cards have longer and variable access times, so measured throughput on hardware is lower.
