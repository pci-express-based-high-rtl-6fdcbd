# PCIe40 readout firmware for Belle II: event building and DMA to host memory

This is the data path of a readout board. The board takes event fragments from up to 48
front-end optical links ("Belle2links"). It joins the fragments of one trigger into a single
built event and writes those events into the memory of a PC server over PCI Express, with no
software involved per event. The same board also carries slow control to the front ends over
the same links: register reads and writes, and streamed configuration files. It also returns
a busy signal to the trigger and timing distribution (TTD) system, so the trigger holds off
when the board cannot take more data.

Everything runs in one clock domain, the 127 MHz system clock. The main data path is 256 bits
wide, so it moves at most 32.5 Gb/s.

```
 link 0  ─► link_buffer ─┐
 link 1  ─► link_buffer ─┤                     ┌─ pattern_gen (test source)
   ...                   ├─► event_builder ─► user_logic_ctrl ─► dma_fifo (32 kB)
 link 47 ─► link_buffer ─┘                                           │
                                                                     ▼
   host table ─► read_dma ─► desc_ctrl ◄──────── fifo_ctrl ─► onchip_mem (8 kB pages)
                                 │                  ▲               │
                                 └─► write_dma ─────┴ page freed ◄──┘
                                         │
                                         ▼ host memory writes (1 MB super pages)
 per-link slc_fifo ◄─► reg_bank ◄─► host register port
 ttd_if: trigger in, busy out
```

The code is in `rtl/`:

- `pcie40_pkg.sv` holds the shared constants and types.
- `pcie40_top.sv` wires all the blocks together.
- Each testbench in `tb/` is self-checking.

## Outside the RTL

The serial and vendor parts are not described here as logic. They are replaced by plain ports
on `pcie40_top`:

- **Front-end links.** The GBT transceivers and the Belle2link decoder are replaced by the
  `lk_*` ports. These carry one 32-bit decoded word per cycle with start/end-of-fragment flags,
  plus a CRC-error pulse per link.
- **Slow-control words.** The slow-control words of each link appear on `slc_tx_*` and
  `slc_rx_*`.
- **Trigger and busy.** The b2tt trigger and timing decoder is replaced by a `trig` pulse in
  and a `busy` level out.
- **PCI Express.** The PCIe hard IP and its bus bridge are replaced by three ports:
  - a register port (`reg_*`), one 32-bit word per access, with read data one cycle later;
  - a host-memory read port for descriptor-table entries (`rq_*` request, `cpl_*` completion);
  - a host-memory write port for DMA data (`hw_*`: address, 256-bit data, last flag, ready).
- **DMA status.** DMA status records leave on `dma_st_valid`/`dma_st`. A PCIe wrapper would
  post them to host memory.

## Fragments and link buffers (`link_buffer`)

Each link has its own buffer. A fragment on the link looks like this:

| word | contents |
|---|---|
| first | `{8'hB2, tag[23:0]}`: the tag is the low 24 bits of the event number |
| middle | payload words |
| last | `{8'hE2, 8'h00, count[15:0]}`: count is the number of payload words |

The link format here is this design's own. The real Belle2link format is defined elsewhere.

The buffer checks the header magic, the trailer magic and the word count on the way in, then
drops the header and trailer. It packs the payload eight words at a time into 256-bit beats;
the last beat is zero-padded. It stores the beats in a data FIFO, which defaults to 256 beats
(8 kB). Per fragment it pushes one status entry into a small status FIFO, holding:

- the tag;
- the word count and beat count;
- four error flags: header, trailer, length and overflow.

So the event builder never has to parse link data.

`busy` rises when fewer than `BUSY_MARGIN` beats are free.

If the data FIFO does fill, the buffer drops the remaining words and sets the overflow flag. The
fragment still gets its status entry, so the event builder stays aligned. A fragment that
arrives with no status entry free is dropped whole and counted.

## Event building (`event_builder`)

The builder waits until every enabled link (its bit in the link mask is set) has a complete
fragment. It then writes one event, one beat per cycle:

1. **Header beat.** It holds:
   - magic `32'hB2EB0001`;
   - the event number;
   - the event length in beats;
   - the number of links and the number of size-table beats;
   - the link mask.
2. **Size table.** This takes `ceil(NLINKS/16)` beats, holding 16 bits per link: the link's
   payload length in 32-bit words, or 0 if the link is masked.
3. **Payload beats.** These come from link 0, then link 1, and so on. Masked links are
   skipped.
4. **Trailer beat.** It holds:
   - magic `32'hB2EE0001`;
   - the event number;
   - one error flag per link;
   - the XOR of every payload word.

A link's error flag is set if:

- any error flag of its fragment was set; or
- its tag differs from the low 24 bits of the builder's event number.

The builder's event number counts built events from 0.

The links are read one after another. An event therefore takes
`NSW + 2 + payload beats + NLINKS` cycles when nothing stalls, because closing each link costs
one cycle. For 46 links of 1 kB this gives 1525 cycles, or 12 µs, so the builder can sustain
about 83 kHz of such events.

The link visiting order and the replacement of per-link headers by one event header and trailer
follow the published readout. The contents of the header, size table and trailer are this
design's own.

## Test source and source switch (`pattern_gen`, `user_logic_ctrl`)

`pattern_gen` replaces the front ends for throughput tests. It fires a trigger either:

- every `period` cycles (a pulse trigger); or
- on an external trigger input.

It queues up to `PEND_MAX` triggers. For each trigger it writes an event of `size_beats`
beats. The event header is `{32'hB2FA0001, event number, size}`. Word k of payload beat b is
`{evnum[15:0], b*8+k}`.

It counts four things:

- triggers;
- triggers that had to wait because an event was still being sent (back-pressured events);
- triggers lost because the queue was full;
- events sent.

`user_logic_ctrl` picks either the event builder or the pattern generator and writes the chosen
stream into the DMA FIFO. The choice only changes between events. It counts cycles in which the
FIFO was full while data waited, and events that met at least one such cycle. These counts
reproduce the back-pressure figures quoted for the hardware.

## DMA FIFO and pages (`dma_fifo`, `fifo_ctrl`, `onchip_mem`)

The DMA FIFO holds 1024 beats (32 kB) of built events. The `sop`/`eop` flags travel with each
beat.

`fifo_ctrl` copies beats from the DMA FIFO into pages of the on-chip memory. Each page is 256
beats (8 kB, 256 bits wide). It always takes the lowest-numbered free page.

A page is closed when either:

- it is full; or
- an event has just ended and the FIFO has stayed empty for `FLUSH_IDLE` cycles. This lets a
  slow run still reach the host.

A closed page goes to the descriptor controller along with its number of valid beats. Events
may span pages.

While no page is free, the FIFO is not read. The back-pressure then travels back through the
FIFO to the source, and from there to the link buffers and the busy line.

Eight on-chip pages (64 kB) is this design's own choice.

## Descriptors and super pages (`desc_ctrl`, `read_dma`, `write_dma`)

The host gives the board free memory in super pages of 1 MB. Each super page holds 128 DMA
pages of 8 kB. The host writes three values to the table registers:

- the bus address of a descriptor table;
- the number of entries in the table;
- a start pulse.

`read_dma` then fetches the table one 8-byte entry at a time. Each entry is the bus address of
a free super page. The entries go into a 16-deep queue in `desc_ctrl`. `read_dma` pauses while
that queue is full.

For each closed on-chip page, `desc_ctrl` builds one descriptor:

- source `page * 8192`;
- destination `super-page base + slot * 8192`;
- size `beats * 32` bytes.

`write_dma` takes one descriptor at a time. It reads the page at one beat per cycle and issues
one host write per beat at address `dst + 32*beat`; a full page takes 257 cycles.

When `write_dma` reports done, `desc_ctrl` does two things:

- it gives the page back to `fifo_ctrl`;
- it emits a status record `{dst, size, sequence number}`.

After 128 slots it moves to the next super page from the queue. With no super page available
it waits and counts the cycles.

A page closed early leaves the rest of its 8 kB slot unused. The status record's size tells the
host where the valid data ends.

The one-page-per-slot mapping, the entry format and the status layout are this design's own.

## Slow control (`slc_fifo`, `reg_bank`)

Each link has one `slc_fifo`: a TX FIFO and an RX FIFO of 128 words each, seen through four
registers:

| k | write | read |
|---|---|---|
| 0 | push a word into TX | TX level |
| 1 | – | pop a word from RX |
| 2 | – | `{RX level, TX level}` |
| 3 | bit 0: send TX contents to the link; bit 1: clear both FIFOs | `{RX dropped count, sending}` |

The firmware does not decode the words. Register accesses with 7-bit address and 8-bit data,
accesses with 16-bit address and 32-bit data, and streamed files are all composed by software
as word sequences. A 100-word configuration packet fits in one TX load.

Register map of `reg_bank`, in 32-bit word addresses:

| address | access | contents |
|---|---|---|
| 0x000 | R | ID `{16'hB240, NLINKS}` |
| 0x001 | RW | bit 0 soft reset (pulse), bit 1 select pattern source, bit 2 pattern enable, bit 3 software busy, bit 4 clear sticky flags (pulse) |
| 0x002, 0x003 | RW | link mask, bits 31:0 and 63:32 |
| 0x004 | RW | pattern period in cycles |
| 0x005 | RW | pattern event size in beats |
| 0x008, 0x009 | RW | descriptor table address, low and high |
| 0x00A | RW | descriptor table entries |
| 0x00B | W | start the table fetch |
| 0x020 + i | R | status word i (below) |
| 0x100 + l | R | fragment-error count of link l |
| 0x140 + l | R | CRC-error count of link l |
| 0x180 + l | R | fragments received on link l |
| 0x1C0 + l | R | 32-bit words received on link l, header and trailer included (the link's data volume) |
| 0x200 + 4l + k | RW | slow-control register k of link l |

The status words in the top are:

| i | contents |
|---|---|
| 0 | triggers |
| 1 | events built |
| 2 | events written to the DMA FIFO |
| 3 | back-pressure cycles |
| 4 | back-pressured events |
| 5–7 | pattern triggers, pattern back-pressured events, pattern triggers lost |
| 8 | pages closed |
| 9 | pages closed early |
| 10 | pages sent by DMA |
| 11 | super pages used |
| 12 | cycles waiting for a super page |
| 13 | busy cycles |
| 14 | triggers while busy |
| 15 | `{read-DMA busy, DMA FIFO level, events in DMA FIFO}` |
| 16–19 | sticky busy and error link vectors |
| 20 | link overflow fragments |

## Busy and the TTD link (`ttd_if`)

`busy` is the registered OR of three sources:

- the busy of every enabled link buffer;
- the DMA FIFO being more than three quarters full;
- the software busy bit.

The block counts triggers, busy cycles and triggers that arrived while busy. It keeps sticky
per-link vectors showing which links have been busy and which have had errors, so software can
tell which link held the trigger back.

## Where this departs from the published design

- **Link format.** The Belle2link fragment format, the b2tt coding and the PCIe transaction
  layer are not modelled. The ports stand where they would connect.
- **Header words.** The published block diagram shows a header at the start of each on-chip
  page and each host DMA page. Here the only headers are the built-event headers. Pages are
  plain slices of the event stream, and their fill level is carried by the status record.
- **DMA channels.** One DMA channel is built, matching the single PCIe Gen3 x8 instance used
  in the measurements. The board's second x8 channel is not instantiated.
- **Register spaces.** Slow control and DMA control share one register space. In hardware they
  sit behind two PCIe BARs.
- **Link-control registers.** Clock-source switching and link resynchronisation registers are
  not present, because they act on parts outside this RTL.
- **Assumed sizes.** The link buffer depth, the number of on-chip pages, the super-page queue
  depth and the slow-control FIFO depth are assumptions. The 32 kB DMA FIFO, the 8 kB page, the
  256-bit width, 128 pages per super page, 48 links and 127 MHz are the published figures.
- **On-chip memory use.** At the defaults the design needs about 3.1 Mbit for link buffers,
  256 kbit for the DMA FIFO, 512 kbit for pages and 48 × 8 kbit for slow control. This is well
  inside the roughly 70 Mbit of block memory on the FPGA.

## Capacity against the published measurements

| load | needed | this design |
|---|---|---|
| 8 kB events at 470 kHz | 30.8 Gb/s | 32.5 Gb/s raw, about 31.9 Gb/s after per-page descriptor cycles: fits, narrowly |
| 8 kB events at 260 kHz | 17.0 Gb/s | fits |
| 46 links × 1 kB at 43 kHz | 15.8 Gb/s, 1525 cycles per event | builder limit about 83 kHz: fits |
| 48 links × 1 kB at the 30 kHz design trigger rate | 11.8 Gb/s, 1589 cycles per event | fits (builder limit about 80 kHz) |
| 1 kB per link, 0.8 ms front-end latency, 26 kHz | about 21 kB in flight per link | 8 kB per link: busy is raised, as observed on the hardware |

The host side, which holds the PCIe link and the server memory bandwidth, is outside this RTL.
`tb_pcie40_workloads` replays the first three rows at the default size, taking one clock cycle
as 1/127 µs:

- **470 kHz.** With a host that accepts every write at once, no trigger is back-pressured or
  lost. The 10% back-pressure reported for the hardware at this rate must therefore come from
  the PCIe link or the server, not from this logic.
- **260 kHz.** Nothing is back-pressured.
- **46 links at 43 kHz.** Busy is never raised, and every built event matches the model.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself; a watchdog ends a
hung run. With verilator 5, for example:

```
verilator --binary --timing --top-module tb_pcie40_top \
    rtl/pcie40_pkg.sv $(ls rtl/*.sv | grep -v pcie40_pkg) tb/tb_pcie40_top.sv
./obj_dir/Vtb_pcie40_top
```

The package must come first and appear only once. The RTL and the testbenches build without
warnings under verilator's default settings. The testbenches are:

| testbench | what it covers |
|---|---|
| `tb_link_buffer`, `tb_event_builder`, `tb_pattern_gen`, `tb_user_logic_ctrl`, `tb_dma_fifo`, `tb_fifo_ctrl`, `tb_onchip_mem`, `tb_desc_ctrl`, `tb_read_dma`, `tb_write_dma`, `tb_slc_fifo`, `tb_ttd_if`, `tb_reg_bank` | One block each. Results are compared against reference models in the testbench, including cycle counts where a rate is fixed: one beat per cycle, 257 cycles per page, and the event-builder cycle formula. |
| `tb_pcie40_top` | The whole board at 4 links with small buffers and 2 pages. It runs built events with random sizes and masks, corrupted fragments, link overflow, pattern-generator runs, source switching, host write stalls, super-page exhaustion and refill, and slow-control round trips. It checks every byte written to host memory against a model, and fails if any of these mechanisms never occurred. |
| `tb_pcie40_workloads` | The published throughput and back-pressure loads at the default size: 8 kB pattern events at 470 kHz and 260 kHz, and 46 links × 1 kB at 43 kHz. |
| `tb_pcie40_full` | The top at its default sizes: 48 links, 256-beat link buffers, 8 pages. It sends built events and 8 kB pattern events through to host memory and checks them. |

To change the size of the board, override `NLINKS`, `LINK_DEPTH` and `NPAGES` on
`pcie40_top`. `NLINKS` can be at most 64, because the mask registers are 64 bits wide.
