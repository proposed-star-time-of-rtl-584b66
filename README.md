# Digital readout chain for the STAR barrel Time-of-Flight detector

The proposed STAR Time-of-Flight (TOF) barrel has about 23,000 timing channels
on 120 detector trays. Each tray has 192 channels. On every tray the pulses are
discriminated and then timed by TDC chips on the tray itself. What the
electronics must then do is mostly digital bookkeeping:

* tell the STAR Level-0 trigger quickly how many channels fired;
* read the TDC data out when the trigger asks for it;
* move the data from four trays over one optical fibre to the DAQ room;
* keep each event's fragments there, filed by the trigger's 12-bit *token*,
  until the trigger has decided the event's fate. An L2-accept means DAQ reads
  the event. An abort means the storage is released.

This repository gives synthesizable SystemVerilog for that digital part. It
covers the tray side (TDIG multiplicity logic, the tray CPU card "TCPU", the
transmitter "TMIT") and the receiver card in the DAQ crate ("TDRC"). It also
has a self-checking testbench for every module. The analog front end, the
HPTDC time-to-digital converter chips, the processors, the clock PLL and the
optics are not logic. They meet the RTL at ports.

## The chain at a glance

```
                 one of 4 trays                                    DAQ room
 TFEE discriminators (8 x 24 ch)
   | disc                                  +-----------------------------------------+
   v                                       | tdrc                                    |
 tdig_mult x8 --pmult--> tcpu              |  tdrc_deser -> tdrc_hdr_dec             |
                          |-- tcpu_mult_agg x2 --> 2 x 7-bit mult    |    data   |    trigger cmd  |
 trigger word bus ------->|-- tcpu_trig_cmd (one ordered queue)     v           v                 |
 HPTDC cables (2) ------->|-- tcpu_readout (format + buffer)   token regions  tdrc_trig_dec      |
                          |                                    4 trays+header  |      |          |
                          v                                        ^      token FIFO  trigger FIFO|
            tray_merge (on tray 0, 4 inputs)                       |           |      |          |
                          v                                        +---- tdrc_vme (map, irq) ----+
            tmit_ser --fiber_tx ~~~ optical link ~~~ fiber_rx -----^                    ^
                                                                                VME processor
```

`tof_tray_group` is the top. It holds four trays with their `tdig_mult` and
`tcpu` instances, one `tray_merge`, one `tmit_ser` and one `tdrc`. The
hierarchy and the counts follow the proposal:

* 8 TDIG cards of 24 channels per tray;
* one TCPU per tray;
* one transmitter per four trays;
* one receiver per four trays, so 30 receivers for the whole detector.

## Life of an event: tokens and invalidate flags

This is the central mechanism, and the part most worth understanding before
changing anything.

1. **L0 trigger.** The STAR trigger broadcasts a 20-bit trigger word:
   `{trigger command[3:0], DAQ command[3:0], token[11:0]}`. Each TCPU's
   `tcpu_trig_cmd` queues L0 commands as readout requests.
2. **Tray readout.** `tcpu_readout` takes the request and pulses
   `tdc_trigger` to its TDIG cards. It then reads the TDIG data cables, cable
   0 first, each until the word marked `last`. It formats a *data event* into
   its event buffer.
3. **Transport.** The four TCPUs feed `tray_merge` on tray 0. The merge passes
   whole events one at a time. `tmit_ser` serializes them onto the fibre.
4. **Filing by token.** At the TDRC the header decoder routes a data event to
   the region of its tray, at the location named by its token. The event's
   trigger word also goes to the header region. Every location has an
   *invalidate flag*:
   * A set flag means "free": the old content is no longer needed.
   * Before writing, the region checks the flag. If the flag is missing, the
     event is dropped, the old content is kept, and an in-use error is
     raised to VME (status bits and the offending token).
   * A complete event (its end-of-event word received) stores its word count
     and clears the flag.
5. **Decision.** The trigger's later L2-accept or abort for the token reaches
   the TCPUs. Only tray 0 (`fwd_enable`) passes it on, as a *trigger command
   event* on the same fibre. Commands and readouts share one queue, so a
   decision never overtakes the data it refers to. At the TDRC,
   `tdrc_trig_dec` acts on it:
   * **L2-accept:** the token is pushed into the token FIFO. The interrupt
     line rises while that FIFO is not empty.
   * **Abort:** the invalidate flag of that token is set in every region.
   * **Any command:** the trigger word is also logged in the trigger FIFO (a
     debug aid) when that FIFO is enabled.
6. **DAQ readout.** On the interrupt, the VME processor:
   * pops the token;
   * reads each tray's word count and words, and the header word;
   * writes the token to the invalidate register, which frees the location
     in all regions.

The STAR trigger never reuses a token before DAQ has returned it or it has
been aborted. So the in-use error only fires on a real fault. The end-to-end
testbench provokes one on purpose.

## Fibre format

A fibre word has 21 bits: a control flag plus 20 data bits. The receiver
presents it as a 20-bit word, as the proposal describes. Events are framed by
control words:

| word | ctrl | data[19:16] | data[15:14] | rest |
|---|---|---|---|---|
| start of data event | 1 | `4'h1` | tray 0-3 | 0 |
| start of trigger command event | 1 | `4'h2` | tray | 0 |
| end of event | 1 | `4'hE` | 0 | 0 |
| trigger word (2nd word of every event) | 0 | trigger command | DAQ command, token[11:0] | |
| TDC word, high half | 0 | `4'h8` | TDC bits 31:16 | |
| TDC word, low half | 0 | `4'h9` | TDC bits 15:0 | |

Each 32-bit TDC word therefore costs two fibre words. Trigger command events
may carry more words after the trigger word. The receiver counts these and
discards them.

On the line, `tmit_ser` sends each word as a `1` start bit, then the 21 bits
MSB first, then one `0` idle bit. That is 23 clocks per word, one bit per
clock. `tdrc_deser` undoes this. The line is assumed bit-synchronous with the
receiver clock; clock recovery is left to the optical receiver. The proposal
leaves the link protocol to "a PLD or a communications chip". This framing is
this design's own, as are the command codes L0 = `4'h4`, abort = `4'hE` and
L2-accept = `4'hF`. All of them live in `tof_pkg` and can be changed there.

## Multiplicity for the Level-0 trigger

* `tdig_mult` ORs the 24 discriminator outputs into a hit register while the
  multiplicity gate is high. A channel therefore counts at most once per gate.
* When the gate falls, the population count is presented as a 5-bit sum. It
  appears at the first clock edge that samples the gate low, with a one-cycle
  strobe.
* `tcpu_mult_agg` adds TDIG cards 0-3 and cards 4-7 into two 7-bit words
  (at most 96). It does this one cycle later, when all four strobes arrive
  together. Strobes that arrive apart set a sticky `skew_err` flag.
* The gate itself comes from the clock/timebase circuitry. It is an input of
  the top.

## Tray readout and flow control

`tcpu_readout` writes at most one word per clock into its event buffer (1024
fibre words by default). When the buffer is full, the state machine waits
and holds `tdc_ready` low, so the TDC side is stalled and no data is lost. The
buffer drains at the fibre rate. The fibre is far slower than the readout, so
one very large event does fill the buffer; the end-to-end test does this on
purpose.

Timing of one event:

* `tdc_trigger` goes out one cycle after the command is taken.
* The start-of-event and trigger words need one cycle each.
* Each TDC word takes two cycles.

`tray_merge` grants one input per event, round-robin after the last input
served. It passes words through without added latency, and a new grant
costs one cycle. The tray-to-tray link is modelled as a parallel valid/ready
stream. The physical link between trays is not specified.

## TDRC register and memory map

`tdrc_vme` simplifies the VME bus to a synchronous slave:

* A cycle is a one-clock `vme_stb` with `vme_we`, `vme_addr[23:0]` and
  `vme_wdata`.
* For a read, `vme_ack` and `vme_rdata` follow two clocks later.
* A write to a token region is acknowledged once the region has stored the
  word. That is normally three clocks after the strobe, and later if fibre
  words are arriving (see below).
* An interrupt acknowledge cycle (`vme_iack`) returns `IRQ_VECTOR` (`8'hA5`).
* `irq` is high while interrupts are enabled and the token FIFO is not empty.

Address fields are `sel = addr[23:20]`, `token = addr[19:8]` and
`index = addr[7:0]`.

| sel | access | content |
|---|---|---|
| 0-3 | R/W | tray region `sel`, location `token`, word `index` |
| 4 | R/W | header region: the trigger word of `token` |
| 5 | R | `{free flag, 15'b0, word count}` of region `index[2:0]`, location `token` |
| 8, reg 0 | R | pop token FIFO: `{empty, 19'b0, token}` |
| 8, reg 1 | R | pop trigger FIFO: `{empty, 11'b0, trigger word}` |
| 8, reg 2 | R/W1C | status: `[4:0]` in-use error per region, `[12:8]` overflow per region, `[16]` FIFO overflow, `[17]` framing error |
| 8, reg 3 | R/W | control: bit 0 trigger FIFO enable, bit 1 interrupt enable |
| 8, reg 4 | W | invalidate `wdata[11:0]` in all regions |
| 8, reg 5 | R | `{region, token}` of the last in-use error |
| 8, reg 6 | R | `{trigger FIFO level, token FIFO level}` |

Each region memory has one write port, and the fibre has priority on it. A
processor write (`host_wr`) is parked in a one-word holding register in the
region. It goes into the memory in the first clock with no fibre word being
written; `host_busy` is high until then. The bus acknowledge waits for
`host_busy` to drop, so a processor write can never be lost or overtaken.
Such a write changes only the stored word: the location's word count and its
invalidate flag stay as they were.

## Sizes

| quantity | value | origin |
|---|---|---|
| channels per TDIG / TDIG per tray | 24 / 8 | proposal |
| partial / half-tray multiplicity | 5 / 7 bits | proposal |
| trays per fibre and per receiver | 4 | proposal |
| TDIG data cables per tray | 2 | proposal |
| token width / locations per region | 12 bits / 4096 | proposal |
| fibre word | 20 bits (+ control flag) | proposal (flag: own) |
| words per token location (`TOKEN_WORDS`) | 256 | own choice |
| TCPU event buffer (`BUF_DEPTH`) | 1024 fibre words | own choice |
| TCPU command queue | 16 | own choice |
| token FIFO / trigger FIFO | 4096 / 1024 | own choice |

With 256 words per location, a tray fragment holds 128 TDC words. A fully
occupied tray (192 channels, both edges) would need 768 fibre words. Such an
event is cut at 256 words and flagged as an overflow. Raise `TOKEN_WORDS` if
this matters; the VME index field would then need to be widened. One tray
region is 4096 × 256 × 20 bits = 20 Mbit. The proposal suggests these
memories could sit on mezzanine cards.

## Where this RTL departs from, or goes beyond, the proposal

* **One clock.** One clock drives everything: TDIG, TCPU and TDRC. In the
  real system they sit on different boards and clock domains.
* **No time-over-threshold in the TCPU.** The TCPU does not compute pulse
  width. The proposal places that "downstream" of the TDIG without fixing
  where. Leading and trailing edge words travel unchanged.
* **Own framing and encodings.** The event framing, command codes, word split,
  cable order, arbitration and all buffer sizes are this design's choices.
* **Dropped events are lost.** When an event meets a location still in use,
  it is discarded. The proposal only says the error is reported.
* **Only tray 0 forwards trigger commands.** Any other policy would put each
  decision into the token FIFO four times.
* **Not included:** slow control. That means the JTAG configuration of the
  TDCs, the 2-wire threshold DAC path, temperature monitoring, the CAN bus
  and the embedded processors. The proposal names these functions but does
  not specify them.

## Files

| file | role |
|---|---|
| `rtl/tof_pkg.sv` | widths, trigger word and fibre word types, framing helpers |
| `rtl/tdig_mult.sv` | TDIG multiplicity count |
| `rtl/tcpu_mult_agg.sv` | half-tray multiplicity sum |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO used throughout |
| `rtl/tcpu_trig_cmd.sv` | TCPU trigger command queue |
| `rtl/tcpu_readout.sv` | TCPU readout control, formatting, event buffer |
| `rtl/tcpu.sv` | TCPU logic |
| `rtl/tray_merge.sv` | four-tray event merge |
| `rtl/tmit_ser.sv` | fibre serializer |
| `rtl/tdrc_deser.sv` | fibre deserializer |
| `rtl/tdrc_hdr_dec.sv` | header decoder and data distribution |
| `rtl/tdrc_token_buf.sv` | token memory region with invalidate flags |
| `rtl/tdrc_trig_dec.sv` | trigger decoder |
| `rtl/tdrc_vme.sv` | VME register/memory map and interrupt |
| `rtl/tdrc.sv` | receiver card logic |
| `rtl/tof_tray_group.sv` | top: four trays, fibre, receiver |

Each `tb/tb_<module>.sv` tests the module of the same name. It compares the
module's behaviour with results the testbench computes itself, including the
cycle timing stated above. It ends by printing
`TB_RESULT checks=N failures=M`.

## Simulating

The package `tof_pkg` must come first on the command line, and only once.
For example, to run the end-to-end test:

```
verilator --binary --timing --assert -Irtl rtl/tof_pkg.sv \
    $(ls rtl/*.sv | grep -v tof_pkg) \
    tb/tb_tof_tray_group.sv --top-module tb_tof_tray_group -o sim
./obj_dir/sim
```

Other blocks work the same way: name their testbench, and list the package,
the module and the modules it instantiates. Uninitialised state is random in
two-state simulation, so everything the logic reads is reset.

`tb_tof_tray_group` runs the top with all parameters at their defaults. It
takes about ten seconds. It plays the outside world:

* random discriminator patterns and multiplicity gates;
* HPTDC chains that answer each TDC trigger with hit words, one event with
  600 words per tray;
* the optical link;
* the VME processor.

It checks every multiplicity word, every stored fragment word, the header
words, token FIFO order, the interrupt, the abort and VME invalidation paths,
token reuse, the in-use error, the region overflow, the trigger FIFO and a
processor write into a tray region. It
also counts how often each of these mechanisms occurred and fails if any
never did: multiplicity, L0 readout, forwarding, buffer-full stall, merge
contention, interrupt, abort invalidation, token reuse, in-use error,
overflow, trigger FIFO and processor write.

The testbenches check the logic against this document's description. They do
not check it against the real HPTDC, STAR trigger or VME hardware. Those
interfaces are simplified as described above.
