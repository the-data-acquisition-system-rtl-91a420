# A dead-time-free readout and two-level trigger for a 4000-channel calorimeter experiment

A rare-decay experiment looks for an event with two photons in a large
calorimeter and nothing in the veto detectors around it. About 4000 channels
(CsI crystals plus veto counters) are digitized continuously at 125 MHz with
14-bit ADCs. The beam comes in spills: 2 s of beam every 6 s. During a spill,
triggers arrive at tens of kHz. The readout must decide what to keep without
stopping the digitizers, and it must not need a large farm to do so.

This RTL shows how such a system can be built from a few simple ideas:

* **Digitize all the time and decide later.** Every ADC module writes its 16
  channels into a 4 µs circular pipeline every clock. A trigger decision only
  has to arrive before the sample leaves the pipeline. A trigger then copies a
  short record out of it.
* **Lv1 trigger on summed energy, computed every clock.** Each ADC module
  sends its 16-channel energy sum and a hit flag on every 8 ns clock. Trigger
  modules add these sums along a daisy chain. At the end of the chain, a master
  fires when the calorimeter energy crosses a threshold and no enabled veto
  detector is active.
* **Lv2 trigger on the centre of energy (COE), computed while the data are
  buffered.** The records travel to Lv2 modules over 2.5 Gb/s links. There they
  wait in buffers while each Lv2 module computes energy-weighted position sums
  for its share of the calorimeter. A second daisy chain adds these sums up. A
  master keeps the event if the COE lies far from the beam axis, which means
  the event has large transverse momentum.
* **Ping-pong memories.** Each Lv2 module writes accepted events into one of
  two large memories while the other is read out. The spill-off time can then
  be used to ship data.
* **Event building in the switch.** Each Lv2 module sends its piece of an event
  to a destination node chosen from the event number. All pieces of one event
  therefore meet at one Lv3 computer, with no central event builder.

The only dead time left is when an Lv2 buffer fills. In that case Lv1 triggers
are suspended until space frees up.

```
 samples (16 ch x 14 bit, 125 MHz)
   |
 [adc_module] x250 --esum,hit every clock--> [lv1_trigger_module] x16 -> chain -> [lv1_master]
   |  pipeline 4 us, record capture                                                   |
   |<------------------------------- lv1_trig (broadcast) ----------------------------+
   |                                                                                  ^ lv2_full, adc_busy
   +--link, 16 bit/clock--> [lv2_trigger_module] x16 -> COE chain -> [lv2_master]      |
                               | buffers  (buf_full) -------------------------------------+
                               |<-------- dec (accept/reject, event number) ----------+
                               v
                           [lv2_pingpong] <-> two 2^23 x 256-bit memories
                               v
                           [lv2_eth_tx] -> 1 byte/clock packets, destination = event number mod 8
```

## Clocking, sizes and shared types

Everything runs on one 125 MHz clock with a synchronous, active-high reset.
The package `koto_pkg` holds the sizes and the types that cross module
boundaries:

| constant | value | meaning |
|---|---|---|
| `CH_PER_ADC` / `SAMPLE_W` | 16 / 14 | channels per ADC module, bits per sample |
| `N_ADC` | 250 | ADC modules (4000 channels) |
| `ADC_PER_MOD` | 16 | ADC modules per Lv1 and per Lv2 module (so 16 of each) |
| `PIPE_DEPTH` | 500 | pipeline depth in clocks (4 µs) |
| `WINDOW` | 64 | samples per channel in one event record |
| `PKT_WORDS` | 1025 | link words per record: 1 header + 16 × 64 |
| `N_VETO` | 8 | veto subsystems seen by Lv1 |
| `COE_MIN_MM` | 165 | Lv2 COE cut in mm |
| `MEM_W` / `MEM_AW` | 256 / 23 | memory word width and address bits (2 Gbit per bank) |
| `N_LV3_NODES` | 8 | Lv3 destination nodes |

The structs used between blocks are `adc_l1_t` (energy sum and hit flag),
`l1_chain_t` (chain energy and veto bits), `link_word_t` (valid, sop and 16
data bits), `coe_t` (event number, Σx·E, Σy·E, ΣE) and `lv2_dec_t`
(valid, accept, event number).

## The ADC module

`adc_module` stands for the FPGA on one 16-channel digitizer board. It contains
three blocks.

**`adc_lv1_calc`** subtracts a per-channel pedestal from each sample and clips
the result at zero. It adds the 16 energies into an 18-bit sum. It also ORs
together the comparisons `energy > hit_thr`. Both outputs are registered and
are ready one clock after the samples.

**`adc_pipeline`** is a circular RAM of 500 rows × 16 samples. The row leaving
it is the one written `delay` clocks earlier. `delay` is a run-time setting
from 2 to 500, so the pipeline can be matched to the actual trigger latency.
When `lv1_trig` pulses, the next 64 rows that leave the pipeline are copied
into one of two event slots. The slots are then drained row by row. While both
slots are full, `busy` is raised; the Lv1 master treats it as a suspension. A
trigger that still arrives is counted on `lost`. The full system never lets
that happen.

**`adc_link_tx`** serializes a record for the link. The optical link carries
2.5 Gb/s with 8b/10b coding, which is 2 Gb/s of payload, or exactly one 16-bit
word per clock. The link is therefore modelled as a 16-bit word stream with
`valid` and `sop`:

```
word 0          : sop=1, event number (16-bit count of records this module sent)
words 1..1024   : row 0 ch 0..15, row 1 ch 0..15, ... row 63 ch 15   (14-bit samples, zero-extended)
```

A record takes 1025 clocks (8.2 µs) on the link but only 64 clocks to
capture. The two-slot buffer absorbs that difference for two closely spaced
triggers. Beyond two, `busy` holds off Lv1.

Every ADC module starts counting at zero and sees every accepted `lv1_trig`.
As a result, the event numbers in all links agree. The Lv2 modules check this.

## Lv1: an energy sum that keeps its time alignment

`lv1_trigger_module` takes the `adc_l1_t` of 16 ADC modules. A static
`in_is_csi` mask says which inputs are calorimeter boards. For those inputs,
the energies are added. For the veto boards, the hit flag is ORed into the veto
bit named by `in_veto_idx`. The local result is added onto the word arriving
from upstream, and the sum is registered and passed downstream.

The subtle point is **alignment along the chain**. Each hop adds a register.
Without correction, the word reaching the master would mix module 0's data
from 16 clocks ago with module 15's data from 1 clock ago. Module number
`STAGE` therefore delays its own contribution by `STAGE` clocks. The word
leaving module *k* then carries, from every module, data of the same sample
clock. The top instantiates module *m* with `STAGE = m`. The total latency from
samples to the master is fixed (calc, 16 hops, decision). `pipe_delay` must
cover that latency plus the record's pre-trigger part.

`lv1_master` makes the decision every clock. The condition is
`esum > esum_thr && (veto & veto_mask) == 0`, and a trigger is *requested*
on the clock this condition becomes true (its rising edge). A request is
*accepted*, and broadcast as a one-clock `lv1_trig` pulse, unless one of these
holds:

* an Lv2 buffer is full (`lv2_full`) — the system's real dead time,
  counted in `n_susp`;
* an ADC module has no free slot (`adc_busy`);
* fewer than `HOLDOFF = WINDOW + 8` clocks have passed since the last accepted
  trigger, so records never overlap.

`n_req - n_acc` is the number of triggers lost to dead time. This is the
quantity a run would monitor.

## Lv2: buffering while the COE is computed

`lv2_trigger_module` is the most involved block. It serves up to 16 links and
has three concurrent paths.

**Buffering.** Each link feeds its own show-ahead FIFO (`sync_fifo`) of
`BUF_WORDS = 8192` words, which holds about 8 records. When any FIFO has less
than `FULL_MARGIN = 3 × PKT_WORDS` words of space, `buf_full` is raised. It is
ORed over all Lv2 modules into `lv2_full` at the Lv1 master. The margin covers
the worst case still in flight after the suspension starts: two records held
in each ADC module plus the one on the wire.

**COE sums.** `lv2_coe_calc` watches each link as the words arrive. For every
channel it keeps the largest sample in the record. The channel energy is
`peak − pedestal`, clipped at zero. After the last word it outputs, together
with the event number from the header:

* `se = Σ E`
* `sx = Σ E·x`
* `sy = Σ E·y`

Here `x` and `y` are the crystal's position in mm, given as configuration.

Once every link of the module has produced its result for an event, the sums of
the links flagged `link_is_csi` are added. Their event numbers must agree. The
module then waits for the upstream chain word (`chain_in`, valid/ready), adds
its sums and offers the total on `chain_out`. The first module of the chain
(`IS_FIRST`) does not wait. Results and decisions are queued with
`BUF_WORDS / PKT_WORDS + 2` entries, so every event the buffers can hold has
room in the queues.

**Decision and readout.** `lv2_master` at the end of the chain accepts an
event when the COE radius `√(sx² + sy²) / se` exceeds `coe_min_mm`. The test
avoids division and square roots by comparing
`sx² + sy² > (coe_min_mm · se)²` with 89-bit intermediate values. This is exact for
`se > 0`. An event with no energy is rejected. The decision (`dec`) goes to
every Lv2 module. For each queued decision, a module pops `PKT_WORDS` words from
all its FIFOs in lock step:

* For an accepted event, it emits 256-bit words to the memory controller. Bits
  `16j+15 .. 16j` carry link *j*, and the first word holds the 16 headers.
  `wr_last` marks the event's last word.
* A rejected event is simply dropped.

`err` latches if link headers, chain and decision disagree on the event
number.

## Ping-pong memories

`lv2_pingpong` drives two external memories of 2^23 × 256 bits (2 Gbit each).
The memory port is assumed synchronous with one request per clock and read
data one clock later. The memories themselves are outside the RTL; the
testbenches use a sparse behavioural model (`tb/mem_model.sv`).

* **Write side.** The write bank receives accepted events. An event is started
  only if `EV_WORDS` words still fit. Otherwise `wr_ready` goes low, the Lv2
  FIFOs back up, and eventually Lv1 is suspended.
* **Read side.** The other bank is read from address 0 up to the number of
  words written into it, one read every second clock.
* **Swap.** The banks swap when three conditions hold: the read bank is
  drained, the write bank holds at least one complete event, and no event is
  half written. The swap count is on `swaps`.

With a 1025-word event, a bank holds 8184 events. This is about the number of
events a spill produces after Lv2, so one bank can collect a spill while the
other is shipped.

## Shipping events to the Lv3 farm

`lv2_eth_tx` turns the stream of 256-bit words into byte packets for a 1 Gb/s
Ethernet MAC (one byte per clock, `tx_ready` for back-pressure, `tx_sop` and
`tx_eop` framing). The MAC, PHY and switch are outside the RTL. Every event is
cut into packets of at most 32 memory words (1024 bytes). Each packet starts
with an 8-byte header:

| byte | content |
|---|---|
| 0 | destination node = event number mod `N_NODES` |
| 1 | source Lv2 module (`SRC_ID`) |
| 2–3 | event number |
| 4–5 | packet sequence number within the event |
| 6–7 | payload length in bytes |

The payload comes next: each word is sent link 0 first, high byte first. All
Lv2 modules see the same event number in the record headers, so they all pick
the same destination. An Ethernet switch then gathers the 16 pieces of an
event at one Lv3 node. `tx_dest` holds the destination for the whole packet,
for a MAC that needs it to form the Ethernet address.

## The top level

`koto_daq_top` instantiates:

* `N_ADC_MOD` ADC modules;
* `ceil(N_ADC_MOD/16)` Lv1 modules on the chain and the Lv1 master;
* the same number of Lv2 modules, each with its own ping-pong controller and
  packet sender;
* the Lv2 master.

ADC module *k* is served by input `k % 16` of Lv1 module `k / 16` and of Lv2
module `k / 16`. The last module of each kind may serve fewer inputs.

The ports are the samples, the configuration (pedestals, thresholds, CsI/veto
maps, crystal positions, COE cut), one memory interface pair and one byte
stream per Lv2 module, and status counters. The ports are flattened in arrays
indexed by module.

## Where this design follows the description and where it chooses

The following follow the described system:

* 125 MHz, 14-bit, 16-channel ADC modules;
* the 4 µs pipeline with a record copied as data leave it;
* the 16-board energy sums and the Lv1 daisy chain;
* the veto condition;
* the suspension of Lv1 while an Lv2 buffer is full;
* the COE computed on a second daisy chain and the cut on its distance;
* two 2-Gbit memories used alternately;
* per-event destination switching for event building.

The following are this design's own choices, because the source is silent on
them:

* record length (64 samples), link word format and header;
* the two-slot record buffer and `adc_busy`;
* rising-edge triggering and the hold-off;
* the STAGE alignment scheme;
* FIFO sizes and the full margin;
* energy taken as the peak sample for the COE;
* the valid/ready chain handshake and the division-free cut;
* the memory port and swap rule;
* the packet header, packet size and `event number mod 8` node rule.

Two points where the described system may differ:

* **Veto thresholds.** The veto condition here is per channel: a veto board
  reports activity when any of its channels exceeds `hit_thr`. The original
  system applies a threshold per veto subsystem. A subsystem-energy threshold
  would need the veto energies carried on the chain as well.
* **Photon counting at Lv2.** Counting photons at Lv2 is named as a possible
  second criterion. It was not in use, so only the COE cut is built.

Zero suppression or compression inside the ADC module, proposed as a later
upgrade to shorten the records, is also not part of this design.

Not in the RTL: the analog shaping filters, ADC chips, optical transceivers,
clock distribution, the memory chips, Ethernet MAC/PHY and switch, and the Lv3
computers. Their digital boundaries are ports of the top.

Sizes against the described operation (figures from the 2013 run: 27k Lv1 and
8k Lv2 triggers per 2 s spill; 5 Gb/s from Lv2 to Lv3):

* The Lv1 accepted rate of 13.5 kHz is well under one record per 1025
  clocks per link (122 kHz).
* 8k Lv2 events fit one 8184-event bank.
* 16 packet senders at 1 Gb/s give 16 Gb/s of capacity, against about
  5.6 Gb/s averaged over the spill cycle with 64-sample records.
* The COE cut is an input in mm.
* The Lv1 threshold is in ADC counts, because no calibration to MeV is
  defined here.

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
          rtl/koto_pkg.sv tb/tb_lv2_master.sv --top-module tb_lv2_master -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_adc_lv1_calc` | sums and hit flags against a reference, including negative (clipped) energies |
| `tb_adc_pipeline` | delay, captured rows for several delays, two-slot buffering, busy/lost |
| `tb_adc_link_tx` | packet format, word order, event numbering |
| `tb_adc_module` | the three blocks together with a trigger |
| `tb_lv1_trigger_module` | CsI sums, veto mapping and STAGE alignment on a chain of modules |
| `tb_lv1_master` | threshold, veto mask, rising edge, hold-off and every suspension cause, counters |
| `tb_lv2_coe_calc` | peak finding, pedestal subtraction and the three sums on random records |
| `tb_lv2_trigger_module` | buffering, chain handshake, accept/reject readout, buf_full |
| `tb_lv2_master` | the COE cut near its boundary, including se = 0 |
| `tb_lv2_pingpong` | bank filling, swapping and stalls against the memory model |
| `tb_lv2_eth_tx` | packet headers, splitting, destinations, byte order, back-pressure |
| `tb_koto_daq_top` | the whole chain at reduced size (20 ADC modules, 100-clock pipeline, 8-sample records, 1024-word buffers, 512-word banks) |
| `tb_koto_daq_top_full` | the whole chain at full size with default parameters, two events |

The two top-level benches share `tb/koto_e2e_body.svh`, which contains:

* a detector model: pulses on chosen crystals and veto boards;
* a software model of the trigger decisions;
* a parser for the Lv3 byte streams, which rebuilds every event from its
  packets and compares every sample word with what the detector model produced.

The reduced bench drives 31 trigger candidates, including vetoed and
below-threshold events, and bursts that fill the Lv2 buffers. It also checks
that each mechanism actually occurred: accepted and rejected Lv2 decisions,
suspension by full Lv2 buffers and by busy ADC modules, bank swaps and memory
stalls, all 8 destinations, and multi-packet events. The full-size bench builds
all 250 ADC modules and is slow to compile and run (several minutes), so it
sends only two events.
