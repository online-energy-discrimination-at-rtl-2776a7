# Online energy filter for a SiPM/ASIC PET front-end

A pixelated PET scanner with thousands of SiPM channels produces more events than
its readout link can carry, and most of them are useless: low-energy noise
triggers and corrupted timestamps from faulty readout ASICs. This RTL removes
those events inside the FPGA of each DAQ front-end module, before they reach the
link. Each event's energy is estimated from its coarse time-over-threshold
(TOT), and only events whose TOT falls inside an acceptance window are kept.
The window is either one pair of thresholds for the whole module (uncalibrated
version) or one pair per channel, taken from the energy calibration
(calibrated version, the default).

The design follows the filter described in *Online energy discrimination at DAQ
front-end level on pixelated TOF-PET systems* (Zorraquino et al.). That
description gives the TOT rules, the clock-cycle budget, the configuration
command fields and the threshold table size. It gives no bit layouts and no
interface signals, so those are choices made here. They are listed in
[Departures and own choices](#departures-and-own-choices).

## Coarse TOT and its three corrections

The readout ASIC (TOFPET) gives every event two timestamps from a 10-bit
free-running counter with 6.25 ns steps:

* `T_coarse` is taken when the SiPM pulse rises through a low threshold.
* `E_coarse` is taken when the pulse falls back through a higher threshold.

Their difference `d = E_coarse - T_coarse` grows with the deposited energy.
Three detector effects corrupt it, and the filter corrects for them with fixed
rules (`rtl/coarse_tot.sv`):

| condition on d            | cause                                          | coarse TOT  |
|---------------------------|------------------------------------------------|-------------|
| `d <= -950`               | counter wrapped between the two stamps         | `1024 + d`  |
| `-950 < d < 0`            | routing skew on near-zero-energy pulses: noise | `0`         |
| `d >= 80`                 | abnormal energy, mostly from faulty ASICs      | `0`         |
| otherwise (`0 <= d < 80`) | normal event                                   | `d`         |

The two limits were found on the source's detector. The largest rollover value
seen was taken and 3 cycles of margin added, giving -950. The largest normal TOT
was taken the same way, giving 80. Both are parameters (`RO_LIMIT`,
`UPPER_BOUND`) that keep those defaults. An event that receives TOT 0 is
rejected by any lower threshold of 1 or more. With a lower threshold of 0, such
events pass. The rollover correction recovers a value in 1..74, so a real event
whose stamps straddle the counter wrap is still judged on its true energy.

In hardware, `1024 + d` is just the low 10 bits of the 11-bit two's-complement
difference, so the module is one subtractor and three comparisons. The
timestamps in the event word are never rewritten. The corrected TOT is used only
for the decision.

## Packet stream and what the filter does to it

The ASIC sends a packet every 1024 cycles (6.4 us at 160 MHz). The front-end
reformats it into 64-bit words. The first word of a packet is a header. Each
following word is one complete event. In this RTL the stream is a `pkt_word_t`:
64 data bits plus two framing flags, `sop` on the header and `eop` on the last
word.

`rtl/event_filter.sv` keeps every header. It keeps an event if
`lo <= tot <= hi`, using the thresholds of the event's channel, and deletes
every other event. The words it keeps come out unchanged and in order, so the
collector downstream sees an ordinary packet that is just shorter.

Removing words raises one problem, and it takes the most care in the design.
If the last events of a packet are rejected, the `eop` flag must move back onto
the last word that survives. The filter cannot know which word that is until the
packet's final event has been judged. So the filter holds each kept word back by
one position:

* A held word is released as soon as the next word is kept. It leaves with
  `eop = 0`, because something later in its packet survived.
* If the packet's `eop` word is rejected, the held word is released at once with
  `eop` forced to 1.
* If the `eop` word itself is kept, it is held, then flushed one cycle later.

The header is always kept, so every packet has at least one survivor. A packet
whose events are all rejected therefore comes out as a lone header with `eop`
set. The hold-back costs one extra cycle per packet. That matches the single
extra cycle per packet that the source quotes for both versions.

Example: a packet `H E1 E2 E3` where only `E2` is kept comes out as `H E2*`
(`*` marks `eop`). `H` leaves when `E2` is kept. `E2` leaves with `eop` when `E3`
is rejected.

## Calibrated and uncalibrated versions

`rtl/efilter_frontend.sv` is the filter of one front-end module. Its parameter
`CALIBRATED` selects where the thresholds come from.

**Calibrated (default).** `cal_filter_config` receives one command per channel.
Each command holds a header byte, a 10-bit channel ID, and a 10-bit lower and
upper threshold in clock cycles. The module writes `{lo, hi}` into
`threshold_lut`, a 1024 x 20-bit table (one block RAM). Host software converts
keV limits into cycles for each channel from the calibration data, so the
firmware never computes energies. The table read takes two cycles: the address
is registered, then the RAM output is registered.

**Uncalibrated.** `uncal_filter_config` holds one `{lo, hi}` pair for all
channels. After reset it is set to `{0, 1023}`, which lets every event through.
A command with the matching header loads a new pair. The source's detector used
25..70 cycles.

Both versions share `event_filter`. The filter requests thresholds with
`thr_req`/`thr_chan` and uses `thr_in` `THR_LATENCY` cycles later: 0 cycles from
the register, 2 cycles from the table.

### Cycle budget

| version      | header  | each event                              | per packet |
|--------------|---------|-----------------------------------------|------------|
| uncalibrated | 1 cycle | 1 cycle                                 | +1 cycle   |
| calibrated   | 1 cycle | 3 cycles (1 + 2 for the table read)     | +1 cycle   |

In the calibrated version `in_ready` drops for the two cycles an event waits for
its thresholds. The upstream packet buffer absorbs this, which the source relies
on: a packet occupies at most 128 of its 1024 cycles at the input. A packet of
`N` events therefore leaves the calibrated filter `3N + 2` cycles after its
header was accepted, and the uncalibrated filter `N + 2` cycles after.

* At the expected 10 Mevents/s per module (64 events per packet) the calibrated
  filter needs 194 of the 1024 cycles.
* The most events per packet it can sustain is 340 (53 Mevents/s).
* The source quotes 447 events (70 Mevents/s). That count charges only the two
  table cycles per event against the 896 idle cycles, not the base cycle. Here a
  447-event packet is filtered correctly but takes up to 1343 cycles, longer
  than one packet period. It is fine as an occasional burst, but not as a
  sustained rate.
* The uncalibrated filter handles up to 1022 events per period.

## Departures and own choices

* **Bit layouts are this design's own.** The event word holds the channel ID in
  [63:54], `T_coarse` in [53:44], `E_coarse` in [43:34], and the other fields in
  [33:0]. The command is one 38-bit word `{header, channel, lo, hi}`, in the
  source's field order, and its header value is `8'hF1`. To match a real stream,
  change `event_word_t`, `filter_cmd_t` and `CMD_SET_THRESHOLDS` in
  `rtl/efilter_pkg.sv`.
* **Framing is by side-band flags.** The header is passed on untouched. If a
  real header carried an event count, it would have to be rewritten, which this
  design does not do.
* **The threshold test is inclusive at both ends.**
* **Interfaces.** The input uses valid/ready. The output is valid only, with no
  back-pressure, because the source reports no dead time downstream.
* **Processing is not pipelined.** Each event is fully decided before the next
  one is accepted, which gives the per-event cycle counts the source states. As
  a result the sustained maximum is 340 events per packet, not 447 (see above).
* **Additions not in the source.**
  * `n_configured` counts table writes.
  * `ev_done`, `ev_kept` and `ev_rule` are monitor strobes.
  * `ENABLE_UPPER_BOUND = 0` removes the upper-bound rule. This reproduces the
    intermediate "rollover limit only" filter the source measured.
  * The source's "software rules" variant used a different rollover limit, but
    its value is not published. Set `RO_LIMIT` to model it.
* **Left out.** The timestamps of rollover events are not corrected; the source
  also left them unmodified. The peak-finding filter the source proposes as
  future work is not built.
* **Outside this RTL.** The readout ASIC, the logic that formats ASIC packets
  into 64-bit words, the collector and the host configuration software. Their
  signals are the top's ports.

## Size

After generic synthesis, the calibrated top has about 270 flip-flops, about 100
word-level cells and one 20 Kbit memory (the threshold table). That is in line
with the few hundred LUTs and registers plus one block RAM that the source
reports on a Kintex-7. The uncalibrated top has no memory.

## Files

| file | content |
|------|---------|
| `rtl/efilter_pkg.sv` | widths, rule limits, `event_word_t`, `pkt_word_t`, `filter_cmd_t`, `thr_pair_t`, `tot_rule_e` |
| `rtl/coarse_tot.sv` | combinational coarse TOT with the three corrections |
| `rtl/threshold_lut.sv` | 1024 x 20 threshold table, two-cycle read |
| `rtl/cal_filter_config.sv` | command decoder writing the table |
| `rtl/uncal_filter_config.sv` | global threshold register |
| `rtl/event_filter.sv` | packet inspection, decision, eop relocation; handshake assertions |
| `rtl/efilter_frontend.sv` | top: one front-end module's filter |
| `tb/efilter_ref_pkg.sv` | integer reference model and word builders |
| `tb/tb_*.sv` | one self-checking testbench per module, plus two end-to-end tests |

## Simulating

Every testbench checks its results against the reference model. Each ends by
printing `TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/efilter_pkg.sv tb/efilter_ref_pkg.sv rtl/*.sv tb/tb_efilter_frontend.sv \
  --top-module tb_efilter_frontend
./obj_dir/Vtb_efilter_frontend
```

* `tb_efilter_frontend` runs the top with every default: calibrated, 1024
  channels.
  * It configures all 1024 channels in shuffled order, mixed with commands of
    another type that must be ignored.
  * It then sends 42 packets on the 1024-cycle period. The traffic includes
    64-event and 340-event packets, one 447-event packet, header-only packets,
    fully rejected packets, and a mid-run threshold change.
  * It compares every output word with the reference and checks each packet
    against the `3N + 2` cycle budget.
  * It counts every mechanism and fails if one never happens: input stall, each
    TOT rule, rejection below `lo` and above `hi`, `eop` moved, emptied packet,
    ignored command, reconfiguration.
* `tb_efilter_frontend_uncal` runs the same kind of traffic through the
  uncalibrated top, with 1000-event packets in place of the 340-event ones. It
  checks that no stall occurs and that a packet of `N` events takes at most
  `N + 2` cycles.
* `tb_coarse_tot` tries all 2^20 pairs of stamps, with and without the upper
  bound.
* `tb_event_filter` runs both threshold latencies on 300 random packets with
  gaps in the input.
* `tb_threshold_lut`, `tb_cal_filter_config` and `tb_uncal_filter_config` check
  the smaller blocks.

Every testbench finishes in well under a second.
