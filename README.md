# FERS-5200 readout logic in SystemVerilog

A large SiPM detector array can have thousands of channels, spread over many
small front-end cards. Each card must digitize its channels and keep time with
all the others, and one host must be able to read the data. FERS-5200 solves
this with a tree. Each A5202 card ("unit") reads 64 SiPM channels with two
32-channel CITIROC front-end ASICs. Up to 16 units sit on one optical
daisy-chain, the TDlink. One concentrator board masters eight such chains, for
128 units and 8192 channels. The TDlink carries commands, slow control,
readout and a common time base, all on one fibre per hop.

This repository has the synthesizable digital logic of that system:

* the FPGA logic of one unit (`fers_unit`): 65 TDCs, four acquisition modes,
  the local event buffer and the link node;
* the readout logic of the concentrator (`concentrator`): eight chain masters
  and the event builder;
* the whole network (`fersnet`): a concentrator with 8 × 16 units.

The analog front end, the ADCs, the 50 ps TDC chip, the serial optical
transceivers and the processors are outside the logic. Their signals are
ports.

## Clock and time

Everything runs on one 125 MHz clock (8 ns). One clock is one tick of the
64-bit absolute time, which matches the 8 ns granularity of the trigger time
stamps. Finer times use 0.5 ns units: `{time[59:0], bin[3:0]}`, 16 bins per
clock. The self-trigger of each channel is sampled at 2 GS/s by the FPGA's
serializers. The logic receives these samples as 16 bits per clock
(`trg_samples_i`, bit 0 earliest).

The original system states a typical 200 MHz link clock. This design instead
ties the clock to the 8 ns time-stamp tick. Moving to another clock changes
the step length of the charge conversion (`STEP_CLKS`) and the meaning of the
dwell, hold and window registers, which are all counted in clocks or bins.

## The unit (`fers_unit`)

```
 trg_samples[64] ─► tdc_channel ×64 ─┬─► trigger_logic ─► run_control
 t0_samples      ─► tdc_channel (T0) │        │ trg
                                     ├─► mcs_counters ──┐
 hold/mux/ADC ◄─────────────────────►├─► pha_sequencer ─┼─► event_buffer ─┬─► tdlink_node ◄─► ring
                                     └─► timing_acq ─► hit_packetizer ┘   └─► uC stream (stand-alone)
```

**TDC (`tdc_channel`).** In each 16-sample word the channel looks for the
first rising and the first falling transition. The last sample of the
previous word counts as the sample just before bit 0. A rising edge gives a
leading-edge time (`lead_o`), used for counting. A falling edge closes a
pulse: `hit_o` then gives its leading-edge time and its time over threshold.
The ToT is in 0.5 ns bins and saturates at 16 bits. `active_o` is the OR of
the word's samples and drives the OR and majority triggers. Only the first
edge of each kind per 8 ns word is used, so pulses shorter than 8 ns that
repeat within one word merge.

**Triggers (`trigger_logic`, `periodic_trigger`).** The trigger source can
be:

* the OR of the enabled channels;
* a majority of them (at least `maj_level` active in one clock);
* the LEMO T1 input (synchronized, 3 clocks of latency);
* the periodic generator (one pulse every `dwell` clocks);
* a trigger command from the link;
* a register write.

OR and majority fire once, on the clock their condition becomes true. The
T0-OUT output carries the T-OR and T1-OUT carries the trigger. The external
fine TDC gets T-OR as start and the T0 level as stop.

### Counting mode (`mcs_counters`)

There is one 32-bit counter per channel, counting leading edges. Each trigger
closes a slot. On that clock the counters are copied to a shadow bank and
restart. An edge on that same clock is counted in the new slot, so there is no
dead time between slots. The shadow bank is then written as a 67-word packet:

| word | content |
|---|---|
| 0 | `{type=2, length=67, time stamp[47:32]}` |
| 1 | time stamp[31:0] |
| 2 | slot index |
| 3–66 | counters of channels 0–63 |

A slot is dropped and counted as lost in two cases: its packet does not fit
in the buffer, or it closes while the previous packet is still being written.
Slot numbering continues in both cases. `rd_sel_i`/`rd_val_o` read a running
counter.

### Spectroscopy mode (`pha_sequencer`)

This is the mode with the most timing detail.

1. A trigger latches the 48-bit time stamp and the trigger index.
2. `hold_o` rises `hold_delay + 2` clocks later. The default delay is 12
   clocks, about 100 ns. Hold makes both ASICs freeze their shaper peaks.
3. The sequencer then steps the ASIC multiplexers through channels 0–31. Each
   step lasts `STEP_CLKS` = 39 clocks. At the start of a step it pulses
   `adc_start_o` with `mux_sel_o` set.
4. The two ADCs answer with `adc_valid_i`, one 16-bit charge per ASIC, and
   the charge-discriminator bits `qtrg_i`.

The conversion takes 32 × 39 × 8 ns ≈ 10 µs. After it, hold drops and the
event is written:

| word | content |
|---|---|
| 0 | `{type=1, length, time stamp[47:32]}` |
| 1 | time stamp[31:0] |
| 2, 3 | channel mask [63:32], [31:0] |
| 4… | charges in channel order, two per word (lower channel in [31:16]) |

With zero suppression the mask keeps only channels whose charge
discriminator fired. Without it, every enabled channel is kept. A full event
is 36 words, 144 bytes. The dead time per event is about 1330 clocks
(10.6 µs), so the unit accepts up to about 94 kHz. A trigger that arrives
while the unit is busy is refused and counted as lost. It still counts in the
trigger index, so the indices of all units stay aligned.

### Timing and ToT modes (`timing_acq`, `hit_packetizer`)

The channels acquire on their own. Each closed pulse becomes a hit. Each
channel has a one-hit holding register. A round-robin arbiter moves one held
hit per clock into a candidate FIFO. A hit that finds its register still full
is lost.

The head of the FIFO is then selected against the last two T0 reference
times:

| sub-mode | hits kept |
|---|---|
| streaming | all |
| common start | `r ≤ t ≤ r + window` |
| common stop | `t ≤ r ≤ t + window` |

In common stop, the head waits until a closing reference arrives or the
window has passed.

The 24-bit stamp is `(t − origin) >> ts_lsb`. The origin is the run start, or
in delta-T mode the reference. Hits are grouped into packets of `pkt_hits`
hits:

* header: `{type, length, 4'h0, hit count}`;
* then one word `{2'b0, channel, stamp}` per hit;
* in ToT mode each hit word is followed by `{16'h0, ToT}`.

A partial packet is flushed when the run stops. When the output cannot take a
hit, the acquisition pauses (`paused_o`) and that time counts as dead time.
Hits leave in arbitration order, which is close to, but not strictly, time
order.

### Buffer, bookkeeping, registers, bias

`event_buffer` is a 4096-word data FIFO plus a FIFO of packet descriptors
(`{length, tag}`). It tells the reader the tag and length of the oldest whole
packet. The tag is the trigger index for spectroscopy, the slot index for
counting and a packet count for timing.

`run_control` keeps:

* the run state;
* the start time, which is the origin of absolute timing stamps;
* the trigger and lost-trigger counts;
* real time and dead time in clocks.

`fers_regfile` holds the configuration. Both the link and the local
microcontroller can write it; the link wins on a clash. Registers (32 bits):

| addr | register |
|---|---|
| 0 | mode: `[1:0]` mode (0 counting, 1 spectroscopy, 2 timing, 3 ToT), `[3:2]` timing sub-mode, `[6:4]` trigger source, `[13:7]` majority, `[14]` zero suppression, `[15]` delta-T, `[19:16]` LSB shift |
| 1, 2 | channel enable [31:0], [63:32] |
| 3 | dwell (clocks) |
| 4 | hold delay (clocks) |
| 5 | timing window (0.5 ns) |
| 6 | hits per timing packet |
| 7 | write: software trigger |
| 8 | bias set-point (mV) |
| 9 | `[15:0]` bias temperature coefficient (mV/°C, Q8.8, signed), `[31:16]` reference temperature (0.01 °C) |
| 10 | write 1: start, 2: stop |

`hv_temp_comp` computes `Vset + k·(T − Tref)` with floor rounding and clamps
it to 20–85 V. The result goes out as a set-point for the bias supply. The
unit's block diagram prints 20–100 V, but the text's 20–85 V is used here.

In stand-alone use (`standalone_i = 1`), whole packets go to the
microcontroller on a valid/ready stream instead of the link.

## The TDlink ring

A chain is a ring: master → unit 0 → … → unit 15 → master. On every clock,
each hop carries one ring word `{kind[3:0], data[31:0]}`. Each node registers
its output, which adds one clock per node. Words from upstream always pass
before the node's own data.

| kind | use |
|---|---|
| ENUM(a) | node takes address a, forwards a+1 |
| CAL(n) | forwarded as n+1, used to measure the ring delay |
| HOPSET(h) | link delay per hop, in clocks |
| TSYNC(t) | time of the sender on the clock the word left it |
| CMD(c) | start / stop / trigger, broadcast |
| REGA, REGD | register write to node `{node, reg}` (node FF = all) |
| HREAD(N) | horizontal read token for trigger N |
| VREAD(a, m) | vertical read token for node a, block of at most m words |
| SOP, DATA, DATA_LAST | a unit packet: `{node, length}` word, then its words |

**Start-up (`tdlink_master`)** runs in four steps.

1. ENUM returns with the node count N.
2. CAL returns after R clocks. That is N node registers plus N+1 hops of L
   clocks each, so L = (R − N)/(N + 1). It is computed by repeated
   subtraction, and all hops are assumed equal.
3. HOPSET broadcasts L.
4. TSYNC carries the master's time. Each node loads `t + L + 1`, which is the
   master's time at that moment, and forwards its own time. The master checks
   that the value coming back equals its time minus L. If not, it raises
   `sync_err_o`.

Only the low 32 bits of the time travel. Start-up is meant to follow power-up
or a time reset, when the time is small. A start-up request that arrives
during a readout is kept until the token is back.

**Horizontal readout** (spectroscopy) aligns events across units. HREAD(N)
goes round the ring. Each node holds the token while it has not yet seen
trigger N, or while trigger N is still converting. It then does the
following, in order:

1. drops any older packets;
2. sends its packet of trigger N, if it has one; a unit that missed the
   trigger sends nothing;
3. passes the token on.

The master therefore receives the packets of trigger N in chain order,
followed by the token.

**Vertical readout** (the other modes) has no relation between units.
VREAD(a, m) lets node a send whole packets, up to m words but always at least
one packet. The token then returns with a "more data" bit. The master reads a
node again while it reports more. Otherwise it moves on to the next node, so
a silent unit costs one token round.

## The concentrator and the network

`concentrator` holds the network time and eight chain masters, each with a
1024-entry FIFO. A start command clears the global trigger count. After that,
every global trigger (`gtrg_i`) is counted, and with `trg_via_link_i` it is
also sent as a link command.

In horizontal mode, for each counted trigger, in order:

1. HREAD goes round all chains at once.
2. When all tokens are back, one event is emitted:
   `{8'hEB, words that follow}`, the trigger index, then for every unit
   packet a `{chain, node, 4'h0, length}` word followed by the packet. Chain
   0 comes first, and the event's last word is marked.

In vertical mode each chain is polled while its FIFO can take a block. Whole
packets, each after its source word, are passed on chain by chain.

A time reset over the S-link clears the time; in master mode the board also
sends the reset on. After a time reset, a new start-up realigns the units.

`fersnet` instantiates a concentrator and `N_LINKS × N_UNITS` units (default
8 × 16). The optical links are not inside it. Each ring word leaves on
`conc_tx_o` / `unit_tx_o[l][u]` and enters on `conc_rx_i` /
`unit_rx_i[l][u]`. The board model (a testbench) closes the rings and adds the
fibre delay. Front-end signals are arrays indexed `[link][unit]`.

## Where this departs from, or adds to, the original description

* **Event size.** The spectroscopy event is 144 bytes: 16-bit header, 64-bit
  mask, 48-bit stamp and 64 × 16-bit charges. The original quotes 140 bytes
  for the same list of fields.
* **Clock.** The clock is 125 MHz, from the 8 ns stamp granularity, not the
  quoted 200 MHz link clock.
* **Bias range.** The bias range is 20–85 V, from the text; a diagram says
  20–100 V.
* **Link.** The link is an ideal word-per-clock ring with a fixed delay per
  hop. The real link's occasional synchronization packets, which make its
  delay slightly non-deterministic, are not modelled.
* **ToT window.** In the ToT mode the acquisition window is opened or
  closed by the T0 reference, exactly as in the timing sub-modes. The
  original also describes a window opened "for each trigger"; here the
  trigger input does not open it.
* **Fine time.** The spectroscopy event carries no 50 ps fine time. The
  external fine TDC is driven (start = T-OR, stop = T0), but reading its
  result into the event is not built.
* **Vertical priority.** Vertical-readout priority is done by the chain
  master; the original leaves it to the host software.
* **Design choices.** The word formats, register map, buffer sizes (4096
  words, 256 packets per unit; 1024 words per chain in the concentrator) and
  the 39-clock conversion step are choices of this design.
* **Not built.** The CITIROC configuration bit-stream, the calibration
  pulser, the fine TDC's readout, the ADC's real interface and the USB and
  Ethernet stacks are not part of this logic.

## Files

`rtl/` — one module or package per file:

| file | contents |
|---|---|
| `fers_pkg.sv` | constants, types, packet and ring formats, register map |
| `tdc_channel`, `time_counter`, `periodic_trigger`, `trigger_logic` | timing front end |
| `mcs_counters`, `pha_sequencer`, `timing_acq`, `hit_packetizer` | acquisition modes |
| `sync_fifo`, `event_buffer` | buffering |
| `run_control`, `fers_regfile`, `hv_temp_comp` | bookkeeping, configuration, bias |
| `tdlink_node`, `tdlink_master` | the link |
| `fers_unit`, `concentrator`, `fersnet` | the three levels of the system |

`tb/` — one self-checking testbench per module, `tb_<module>.sv`, plus:

* `fe_model.sv`: a model of the two ASICs and ADCs, with programmable pulses
  and charges;
* `tb_fersnet.sv`: end-to-end test, 2 chains × 3 units. It covers start-up,
  horizontal spectroscopy events with missed triggers and zero suppression,
  output stalls, a mode switch to counting with vertical readout, buffer
  overflow, and an S-link time reset. It counts each of these and fails if
  one did not happen;
* `tb_concentrator.sv`: the same flow on 3 chains × 2 units.

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

To simulate, for example, the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fers_pkg.sv tb/tb_fersnet.sv --top-module tb_fersnet
./obj_dir/Vtb_fersnet
```

The test takes about a minute. All RTL parameters default to the system's
sizes: 64 channels, 2 ASICs, 8 chains, 16 units. Testbenches shrink
`N_LINKS`, `N_UNITS` and `BUF_DEPTH` through parameters. The largest network
simulated so far has 6 units (2 × 3 and 3 × 2). At the default 8 × 16 size,
compiling the simulation model with Verilator alone takes well over half an
hour on a 4-core machine, so the full-size network has not been simulated.

## How far it has been verified

Every module has a self-checking testbench with random stimulus and a
reference model where one is practical:

* TDC edges and ToT;
* counters, trigger sources and the packet formats;
* the spectroscopy sequence, including hold timing and zero suppression;
* the three timing sub-modes;
* ring start-up with delays of 1–3 clocks per hop, horizontal and vertical
  tokens, and register writes;
* the unit in all four modes through its registers;
* the network end to end.

Not verified: timing closure at 125 MHz on a real FPGA, the real
link's non-deterministic delays, and hit rates near the 20 Mcps limit over
long runs.
