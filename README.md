# LCDC switch: a data center switch that lights only the uplinks it needs

An optical link draws almost the same power idle as busy, because its laser
and driver stay on. Many data center networks also have several equal paths
between any two racks: a rack switch, for example, has one uplink to each of
several cluster switches. The LCDC switch saves energy by turning redundant
uplinks off when traffic is light. It never severs the last path, so no
packet waits for a laser to come on. Only extra bandwidth waits.

The uplinks are grouped into **stages**. "Stage *k* active" means that the
links of stages 1 to *k* are lit. Stage 1 is always on. The switch measures
its own load as the backlog of its output queues:

- When a queue passes a **high watermark**, the switch switches on the next
  stage. It tells its neighbours with an in-band control frame. Once the new
  transceiver reports ready, the switch starts spreading traffic over the
  new link.
- When all active queues fall below a **low watermark**, the switch stops
  scheduling onto the newest stage and waits for that stage's queues to
  drain. It then sends a stage-off frame and powers the stage down.

The stage change is a decision made inside the forwarding pipeline. It
takes nanoseconds, not the milliseconds of a software control plane.

This repository holds synthesizable SystemVerilog for a 6x6 version of the
switch with 4 stages, 100-entry lookup tables and a 64-bit datapath. At the
169.32 MHz that such a design reaches on a mid-range FPGA, the datapath
carries 10.8 Gb/s. The repository also holds self-checking testbenches for
every block and for the whole switch.

## Contents

- [Where the switch sits](#where-the-switch-sits)
- [Frame path](#frame-path)
- [Two-level addressing: logical ports and stage maps](#two-level-addressing-logical-ports-and-stage-maps)
- [Control frames](#control-frames)
- [Stage transitions](#stage-transitions)
- [Queues](#queues)
- [Configuration registers (Avalon-MM slave)](#configuration-registers-avalon-mm-slave)
- [Top-level interface](#top-level-interface-lcdc_switch)
- [Simulating](#simulating)
- [What is and is not in the RTL](#what-is-and-is-not-in-the-rtl)

## Where the switch sits

The reference deployment is a Facebook-style site, built in three tiers:

| Tier | Connects to | Links |
|---|---|---|
| Rack switch | 48 servers below; the 4 cluster switches of its cluster above | 48 × 10G down, 4 × 10G up |
| Cluster switch | rack switches below; fabric routers above | 4 × 40G up |
| Fabric router | cluster switches | — |

Each of a rack switch's 4 uplinks is one stage. Cluster switches and fabric
routers use the same scheme on their own uplinks.

The RTL is parameterised by port and stage count. The default 6-port build
is a reduced rack switch:

| Ports | Role | Stage |
|---|---|---|
| 0 and 1 | server-facing downlinks | stage 1 mask, always on |
| 2 | first uplink | stage 1 |
| 3 | uplink | stage 2 |
| 4 | uplink | stage 3 |
| 5 | uplink | stage 4 |

These per-stage port masks are registers, so any other grouping can be
programmed.

Outside the switch, and not part of this RTL:

- the Ethernet MACs, which deliver and accept frames as flit streams;
- the optical transceivers and their drivers. These get a `stage_en_o` bit
  per stage and answer with `stage_rdy_i` once the link is up.
- the control-plane CPU, which programs everything over an Avalon-MM slave.

## Frame path

Frames travel as 64-bit flits (`lcdc_pkg::flit_t`):

| Field | Meaning |
|---|---|
| `data[63:0]` | 8 octets; octet 0 of the frame is in bits 63:56 of the first flit |
| `sop` | first flit of the frame |
| `eop` | last flit of the frame |
| `empty` | number of unused octets in the last flit |
| `ann` | this is an annotation flit, not frame data |

Inside the pipeline, every frame is preceded by one **annotation flit**. Its
data bits hold an `ann_t` record, which each stage fills in:

- input port;
- control / local / drop flags;
- logical port;
- multicast bit;
- port map;
- chosen queue set.

The output queues strip the annotation flit, so it never leaves the switch.

```
 MAC Rx queues (6) ─┐
                    ├─► [1] input arbiter ─► [2] parser + logical CAM ─► [3] stage scheduler ─► [4] output queues ─► MAC Tx queues
 control frame  ────┘     (adds ann. flit)      3-cycle delay                4-cycle delay         (one per port)
 generator (virtual port)                          │ stageID                      ▲ backlogs             │
                                                   ▼                              │                      ▼
                                             stage enable ◄──── up/down ──── backlog monitor ◄──── backlogs
                                               │   ▲
                               stage_en_o ◄────┘   └──── stage_rdy_i
```

### Pipeline stages

1. **Input arbiter** (`input_arbiter`). It takes whole frames from the six
   receive queues in round-robin order. It takes them from the control frame
   generator (the seventh, "virtual" input) ahead of everyone else, whenever
   the current frame ends. On the grant cycle it emits the annotation flit.
   The frame follows it without gaps. The receive queues (`frame_fifo`) are
   store-and-forward, which is what guarantees there are no gaps.
2. **Parser and logical lookup** (`stage_pkt_parser` + `lport_cam`). It
   looks at the first three flits:
   - the destination MAC in flit 0;
   - the EtherType and the top half of the senderID in flit 1;
   - the rest of the senderID, the stageID and the TTL in flit 2.

   An ordinary frame is looked up in the logical port CAM. A control frame
   is handled as described under [Control frames](#control-frames). All
   flits are delayed by exactly 3 cycles, so that the annotation flit leaves
   just as flit 2 arrives. That lets the annotation carry what flit 2 says.
3. **Stage-aware scheduler** (`stage_scheduler` + 4 × `stage_map_cam`). It
   looks the logical port up in all four stage maps at once. It keeps the
   result of the map of the current stage and picks the queue to use:

   | Frame | Queues chosen |
   |---|---|
   | unicast | the port of that map with the smallest backlog (lowest index on a tie) |
   | multicast | every port of the map |
   | control frame | every active port |
   | marked for dropping | none |

   Every flit is delayed by 4 cycles.
4. **Enqueue** (`output_queue`). Every output queue watches the one stream.
   A queue selected by the annotation admits the frame if it has room for a
   maximum-size frame. Otherwise it drops the whole frame and counts the
   drop. It writes one flit per cycle.

### Latency

The first flit of a frame is written into its output queue **7 cycles**
after it enters stage 2:

| Step | Cycles |
|---|---|
| Logical lookup | 2 |
| Stage-map lookup | 2 |
| Scheduler | 2 |
| Enqueue | 1 |

The top-level testbench checks this number. The scheduler reads the backlogs
two cycles before the frame's flits reach the queues. A queue can therefore
look slightly emptier than it is, by the frames already on their way. That
is the price of a short pipeline.

All queues hand a frame on only once it is complete. The store-and-forward
depth of the transmit queues therefore adds one frame time before a frame
reaches the MAC.

## Two-level addressing: logical ports and stage maps

Forwarding does not map MAC addresses straight to ports, because the right
port depends on the current stage. Instead it goes through two lookups.

### Logical port CAM (`lport_cam`)

This CAM maps a destination MAC to a **logical port**: a 16-bit,
deployment-wide name for the switch behind which that destination sits. It
also gives a multicast bit. Each entry has:

- a 48-bit key;
- a 48-bit care mask;
- a logical port and a multicast bit.

The lowest-numbered matching entry wins. With the mask all ones, an entry is
an exact match. With a partial mask, one entry covers a range of addresses,
for example a whole remote rack. A miss drops the frame.

### Stage maps (`stage_map_cam`)

Each stage has its own exact-match table. It maps a logical port to the
bitmap of physical ports that may carry traffic to it while that stage is
the current one. For example, the testbenches map the logical port of a
remote rack this way:

| Current stage | Allowed ports |
|---|---|
| 1 | {2} |
| 2 | {2,3} |
| 3 | {2,3,4} |
| 4 | {2,3,4,5} |

Switching stage is then only a change of which map the scheduler reads,
decided from one cycle to the next.

Both CAMs are fully parallel register arrays. They have a registered key and
a registered result, hence their 2-cycle latency.

## Control frames

A control frame is an Ethernet frame with EtherType **0x9100**. It is padded
to the 60-byte minimum, which is 8 flits with 4 empty octets in the last
one. The MAC adds the FCS.

| Octets | Field |
|---|---|
| 0-5 | destination MAC (the testbenches use broadcast) |
| 6-11 | source MAC |
| 12-13 | EtherType 0x9100 |
| 14-17 | senderID: the 32-bit ID of the switch that created the frame |
| 18-19 | stageID: bit 15 = 1 for stage off, 0 for stage on; bits 7:0 = stage number 1..4 |
| 20-21 | TTL: how many more switches may forward the frame |

### Sending

The generator (`ctrl_msg_gen`) sends frames from a small two-port memory.
The control plane pre-loads it with eight frames: stage on and stage off for
each of the four stages. Message index `{down, stage-1}` selects one.

### Receiving

When a control frame arrives, the parser compares its senderID with the
switch's own:

- **Own frame**: it was queued by this switch's generator. It goes to every
  active port unchanged. The stage change it announces is already under way.
- **Another switch's frame**:
  1. The stageID goes to the stage enable block, registered, one cycle after
     the stageID flit arrives. That flit arrives two cycles after the first
     flit.
  2. The TTL is decremented in place.
  3. If the new TTL is zero, the frame is dropped. Otherwise it is forwarded
     on every active port.

The TTL lets frames be flooded without loop detection.

## Stage transitions

The block `stage_enable` owns `cur_stage`. The block `backlog_monitor` is
purely combinational and works only on the ports that are currently active:

- `up_trig` is raised when any active queue holds more than the high
  watermark and a higher stage exists.
- `down_trig` is raised when every active queue holds fewer than the low
  watermark and the current stage is above 1.

The trigger therefore reaches the stage enable block in the same cycle that
the backlog crosses the watermark.

### Going up (local trigger)

1. `stage_en_o` of the next stage is raised at once.
2. The generator is asked for that stage's stage-on frame. It leaves through
   the links that are already lit.
3. When `stage_rdy_i` of the new stage is high, and the generator has taken
   the request, `cur_stage` steps up. The very next frame is scheduled with
   the new map.

### Going down (local trigger)

1. `cur_stage` steps down at once, so no new frame is scheduled onto the
   leaving port.
2. After a short settle time (8 cycles), the block waits until the leaving
   port's output queue and transmit queue are both empty. The settle time
   covers frames the scheduler had already placed on the port.
3. The stage-off frame is sent.
4. When its last flit has left the generator, `stage_en_o` drops.

### Requests from a neighbour

A stage-on frame for stage `cur+1` raises that stage in the same way, but
without sending a frame. A stage-off frame for stage `cur` lowers it in the
same way, also without sending a frame.

A stage raised at a neighbour's request is **held**. Local low load does not
lower it; only that neighbour's stage-off frame does. Without this, a lightly
loaded switch would take a stage down again the moment a neighbour had asked
for it.

### Other rules

- Triggers are taken only while no transition is in progress.
- Out-of-order requests are ignored. An example is a stage-on for stage
  `cur+2`.

### Acknowledgement

The protocol as originally described includes an acknowledgement from the
neighbour. No format for it is given, so this design uses `stage_rdy_i` to
mean "the link is up and the far side is ready". Whatever drives
`stage_rdy_i` outside the switch is responsible for that.

## Queues

| Queue | Module | Depth (flits) | Behaviour |
|---|---|---|---|
| MAC receive | `frame_fifo` | `RXQ_DEPTH` = 256 | store-and-forward; back-pressures the MAC with `rx_ready` |
| Output | `output_queue` | `OQ_DEPTH` = 1024 | whole-frame tail drop when fewer than 190 flits are free; its fill level is the backlog used by the scheduler and the monitor |
| MAC transmit | `frame_fifo` | `TXQ_DEPTH` = 256 | store-and-forward; drained by `tx_ready` |

A 1518-byte frame is 190 flits, which is why the output queue needs 190
free flits to admit a frame.

The watermarks reset to 768 and 225 flits, which are 75 % and 22 % of the
output queue. Those are the settings the scheme was evaluated with.

## Configuration registers (Avalon-MM slave)

The slave uses 12-bit word addresses and 32-bit data. Writes take effect at
the clock edge. Reads return one cycle later with `avs_readdatavalid`. There
are no wait states.

| Address | Register | Reset |
|---|---|---|
| 0x000 | high watermark (flits) | 768 |
| 0x001 | low watermark (flits) | 225 |
| 0x002 | this switch's senderID | 1 |
| 0x003 | status (read only): `{busy[8], stage_en[7:4], cur_stage[3:0]}` | |
| 0x008+s | port mask of stage s+1 | stage 1 = ports 0-2, stage s = port s+1 |
| 0x400 + entry·8 + w | logical CAM, write only. w: 0 key[31:0], 1 key[47:32], 2 mask[31:0], 3 mask[47:32], 4 `{valid[31], mcast[16], lport[15:0]}` | all invalid |
| 0x800 + stage·256 + entry·2 + w | stage map, write only. w: 0 `{valid[31], lport[15:0]}`, 1 port bitmap | all invalid |
| 0xC00 + msg·16 + flit·2 + h | control frame memory, write only. h = 0 writes data[63:32]; msg = `{down, stage-1}` | zero |

The tables come up empty, so the switch forwards nothing until the control
plane has written them. The top-level testbench contains a complete example
set-up: the tasks `lcam`, `smap` and the message loop.

## Top-level interface (`lcdc_switch`)

### Parameters

| Parameter | Default |
|---|---|
| `NPORTS` | 6 |
| `NSTAGES` | 4 |
| `CAM_ENTRIES` | 100 |
| `RXQ_DEPTH` | 256 |
| `TXQ_DEPTH` | 256 |
| `OQ_DEPTH` | 1024 |

### Ports

| Signals | Meaning |
|---|---|
| `clk`, `rst_n` | clock; asynchronous active-low reset |
| `rx_valid`, `rx_ready`, `rx_flit[NPORTS]` | frames from the MACs, one valid/ready flit stream per port |
| `tx_valid`, `tx_ready`, `tx_flit[NPORTS]` | frames to the MACs |
| `avs_*` | configuration slave |
| `stage_en_o[NSTAGES]` | power up the electronics of a stage |
| `stage_rdy_i[NSTAGES]` | the stage's links are up. Stage 1 should be tied or driven high. |
| `port_tx_en[NPORTS]` | per-port transmitter enable: the ports of every stage whose `stage_en_o` is set |
| `cur_stage` | the current stage |
| `n_stage_up`, `n_stage_down`, `n_ctrl_sent` | event counters |
| `n_sched_unicast`, `n_sched_copies` | scheduler counters |
| `n_enq[p]`, `n_drop[p]` | frames admitted and dropped by each output queue |

## Simulating

Each block has a self-checking testbench in `tb/`, named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog
if it hangs. Any testbench runs with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/lcdc_pkg.sv tb/tb_lcdc_switch.sv --top-module tb_lcdc_switch -o sim
./obj_dir/sim
```

### Whole-switch testbenches

The testbenches below run the switch at its default size, with no parameter
overrides. They use `tb/laser_stage_model.sv`, a behavioural stand-in for
the transceivers: `stage_rdy` follows `stage_en` after 1 µs, which is 169
cycles at 169.32 MHz.

**`tb_lcdc_switch`** programs the tables over Avalon, then goes through
these phases:

1. A single frame. Its contents and the 7-cycle path are checked.
2. A multicast frame and an unknown destination.
3. 200 frames to the uplinks with uplink 2 stalled. This drives the switch
   up to stage 4, with stage-on frames; spreads traffic over ports 3-5; and
   overflows port 2.
4. Release. The switch drains and steps down to stage 1, with stage-off
   frames.
5. Another switch's stage-on frame. The stage is raised, held, and the
   frame is forwarded with its TTL decremented. Then a stage-off frame with
   TTL 1, which is obeyed and dropped.

A scoreboard checks every frame that leaves: port, length and payload.
Every remote frame must be either delivered once or counted as dropped.
Each mechanism counts as a failure if it never happened.

**`tb_lcdc_traffic`** offers bursty on/off traffic from the two server
ports to the uplinks, under three load profiles. Each port's MAC moves one
flit every 8 cycles, so a single uplink can be overrun. The testbench
reports the share of time spent at each stage and the frame latency. It
checks four things:

- light load never leaves stage 1;
- heavy load climbs at least two stages;
- every stage change is announced by a control frame;
- every data frame arrives intact exactly once.

With the default random seed, the stage shares come out as follows:

| Profile | Average load | Stage 1 | Stage 2 | Stage 3 | Stage 4 | Stage changes |
|---|---|---|---|---|---|---|
| light | 15 % of one uplink | 100 % | — | — | — | none |
| bursty | 60 % | 93 % | 1 % | 0.2 % | 5.5 % | 6 up / 6 down |
| heavy | 180 % | 52 % | 27 % | 2 % | 19 % | 28 up / 28 down |

Under heavy load, 8 control frames are dropped at full uplink queues. No
data frame is lost.

## What is and is not in the RTL

Taken from the published design:

- the CIOQ organisation and the four pipeline stages;
- the virtual control port with priority;
- the 64-bit datapath with one annotation flit per frame;
- the control frame fields and EtherType;
- TTL handling and the local-sender bypass;
- one CAM map per stage and minimum-backlog scheduling;
- multicast by port map;
- the same-cycle watermark trigger;
- the stage-up and stage-down sequences;
- the 6-port, 4-stage, 100-entry, 7-cycle figures;
- the 75 %/22 % watermarks.

This design's own choices:

- the flit and annotation formats;
- the stageID encoding;
- the ternary (masked) logical CAM and its lowest-index priority;
- dropping on a CAM miss;
- queue depths and whole-frame tail drop;
- the register map;
- tie-breaking in the scheduler;
- holding stages raised by a neighbour;
- the drain settle time;
- using `stage_rdy_i` as the neighbour's acknowledgement.

Not built:

- the MACs;
- the control-plane CPU and its software;
- the transceivers and laser drivers, which are analog;
- the server-side part of the scheme, which is an OS hook that powers a
  NIC's laser when a socket write begins.

Limits:

- The default build has 6 ports. A full 48+4-port rack switch needs
  `NPORTS` = 52, and the annotation's port bitmaps (`MAX_PORTS` = 8 in
  `lcdc_pkg`) would have to be widened to match.
- Control frames are flooded on every active port, including the port
  they arrived on. The TTL is what bounds them.
- A stage request that arrives while another transition is in progress is
  ignored. Neighbours are expected to repeat it.
