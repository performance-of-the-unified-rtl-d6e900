# Belle II unified readout: trigger, data and back-pressure loop in RTL

The Belle II detector is read out by about a thousand front-end boards from
seven subdetectors. They share three common pieces: a timing distribution tree
that delivers every level-1 trigger to every board, a 2.54 Gbps serial link
(Belle2link) that carries each board's data to a receiver card (HSLB), and a
backend module (COPPER) that holds four such receivers and builds one event
record from their fragments. The link has no flow control. The only way to
slow the data down is to stop triggering. So the system is a closed loop:
triggers go down the tree, data comes back over the links, and every place
that can fill up (a board's trigger queue, a COPPER FIFO) sends a busy signal
back up the tree to pause the triggers.

This RTL builds that loop for one slice of the detector: a trigger master,
one 20-port distribution node, 20 front-end boards running the common
firmware, their 20 Belle2links, and five COPPERs. Everything the published
description of the system gives as function is built. Protocol details it
leaves open (frame layout, control characters, CRC, header format, buffer
sizes) are filled in with simple choices, listed below. The serial physical
layers, clocking, the subdetector digitisers and the computers behind the
COPPERs are not part of the RTL.

```
 level-1 trigger, injection timing
          |
   +--------------+   trig_msg_t    +------------+  x20  +-------------+  Belle2link  +---------+
   | trig_master  |---------------->| ftsw_dist  |------>| fee_unified |------------->| copper  |--> event records
   | gates, event |                 | (FEE tree) |       | fee_readout |  16b + K/clk | 4x hslb |    (x5, to the
   | no., 59-bit  |<---- busy/err --|            |<------| b2l_tx      |              | 4x fifo |     processor)
   | timestamp    |                 +------------+ status| fee_regs    |              | combiner|
   |              |<---- busy/err --+------------+                                    +---------+
   +--------------+                 | ftsw_dist  |<------------- busy / err / count -------+
                                    |(COPPER tree)|
                                    +------------+
```

## Trigger master: why a trigger is refused

`trig_master` receives the level-1 trigger requests. A request is
distributed only if all of these hold in the clock it arrives:

| gate | refuses when | configured by |
|---|---|---|
| run state | the run is stopped, or was stopped by a link error | `run_start`, `run_stop` |
| collected busy | any status tree reports busy | front-end queues, COPPER FIFOs |
| injection veto | within `veto_short` clocks of an injection, or within `veto_long` clocks and within `veto_near` clocks of the injected bunch's ring phase | `inj_veto` |
| interval counter | fewer than `min_interval` clocks since the last accepted trigger | `min_interval` |
| SVD emulation | the model of the SVD front-end buffer is full | `svd_depth`, `svd_read_clk` |

A refused request is dropped, not delayed. An accepted one leaves one clock
later as a `trig_msg_t` with the next event number (restarting at 0 each
run), the 59-bit timestamp and the 4-bit trigger type. The timestamp is a
free-running count of system clocks: it is unique per event and only grows,
and it does not wrap for about 144 years at 127 MHz. The master counts accepted
triggers, dropped requests and *dead clocks*: clocks in which a request would
have been refused. The dead-time fraction is the dead-clock count divided by
the run length in clocks.

`inj_veto` keeps a ring-phase counter modulo 1280 clocks. That is one
SuperKEKB revolution: 5120 RF buckets, with the system clock at a quarter of the
RF. At an injection pulse it stores the phase and starts two down-counters. The
long window vetoes only triggers whose phase is within `veto_near` of the
stored one, so it removes just the disturbed bunches, on every turn.
`svd_emu` is a leaky bucket. Each accepted trigger adds an event, and one event
drains every `svd_read_clk` clocks. It stands in for the timing model of the
real SVD front end, which is not published with the system description.

A link error collected from either tree clears `running` and sets
`err_stop`. The run can only be restarted with `run_start`, after the
source of the error has been cleared (for the COPPER, with `cop_clr`).

## Distribution tree and status collection

`ftsw_dist` is one node of the tree. It copies the trigger message to each
of its 20 ports, one register stage later. It collects busy, error,
SEU-mitigation flag and processed-event count from each port. The summary it
sends upward is the OR of the flags and the minimum of the counts, taken over
the ports that are not masked. A masked port can no longer block triggers or
stop the run, so a dead or noisy board is taken out this way. A reset
request for a port is sent to it as a one-clock pulse, and the board treats
it as a reset. Nodes cascade: a node's summary outputs connect to one port
of the node above, and each stage adds one clock in each direction. The top
uses one node for the boards and a second one that only collects the
COPPERs' status, as the real tree does with its COPPER-side branch.

## Front-end firmware and the fragment format

`fee_unified` is the part every front-end board shares, whatever its
subdetector. `fee_readout` keeps received triggers in a 16-entry queue. It
asserts busy while the queue holds at least the threshold set in register 1
(8 by default). For the oldest trigger it sends a fragment of 32-bit words:

| word | contents |
|---|---|
| 0 | event number |
| 1 | bit 31 zero, bits 30:27 trigger type, bits 26:0 timestamp[58:32] |
| 2 | timestamp[31:0] of the trigger |
| 3 | local timestamp[31:0] when this fragment started to be sent |
| 4... | subdetector payload for this trigger (`pl_*` stream), last word flagged |

Word 3 minus word 2 is how long the event waited inside the board: queueing
plus digitisation. This lets the readout latency of each board be measured
from the data alone. The board's local timestamp is reloaded from every
received trigger, so it tracks the master's count with the fixed delay of
the tree.

`fee_regs` is the board's register file: 32-bit registers on a 16-bit
address space.

| address | register |
|---|---|
| 0x0000 | board id (read only) |
| 0x0001 | busy threshold, bits 7:0 |
| 0x0002 | processed events (read only) |
| 0x0003 | bit 0 SEU flag, bit 1 busy (read only) |
| 0x0004 | scratch |

Other addresses read 0. The real registers are reached through the HSLB over
the link's return direction. That transport is not published, so here the
register port connects directly: `reg_sel` picks the board.

## Belle2link framing

The transceiver interface carries two 8b10b characters per system clock:
16 data bits and two K flags. `b2l_tx` sends

```
SOF  w0[31:16] w0[15:0]  w1[31:16] ...  CRC  EOF      (IDLE between and in gaps)
SOF = K28.0 K28.5   EOF = K28.7 K28.5   IDLE = K28.5 K28.5
CRC = CRC-16-CCITT (x^16+x^12+x^5+1, init 0xFFFF, MSB first) over all data halves
```

A data half may go out only in one clock of every `BW_DIV` (2). This caps
the payload at 8 bits per clock, 1.016 Gbps at 127 MHz, out of 2.54 Gbps on the
line. A saturated fragment of n words takes 4n+2 or 4n+3 clocks from SOF to
EOF. The cap stands in for the backend's limited intake: there is no flow
control on the link, so the sender must never exceed what the COPPER can
take.

`hslb_rx` counts two kinds of link error. The first is a bad control symbol:
a K word other than IDLE/SOF/EOF, a half-K word, a SOF inside a frame, or an
EOF or data outside one. The second is a CRC mismatch. Either error sets the
sticky `link_err` and marks the fragment's last word with an error bit. The
receiver writes each word to the FIFO one word late, so that the last word
can carry the CRC verdict.

## COPPER: alignment and back pressure

Each link writes into its own `copper_fifo`: 16384 words of
{last, err, data} (64 KiB of data per link), first-word-fall-through. The
FIFO tracks how many complete fragments it holds. `copper_combiner` waits
until every unmasked link holds one. It then copies the fragments out link by
link as one record. It checks that all of them carry the same event number
(word 0) and trigger timestamp (word 2). It flags the record (`out_err`, with
`out_last`) if any fragment had an error or these words differ. The sticky
`mismatch` output stays set until `cop_clr`. The backend's `out_ready`
stalls it.

The COPPER reports busy while any unmasked FIFO holds more than `fifo_thr`
words. Because the links cannot be stopped, the threshold is a budget:
between busy rising and the last trigger already sent arriving as data, every
board can still deliver whatever is queued (up to 16 triggers per board).
The threshold must leave room for that. If it does not, the FIFO drops
the words, sets `overflow` and the COPPER reports an error, which stops the
run.

With the defaults:

- At the 30 kHz design rate, a board can send about 4.2 kB per event (4233
  clocks at 1 byte per clock).
- One FIFO holds 64 KiB. That is above the largest occupancy seen in
  operation, about 40 kB per link for the slowest subdetector at 4 kHz.

## What follows the source and what is this design's own

Taken from the system description:

- the loop of trigger, data and back pressure;
- the gating by busy, a programmable interval counter and an SVD buffer
  emulation;
- the two-window injection veto;
- the event number, 59-bit timestamp and trigger type in each trigger;
- status collection with masking and remote reset, 20 ports per node and
  cascading;
- 8b10b control symbols and a CRC, and stopping the run on a link error;
- 2.54 Gbps raw and about 1 Gbps of payload;
- the start-of-transfer timestamp in the header, and the use of the
  timestamp to detect event mismatch;
- four links per COPPER, a FIFO with a programmable threshold, and alignment
  of the four fragments before combining;
- 32-bit registers on a 16-bit address space.

This design's own choices:

- the frame layout, control characters and CRC polynomial;
- the fragment header layout;
- the widths of the event number (32) and trigger type (4);
- the timestamp as a plain clock count;
- the depth of the trigger queue and its busy rule;
- the leaky-bucket SVD model;
- the FIFO depth;
- the OR/minimum status summary;
- the register map;
- dropping, rather than queueing, refused triggers.

Not built:

- the b2tt serial protocol (254 Mbps) between tree nodes, including the JTAG
  it carries. The tree here is parallel wires.
- the GTP/GTX transceivers and 8b10b coding.
- LVDS and optical drivers, and the sub-clock output delay used on the serial
  line.
- the PLL and clock generation.
- SEU scrubbing. Only its status flag enters, on `seu_err`.
- the subdetector digitisers. Their payload enters on `pl_*`.
- the COPPER processor and everything after it.
- any use of the trigger type inside the boards. The type is carried into
  the fragment header; changing the readout by trigger source is subdetector
  logic.

## Simulating

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. `tb/tb_b2_util.sv` is a package with an
independent byte-wise CRC and a reference frame encoder. With Verilator 5,
for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/b2_pkg.sv tb/tb_b2_util.sv \
          tb/tb_b2_readout_top.sv --top-module tb_b2_readout_top -Mdir obj
./obj/Vtb_b2_readout_top
```

The same command works for any other testbench: replace the file and top
name. `tb_b2_readout_top` runs the full default slice: 20 boards, 5 COPPERs
and 16384-word FIFOs. It runs in about a second and goes through these
phases:

- a high trigger rate, to hit the interval counter and front-end busy;
- a slow SVD drain, to fill the SVD model;
- injections, to trigger the veto;
- a stalled backend, to fill the COPPER FIFOs and raise their back pressure;
- masking and remote reset of a board, an SEU flag and register accesses;
- a corrupted link word, which must stop the run, followed by recovery.

It checks every record word for word against the triggers the master sent.
It also checks that no trigger leaves while busy is up, and that each of these
mechanisms happened at least once.

`tb_workload_rate` runs the two sustained loads through four boards and one
COPPER, with triggers driven directly:

- one trigger every 4233 clocks (30 kHz at 127 MHz), with 1000 payload words
  per board per event. No board may go busy and no FIFO may pass 2000 words.
- one event of 10000 payload words (40 kB) per link into a stalled backend.
  All four FIFOs must pass 10000 words without overflowing.

To change the size, set `NFEE`, `NLINK` and `DEPTH` on `b2_readout_top`
(`DEPTH` must be a power of two). The other settings are ports: interval,
veto lengths, SVD model, FIFO threshold, masks. The board busy threshold is
register 1 of each board.

## Files

- `rtl/b2_pkg.sv`: shared types, symbols and the CRC function.
- `rtl/trig_master.sv`, `rtl/inj_veto.sv`, `rtl/svd_emu.sv`: trigger master.
- `rtl/ftsw_dist.sv`: tree node.
- `rtl/fee_unified.sv`, `rtl/fee_readout.sv`, `rtl/b2l_tx.sv`,
  `rtl/fee_regs.sv`: front-end firmware.
- `rtl/copper.sv`, `rtl/hslb_rx.sv`, `rtl/copper_fifo.sv`,
  `rtl/copper_combiner.sv`: COPPER.
- `rtl/b2_readout_top.sv`: the slice.
- `tb/tb_<module>.sv`: one testbench per module.
- `tb/tb_workload_rate.sv`: design-rate and deep-buffer loads.
