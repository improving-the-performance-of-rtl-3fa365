# Gather packets for a NoC-based CNN accelerator

A convolution layer mapped on a mesh of processing elements (PEs) creates
two kinds of traffic. Operands flow *into* the array, and every PE
eventually produces one 32-bit partial sum that must flow *out*, to a
global buffer. With plain unicast, an 8x8 array sends 64 tiny two-flit
packets, each paying a header, a route computation and a VC allocation of
its own, and all of them converge on the same edge of the mesh.

This design collects results with **gather packets** instead. A gather
packet travels along a row towards the global buffer, and each router it
passes writes the local PE's result into a free slot of the packet, without
stalling it. In the ideal case a whole row of eight results reaches the
buffer in one four-flit packet. The router changes are small: a
*Gather Load Generator* decides whether a passing header can take the local
result, and a *Gather Payload* unit holds the result until it is taken or
until a timeout (delta) says nobody came, in which case the PE starts its
own gather packet.

The RTL here is a complete, simulating 8x8 instance: systolic PEs, edge
buffers, five-port virtual-channel routers with the gather extension,
network interfaces and the global buffer.

## The array and its data flow

```
            weight buffer (one lane per column, lane j delayed j cycles)
               |      |            |
 input  --> PE(0,0)-PE(0,1)- ... -PE(0,7) --> router(0,7) East --> global buffer row 0
 buffer     |      |            |
 (lane i -> PE(1,0)-PE(1,1)- ... -PE(1,7) --> ...                 --> global buffer row 1
 delayed      ...
 i cycles)
```

The array is output-stationary. Row *i* receives one input vector
I_i (a flattened C x R x R window of the feature map) from the left;
column *j* receives one filter F_j from the top. Each PE multiplies the pair
it holds, accumulates, and passes the input right and the weight down, one
PE per cycle. After C·R·R pairs, PE (i,j) holds the dot product I_i · F_j.
Operands travel over direct PE-to-PE registers, not through the network.
The network carries only the results.

The lane skew means PE (i,j) finishes i + j cycles after PE (0,0), so in
every row the leftmost PE finishes first. That is what makes a row-based
gather natural: the leftmost PE's packet sweeps East past PEs that finish
one cycle apart.

`pe_mac` has a MAC latency of T_MAC = 5 cycles: `result_valid` rises five
cycles after the last pair was registered. The result is held until the
router takes it.

## Flit and packet format

Every flit is 98 bits. Its top two bits are the flit type (FT: head 0,
body 1, tail 2, head-tail 3). A header flit carries, from the MSB down:

| field  | bits | meaning |
|--------|------|---------|
| FT     | 2    | flit type |
| PT     | 2    | packet type: unicast 0, multicast 1, gather 2 |
| ASpace | 4    | free payload slots left in a gather packet |
| Src    | 7    | source node (3-bit row, 4-bit column) |
| Dst    | 7    | destination (row, column); column 8 = global buffer |
| MDst   | 64   | multicast bit string, one bit per node |
| Rsv    | 12   | reserved |

A body or tail flit carries FT plus 96 data bits, which hold three 32-bit
payload slots (slot k in `data[32k +: 32]`). A gather packet is a header,
two bodies and a tail: three data flits, or **nine slots**. A fresh gather
packet from a PE has ASpace = 8, with its own result in slot 0. Each upload
takes slot `9 − ASpace` and decrements ASpace. A unicast packet is a header
and a tail.

Nine slots per packet is more than an 8-PE row needs, so an 8x8 row never
runs out of space. A full packet (ASpace = 0) is still handled: it is never
loaded, and the unit tests exercise that case.

The table's field order follows the paper's packet format. The paper does
not print field widths. The widths above fill the 98-bit flit exactly, and
they limit a header to 8x8 nodes (see *Limits*).

## One router hop, and where the upload happens

Each router has five ports (local, N, E, S, W), four VCs of four flits per
input port, credit-based wormhole flow control and XY routing. A header
spends one cycle in each stage:

1. **RC** – route computation. In the same cycle the Gather Load Generator
   looks at the header:
   `load = (FT == head) & (PT == gather) & (ASpace >= 1) & (Dst == payload Dst) & payload waiting`.
   The input unit latches the load decision and the slot number
   `9 − ASpace`.
2. **VA** – output-VC allocation. If the load was granted, the buffered
   header's ASpace is rewritten with ASpace − 1, so the next router sees the
   reduced count.
3. **SA** – switch allocation; the winning flit is read from its buffer.
4. **ST** – crossbar traversal into the output register.

The flit then spends one cycle on the link. A header therefore advances
one hop every **κ = 5 cycles**, and body flits follow one per cycle.

The payload is written on the buffer's read path. The data flit that owns
the reserved slot (flit `slot / 3`, position `slot % 3`) gets the payload
merged in as it leaves the buffer for switch traversal, and `uploaded`
pulses back to the Gather Payload unit. No flit is delayed by an upload,
which is the point of the mechanism. The paper puts the write in the RC/VA
slots of body flits. Doing it at the read gives the same zero-cycle cost,
and it cannot race a body flit that is already buffered when the header
does RC.

When gather headers on several input VCs could take the payload in the same
cycle, the lowest-numbered port and VC wins. The other headers pass
unchanged.

## The Gather Payload unit and the delta timeout

The unit has three states:

- **EMPTY** – ready for a result from the PE.
- **WAIT** – the payload is offered to passing headers and a timer runs.
- **CLAIMED** – a header reserved the slot. The unit acks the PE when the
  data flit carrying the slot has been read out.

If the timer reaches `delta` while the unit is still in WAIT, the unit
nacks the PE and hands the payload back (`nack_data`, `nack_dst`). The PE's
network interface (`gather_ni`) then injects a new gather packet carrying
that payload. A claim that arrives in the timeout cycle wins over the
timeout. A full packet (ASpace = 0) passing by is simply not loaded. The PE
then starts its own packet when delta runs out, which is the same path as
when no packet comes at all.

**The value of delta.** Delta must cover the time from "my result is
ready" to "the upstream packet's header reaches my router". With
one-cycle column skew and κ = 5, a header started by PE (r,0) reaches
column c about **8 + 4c cycles** after PE (r,c)'s own result is ready.
Each hop costs 5 cycles against 1 cycle of skew, plus the network
interface's start-up. The paper suggests delta = 5 "so the head flit can
reach the neighbour". In this RTL a uniform delta of 5 is too short: every
PE times out and sends its own packet. The mechanism still works, but
without any gathering.

Delta is set per router through `delta_cfg[r][c]`. With `delta_cfg = 5 + 8c`
(≥ 8 + 4c), each row is served by a single packet. Mixed settings give rows
served by several partial packets, which is also correct.

## Latency of one round

For one AlexNet Conv1-sized round (C·R·R = 363) at the default size, the
ideal gather collection time is:

```
C·R·R + T_MAC + M·κ + (flits − 1) = 363 + 5 + 8·5 + 3 = 411 cycles
```

The end-to-end testbench measures **430 cycles** from `start` to the last
payload written in the global buffer. The 19 extra cycles come from:

- 3 cycles of buffer start-up;
- 7 cycles of skew before the bottom row starts;
- the PE → Gather Payload → network interface → local input port hand-off
  of the first packet.

The testbench accepts the range from 411 to 411 + delta + 2·ROWS + 10.

## Global buffer

The global buffer sits beyond the East edge. Row r's last router sends to it
through its East port, and a packet addresses it as column 8 of its row.
Per row and per VC the buffer tracks how many payloads are still expected:
`9 − ASpace` for a gather packet and 1 for a unicast packet. It appends
payloads to a 64-entry ring in arrival order and counts payloads
(`wr_count`) and packets (`pkt_count`). It is always ready and returns each
credit one cycle after the flit arrives. The host reads it combinationally
through `gb_rd_row` / `gb_rd_addr`.

Results carry no source tag. Within a single packet they arrive in
column order. A row served by several packets can interleave results.

## Using the top (`gather_cnn_accel`)

1. Write row i's input vector into the input buffer (`in_wr_*`, lane i) and
   column j's filter into the weight buffer (`w_wr_*`, lane j), addresses
   0 … len−1.
2. Set `delta_cfg`, then pulse `start` with `len = C·R·R` (at most 4608).
3. Wait until `gb_wr_count[r]` of every row has grown by 8. Read the
   results with `gb_rd_row` and `gb_rd_addr`.

Parameters, with their defaults:

- `ROWS = COLS = 8`;
- `SB_DEPTH = 4608`, which is 512·3·3, the largest C·R·R of the evaluated
  layers;
- `GB_DEPTH = 64`;
- `DW = 16`, the operand width;
- `DELTA_W = 8`.

Router sizes and the flit format are in `noc_pkg`.

## Module map

| module | role |
|---|---|
| `noc_pkg` | constants (Table-I sizes), header/flit structs, link and credit types |
| `gather_cnn_accel` | top: mesh, edge buffers, global buffer |
| `pe_mac` | output-stationary MAC PE, T_MAC = 5 |
| `stream_buffer` | edge buffer with per-lane skew (used for inputs and weights) |
| `router` | five-port VC router with gather support |
| `input_unit` | VC FIFOs, RC/VA/ACTIVE state, ASpace write-back, payload merge |
| `gather_load_gen` | the load condition and the slot index |
| `gather_payload` | payload holding, claim/ack/nack, delta timer |
| `route_compute` | XY routing, buffer column beyond the East edge |
| `vc_allocator` | round-robin output-VC allocation, released on tail |
| `switch_allocator` | separable input-first round-robin allocator |
| `crossbar` | 5x5 crossbar with registered outputs |
| `rr_arbiter` | round-robin arbiter |
| `gather_ni` | starts gather packets after a nack, ejects local traffic |
| `global_buffer` | per-row unpacking, ring storage, counters |

## Departures from the paper and own choices

- **Pipeline depth.** The paper's text describes a four-stage router, and
  its configuration table lists five stages. This design has four router
  stages plus one link cycle. With κ = 5 the paper's own latency estimate
  (its Table II: 2.92, 0.73, 0.68, 0.34, 0.51 for AlexNet Conv1–5)
  is reproduced exactly.
- **Multicast is not routed.** The header carries PT = multicast and the
  MDst bit string, but the paper gives no routing or replication rule. A
  multicast header is forwarded like a unicast packet to Dst. Operand
  delivery, which multicast would serve, is done by the systolic links.
- **Delta.** Delta is per-router and run-time. A uniform 5 gives no
  gathering in this timing (see above).
- **The following are this design's choices; the paper does not specify
  them:**
  - XY routing;
  - round-robin allocators;
  - fixed-priority load arbitration;
  - field widths;
  - 16-bit operands;
  - 32-bit wrapping accumulation;
  - asynchronous active-low reset;
  - upload on the read path;
  - one global-buffer port per row.
- **Not modelled:** power, and the repetitive-unicast baseline that the
  paper compares against.

## Limits

- The header fits at most an 8x8 mesh: a 3-bit row, a 4-bit column and a
  64-bit MDst. A 16x16 mesh would need wider coordinates and a 256-bit
  MDst, more than a 98-bit flit holds with this field list.
- A round must have C·R·R ≤ 4608. That covers every AlexNet layer and the
  VGG-16 layers up to 512x3x3.
- A layer is run as many rounds of 8 pixels x 8 filters, with the host
  reloading the buffers between rounds.
- The 32-bit accumulator can wrap for full-scale 16-bit data at large
  C·R·R.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

- compares the module against an independent reference model in the
  testbench;
- ends by printing `TB_RESULT checks=N failures=M`;
- has a watchdog.

Cycle counts are checked where the design fixes them:

- the 5-cycle hop (`tb_router`);
- MAC latency (`tb_pe_mac`);
- lane skew (`tb_stream_buffer`);
- timeout exactly delta cycles (`tb_gather_payload`);
- the round latency (`tb_gather_cnn_accel`).

`tb_gather_cnn_accel` runs the top at its default 8x8 size with no
parameter overrides, in eight rounds:

- **Round 1: C·R·R = 363**, one packet per row. The results and their
  order are checked, and the latency is checked against the formula above.
- **Round 2: C·R·R = 27**, with long timeouts only in the left half of each
  row. Rows are served by several packets.
- **Round 3: C·R·R = 9**, with delta = 5 everywhere. Every PE sends its own
  packet.
- **Rounds 4–8: C·R·R = 9**, with timeouts of `off + 4c` (off = 1…5). Each
  PE starts its packet just as the packet from its left neighbour arrives,
  so the two contend for the East output.

Every partial sum is compared with a value the testbench computes itself.
The testbench counts each mechanism and fails if one never happens:

- header loads;
- uploads;
- acks;
- nacks;
- self-started packets;
- multi-packet rows;
- output-VC allocation stalls;
- switch-allocation conflicts.

A run records:

- 80 loads, 80 uploads and 80 acks;
- 432 nacks and 432 self-started packets;
- 56 multi-packet rows;
- 1000 VA stalls;
- 1680 SA conflicts.

Simulating with Verilator 5 (the package first):

```
verilator --binary --timing -j 0 --top-module tb_gather_cnn_accel \
    rtl/noc_pkg.sv $(ls rtl/*.sv | grep -v noc_pkg) tb/tb_gather_cnn_accel.sv
./obj_dir/Vtb_gather_cnn_accel
```

Other testbenches work the same way with their own `--top-module`. The
full-size build takes a couple of minutes and the run a few seconds.
