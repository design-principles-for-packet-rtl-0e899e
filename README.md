# A graph-specialised packet deparser for FPGAs

A P4 pipeline ends with a *deparser*: it takes the packet header vector (PHV) that the
parser filled and the match-action stages modified, and turns it back into a byte stream.
Every header whose validity bit is set is written out, in a fixed order, with no gaps, and
the untouched payload follows directly after the last header. On a wide bus (64 bytes per
cycle at 512 bits) this means that each output byte can come from many PHV bytes, and the
payload has to be shifted by an amount that depends on which headers were emitted.

A general solution is a crossbar or barrel shifter that can move any PHV byte to any output
lane. This design avoids that. The set of header sequences a program can emit is known when
the hardware is generated: it is a small directed acyclic graph (the *deparser graph*) whose
start-to-end paths are the allowed header stacks. From that graph the RTL computes, at
elaboration time:

* for every output byte lane, the handful of PHV bytes that can ever appear on that lane,
  and in which order they follow each other from beat to beat. Each lane becomes a small
  state machine plus a multiplexer with exactly that many inputs;
* the handful of payload offsets (header length modulo bus width) that can occur. The
  payload rotator only implements those.

The result is a datapath of narrow multiplexers whose size follows the graph, not the bus
width squared.

The RTL is written for the T1 protocol stack: Ethernet (14 bytes), IPv4 (20), IPv6 (40),
TCP (20) and UDP (8). Two graphs over these headers are built in:

| `CFG`                  | paths | meaning                                                                 |
|------------------------|-------|-------------------------------------------------------------------------|
| `CFG_T1_PARSER_DAG` (default) | 7 | Ethernet; Ethernet-IPv4; Ethernet-IPv4-TCP; Ethernet-IPv4-UDP; Ethernet-IPv6; Ethernet-IPv6-TCP; Ethernet-IPv6-UDP |
| `CFG_T1_DEPARSER_DAG`  | 32    | every subset of the five headers (each emit may or may not happen), empty stack included |

The 7-path graph is the parser's own graph reused as deparser graph; it gives much smaller
lane multiplexers. The 32-path graph is what a deparser must support if the match-action
stages may add or remove any header.

## Block structure

```
              phv_data, phv_valid, phv_has_payload          s_axis (payload from the parser)
                         |                                       |
                  +------v------+                                |
                  | PHV buffers |  (2 slots)                     |
                  +------+------+                                |
                         |                                       |
               +---------v----------+  control word             |
               |   deparser_seq     |--(offset index, delay    |
               |  payload_ctrl_cam  |   mask, beat counts)     |
               +--+-------------+---+                          |
        start/step|             |beat tokens, payload pull <---+
         +--------v-----+  +----v-------------+
         | phv_shifters |  | payload_shifters |
         | W x header_  |  | W x payload_     |
         |   shifter    |  |   shifter        |
         +--------+-----+  +----+-------------+
                  | headers     | payload
                 +v-------------v+
                 |  deparser_    |
                 |  selector     |----> m_axis (Pkt_out)
                 +---------------+
```

| file | role |
|------|------|
| `rtl/deparser_pkg.sv` | header table, graphs, PHV layout, and the elaboration-time functions that derive lane sub-graphs and payload offsets |
| `rtl/header_shifter.sv` | one output byte lane of the header path: state machine + multiplexer over that lane's PHV bytes |
| `rtl/phv_shifters.sv` | W header lanes, the active-PHV register and the header-last flag |
| `rtl/payload_ctrl_cam.sv` | constant lookup table: valid vector -> payload offset, delay mask, beat counts |
| `rtl/payload_shifter.sv` | one output byte lane of the payload rotator (two multiplexer levels and a delay register) |
| `rtl/payload_shifters.sv` | W payload lanes and the payload capture register |
| `rtl/deparser_seq.sv` | PHV slots, control-word lookup, decides what each output beat is |
| `rtl/deparser_selector.sv` | per-lane choice between header and payload byte, output register |
| `rtl/deparser.sv` | top level |

## Lane state machines (header path)

This is the part that is least obvious. Fix the output bus at W bytes. A packet's headers
occupy packet bytes 0..L-1, so output lane `j` carries packet bytes `j, j+W, j+2W, ...` on
beats 0, 1, 2, .... For a given path through the graph, each of those packet bytes is one
specific PHV byte (say, byte 2 of IPv4). Collecting these over all paths gives, for lane
`j`, a small graph of its own: its nodes are the PHV bytes that can appear on lane `j`, and
an edge from node *a* to node *b* means "on some path, *b* is on lane `j` one beat after
*a*". Every lane gets a state machine whose state is the current node and a multiplexer
whose select is that state.

Example, 128-bit bus (W = 16), lane 0, 7-path graph. The byte positions of lane 0 are
0, 16, 32, 48, 64:

| path | beat 0 | beat 1 | beat 2 | beat 3 | beat 4 |
|------|--------|--------|--------|--------|--------|
| Eth (14 B) | Eth[0] | - | | | |
| Eth IPv4 (34 B) | Eth[0] | IPv4[2] | IPv4[18] | - | |
| Eth IPv4 TCP (54 B) | Eth[0] | IPv4[2] | IPv4[18] | TCP[14] | - |
| Eth IPv4 UDP (42 B) | Eth[0] | IPv4[2] | IPv4[18] | - | |
| Eth IPv6 (54 B) | Eth[0] | IPv6[2] | IPv6[18] | IPv6[34] | - |
| Eth IPv6 TCP (74 B) | Eth[0] | IPv6[2] | IPv6[18] | IPv6[34] | TCP[10] |
| Eth IPv6 UDP (62 B) | Eth[0] | IPv6[2] | IPv6[18] | IPv6[34] | - |

So lane 0 needs an 8-input multiplexer (Eth[0], IPv4[2], IPv4[18], TCP[14], IPv6[2],
IPv6[18], IPv6[34], TCP[10]) instead of one with all 102 PHV bytes as inputs. At the
branching node Eth[0] the next state depends on which headers are valid: IPv4 valid leads
to IPv4[2], IPv6 valid to IPv6[2], neither to the end.

How it is coded (`header_shifter.sv`):

* **State encoding.** State 0 means "no header byte on this lane" (end). State `b+1` means
  PHV byte `b`. The multiplexer input for state `b+1` is simply `phv_data[8*b +: 8]`, so
  decoding the state is the multiplexer select. Only PHV bytes that are nodes of the lane
  get hardware; `is_node()` decides this at elaboration.
* **Start.** On the first beat of a packet the lane loads the node at packet byte `j` of the
  path selected by `phv_valid` (`node_at()`).
* **Transitions.** An edge is labelled with the set of paths on which it is taken. At
  start, `phv_valid` is compared against every path of the graph and the one-hot match is
  kept for the whole packet (`hit_q`); each beat the next state is the OR over
  `(state == node) && hit_q[path]` of `next_node(path, node)`. This is equivalent to
  labelling edges with header validity conditions, and it stays unambiguous for any bus
  width and any graph.
* **Header last.** A lane is at its last node when the next state is 0. The frame's
  "last header beat" flag is taken from lane 0, which always holds a header byte on the
  final header beat.

A valid vector that matches no path of the graph leaves every lane at state 0; such a
packet is sent with no headers and `bad_phv` pulses for one cycle.

## Payload alignment

If the emitted headers are L bytes long, payload byte `i` belongs at packet byte `L+i`,
which is lane `(L+i) mod W` of beat `(L+i) div W`. With `off = L mod W`:

* output lane `j >= off` takes input lane `j - off` of the **current** payload beat;
* output lane `j < off` takes input lane `j - off + W` of the **previous** payload beat.

Each payload lane (`payload_shifter.sv`) therefore has a first multiplexer level (data and
keep) that selects the input lane `(j - off) mod W`, with one input per offset that the
graph can produce, a register holding that result, a delay register holding the previous
beat's result, and a second multiplexer level that takes the delayed value on lanes below
the offset. The second level's select bits (`dly_sel[j] = j < off`) and the first level's
offset index are the packet's *control word*.

The control words come from `payload_ctrl_cam.sv`, a constant table with one entry per path,
matched against the valid vector. Entry 0 of the offset list is always offset 0, used for
packets sent without headers.

Beats of a packet, with `q = L div W` and P payload bytes:

* beats `0 .. q-1` hold only headers;
* from beat `q` on, each output beat consumes one payload beat; beat `q` holds the header
  tail on lanes `< off` and the first payload bytes on lanes `>= off`;
* if the last payload beat has bytes on input lanes `>= W - off`, they only fit in one more
  beat. The sequencer then issues a *flush* beat that consumes no payload and outputs the
  delay registers. In total a packet takes `ceil((L + P) / W)` beats.

Example at 512 bits (W = 64), Ethernet-IPv4-TCP (L = 54, off = 54, q = 0) with 100 payload
bytes: beat 0 = 54 header bytes + payload 0..9; beat 1 = payload 10..63 (delayed) + payload
64..73; beat 2 (flush) = payload 74..99. Three beats = ceil(154/64).

On a packet's first beat the delayed keep bits are forced to 0, so nothing of the previous
packet appears under the headers. Beats that consume no payload capture keep 0, whatever the
payload bus holds at that moment.

## Sequencer, pipeline and timing

`deparser_seq.sv` turns each PHV into a series of beat tokens. It holds two PHV slots: slot
1 as received, slot 2 with the control word looked up from slot 1. From slot 2 it issues one
beat per cycle: header-only beats first, then one beat per payload beat (waiting for
`s_axis_tvalid` when the payload is late, and raising `s_axis_tready` only in a cycle that
consumes a payload beat), then the flush beat when needed. The next packet starts in the cycle
after the previous packet's last beat, so back-to-back packets leave no idle cycles on the
output. A PHV with no valid header and no payload produces no output and is dropped.

The datapath has six register stages:

| stage | register |
|-------|----------|
| 1 | PHV input buffer (slot 1) |
| 2 | PHV with its control word (slot 2) |
| 3 | header state machines load the start node / payload beat captured |
| 4 | lane multiplexer outputs (header byte; payload first level) |
| 5 | header alignment register / payload second level (delay select) |
| 6 | selector output register |

A PHV accepted in cycle t (with no stall and payload already waiting) produces its first
output beat in cycle t+6. A packet with L header bytes has its last header beat in cycle
`t + 5 + ceil(L/W)`, i.e. `ceil(L/W) + 6` cycles counting both the accept cycle and the
last beat. For all five T1 headers (102 bytes) that is 19, 13, 10 and 8 cycles at 64, 128,
256 and 512 bits.

Flow control: everything after the sequencer advances on one enable,
`en = !m_axis_tvalid || m_axis_tready`. When the output is stalled the whole datapath holds;
an output beat stays unchanged until it is taken (checked by assertions in `deparser.sv`).

## Interfaces

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `phv_tvalid` / `phv_tready` | in/out | 1 | PHV handshake |
| `phv_data` | in | 816 | PHV: header h at bytes `PHV_OFF(h)..`, headers packed in order Ethernet, IPv4, IPv6, TCP, UDP; PHV byte i = `phv_data[8*i +: 8]`, header byte 0 first on the wire |
| `phv_valid` | in | 5 | validity bit per header (bit 0 Ethernet, 1 IPv4, 2 IPv6, 3 TCP, 4 UDP) |
| `phv_has_payload` | in | 1 | a payload stream belongs to this PHV |
| `s_axis_*` | in/out | DATA_WIDTH | payload, AXI4-stream; first byte in lane 0, keep contiguous from lane 0; one stream per PHV with `phv_has_payload`, in PHV order |
| `m_axis_*` | out/in | DATA_WIDTH | output packets, AXI4-stream |
| `bad_phv` | out | 1 | one-cycle pulse: a valid vector on no path of the graph was sent without headers |

Parameters of `deparser`: `CFG` (graph, default `CFG_T1_PARSER_DAG`) and `DATA_WIDTH`
(bits, default 512; any multiple of 8 that is at least 64 works, e.g. 64, 128, 256, 512).

## Changing the graph or the headers

All graph knowledge is in `rtl/deparser_pkg.sv`:

1. `N_HDRS`, `HDR_BYTES` and `PHV_BYTES` list the headers in emit order and their sizes.
2. A graph is a list of paths, each written as the `phv_valid` value that selects it (see
   `PARSER_DAG_MASK`), with `n_paths()` and `path_mask()` returning its length and entries.
   Add an enumerator to `cfg_e` and a branch in these two functions.

Nothing else needs editing: the lane nodes, transitions, offset lists and control table are
all derived by the package functions during elaboration. Headers are always emitted in their
index order, so a graph in which the same headers can be emitted in two different orders
cannot be expressed as it stands.

## Verification

Each block has a self-checking testbench in `tb/`; each ends by printing
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_header_shifter` | lane state machines against a per-path byte reference at several lanes and widths, including the 8 nodes of lane 0 at 128 bits |
| `tb_phv_shifters` | whole header frames, keep and header-last, random paths and stalls |
| `tb_payload_ctrl_cam` | every valid vector against offsets, delay masks and beat counts computed in the bench |
| `tb_payload_shifters` | payload alignment, delay, flush beats and garbage on non-payload beats |
| `tb_deparser_selector` | merge of header and payload bytes, keep and last |
| `tb_deparser_seq` | beat token sequences, payload pulls, flush decisions, `bad_phv`, issue latency |
| `tb_deparser` | end to end: five configurations (both graphs, 64 to 512 bits) with random packets, payload gaps and output stalls, compared byte by byte against a reference model; counts flushes, mixed beats, header-only and header-less packets, off-graph PHVs, back-to-back packets and stalls, and fails if any never happened |
| `tb_deparser_full` | the same at the default parameters (7-path graph, 512 bits), 300 packets with payloads up to 1500 bytes |
| `tb_table1_latency` | worst-case header latency `ceil(L/W)+6` for both graphs at 64/128/256/512 bits, and one beat per cycle for back-to-back packets |

Run one with plain Verilator 5 (the benches produce some width warnings, hence
`-Wno-fatal`):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_deparser_full \
    rtl/deparser_pkg.sv rtl/*.sv tb/deparser_env.sv tb/tb_deparser_full.sv
./obj_dir/Vtb_deparser_full
```

For `tb_deparser` add `tb/deparser_pair.sv` as well. Unit benches need only the package and
the module files (`rtl/deparser_pkg.sv rtl/*.sv tb/<bench>.sv`). Simulation is two-state;
the benches reset everything they read. Building `tb_deparser` takes a few minutes because it
elaborates five deparsers.

## Where this design departs from its source description, and what to trust

The structure (per-lane header state machines over lane sub-graphs, a two-level payload
rotator with a delay register and a control table, a selector, six cycles of latency, the
latency formula) follows the published design. The following are this implementation's own
choices or departures:

* **Edge labels.** The original labels sub-graph edges with the validity of a header. Here a
  transition is labelled with the set of graph paths it belongs to, and the path is matched
  once per packet. The edges and node sets come out the same for the example graph; the
  matching logic may be larger than a per-header condition.
* **Byte lanes.** The source draws the header shifter, payload shifter and selector for a
  single bit. Since all headers here are whole bytes, one state machine per byte lane
  drives all 8 bits of that lane.
* **Payload multiplexer size.** In the source every input byte lane is an input of the first
  payload multiplexer level. Here only the lanes needed for offsets that the graph can
  produce are connected; for every offset that can occur the result is the same.
* **Header sizes and PHV layout.** Header sizes are the usual protocol sizes without
  options. The PHV byte layout (packed, in emit order) is a choice.
* **Stages.** Only the total latency (six cycles) is given by the source; the split into
  the six stages above is a choice.
* **Flush beat.** The source does not say how the bytes left in the delay registers after
  the last payload beat are sent; this design adds one beat.
* **Handshakes.** The PHV valid/ready handshake, the two-slot PHV buffer, the global output
  stall, and the `s_axis_tready` policy are choices; the source only says the payload and
  output are AXI4-stream.
* **Off-graph and empty PHVs.** Valid vectors that are on no path are sent without headers
  and flagged on `bad_phv`; PHVs with neither headers nor payload are dropped. The source is
  silent on both.
* **Control table.** Implemented as a combinational table matched against the valid vector,
  with the beat counts the sequencer needs added to each entry.
* **Not built.** The generator that derives the graph from a P4 program is replaced by the
  package functions and hand-written path lists. Only the T1 stack is configured; T2 (adds
  ICMP/ICMPv6) and T3 (adds two VLAN tags and two MPLS labels) would need their headers and
  paths added to the package. The parser and match-action stages that feed the deparser are
  outside this design. No resource or clock-rate figures have been measured for this RTL.

What has been checked: all blocks against independent references in simulation, end to end
at all four widths and both graphs with stalls and payload gaps, and the latency formula
cycle-exactly. Not checked: timing closure, resource usage, and any graph other than the two
built in.
