# A bus-aligned streaming packet parser for 100 Gb/s

A packet parser reads the headers at the front of a network packet. It
decides which protocol follows which, and copies each header into a table of
extracted fields, the *packet header vector* (PHV), for the match-action
stages behind it. At 100 Gb/s a packet arrives as a burst of wide bus words,
320 bits per cycle at 312.5 MHz. The parser must keep up with one word per
cycle and must never store the packet.

This RTL is a streaming parser built around one idea: **keep every header
at the top of a bus word.** Each stage of the pipeline handles one level of
the protocol graph (Ethernet, then VLAN, then ..., then TCP/UDP). A stage
that recognises its header copies it into its PHV entry, cuts it from the
stream, and realigns the rest. The header that follows therefore always
begins at bit 319 of the word that carries the packet-start flag. No stage
has to search for where its header begins. The next-header decision travels
with the packet as a small state code. Every key position, header size and
shift amount is then a property of the header alone. Those properties are
fixed when the design is elaborated, so the hardware only selects among
constant shifts and never builds a run-time barrel shifter.

The design follows a published FPGA parser architecture, described with
C++ templates for high-level synthesis. The SystemVerilog here is a
hand-written rendering of that architecture. Where it differs, the
differences are listed in [Departures from the reference architecture](#departures-from-the-reference-architecture).

## The stream and the PHV

Every stage passes a `stream_t` (defined in `parser_pkg`) to the next:

| field    | width | meaning |
|----------|-------|---------|
| `valid`  | 1     | word present this cycle |
| `sop`    | 1     | first word of the packet *as seen by this stage* |
| `eop`    | 1     | last word of the packet |
| `pkt_id` | 16    | packet identifier, unchanged through the pipeline |
| `nhdr`   | 4     | next-header state code; meaningful on the `sop` word |
| `data`   | 320   | bus word; the packet's first byte is in bits [319:312] |

A packet is a contiguous burst from `sop` to `eop`. Idle cycles may come
between packets, and packets may also run back to back. There is no
backpressure. Assertions in `packet_parser` check these input rules.

Each header instance produces a `phv_t`:

- `valid`: a one-cycle pulse.
- `hdr_id`: the header's state code.
- `pkt_id`.
- `nbits`: the number of header bits stored.
- `data`: a 480-bit container holding the header's first bit in its MSB.

The top module `packet_parser` provides one PHV entry per header instance.

State codes (`hdr_code_e`): ETH 1, VLAN_O 2, VLAN_I 3, MPLS1 4, MPLS2 5,
IPV4 6, IPV6 7, EXT1 8, EXT2 9, TCP 10, UDP 11, ICMP 12, ICMPV6 13,
END 15, NONE 0.

## Header layouts: the protocol as a parameter

A header instance is configured by a single `hdr_layout_t` parameter. The
packed struct holds:

- **Identity**: the state code (`id`).
- **Size**: a fixed size in bits, or the position and width of a size field
  plus the formula `size = (field + size_add) * size_mul`. For IPv4 that is
  IHL × 32. For an IPv6 extension header it is (len + 1) × 64. For TCP it is
  data offset × 32.
- **Next-header key**: bit offset, width and mask. There is also a table of
  up to 8 (value, next state) pairs and a default next state. A default of
  NONE means "no match is an error"; a default of END marks the last header.
- **PHV width**: how many of the header's bits are stored (`phv_bits`).

`parser_pkg` defines the thirteen layouts of the full parser (`LAY_ETH` …
`LAY_ICMPV6`). The key values are the standard EtherTypes and IP protocol
numbers. Two layouts need some explanation:

- **MPLS** has no next-protocol field. Its key is 13 bits starting at
  bit 23. Those bits are the bottom-of-stack bit, the TTL (masked off), and
  the first nibble after the label. Bottom-of-stack with nibble 4 leads to
  IPv4, and with nibble 6 to IPv6. A label that is not bottom-of-stack
  matches nothing and takes the default, which is the second MPLS stage.
- **IPv6 extension headers** are recognised by the IPv6 next-header values
  0, 43, 44 and 60.

Anything the hardware would otherwise compute from a header size is
computed from the layout by constant functions at elaboration time:

- the size ROM,
- the shift-tap ROM,
- the list of possible shift amounts,
- the key shift.

These tables are small. A 4-bit IHL field gives 16 entries, and the 8-bit
extension length field gives 256.

To add a protocol, write a new `localparam hdr_layout_t`, give it a state
code, and place a header block for it in a level of `packet_parser`.

## Inside a header block

`header_block` is one parser state. It contains three sub-blocks that look
at the same input word in parallel. Only one signal crosses between them
within the cycle: `valid_header`, which says whether this packet carries
this header.

### State transition (`state_transition`)

- On the `sop` word, the block compares the incoming `nhdr` with its own
  state code. The result is held for the rest of the packet.
- A bit counter (`ReceivedBits`) advances by 320 per word. When it reaches
  the word that holds the key, the comparison is enabled.
- The key is brought to the bottom of that word by a constant right shift,
  masked, and compared with all table entries in parallel. The first hit
  wins.
- A hit registers `next_hdr` and sets `next_hdr_valid`.
- With no hit, the default is registered. If there is no default,
  `hdr_exception` is set.

### Header extraction (`header_extraction` + `size_detector`)

- On the `sop` word, `size_detector` finds the header size. It either uses
  the fixed size, or looks up the size field's value in the size ROM.
- A word counter selects one of a few constant left shifts (`shiftValue[i]`).
  The shift places word *i* of the header at its position in the 480-bit
  container.
- The shifted word is masked to the header's stored bits and OR-ed into the
  PHV register. The `sop` word loads the register instead of OR-ing into it.
- The PHV pulses `valid` one cycle after the header's last word.

### Pipeline alignment (`pipeline_alignment` + `shift_amount`)

This is the hardest part of the design. Removing a header of *H* bits from a
stream of 320-bit words means three things:

1. Drop the first `D = H / 320` words of the packet. They hold nothing but
   header.
2. Build each output word from two input words: the tail of the registered
   word shifted left by `L = H % 320`, OR-ed with the head of the current
   input word shifted right by `320 − L`. The current word is used only if
   it continues the same packet (valid and not `sop`). This keeps
   back-to-back packets from mixing.
3. Move `sop` to output word index `D`. The registered next-header code goes
   with it.

`shift_amount` supplies L, 320 − L and D. For a fixed-size header they are
constants. For a variable-sized header they come from a ROM indexed by the
size field.

The alignment block latches these values on the packet's `sop` word. One
cycle later, when the registered word becomes the first output word, they
are ready.

The two shifters are *static*. The layout lists every distinct value of
`H % 320` the header can have; IPv4 has ten of them, 0 to 288 in steps of 32. Each value is wired as
a fixed shift, and the latched tap only selects one of them. That is a
multiplexer over a handful of constant rewirings, not a log-depth barrel
shifter.

When the packet does not carry this header, the block is a bypass. The
registered word goes out unchanged, with its own `sop` and next-header code.

The stream carries no byte count, and the alignment does not shorten a
packet by whole words except by the D dropped words. `eop` stays on the word
that carried it. After a header is removed, that last word may therefore
hold only zero padding. A packet whose every word lies inside a header
(nothing after it, and a header size that is a whole number of words) loses
its `eop` word with the dropped words. Real traffic always has bytes after
the last parsed header, so this does not arise in practice.

## Levels and the parse graph

`parser_level` holds the header blocks of one depth of the protocol graph.
All of them see the same input stream. Distinct state codes mean at most one
of them claims a packet. A multiplexer takes the claiming block's output, or
block 0's bypass output when none claims it. The result is registered.

The graph is first *balanced*. Every state is put on exactly one level, and
a packet that skips a level (for example a packet without VLAN tags) passes
that level in bypass. The full parser has nine levels:

```
L0 ETH -> L1 VLAN_O -> L2 VLAN_I -> L3 MPLS1 -> L4 MPLS2
       -> L5 IPV4 | IPV6 -> L6 EXT1 -> L7 EXT2
       -> L8 TCP | UDP | ICMP | ICMPV6
```

The *simple parser* covers Ethernet, IPv4/IPv6 with up to two extension
headers, and TCP/UDP/ICMP/ICMPv6. The full pipeline carries that traffic as
it stands, bypassing L1–L4. Setting `packet_parser #(.FULL_PARSER(0))`
builds the simple parser on its own:

- only levels L0 and L5–L8 remain, five levels in all;
- Ethernet leads only to IPv4 and IPv6 (`LAY_ETH_SIMPLE`), so a VLAN or MPLS
  EtherType raises an exception;
- the VLAN and MPLS PHV entries stay idle.

`phv[k]` of `packet_parser` is indexed ETH 0, VLAN_O 1, VLAN_I 2, MPLS1 3,
MPLS2 4, IPV4 5, IPV6 6, EXT1 7, EXT2 8, TCP 9, UDP 10, ICMP 11, ICMPV6 12.
`next_hdr_valid[k]` and `hdr_exception[k]` use the same order. `out` is the
packet after the transport header. It starts at the top of its `sop` word,
ready for a payload stage.

## Timing and latency

- **Throughput**: one 320-bit word per cycle. At 312.5 MHz that is 100 Gb/s.
  Every stage runs at the full rate with no gaps between packets.
- **Latency per level**: 2 cycles, one in the alignment register and one in
  the level register.
- **A header of one bus word or more** also takes the words it drops.
  Measured from the packet's first input word, the transport header's PHV
  pulses after `17 + Σ floor(H_i / 320)` cycles in the full parser, and
  after `9 + Σ floor(H_i / 320)` cycles in the simple parser. The sum runs
  over the headers before it. For most packets that is 54.4 ns and 28.8 ns.
- **PHV timing**: a header's PHV pulses one cycle after its last word
  enters its level. With no earlier headers of a word or more, level *n*
  (counted from 0) pulses `2n + 1 + (own words − 1)` cycles after the
  packet's first word enters the parser.

The reference architecture reports 19.2 ns (6 cycles) for the simple parser
and 25.6 ns (8 cycles) for the full parser. That architecture was produced
by high-level synthesis, which schedules registers on its own. This RTL
places a register at each point its block drawings show one: the alignment
register, and the register after each level's multiplexer. It is therefore
slower in cycles. Removing the level register would give one cycle per level
and longer combinational paths. The change is local to `parser_level`, but
it has not been made or verified.

No synthesis for an FPGA has been done, so the 312.5 MHz clock is a target,
not a measured result.

## Departures from the reference architecture

- **The bypass takes the registered word.** The alignment drawing feeds the
  bypass from the unregistered input. That would give bypassed and processed
  packets different latencies, and back-to-back packets would then collide.
- **Word drop and `sop` relocation.** These are this design's additions.
  Headers of 320 bits or more (IPv6; IPv4 with options; long extension
  headers) need them.
- **Default transitions.** A key miss takes a default state when the layout
  has one: MPLS without bottom-of-stack goes to the second MPLS stage, and
  transport headers go to END. Otherwise it raises `hdr_exception`. The
  packet then leaves the pipeline unparsed past that header.
- **Two cycles per level**, as explained above.
- **PHV widths.** IPv4 stores up to 480 bits (all options). IPv6 extension
  headers store their first 64 bits. TCP stores its first 160 bits. A
  5-tuple-only PHV would be a narrower `phv_bits` in the layouts.
- **Assumed details:** the bus and counter widths, the 16-bit packet ID, an
  asynchronous active-low reset, and no flow control.
- **Not provided:** the software flow that derives layouts and levels from a
  P4 program (compile, reduce the graph, balance it, emit instances). Here
  the thirteen layouts and the nine levels were written by hand, following
  that flow's result. The MAC or stream source that feeds the parser is not
  provided either.

## Verification and how far to trust it

Each module has a self-checking testbench in `tb/`. Expected values come
from packets built byte by byte from the protocol formats (`tb_pkt_pkg`),
not from the RTL's shifting logic.

| testbench | what it checks |
|---|---|
| `tb_size_detector` | size and size field for every field value (IPv4, ext, fixed) |
| `tb_shift_amount` | L, 320−L, D for every field value |
| `tb_state_transition` | header valid, key match, default, exception over random packets |
| `tb_header_extraction` | PHV contents, size, pulse cycle for IPv4 with 0..10 option words |
| `tb_pipeline_alignment` | realigned stream for extension headers of 8..104 bytes, back-to-back |
| `tb_header_block` | one IPv4 instance end to end |
| `tb_parser_level` | IPv4/IPv6 level, including bypass of other packets |
| `tb_packet_parser` | full parser at default size |
| `tb_simple_parser` | simple-parser build (`FULL_PARSER = 0`); VLAN/MPLS EtherTypes must raise exceptions, and the idle entries must stay idle |

`tb_packet_parser` uses the default parameters and sends 2000 random packets
over every path of the graph:

- plain, single VLAN, double VLAN, one or two MPLS labels, VLAN+MPLS;
- IPv4 with 0–10 option words;
- IPv6 with 0–2 extension headers;
- TCP with options, UDP, ICMP, ICMPv6;
- unknown EtherTypes.

Packets are sent back to back or with idle gaps. The testbench checks:

- every PHV pulse: header, packet, size and bytes;
- every word of the realigned output stream;
- the transport-PHV latency formula above.

It also counts that bypass, variable-sized headers, multi-word headers,
default transitions, exceptions and back-to-back packets all occurred.

Not covered:

- traffic with idle cycles *inside* a packet, which the stream format does
  not allow;
- packets that end at a header boundary;
- timing closure and resource use.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/parser_pkg.sv tb/tb_pkt_pkg.sv tb/tb_packet_parser.sv \
    --top-module tb_packet_parser
./obj_dir/Vtb_packet_parser
```

Replace the testbench name to run another one. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops. A watchdog ends it with a
failure if it hangs. The full-parser run takes a few seconds.

## Files

| file | contents |
|---|---|
| `rtl/parser_pkg.sv` | widths, state codes, `stream_t`, `phv_t`, `hdr_layout_t`, the layouts (thirteen, plus the simple parser's Ethernet) |
| `rtl/state_transition.sv` | key location, key match, next state, exception |
| `rtl/size_detector.sv` | header size from the layout's size field (size ROM) |
| `rtl/header_extraction.sv` | PHV accumulation with static shifts |
| `rtl/shift_amount.sv` | shift-tap and word-drop ROM |
| `rtl/pipeline_alignment.sv` | header removal and realignment |
| `rtl/header_block.sv` | one parser state |
| `rtl/parser_level.sv` | parallel header blocks, multiplexer, level register |
| `rtl/packet_parser.sv` | nine-level full parser, or five-level simple parser with `FULL_PARSER = 0` |
| `tb/tb_pkt_pkg.sv` | packet builder and reference functions |
| `tb/tb_*.sv` | testbenches, one per module |
