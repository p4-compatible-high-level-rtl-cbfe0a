// parser_pkg: shared constants, types and the header layouts of the streaming
// packet parser.
//
// The parser is a chain of pipeline levels. Each level holds one header
// block per protocol that can appear at that depth of the parse graph. A
// header block is configured entirely by a constant "header layout": the
// protocol's state identifier, where its next-header key sits, the table of
// key values and the states they lead to, and how its size is found (fixed,
// or read from a size field of the header and looked up in a table filled at
// elaboration time). This package defines that layout type and the layouts of
// the headers used by the full parser (Ethernet, two VLAN tags, two MPLS
// labels, IPv4, IPv6, two IPv6 extension headers, TCP, UDP, ICMP, ICMPv6),
// plus the Ethernet layout of the simple parser, which leads only to IPv4
// and IPv6.
//
// Conventions shared by all modules:
//  * The data bus is BUS_W bits wide (320 bits, which at 312.5 MHz gives the
//    100 Gb/s rate of the design). The first byte of the word in time order
//    sits in the most significant byte, bits [BUS_W-1 -: 8].
//  * A packet is a contiguous burst of valid words, the first flagged sop and
//    the last eop. A packet identifier travels with every word.
//  * Offsets inside a header are counted in bits from the first bit of the
//    header (bit 0 = most significant bit of the header's first byte).
//  * The next-header code that travels beside the sop word names the parser
//    state (header block) that must process the header starting there.
// Bus width, data-out alignment and PHV content follow the paper; the
// identifier widths, the PHV width and the exact encodings are this design's
// own choices.
package parser_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int BUS_W      = 320;   // data bus width (paper: 320 bits)
  localparam int HID_W      = 4;     // parser-state identifier width
  localparam int PKT_ID_W   = 16;    // packet identifier width
  localparam int PHV_W      = 480;   // PHV data container (largest IPv4 header)
  localparam int MAX_KEYS   = 8;     // entries in a key-match table
  localparam int KEY_W      = 16;    // widest next-header key (EtherType)
  localparam int SIZE_W     = 16;    // header sizes and bit offsets
  localparam int WCNT_W     = 12;    // word counters inside a packet
  localparam int SH_W       = $clog2(BUS_W + 1); // shift amounts 0..BUS_W
  localparam int SF_W       = 8;     // widest header-size field
  localparam int NHDRS      = 13;    // header instances in the full parser

  typedef logic [HID_W-1:0]    hid_t;
  typedef logic [PKT_ID_W-1:0] pkt_id_t;
  typedef logic [BUS_W-1:0]    word_t;
  typedef logic [SIZE_W-1:0]   size_t;
  typedef logic [WCNT_W-1:0]   wcnt_t;
  typedef logic [SH_W-1:0]     shamt_t;

  // ---------------------------------------------------------- state codes
  typedef enum logic [HID_W-1:0] {
    H_NONE   = 4'd0,   // no header: parsing stopped (exception)
    H_ETH    = 4'd1,
    H_VLAN_O = 4'd2,
    H_VLAN_I = 4'd3,
    H_MPLS1  = 4'd4,
    H_MPLS2  = 4'd5,
    H_IPV4   = 4'd6,
    H_IPV6   = 4'd7,
    H_EXT1   = 4'd8,
    H_EXT2   = 4'd9,
    H_TCP    = 4'd10,
    H_UDP    = 4'd11,
    H_ICMP   = 4'd12,
    H_ICMPV6 = 4'd13,
    H_END    = 4'd15   // accept state: parsing finished
  } hdr_code_e;

  // ------------------------------------------------------ stream and PHV
  typedef struct packed {
    logic    valid;
    logic    sop;
    logic    eop;
    pkt_id_t pkt_id;
    hid_t    nhdr;     // next header, meaningful on the sop word
    word_t   data;
  } stream_t;

  typedef struct packed {
    logic             valid;   // one-cycle pulse when the header is complete
    hid_t             hdr_id;
    pkt_id_t          pkt_id;
    size_t            nbits;   // bits of header held in data
    logic [PHV_W-1:0] data;    // header, first bit at data[PHV_W-1]
  } phv_t;

  // --------------------------------------------------------- header layout
  typedef struct packed {
    hid_t                                id;          // thisHeader
    // size
    logic                                var_size;    // size read from a field
    size_t                               fixed_size;  // bits, if !var_size
    size_t                               size_off;    // bit offset of size field
    logic [3:0]                          size_fw;     // size field width (<= SF_W)
    logic [7:0]                          size_add;    // size = (field+add)*mul
    size_t                               size_mul;
    // next-header key
    size_t                               key_off;     // bit offset of the key
    logic [4:0]                          key_w;       // key width (<= KEY_W)
    logic [KEY_W-1:0]                    key_mask;    // KeyMask
    logic [3:0]                          num_keys;
    logic [MAX_KEYS-1:0][KEY_W-1:0]      key_val;
    logic [MAX_KEYS-1:0][HID_W-1:0]      key_next;
    hid_t                                dflt_next;   // no match: H_NONE = exception
    size_t                               phv_bits;    // bits kept in the PHV
  } hdr_layout_t;

  // Helpers to keep the layout table readable.
  function automatic hdr_layout_t fixed_hdr(hid_t id, int size_bits);
    hdr_layout_t l;
    l = '0;
    l.id         = id;
    l.fixed_size = size_t'(size_bits);
    l.phv_bits   = size_t'((size_bits < PHV_W) ? size_bits : PHV_W);
    l.dflt_next  = H_END;
    l.key_mask   = '1;
    return l;
  endfunction

  function automatic hdr_layout_t with_key(hdr_layout_t l, int off, int w,
                                           logic [KEY_W-1:0] mask, hid_t dflt);
    l.key_off   = size_t'(off);
    l.key_w     = 5'(w);
    l.key_mask  = mask;
    l.dflt_next = dflt;
    return l;
  endfunction

  function automatic hdr_layout_t add_key(hdr_layout_t l, logic [KEY_W-1:0] v,
                                          hid_t nxt);
    l.key_val[l.num_keys]  = v;
    l.key_next[l.num_keys] = nxt;
    l.num_keys             = l.num_keys + 4'd1;
    return l;
  endfunction

  function automatic hdr_layout_t with_var_size(hdr_layout_t l, int off, int fw,
                                                int add, int mul, int phv_bits);
    l.var_size = 1'b1;
    l.size_off = size_t'(off);
    l.size_fw  = 4'(fw);
    l.size_add = 8'(add);
    l.size_mul = size_t'(mul);
    l.phv_bits = size_t'(phv_bits);
    return l;
  endfunction

  // Size in bits of a header whose size field holds v.
  function automatic int size_of_field(hdr_layout_t l, int v);
    if (!l.var_size) return int'(l.fixed_size);
    return (v + int'(l.size_add)) * int'(l.size_mul);
  endfunction

  // Ethernet: 14 bytes, EtherType at byte 12.
  function automatic hdr_layout_t l2_next(hdr_layout_t l);
    l = add_key(l, 16'h8100, H_VLAN_O);
    l = add_key(l, 16'h88A8, H_VLAN_O);
    l = add_key(l, 16'h8847, H_MPLS1);
    l = add_key(l, 16'h0800, H_IPV4);
    l = add_key(l, 16'h86DD, H_IPV6);
    return l;
  endfunction

  function automatic hdr_layout_t l4_next(hdr_layout_t l, logic v6);
    l = add_key(l, 16'd6,  H_TCP);
    l = add_key(l, 16'd17, H_UDP);
    l = add_key(l, v6 ? 16'd58 : 16'd1, v6 ? H_ICMPV6 : H_ICMP);
    return l;
  endfunction

  function automatic hdr_layout_t ext_next(hdr_layout_t l, hid_t ext_state);
    l = add_key(l, 16'd0,  ext_state);  // hop-by-hop options
    l = add_key(l, 16'd43, ext_state);  // routing
    l = add_key(l, 16'd44, ext_state);  // fragment
    l = add_key(l, 16'd60, ext_state);  // destination options
    return l;
  endfunction

  // ------------------------------------------------------------- layouts
  localparam hdr_layout_t LAY_ETH =
    l2_next(with_key(fixed_hdr(H_ETH, 112), 96, 16, 16'hFFFF, H_NONE));

  // Ethernet for the simple parser: only IPv4 and IPv6 follow.
  localparam hdr_layout_t LAY_ETH_SIMPLE =
    add_key(add_key(with_key(fixed_hdr(H_ETH, 112), 96, 16, 16'hFFFF, H_NONE),
                    16'h0800, H_IPV4), 16'h86DD, H_IPV6);

  // VLAN tag seen after the MAC addresses: TCI then EtherType (4 bytes).
  localparam hdr_layout_t LAY_VLAN_O =
    add_key(add_key(add_key(add_key(
      with_key(fixed_hdr(H_VLAN_O, 32), 16, 16, 16'hFFFF, H_NONE),
      16'h8100, H_VLAN_I), 16'h8847, H_MPLS1), 16'h0800, H_IPV4), 16'h86DD, H_IPV6);

  localparam hdr_layout_t LAY_VLAN_I =
    add_key(add_key(add_key(
      with_key(fixed_hdr(H_VLAN_I, 32), 16, 16, 16'hFFFF, H_NONE),
      16'h8847, H_MPLS1), 16'h0800, H_IPV4), 16'h86DD, H_IPV6);

  // MPLS label stack entry (4 bytes). The key is 13 bits from bit 23: the
  // bottom-of-stack bit, 8 TTL bits (masked off) and the first nibble after
  // the label, which tells IPv4 from IPv6 once the stack ends.
  localparam hdr_layout_t LAY_MPLS1 =
    add_key(add_key(
      with_key(fixed_hdr(H_MPLS1, 32), 23, 13, 16'h100F, H_MPLS2),
      16'h1004, H_IPV4), 16'h1006, H_IPV6);

  localparam hdr_layout_t LAY_MPLS2 =
    add_key(add_key(
      with_key(fixed_hdr(H_MPLS2, 32), 23, 13, 16'h100F, H_NONE),
      16'h1004, H_IPV4), 16'h1006, H_IPV6);

  // IPv4: protocol at byte 9, size = IHL * 32 bits (IHL: bits 4..7).
  localparam hdr_layout_t LAY_IPV4 =
    l4_next(with_var_size(with_key(fixed_hdr(H_IPV4, 160), 72, 8, 16'h00FF, H_NONE),
                          4, 4, 0, 32, PHV_W), 1'b0);

  // IPv6: 40 bytes, next header at byte 6.
  localparam hdr_layout_t LAY_IPV6 =
    l4_next(ext_next(with_key(fixed_hdr(H_IPV6, 320), 48, 8, 16'h00FF, H_NONE),
                     H_EXT1), 1'b1);

  // IPv6 extension header: next header at byte 0, size = (len+1)*64 bits
  // with len in byte 1. The PHV keeps the first 64 bits.
  localparam hdr_layout_t LAY_EXT1 =
    l4_next(ext_next(with_var_size(with_key(fixed_hdr(H_EXT1, 64), 0, 8, 16'h00FF, H_NONE),
                                   8, 8, 1, 64, 64), H_EXT2), 1'b1);

  localparam hdr_layout_t LAY_EXT2 =
    l4_next(with_var_size(with_key(fixed_hdr(H_EXT2, 64), 0, 8, 16'h00FF, H_NONE),
                          8, 8, 1, 64, 64), 1'b1);

  // TCP: size = data offset * 32 bits (bits 96..99); the PHV keeps 160 bits.
  localparam hdr_layout_t LAY_TCP =
    with_var_size(fixed_hdr(H_TCP, 160), 96, 4, 0, 32, 160);

  localparam hdr_layout_t LAY_UDP    = fixed_hdr(H_UDP, 64);
  localparam hdr_layout_t LAY_ICMP   = fixed_hdr(H_ICMP, 64);
  localparam hdr_layout_t LAY_ICMPV6 = fixed_hdr(H_ICMPV6, 64);

endpackage
