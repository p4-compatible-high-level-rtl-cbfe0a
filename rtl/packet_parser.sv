// packet_parser: streaming packet parser for the "full parser" header set,
// a 320-bit, 100 Gb/s pipeline with one stage per level of the balanced
// parse graph.
//
// Parse graph after balancing (every state sits on one level, a packet that
// does not use a level passes it in bypass):
//   L0 Ethernet -> L1 VLAN (outer) -> L2 VLAN (inner) -> L3 MPLS -> L4 MPLS
//   -> L5 IPv4 | IPv6 -> L6 IPv6 ext -> L7 IPv6 ext
//   -> L8 TCP | UDP | ICMP | ICMPv6 -> accept
// FULL_PARSER = 0 builds the "simple parser" instead (Ethernet, IPv4/IPv6
// with two extension headers, TCP, UDP, ICMP/ICMPv6): levels L1..L4 are left
// out, Ethernet leads only to IPv4 and IPv6, and the VLAN and MPLS PHV
// entries stay idle. The pipeline is then five levels deep.
//
// Interface and timing: packets enter as contiguous bursts of 320-bit words
// (first byte in bits [319:312]) with sop/eop flags and a packet identifier;
// no backpressure, one word per cycle. Assertions check these input rules
// (no gap inside a packet, every packet opens with sop). Each level adds two
// cycles of latency.
// phv[k] is the extracted-header entry of header instance k, in the order
// ETH, VLAN_O, VLAN_I, MPLS1, MPLS2, IPV4, IPV6, EXT1, EXT2, TCP, UDP, ICMP,
// ICMPV6; it pulses valid once per packet that carries the header. out is
// the stream after the last level, aligned on the first byte after the
// transport header, with sop on its first word.
//
// The level structure comes from the paper's pipeline-generation flow; the
// header layouts (keys, sizes, tables) are taken from the protocol
// standards and are this design's writing of the paper's header set.
module packet_parser
  import parser_pkg::*;
#(
  parameter bit FULL_PARSER = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sop,
  input  logic                 in_eop,
  input  pkt_id_t              in_pkt_id,
  input  word_t                in_data,
  output stream_t              out,
  output phv_t   [NHDRS-1:0]   phv,
  output logic   [NHDRS-1:0]   next_hdr_valid,
  output logic   [NHDRS-1:0]   hdr_exception
);

  localparam int NLEVELS = 9;

  stream_t s [NLEVELS+1];

  always_comb begin
    s[0].valid  = in_valid;
    s[0].sop    = in_sop;
    s[0].eop    = in_eop;
    s[0].pkt_id = in_pkt_id;
    s[0].nhdr   = H_ETH;     // every packet starts with Ethernet
    s[0].data   = in_data;
  end

  parser_level #(.N(1), .LAYOUTS(FULL_PARSER ? LAY_ETH : LAY_ETH_SIMPLE)) u_l0 (
    .clk(clk), .rst_n(rst_n), .in(s[0]), .out(s[1]),
    .phv(phv[0:0]), .next_hdr_valid(next_hdr_valid[0:0]), .hdr_exception(hdr_exception[0:0]));

  if (FULL_PARSER) begin : g_l2_tags
    parser_level #(.N(1), .LAYOUTS(LAY_VLAN_O)) u_l1 (
      .clk(clk), .rst_n(rst_n), .in(s[1]), .out(s[2]),
      .phv(phv[1:1]), .next_hdr_valid(next_hdr_valid[1:1]), .hdr_exception(hdr_exception[1:1]));

    parser_level #(.N(1), .LAYOUTS(LAY_VLAN_I)) u_l2 (
      .clk(clk), .rst_n(rst_n), .in(s[2]), .out(s[3]),
      .phv(phv[2:2]), .next_hdr_valid(next_hdr_valid[2:2]), .hdr_exception(hdr_exception[2:2]));

    parser_level #(.N(1), .LAYOUTS(LAY_MPLS1)) u_l3 (
      .clk(clk), .rst_n(rst_n), .in(s[3]), .out(s[4]),
      .phv(phv[3:3]), .next_hdr_valid(next_hdr_valid[3:3]), .hdr_exception(hdr_exception[3:3]));

    parser_level #(.N(1), .LAYOUTS(LAY_MPLS2)) u_l4 (
      .clk(clk), .rst_n(rst_n), .in(s[4]), .out(s[5]),
      .phv(phv[4:4]), .next_hdr_valid(next_hdr_valid[4:4]), .hdr_exception(hdr_exception[4:4]));
  end else begin : g_no_l2_tags
    assign s[5] = s[1];
    assign s[4] = s[1];
    assign s[3] = s[1];
    assign s[2] = s[1];
    assign phv[4:1]            = '0;
    assign next_hdr_valid[4:1] = '0;
    assign hdr_exception[4:1]  = '0;
  end

  parser_level #(.N(2), .LAYOUTS({LAY_IPV6, LAY_IPV4})) u_l5 (
    .clk(clk), .rst_n(rst_n), .in(s[5]), .out(s[6]),
    .phv(phv[6:5]), .next_hdr_valid(next_hdr_valid[6:5]), .hdr_exception(hdr_exception[6:5]));

  parser_level #(.N(1), .LAYOUTS(LAY_EXT1)) u_l6 (
    .clk(clk), .rst_n(rst_n), .in(s[6]), .out(s[7]),
    .phv(phv[7:7]), .next_hdr_valid(next_hdr_valid[7:7]), .hdr_exception(hdr_exception[7:7]));

  parser_level #(.N(1), .LAYOUTS(LAY_EXT2)) u_l7 (
    .clk(clk), .rst_n(rst_n), .in(s[7]), .out(s[8]),
    .phv(phv[8:8]), .next_hdr_valid(next_hdr_valid[8:8]), .hdr_exception(hdr_exception[8:8]));

  parser_level #(.N(4), .LAYOUTS({LAY_ICMPV6, LAY_ICMP, LAY_UDP, LAY_TCP})) u_l8 (
    .clk(clk), .rst_n(rst_n), .in(s[8]), .out(s[9]),
    .phv(phv[12:9]), .next_hdr_valid(next_hdr_valid[12:9]), .hdr_exception(hdr_exception[12:9]));

  assign out = s[9];

  // Input stream rules: a packet is a contiguous burst of valid words from
  // sop to eop, and a valid word outside a packet must start one.
  logic in_pkt_q;   // a packet is open: sop seen, eop not yet
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        in_pkt_q <= 1'b0;
    else if (in_valid) in_pkt_q <= (in_sop || in_pkt_q) && !in_eop;
  end

  a_flags_need_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (in_sop || in_eop) |-> in_valid);
  a_burst_contiguous: assert property (@(posedge clk) disable iff (!rst_n)
    in_pkt_q |-> (in_valid && !in_sop));
  a_burst_starts_sop: assert property (@(posedge clk) disable iff (!rst_n)
    (!in_pkt_q && in_valid) |-> in_sop);

endmodule
