// tb_pkt_pkg: packet builder and reference model shared by the testbenches.
//
// Packets are built as byte queues from the protocol formats (Ethernet,
// VLAN, MPLS, IPv4, IPv6, IPv6 extension, TCP, UDP, ICMP) and cut into
// 320-bit bus words, first byte in the most significant byte. The reference
// functions work on the byte queue directly (header bytes at a known byte
// offset), independently of the shifting logic under test.
package tb_pkt_pkg;
  import parser_pkg::*;

  typedef byte unsigned bq_t[$];

  localparam int BYTES_PER_WORD = BUS_W / 8;

  function automatic void push16(ref bq_t q, input int v);
    q.push_back(8'(v >> 8));
    q.push_back(8'(v));
  endfunction

  function automatic void push_rand(ref bq_t q, input int n);
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
  endfunction

  function automatic void add_eth(ref bq_t q, input int etype);
    push_rand(q, 12);
    push16(q, etype);
  endfunction

  function automatic void add_vlan(ref bq_t q, input int etype);
    push_rand(q, 2);
    push16(q, etype);
  endfunction

  // MPLS label stack entry: label(20) tc(3) s(1) ttl(8)
  function automatic void add_mpls(ref bq_t q, input bit s);
    int unsigned v;
    v = ($urandom & 32'hFFFFFEFF) | (32'(s) << 8);
    for (int i = 3; i >= 0; i--) q.push_back(8'(v >> (8 * i)));
  endfunction

  function automatic void add_ipv4(ref bq_t q, input int ihl, int proto);
    q.push_back(8'(8'h40 | ihl));
    push_rand(q, 8);
    q.push_back(8'(proto));
    push_rand(q, ihl * 4 - 10);
  endfunction

  function automatic void add_ipv6(ref bq_t q, input int nh);
    q.push_back(8'h60);
    push_rand(q, 5);
    q.push_back(8'(nh));
    push_rand(q, 33);
  endfunction

  // IPv6 extension header, (len+1)*8 bytes.
  function automatic void add_ext(ref bq_t q, input int nh, int len);
    q.push_back(8'(nh));
    q.push_back(8'(len));
    push_rand(q, (len + 1) * 8 - 2);
  endfunction

  function automatic void add_tcp(ref bq_t q, input int doff);
    push_rand(q, 12);
    q.push_back(8'(doff << 4));
    push_rand(q, doff * 4 - 13);
  endfunction

  function automatic void add_udp(ref bq_t q);
    push_rand(q, 8);
  endfunction

  // Number of bus words a packet of n bytes takes.
  function automatic int nwords(int n);
    return (n + BYTES_PER_WORD - 1) / BYTES_PER_WORD;
  endfunction

  // Bus word w of the packet (bytes past the end are zero).
  function automatic word_t word_of(input bq_t q, int w);
    word_t d;
    d = '0;
    for (int b = 0; b < BYTES_PER_WORD; b++)
      if (w * BYTES_PER_WORD + b < q.size())
        d[BUS_W - 1 - 8 * b -: 8] = q[w * BYTES_PER_WORD + b];
    return d;
  endfunction

  // Expected PHV data: nbytes header bytes starting at byte off, first byte
  // at the container's top, the rest zero.
  function automatic logic [PHV_W-1:0] phv_of(input bq_t q, int off, int nbytes);
    logic [PHV_W-1:0] d;
    d = '0;
    for (int b = 0; b < nbytes && 8 * b < PHV_W; b++)
      d[PHV_W - 1 - 8 * b -: 8] = q[off + b];
    return d;
  endfunction

  // Bytes of q from byte off on, as a new queue.
  function automatic bq_t tail_of(input bq_t q, int off);
    bq_t t;
    for (int i = off; i < q.size(); i++) t.push_back(q[i]);
    return t;
  endfunction

endpackage
