// tb_packet_parser: end-to-end test of the full parser at its default size
// (320-bit bus, nine levels, thirteen header instances).
//
// Random packets mixing every header path of the parse graph (plain,
// single and double VLAN, one or two MPLS labels, IPv4 with 0..10 option
// words, IPv6 with 0..2 extension headers, TCP/UDP/ICMP/ICMPv6, unknown
// EtherType) are streamed back to back or with idle gaps. A reference model
// built from the packet bytes predicts, per header instance, the sequence of
// PHV entries (header id, packet id, size, bytes), and for the output stream
// the bytes that follow the transport header. The testbench checks every
// PHV pulse, every output word, the latency from packet start to the
// transport-header PHV (2 cycles per level: 17 cycles, plus one cycle
// for every whole bus word taken by an earlier header) and that each
// mechanism (bypass, variable size, multi-word header, default transition,
// exception, back-to-back packets) happened at least once.
`timescale 1ns/1ps
module tb_packet_parser;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  localparam int NPKT     = 2000;
  localparam int LAT_L4   = 17;

  logic clk = 1'b0;
  logic rst_n;
  always #1.6 clk = ~clk;   // 312.5 MHz

  logic    in_valid, in_sop, in_eop;
  pkt_id_t in_pkt_id;
  word_t   in_data;
  stream_t out;
  phv_t    [NHDRS-1:0] phv;
  logic    [NHDRS-1:0] nh_valid, hdr_exc;

  packet_parser dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sop(in_sop), .in_eop(in_eop),
    .in_pkt_id(in_pkt_id), .in_data(in_data), .out(out), .phv(phv),
    .next_hdr_valid(nh_valid), .hdr_exception(hdr_exc));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Expected PHV entries per header instance.
  typedef struct {
    int                id;
    int                nbits;
    logic [PHV_W-1:0]  data;
  } exp_phv_t;
  exp_phv_t exp_q [NHDRS][$];

  bq_t    tails [int];        // expected output bytes per packet id
  longint t_sop [int];
  int     out_word_idx [int];
  bit     parsed [int];       // packet reaches the transport header
  int     lat_extra [int];    // words dropped by headers of a bus width or more

  // mechanism counters
  int n_bypass = 0, n_varsize = 0, n_multiword = 0, n_default = 0, n_exc = 0,
      n_b2b = 0, n_l4 = 0;

  function automatic void expect_hdr(int k, int id, input bq_t q, int off,
                                     int hbytes, int keep_bytes);
    exp_phv_t e;
    int kb;
    kb = (hbytes < keep_bytes) ? hbytes : keep_bytes;
    if (k < 9) lat_extra[id] = (lat_extra.exists(id) ? lat_extra[id] : 0) + hbytes / BYTES_PER_WORD;
    e.id    = id;
    e.nbits = kb * 8;
    e.data  = phv_of(q, off, kb);
    exp_q[k].push_back(e);
  endfunction

  // Build one random packet and its expectations.
  function automatic bq_t make_packet(int id);
    bq_t q;
    int off, l2, l3, l4, ihl, next_l3, n_ext, ext_len[2], doff, et;
    bit exc;
    exc = ($urandom_range(0, 19) == 0);
    l2  = $urandom_range(0, 5);
    l3  = $urandom_range(0, 1);
    l4  = $urandom_range(0, 2);
    // L2
    if (exc) begin
      add_eth(q, 16'h88B5);                       // unknown EtherType
      expect_hdr(0, id, q, 0, 14, 14);
      push_rand(q, $urandom_range(30, 90));
      tails[id] = tail_of(q, 14);
      parsed[id] = 0;
      return q;
    end
    next_l3 = l3 ? 16'h86DD : 16'h0800;
    case (l2)
      0: add_eth(q, next_l3);
      1: begin add_eth(q, 16'h8100); add_vlan(q, next_l3); end
      2: begin add_eth(q, 16'h88A8); add_vlan(q, 16'h8100); add_vlan(q, next_l3); end
      3: begin add_eth(q, 16'h8847); add_mpls(q, 1'b1); end
      4: begin add_eth(q, 16'h8847); add_mpls(q, 1'b0); add_mpls(q, 1'b1); end
      default: begin add_eth(q, 16'h8100); add_vlan(q, 16'h8847); add_mpls(q, 1'b1); end
    endcase
    expect_hdr(0, id, q, 0, 14, 14);
    off = 14;
    case (l2)
      1: begin expect_hdr(1, id, q, off, 4, 4); off += 4; end
      2: begin expect_hdr(1, id, q, off, 4, 4); expect_hdr(2, id, q, off + 4, 4, 4); off += 8; end
      3: begin expect_hdr(3, id, q, off, 4, 4); off += 4; end
      4: begin expect_hdr(3, id, q, off, 4, 4); expect_hdr(4, id, q, off + 4, 4, 4); off += 8; end
      5: begin expect_hdr(1, id, q, off, 4, 4); expect_hdr(3, id, q, off + 4, 4, 4); off += 8; end
      default: ;
    endcase
    // L3
    if (!l3) begin
      ihl = $urandom_range(5, 15);
      add_ipv4(q, ihl, (l4 == 0) ? 6 : (l4 == 1) ? 17 : 1);
      expect_hdr(5, id, q, off, ihl * 4, 60);
      off += ihl * 4;
    end else begin
      n_ext = $urandom_range(0, 2);
      for (int i = 0; i < 2; i++) ext_len[i] = $urandom_range(0, 6);
      add_ipv6(q, (n_ext > 0) ? 43 : (l4 == 0) ? 6 : (l4 == 1) ? 17 : 58);
      expect_hdr(6, id, q, off, 40, 40);
      off += 40;
      for (int i = 0; i < n_ext; i++) begin
        add_ext(q, (i + 1 < n_ext) ? 60 : (l4 == 0) ? 6 : (l4 == 1) ? 17 : 58, ext_len[i]);
        expect_hdr(7 + i, id, q, off, (ext_len[i] + 1) * 8, 8);
        off += (ext_len[i] + 1) * 8;
      end
    end
    // L4
    case (l4)
      0: begin
        doff = $urandom_range(5, 10);
        add_tcp(q, doff);
        expect_hdr(9, id, q, off, doff * 4, 20);
        off += doff * 4;
      end
      1: begin add_udp(q); expect_hdr(10, id, q, off, 8, 8); off += 8; end
      default: begin
        add_udp(q);   // ICMP and ICMPv6 headers are 8 bytes as well
        expect_hdr(l3 ? 12 : 11, id, q, off, 8, 8);
        off += 8;
      end
    endcase
    et = $urandom_range(1, 120);
    push_rand(q, et);
    tails[id] = tail_of(q, off);
    parsed[id] = 1;
    return q;
  endfunction

  // ---------------------------------------------------------------- driver
  bq_t pkts [NPKT];
  initial begin
    in_valid = 0; in_sop = 0; in_eop = 0; in_pkt_id = '0; in_data = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPKT; p++) pkts[p] = make_packet(p);
    for (int p = 0; p < NPKT; p++) begin
      int nw;
      nw = nwords(pkts[p].size());
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in_valid  = 1;
        in_sop    = (w == 0);
        in_eop    = (w == nw - 1);
        in_pkt_id = pkt_id_t'(p);
        in_data   = word_of(pkts[p], w);
        if (w == 0) t_sop[p] = cycle;
      end
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk);
        in_valid = 0; in_sop = 0; in_eop = 0; in_data = '0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end else begin
        n_b2b++;
      end
    end
    @(negedge clk);
    in_valid = 0; in_sop = 0; in_eop = 0;
    repeat (40) @(negedge clk);
    // every expected PHV must have been seen
    for (int k = 0; k < NHDRS; k++) begin
      checks++;
      if (exp_q[k].size() != 0) begin
        failures++;
        $display("FAIL: header %0d has %0d PHV entries never produced", k, exp_q[k].size());
      end
    end
    check_seen("bypass", n_bypass);
    check_seen("variable-size header", n_varsize);
    check_seen("multi-word header", n_multiword);
    check_seen("default transition", n_default);
    check_seen("header exception", n_exc);
    check_seen("back-to-back packets", n_b2b);
    check_seen("transport header reached", n_l4);
    $display("mechanisms: bypass=%0d varsize=%0d multiword=%0d default=%0d exception=%0d b2b=%0d l4=%0d",
             n_bypass, n_varsize, n_multiword, n_default, n_exc, n_b2b, n_l4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  // --------------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NHDRS; k++) begin
      if (phv[k].valid) begin
        exp_phv_t e;
        int id;
        id = int'(phv[k].pkt_id);
        checks++;
        if (exp_q[k].size() == 0) begin
          failures++;
          $display("FAIL: unexpected PHV on header %0d pkt %0d", k, id);
        end else begin
          e = exp_q[k].pop_front();
          if (e.id != id || e.nbits != int'(phv[k].nbits) || e.data != phv[k].data) begin
            failures++;
            $display("FAIL: PHV header %0d pkt %0d (exp pkt %0d) nbits %0d exp %0d data ok=%0d",
                     k, id, e.id, phv[k].nbits, e.nbits, e.data == phv[k].data);
          end
        end
        if (k >= 9) begin
          n_l4++;
          checks++;
          if (cycle - t_sop[id] != LAT_L4 + lat_extra[id]) begin
            failures++;
            $display("FAIL: pkt %0d transport PHV latency %0d, expected %0d", id, cycle - t_sop[id], LAT_L4 + lat_extra[id]);
          end
        end
        if (k == 5 && phv[k].nbits != 160) n_varsize++;
        if (k == 7 && phv[k].nbits == 64) n_varsize++;
        if (k == 4) n_default++;
      end
    end
    if (dut.u_l0.g_hdr[0].u_hdr.u_state.comp_enable &&
        !dut.u_l0.g_hdr[0].u_hdr.u_state.hit) n_exc++;
    // a level that bypasses a live packet
    if (dut.s[1].valid && dut.s[1].sop && dut.s[1].nhdr != H_VLAN_O) n_bypass++;
    if (dut.u_l5.g_hdr[0].u_hdr.u_extract.extract_en &&
        !dut.u_l5.g_hdr[0].u_hdr.u_extract.last_word) n_multiword++;
    // output stream: bytes after the transport header
    if (out.valid) begin
      int id, j;
      word_t exp_w;
      id = int'(out.pkt_id);
      if (out.sop) out_word_idx[id] = 0;
      j = out_word_idx.exists(id) ? out_word_idx[id] : -1;
      if (parsed.exists(id) && parsed[id] && j >= 0) begin
        exp_w = word_of(tails[id], j);
        checks++;
        if (out.data != exp_w) begin
          failures++;
          $display("FAIL: output word %0d of pkt %0d differs", j, id);
        end
        out_word_idx[id] = j + 1;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
