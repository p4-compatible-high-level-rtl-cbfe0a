// tb_parser_level: checks a two-header level (IPv4 and IPv6 in parallel,
// the level's default configuration). Packets carry IPv4 (random IHL,
// protocol TCP/UDP/ICMP/unknown), IPv6 (next header TCP/UDP/ICMPv6/hop-by-hop)
// or neither (next-header code of a later level, so the level bypasses
// them). Per packet the testbench expects one PHV entry on the right port,
// the registered output stream with the header removed and the next-header
// code of the carried protocol, sop two cycles after the word with the
// header's last byte; bypassed packets come out unchanged two cycles later.
`timescale 1ns/1ps
module tb_parser_level;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n;
  always #1.6 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  stream_t in, out;
  logic [1:0] nh_valid, hdr_exc;
  phv_t [1:0] phv;

  parser_level dut (
    .clk(clk), .rst_n(rst_n), .in(in), .out(out), .phv(phv),
    .next_hdr_valid(nh_valid), .hdr_exception(hdr_exc));

  bq_t    exp_words [int];
  bit     exp_hv [int];
  int     exp_nh [int];
  longint exp_t [int];
  int     exp_n [int];
  int     got_n [int];
  bq_t    exp_phv_bytes [int];
  int     phv_ids[2][$];
  int     exp_k [int];
  int     n_bypass = 0, n_exc = 0, n_multi = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    in = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 500; p++) begin
      automatic bq_t q;
      automatic int kind = $urandom_range(0, 2);   // 0 IPv4, 1 IPv6, 2 neither
      automatic bit v = kind != 2;
      automatic int nh6s[4] = '{6, 17, 58, 0};
      automatic int nx6s[4] = '{H_TCP, H_UDP, H_ICMPV6, H_EXT1};
      automatic int ihl = $urandom_range(5, 15);
      automatic int pr = $urandom_range(0, 3);
      automatic int protos[4] = '{6, 17, 1, 200};
      automatic int nexts[4] = '{H_TCP, H_UDP, H_ICMP, H_NONE};
      automatic int nw, hb;
      if (kind == 1) add_ipv6(q, nh6s[pr]); else add_ipv4(q, ihl, protos[pr]);
      push_rand(q, $urandom_range(1, 90));
      nw = nwords(q.size());
      hb = (kind == 0) ? ihl * 4 : (kind == 1) ? 40 : 0;
      exp_hv[p]    = v;
      exp_k[p]     = kind;
      exp_nh[p]    = (kind == 0) ? nexts[pr] : (kind == 1) ? nx6s[pr] : H_EXT1;
      exp_words[p] = tail_of(q, hb);
      exp_n[p]     = nw - (hb * 8) / BUS_W;
      got_n[p]     = 0;
      if (v) begin
        exp_phv_bytes[p] = q;
        phv_ids[kind].push_back(p);
        if (pr == 3 && kind == 0) n_exc++;
        if (ihl > 10) n_multi++;
      end else n_bypass++;
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in.valid  = 1;
        in.sop    = (w == 0);
        in.eop    = (w == nw - 1);
        in.pkt_id = pkt_id_t'(p);
        in.nhdr   = (w == 0) ? ((kind == 0) ? H_IPV4 : (kind == 1) ? H_IPV6 : H_EXT1) : hid_t'($urandom);
        in.data   = word_of(q, w);
        if (w == 0) exp_t[p] = cycle + 2 + (hb * 8) / BUS_W;
      end
      if ($urandom_range(0, 1)) begin
        @(negedge clk);
        in = '0;
      end
    end
    @(negedge clk);
    in = '0;
    repeat (5) @(negedge clk);
    for (int p = 0; p < 500; p++) check("words out per packet", got_n[p], exp_n[p]);
    check("all IPv4 PHVs produced", phv_ids[0].size(), 0);
    check("all IPv6 PHVs produced", phv_ids[1].size(), 0);
    check("bypass seen", n_bypass > 0, 1);
    check("exception seen", n_exc > 0, 1);
    check("two-word header seen", n_multi > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out.valid) begin
      automatic int id = int'(out.pkt_id);
      automatic int j = got_n[id];
      check("sop flag", out.sop, j == 0);
      if (j == 0) begin
        check("next header", out.nhdr, exp_nh[id]);
        check("sop cycle", cycle, exp_t[id]);
      end
      checks++;
      if (out.data != word_of(exp_words[id], j)) begin
        failures++;
        $display("FAIL: data word %0d of packet %0d", j, id);
      end
      got_n[id] = j + 1;
    end
    for (int k = 0; k < 2; k++) if (phv[k].valid) begin
      if (phv_ids[k].size() == 0) begin
        failures++;
        $display("FAIL: unexpected PHV on port %0d", k);
      end else begin
        automatic int id = phv_ids[k].pop_front();
        automatic int hb = (k == 0) ? (exp_phv_bytes[id][0] & 15) * 4 : 40;
        check("PHV packet id", phv[k].pkt_id, id);
        check("NextHeaderValid", nh_valid[k], exp_nh[id] != H_NONE);
        check("HeaderException", hdr_exc[k], exp_nh[id] == H_NONE);
        check("PHV header id", phv[k].hdr_id, (k == 0) ? H_IPV4 : H_IPV6);
        check("PHV nbits", phv[k].nbits, hb * 8);
        checks++;
        if (phv[k].data != phv_of(exp_phv_bytes[id], 0, hb)) begin
          failures++;
          $display("FAIL: PHV data of packet %0d", id);
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
