// tb_header_block: checks one complete header instance, configured as IPv4.
// Packets that carry IPv4 (next-header code H_IPV4 on the sop word, random
// IHL 5..15, protocol TCP, UDP, ICMP or an unknown value) must give one PHV
// entry with the header bytes, an output stream holding the bytes after the
// header with the next-header code of the protocol (H_NONE and
// HeaderException for the unknown one), sop one cycle after the word with
// the header's last byte. Packets that do not carry IPv4 must pass
// unchanged one cycle later. The expectations are built from the packet
// bytes in the testbench.
`timescale 1ns/1ps
module tb_header_block;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n;
  always #1.6 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  stream_t in, out;
  logic    out_sel, nh_valid, hdr_exc;
  phv_t    phv;

  header_block #(.LAYOUT(LAY_IPV4)) dut (
    .clk(clk), .rst_n(rst_n), .in(in), .out(out), .out_sel(out_sel), .phv(phv),
    .next_hdr_valid(nh_valid), .hdr_exception(hdr_exc));

  bq_t    exp_words [int];
  bit     exp_hv [int];
  int     exp_nh [int];
  longint exp_t [int];
  int     exp_n [int];
  int     got_n [int];
  bq_t    exp_phv_bytes [int];
  int     phv_ids[$];
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
      automatic bit v = $urandom_range(0, 3) != 0;
      automatic int ihl = $urandom_range(5, 15);
      automatic int pr = $urandom_range(0, 3);
      automatic int protos[4] = '{6, 17, 1, 200};
      automatic int nexts[4] = '{H_TCP, H_UDP, H_ICMP, H_NONE};
      automatic int nw, hb;
      add_ipv4(q, ihl, protos[pr]);
      push_rand(q, $urandom_range(1, 90));
      nw = nwords(q.size());
      hb = v ? ihl * 4 : 0;
      exp_hv[p]    = v;
      exp_nh[p]    = v ? nexts[pr] : H_TCP;
      exp_words[p] = tail_of(q, hb);
      exp_n[p]     = nw - (hb * 8) / BUS_W;
      got_n[p]     = 0;
      if (v) begin
        exp_phv_bytes[p] = q;
        phv_ids.push_back(p);
        if (pr == 3) n_exc++;
        if (ihl > 10) n_multi++;
      end else n_bypass++;
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in.valid  = 1;
        in.sop    = (w == 0);
        in.eop    = (w == nw - 1);
        in.pkt_id = pkt_id_t'(p);
        in.nhdr   = (w == 0) ? (v ? H_IPV4 : H_TCP) : hid_t'($urandom);
        in.data   = word_of(q, w);
        if (w == 0) exp_t[p] = cycle + 1 + (hb * 8) / BUS_W;
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
    check("all PHVs produced", phv_ids.size(), 0);
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
      check("out_sel", out_sel, exp_hv[id]);
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
    if (phv.valid) begin
      if (phv_ids.size() == 0) begin
        failures++;
        $display("FAIL: unexpected PHV");
      end else begin
        automatic int id = phv_ids.pop_front();
        automatic int hb = (exp_phv_bytes[id][0] & 15) * 4;
        check("PHV packet id", phv.pkt_id, id);
        check("NextHeaderValid", nh_valid, exp_nh[id] != H_NONE);
        check("HeaderException", hdr_exc, exp_nh[id] == H_NONE);
        check("PHV nbits", phv.nbits, hb * 8);
        checks++;
        if (phv.data != phv_of(exp_phv_bytes[id], 0, hb)) begin
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
