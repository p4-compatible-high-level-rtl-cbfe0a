// tb_pipeline_alignment: checks header removal and bypass in the alignment
// block, configured for the IPv6 extension header (sizes (len+1) x 8 bytes,
// so five distinct shift amounts). Each packet gets a random header length
// (8..104 bytes, so zero to two whole words are dropped and every shift
// amount occurs) and a random HeaderValidIn. The taps are computed in the
// testbench from the length.
// With the header valid, the output must be the packet bytes after the
// header, re-cut into words, starting with sop one cycle after the input
// word that holds the header's last byte, with the NHeader value
// supplied for that packet; without it, the packet must come out
// unchanged one cycle later. Packets run back to back and with gaps.
`timescale 1ns/1ps
module tb_pipeline_alignment;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n;
  always #1.6 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  stream_t in, out;
  logic    hv, out_sel;
  shamt_t  lsh, rsh;
  wcnt_t   drop;
  hid_t    nh_pkt, nh_port;

  pipeline_alignment #(.LAYOUT(LAY_EXT1)) dut (
    .clk(clk), .rst_n(rst_n), .in(in), .header_valid_in(hv), .left_shift(lsh),
    .right_shift(rsh), .drop_words(drop), .next_hdr(nh_port), .out(out), .out_sel(out_sel));

  // The next-header register of the state-transition block, modelled here:
  // it takes the packet's value on the clock edge after its sop word.
  always @(posedge clk) if (in.valid && in.sop) nh_port <= nh_pkt;

  bq_t    exp_words [int];   // expected output bytes per packet
  bit     exp_hv [int];
  hid_t   exp_nh [int];
  longint exp_t [int];
  int     exp_n [int];       // expected number of output words
  int     got_n [int];
  int     n_bypass = 0, n_shift = 0, n_drop = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    in = '0; hv = 0; lsh = '0; rsh = '0; drop = '0; nh_pkt = H_NONE; nh_port = H_NONE;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 600; p++) begin
      automatic bq_t q;
      automatic int hb = ($urandom_range(0, 12) + 1) * 8;
      automatic bit v = $urandom_range(0, 2) != 0;
      automatic int nw;
      automatic hid_t nin = hid_t'($urandom);
      push_rand(q, hb + $urandom_range(1, 90));
      nw = nwords(q.size());
      exp_hv[p] = v;
      exp_nh[p] = v ? hid_t'($urandom) : nin;
      exp_words[p] = v ? tail_of(q, hb) : q;
      exp_n[p]  = v ? nw - (hb * 8) / BUS_W : nw;
      got_n[p]  = 0;
      if (v) begin
        n_shift++;
        if (hb * 8 >= BUS_W) n_drop++;
      end else n_bypass++;
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in.valid  = 1;
        in.sop    = (w == 0);
        in.eop    = (w == nw - 1);
        in.pkt_id = pkt_id_t'(p);
        in.nhdr   = (w == 0) ? nin : hid_t'($urandom);
        in.data   = word_of(q, w);
        hv        = v;
        lsh       = shamt_t'((hb * 8) % BUS_W);
        rsh       = shamt_t'(BUS_W - (hb * 8) % BUS_W);
        drop      = wcnt_t'((hb * 8) / BUS_W);
        if (w == 0) nh_pkt = exp_nh[p];
        if (w == 0) exp_t[p] = cycle + 1 + (v ? (hb * 8) / BUS_W : 0);
        if (w != 0) begin
          // taps are only sampled with sop: scramble them afterwards
          lsh = shamt_t'($urandom); rsh = shamt_t'($urandom); drop = wcnt_t'($urandom); hv = $urandom;
        end
      end
      if ($urandom_range(0, 1)) begin
        @(negedge clk);
        in = '0; in.data = {BUS_W/32{$urandom}};
        hv = $urandom;
      end
    end
    @(negedge clk);
    in = '0;
    repeat (5) @(negedge clk);
    for (int p = 0; p < 600; p++) check("words out per packet", got_n[p], exp_n[p]);
    check("bypass seen", n_bypass > 0, 1);
    check("shift seen", n_shift > 0, 1);
    check("word drop seen", n_drop > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out.valid) begin
    automatic int id = int'(out.pkt_id);
    automatic int j = got_n[id];
    check("sop flag", out.sop, j == 0);
    check("eop flag", out.eop, j == exp_n[id] - 1);
    check("out_sel", out_sel, exp_hv[id]);
    if (j == 0) begin
      check("next header on sop", out.nhdr, exp_nh[id]);
      check("sop cycle", cycle, exp_t[id]);
    end
    checks++;
    if (out.data != word_of(exp_words[id], j)) begin
      failures++;
      $display("FAIL: data word %0d of packet %0d (hv=%0d)", j, id, exp_hv[id]);
    end
    got_n[id] = j + 1;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
