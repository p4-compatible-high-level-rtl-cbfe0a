// tb_header_extraction: checks PHV extraction for the variable-sized IPv4
// header. Packets start with an IPv4 header of random IHL (5..15, so one or
// two bus words) followed by payload; HeaderValidIn is set for a random
// two thirds of them. For each valid packet one PHV pulse is expected,
// exactly as many cycles after the sop word as the header has words, holding
// the header bytes (first byte at the top of the container, zeros after it),
// the size in bits and the packet id; packets that are not valid must give
// no pulse. The size outputs are checked on every word.
`timescale 1ns/1ps
module tb_header_extraction;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n;
  always #1.6 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic            in_valid, in_sop, hv;
  word_t           in_data;
  pkt_id_t         in_pkt_id;
  phv_t            phv;
  logic            done;
  size_t           hsize;
  logic [SF_W-1:0] hfield;

  header_extraction #(.LAYOUT(LAY_IPV4)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sop(in_sop), .in_data(in_data),
    .in_pkt_id(in_pkt_id), .header_valid_in(hv), .phv(phv), .header_done(done),
    .hdr_size(hsize), .hdr_size_field(hfield));

  typedef struct {
    int               id;
    int               nbits;
    longint           t_done;
    logic [PHV_W-1:0] data;
  } exp_t;
  exp_t exp_q[$];
  int n_multi = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    in_valid = 0; in_sop = 0; in_data = '0; in_pkt_id = '0; hv = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 400; p++) begin
      automatic bq_t q;
      automatic int ihl = $urandom_range(5, 15);
      automatic bit v = ($urandom_range(0, 2) != 0);
      automatic int nw;
      add_ipv4(q, ihl, 6);
      push_rand(q, $urandom_range(1, 80));
      nw = nwords(q.size());
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in_valid  = 1;
        in_sop    = (w == 0);
        in_data   = word_of(q, w);
        in_pkt_id = pkt_id_t'(p);
        hv        = v;
        if (w == 0 && v) begin
          automatic exp_t e;
          e.id     = p;
          e.nbits  = ihl * 32;
          e.t_done = cycle + nwords(ihl * 4);
          e.data   = phv_of(q, 0, ihl * 4);
          exp_q.push_back(e);
          if (ihl > 10) n_multi++;
        end
        #0.1;
        check("HeaderSize", hsize, ihl * 32);
        check("HeaderSizeField", hfield, ihl);
      end
      @(negedge clk);
      in_valid = 0; in_sop = 0; hv = $urandom_range(0, 1);
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check("all PHVs produced", exp_q.size(), 0);
    check("multi-word headers seen", n_multi > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    check("HeaderDone equals PHV valid", done, phv.valid);
    if (phv.valid) begin
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected PHV");
      end else begin
        automatic exp_t e = exp_q.pop_front();
        check("PHV packet id", phv.pkt_id, e.id);
        check("PHV nbits", phv.nbits, e.nbits);
        check("PHV header id", phv.hdr_id, H_IPV4);
        check("PHV cycle", cycle, e.t_done);
        checks++;
        if (phv.data != e.data) begin
          failures++;
          $display("FAIL: PHV data of packet %0d", e.id);
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
