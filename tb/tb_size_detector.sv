// tb_size_detector: checks the header-size ROM of a variable-sized header
// (IPv4: IHL x 32 bits; IPv6 extension: (len+1) x 64 bits) for every field
// value, and the constant size of a fixed-size header (UDP, 64 bits). The
// field is placed in a random first word at the protocol's byte position and
// the expected size is computed from the protocol definition.
`timescale 1ns/1ps
module tb_size_detector;
  import parser_pkg::*;

  int checks = 0, failures = 0;

  word_t           d4, d6, du;
  size_t           s4, s6, su;
  logic [SF_W-1:0] f4, f6, fu;

  size_detector #(.LAYOUT(LAY_IPV4)) u_v4  (.in_data(d4), .hdr_size(s4), .hdr_size_field(f4));
  size_detector #(.LAYOUT(LAY_EXT1)) u_ext (.in_data(d6), .hdr_size(s6), .hdr_size_field(f6));
  size_detector #(.LAYOUT(LAY_UDP))  u_udp (.in_data(du), .hdr_size(su), .hdr_size_field(fu));

  function automatic word_t rand_word();
    word_t w;
    for (int i = 0; i < BUS_W / 32; i++) w[32 * i +: 32] = $urandom;
    return w;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int ihl = 0; ihl < 16; ihl++) begin
      d4 = rand_word();
      d4[BUS_W - 5 -: 4] = 4'(ihl);          // low nibble of byte 0
      #1;
      check("IPv4 size", int'(s4), ihl * 32);
      check("IPv4 field", int'(f4), ihl);
    end
    for (int len = 0; len < 256; len++) begin
      d6 = rand_word();
      d6[BUS_W - 9 -: 8] = 8'(len);          // byte 1
      #1;
      check("ext size", int'(s6), (len + 1) * 64);
      check("ext field", int'(f6), len);
    end
    for (int i = 0; i < 8; i++) begin
      du = rand_word();
      #1;
      check("UDP size", int'(su), 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
