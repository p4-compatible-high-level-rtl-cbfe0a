// tb_shift_amount: checks the alignment taps for every size-field value of
// IPv4 (IHL) and of the IPv6 extension header (length byte), and for the
// fixed-size IPv6 header. Expected values: left = size mod 320,
// right = 320 - left, drop = size div 320, with the size computed from the
// protocol definitions in the testbench.
`timescale 1ns/1ps
module tb_shift_amount;
  import parser_pkg::*;

  int checks = 0, failures = 0;

  logic [SF_W-1:0] f4, f6, fx;
  shamt_t l4, r4, l6, r6, lx, rx;
  wcnt_t  d4, d6, dx;

  shift_amount #(.LAYOUT(LAY_IPV4)) u_v4  (.hdr_size_field(f4), .left_shift(l4), .right_shift(r4), .drop_words(d4));
  shift_amount #(.LAYOUT(LAY_EXT1)) u_ext (.hdr_size_field(f6), .left_shift(l6), .right_shift(r6), .drop_words(d6));
  shift_amount #(.LAYOUT(LAY_IPV6)) u_v6  (.hdr_size_field(fx), .left_shift(lx), .right_shift(rx), .drop_words(dx));

  task automatic check_taps(string what, int size, shamt_t l, shamt_t r, wcnt_t d);
    checks++;
    if (int'(l) != size % 320 || int'(r) != 320 - size % 320 || int'(d) != size / 320) begin
      failures++;
      $display("FAIL: %s size %0d: got l=%0d r=%0d d=%0d", what, size, l, r, d);
    end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      f4 = 8'(v); #1;
      check_taps("IPv4", v * 32, l4, r4, d4);
    end
    for (int v = 0; v < 256; v++) begin
      f6 = 8'(v); #1;
      check_taps("ext", (v + 1) * 64, l6, r6, d6);
    end
    for (int v = 0; v < 4; v++) begin
      fx = 8'($urandom); #1;
      check_taps("IPv6", 320, lx, rx, dx);
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
