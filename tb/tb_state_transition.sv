// tb_state_transition: checks the transition logic of the Ethernet state
// (16-bit EtherType key, no default) and of the first MPLS state (masked
// 13-bit key, default to the second MPLS state). Packets of one to three
// words arrive with a next-header code that does or does not select the
// state. Expected results come from a table of EtherTypes and from the MPLS
// bottom-of-stack bit and first payload nibble, worked out in the testbench:
// validHeader on every word, and NextHeader / NextHeaderValid /
// HeaderException one cycle after the key word, held otherwise.
`timescale 1ns/1ps
module tb_state_transition;
  import parser_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n;
  always #1.6 clk = ~clk;

  int checks = 0, failures = 0;

  logic  in_valid, in_sop;
  word_t in_data;
  hid_t  nh_in;
  logic  vh_e, nv_e, ex_e, vh_m, nv_m, ex_m;
  hid_t  nx_e, nx_m;

  state_transition #(.LAYOUT(LAY_ETH)) u_eth (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sop(in_sop), .in_data(in_data),
    .next_hdr_in(nh_in), .valid_header(vh_e), .next_hdr(nx_e), .next_hdr_valid(nv_e),
    .hdr_exception(ex_e));
  state_transition #(.LAYOUT(LAY_MPLS1)) u_mpls (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sop(in_sop), .in_data(in_data),
    .next_hdr_in(nh_in), .valid_header(vh_m), .next_hdr(nx_m), .next_hdr_valid(nv_m),
    .hdr_exception(ex_m));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int eth_next(int et);
    case (et)
      16'h8100, 16'h88A8: return H_VLAN_O;
      16'h8847:           return H_MPLS1;
      16'h0800:           return H_IPV4;
      16'h86DD:           return H_IPV6;
      default:            return -1;
    endcase
  endfunction

  int exp_nx_e = H_NONE, exp_nv_e = 0, exp_ex_e = 0;
  int exp_nx_m = H_NONE, exp_nv_m = 0, exp_ex_m = 0;
  int n_hit = 0, n_exc = 0, n_dflt = 0;

  initial begin
    in_valid = 0; in_sop = 0; in_data = '0; nh_in = H_NONE;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      automatic bq_t q;
      automatic int et, sel, nw, s_bit, nib;
      automatic int ets[6] = '{16'h8100, 16'h88A8, 16'h8847, 16'h0800, 16'h86DD, 16'h1234};
      et    = ets[$urandom_range(0, 5)];
      sel   = $urandom_range(0, 2);               // 0: ETH, 1: MPLS1, 2: neither
      s_bit = $urandom_range(0, 1);
      nib   = $urandom_range(0, 2) == 0 ? 4 : $urandom_range(0, 1) ? 6 : $urandom_range(0, 15);
      if (sel == 1) begin
        add_mpls(q, s_bit[0]);
        q.push_back(8'((nib << 4) | $urandom_range(0, 15)));
        push_rand(q, $urandom_range(20, 90));
      end else begin
        add_eth(q, et);
        push_rand(q, $urandom_range(40, 90));
      end
      nw = nwords(q.size());
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_sop   = (w == 0);
        in_data  = word_of(q, w);
        nh_in    = (w == 0) ? ((sel == 0) ? H_ETH : (sel == 1) ? H_MPLS1 : H_IPV4) : hid_t'($urandom);
        #0.1;
        check("validHeader eth", vh_e, sel == 0);
        check("validHeader mpls", vh_m, sel == 1);
        if (w == 0 && sel == 0) begin
          exp_nx_e = (eth_next(et) < 0) ? H_NONE : eth_next(et);
          exp_nv_e = eth_next(et) >= 0;
          exp_ex_e = eth_next(et) < 0;
          if (exp_ex_e) n_exc++; else n_hit++;
        end
        if (w == 0 && sel == 1) begin
          exp_nx_m = (s_bit && nib == 4) ? H_IPV4 : (s_bit && nib == 6) ? H_IPV6 : H_MPLS2;
          exp_nv_m = 1;
          exp_ex_m = 0;
          if (exp_nx_m == H_MPLS2) n_dflt++;
        end
        @(posedge clk);
        #0.1;
        check("NextHeader eth", nx_e, exp_nx_e);
        check("NextHeaderValid eth", nv_e, exp_nv_e);
        check("HeaderException eth", ex_e, exp_ex_e);
        check("NextHeader mpls", nx_m, exp_nx_m);
        check("NextHeaderValid mpls", nv_m, exp_nv_m);
        check("HeaderException mpls", ex_m, exp_ex_m);
      end
      @(negedge clk);
      in_valid = 0; in_sop = 0;
    end
    check("hits seen", n_hit > 0, 1);
    check("exceptions seen", n_exc > 0, 1);
    check("defaults seen", n_dflt > 0, 1);
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
