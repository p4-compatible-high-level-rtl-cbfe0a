// pipeline_alignment: removes this stage's header from the stream so that
// the next header starts at the top of a word again (bus-aligned pipeline).
//
// The input word is held for one cycle in a register. When the packet
// carries this stage's header, every output word is the registered word
// shifted left by leftShiftAmount OR-ed with the current input word shifted
// right by rightShiftAmount; the first drop_words words of the packet, which
// hold nothing but header, are not emitted, and the sop flag moves to the
// first word that starts with the next header. The next-header code given
// with that sop word is the one the state-transition block found. When the
// packet does not carry this header the block is a bypass: the registered
// word goes out unchanged, with its own sop flag and next-header code.
//
// Interface and timing: one cycle of latency in both modes. header_valid_in,
// the shift taps and drop_words are sampled on the input sop word and held
// for the packet. The current input word is used only when it continues the
// same packet (valid and not sop), so back-to-back packets do not mix.
// out_sel is high when the output word comes from the shifting path.
//
// The two shifters are static: the layout parameter gives every shift
// amount the header can need (one per distinct header size modulo BUS_W),
// each is a constant rewiring, and the shift taps only select one of them,
// as the paper does to avoid full run-time barrel shifters.
//
// Departure from the paper's drawing: there the bypass multiplexer input is
// the unregistered input word, which would give bypassed and processed
// packets different latencies and let them collide in a packet train; here
// the bypass takes the registered word. Word dropping and sop relocation are
// this design's own additions for headers of a bus width or more.
module pipeline_alignment
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_IPV4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  stream_t in,
  input  logic    header_valid_in,  // HeaderValidIn (current word)
  input  shamt_t  left_shift,       // for the packet starting at this sop
  input  shamt_t  right_shift,
  input  wcnt_t   drop_words,
  input  hid_t    next_hdr,         // NHeader from the state transition
  output stream_t out,
  output logic    out_sel
);

  stream_t r_q;
  wcnt_t   r_idx_q;     // word index in its packet of the registered word
  wcnt_t   cnt_q;       // index of the next input word
  logic    p_hv_q;
  shamt_t  p_lsh_q, p_rsh_q;
  wcnt_t   p_drop_q;

  wcnt_t in_idx;
  assign in_idx = in.sop ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q      <= '0;
      r_idx_q  <= '0;
      cnt_q    <= '0;
      p_hv_q   <= 1'b0;
      p_lsh_q  <= '0;
      p_rsh_q  <= shamt_t'(BUS_W);
      p_drop_q <= '0;
    end else begin
      r_q     <= in;
      r_idx_q <= in_idx;
      if (in.valid) begin
        cnt_q <= in_idx + wcnt_t'(1);
        if (in.sop) begin
          p_hv_q   <= header_valid_in;
          p_lsh_q  <= left_shift;
          p_rsh_q  <= right_shift;
          p_drop_q <= drop_words;
        end
      end
    end
  end

  // Static barrel shifters: the header layout allows only a few shift
  // amounts, listed at elaboration time; each is a fixed rewiring, and the
  // latched taps select among them.
  localparam int FW      = LAYOUT.var_size ? int'(LAYOUT.size_fw) : 0;
  localparam int ENTRIES = 1 << FW;

  typedef shamt_t [ENTRIES-1:0] tapset_t;

  function automatic int lsh_of(int v);
    return size_of_field(LAYOUT, v) % BUS_W;
  endfunction

  function automatic int count_taps();
    int n;
    n = 0;
    for (int v = 0; v < ENTRIES; v++) begin
      bit seen;
      seen = 1'b0;
      for (int u = 0; u < v; u++) if (lsh_of(u) == lsh_of(v)) seen = 1'b1;
      if (!seen) n++;
    end
    return n;
  endfunction

  localparam int NTAPS = count_taps();

  function automatic tapset_t build_taps();
    tapset_t t;
    int n;
    t = '0;
    n = 0;
    for (int v = 0; v < ENTRIES; v++) begin
      bit seen;
      seen = 1'b0;
      for (int u = 0; u < v; u++) if (lsh_of(u) == lsh_of(v)) seen = 1'b1;
      if (!seen) begin
        t[n] = shamt_t'(lsh_of(v));
        n++;
      end
    end
    return t;
  endfunction

  localparam tapset_t TAPS = build_taps();

  logic  cont;
  word_t left_part, right_part, shifted;
  assign cont = in.valid && !in.sop;

  always_comb begin
    left_part  = '0;
    right_part = '0;
    for (int i = 0; i < NTAPS; i++) begin
      if (p_lsh_q == TAPS[i])
        left_part = r_q.data << TAPS[i];
      if (p_rsh_q == shamt_t'(BUS_W) - TAPS[i])
        right_part = in.data >> (BUS_W - int'(TAPS[i]));
    end
    shifted = left_part | (cont ? right_part : '0);
  end

  always_comb begin
    out     = r_q;
    out_sel = p_hv_q;
    if (p_hv_q) begin
      out.valid = r_q.valid && (r_idx_q >= p_drop_q);
      out.sop   = r_q.valid && (r_idx_q == p_drop_q);
      out.nhdr  = next_hdr;
      out.data  = shifted;
    end
  end

endmodule
