// shift_amount: shift taps of the pipeline alignment for one header instance.
//
// Removing a header of H bits from a bus-aligned stream of BUS_W-bit words
// means: drop the first H / BUS_W words of the packet, then build every
// output word from the tail of one input word shifted left by H % BUS_W and
// the head of the next input word shifted right by BUS_W - H % BUS_W. The
// block gives these three numbers. For a fixed-size header they are
// constants. For a variable-sized header they are read from a ROM indexed by
// the header-size field, filled at elaboration time with the result for
// every possible field value, so the alignment needs no divider and no
// run-time subtraction.
//
// Interface and timing: combinational. hdr_size_field is the raw size field
// found by size_detector. left_shift is 0..BUS_W-1, right_shift is
// BUS_W - left_shift (BUS_W means "nothing from the next word").
//
// The ROM of shift taps is the paper's; the word-drop count is this design's
// addition, needed for headers of a bus width or more.
module shift_amount
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_IPV4
) (
  input  logic [SF_W-1:0] hdr_size_field,   // headerSizeField
  output shamt_t          left_shift,       // leftShiftAmount
  output shamt_t          right_shift,      // rightShiftAmount
  output wcnt_t           drop_words        // whole words taken by the header
);

  localparam int FW      = LAYOUT.var_size ? int'(LAYOUT.size_fw) : 1;
  localparam int ENTRIES = 1 << FW;

  typedef struct packed {
    shamt_t lsh;
    shamt_t rsh;
    wcnt_t  drop;
  } taps_t;

  typedef taps_t [ENTRIES-1:0] rom_t;

  function automatic taps_t taps_of(int size_bits);
    taps_t t;
    t.lsh  = shamt_t'(size_bits % BUS_W);
    t.rsh  = shamt_t'(BUS_W - (size_bits % BUS_W));
    t.drop = wcnt_t'(size_bits / BUS_W);
    return t;
  endfunction

  function automatic rom_t build_rom();
    rom_t r;
    for (int v = 0; v < ENTRIES; v++) r[v] = taps_of(size_of_field(LAYOUT, v));
    return r;
  endfunction

  localparam rom_t  TAP_ROM = build_rom();
  localparam taps_t FIXED   = taps_of(int'(LAYOUT.fixed_size));

  taps_t t;

  generate
    if (LAYOUT.var_size) begin : g_var
      assign t = TAP_ROM[hdr_size_field[FW-1:0]];
    end else begin : g_fixed
      assign t = FIXED;
    end
  endgenerate

  assign left_shift  = t.lsh;
  assign right_shift = t.rsh;
  assign drop_words  = t.drop;

endmodule
