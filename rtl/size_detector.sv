// size_detector: header size of one header instance.
//
// For a fixed-size header the size is a constant of the layout. For a
// variable-sized header (IPv4, TCP, IPv6 extension headers) the block cuts
// the size field out of the header's first word with a constant shift and
// looks the size up in a ROM holding the size for every possible field value
// (size = (field + add) * mul bits). The ROM is filled at elaboration time,
// so no multiplier is built: this is the compile-time precomputation of
// arithmetic that the parser uses instead of run-time arithmetic.
//
// Interface and timing: purely combinational. in_data must be the header's
// first word (the sop word of the aligned stream); the size field has to lie
// in that word. hdr_size is in bits; hdr_size_field is the raw field value
// (zero for a fixed-size header).
//
// The ROM approach is the paper's; the (field+add)*mul form of the size
// expression is this design's way of writing the expressions of the headers
// it supports.
module size_detector
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_IPV4
) (
  input  word_t            in_data,
  output size_t            hdr_size,        // HeaderSize
  output logic [SF_W-1:0]  hdr_size_field   // HeaderSizeField
);

  localparam int FW      = LAYOUT.var_size ? int'(LAYOUT.size_fw) : 1;
  localparam int ENTRIES = 1 << FW;
  localparam int FSHIFT  = BUS_W - int'(LAYOUT.size_off) - FW;

  typedef size_t rom_t [ENTRIES];

  function automatic rom_t build_rom();
    rom_t r;
    for (int v = 0; v < ENTRIES; v++) r[v] = size_t'(size_of_field(LAYOUT, v));
    return r;
  endfunction

  localparam rom_t SIZE_ROM = build_rom();

  logic [FW-1:0] field;

  generate
    if (LAYOUT.var_size) begin : g_var
      word_t sh;
      assign sh             = in_data >> FSHIFT;
      assign field          = sh[FW-1:0];
      assign hdr_size       = SIZE_ROM[field];
      assign hdr_size_field = SF_W'(field);
    end else begin : g_fixed
      assign field          = '0;
      assign hdr_size       = LAYOUT.fixed_size;
      assign hdr_size_field = '0;
    end
  endgenerate

endmodule
