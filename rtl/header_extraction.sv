// header_extraction: copies one header out of the stream into a PHV entry.
//
// A word counter (ReceivedWords, cleared by sop, +1 per valid word) indexes
// a constant table of left-shift amounts (shiftValue[ReceivedWords]), each a
// fixed rewiring selected by the counter, that places word i of the header
// at its position in the PHV container, header
// first bit at the container's most significant bit. The shifted word is
// masked to the header's bits and OR-ed into the PHV register, which is
// enabled while the header is valid and the word still holds header bits
// (BusSize x ReceivedWords < HeaderSize). The sop word clears the
// accumulator instead of OR-ing into it. The SizeDetector gives the header
// size, fixed or read from a size field of the first word.
//
// Interface and timing: header_valid_in is the state-transition block's
// validHeader for the current word. The PHV is registered; phv.valid (and
// header_done) pulse for one cycle, the cycle after the last header word was
// accepted. hdr_size and hdr_size_field are the current packet's size:
// combinational on the sop word, held in a register afterwards, so the
// pipeline-alignment block can use them from the next cycle on.
//
// Structure (shift table, OR accumulator, counter, size compare) follows the
// paper. Clearing on sop, the mask, the one-cycle done pulse and the PHV
// container width are this design's choices.
module header_extraction
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_IPV4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_sop,
  input  word_t           in_data,
  input  pkt_id_t         in_pkt_id,
  input  logic            header_valid_in,  // HeaderValidIn
  output phv_t            phv,              // PHV
  output logic            header_done,      // HeaderDone
  output size_t           hdr_size,         // HeaderSize (current packet)
  output logic [SF_W-1:0] hdr_size_field    // HeaderSizeField (current packet)
);

  localparam int EXT_W  = PHV_W + BUS_W;
  localparam int MAXW   = (PHV_W + BUS_W - 1) / BUS_W;   // words that reach the PHV

  // shiftValue[ReceivedWords]: left shift of {0, word} so that word i lands
  // at PHV bits [PHV_W-1-i*BUS_W -: BUS_W]; words past MAXW never reach it.
  typedef logic [$clog2(EXT_W+1)-1:0] sv_t;
  typedef sv_t sv_rom_t [MAXW+1];
  function automatic sv_rom_t build_sv();
    sv_rom_t r;
    for (int i = 0; i <= MAXW; i++)
      r[i] = (i < MAXW) ? sv_t'(PHV_W - i * BUS_W) : sv_t'(EXT_W);
    return r;
  endfunction
  localparam sv_rom_t SHIFT_VALUE = build_sv();

  // SizeDetector on the current word, used on the sop word only.
  size_t           det_size;
  logic [SF_W-1:0] det_field;
  size_detector #(.LAYOUT(LAYOUT)) u_size (
    .in_data        (in_data),
    .hdr_size       (det_size),
    .hdr_size_field (det_field)
  );

  size_t           size_q;
  logic [SF_W-1:0] field_q;
  wcnt_t           rcv_words_q;
  wcnt_t           rcv_words;
  pkt_id_t         pkt_id_q;

  always_comb begin
    hdr_size       = in_sop ? det_size  : size_q;
    hdr_size_field = in_sop ? det_field : field_q;
    rcv_words      = in_sop ? '0 : rcv_words_q;
  end

  // Size compare and enables.
  logic [SIZE_W+WCNT_W-1:0] bus_x_words;
  logic                     in_header;   // word still holds header bits
  logic                     last_word;   // word holds the header's last bit
  logic                     extract_en;
  assign bus_x_words = (SIZE_W+WCNT_W)'(rcv_words) * (SIZE_W+WCNT_W)'(BUS_W);
  assign in_header   = bus_x_words < (SIZE_W+WCNT_W)'(hdr_size);
  assign last_word   = (bus_x_words + (SIZE_W+WCNT_W)'(BUS_W)) >= (SIZE_W+WCNT_W)'(hdr_size);
  assign extract_en  = in_valid && header_valid_in && in_header;

  // Shift into place and mask to the stored part of the header.
  logic [EXT_W-1:0] ext_word;
  logic [PHV_W-1:0] placed;
  logic [PHV_W-1:0] keep_mask;
  size_t            kept_bits;
  always_comb begin
    // static shifters: one constant shift per word position
    ext_word = '0;
    for (int i = 0; i < MAXW; i++)
      if (rcv_words == wcnt_t'(i)) ext_word = {{PHV_W{1'b0}}, in_data} << SHIFT_VALUE[i];
    kept_bits = (hdr_size < LAYOUT.phv_bits) ? hdr_size : LAYOUT.phv_bits;
    keep_mask = ~({PHV_W{1'b1}} >> kept_bits);
    placed    = ext_word[EXT_W-1 -: PHV_W] & keep_mask;
  end

  logic [PHV_W-1:0] acc_q;
  logic             done_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      size_q      <= '0;
      field_q     <= '0;
      rcv_words_q <= '0;
      pkt_id_q    <= '0;
      acc_q       <= '0;
      done_q      <= 1'b0;
    end else begin
      done_q <= extract_en && last_word;
      if (in_valid) begin
        rcv_words_q <= rcv_words + wcnt_t'(1);
        if (in_sop) begin
          size_q   <= det_size;
          field_q  <= det_field;
          pkt_id_q <= in_pkt_id;
        end
      end
      if (extract_en) acc_q <= (in_sop ? '0 : acc_q) | placed;
    end
  end

  always_comb begin
    phv.valid  = done_q;
    phv.hdr_id = LAYOUT.id;
    phv.pkt_id = pkt_id_q;
    phv.nbits  = (size_q < LAYOUT.phv_bits) ? size_q : LAYOUT.phv_bits;
    phv.data   = acc_q;
  end
  assign header_done = done_q;

endmodule
