// header_block: one header instance (one parser state) of the pipeline.
//
// Three sub-blocks run side by side on the same input word: the state
// transition (is this header present, and which header comes next), the
// header extraction (copy the header into a PHV entry, find its size) and
// the pipeline alignment (strip the header from the stream). The only
// same-cycle dependency between them is validHeader; the header size goes
// from the extraction side to the shift-tap ROM (shift_amount) and is used
// by the alignment from the next cycle on.
//
// Interface and timing: `in` is the bus-aligned stream whose sop word
// carries the next-header code. `out` is the stream with this header removed
// (or untouched when the packet does not carry it), one cycle later, with
// out_sel telling which. The PHV pulses one cycle after the header's last
// word. next_hdr_valid and hdr_exception are the key-match result of the
// latest packet that carried this header.
//
// The partition into three sub-blocks and their connections follow the
// paper's header-block drawing; the layout is a constant parameter, as the
// paper's header layout is a compile-time configuration.
module header_block
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_ETH
) (
  input  logic    clk,
  input  logic    rst_n,
  input  stream_t in,
  output stream_t out,
  output logic    out_sel,
  output phv_t    phv,
  output logic    next_hdr_valid,
  output logic    hdr_exception
);

  logic            valid_header;
  hid_t            next_hdr;
  size_t           hdr_size;
  logic [SF_W-1:0] hdr_size_field;
  shamt_t          lsh, rsh;
  wcnt_t           drop;
  logic            header_done;

  state_transition #(.LAYOUT(LAYOUT)) u_state (
    .clk            (clk),
    .rst_n          (rst_n),
    .in_valid       (in.valid),
    .in_sop         (in.sop),
    .in_data        (in.data),
    .next_hdr_in    (in.nhdr),
    .valid_header   (valid_header),
    .next_hdr       (next_hdr),
    .next_hdr_valid (next_hdr_valid),
    .hdr_exception  (hdr_exception)
  );

  header_extraction #(.LAYOUT(LAYOUT)) u_extract (
    .clk             (clk),
    .rst_n           (rst_n),
    .in_valid        (in.valid),
    .in_sop          (in.sop),
    .in_data         (in.data),
    .in_pkt_id       (in.pkt_id),
    .header_valid_in (valid_header),
    .phv             (phv),
    .header_done     (header_done),
    .hdr_size        (hdr_size),
    .hdr_size_field  (hdr_size_field)
  );

  shift_amount #(.LAYOUT(LAYOUT)) u_taps (
    .hdr_size_field (hdr_size_field),
    .left_shift     (lsh),
    .right_shift    (rsh),
    .drop_words     (drop)
  );

  pipeline_alignment #(.LAYOUT(LAYOUT)) u_align (
    .clk             (clk),
    .rst_n           (rst_n),
    .in              (in),
    .header_valid_in (valid_header),
    .left_shift      (lsh),
    .right_shift     (rsh),
    .drop_words      (drop),
    .next_hdr        (next_hdr),
    .out             (out),
    .out_sel         (out_sel)
  );

endmodule
