// state_transition: the parse-graph transition of one header instance.
//
// The block decides whether the packet at its input carries this header
// (validHeader: the next-header code that came with the sop word equals the
// hard-wired thisHeader), and if so reads the next-header key of the header
// and looks it up in the layout's key table. A bit counter (ReceivedBits)
// advances by BUS_W on every valid word of the packet; when it equals the
// start of the word that holds the key (KeyLocation) and the header is valid,
// the comparison is enabled (compEnable). The key is brought to the bottom of
// the word by a right shift of constant amount, masked with KeyMask (dMatch)
// and compared with every table entry in parallel (KeyMatch). On a hit
// NextHeader takes the entry's state and NextHeaderValid is set; otherwise
// the layout's default state is taken, and when there is no default
// (H_NONE) HeaderException is set.
//
// Interface and timing: validHeader is combinational from the input word
// (the decision taken on the sop word is held for the rest of the packet).
// next_hdr, next_hdr_valid and hdr_exception are registered: they change on
// the clock edge that samples the key word and hold until the next packet's
// key word. Reset clears them.
//
// Datapath structure (shifter, mask, equality comparators, adder-counter) is
// the paper's. The default transition, the word-granular key location and
// the reset values are this design's choices.
module state_transition
  import parser_pkg::*;
#(
  parameter hdr_layout_t LAYOUT = LAY_ETH
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_sop,
  input  word_t   in_data,
  input  hid_t    next_hdr_in,     // nextHeaderIn, sampled on sop
  output logic    valid_header,    // validHeader for the current word
  output hid_t    next_hdr,        // NextHeader (NHeader Out)
  output logic    next_hdr_valid,  // NextHeaderValid
  output logic    hdr_exception    // HeaderException
);

  // Key position, all fixed by the layout.
  localparam int    KEY_WORD  = int'(LAYOUT.key_off) / BUS_W;
  localparam size_t KEY_LOC   = size_t'(KEY_WORD * BUS_W);          // KeyLocation
  localparam int    KEY_SHIFT = BUS_W - (int'(LAYOUT.key_off) % BUS_W) - int'(LAYOUT.key_w);
  localparam logic [KEY_W-1:0] WMASK = (LAYOUT.key_w >= 5'(KEY_W)) ? '1 :
                                       ((KEY_W'(1) << LAYOUT.key_w) - KEY_W'(1));
  localparam logic [KEY_W-1:0] KMASK = LAYOUT.key_mask & WMASK;

  // ReceivedBits counter and the per-packet header-valid flag.
  size_t rcv_bits_q;
  logic  hv_q;
  size_t rcv_bits;

  always_comb begin
    rcv_bits     = in_sop ? '0 : rcv_bits_q;
    valid_header = in_valid && (in_sop ? (next_hdr_in == LAYOUT.id) : hv_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcv_bits_q <= '0;
      hv_q       <= 1'b0;
    end else if (in_valid) begin
      rcv_bits_q <= rcv_bits + size_t'(BUS_W);
      if (in_sop) hv_q <= (next_hdr_in == LAYOUT.id);
    end
  end

  // Barrel shift (constant amount) and mask.
  word_t            shifted;
  logic [KEY_W-1:0] d_match;
  logic             comp_enable;
  assign shifted     = in_data >> KEY_SHIFT;
  assign d_match     = shifted[KEY_W-1:0] & KMASK;
  assign comp_enable = valid_header && (rcv_bits == KEY_LOC);

  // KeyMatch: parallel compare against the key table, first hit wins.
  logic hit;
  hid_t hit_next;
  always_comb begin
    hit      = 1'b0;
    hit_next = LAYOUT.dflt_next;
    for (int i = MAX_KEYS - 1; i >= 0; i--) begin
      if (i < int'(LAYOUT.num_keys) &&
          d_match == (LAYOUT.key_val[i] & KMASK)) begin
        hit      = 1'b1;
        hit_next = LAYOUT.key_next[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_hdr       <= H_NONE;
      next_hdr_valid <= 1'b0;
      hdr_exception  <= 1'b0;
    end else if (comp_enable) begin
      next_hdr       <= hit_next;
      next_hdr_valid <= hit || (LAYOUT.dflt_next != H_NONE);
      hdr_exception  <= !hit && (LAYOUT.dflt_next == H_NONE);
    end
  end

endmodule
