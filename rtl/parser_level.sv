// parser_level: one level of the parse graph, i.e. one pipeline stage.
//
// All headers that can occur at the same depth of the (balanced) parse
// graph are processed in parallel by header blocks fed with the same input
// stream. At most one of them matches a given packet; its stripped output is
// selected by a multiplexer, and when none matches every block bypasses the
// packet and block 0's output (identical in all blocks) is taken. The
// selected stream is registered, which cuts the combinational path between
// levels.
//
// Interface and timing: `in` and `out` are bus-aligned streams; latency is
// two cycles (the alignment register inside the header blocks and the level
// register). phv[i], next_hdr_valid[i] and hdr_exception[i] belong to
// LAYOUTS[i].
//
// The parallel blocks, the output multiplexer and the level register follow
// the paper's pipeline drawing. The priority order of the multiplexer when
// several blocks claim a packet (not possible with distinct state codes) is
// this design's choice.
module parser_level
  import parser_pkg::*;
#(
  parameter int N = 2,
  parameter hdr_layout_t [N-1:0] LAYOUTS = {LAY_IPV6, LAY_IPV4}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  stream_t          in,
  output stream_t          out,
  output phv_t   [N-1:0]   phv,
  output logic   [N-1:0]   next_hdr_valid,
  output logic   [N-1:0]   hdr_exception
);

  stream_t [N-1:0] blk_out;
  logic    [N-1:0] blk_sel;

  for (genvar i = 0; i < N; i++) begin : g_hdr
    header_block #(.LAYOUT(LAYOUTS[i])) u_hdr (
      .clk            (clk),
      .rst_n          (rst_n),
      .in             (in),
      .out            (blk_out[i]),
      .out_sel        (blk_sel[i]),
      .phv            (phv[i]),
      .next_hdr_valid (next_hdr_valid[i]),
      .hdr_exception  (hdr_exception[i])
    );
  end

  stream_t mux_out;
  always_comb begin
    mux_out = blk_out[0];
    for (int i = N - 1; i >= 0; i--)
      if (blk_sel[i]) mux_out = blk_out[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= mux_out;
  end

endmodule
