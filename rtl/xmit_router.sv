// xmit_router: the transmitter (XMIT) board's distribution of dataway words to
// its four optical links.
//
// As in the paper, links 0 and 1 carry the triggered stream and links 2 and 3
// the supernova stream. How one stream uses its two links is this design's
// choice: whole frames alternate between them, the link changing after each
// frame trailer word. Words pass straight through (valid/ready, no storage);
// the serializers and optics of the 3.125 Gbps links are outside this module.
// frames_sent counts frame trailers per link.
module xmit_router
  import fem_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        dw_valid,
  output logic        dw_ready,
  input  word_t       dw_word,
  input  logic        dw_stream,   // 0 triggered, 1 supernova
  output logic [3:0]  link_valid,
  input  logic [3:0]  link_ready,
  output word_t       link_word [4],
  output logic [15:0] frames_sent [4]
);
  logic [1:0] sel;     // current link of each stream
  logic [1:0] idx;
  assign idx = {dw_stream, sel[dw_stream]};

  always_comb begin
    link_valid = '0;
    link_valid[idx] = dw_valid;
    for (int i = 0; i < 4; i++) link_word[i] = dw_word;
  end
  assign dw_ready = link_ready[idx];

  always_ff @(posedge clk) begin
    if (rst) begin
      sel <= '0;
      for (int i = 0; i < 4; i++) frames_sent[i] <= '0;
    end else if (dw_valid && dw_ready && dw_word[15:12] == TAG_TRAILER) begin
      sel[dw_stream] <= !sel[dw_stream];
      frames_sent[idx] <= frames_sent[idx] + 1'b1;
    end
  end
endmodule
