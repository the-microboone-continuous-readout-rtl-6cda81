// dataway_arbiter: shares the crate backplane dataway among the FEMs of a
// crate and between their two streams.
//
// The paper gives the rule: the dataway carries both streams and the
// triggered stream has priority over the continuous (supernova) stream, by
// token passing. The mechanics are this design's own: each stream has one
// token that circulates over the FEMs in index order. A FEM holding a token
// keeps it until it has sent a frame trailer word, and passes it on at once
// when it has no word and is not inside a frame. Each cycle the dataway takes
// one word: from the triggered-token holder if it has one, otherwise from the
// supernova-token holder. So frames from different FEMs never interleave
// within one stream, and supernova words only fill cycles the triggered
// stream leaves free.
//
// Output: dw_word with dw_stream (0 triggered, 1 supernova) and dw_fem, on a
// valid/ready port; one word per clock at most.
module dataway_arbiter
  import fem_pkg::*;
#(
  parameter int N_FEM = 14
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [N_FEM-1:0] tr_valid,
  output logic [N_FEM-1:0] tr_ready,
  input  word_t            tr_word [N_FEM],
  input  logic [N_FEM-1:0] sn_valid,
  output logic [N_FEM-1:0] sn_ready,
  input  word_t            sn_word [N_FEM],
  output logic             dw_valid,
  input  logic             dw_ready,
  output word_t            dw_word,
  output logic             dw_stream,
  output logic [$clog2(N_FEM+1)-1:0] dw_fem
);
  localparam int IB = $clog2(N_FEM + 1);

  logic [IB-1:0] tt, st;          // token holders
  logic          t_inpkt, s_inpkt;
  logic          use_tr, use_sn, is_trailer;

  assign use_tr = tr_valid[tt];
  assign use_sn = !use_tr && sn_valid[st];
  assign dw_valid  = use_tr || use_sn;
  assign dw_word   = use_tr ? tr_word[tt] : sn_word[st];
  assign dw_stream = !use_tr;
  assign dw_fem    = use_tr ? tt : st;
  assign is_trailer = (dw_word[15:12] == TAG_TRAILER);

  always_comb begin
    tr_ready = '0;
    sn_ready = '0;
    tr_ready[tt] = use_tr && dw_ready;
    sn_ready[st] = use_sn && dw_ready;
  end

  function automatic logic [IB-1:0] nxt(logic [IB-1:0] i);
    return (i == IB'(N_FEM - 1)) ? '0 : i + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      tt <= '0; st <= '0; t_inpkt <= 1'b0; s_inpkt <= 1'b0;
    end else begin
      if (use_tr && dw_ready) begin
        t_inpkt <= !is_trailer;
        if (is_trailer) tt <= nxt(tt);
      end else if (!tr_valid[tt] && !t_inpkt) begin
        tt <= nxt(tt);
      end
      if (use_sn && dw_ready) begin
        s_inpkt <= !is_trailer;
        if (is_trailer) st <= nxt(st);
      end else if (!sn_valid[st] && !s_inpkt) begin
        st <= nxt(st);
      end
    end
  end

  // a stream's token never moves while its holder is inside a frame
  a_tr_hold: assert property (@(posedge clk) disable iff (rst)
    (t_inpkt && !(use_tr && dw_ready && is_trailer)) |=> $stable(tt));
  a_sn_hold: assert property (@(posedge clk) disable iff (rst)
    (s_inpkt && !(use_sn && dw_ready && is_trailer)) |=> $stable(st));
endmodule
