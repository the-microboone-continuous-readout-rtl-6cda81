// stream_splitter: splits the FEM's channel-ordered samples into its two
// streams. Every sample goes to the supernova (continuous) path; samples of a
// frame that a trigger marked (in.trig) also go to the triggered path.
//
// The split into two streams is the paper's; the valid/ready handshake is this
// design's: a sample leaves only in a cycle where every path that takes it is
// ready, so the two copies stay in step and nothing is buffered here.
module stream_splitter
  import fem_pkg::*;
(
  input  logic    in_valid,
  output logic    in_ready,
  input  sample_t in,
  output logic    sn_valid,
  input  logic    sn_ready,
  output sample_t sn,
  output logic    tr_valid,
  input  logic    tr_ready,
  output sample_t tr
);
  assign sn = in;
  assign tr = in;
  assign in_ready = sn_ready && (!in.trig || tr_ready);
  assign sn_valid = in_valid && (!in.trig || tr_ready);
  assign tr_valid = in_valid && in.trig && sn_ready;
endmodule
