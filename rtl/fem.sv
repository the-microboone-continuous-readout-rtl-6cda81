// fem: one TPC Front-End Module's digital readout, from the ADC samples of its
// 64 wires to the word streams it offers to the crate backplane.
//
// Chain (the paper's): 16 MSps samples are downsampled to 2 MSps and written
// in time order into the SRAM ring buffer of 8 frames; each complete frame is
// read back in channel order and split into two streams. The supernova stream
// is zero-suppressed (static per-channel baselines, per-channel thresholds,
// presamples and postsamples); the triggered stream carries only frames marked
// by a trigger. Each stream then waits in its own buffer (a DRAM on the board)
// for its turn on the backplane.
//
// This design's own choices: the triggered stream is formatted by a second
// zero suppressor with keep_all set, so it carries every sample of a
// triggered frame in the same word format (the real triggered stream format
// and its Huffman coding are not reproduced); all logic runs on one clock.
//
// Interface: adc_valid/adc_data as the downsampler; trigger pulse; cfg_* load
// the supernova suppressor's baseline and threshold tables; tr_*/sn_* are
// valid/ready word outputs; status flags from the ring buffer and the fill
// levels of the two stream buffers.
module fem
  import fem_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int N_FRAMES = 8,
  parameter int TICKS_PER_FRAME = 3200,
  parameter int NPRE = 7,
  parameter int NPOST = 7,
  parameter int FIFO_DEPTH = 262144
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [11:0]     fem_id,
  input  logic            adc_valid,
  input  adc_t [N_CH-1:0] adc_data,
  input  logic            trigger,
  input  logic            cfg_we,
  input  logic            cfg_sel,
  input  logic [5:0]      cfg_ch,
  input  adc_t            cfg_data,
  output logic            tr_valid,
  input  logic            tr_ready,
  output word_t           tr_word,
  output logic            sn_valid,
  input  logic            sn_ready,
  output word_t           sn_word,
  output logic            overrun,
  output logic            collision,
  output logic [15:0]     dropped,
  output logic [$clog2(FIFO_DEPTH):0] tr_fill,
  output logic [$clog2(FIFO_DEPTH):0] sn_fill
);
  adc_t [N_CH-1:0] tick_data;
  logic            tick_valid;
  sample_t         rb_out, s_sn, s_tr;
  logic            rb_valid, rb_ready, s_sn_valid, s_sn_ready, s_tr_valid, s_tr_ready;
  logic            zs_sn_valid, zs_sn_ready, zs_tr_valid, zs_tr_ready;
  word_t           zs_sn_word, zs_tr_word;

  downsampler #(.N_CH(N_CH)) u_ds (
    .clk, .rst, .adc_valid, .adc_data, .out_valid(tick_valid), .out_data(tick_data));

  ring_buffer #(.N_CH(N_CH), .N_FRAMES(N_FRAMES), .TICKS_PER_FRAME(TICKS_PER_FRAME)) u_rb (
    .clk, .rst, .tick_valid, .tick_data, .trigger,
    .out_valid(rb_valid), .out_ready(rb_ready), .out(rb_out),
    .overrun, .collision, .dropped);

  stream_splitter u_split (
    .in_valid(rb_valid), .in_ready(rb_ready), .in(rb_out),
    .sn_valid(s_sn_valid), .sn_ready(s_sn_ready), .sn(s_sn),
    .tr_valid(s_tr_valid), .tr_ready(s_tr_ready), .tr(s_tr));

  zero_suppressor #(.N_CH(N_CH), .NPRE(NPRE), .NPOST(NPOST)) u_zs_sn (
    .clk, .rst, .keep_all(1'b0), .fem_id, .cfg_we, .cfg_sel, .cfg_ch, .cfg_data,
    .in_valid(s_sn_valid), .in_ready(s_sn_ready), .in(s_sn),
    .out_valid(zs_sn_valid), .out_ready(zs_sn_ready), .out_word(zs_sn_word));

  zero_suppressor #(.N_CH(N_CH), .NPRE(NPRE), .NPOST(NPOST)) u_zs_tr (
    .clk, .rst, .keep_all(1'b1), .fem_id, .cfg_we(1'b0), .cfg_sel(1'b0), .cfg_ch('0), .cfg_data('0),
    .in_valid(s_tr_valid), .in_ready(s_tr_ready), .in(s_tr),
    .out_valid(zs_tr_valid), .out_ready(zs_tr_ready), .out_word(zs_tr_word));

  stream_fifo #(.DEPTH(FIFO_DEPTH)) u_buf_sn (
    .clk, .rst, .in_valid(zs_sn_valid), .in_ready(zs_sn_ready), .in_data(zs_sn_word),
    .out_valid(sn_valid), .out_ready(sn_ready), .out_data(sn_word), .count(sn_fill));

  stream_fifo #(.DEPTH(FIFO_DEPTH)) u_buf_tr (
    .clk, .rst, .in_valid(zs_tr_valid), .in_ready(zs_tr_ready), .in_data(zs_tr_word),
    .out_valid(tr_valid), .out_ready(tr_ready), .out_data(tr_word), .count(tr_fill));
endmodule
