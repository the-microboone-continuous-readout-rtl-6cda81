// tpc_crate: one TPC readout crate of the continuous (supernova) readout:
// N_FEM front-end modules on a shared backplane dataway feeding the crate's
// transmitter board with its four optical links.
//
// Every FEM digitizes 64 wires (adc_data[f]); all FEMs share the ADC strobe,
// the trigger and the clock. FEM f puts module address f in its frame
// headers. The table-load port writes the baseline/threshold tables of FEM
// cfg_fem. The dataway arbiter passes one word per clock, triggered stream
// first; the transmitter sends triggered frames to links 0/1 and supernova
// frames to links 2/3. The FEM count per crate is not stated in the paper; 14
// follows from about 8056 wires / 64 per FEM spread over 9 crates.
module tpc_crate
  import fem_pkg::*;
#(
  parameter int N_FEM = 14,
  parameter int N_CH = 64,
  parameter int N_FRAMES = 8,
  parameter int TICKS_PER_FRAME = 3200,
  parameter int NPRE = 7,
  parameter int NPOST = 7,
  parameter int FIFO_DEPTH = 262144
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             adc_valid,
  input  adc_t [N_CH-1:0]  adc_data [N_FEM],
  input  logic             trigger,
  input  logic             cfg_we,
  input  logic [4:0]       cfg_fem,
  input  logic             cfg_sel,
  input  logic [5:0]       cfg_ch,
  input  adc_t             cfg_data,
  output logic [3:0]       link_valid,
  input  logic [3:0]       link_ready,
  output word_t            link_word [4],
  output logic [15:0]      frames_sent [4],
  output logic [N_FEM-1:0] overrun,
  output logic [N_FEM-1:0] collision,
  output logic [15:0]      dropped [N_FEM],
  output logic [$clog2(FIFO_DEPTH):0] sn_fill [N_FEM],
  output logic [$clog2(FIFO_DEPTH):0] tr_fill [N_FEM]
);
  logic [N_FEM-1:0] tr_valid, tr_ready, sn_valid, sn_ready;
  word_t            tr_word [N_FEM];
  word_t            sn_word [N_FEM];
  logic             dw_valid, dw_ready, dw_stream;
  word_t            dw_word;
  // the source FEM of each dataway word is carried in the frame header, so
  // the arbiter's dw_fem output is not needed by the transmitter
  logic [$clog2(N_FEM+1)-1:0] dw_fem_unused;

  for (genvar f = 0; f < N_FEM; f++) begin : g_fem
    fem #(.N_CH(N_CH), .N_FRAMES(N_FRAMES), .TICKS_PER_FRAME(TICKS_PER_FRAME),
          .NPRE(NPRE), .NPOST(NPOST), .FIFO_DEPTH(FIFO_DEPTH)) u_fem (
      .clk, .rst, .fem_id(12'(f)), .adc_valid, .adc_data(adc_data[f]), .trigger,
      .cfg_we(cfg_we && cfg_fem == 5'(f)), .cfg_sel, .cfg_ch, .cfg_data,
      .tr_valid(tr_valid[f]), .tr_ready(tr_ready[f]), .tr_word(tr_word[f]),
      .sn_valid(sn_valid[f]), .sn_ready(sn_ready[f]), .sn_word(sn_word[f]),
      .overrun(overrun[f]), .collision(collision[f]), .dropped(dropped[f]),
      .tr_fill(tr_fill[f]), .sn_fill(sn_fill[f]));
  end

  dataway_arbiter #(.N_FEM(N_FEM)) u_dw (
    .clk, .rst, .tr_valid, .tr_ready, .tr_word, .sn_valid, .sn_ready, .sn_word,
    .dw_valid, .dw_ready, .dw_word, .dw_stream, .dw_fem(dw_fem_unused));

  xmit_router u_xmit (
    .clk, .rst, .dw_valid, .dw_ready, .dw_word, .dw_stream,
    .link_valid, .link_ready, .link_word, .frames_sent);
endmodule
