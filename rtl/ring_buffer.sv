// ring_buffer: the FEM's SRAM ring buffer with its write and read controllers.
//
// Downsampled ticks (one 12-bit sample per channel at 2 MSps) are written into
// a 1 M x 36 SRAM in time order; the SRAM holds N_FRAMES frames of
// TICKS_PER_FRAME ticks (8 x 1.6 ms = 12.8 ms, as in the paper). Each frame,
// once complete, is read back in channel order and leaves as a stream of
// sample_t on a valid/ready port. A trigger pulse marks the frame being
// written; the mark travels with that frame's samples. See rb_writer and
// rb_reader for packing, addressing and the SRAM port sharing (writes first).
//
// Status: overrun (sticky) when the writer starts a frame the reader has not
// finished; dropped counts frames the reader skipped; collision (sticky) when
// ticks arrive faster than the writer can store them (needs >= N_CH clocks per
// three ticks).
module ring_buffer
  import fem_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int N_FRAMES = 8,
  parameter int TICKS_PER_FRAME = 3200,
  parameter int ADDR_BITS = 20
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            tick_valid,
  input  adc_t [N_CH-1:0] tick_data,
  input  logic            trigger,
  output logic            out_valid,
  input  logic            out_ready,
  output sample_t         out,
  output logic            overrun,
  output logic            collision,
  output logic [15:0]     dropped
);
  logic                 we, re;
  logic [ADDR_BITS-1:0] waddr, raddr;
  logic [35:0]          wdata, rdata;
  logic [15:0]          wr_count, rd_done;
  logic [N_FRAMES-1:0]  trig_mark;

  rb_writer #(.N_CH(N_CH), .N_FRAMES(N_FRAMES), .TICKS_PER_FRAME(TICKS_PER_FRAME),
              .ADDR_BITS(ADDR_BITS)) u_wr (
    .clk, .rst, .tick_valid, .tick_data, .trigger, .rd_done,
    .we, .addr(waddr), .wdata, .wr_count, .trig_mark, .overrun, .collision);

  rb_reader #(.N_CH(N_CH), .N_FRAMES(N_FRAMES), .TICKS_PER_FRAME(TICKS_PER_FRAME),
              .ADDR_BITS(ADDR_BITS)) u_rd (
    .clk, .rst, .wr_count, .trig_mark, .wr_we(we), .re, .addr(raddr), .rdata,
    .out_valid, .out_ready, .out, .rd_done, .dropped);

  sram_1mx36 #(.ADDR_BITS(ADDR_BITS)) u_sram (
    .clk, .we, .re, .addr(we ? waddr : raddr), .wdata, .rdata);
endmodule
