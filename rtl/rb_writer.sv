// rb_writer: write side of the FEM's SRAM ring buffer.
//
// Every 2 MSps tick brings one sample per channel. Three consecutive ticks of
// one channel are packed into one 36-bit SRAM word (tick 3k in bits [11:0],
// 3k+1 in [23:12], 3k+2 in [35:24]); when a group of three ticks is complete
// the N_CH words are written one per clock, channel 0 first, at
//   addr = slot * FRAME_WORDS + word * N_CH + channel,
// so the SRAM is filled in time order. A frame is TICKS_PER_FRAME ticks; the
// last word of a frame may be only partly filled (3200 = 3*1066 + 2), the
// unused slot is written as zero. Frames rotate through N_FRAMES slots.
// Packing and addressing are this design's own choice; the ring of 8 frames of
// 1.6 ms (3200 ticks) in a 1 M x 36 SRAM is the paper's.
//
// Writes always get the SRAM port (we is the request and the grant). A new
// group must not complete while the previous one is still being written, which
// needs at least N_CH clocks per three ticks; collision flags a violation.
// wr_count counts completed frames. At the first tick of every frame the
// writer checks that the reader is done with the frame it is about to
// overwrite (rd_done counts frames the reader has finished or skipped) and
// sets the sticky overrun flag if not. trigger marks the slot being written;
// the mark of a slot is cleared when the slot is started again.
module rb_writer
  import fem_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int N_FRAMES = 8,
  parameter int TICKS_PER_FRAME = 3200,
  parameter int ADDR_BITS = 20
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  tick_valid,
  input  adc_t [N_CH-1:0]       tick_data,
  input  logic                  trigger,
  input  logic [15:0]           rd_done,
  output logic                  we,
  output logic [ADDR_BITS-1:0]  addr,
  output logic [35:0]           wdata,
  output logic [15:0]           wr_count,
  output logic [N_FRAMES-1:0]   trig_mark,
  output logic                  overrun,
  output logic                  collision
);
  localparam int WPC = (TICKS_PER_FRAME + 2) / 3;  // words per channel per frame
  localparam int FRAME_WORDS = WPC * N_CH;
  localparam int SLOT_BITS = $clog2(N_FRAMES);
  localparam int CH_BITS = $clog2(N_CH);

  initial assert (N_FRAMES * FRAME_WORDS <= 2**ADDR_BITS)
    else $error("ring buffer does not fit the SRAM");

  logic [TICK_BITS-1:0] tick;        // tick within the frame being written
  logic [1:0]           sub;         // tick mod 3
  logic [TICK_BITS-1:0] widx;        // word index within the channel
  logic [SLOT_BITS-1:0] slot;        // slot being written
  logic [15:0]          cur_frame;   // running number of the frame being written
  logic [35:0]          acc [N_CH];  // words being assembled
  logic [35:0]          wbuf [N_CH]; // completed words being written
  logic                 busy;
  logic [CH_BITS-1:0]   wch;
  logic [ADDR_BITS-1:0] wbase;
  logic                 wlast;       // group being written ends its frame

  assign we    = busy;
  assign addr  = wbase + ADDR_BITS'(wch);
  assign wdata = wbuf[wch];

  always_ff @(posedge clk) begin
    if (rst) begin
      tick <= '0; sub <= '0; widx <= '0; slot <= '0; cur_frame <= '0;
      busy <= 1'b0; wch <= '0; wbase <= '0; wlast <= 1'b0;
      wr_count <= '0; trig_mark <= '0; overrun <= 1'b0; collision <= 1'b0;
      for (int c = 0; c < N_CH; c++) begin acc[c] <= '0; wbuf[c] <= '0; end
    end else begin
      // drain the completed group, one word per clock
      if (busy) begin
        if (wch == CH_BITS'(N_CH - 1)) begin
          busy <= 1'b0;
          wch  <= '0;
          if (wlast) wr_count <= wr_count + 1'b1;
        end else begin
          wch <= wch + 1'b1;
        end
      end

      if (trigger) trig_mark[slot] <= 1'b1;

      if (tick_valid) begin
        logic group_done;
        group_done = (sub == 2'd2) || (tick == TICK_BITS'(TICKS_PER_FRAME - 1));
        if (tick == '0) begin
          // starting this slot again: frame cur_frame - N_FRAMES is overwritten
          if (16'(cur_frame - rd_done) >= 16'(N_FRAMES)) overrun <= 1'b1;
          trig_mark[slot] <= trigger;
        end
        for (int c = 0; c < N_CH; c++) begin
          logic [35:0] w;
          w = (sub == 2'd0) ? 36'd0 : acc[c];
          w[12*sub +: 12] = tick_data[c];
          if (group_done) begin
            wbuf[c] <= w;
            acc[c]  <= '0;
          end else begin
            acc[c] <= w;
          end
        end
        if (group_done) begin
          if (busy && !(wch == CH_BITS'(N_CH - 1))) collision <= 1'b1;
          busy  <= 1'b1;
          wch   <= '0;
          wbase <= ADDR_BITS'(slot) * ADDR_BITS'(FRAME_WORDS) + ADDR_BITS'(widx) * ADDR_BITS'(N_CH);
          wlast <= (tick == TICK_BITS'(TICKS_PER_FRAME - 1));
        end
        if (tick == TICK_BITS'(TICKS_PER_FRAME - 1)) begin
          tick <= '0; sub <= '0; widx <= '0;
          slot <= (slot == SLOT_BITS'(N_FRAMES - 1)) ? '0 : slot + 1'b1;
          cur_frame <= cur_frame + 1'b1;
        end else begin
          tick <= tick + 1'b1;
          if (sub == 2'd2) begin sub <= '0; widx <= widx + 1'b1; end
          else sub <= sub + 1'b1;
        end
      end
    end
  end
endmodule
