// rb_reader: read side of the FEM's SRAM ring buffer.
//
// As soon as the writer has completed a frame, the reader reads it back in
// channel order (channel 0 ticks 0..TICKS_PER_FRAME-1, then channel 1, ...)
// and unpacks each 36-bit word into its three 12-bit samples, dropping the
// unused slot of a frame's last word. Every sample leaves as a sample_t with
// its frame number, channel, tick, boundary flags and the frame's trigger
// mark, on a valid/ready port.
//
// Reads use the SRAM only in cycles the writer leaves free (wr_we low); the
// SRAM answers one cycle later. Up to QD words are read ahead into a small
// queue so that the output can deliver one sample per clock. If the reader
// finds itself N_FRAMES or more frames behind when it starts a frame (the
// oldest ones were overwritten), it skips to the oldest complete frame that is
// still intact and adds the skipped frames to dropped. rd_done counts frames
// finished or skipped. Catching up this way, and the read-ahead queue, are
// this design's own choices; channel-order readout is the paper's.
module rb_reader
  import fem_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int N_FRAMES = 8,
  parameter int TICKS_PER_FRAME = 3200,
  parameter int ADDR_BITS = 20
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [15:0]           wr_count,
  input  logic [N_FRAMES-1:0]   trig_mark,
  input  logic                  wr_we,
  output logic                  re,
  output logic [ADDR_BITS-1:0]  addr,
  input  logic [35:0]           rdata,
  output logic                  out_valid,
  input  logic                  out_ready,
  output sample_t               out,
  output logic [15:0]           rd_done,
  output logic [15:0]           dropped
);
  localparam int WPC = (TICKS_PER_FRAME + 2) / 3;
  localparam int FRAME_WORDS = WPC * N_CH;
  localparam int SLOT_BITS = $clog2(N_FRAMES);
  localparam int CH_BITS = $clog2(N_CH);
  localparam int QD = 4;

  typedef struct packed {
    logic [35:0]          data;
    logic [CH_BITS-1:0]   ch;
    logic [TICK_BITS-1:0] widx;
  } qent_t;

  logic                 active;     // a frame is being read
  logic                 issuing;    // addresses left to issue
  logic [15:0]          rframe;
  logic [SLOT_BITS-1:0] rslot;
  logic                 rtrig;
  logic [CH_BITS-1:0]   ich;        // next address to issue
  logic [TICK_BITS-1:0] iwidx;
  logic                 pend;       // read issued last cycle
  logic [CH_BITS-1:0]   pch;
  logic [TICK_BITS-1:0] pwidx;
  qent_t                q [QD];
  logic [1:0]           qrd, qwr;
  logic [2:0]           qcnt;
  logic [1:0]           sub;        // sample of the head word being emitted

  logic [15:0] lag;
  assign lag = wr_count - rframe;

  assign re   = active && issuing && !wr_we && (32'(qcnt) + 32'(pend) < QD);
  assign addr = ADDR_BITS'(rslot) * ADDR_BITS'(FRAME_WORDS)
              + ADDR_BITS'(iwidx) * ADDR_BITS'(N_CH) + ADDR_BITS'(ich);

  // output from the head of the queue
  qent_t                head;
  logic [TICK_BITS-1:0] otick;
  assign head  = q[qrd];
  assign otick = TICK_BITS'(head.widx * 3) + TICK_BITS'(sub);
  assign out_valid = (qcnt != 0);
  always_comb begin
    out.frame       = rframe[FRAME_BITS-1:0];
    out.channel     = 6'(head.ch);
    out.tick        = otick;
    out.adc         = head.data[12*sub +: 12];
    out.first       = (otick == '0);
    out.last        = (otick == TICK_BITS'(TICKS_PER_FRAME - 1));
    out.frame_first = out.first && (head.ch == '0);
    out.frame_last  = out.last && (head.ch == CH_BITS'(N_CH - 1));
    out.trig        = rtrig;
  end

  logic pop;
  assign pop = out_valid && out_ready && (sub == 2'd2 || out.last);

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; issuing <= 1'b0; rframe <= '0; rslot <= '0; rtrig <= 1'b0;
      ich <= '0; iwidx <= '0; pend <= 1'b0; pch <= '0; pwidx <= '0;
      qrd <= '0; qwr <= '0; qcnt <= '0; sub <= '0;
      rd_done <= '0; dropped <= '0;
      for (int i = 0; i < QD; i++) q[i] <= '0;
    end else begin
      // start the next frame
      if (!active && lag != 0) begin
        logic [15:0] f;
        f = rframe;
        if (lag > 16'(N_FRAMES - 1)) begin
          f = wr_count - 16'(N_FRAMES - 1);
          dropped <= dropped + (f - rframe);
          rd_done <= f;
        end
        rframe  <= f;
        rslot   <= SLOT_BITS'(f % N_FRAMES);
        rtrig   <= trig_mark[SLOT_BITS'(f % N_FRAMES)];
        active  <= 1'b1;
        issuing <= 1'b1;
        ich <= '0; iwidx <= '0;
      end

      // issue reads
      pend <= re;
      if (re) begin
        pch <= ich; pwidx <= iwidx;
        if (iwidx == TICK_BITS'(WPC - 1)) begin
          iwidx <= '0;
          if (ich == CH_BITS'(N_CH - 1)) issuing <= 1'b0;
          else ich <= ich + 1'b1;
        end else begin
          iwidx <= iwidx + 1'b1;
        end
      end

      // queue
      if (pend) begin
        q[qwr] <= '{data: rdata, ch: pch, widx: pwidx};
        qwr <= qwr + 1'b1;
      end
      if (out_valid && out_ready) begin
        if (pop) begin
          sub <= '0;
          qrd <= qrd + 1'b1;
        end else begin
          sub <= sub + 1'b1;
        end
        if (out.frame_last) begin
          active  <= 1'b0;
          rframe  <= rframe + 1'b1;
          rd_done <= rframe + 1'b1;
        end
      end
      qcnt <= qcnt + 3'(pend) - 3'(pop);
    end
  end
endmodule
