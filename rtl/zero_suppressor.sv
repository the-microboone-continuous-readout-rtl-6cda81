// zero_suppressor: the FEM's lossy compression for the continuous stream,
// with a static baseline and an individual threshold for every channel.
//
// A sample passes when |adc - baseline[ch]| > threshold[ch]. A sample is
// saved when it passes, when one of the NPRE samples after it passes
// (presamples) or when one of the NPOST samples before it passed
// (postsamples). Saved samples keep their raw ADC code, so the local baseline
// can be recovered from the presamples. This is the paper's algorithm in its
// main configuration; NPRE, NPOST, the comparison being strict, and the word
// format are this design's choices. Regions never run across a channel or a
// frame: every channel of every frame is processed on its own.
//
// How it works: incoming samples enter a delay line NPRE deep together with
// their pass flag, so when a sample leaves the line all flags of the NPRE
// samples after it are known; a counter reloaded with NPOST by each passing
// sample covers the postsamples. After the last sample of a channel the input
// stalls for NPRE cycles to flush the line. With keep_all high every sample is
// saved (used to format the triggered stream).
//
// Output words (16 bits, tag in [15:12], see fem_pkg): at the first sample of
// a frame FEM(fem_id) and FRAME(frame number); CHANNEL(ch) for every channel;
// REGION(tick) before each run of saved samples; SAMPLE(adc) for each saved
// sample; TRAILER(frame number) after the last channel. Up to three words are
// produced per cycle into an output FIFO of FIFO_DEPTH words; the input is
// accepted while at least three places are free. Throughput: one sample per
// clock plus NPRE clocks per channel.
//
// Tables: cfg_we writes cfg_data to the baseline (cfg_sel=0) or threshold
// (cfg_sel=1) of channel cfg_ch, meant to be done at the start of a run.
// Reset sets baselines to 0 and thresholds to all ones (nothing passes).
module zero_suppressor
  import fem_pkg::*;
#(
  parameter int N_CH = 64,
  parameter int NPRE = 7,
  parameter int NPOST = 7,
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        keep_all,
  input  logic [11:0] fem_id,
  input  logic        cfg_we,
  input  logic        cfg_sel,
  input  logic [5:0]  cfg_ch,
  input  adc_t        cfg_data,
  input  logic        in_valid,
  output logic        in_ready,
  input  sample_t     in,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_word
);
  localparam int PB = $clog2(NPOST + 1);
  localparam int FB = $clog2(FIFO_DEPTH);
  localparam int FLB = $clog2(NPRE + 1);

  initial assert (NPRE >= 1) else $error("NPRE must be at least 1");

  adc_t baseline [N_CH];
  adc_t threshold [N_CH];

  // delay line, index 0 newest
  logic                 dv    [NPRE];
  logic                 dflag [NPRE];
  adc_t                 dadc  [NPRE];
  logic [TICK_BITS-1:0] dtick [NPRE];

  typedef enum logic {S_RUN, S_FLUSH} state_e;
  state_e                state;
  logic [FLB-1:0]        fcnt;
  logic                  cur_frame_last;
  logic [FRAME_BITS-1:0] cur_frame;
  logic [PB-1:0]         post;
  logic                  prev_kept;

  // output FIFO
  word_t         fmem [FIFO_DEPTH];
  logic [FB-1:0] frd, fwr;
  logic [FB:0]   fcount;
  logic          free3;
  assign free3 = (fcount <= (FB+1)'(FIFO_DEPTH - 3));
  assign out_valid = (fcount != 0);
  assign out_word  = fmem[frd];

  logic take, flushing, step, a, keep_j, any_future;
  logic signed [ADC_BITS:0] diff;
  logic [ADC_BITS:0] mag;
  word_t  w [3];
  logic [1:0] nw;

  assign in_ready = (state == S_RUN) && free3;
  assign take     = in_valid && in_ready;
  assign flushing = (state == S_FLUSH) && free3;
  assign step     = take || flushing;

  always_comb begin
    diff = $signed({1'b0, in.adc}) - $signed({1'b0, baseline[in.channel]});
    mag  = diff[ADC_BITS] ? (ADC_BITS+1)'(-diff) : (ADC_BITS+1)'(diff);
    a    = take && (keep_all || (mag > (ADC_BITS+1)'(threshold[in.channel])));
    any_future = a;
    for (int k = 0; k < NPRE; k++) any_future |= dv[k] && dflag[k];
    keep_j = step && dv[NPRE-1] && (any_future || post != '0);

    nw = '0;
    w[0] = '0; w[1] = '0; w[2] = '0;
    if (take && in.first) begin
      if (in.frame_first) begin
        w[nw] = mk_word(TAG_FEM, fem_id);      nw++;
        w[nw] = mk_word(TAG_FRAME, in.frame);  nw++;
      end
      w[nw] = mk_word(TAG_CHANNEL, 12'(in.channel)); nw++;
    end
    if (keep_j) begin
      if (!prev_kept) begin w[nw] = mk_word(TAG_REGION, dtick[NPRE-1]); nw++; end
      w[nw] = mk_word(TAG_SAMPLE, dadc[NPRE-1]); nw++;
    end
    if (flushing && fcnt == FLB'(NPRE - 1) && cur_frame_last) begin
      w[nw] = mk_word(TAG_TRAILER, cur_frame); nw++;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_RUN; fcnt <= '0; cur_frame_last <= 1'b0; cur_frame <= '0;
      post <= '0; prev_kept <= 1'b0;
      frd <= '0; fwr <= '0; fcount <= '0;
      for (int k = 0; k < NPRE; k++) begin
        dv[k] <= 1'b0; dflag[k] <= 1'b0; dadc[k] <= '0; dtick[k] <= '0;
      end
      for (int c = 0; c < N_CH; c++) begin baseline[c] <= '0; threshold[c] <= '1; end
      for (int i = 0; i < FIFO_DEPTH; i++) fmem[i] <= '0;
    end else begin
      if (cfg_we) begin
        if (cfg_sel) threshold[cfg_ch] <= cfg_data;
        else         baseline[cfg_ch]  <= cfg_data;
      end

      if (step) begin
        // decision bookkeeping for the sample leaving the line
        if (dv[NPRE-1]) begin
          prev_kept <= keep_j;
          if (dflag[NPRE-1]) post <= PB'(NPOST);
          else if (post != '0) post <= post - 1'b1;
        end
        // shift the line
        for (int k = NPRE-1; k > 0; k--) begin
          dv[k] <= dv[k-1]; dflag[k] <= dflag[k-1]; dadc[k] <= dadc[k-1]; dtick[k] <= dtick[k-1];
        end
        dv[0] <= take; dflag[0] <= a; dadc[0] <= in.adc; dtick[0] <= in.tick;
        if (take && in.first) begin
          post <= '0;
          prev_kept <= 1'b0;
        end
        if (take && in.last) begin
          state <= S_FLUSH;
          fcnt <= '0;
          cur_frame_last <= in.frame_last;
          cur_frame <= in.frame;
        end
        if (flushing) begin
          if (fcnt == FLB'(NPRE - 1)) state <= S_RUN;
          fcnt <= fcnt + 1'b1;
        end
      end

      // output FIFO
      for (int i = 0; i < 3; i++)
        if (2'(i) < nw) fmem[FB'(fwr + FB'(i))] <= w[i];
      fwr <= fwr + FB'(nw);
      if (out_valid && out_ready) frd <= frd + 1'b1;
      fcount <= fcount + (FB+1)'(nw) - (FB+1)'(out_valid && out_ready);
    end
  end
endmodule
