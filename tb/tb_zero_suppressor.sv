// tb_zero_suppressor: feeds frames of channel-ordered samples (noise around a
// per-channel baseline with occasional pulses, including pulses at the very
// start and end of a channel) with random back-pressure, and compares every
// output word with the reference model in zs_ref_pkg. Runs once in suppressed
// mode and once with keep_all, and checks the cycle count of an unstalled
// frame: one clock per sample plus NPRE per channel.
module tb_zero_suppressor;
  import fem_pkg::*;
  import zs_ref_pkg::*;
  localparam int N_CH = 4, TPF = 40, NPRE = 3, NPOST = 2;
  logic clk = 0, rst = 1, keep_all = 0;
  logic cfg_we = 0, cfg_sel = 0;
  logic [5:0] cfg_ch = '0;
  adc_t cfg_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  sample_t in;
  word_t out_word;
  int checks = 0, failures = 0;
  int unsigned expq [$];
  int unsigned base [] = new[N_CH];
  int unsigned thr [] = new[N_CH];
  int pulses = 0, suppressed = 0;
  bit stall_out = 1;
  int cyc = 0;
  always @(posedge clk) cyc++;

  zero_suppressor #(.N_CH(N_CH), .NPRE(NPRE), .NPOST(NPOST)) dut (
    .clk, .rst, .keep_all, .fem_id(12'h5A), .cfg_we, .cfg_sel, .cfg_ch, .cfg_data,
    .in_valid, .in_ready, .in, .out_valid, .out_ready, .out_word);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = stall_out ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected word %h", out_word);
    end else begin
      int unsigned e;
      e = expq.pop_front();
      if (out_word != word_t'(e)) begin
        failures++;
        if (failures < 20) $display("word %h exp %h", out_word, e);
      end
    end
  end

  task automatic send_frame(int unsigned frame, bit ka);
    uarr2_t adc = new[N_CH];
    for (int c = 0; c < N_CH; c++) begin
      adc[c] = new[TPF];
      for (int t = 0; t < TPF; t++) begin
        int v = int'(base[c]) + int'($urandom_range(0, 2 * thr[c])) - int'(thr[c]);
        if ($urandom % 12 == 0 || (c == 1 && (t == 0 || t == TPF - 1))) begin
          v = int'(base[c]) + (($urandom % 2) ? 300 : -300);
          pulses++;
        end
        adc[c][t] = v;
      end
    end
    zs_frame_words(expq, adc, base, thr, NPRE, NPOST, ka, 'h5A, frame);
    for (int c = 0; c < N_CH; c++)
      for (int t = 0; t < TPF; t++) begin
        @(negedge clk);
        in_valid = 1;
        in = '{frame: 12'(frame), channel: 6'(c), tick: 12'(t), adc: adc_t'(adc[c][t]),
               first: (t == 0), last: (t == TPF - 1), frame_first: (t == 0 && c == 0),
               frame_last: (t == TPF - 1 && c == N_CH - 1), trig: 1'b0};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, dt;
    in = '0;
    for (int c = 0; c < N_CH; c++) begin base[c] = 2000 + 37 * c; thr[c] = 10 + 5 * c; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < N_CH; c++) begin
      @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_ch = 6'(c); cfg_data = adc_t'(base[c]);
      @(negedge clk); cfg_sel = 1; cfg_data = adc_t'(thr[c]);
    end
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < 6; f++) send_frame(f, 0);
    keep_all = 1;
    for (int f = 6; f < 8; f++) send_frame(f, 1);
    keep_all = 0;
    // timing: no back-pressure
    stall_out = 0;
    repeat (50) @(posedge clk);
    t0 = cyc;
    send_frame(8, 0);
    while (expq.size() != 0) @(posedge clk);
    dt = cyc - t0;
    checks++;
    if (dt > N_CH * (TPF + NPRE) + 6) begin failures++; $display("frame took %0d clocks", dt); end
    repeat (50) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    $display("pulses %0d, frame of %0d samples in %0d clocks", pulses, N_CH * TPF, dt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
