// tb_ring_buffer: writes ticks with known contents (a function of frame,
// channel and tick) into a ring of 8 small frames and checks that every frame
// comes back complete, in channel order, with the right samples, flags and
// trigger mark. Then it holds the output for more than eight frames and checks
// that the writer reports the overrun, that the reader skips to the oldest
// intact frame, counts the dropped frames, and delivers it intact.
module tb_ring_buffer;
  import fem_pkg::*;
  localparam int N_CH = 4, TPF = 10, N_FRAMES = 8;
  logic clk = 0, rst = 1, tick_valid = 0, trigger = 0;
  adc_t [N_CH-1:0] tick_data;
  logic out_valid, out_ready = 0, overrun, collision;
  sample_t out;
  logic [15:0] dropped;
  int checks = 0, failures = 0;
  int exp_frame = 0, exp_ch = 0, exp_tick = 0;
  int frames_seen = 0, trig_frame = 2, trig_seen = 0;
  bit hold = 0;

  ring_buffer #(.N_CH(N_CH), .N_FRAMES(N_FRAMES), .TICKS_PER_FRAME(TPF)) dut (.*);
  always #5 clk = ~clk;

  function automatic adc_t val(int f, int c, int t);
    return adc_t'(f * 131 + c * 17 + t * 7 + 5);
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = hold ? 1'b0 : ($urandom % 4 != 0);

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    if (out.first && out.channel == 0 && int'(out.frame) != exp_frame) begin
      // a skip: only allowed after the hold
      chk(int'(out.frame) > exp_frame, "frame order");
      exp_frame = int'(out.frame);
    end
    chk(int'(out.frame) == exp_frame && int'(out.channel) == exp_ch && int'(out.tick) == exp_tick,
        $sformatf("order got f%0d c%0d t%0d exp f%0d c%0d t%0d", out.frame, out.channel, out.tick,
                  exp_frame, exp_ch, exp_tick));
    // the frame being read while the writer overtook it is not checked
    if (exp_frame != 6) chk(out.adc == val(exp_frame, exp_ch, exp_tick), "data");
    chk(out.first == (exp_tick == 0) && out.last == (exp_tick == TPF - 1), "channel flags");
    chk(out.frame_last == (exp_tick == TPF - 1 && exp_ch == N_CH - 1), "frame flag");
    chk(out.trig == (exp_frame == trig_frame), "trigger mark");
    if (out.trig && out.frame_last) trig_seen++;
    if (exp_tick == TPF - 1) begin
      exp_tick = 0;
      if (exp_ch == N_CH - 1) begin exp_ch = 0; exp_frame++; frames_seen++; end
      else exp_ch++;
    end else exp_tick++;
  end

  task automatic write_frame(int f, bit trig_mid);
    for (int t = 0; t < TPF; t++) begin
      @(negedge clk);
      tick_valid = 1;
      for (int c = 0; c < N_CH; c++) tick_data[c] = val(f, c, t);
      trigger = trig_mid && (t == TPF / 2);
      @(negedge clk);
      tick_valid = 0; trigger = 0;
      repeat (3) @(negedge clk);
    end
  endtask

  initial begin
    tick_data = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 6; f++) write_frame(f, f == trig_frame);
    repeat (200) @(posedge clk);
    chk(frames_seen == 6 && !overrun && dropped == 0, "first frames all read, no overrun");
    // write frames 6..19 while holding the output: the reader starts frame 6 and stalls
    hold = 1;
    for (int f = 6; f < 20; f++) write_frame(f, 0);
    chk(overrun == 1, "overrun flagged");
    hold = 0;
    write_frame(20, 0);
    repeat (400) @(posedge clk);
    // 21 frames complete; after frame 6 the reader skips 7..13 and reads 14..20
    $display("frames seen %0d dropped %0d next %0d", frames_seen, dropped, exp_frame);
    chk(dropped == 7, "frames dropped");
    chk(exp_frame == 21, "reader caught up to frame 21");
    chk(!collision, "no write collision");
    chk(trig_seen == 1, "one triggered frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
