// tb_tpc_crate_full: one complete operation of the crate at its default size (14 FEMs of
// 64 channels, 3200-tick frames, 8-frame rings, 2^18-word stream buffers):
// two frames written, a trigger in frame 0, every packet carried to the links.
//
// Every FEM sees its own deterministic waveforms: noise within the channel's
// threshold around its baseline plus occasional pulses. Each frame packet that
// leaves on an optical link (from its FEM header to its trailer) is checked
// word for word against the reference model in zs_ref_pkg, on a link of the
// right stream (0/1 triggered, 2/3 supernova). The testbench also counts how
// often each mechanism of the design acted and fails if one never did.
module tb_tpc_crate_full;
  import fem_pkg::*;
  import zs_ref_pkg::*;
  localparam int N_FEM = 14, N_CH = 64, TPF = 3200, NPRE = 7, NPOST = 7;
  localparam int N_FRAMES_RUN = 2, TRIG_FRAME = 0, STROBE_GAP = 10;
  localparam int PULSE_MOD = 400;
  localparam bit STALL_PHASE = 0;
  logic clk = 0, rst = 1, adc_valid = 0, trigger = 0;
  adc_t [N_CH-1:0] adc_data [N_FEM];
  logic cfg_we = 0, cfg_sel = 0;
  logic [4:0] cfg_fem = '0;
  logic [5:0] cfg_ch = '0;
  adc_t cfg_data = '0;
  logic [3:0] link_valid, link_ready;
  word_t link_word [4];
  logic [15:0] frames_sent [4];
  logic [N_FEM-1:0] overrun, collision;
  logic [15:0] dropped [N_FEM];
  logic [18:0] sn_fill [N_FEM];
  logic [18:0] tr_fill [N_FEM];
  bit check_content = 1;
  int checks = 0, failures = 0;
  int unsigned pkt [4][$];
  int unsigned base [] = new[N_CH];
  int unsigned thr [] = new[N_CH];
  bit hold_sn = 0;
  // mechanism counters
  int n_trig_pkts = 0, n_sn_pkts = 0, n_samples_saved = 0, n_regions = 0;
  int n_preempt = 0, n_link_frames [4] = '{0, 0, 0, 0}, n_backpressure = 0;
  int n_fem_switch [2] = '{0, 0}, last_fem [2] = '{-1, -1};
  int last_frame [2][N_FEM];

  tpc_crate dut (
    .clk, .rst, .adc_valid, .adc_data, .trigger, .cfg_we, .cfg_fem, .cfg_sel, .cfg_ch, .cfg_data,
    .link_valid, .link_ready, .link_word, .frames_sent, .overrun, .collision, .dropped,
    .sn_fill, .tr_fill);
  always #5 clk = ~clk;

  function automatic void chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endfunction

  function automatic int unsigned val(int f, int fr, int c, int t);
    int unsigned h, k;
    k = int'(f) * 7919 + int'(fr) * 104729 + int'(c) * 31 + int'(t) * 1009;
    h = k * 32'h9E3779B1;
    h = h ^ (h >> 15);
    if (h % PULSE_MOD == 0) return base[c] + 150 + (h >> 20) % 100;
    return base[c] + (h >> 8) % (thr[c] + 1);
  endfunction

  function automatic void check_packet(int link);
    int unsigned q [$];
    int f, fr, s;
    uarr2_t adc;
    s = link / 2;
    chk(pkt[link].size() >= 3 && pkt[link][0] >> 12 == 1 && pkt[link][1] >> 12 == 2, "packet header");
    if (pkt[link].size() < 3) return;
    f = pkt[link][0] & 'hFFF;
    fr = pkt[link][1] & 'hFFF;
    chk(f < N_FEM, "FEM number");
    if (f >= N_FEM) return;
    chk(fr > last_frame[s][f], $sformatf("frame order stream %0d fem %0d frame %0d", s, f, fr));
    last_frame[s][f] = fr;
    if (s == 0) chk(fr == TRIG_FRAME, "only the triggered frame on the triggered stream");
    adc = new[N_CH];
    for (int c = 0; c < N_CH; c++) begin
      adc[c] = new[TPF];
      for (int t = 0; t < TPF; t++) adc[c][t] = val(f, fr, c, t);
    end
    zs_frame_words(q, adc, base, thr, NPRE, NPOST, s == 0, f, fr);
    chk(q.size() == pkt[link].size(), $sformatf("packet length %0d exp %0d (link %0d fem %0d frame %0d)",
        pkt[link].size(), q.size(), link, f, fr));
    if (q.size() == pkt[link].size())
      foreach (q[i]) if (q[i] != pkt[link][i]) begin
        chk(0, $sformatf("packet word %0d: %h exp %h", i, pkt[link][i], q[i]));
        break;
      end
    if (s == 1) begin
      n_sn_pkts++;
      foreach (pkt[link][i]) begin
        if (pkt[link][i] >> 12 == 0) n_samples_saved++;
        if (pkt[link][i] >> 12 == 4) n_regions++;
      end
    end else n_trig_pkts++;
    if (last_fem[s] != -1 && last_fem[s] != f) n_fem_switch[s]++;
    last_fem[s] = f;
    n_link_frames[link]++;
  endfunction

  always @(negedge clk) begin
    link_ready[1:0] = ($urandom % 8 != 0) ? 2'b11 : 2'($urandom);
    link_ready[3:2] = hold_sn ? 2'b00 : (($urandom % 8 != 0) ? 2'b11 : 2'($urandom));
  end

  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < 4; l++) begin
      if (link_valid[l] && !link_ready[l]) n_backpressure++;
      if (link_valid[l] && link_ready[l]) begin
        if (l < 2) for (int f = 0; f < N_FEM; f++) if (sn_fill[f] != 0) begin n_preempt++; break; end
        pkt[l].push_back(int'(link_word[l]));
        if (link_word[l][15:12] == TAG_TRAILER) begin
          if (check_content) check_packet(l);
          pkt[l].delete();
        end
      end
    end
  end

  task automatic run_frames(int first, int n);
    for (int fr = first; fr < first + n; fr++)
      for (int t = 0; t < TPF; t++)
        for (int s = 0; s < 8; s++) begin
          @(negedge clk);
          adc_valid = 1;
          for (int f = 0; f < N_FEM; f++)
            for (int c = 0; c < N_CH; c++) adc_data[f][c] = adc_t'(val(f, fr, c, t));
          trigger = (fr == TRIG_FRAME && t == TPF / 2 && s == 0);
          @(negedge clk);
          adc_valid = 0; trigger = 0;
          repeat (STROBE_GAP - 2) @(negedge clk);
        end
  endtask

  initial begin
    int waited;
    for (int f = 0; f < N_FEM; f++) begin adc_data[f] = '0; last_frame[0][f] = -1; last_frame[1][f] = -1; end
    for (int c = 0; c < N_CH; c++) begin base[c] = 1500 + 20 * c; thr[c] = 6 + 2 * (c % 8); end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < N_FEM; f++)
      for (int c = 0; c < N_CH; c++) begin
        @(negedge clk); cfg_we = 1; cfg_fem = 5'(f); cfg_sel = 0; cfg_ch = 6'(c); cfg_data = adc_t'(base[c]);
        @(negedge clk); cfg_sel = 1; cfg_data = adc_t'(thr[c]);
      end
    @(negedge clk); cfg_we = 0;
    run_frames(0, N_FRAMES_RUN);
    // drain: every FEM's frames must arrive
    waited = 0;
    while ((n_sn_pkts < N_FEM * N_FRAMES_RUN || n_trig_pkts < N_FEM) && waited < 6000000) begin
      @(posedge clk); waited++;
    end
    chk(n_sn_pkts == N_FEM * N_FRAMES_RUN, $sformatf("supernova packets %0d", n_sn_pkts));
    chk(n_trig_pkts == N_FEM, $sformatf("triggered packets %0d", n_trig_pkts));
    for (int f = 0; f < N_FEM; f++) chk(!overrun[f] && !collision[f] && dropped[f] == 0, "no loss in normal run");
    if (STALL_PHASE) begin
      // hold the supernova links while the ring buffers fill: buffers back up
      // into the readers, the writers overtake them and frames are dropped
      // frames read while being overwritten are not intact: content unchecked
      check_content = 0;
      hold_sn = 1;
      run_frames(N_FRAMES_RUN, 14);
      hold_sn = 0;
      repeat (20000) @(posedge clk);
      for (int f = 0; f < N_FEM; f++) begin
        chk(overrun[f] == 1, "overrun under back-pressure");
        chk(dropped[f] != 0, "frames dropped under back-pressure");
      end
      $display("frames dropped by FEM 0: %0d", dropped[0]);
    end
    $display("mechanisms: triggered packets %0d, supernova packets %0d, saved samples %0d of %0d, regions %0d",
             n_trig_pkts, n_sn_pkts, n_samples_saved, N_FEM * N_FRAMES_RUN * N_CH * TPF, n_regions);
    $display("  token changes tr/sn %0d/%0d, triggered words sent while supernova words waited %0d, back-pressure cycles %0d",
             n_fem_switch[0], n_fem_switch[1], n_preempt, n_backpressure);
    $display("  frames per link %0d %0d %0d %0d (counters %0d %0d %0d %0d)", n_link_frames[0], n_link_frames[1],
             n_link_frames[2], n_link_frames[3], frames_sent[0], frames_sent[1], frames_sent[2], frames_sent[3]);
    chk(n_trig_pkts > 0, "mechanism: trigger");
    chk(n_samples_saved > 0 && n_samples_saved < N_FEM * N_FRAMES_RUN * N_CH * TPF, "mechanism: zero suppression");
    chk(n_regions > 0, "mechanism: pre/postsample regions");
    chk(n_fem_switch[0] > 0 && n_fem_switch[1] > 0, "mechanism: token passing");
    chk(n_preempt > 0, "mechanism: triggered priority");
    for (int l = 0; l < 4; l++) chk(n_link_frames[l] > 0, "mechanism: both links of each stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
