// tb_fem: one FEM with 4 channels and 12-tick frames. Loads baselines and
// thresholds, drives 16 MSps ADC samples (each 2 MSps value held for 8
// strobes, so the average is exact), triggers during one frame, and checks
// both output streams word for word against the reference model: the
// supernova stream carries every frame zero-suppressed, the triggered stream
// carries only the triggered frame, unsuppressed.
module tb_fem;
  import fem_pkg::*;
  import zs_ref_pkg::*;
  localparam int N_CH = 4, TPF = 12, NPRE = 2, NPOST = 2, NF = 6, TRIG_FRAME = 3;
  logic clk = 0, rst = 1, adc_valid = 0, trigger = 0;
  adc_t [N_CH-1:0] adc_data;
  logic cfg_we = 0, cfg_sel = 0;
  logic [5:0] cfg_ch = '0;
  adc_t cfg_data = '0;
  logic tr_valid, tr_ready, sn_valid, sn_ready, overrun, collision;
  word_t tr_word, sn_word;
  logic [15:0] dropped;
  int checks = 0, failures = 0;
  int unsigned qsn [$];
  int unsigned qtr [$];
  int unsigned base [] = new[N_CH];
  int unsigned thr [] = new[N_CH];
  uarr2_t adc [NF];

  fem #(.N_CH(N_CH), .TICKS_PER_FRAME(TPF), .NPRE(NPRE), .NPOST(NPOST), .FIFO_DEPTH(256)) dut (
    .clk, .rst, .fem_id(12'h3), .adc_valid, .adc_data, .trigger, .cfg_we, .cfg_sel, .cfg_ch,
    .cfg_data, .tr_valid, .tr_ready, .tr_word, .sn_valid, .sn_ready, .sn_word,
    .overrun, .collision, .dropped, .tr_fill(), .sn_fill());
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin sn_ready = ($urandom % 4 != 0); tr_ready = ($urandom % 3 != 0); end

  always @(posedge clk) if (!rst) begin
    if (sn_valid && sn_ready) begin
      chk(qsn.size() != 0 && sn_word == word_t'(qsn[0]),
          $sformatf("sn word %h exp %h", sn_word, qsn.size() ? qsn[0] : 0));
      if (qsn.size() != 0) void'(qsn.pop_front());
    end
    if (tr_valid && tr_ready) begin
      chk(qtr.size() != 0 && tr_word == word_t'(qtr[0]),
          $sformatf("tr word %h exp %h", tr_word, qtr.size() ? qtr[0] : 0));
      if (qtr.size() != 0) void'(qtr.pop_front());
    end
  end

  initial begin
    adc_data = '0;
    for (int c = 0; c < N_CH; c++) begin base[c] = 1800 + 50 * c; thr[c] = 8 + 4 * c; end
    for (int f = 0; f < NF; f++) begin
      adc[f] = new[N_CH];
      for (int c = 0; c < N_CH; c++) begin
        adc[f][c] = new[TPF];
        for (int t = 0; t < TPF; t++)
          adc[f][c][t] = ($urandom % 7 == 0) ? base[c] + 200 : base[c] + $urandom_range(0, thr[c]);
      end
      zs_frame_words(qsn, adc[f], base, thr, NPRE, NPOST, 0, 3, f);
      if (f == TRIG_FRAME) zs_frame_words(qtr, adc[f], base, thr, NPRE, NPOST, 1, 3, f);
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < N_CH; c++) begin
      @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_ch = 6'(c); cfg_data = adc_t'(base[c]);
      @(negedge clk); cfg_sel = 1; cfg_data = adc_t'(thr[c]);
    end
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < NF; f++)
      for (int t = 0; t < TPF; t++)
        for (int s = 0; s < 8; s++) begin
          @(negedge clk);
          adc_valid = 1;
          for (int c = 0; c < N_CH; c++) adc_data[c] = adc_t'(adc[f][c][t]);
          trigger = (f == TRIG_FRAME && t == 5 && s == 0);
          @(negedge clk);
          adc_valid = 0; trigger = 0;
          @(negedge clk);
        end
    repeat (2000) @(posedge clk);
    chk(qsn.size() == 0, $sformatf("%0d supernova words missing", qsn.size()));
    chk(qtr.size() == 0, $sformatf("%0d triggered words missing", qtr.size()));
    chk(!overrun && !collision && dropped == 0, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
