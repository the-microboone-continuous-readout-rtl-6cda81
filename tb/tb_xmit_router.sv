// tb_xmit_router: sends frames of both streams (ending in trailer words) with
// random link back-pressure and checks that triggered frames alternate over
// links 0 and 1 and supernova frames over links 2 and 3, that every word
// arrives unchanged on exactly one link, and that the frame counters agree.
module tb_xmit_router;
  import fem_pkg::*;
  logic clk = 0, rst = 1, dw_valid = 0, dw_ready, dw_stream = 0;
  word_t dw_word = '0;
  logic [3:0] link_valid, link_ready;
  word_t link_word [4];
  logic [15:0] frames_sent [4];
  int checks = 0, failures = 0;
  int exp_link [2] = '{0, 2};
  int nframes [4] = '{0, 0, 0, 0};

  xmit_router dut (.*);
  always #5 clk = ~clk;

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

  always @(negedge clk) link_ready = 4'($urandom);

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int fr = 0; fr < 40; fr++) begin
      int s, len;
      s = $urandom % 2;
      len = $urandom_range(1, 12);
      for (int i = 0; i <= len; i++) begin
        @(negedge clk);
        dw_valid = 1; dw_stream = 1'(s);
        dw_word = (i == len) ? mk_word(TAG_TRAILER, 12'(fr)) : word_t'($urandom & 'h0FFF);
        #1;
        chk($countones(link_valid) == 1 && link_valid[exp_link[s]], "link select");
        chk(link_word[exp_link[s]] == dw_word, "word");
        @(posedge clk);
        while (!link_ready[exp_link[s]]) begin
          chk(!dw_ready, "ready follows link");
          @(posedge clk);
        end
      end
      nframes[exp_link[s]]++;
      exp_link[s] = (exp_link[s] % 2 == 0) ? exp_link[s] + 1 : exp_link[s] - 1;
    end
    @(negedge clk); dw_valid = 0;
    @(posedge clk);
    for (int l = 0; l < 4; l++) chk(int'(frames_sent[l]) == nframes[l], "frame count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
