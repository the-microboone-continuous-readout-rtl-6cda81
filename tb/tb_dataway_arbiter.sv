// tb_dataway_arbiter: three FEMs with queued frames on both streams. Checks
// that every word is delivered once and in order per FEM and stream, that
// frames of one stream never interleave between FEMs, that the token moves on
// only after a trailer, that supernova words are sent only when the
// triggered-token holder has nothing to send (priority), and that a long
// triggered frame streams at one word per clock.
module tb_dataway_arbiter;
  import fem_pkg::*;
  localparam int N_FEM = 3;
  logic clk = 0, rst = 1;
  logic [N_FEM-1:0] tr_valid, tr_ready, sn_valid, sn_ready;
  word_t tr_word [N_FEM];
  word_t sn_word [N_FEM];
  logic dw_valid, dw_ready, dw_stream;
  word_t dw_word;
  logic [1:0] dw_fem;
  int checks = 0, failures = 0;
  word_t trq [N_FEM][$];
  word_t snq [N_FEM][$];
  int cur_fem [2] = '{-1, -1};
  int handovers [2] = '{0, 0};
  int prio_waits = 0, sent = 0, total = 0, cyc = 0;
  int first_tr = -1, last_tr = -1, ntr = 0, first_sn = -1;

  dataway_arbiter #(.N_FEM(N_FEM)) dut (.*);
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

  // source signals are refreshed between clock edges from the queues
  always @(negedge clk)
    for (int f = 0; f < N_FEM; f++) begin
      tr_valid[f] <= trq[f].size() != 0;
      sn_valid[f] <= snq[f].size() != 0;
      tr_word[f]  <= (trq[f].size() != 0) ? trq[f][0] : '0;
      sn_word[f]  <= (snq[f].size() != 0) ? snq[f][0] : '0;
    end

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dw_valid && dw_ready) begin
      int s, f;
      word_t e;
      s = dw_stream ? 1 : 0;
      f = int'(dw_fem);
      e = s ? snq[f][0] : trq[f][0];
      chk(dw_word == e, $sformatf("word and order: got %h exp %h fem %0d stream %0d", dw_word, e, f, s));
      if (s == 1 && (tr_valid != 0)) prio_waits++;
      // priority: a supernova word never goes while a triggered frame in progress has a word
      if (s == 1 && cur_fem[0] != -1) chk(!tr_valid[cur_fem[0]], "priority");
      if (cur_fem[s] != -1) chk(cur_fem[s] == f, "no interleaving within a stream");
      cur_fem[s] = (dw_word[15:12] == TAG_TRAILER) ? -1 : f;
      if (s == 1 && first_sn < 0) first_sn = cyc;
      if (s == 0) begin
        if (first_tr < 0) first_tr = cyc;
        last_tr = cyc; ntr++;
      end
      if (s) void'(snq[f].pop_front()); else void'(trq[f].pop_front());
      sent++;
    end
  end

  function automatic void add_frame(int s, int f, int len, int id);
    for (int i = 0; i < len; i++) begin
      word_t w;
      w = (i == len - 1) ? mk_word(TAG_TRAILER, 12'(id)) : word_t'(((f + 1) << 8) | (i & 'hFF));
      if (s) snq[f].push_back(w); else trq[f].push_back(w);
    end
    total += len;
  endfunction

  initial begin
    dw_ready = 1;
    for (int f = 0; f < N_FEM; f++)
      for (int k = 0; k < 3; k++) add_frame(1, f, $urandom_range(2, 20), k);
    add_frame(0, 0, 200, 0);   // one long triggered frame from FEM 0
    add_frame(0, 2, 5, 1);
    repeat (2) @(posedge clk);
    rst <= 0;
    wait (sent == total);
    @(posedge clk);
    chk(ntr == 205, "all triggered words");
    // both streams were waiting from the start: the triggered stream goes first
    chk(first_tr >= 0 && first_tr < first_sn, "triggered stream first");
    // and no supernova word got in before the long triggered frame was done
    chk(first_sn > first_tr + 199, "supernova words wait for the triggered frame");
    chk(last_tr - first_tr + 1 <= 205 + N_FEM + 1, "triggered words stream at one per clock");
    // now with back-pressure and more frames
    for (int f = 0; f < N_FEM; f++) begin
      add_frame(0, f, $urandom_range(2, 30), 7);
      for (int k = 0; k < 4; k++) add_frame(1, f, $urandom_range(2, 30), k);
    end
    fork
      while (sent != total) begin @(negedge clk); dw_ready = ($urandom % 3 != 0); end
    join
    @(posedge clk);
    for (int f = 0; f < N_FEM; f++) chk(trq[f].size() == 0 && snq[f].size() == 0, "all delivered");
    $display("sent %0d words; supernova words sent while other FEMs had triggered data: %0d", sent, prio_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
