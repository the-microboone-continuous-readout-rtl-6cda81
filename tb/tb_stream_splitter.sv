// tb_stream_splitter: random samples, trigger marks and ready levels; checks
// that both paths see the sample unchanged, that valid goes only to the paths
// that take it, and that the input advances only when all of them are ready.
module tb_stream_splitter;
  import fem_pkg::*;
  logic in_valid, in_ready, sn_valid, sn_ready, tr_valid, tr_ready;
  sample_t in, sn, tr;
  int checks = 0, failures = 0;

  stream_splitter dut (.*);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      in = sample_t'({$urandom, $urandom});
      in_valid = 1'($urandom); sn_ready = 1'($urandom); tr_ready = 1'($urandom);
      #1;
      chk(sn == in && tr == in, "data");
      chk(in_ready == (sn_ready && (!in.trig || tr_ready)), "in_ready");
      chk(sn_valid == (in_valid && (!in.trig || tr_ready)), "sn_valid");
      chk(tr_valid == (in_valid && in.trig && sn_ready), "tr_valid");
      // a transfer on one path implies a transfer on the other when triggered
      if (in.trig) chk((sn_valid && sn_ready) == (tr_valid && tr_ready), "lockstep");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
