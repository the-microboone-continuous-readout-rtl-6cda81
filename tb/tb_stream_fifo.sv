// tb_stream_fifo: random pushes and pops on a 16-deep buffer against a queue
// model; checks order, the fill count, that a full buffer refuses input, and
// that with both sides always active one word passes per clock.
module tb_stream_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0, full_seen = 0;
  logic [15:0] q [$];

  stream_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    checks++;
    if (count != q.size()) begin failures++; $display("count %0d exp %0d", count, q.size()); end
    if (q.size() == DEPTH) begin
      full_seen++;
      checks++;
      if (in_ready) begin failures++; $display("full but ready"); end
    end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) begin failures++; $display("data %h", out_data); end
      else void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    int t0, n;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = (i % 600 < 300) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      out_ready = (i % 600 < 300) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      in_data = 16'($urandom);
    end
    // streaming rate: 200 words in 200 clocks once primed
    @(negedge clk); in_valid = 1; out_ready = 1;
    n = 0; t0 = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_data = 16'($urandom);
      if (out_valid && out_ready) n++;
    end
    checks++;
    if (n < 199) begin failures++; $display("rate %0d/200", n); end
    checks++;
    if (full_seen == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
