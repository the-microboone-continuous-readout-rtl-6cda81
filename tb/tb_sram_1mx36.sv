// tb_sram_1mx36: writes random words at random addresses (including the two
// ends of the array), reads them back and checks data and the one-cycle read
// latency, and that a read is held until the next one.
module tb_sram_1mx36;
  logic clk = 0, we = 0, re = 0;
  logic [19:0] addr = '0;
  logic [35:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [35:0] model [int unsigned];
  int unsigned addrs [$];

  sram_1mx36 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addrs.push_back(0); addrs.push_back(20'hFFFFF);
    for (int i = 0; i < 500; i++) addrs.push_back($urandom & 20'hFFFFF);
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1; re = 0; addr = 20'(addrs[i]); wdata = {4'($urandom), 32'($urandom)};
      model[addrs[i]] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 1; addr = 20'(addrs[i]);
      @(negedge clk);
      re = 0; addr = ~addr;
      checks++;
      if (rdata !== model[addrs[i]]) begin
        failures++;
        $display("addr %h got %h exp %h", addrs[i], rdata, model[addrs[i]]);
      end
      @(negedge clk);
      checks++;
      if (rdata !== model[addrs[i]]) begin
        failures++;
        $display("read data not held at %h", addrs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
