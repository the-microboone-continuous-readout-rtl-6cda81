// tb_downsampler: drives random 16 MSps samples on all 64 channels with
// irregular strobe spacing and checks every 2 MSps output against the average
// of its 8 inputs, and that exactly one output follows every 8th strobe.
module tb_downsampler;
  import fem_pkg::*;
  localparam int N_CH = 64;
  logic clk = 0, rst = 1, adc_valid = 0, out_valid;
  adc_t [N_CH-1:0] adc_data, out_data;
  int checks = 0, failures = 0;
  int unsigned sum [N_CH];
  int nin = 0, nout = 0;

  downsampler #(.N_CH(N_CH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N_CH; c++) sum[c] = 0;
    adc_data = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int g = 0; g < 200; g++) begin
      for (int s = 0; s < 8; s++) begin
        @(posedge clk);
        for (int c = 0; c < N_CH; c++) begin
          adc_data[c] <= adc_t'($urandom);
        end
        adc_valid <= 1;
        @(posedge clk);
        adc_valid <= 0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 200 || nin != 1600) begin
      failures++;
      $display("count mismatch in=%0d out=%0d", nin, nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: accumulate what the DUT sees, compare on output
  always @(posedge clk) if (!rst) begin
    if (adc_valid) begin
      nin++;
      for (int c = 0; c < N_CH; c++) sum[c] += adc_data[c];
    end
    if (out_valid) begin
      nout++;
      checks++;
      if (nin != 8 * nout) begin
        failures++;
        $display("output %0d after %0d inputs", nout, nin);
      end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (out_data[c] != adc_t'(sum[c] / 8)) begin
          failures++;
          if (failures < 10) $display("ch %0d got %0d exp %0d", c, out_data[c], sum[c] / 8);
        end
      end
      // the strobe in this cycle (if any) belongs to the next group
      for (int c = 0; c < N_CH; c++) sum[c] = adc_valid ? adc_data[c] : 0;
    end
  end
endmodule
