// downsampler: reduces the FEM's 64 channels of 16 MSps ADC samples to 2 MSps.
//
// The paper states only that the 16 MSps samples are "downsampled to 2 MSps".
// How is this design's own choice: each channel averages RATIO consecutive
// input samples (sum, then a right shift by log2(RATIO), truncating), which is
// the simplest decimator that also filters a little. The group of RATIO
// strobes starts at reset.
//
// Interface: adc_valid marks one sample on every channel in adc_data.
// out_valid pulses for one cycle, the cycle after the RATIO-th input strobe of
// a group, with the averages on out_data (held until the next output).
module downsampler
  import fem_pkg::*;
#(
  parameter int N_CH  = 64,
  parameter int RATIO = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             adc_valid,
  input  adc_t [N_CH-1:0]  adc_data,
  output logic             out_valid,
  output adc_t [N_CH-1:0]  out_data
);
  localparam int SHIFT = $clog2(RATIO);
  localparam int ACC_BITS = ADC_BITS + SHIFT;

  logic [ACC_BITS-1:0] acc [N_CH];
  logic [SHIFT-1:0]    phase;

  initial assert (RATIO == (1 << SHIFT)) else $error("RATIO must be a power of two");

  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int c = 0; c < N_CH; c++) acc[c] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (adc_valid) begin
        if (phase == SHIFT'(RATIO - 1)) begin
          phase     <= '0;
          out_valid <= 1'b1;
          for (int c = 0; c < N_CH; c++) begin
            logic [ACC_BITS-1:0] sum;
            sum = acc[c] + ACC_BITS'(adc_data[c]);
            out_data[c] <= adc_t'(sum >> SHIFT);
            acc[c] <= '0;
          end
        end else begin
          phase <= phase + 1'b1;
          for (int c = 0; c < N_CH; c++) acc[c] <= acc[c] + ACC_BITS'(adc_data[c]);
        end
      end
    end
  end
endmodule
