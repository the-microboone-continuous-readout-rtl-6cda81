// stream_fifo: one of the FEM's two stream buffers, holding output words until
// the stream gets its turn on the crate backplane.
//
// On the board each stream has its own DRAM; its size and interface are not
// specified, so here it is a synchronous first-in first-out memory of DEPTH
// words (default 2^18, enough for one frame of one FEM without suppression).
// Valid/ready on both sides; a word written is visible at the output on the
// next cycle. count is the fill level.
module stream_fifo #(
  parameter int DEPTH = 262144,
  parameter int WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AB = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AB-1:0]    rd, wr;

  assign in_ready  = (count != (AB+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (in_valid && in_ready) wr <= wr + 1'b1;
      if (out_valid && out_ready) rd <= rd + 1'b1;
      count <= count + (AB+1)'(in_valid && in_ready) - (AB+1)'(out_valid && out_ready);
    end
  end
endmodule
