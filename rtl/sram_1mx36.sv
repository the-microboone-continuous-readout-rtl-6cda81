// sram_1mx36: the FEM's 1 M x 36-bit static RAM that holds the ring buffer.
//
// On the board this is a commercial 128 MHz synchronous SRAM chip next to the
// FPGA. Here it is a single-port synchronous array: a write happens at the
// clock edge where we is high; a read (re high, we low) returns the word on
// rdata one cycle later, and rdata holds until the next read. Write wins when
// both are asserted. Contents are not reset.
module sram_1mx36 #(
  parameter int ADDR_BITS = 20,
  parameter int DATA_BITS = 36
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic                 re,
  input  logic [ADDR_BITS-1:0] addr,
  input  logic [DATA_BITS-1:0] wdata,
  output logic [DATA_BITS-1:0] rdata
);
  logic [DATA_BITS-1:0] mem [2**ADDR_BITS];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    else if (re) rdata <= mem[addr];
  end
endmodule
