// obc_ram: on-chip memory with one write port and one asynchronous read port.
//
// Used for the weight memory (theta RAM, one word = the L weights of one
// patch element for one output-channel group), the bias memory (beta RAM, one
// word = L biases) and the feature memory, whose read port serves as the
// input RAM (xRAM) and whose write port serves as the output RAM (YRAM):
// layer outputs are written back into the memory the next layer reads.
//
// The read is combinational, as in distributed (slice) RAM, so that a read
// issued in a cycle can be stored in a buffer in the same cycle. The write is
// synchronous. Contents are not reset; initial contents are zero.
module obc_ram #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 1024,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
