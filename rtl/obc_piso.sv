// obc_piso: parallel-in serial-out register bank for the serial operand.
//
// Function: on load, captures N words of BMAX bits; on every shift it moves
// each word one place towards its LSB, so bits[i] presents bit j of word i in
// the j-th cycle after the load (LSB first). The N bits presented together
// form one bit-slice, the address of the OBC LUT.
//
// Timing: bits is valid from the cycle after load; shift and load in the same
// cycle give priority to load. Reset clears the bank.
module obc_piso #(
  parameter int N    = 4,    // words serialised in parallel
  parameter int BMAX = 16    // word width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic                shift,
  input  logic [BMAX-1:0]     din  [N],
  output logic [N-1:0]        bits
);
  logic [BMAX-1:0] sr [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) sr[i] <= '0;
    end else if (load) begin
      for (int i = 0; i < N; i++) sr[i] <= din[i];
    end else if (shift) begin
      for (int i = 0; i < N; i++) sr[i] <= sr[i] >> 1;
    end
  end

  always_comb for (int i = 0; i < N; i++) bits[i] = sr[i][0];
endmodule
