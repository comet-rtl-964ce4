// obc_pingpong_buf: ping-pong operand buffer (theta BUF, x BUF, beta BUF).
//
// Function: two banks of DEPTH words. The fill side writes the shadow bank
// one word per cycle (we, widx, wdata) while the compute side sees the whole
// active bank in parallel on rdata. swap exchanges the two banks, so the
// next tile is prefetched while the current one is being computed.
//
// Timing: a write and a swap in the same cycle write the bank that is shadow
// before the swap. rdata shows the new active bank from the cycle after swap.
// Reset clears both banks and selects bank 0 as active.
module obc_pingpong_buf #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 4,
  localparam int IW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [IW-1:0]    widx,
  input  logic [WIDTH-1:0] wdata,
  input  logic             swap,
  output logic [WIDTH-1:0] rdata [DEPTH]
);
  logic [WIDTH-1:0] bank [2][DEPTH];
  logic             act;    // active (compute-side) bank

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < DEPTH; i++) bank[b][i] <= '0;
    end else begin
      if (we)   bank[~act][widx] <= wdata;
      if (swap) act <= ~act;
    end
  end

  always_comb for (int i = 0; i < DEPTH; i++) rdata[i] = bank[act][i];
endmodule
