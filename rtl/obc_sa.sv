// obc_sa: shift-accumulate (SA) unit of one OBC-DA inner-product column.
//
// Function: over nb cycles it accumulates the LUT outputs of the nb
// bit-slices of the serial operand, LSB slice first, and adds the offset
// term, so that after the last step
//     y = ( sum_{j<nb-1} D_j 2^j  -  D_{nb-1} 2^(nb-1)  +  offset ) / 2
// where D_j is the LUT output for slice j. The sign slice (the MSB) is
// subtracted. With D_j = sum_i (+/-) op_i and offset = -sum_i op_i + 2*bias
// * 2^(nb-1) this is the exact product sum plus the pre-scaled bias.
//
// How: the register is right-shifted and fed back each cycle (S1 = 0); in
// the first cycle (S1 = 1) the offset term is loaded into the feedback path
// instead, aligned with the LUT output; in the last cycle (S2 = 1) the LUT
// output is subtracted instead of added. LUT values enter at bit BMAX-1 so
// the right shifts never drop a bit; the result is realigned by
// BMAX-nb+1 places, the +1 being the factor 1/2 of OBC, kept exact here
// instead of pre-shifting every operand.
//
// Timing: one step per cycle when step = 1; y is valid in the cycle after
// the step with last = 1 and holds until the next step. nb must be >= 2.
// The realigned accumulator (ya) is wider than the result; its top bits are
// sign copies for every legal nb and are dropped when y is formed, so lint
// reports them unused.
module obc_sa
  import obc_pkg::*;
#(
  parameter int LW   = 19,   // LUT output width
  parameter int OFW  = 34,   // offset-term width
  parameter int BMAX = 16,   // largest serial width
  parameter int YW   = 48,   // result width
  localparam int AW = ((LW > OFW) ? LW : OFW) + BMAX + 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   step,
  input  logic                   first,    // S1: load the offset term
  input  logic                   last,     // S2: subtract (sign slice)
  input  logic [NB_W-1:0]        nb,
  input  logic signed [LW-1:0]   lut_val,
  input  logic signed [OFW-1:0]  offset,
  output logic signed [YW-1:0]   y
);
  logic signed [AW-1:0] acc, fb, t;

  always_comb begin
    fb = first ? (AW'(offset) <<< (BMAX - 1)) : (acc >>> 1);
    t  = AW'(lut_val) <<< (BMAX - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (step) acc <= last ? (fb - t) : (fb + t);
  end

  logic signed [AW-1:0] ya;
  always_comb begin
    ya = acc >>> (BMAX - int'(nb) + 1);
    y  = YW'(ya);
  end
endmodule
