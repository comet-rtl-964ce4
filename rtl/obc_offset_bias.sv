// obc_offset_bias: one adder forming the OBC offset term with the bias.
//
// Function: offset = (bias_en ? bias << nb : 0) - all_pos.
// all_pos is the all-positive (address-0) LUT content of the tile, so
// -all_pos is the OBC offset term; the bias, pre-scaled by 2^(nb-1) (and by
// 2 more because the SA keeps the OBC factor 1/2 until its output), enters
// through a 2-to-1 multiplexer only on the last tile of an output position
// (bias_en). Offset and bias thus share one subtractor and no separate bias
// adder exists downstream. Purely combinational.
module obc_offset_bias
  import obc_pkg::*;
#(
  parameter int LW   = 19,
  parameter int BIW  = 16,
  parameter int BMAX = 16,
  localparam int OFW = ((LW > BIW + BMAX) ? LW : BIW + BMAX) + 2
) (
  input  logic signed [LW-1:0]  all_pos,
  input  logic signed [BIW-1:0] bias,
  input  logic                  bias_en,
  input  logic [NB_W-1:0]       nb,
  output logic signed [OFW-1:0] offset
);
  logic signed [OFW-1:0] b;
  always_comb begin
    b      = bias_en ? (OFW'(bias) <<< nb) : '0;
    offset = b - OFW'(all_pos);
  end
endmodule
