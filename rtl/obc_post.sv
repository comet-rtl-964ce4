// obc_post: output stage between the OBC-GEMM core and the feature memory.
//
// Function: optional ReLU, then an arithmetic right shift by `shift`, then
// saturation to OW-bit two's complement, so that a layer's output can be
// stored at the activation width and read by the next layer.
// ReLU follows the networks the accelerator runs; the shift-and-saturate
// requantisation is this design's choice (its position and form are not
// specified elsewhere). Purely combinational.
module obc_post
  import obc_pkg::*;
#(
  parameter int IW = 48,
  parameter int OW = 16
) (
  input  logic signed [IW-1:0] din,
  input  logic                 relu,
  input  logic [SH_W-1:0]      shift,
  output logic signed [OW-1:0] dout,
  output logic                 clipped,   // ReLU zeroed a negative value
  output logic                 saturated  // value exceeded the OW-bit range
);
  localparam logic signed [IW-1:0] MAXV = IW'((1 <<< (OW - 1)) - 1);
  localparam logic signed [IW-1:0] MINV = -IW'(1 <<< (OW - 1));

  logic signed [IW-1:0] r, s;
  always_comb begin
    clipped   = relu && (din < 0);
    r         = clipped ? '0 : din;
    s         = r >>> shift;
    saturated = (s > MAXV) || (s < MINV);
    if (s > MAXV)      dout = OW'(MAXV);
    else if (s < MINV) dout = OW'(MINV);
    else               dout = OW'(s);
  end
endmodule
