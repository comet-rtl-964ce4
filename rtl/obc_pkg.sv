// obc_pkg: types and constants shared by the OBC-GEMM accelerator.
//
// The accelerator computes every CNN layer as an im2col inner-product
// (IPC) problem on a bit-serial distributed-arithmetic core whose look-up
// tables are built from adders at run time (offset-binary coding, OBC).
// This package holds the enumerations that select the LUT technique and the
// OBC scheme, and the per-layer configuration word.
//
// The fields of the configuration word follow the list of what the word
// encodes (kernel C x K x L, stride S in {1,2}, padding P in {0,1}, input
// and output channels, serial bit width). The base addresses, the ReLU
// enable and the requantisation shift are this design's additions, needed
// to chain layers through one feature memory. Field widths are this
// design's choice.
package obc_pkg;

  // LUT generation technique (four OBC hardware-LUT variants)
  typedef enum logic [1:0] {
    LUT_PARALLEL = 2'd0,
    LUT_SHARED   = 2'd1,
    LUT_SPLIT    = 2'd2,
    LUT_HYBRID   = 2'd3
  } lut_tech_e;

  // Which operand is bit-serialised (and coded in OBC):
  //   SCHEME_A: inputs x are serialised, LUTs are built from the weights.
  //   SCHEME_B: weights are serialised, LUTs are built from the inputs.
  typedef enum logic {
    SCHEME_A = 1'b0,
    SCHEME_B = 1'b1
  } scheme_e;

  localparam int DIM_W  = 10;  // map height/width, channel counts
  localparam int KER_W  = 4;   // kernel height/width
  localparam int NB_W   = 5;   // serial bit width (2..31)
  localparam int SH_W   = 6;   // requantisation shift
  localparam int FA_W   = 20;  // feature-memory address
  localparam int WA_W   = 20;  // weight-memory address
  localparam int BA_W   = 12;  // bias-memory address

  // One layer's configuration word.
  typedef struct packed {
    logic [DIM_W-1:0] h;        // input map height H
    logic [DIM_W-1:0] w;        // input map width W
    logic [DIM_W-1:0] c;        // input channels C
    logic [KER_W-1:0] kh;       // kernel height K
    logic [KER_W-1:0] kw;       // kernel width L
    logic             stride2;  // S = 2 when set, else S = 1
    logic             pad;      // P = 1: one zero row/column after the map
    logic [DIM_W-1:0] n;        // output channels N
    logic [NB_W-1:0]  nbits;    // serial bit width (B1 or B2) of this layer
    logic             relu;     // apply ReLU before requantisation
    logic [SH_W-1:0]  shift;    // arithmetic right shift before saturation
    logic [FA_W-1:0]  xbase;    // input map base address (CHW order)
    logic [FA_W-1:0]  ybase;    // output map base address (CHW order)
    logic [WA_W-1:0]  wbase;    // first weight word of this layer
    logic [BA_W-1:0]  bbase;    // first bias word of this layer
  } layer_cfg_t;

endpackage
