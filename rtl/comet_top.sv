// comet_top: DSP-free CNN accelerator built around the OBC-GEMM core.
//
// Every convolution (and every dense layer written as a 1x1 convolution) is
// run as im2col inner products: the address generator streams patches of
// the input map and the matching weights, K elements per tile, from the
// on-chip memories into ping-pong buffers; the OBC-GEMM core computes L
// output channels of one output position at a time with bit-serial
// distributed arithmetic (no multipliers); the results go through ReLU and
// requantisation and are written back into the feature memory, where the next
// layer finds them. The control unit walks the layers using a configuration
// word per layer.
//
// Memories: feature memory (xRAM read port / YRAM write port) of FM_DEPTH
// XW-bit words, weight memory (theta RAM) of WM_DEPTH words of L weights,
// bias memory (beta RAM) of BM_DEPTH words of L biases.
//
// Host interface (plain signals): while idle the host writes the memories
// and the configuration table and reads the feature memory (fm_rdata shows
// the word at fm_addr, combinationally); start runs num_layers layers from
// configuration entry 0; done pulses at the end. Memory writes from the host
// are ignored while busy.
//
// Defaults: K = 4 (size of each LUT / tile), L = 4 columns, Q = 4 (LUT group),
// hybrid LUT, scheme B, 16-bit data. Memory depths hold the All-CNN-C and
// LeNet-5 workloads; they are this design's choice.
//
// Lint notes: clipped, saturated and pad_zero are status signals kept for
// observation in simulation (the end-to-end tests count them) and drive no
// logic. The address generator's addresses are FA_W/WA_W/BA_W bits wide
// (the configuration word's fields); only the low bits that the chosen
// memory depths decode are used. rst_n is reported as both synchronous and
// asynchronous because an assertion in the address generator uses it in
// disable iff (see there).
module comet_top
  import obc_pkg::*;
#(
  parameter int        K        = 4,
  parameter int        L        = 4,
  parameter int        Q        = 4,
  parameter lut_tech_e TECH     = LUT_HYBRID,
  parameter scheme_e   SCHEME   = SCHEME_B,
  parameter int        XW       = 16,
  parameter int        WW       = 16,
  parameter int        BIW      = 16,
  parameter int        FM_DEPTH = 262144,
  parameter int        WM_DEPTH = 524288,
  parameter int        BM_DEPTH = 1024,
  parameter int        NLAYER   = 16,
  localparam int FMA = $clog2(FM_DEPTH),
  localparam int WMA = $clog2(WM_DEPTH),
  localparam int BMA = $clog2(BM_DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [4:0]                num_layers,
  output logic                      busy,
  output logic                      done,
  // configuration table
  input  logic                      cfg_we,
  input  logic [$clog2(NLAYER)-1:0] cfg_waddr,
  input  layer_cfg_t                cfg_wdata,
  // feature memory
  input  logic                      fm_we,
  input  logic [FMA-1:0]            fm_addr,
  input  logic [XW-1:0]             fm_wdata,
  output logic [XW-1:0]             fm_rdata,
  // weight memory
  input  logic                      wm_we,
  input  logic [WMA-1:0]            wm_waddr,
  input  logic [L*WW-1:0]           wm_wdata,
  // bias memory
  input  logic                      bm_we,
  input  logic [BMA-1:0]            bm_waddr,
  input  logic [L*BIW-1:0]          bm_wdata
);
  localparam int TAGW = 32;
  localparam int YW   = XW + WW + 16;
  localparam int LNW  = $clog2(L > 1 ? L : 2);

  // ---- control unit ------------------------------------------------------
  layer_cfg_t cfg;
  logic net_start, layer_start, layer_done;
  logic [3:0] layer;

  obc_ctrl #(.NLAYER(NLAYER)) u_ctrl (
    .clk, .rst_n, .start, .num_layers,
    .cfg_we, .cfg_waddr, .cfg_wdata,
    .layer, .layer_done, .cfg, .net_start, .layer_start, .busy, .done);

  // ---- address generator --------------------------------------------------
  logic [FA_W-1:0] x_raddr, y_waddr;
  logic [WA_W-1:0] w_raddr;
  logic [BA_W-1:0] b_raddr;
  logic x_zero, pad_zero, w_zero, b_we, buf_we, swap;
  logic [$clog2(K)-1:0] buf_idx;
  logic core_start, first_tile, last_tile, core_idle, y_valid, y_we;
  logic [TAGW-1:0] core_tag, y_tag;
  logic [LNW-1:0] y_lane;

  obc_addr_gen #(.K(K), .L(L), .TAGW(TAGW)) u_agen (
    .clk, .rst_n, .cfg, .net_start, .layer_start, .layer,
    .x_raddr, .x_zero, .pad_zero, .w_raddr, .w_zero, .b_raddr, .b_we,
    .buf_we, .buf_idx, .swap,
    .core_start, .first_tile, .last_tile, .core_tag, .core_idle,
    .y_valid, .y_tag, .y_we, .y_waddr, .y_lane, .layer_done);

  // ---- on-chip memories -------------------------------------------------
  logic [XW-1:0]    fm_rd, fm_wd;
  logic [L*WW-1:0]  wm_rd;
  logic [L*BIW-1:0] bm_rd;
  logic             fm_wen;
  logic [FMA-1:0]   fm_wa, fm_ra;

  always_comb begin
    fm_ra  = busy ? FMA'(x_raddr) : fm_addr;
    fm_wen = busy ? y_we : fm_we;
    fm_wa  = busy ? FMA'(y_waddr) : fm_addr;
  end
  assign fm_rdata = fm_rd;

  obc_ram #(.WIDTH(XW), .DEPTH(FM_DEPTH)) u_fmem (
    .clk, .we(fm_wen), .waddr(fm_wa), .wdata(fm_wd), .raddr(fm_ra), .rdata(fm_rd));

  obc_ram #(.WIDTH(L*WW), .DEPTH(WM_DEPTH)) u_wmem (
    .clk, .we(wm_we && !busy), .waddr(wm_waddr), .wdata(wm_wdata),
    .raddr(WMA'(w_raddr)), .rdata(wm_rd));

  obc_ram #(.WIDTH(L*BIW), .DEPTH(BM_DEPTH)) u_bmem (
    .clk, .we(bm_we && !busy), .waddr(bm_waddr), .wdata(bm_wdata),
    .raddr(BMA'(b_raddr)), .rdata(bm_rd));

  // ---- ping-pong buffers (zeros injected for padding / patch end) --------
  logic [XW-1:0]    xbuf [K];
  logic [L*WW-1:0]  wbuf [K];
  logic [L*BIW-1:0] bbuf [1];

  obc_pingpong_buf #(.WIDTH(XW), .DEPTH(K)) u_xbuf (
    .clk, .rst_n, .we(buf_we), .widx(buf_idx),
    .wdata(x_zero ? '0 : fm_rd), .swap, .rdata(xbuf));

  obc_pingpong_buf #(.WIDTH(L*WW), .DEPTH(K)) u_wbuf (
    .clk, .rst_n, .we(buf_we), .widx(buf_idx),
    .wdata(w_zero ? '0 : wm_rd), .swap, .rdata(wbuf));

  obc_pingpong_buf #(.WIDTH(L*BIW), .DEPTH(1)) u_bbuf (
    .clk, .rst_n, .we(b_we), .widx(1'b0), .wdata(bm_rd), .swap, .rdata(bbuf));

  // ---- OBC-GEMM core -----------------------------------------------------
  logic signed [XW-1:0]  cx [K];
  logic signed [WW-1:0]  cw [L][K];
  logic signed [BIW-1:0] cb [L];
  logic signed [YW-1:0]  cy [L];

  always_comb begin
    for (int k = 0; k < K; k++) begin
      cx[k] = xbuf[k];
      for (int l = 0; l < L; l++) cw[l][k] = wbuf[k][l*WW +: WW];
    end
    for (int l = 0; l < L; l++) cb[l] = bbuf[0][l*BIW +: BIW];
  end

  obc_gemm_core #(
    .K(K), .L(L), .Q(Q), .TECH(TECH), .SCHEME(SCHEME),
    .XW(XW), .WW(WW), .BIW(BIW), .TAGW(TAGW), .YW(YW)
  ) u_core (
    .clk, .rst_n, .start(core_start), .nb(cfg.nbits),
    .x(cx), .w(cw), .bias(cb), .first_tile, .last_tile, .tag(core_tag),
    .idle(core_idle), .y_valid, .y(cy), .y_tag);

  // ---- output stage: ReLU + requantisation ------------------------------
  logic clipped, saturated;
  logic [XW-1:0] fm_wd_acc;
  obc_post #(.IW(YW), .OW(XW)) u_post (
    .din(cy[y_lane]), .relu(cfg.relu), .shift(cfg.shift),
    .dout(fm_wd_acc), .clipped, .saturated);

  assign fm_wd = busy ? fm_wd_acc : fm_wdata;
endmodule
