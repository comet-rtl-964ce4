// obc_addr_gen: im2col address generator with hierarchical read, calculate
// and write counters.
//
// Function: walks one layer as a sequence of tiles and produces, every
// cycle, the memory addresses that stream the tiles into the ping-pong
// buffers, the start of each tile on the OBC-GEMM core, and the write-back
// addresses of finished output positions. The loop nest, innermost first, is
//   cntr0    : data group within the tile read period (0 .. T-1)
//   rd_cntr1 : tile of the patch                (0 .. ceil(C*KH*KW / K)-1)
//   rd_cntr2 : output position (h, w)           (0 .. Ho*Wo-1)
//   rd_cntr3 : output-channel group of L        (0 .. ceil(N / L)-1)
//   rd_cntr4 : layer index
// Carry 1 (cntr0 at its bound: one tile loaded) resets cntr0 and steps
// rd_cntr1; carry 2 steps rd_cntr2, carry 3 rd_cntr3, carry 4 rd_cntr4. Only
// the read counters ripple. On carry 1 the read counters are copied into the
// calculation counters (the context of the tile now handed to the core); the
// core returns that context with its result and it is copied into the write
// counters, so reading, computing and writing overlap without interfering.
//
// im2col mapping: patch element i = (c, kh, kw) of output position (oh, ow)
// reads input (c, oh*S+kh, ow*S+kw) at xbase + c*H*W + row*W + col. The
// element walk is kept in counters, not divided out of i. Elements past the
// patch end (i >= C*KH*KW) and, with P = 1, the one zero row/column after the
// map (row >= H or col >= W) are injected as zeros (x_zero / w_zero).
// Weight word of element i for channel group g: wbase + g*C*KH*KW + i.
// Bias word of group g: bbase + g. Output of channel n at position p:
// ybase + n*Ho*Wo + p; lanes with n >= N are not written.
//
// Timing: the tile period T = max(K, nb) cycles. Elements are read in cycles
// cntr0 = 0 .. K-1 (asynchronous-read RAMs, so data reaches the buffer in the
// same cycle); swap is asserted with carry 1 and core_start one cycle later,
// so with nb >= K the core never waits. Writes of one position take L cycles
// and must finish before the next position completes, hence L <= K.
// layer_done pulses once when the last write of the layer is done.
//
// Paper versus own choices: the counter hierarchy cntr0 / rd_cntr1..4 with
// carries 1..4, the copy into calculation and write counters, zero injection
// for padding and the ping-pong prefetch follow the accelerator description.
// The loop order, the CHW memory layout, the base-address arithmetic and the
// one-cycle gap between swap and core_start are this design's choices.
//
// Lint note: the ReLU and shift fields of the configuration word belong to
// the output stage and are not read here (UNUSEDSIGNAL on cfg).
// Lint note: verilator reports SYNCASYNCNET on rst_n because the write-busy
// assertion below samples it in its disable-iff clause while the flops use
// it as an asynchronous reset. That is how the assertion is meant to work
// (ignore the rule during reset) and has no effect on the circuit.
module obc_addr_gen
  import obc_pkg::*;
#(
  parameter int K    = 4,
  parameter int L    = 4,
  parameter int TAGW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 net_start,    // clears the layer counter
  input  logic                 layer_start,  // begin the layer in cfg
  output logic [3:0]           layer,        // rd_cntr4
  // read side
  output logic [FA_W-1:0]      x_raddr,
  output logic                 x_zero,
  output logic                 pad_zero,     // zero injected for padding
  output logic [WA_W-1:0]      w_raddr,
  output logic                 w_zero,
  output logic [BA_W-1:0]      b_raddr,
  output logic                 b_we,
  output logic                 buf_we,
  output logic [$clog2(K)-1:0] buf_idx,
  output logic                 swap,
  // core side
  output logic                 core_start,
  output logic                 first_tile,
  output logic                 last_tile,
  output logic [TAGW-1:0]      core_tag,
  input  logic                 core_idle,
  input  logic                 y_valid,
  input  logic [TAGW-1:0]      y_tag,
  // write side
  output logic                 y_we,
  output logic [FA_W-1:0]      y_waddr,
  output logic [$clog2(L > 1 ? L : 2)-1:0] y_lane,
  output logic                 layer_done
);
  localparam int PW = 20;                  // position / patch counters
  localparam int GW = TAGW - PW;           // channel-group counter

  initial begin
    assert (L <= K) else $error("obc_addr_gen: L must not exceed K");
    assert ((1 << $clog2(K)) == K) else $error("obc_addr_gen: K must be a power of two");
  end

  // ---- layer geometry (derived from the configuration word) ----------
  logic [PW-1:0] ho, wo, howo, hw, np, nt, ng_n;
  logic [NB_W-1:0] tper;
  always_comb begin
    ho   = ((PW'(cfg.h) + PW'(cfg.pad) - PW'(cfg.kh)) >> cfg.stride2) + 1'b1;
    wo   = ((PW'(cfg.w) + PW'(cfg.pad) - PW'(cfg.kw)) >> cfg.stride2) + 1'b1;
    howo = ho * wo;
    hw   = PW'(cfg.h) * PW'(cfg.w);
    np   = PW'(cfg.c) * PW'(cfg.kh) * PW'(cfg.kw);
    nt   = (np + PW'(K - 1)) >> $clog2(K);
    ng_n = (PW'(cfg.n) + PW'(L - 1)) / PW'(L);
    tper = (cfg.nbits > NB_W'(K)) ? cfg.nbits : NB_W'(K);
  end

  // ---- read counters ---------------------------------------------------
  logic            rd_act, lay_act;
  logic [NB_W-1:0] cntr0;
  logic [PW-1:0]   rd_cntr1, rd_cntr2;
  logic [GW-1:0]   rd_cntr3;
  logic [3:0]      rd_cntr4;
  logic [PW-1:0]   oh, ow, ih0, iw0;          // output position, input origin
  logic [PW-1:0]   ei, ec, ekh, ekw;          // patch element walk
  logic [PW-1:0]   gwoff;                     // rd_cntr3 * C*KH*KW
  logic            carry1, carry2, carry3, carry4, rd_el;

  assign layer = rd_cntr4;

  always_comb begin
    rd_el  = rd_act && (cntr0 < NB_W'(K));
    carry1 = rd_act && (cntr0 == tper - 1'b1);
    carry2 = carry1 && (rd_cntr1 == nt - 1'b1);
    carry3 = carry2 && (rd_cntr2 == howo - 1'b1);
    carry4 = carry3 && (rd_cntr3 == GW'(ng_n - 1'b1));
  end

  logic [PW-1:0] ih, iw;
  always_comb begin
    ih       = ih0 + ekh;
    iw       = iw0 + ekw;
    pad_zero = rd_el && (ei < np) && ((ih >= PW'(cfg.h)) || (iw >= PW'(cfg.w)));
    x_zero   = (ei >= np) || (ih >= PW'(cfg.h)) || (iw >= PW'(cfg.w));
    x_raddr  = cfg.xbase + FA_W'(ec * hw) + FA_W'(ih * PW'(cfg.w)) + FA_W'(iw);
    w_zero   = (ei >= np);
    w_raddr  = cfg.wbase + WA_W'(gwoff) + WA_W'(ei);
    b_raddr  = cfg.bbase + BA_W'(rd_cntr3);
    b_we     = rd_act && (cntr0 == '0);
    buf_we   = rd_el;
    buf_idx  = cntr0[$clog2(K)-1:0];
    swap     = carry1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; cntr0 <= '0;
      rd_cntr1 <= '0; rd_cntr2 <= '0; rd_cntr3 <= '0; rd_cntr4 <= '0;
      oh <= '0; ow <= '0; ih0 <= '0; iw0 <= '0;
      ei <= '0; ec <= '0; ekh <= '0; ekw <= '0; gwoff <= '0;
    end else begin
      if (net_start) rd_cntr4 <= '0;
      if (layer_start) begin
        rd_act <= 1'b1; cntr0 <= '0;
        rd_cntr1 <= '0; rd_cntr2 <= '0; rd_cntr3 <= '0;
        oh <= '0; ow <= '0; ih0 <= '0; iw0 <= '0;
        ei <= '0; ec <= '0; ekh <= '0; ekw <= '0; gwoff <= '0;
      end else if (rd_act) begin
        // element walk through (c, kh, kw)
        if (rd_el) begin
          ei <= ei + 1'b1;
          if (ekw == PW'(cfg.kw) - 1'b1) begin
            ekw <= '0;
            if (ekh == PW'(cfg.kh) - 1'b1) begin
              ekh <= '0;
              ec  <= ec + 1'b1;
            end else ekh <= ekh + 1'b1;
          end else ekw <= ekw + 1'b1;
        end
        cntr0 <= carry1 ? '0 : cntr0 + 1'b1;
        if (carry1) rd_cntr1 <= carry2 ? '0 : rd_cntr1 + 1'b1;
        if (carry2) begin
          // new output position: restart the patch walk
          ei <= '0; ec <= '0; ekh <= '0; ekw <= '0;
          rd_cntr2 <= carry3 ? '0 : rd_cntr2 + 1'b1;
          if (carry3 || ow == wo - 1'b1) begin
            ow <= '0; iw0 <= '0;
            if (carry3) begin
              oh <= '0; ih0 <= '0;
            end else begin
              oh  <= oh + 1'b1;
              ih0 <= ih0 + (cfg.stride2 ? PW'(2) : PW'(1));
            end
          end else begin
            ow  <= ow + 1'b1;
            iw0 <= iw0 + (cfg.stride2 ? PW'(2) : PW'(1));
          end
        end
        if (carry3) begin
          rd_cntr3 <= carry4 ? '0 : rd_cntr3 + 1'b1;
          gwoff    <= carry4 ? '0 : gwoff + np;
        end
        if (carry4) begin
          rd_act   <= 1'b0;
          rd_cntr4 <= rd_cntr4 + 1'b1;
        end
      end
    end
  end

  // ---- calculation counters: tile context handed to the core ----------
  logic          issue;
  logic [PW-1:0] cal_cntr1, cal_cntr2;
  logic [GW-1:0] cal_cntr3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue <= 1'b0; cal_cntr1 <= '0; cal_cntr2 <= '0; cal_cntr3 <= '0;
    end else begin
      issue <= carry1;
      if (carry1) begin
        cal_cntr1 <= rd_cntr1;
        cal_cntr2 <= rd_cntr2;
        cal_cntr3 <= rd_cntr3;
      end
    end
  end

  always_comb begin
    core_start = issue;
    first_tile = (cal_cntr1 == '0);
    last_tile  = (cal_cntr1 == nt - 1'b1);
    core_tag   = {cal_cntr3, cal_cntr2};
  end

  // ---- write counters ----------------------------------------------------
  logic          wr_busy;
  logic [PW-1:0] wr_cntr2;
  logic [GW-1:0] wr_cntr3;
  logic [$clog2(L > 1 ? L : 2)-1:0] lane;
  logic [PW-1:0] ch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy <= 1'b0; wr_cntr2 <= '0; wr_cntr3 <= '0; lane <= '0;
    end else begin
      if (wr_busy) begin
        lane <= lane + 1'b1;
        if (lane == $bits(lane)'(L - 1)) wr_busy <= 1'b0;
      end
      if (y_valid) begin
        wr_busy  <= 1'b1;
        lane     <= '0;
        wr_cntr3 <= y_tag[TAGW-1:PW];
        wr_cntr2 <= y_tag[PW-1:0];
      end
    end
  end

  always_comb begin
    ch      = PW'(wr_cntr3) * PW'(L) + PW'(lane);
    y_we    = wr_busy && (ch < PW'(cfg.n));
    y_waddr = cfg.ybase + FA_W'(ch * howo) + FA_W'(wr_cntr2);
    y_lane  = lane;
  end

  // results must never arrive while the previous ones are still being written
  assert property (@(posedge clk) disable iff (!rst_n) y_valid |-> !wr_busy);

  // ---- layer completion -------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lay_act <= 1'b0; layer_done <= 1'b0;
    end else begin
      layer_done <= 1'b0;
      if (layer_start) lay_act <= 1'b1;
      else if (lay_act && !rd_act && !issue && core_idle && !wr_busy && !y_valid) begin
        lay_act    <= 1'b0;
        layer_done <= 1'b1;
      end
    end
  end
endmodule
