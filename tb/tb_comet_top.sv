// tb_comet_top: end-to-end test of the accelerator at its default parameters
// (K = 4, L = 4, hybrid LUTs, scheme B, 16-bit data, full memory depths).
//
// It runs the modified LeNet-5 on one random 32x32 single-channel image:
//   conv1 5x5, 6 ch, ReLU            32x32x1  -> 28x28x6
//   pool1 3x3 stride 2, pad, ReLU    28x28x6  -> 14x14x6
//   conv2 5x5, 16 ch, ReLU           14x14x6  -> 10x10x16
//   pool2 3x3 stride 2, pad, ReLU    10x10x16 -> 5x5x16
//   GAP   5x5 convolution with weight 41 on its own channel and a
//         right shift (41 / 1024 ~ 1 / 25)  5x5x16 -> 1x1x16
//   FC1   dense 16 -> 32, ReLU (1x1 convolution on a 1x1 map)
//   FC2   dense 32 -> 10 (logits; softmax is left to the host)
// Each layer uses its own serial weight width (8, 4, 6, 4, 8, 8, 16 bits),
// random weights that fit that width and random biases. The requantisation
// shift of each layer is chosen here from the layer's largest sum, one layer
// deliberately too small so that saturation occurs.
//
// The host loads the memories and the configuration table through the top's
// ports, starts the run and, after done, reads back every layer's output map
// and compares it with a reference computed here with plain integer
// arithmetic: y = sum(w * x) + b * 2^(nb-1), ReLU, arithmetic shift,
// saturation to 16 bits.
//
// Mechanisms counted (a failure if one never happens): zero padding,
// zeros filling the last tile of a patch, stride-2 layers, multi-tile
// partial sums, tile prefetch while the core is busy (ping-pong swap),
// partial last channel group, ReLU clipping, saturation, serial-width
// switch between layers, layer switch. Tile starts must be exactly
// max(K, nb) cycles apart within a layer (stall-free streaming).
module tb_comet_top;
  import obc_pkg::*;
  localparam int K = 4, L = 4, NL = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 1'b0, busy, done;
  logic [4:0] num_layers = '0;
  logic cfg_we = 1'b0;
  logic [3:0] cfg_waddr = '0;
  layer_cfg_t cfg_wdata = '0;
  logic fm_we = 1'b0;
  logic [17:0] fm_addr = '0;
  logic [15:0] fm_wdata = '0, fm_rdata;
  logic wm_we = 1'b0;
  logic [18:0] wm_waddr = '0;
  logic [63:0] wm_wdata = '0;
  logic bm_we = 1'b0;
  logic [9:0] bm_waddr = '0;
  logic [63:0] bm_wdata = '0;

  comet_top dut (.clk, .rst_n, .start, .num_layers, .busy, .done,
    .cfg_we, .cfg_waddr, .cfg_wdata, .fm_we, .fm_addr, .fm_wdata, .fm_rdata,
    .wm_we, .wm_waddr, .wm_wdata, .bm_we, .bm_waddr, .bm_wdata);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("cycle %0d: %s", cyc, what); end
  endtask

  // ---- network description ----------------------------------------------
  layer_cfg_t lc [NL];
  int wts [NL][32][400];
  int bs  [NL][32];
  int ref_m [16384];

  function automatic layer_cfg_t mk(int h, int w, int c, int k, int s2, int p, int n, int nb,
                                    int relu, int xb, int yb, int wb, int bb);
    layer_cfg_t r;
    r = '0;
    r.h = DIM_W'(h); r.w = DIM_W'(w); r.c = DIM_W'(c); r.kh = KER_W'(k); r.kw = KER_W'(k);
    r.stride2 = 1'(s2); r.pad = 1'(p); r.n = DIM_W'(n); r.nbits = NB_W'(nb); r.relu = 1'(relu);
    r.xbase = FA_W'(xb); r.ybase = FA_W'(yb); r.wbase = WA_W'(wb); r.bbase = BA_W'(bb);
    return r;
  endfunction

  function automatic int ho_of(layer_cfg_t c);
    return (int'(c.h) + int'(c.pad) - int'(c.kh)) / (c.stride2 ? 2 : 1) + 1;
  endfunction
  function automatic int wo_of(layer_cfg_t c);
    return (int'(c.w) + int'(c.pad) - int'(c.kw)) / (c.stride2 ? 2 : 1) + 1;
  endfunction

  // reference for one layer; also picks the layer's shift
  task automatic ref_layer(int li, int squeeze);
    layer_cfg_t c;
    int ho, wo, s, np, sh;
    longint acc [], mx;
    c = lc[li];
    ho = ho_of(c); wo = wo_of(c); s = c.stride2 ? 2 : 1;
    np = int'(c.c) * int'(c.kh) * int'(c.kw);
    acc = new[int'(c.n) * ho * wo];
    mx = 1;
    for (int n = 0; n < int'(c.n); n++)
      for (int oh = 0; oh < ho; oh++)
        for (int ow = 0; ow < wo; ow++) begin
          longint a;
          a = longint'(bs[li][n]) <<< (int'(c.nbits) - 1);
          for (int i = 0; i < np; i++) begin
            int ch, kh, kw, ih, iw, xv;
            ch = i / int'(c.kh * c.kw); kh = (i / int'(c.kw)) % int'(c.kh); kw = i % int'(c.kw);
            ih = oh * s + kh; iw = ow * s + kw;
            xv = (ih < int'(c.h) && iw < int'(c.w)) ? ref_m[int'(c.xbase) + ch * int'(c.h * c.w) + ih * int'(c.w) + iw] : 0;
            a += longint'(wts[li][n][i]) * longint'(xv);
          end
          acc[n * ho * wo + oh * wo + ow] = a;
          if (a > mx) mx = a;
          if (-a > mx) mx = -a;
        end
    sh = 0;
    while ((mx >>> sh) >= 64'sd8192) sh++;
    sh = (sh > squeeze) ? sh - squeeze : 0;
    if (li == 4) sh = 10;   // GAP: 41 / 1024 ~ 1 / 25
    lc[li].shift = SH_W'(sh);
    for (int j = 0; j < acc.size(); j++) begin
      longint v;
      v = acc[j];
      if (c.relu && v < 0) v = 0;
      v = v >>> sh;
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
      ref_m[int'(c.ybase) + j] = int'(v);
    end
  endtask

  // ---- mechanism counters ------------------------------------------------
  int n_pad = 0, n_tailzero = 0, n_stride2 = 0, n_partial = 0, n_prefetch = 0,
      n_lane_skip = 0, n_clip = 0, n_sat = 0, n_nbswitch = 0, n_layer = 0;
  int last_start = -1, prev_nb = -1;
  always @(negedge clk) if (rst_n && busy) begin
    if (dut.buf_we && dut.pad_zero) n_pad++;
    if (dut.buf_we && dut.w_zero) n_tailzero++;
    if (dut.core_start && !dut.first_tile) n_partial++;
    if (dut.swap && !dut.core_idle) n_prefetch++;
    if (dut.y_we && dut.u_post.clipped) n_clip++;
    if (dut.y_we && dut.u_post.saturated) n_sat++;
    if (dut.layer_start) begin
      n_layer++;
      if (dut.cfg.stride2) n_stride2++;
      if (prev_nb >= 0 && prev_nb != int'(dut.cfg.nbits)) n_nbswitch++;
      if (int'(dut.cfg.n) % L != 0) n_lane_skip++;
      prev_nb = int'(dut.cfg.nbits);
      last_start = -1;
    end
    if (dut.core_start) begin
      int t;
      t = (int'(dut.cfg.nbits) > K) ? int'(dut.cfg.nbits) : K;
      if (last_start >= 0) chk(cyc - last_start == t, $sformatf("tile spacing %0d, expected %0d", cyc - last_start, t));
      last_start = cyc;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wb, bb, t0;
    int nbl [NL] = '{8, 4, 6, 4, 8, 8, 16};
    //            h   w   c  k s2 p   n  nb  relu xbase  ybase  wbase bbase
    lc[0] = mk(32, 32,  1, 5, 0, 0,  6, nbl[0], 1,     0,  2048,    0,  0);
    lc[1] = mk(28, 28,  6, 3, 1, 1,  6, nbl[1], 1,  2048,  8192,    0,  0);
    lc[2] = mk(14, 14,  6, 5, 0, 0, 16, nbl[2], 1,  8192, 10240,    0,  0);
    lc[3] = mk(10, 10, 16, 3, 1, 1, 16, nbl[3], 1, 10240, 12288,    0,  0);
    lc[4] = mk( 5,  5, 16, 5, 0, 0, 16, nbl[4], 0, 12288, 13312,    0,  0);
    lc[5] = mk( 1,  1, 16, 1, 0, 0, 32, nbl[5], 1, 13312, 13568,    0,  0);
    lc[6] = mk( 1,  1, 32, 1, 0, 0, 10, nbl[6], 0, 13568, 13824,    0,  0);
    // weight / bias word bases: one group of L channels per np words
    wb = 0; bb = 0;
    for (int li = 0; li < NL; li++) begin
      int np, ng;
      np = int'(lc[li].c * lc[li].kh * lc[li].kw);
      ng = (int'(lc[li].n) + L - 1) / L;
      lc[li].wbase = WA_W'(wb); lc[li].bbase = BA_W'(bb);
      wb += ng * np; bb += ng;
    end
    // random image, weights and biases
    foreach (ref_m[i]) ref_m[i] = 0;
    for (int i = 0; i < 1024; i++) ref_m[i] = int'($urandom_range(0, 255));
    for (int li = 0; li < NL; li++) begin
      int nb, np;
      nb = nbl[li];
      np = int'(lc[li].c * lc[li].kh * lc[li].kw);
      for (int n = 0; n < 32; n++) begin
        for (int i = 0; i < 400; i++) begin
          if (n >= int'(lc[li].n) || i >= np) wts[li][n][i] = 0;
          else if (li == 4) wts[li][n][i] = (i / 25 == n) ? 41 : 0;
          else wts[li][n][i] = int'($urandom_range(0, (1 << nb) - 1)) - (1 << (nb - 1));
        end
        bs[li][n] = (n < int'(lc[li].n) && li != 4) ? int'($urandom_range(0, 400)) - 200 : 0;
      end
    end
    for (int li = 0; li < NL; li++) ref_layer(li, (li == 2) ? 3 : 0);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- host loads the memories and the configuration table ----
    for (int i = 0; i < 1024; i++) begin
      fm_we = 1'b1; fm_addr = 18'(i); fm_wdata = 16'(ref_m[i]); @(negedge clk);
    end
    fm_we = 1'b0;
    for (int li = 0; li < NL; li++) begin
      int np, ng;
      np = int'(lc[li].c * lc[li].kh * lc[li].kw);
      ng = (int'(lc[li].n) + L - 1) / L;
      for (int g = 0; g < ng; g++) begin
        for (int i = 0; i < np; i++) begin
          wm_we = 1'b1; wm_waddr = 19'(int'(lc[li].wbase) + g * np + i);
          for (int l = 0; l < L; l++) wm_wdata[l*16 +: 16] = 16'(wts[li][g*L+l][i]);
          @(negedge clk);
        end
        wm_we = 1'b0;
        bm_we = 1'b1; bm_waddr = 10'(int'(lc[li].bbase) + g);
        for (int l = 0; l < L; l++) bm_wdata[l*16 +: 16] = 16'(bs[li][g*L+l]);
        @(negedge clk);
        bm_we = 1'b0;
      end
      cfg_we = 1'b1; cfg_waddr = 4'(li); cfg_wdata = lc[li]; @(negedge clk);
      cfg_we = 1'b0;
    end
    // ---- run ----
    num_layers = 5'(NL);
    start = 1'b1; @(negedge clk); start = 1'b0;
    t0 = cyc;
    chk(busy, "busy after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    $display("network finished in %0d cycles", cyc - t0);
    chk(!busy, "idle after done");
    // ---- read back and compare every layer's output ----
    for (int li = 0; li < NL; li++) begin
      int cnt, bad;
      cnt = int'(lc[li].n) * ho_of(lc[li]) * wo_of(lc[li]);
      bad = 0;
      for (int j = 0; j < cnt; j++) begin
        int a;
        a = int'(lc[li].ybase) + j;
        fm_addr = 18'(a); #1;
        chk($signed(fm_rdata) == 16'(ref_m[a]),
            $sformatf("layer %0d word %0d: got %0d expected %0d", li, j, $signed(fm_rdata), ref_m[a]));
      end
    end
    $display("mechanisms: pad=%0d tailzero=%0d stride2=%0d partial=%0d prefetch=%0d lane_skip=%0d clip=%0d sat=%0d nbswitch=%0d layers=%0d",
             n_pad, n_tailzero, n_stride2, n_partial, n_prefetch, n_lane_skip, n_clip, n_sat, n_nbswitch, n_layer);
    chk(n_pad > 0, "no padding zeros injected");
    chk(n_tailzero > 0, "no zero-filled tail tiles");
    chk(n_stride2 > 0, "no stride-2 layer");
    chk(n_partial > 0, "no multi-tile partial sums");
    chk(n_prefetch > 0, "no prefetch during compute");
    chk(n_lane_skip > 0, "no partial channel group");
    chk(n_clip > 0, "no ReLU clipping");
    chk(n_sat > 0, "no saturation");
    chk(n_nbswitch > 0, "no bit-width switch");
    chk(n_layer == NL, "layer count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
