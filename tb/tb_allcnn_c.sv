// tb_allcnn_c: runs the All-CNN-C network on the accelerator at its default
// parameters (K = 4, L = 4, hybrid LUTs, scheme B, 16-bit activations, full
// memory depths) and checks every output map of every layer.
//
// Network (CIFAR-10 sized 32x32x3 input, random pixels 0..255):
//   conv1  3x3,  96 ch          32x32x3   -> 30x30x96
//   conv2  3x3,  96 ch          30x30x96  -> 28x28x96
//   down1  3x3,  96 ch, S2, P1  28x28x96  -> 14x14x96
//   conv3  3x3, 192 ch          14x14x96  -> 12x12x192
//   conv4  3x3, 192 ch          12x12x192 -> 10x10x192
//   down2  3x3, 192 ch, S2, P1  10x10x192 -> 5x5x192
//   conv5  3x3, 192 ch          5x5x192   -> 3x3x192
//   conv6  1x1, 192 ch          3x3x192   -> 3x3x192
//   conv7  1x1,  10 ch          3x3x192   -> 3x3x10
//   gap    3x3 convolution with weight 114 on its own channel and a shift
//          of 10 (114 / 1024 ~ 1 / 9)   3x3x10 -> 1x1x10 (logits)
// All layers apply ReLU except the last. The 3x3 convolutions are unpadded
// and the two stride-2 layers use one-sided padding; this is the form of
// the network this accelerator supports. Weights are random in the layer's
// serial width (8 bits for the first and the last three layers, 4 bits
// elsewhere), biases random; each layer's requantisation shift is chosen
// here from its largest sum.
//
// The layers ping-pong between two regions of the feature memory, so the
// output of a layer overwrites the input of the layer before. Each output map
// is therefore compared with an independent integer reference (computed here
// before the run) at the moment its layer reports done, by reading the
// feature memory through the hierarchy. Tile starts must come exactly
// max(K, nb) cycles apart within a layer, and the total run time is checked
// against the sum of the layers' tile counts times their tile periods plus a
// small drain allowance per layer.
module tb_allcnn_c;
  import obc_pkg::*;
  localparam int K = 4, L = 4, NL = 10;
  localparam int RA = 0, RB = 100000;     // the two feature-memory regions

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

  layer_cfg_t lc [NL];
  int np_of [NL], ng_of [NL], woff [NL];
  int wts [];                 // weights, layer li channel n element i at woff[li] + n*np + i
  int bs  [NL][192];
  int img [3072];
  int expd [NL][$];           // expected output map of each layer

  function automatic layer_cfg_t mk(int h, int w, int c, int k, int s2, int p, int n, int nb,
                                    int relu, int xb, int yb);
    layer_cfg_t r;
    r = '0;
    r.h = DIM_W'(h); r.w = DIM_W'(w); r.c = DIM_W'(c); r.kh = KER_W'(k); r.kw = KER_W'(k);
    r.stride2 = 1'(s2); r.pad = 1'(p); r.n = DIM_W'(n); r.nbits = NB_W'(nb); r.relu = 1'(relu);
    r.xbase = FA_W'(xb); r.ybase = FA_W'(yb);
    return r;
  endfunction

  function automatic int ho_of(layer_cfg_t c);
    return (int'(c.h) + int'(c.pad) - int'(c.kh)) / (c.stride2 ? 2 : 1) + 1;
  endfunction
  function automatic int wo_of(layer_cfg_t c);
    return (int'(c.w) + int'(c.pad) - int'(c.kw)) / (c.stride2 ? 2 : 1) + 1;
  endfunction

  task automatic ref_layer(int li);
    layer_cfg_t c;
    int ho, wo, s, np, sh, kk, hh, ww;
    longint acc [], mx;
    int xin [$];
    c = lc[li];
    ho = ho_of(c); wo = wo_of(c); s = c.stride2 ? 2 : 1;
    np = np_of[li]; kk = int'(c.kh); hh = int'(c.h); ww = int'(c.w);
    if (li == 0) foreach (img[i]) xin.push_back(img[i]);
    else xin = expd[li-1];
    acc = new[int'(c.n) * ho * wo];
    mx = 1;
    for (int n = 0; n < int'(c.n); n++)
      for (int oh = 0; oh < ho; oh++)
        for (int ow = 0; ow < wo; ow++) begin
          longint a;
          int wb;
          a = longint'(bs[li][n]) <<< (int'(c.nbits) - 1);
          wb = woff[li] + n * np;
          for (int ch = 0; ch < int'(c.c); ch++)
            for (int kh = 0; kh < kk; kh++)
              for (int kw = 0; kw < kk; kw++) begin
                int ih, iw;
                ih = oh * s + kh; iw = ow * s + kw;
                if (ih < hh && iw < ww)
                  a += longint'(wts[wb + (ch * kk + kh) * kk + kw]) * longint'(xin[(ch * hh + ih) * ww + iw]);
              end
          acc[(n * ho + oh) * wo + ow] = a;
          if (a > mx) mx = a;
          if (-a > mx) mx = -a;
        end
    sh = 0;
    while ((mx >>> sh) >= 64'sd8192) sh++;
    if (li == NL - 1) sh = 10;
    lc[li].shift = SH_W'(sh);
    expd[li] = {};
    for (int j = 0; j < acc.size(); j++) begin
      longint v;
      v = acc[j];
      if (c.relu && v < 0) v = 0;
      v = v >>> sh;
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
      expd[li].push_back(int'(v));
    end
  endtask

  // ---- per-layer comparison, tile spacing, mechanisms ----
  int cur = 0, last_start = -1, n_pad = 0, n_s2 = 0, n_clip = 0, t_run = 0;
  longint budget = 0;
  always @(negedge clk) if (rst_n && busy) begin
    if (dut.buf_we && dut.pad_zero) n_pad++;
    if (dut.y_we && dut.u_post.clipped) n_clip++;
    if (dut.layer_start) begin
      last_start = -1;
      if (dut.cfg.stride2) n_s2++;
    end
    if (dut.core_start) begin
      int t;
      t = (int'(dut.cfg.nbits) > K) ? int'(dut.cfg.nbits) : K;
      if (last_start >= 0) chk(cyc - last_start == t, $sformatf("layer %0d tile spacing %0d, expected %0d", cur, cyc - last_start, t));
      last_start = cyc;
    end
    if (dut.layer_done) begin
      int bad;
      bad = 0;
      for (int j = 0; j < expd[cur].size(); j++) begin
        logic [15:0] v;
        v = dut.u_fmem.mem[int'(lc[cur].ybase) + j];
        checks++;
        if ($signed(v) != 16'(expd[cur][j])) begin
          bad++; failures++;
          if (bad < 4) $display("layer %0d word %0d: got %0d expected %0d", cur, j, $signed(v), expd[cur][j]);
        end
      end
      $display("layer %0d done at cycle %0d: %0d words, %0d mismatches", cur, cyc, expd[cur].size(), bad);
      cur++;
    end
  end

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wb, bb, t0, nw;
    int nbl [NL] = '{8, 4, 4, 4, 4, 4, 4, 8, 8, 8};
    //             h   w    c  k s2 p    n  nb      relu xbase ybase
    lc[0] = mk(32, 32,   3, 3, 0, 0,  96, nbl[0], 1, RA, RB);
    lc[1] = mk(30, 30,  96, 3, 0, 0,  96, nbl[1], 1, RB, RA);
    lc[2] = mk(28, 28,  96, 3, 1, 1,  96, nbl[2], 1, RA, RB);
    lc[3] = mk(14, 14,  96, 3, 0, 0, 192, nbl[3], 1, RB, RA);
    lc[4] = mk(12, 12, 192, 3, 0, 0, 192, nbl[4], 1, RA, RB);
    lc[5] = mk(10, 10, 192, 3, 1, 1, 192, nbl[5], 1, RB, RA);
    lc[6] = mk( 5,  5, 192, 3, 0, 0, 192, nbl[6], 1, RA, RB);
    lc[7] = mk( 3,  3, 192, 1, 0, 0, 192, nbl[7], 1, RB, RA);
    lc[8] = mk( 3,  3, 192, 1, 0, 0,  10, nbl[8], 1, RA, RB);
    lc[9] = mk( 3,  3,  10, 3, 0, 0,  10, nbl[9], 0, RB, RA);
    wb = 0; bb = 0; nw = 0;
    for (int li = 0; li < NL; li++) begin
      int t;
      np_of[li] = int'(lc[li].c * lc[li].kh * lc[li].kw);
      ng_of[li] = (int'(lc[li].n) + L - 1) / L;
      lc[li].wbase = WA_W'(wb); lc[li].bbase = BA_W'(bb);
      woff[li] = nw;
      wb += ng_of[li] * np_of[li]; bb += ng_of[li]; nw += int'(lc[li].n) * np_of[li];
      t = (int'(lc[li].nbits) > K) ? int'(lc[li].nbits) : K;
      budget += longint'(ho_of(lc[li]) * wo_of(lc[li])) * ng_of[li] * ((np_of[li] + K - 1) / K) * t + 64;
    end
    $display("weight words %0d, bias words %0d, weights %0d", wb, bb, nw);
    wts = new[nw];
    foreach (img[i]) img[i] = int'($urandom_range(0, 255));
    for (int li = 0; li < NL; li++) begin
      int nb;
      nb = nbl[li];
      for (int n = 0; n < int'(lc[li].n); n++) begin
        for (int i = 0; i < np_of[li]; i++)
          if (li == NL - 1) wts[woff[li] + n * np_of[li] + i] = (i / 9 == n) ? 114 : 0;
          else wts[woff[li] + n * np_of[li] + i] = int'($urandom_range(0, (1 << nb) - 1)) - (1 << (nb - 1));
        bs[li][n] = (li == NL - 1) ? 0 : int'($urandom_range(0, 400)) - 200;
      end
    end
    for (int li = 0; li < NL; li++) ref_layer(li);
    $display("reference computed");

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3072; i++) begin
      fm_we = 1'b1; fm_addr = 18'(RA + i); fm_wdata = 16'(img[i]); @(negedge clk);
    end
    fm_we = 1'b0;
    for (int li = 0; li < NL; li++) begin
      int np;
      np = np_of[li];
      for (int g = 0; g < ng_of[li]; g++) begin
        for (int i = 0; i < np; i++) begin
          wm_we = 1'b1; wm_waddr = 19'(int'(lc[li].wbase) + g * np + i);
          for (int l = 0; l < L; l++)
            wm_wdata[l*16 +: 16] = (g * L + l < int'(lc[li].n)) ? 16'(wts[woff[li] + (g * L + l) * np + i]) : 16'd0;
          @(negedge clk);
        end
        wm_we = 1'b0;
        bm_we = 1'b1; bm_waddr = 10'(int'(lc[li].bbase) + g);
        for (int l = 0; l < L; l++) bm_wdata[l*16 +: 16] = (g * L + l < int'(lc[li].n)) ? 16'(bs[li][g*L+l]) : 16'd0;
        @(negedge clk);
        bm_we = 1'b0;
      end
      cfg_we = 1'b1; cfg_waddr = 4'(li); cfg_wdata = lc[li]; @(negedge clk);
      cfg_we = 1'b0;
    end
    num_layers = 5'(NL);
    start = 1'b1; @(negedge clk); start = 1'b0;
    t0 = cyc;
    while (!done) @(negedge clk);
    @(negedge clk);
    t_run = cyc - t0;
    $display("network finished in %0d cycles (budget %0d)", t_run, budget);
    chk(longint'(t_run) <= budget, "run time exceeds tile count x tile period + drain");
    chk(cur == NL, "every layer reported done and was compared");
    // the logits are also visible through the host port
    for (int j = 0; j < 10; j++) begin
      fm_addr = 18'(int'(lc[NL-1].ybase) + j); #1;
      chk($signed(fm_rdata) == 16'(expd[NL-1][j]), $sformatf("logit %0d via host port", j));
    end
    $display("mechanisms: pad=%0d stride2=%0d clip=%0d", n_pad, n_s2, n_clip);
    chk(n_pad > 0 && n_s2 == 2 && n_clip > 0, "padding, stride 2 and ReLU all occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
