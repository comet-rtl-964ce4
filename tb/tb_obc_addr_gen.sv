// tb_obc_addr_gen: self-checking test of the im2col address generator.
// Runs two layers (a strided, padded 3x3 layer with two channel groups and a
// partial last group, then a 2x1 stride-1 layer with a different bit width)
// against a behavioural stand-in for the core that returns each position's
// context nb + 2 cycles after its last tile starts. Every read (input and
// weight address, zero injection), every bias fetch, every tile start (with
// first/last flags and its spacing of max(K, nb) cycles), every write address
// and the single layer_done are compared with loops evaluated here.
module tb_obc_addr_gen;
  import obc_pkg::*;
  localparam int K = 4, L = 4, TAGW = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  layer_cfg_t cfg;
  logic net_start = 1'b0, layer_start = 1'b0;
  logic [3:0] layer;
  logic [FA_W-1:0] x_raddr, y_waddr;
  logic [WA_W-1:0] w_raddr;
  logic [BA_W-1:0] b_raddr;
  logic x_zero, pad_zero, w_zero, b_we, buf_we, swap, core_start, first_tile, last_tile;
  logic [1:0] buf_idx, y_lane;
  logic [TAGW-1:0] core_tag, y_tag;
  logic core_idle, y_valid, y_we, layer_done;

  obc_addr_gen dut (.clk, .rst_n, .cfg, .net_start, .layer_start, .layer,
    .x_raddr, .x_zero, .pad_zero, .w_raddr, .w_zero, .b_raddr, .b_we, .buf_we, .buf_idx, .swap,
    .core_start, .first_tile, .last_tile, .core_tag, .core_idle, .y_valid, .y_tag,
    .y_we, .y_waddr, .y_lane, .layer_done);

  // behavioural core: result of a last tile appears nb + 2 cycles after start
  typedef struct { int due; logic [TAGW-1:0] tg; bit last; } job_t;
  job_t jobs [$];
  always_ff @(posedge clk) begin
    if (core_start) jobs.push_back('{cyc + int'(cfg.nbits) + 1, core_tag, last_tile});
    if (jobs.size() > 0 && jobs[0].due == cyc) void'(jobs.pop_front());
  end
  always_comb begin
    y_valid = 1'b0; y_tag = '0;
    if (jobs.size() > 0 && jobs[0].due == cyc && jobs[0].last) begin
      y_valid = 1'b1; y_tag = jobs[0].tg;
    end
    core_idle = (jobs.size() == 0);
  end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  // expected streams
  typedef struct { bit zero; int xa; int wa; bit wz; } rd_t;
  rd_t rd_q [$];
  int  b_q [$], wr_q [$];
  typedef struct { bit f; bit l; } st_t;
  st_t st_q [$];

  task automatic build(layer_cfg_t c);
    int s, ho, wo, np, nt, ng;
    s  = c.stride2 ? 2 : 1;
    ho = (c.h + c.pad - c.kh) / s + 1;
    wo = (c.w + c.pad - c.kw) / s + 1;
    np = c.c * c.kh * c.kw;
    nt = (np + K - 1) / K;
    ng = (c.n + L - 1) / L;
    for (int g = 0; g < ng; g++)
      for (int oh = 0; oh < ho; oh++)
        for (int ow = 0; ow < wo; ow++) begin
          for (int t = 0; t < nt; t++) begin
            b_q.push_back(c.bbase + g);
            st_q.push_back('{t == 0, t == nt - 1});
            for (int e = 0; e < K; e++) begin
              int i, ch, kh, kw, ih, iw;
              rd_t r;
              i = t * K + e;
              if (i < np) begin
                ch = i / (c.kh * c.kw); kh = (i / c.kw) % c.kh; kw = i % c.kw;
                ih = oh * s + kh; iw = ow * s + kw;
                r.zero = (ih >= c.h) || (iw >= c.w);
                r.xa = c.xbase + ch * c.h * c.w + ih * c.w + iw;
                r.wa = c.wbase + g * np + i; r.wz = 0;
              end else begin
                r.zero = 1; r.xa = 0; r.wa = 0; r.wz = 1;
              end
              rd_q.push_back(r);
            end
          end
          for (int l = 0; l < L; l++)
            if (g * L + l < c.n) wr_q.push_back(c.ybase + (g * L + l) * ho * wo + oh * wo + ow);
        end
  endtask

  int last_start = -1, pads = 0, dones = 0;
  always @(negedge clk) if (rst_n) begin
    if (buf_we) begin
      rd_t r;
      if (rd_q.size() == 0) chk(0, "unexpected read");
      else begin
        r = rd_q.pop_front();
        chk(x_zero == r.zero && w_zero == r.wz, $sformatf("zero flags x=%0d w=%0d exp %0d %0d", x_zero, w_zero, r.zero, r.wz));
        if (!r.zero) chk(int'(x_raddr) == r.xa, $sformatf("x addr %0d exp %0d", x_raddr, r.xa));
        if (!r.wz)   chk(int'(w_raddr) == r.wa, $sformatf("w addr %0d exp %0d", w_raddr, r.wa));
        if (pad_zero) pads++;
      end
    end
    if (b_we) begin
      if (b_q.size() == 0) chk(0, "unexpected bias fetch");
      else chk(int'(b_raddr) == b_q.pop_front(), "bias address");
    end
    if (core_start) begin
      st_t st;
      if (st_q.size() == 0) chk(0, "unexpected tile start");
      else begin
        st = st_q.pop_front();
        chk(first_tile == st.f && last_tile == st.l, "first/last flags");
      end
      if (last_start >= 0)
        chk(cyc - last_start == ((cfg.nbits > K) ? int'(cfg.nbits) : K), $sformatf("tile spacing %0d", cyc - last_start));
      last_start = cyc;
    end
    if (y_we) begin
      if (wr_q.size() == 0) chk(0, "unexpected write");
      else chk(int'(y_waddr) == wr_q.pop_front(), $sformatf("write addr %0d", y_waddr));
    end
    if (layer_done) dones++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c [2];
    c[0] = '{h: 5, w: 6, c: 2, kh: 3, kw: 3, stride2: 1, pad: 1, n: 6, nbits: 5, relu: 1, shift: 0,
             xbase: 100, ybase: 1000, wbase: 50, bbase: 7};
    c[1] = '{h: 4, w: 3, c: 3, kh: 2, kw: 1, stride2: 0, pad: 0, n: 4, nbits: 4, relu: 0, shift: 0,
             xbase: 1000, ybase: 3000, wbase: 500, bbase: 20};
    cfg = c[0];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); net_start = 1'b1;
    @(negedge clk); net_start = 1'b0;
    for (int li = 0; li < 2; li++) begin
      int d0;
      cfg = c[li];
      build(c[li]);
      last_start = -1;
      d0 = dones;
      @(negedge clk); layer_start = 1'b1;
      @(negedge clk); layer_start = 1'b0;
      while (dones == d0) @(negedge clk);
      chk(rd_q.size() == 0 && wr_q.size() == 0 && st_q.size() == 0 && b_q.size() == 0,
          $sformatf("layer %0d incomplete: rd %0d wr %0d st %0d", li, rd_q.size(), wr_q.size(), st_q.size()));
      chk(int'(layer) == li + 1, "layer counter (carry 4)");
      repeat (20) @(negedge clk);
      chk(dones == d0 + 1, "exactly one layer_done");
    end
    chk(pads > 0, "padding zeros were injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
