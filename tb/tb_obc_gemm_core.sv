// tb_obc_gemm_core: self-checking test of the OBC-GEMM core.
// Five cores see the same stimulus: the default (K = 4, L = 4, hybrid LUT,
// scheme B), scheme A with hybrid and split LUTs, scheme B with parallel and
// shared LUTs, and a K = 8 (two LUT groups) scheme-A core. Output positions of
// 1..3 tiles are issued back to back, one tile every nb cycles, with nb
// changing every few positions. Each result is compared with the dot
// products plus bias * 2^(nb-1) computed here, and its arrival is checked to
// be exactly nb + 2 cycles after the start of the position's last tile.
module tb_obc_gemm_core;
  import obc_pkg::*;
  localparam int K = 4, K8 = 8, L = 4, XW = 16, WW = 16, BIW = 16, YW = 48, TAGW = 32;
  localparam int NC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 1'b0, first_tile = 1'b0, last_tile = 1'b0;
  logic [NB_W-1:0] nb = 5'd8;
  logic signed [XW-1:0]  x8 [K8];
  logic signed [WW-1:0]  w8 [L][K8];
  logic signed [XW-1:0]  x  [K];
  logic signed [WW-1:0]  w  [L][K];
  logic signed [BIW-1:0] bias [L];
  logic [TAGW-1:0] tag = '0;
  logic idle [NC], y_valid [NC];
  logic signed [YW-1:0] y [NC][L];
  logic [TAGW-1:0] y_tag [NC];

  always_comb for (int k = 0; k < K; k++) begin
    x[k] = x8[k];
    for (int l = 0; l < L; l++) w[l][k] = w8[l][k];
  end

  obc_gemm_core u0 (.clk, .rst_n, .start, .nb, .x, .w, .bias, .first_tile, .last_tile, .tag,
    .idle(idle[0]), .y_valid(y_valid[0]), .y(y[0]), .y_tag(y_tag[0]));
  obc_gemm_core #(.SCHEME(SCHEME_A), .TECH(LUT_SPLIT)) u1 (.clk, .rst_n, .start, .nb, .x, .w, .bias,
    .first_tile, .last_tile, .tag, .idle(idle[1]), .y_valid(y_valid[1]), .y(y[1]), .y_tag(y_tag[1]));
  obc_gemm_core #(.SCHEME(SCHEME_B), .TECH(LUT_PARALLEL)) u2 (.clk, .rst_n, .start, .nb, .x, .w, .bias,
    .first_tile, .last_tile, .tag, .idle(idle[2]), .y_valid(y_valid[2]), .y(y[2]), .y_tag(y_tag[2]));
  obc_gemm_core #(.SCHEME(SCHEME_B), .TECH(LUT_SHARED)) u3 (.clk, .rst_n, .start, .nb, .x, .w, .bias,
    .first_tile, .last_tile, .tag, .idle(idle[3]), .y_valid(y_valid[3]), .y(y[3]), .y_tag(y_tag[3]));
  obc_gemm_core #(.K(K8), .SCHEME(SCHEME_A), .TECH(LUT_HYBRID)) u4 (.clk, .rst_n, .start, .nb, .x(x8), .w(w8),
    .bias, .first_tile, .last_tile, .tag, .idle(idle[4]), .y_valid(y_valid[4]), .y(y[4]), .y_tag(y_tag[4]));

  int checks = 0, failures = 0;

  typedef struct {
    longint v4 [L];
    longint v8 [L];
    int     due;
    int     tg;
  } exp_t;
  exp_t q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int seen = 0;
  always @(negedge clk) begin
    if (rst_n && y_valid[0]) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected result at cycle %0d", cyc);
      end else begin
        e = q.pop_front();
        seen++;
        checks++;
        if (cyc != e.due) begin
          failures++;
          if (failures < 10) $display("latency: result at %0d, due %0d", cyc, e.due);
        end
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (!y_valid[c] || y_tag[c] != TAGW'(e.tg)) begin
            failures++;
            if (failures < 10) $display("core %0d valid/tag mismatch", c);
          end
          for (int l = 0; l < L; l++) begin
            longint ev;
            ev = (c == 4) ? e.v8[l] : e.v4[l];
            checks++;
            if (longint'(y[c][l]) != ev) begin
              failures++;
              if (failures < 20) $display("core %0d col %0d: got %0d exp %0d", c, l, y[c][l], ev);
            end
          end
        end
      end
    end
  end

  initial begin
    int n, nt;
    longint acc4 [L], acc8 [L];
    for (int k = 0; k < K8; k++) begin
      x8[k] = '0;
      for (int l = 0; l < L; l++) w8[l][k] = '0;
    end
    for (int l = 0; l < L; l++) bias[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    n = 8;
    for (int pos = 0; pos < 300; pos++) begin
      if (pos % 7 == 0) n = 2 + $urandom % 15;   // serial width 2..16
      nt = 1 + $urandom % 3;
      for (int l = 0; l < L; l++) begin acc4[l] = 0; acc8[l] = 0; end
      for (int t = 0; t < nt; t++) begin
        @(negedge clk);
        for (int k = 0; k < K8; k++) begin
          longint lim;
          lim = longint'(1) << (n - 1);
          x8[k] = (pos % 11 == 0) ? XW'(-lim) : XW'(longint'($signed($urandom)) % lim);
          for (int l = 0; l < L; l++)
            w8[l][k] = (pos % 13 == 0) ? WW'(lim - 1) : WW'(longint'($signed($urandom)) % lim);
        end
        for (int l = 0; l < L; l++) bias[l] = BIW'($urandom);
        nb = NB_W'(n);
        start = 1'b1; first_tile = (t == 0); last_tile = (t == nt - 1);
        tag = TAGW'(pos);
        for (int l = 0; l < L; l++) begin
          for (int k = 0; k < K8; k++) begin
            if (k < K) acc4[l] += longint'(w8[l][k]) * longint'(x8[k]);
            acc8[l] += longint'(w8[l][k]) * longint'(x8[k]);
          end
        end
        if (t == nt - 1) begin
          exp_t e;
          for (int l = 0; l < L; l++) begin
            e.v4[l] = acc4[l] + longint'(bias[l]) * (longint'(1) << (n - 1));
            e.v8[l] = acc8[l] + longint'(bias[l]) * (longint'(1) << (n - 1));
          end
          e.due = cyc + n + 2;
          e.tg  = pos;
          q.push_back(e);
        end
        @(negedge clk);
        start = 1'b0;
        repeat (n - 2) @(negedge clk);   // next tile starts n cycles later
        #1;
      end
    end
    repeat (40) @(posedge clk);
    checks++;
    if (seen != 300 || !idle[0]) begin
      failures++;
      $display("saw %0d of 300 results, idle=%0d", seen, idle[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
