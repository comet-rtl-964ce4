// obc_gemm_core: OBC-GEMM compute core, L inner-product columns of size K.
//
// Function: for one tile it computes, in every column l,
//     Y_l = sum_{i<K} w[l][i] * x[i]  (+ bias[l] * 2^(nb-1) on the last tile)
// and accumulates the tiles of one output position; on the last tile it
// presents the L finished sums with y_valid. Column l holds output channel l
// of the current channel group; all columns share the input patch x.
//
// How: each column is one OBC distributed-arithmetic IPC: a hardware LUT
// (obc_lut, built from adders and multiplexers), a shift-accumulate unit
// (obc_sa) and an offset/bias adder (obc_offset_bias). A PISO bank
// (obc_piso) serialises one operand, LSB first, to address the LUTs:
//   SCHEME_A: the inputs x are serialised (nb = B1 cycles); each column's LUT
//             is built from its own weights; one PISO of K words is shared.
//   SCHEME_B: the weights are serialised (nb = B2 cycles); every column's LUT
//             is built from the shared inputs; each column has its own PISO.
// A tile takes nb cycles whatever K is. Partial sums of the tiles of one
// output position are added in a per-column register after the SA; the bias
// enters the offset adder only on the last tile.
//
// Interface/timing: start captures x, w, bias, nb, first_tile, last_tile and
// tag (the operand registers). SA steps run in the nb cycles after start; a
// new start may coincide with the last step, so tiles issued every nb cycles
// run back to back. y/y_tag are valid in the single cycle y_valid is high,
// two cycles after the last step of a last tile. The tag travels with the
// tile so the writer knows which position and channel group finished.
// Serial operand values must fit in nb bits (two's complement).
module obc_gemm_core
  import obc_pkg::*;
#(
  parameter int        K      = 4,
  parameter int        L      = 4,
  parameter int        Q      = 4,
  parameter lut_tech_e TECH   = LUT_HYBRID,
  parameter scheme_e   SCHEME = SCHEME_B,
  parameter int        XW     = 16,   // input (activation) width
  parameter int        WW     = 16,   // weight width
  parameter int        BIW    = 16,   // bias width
  parameter int        TAGW   = 32,
  parameter int        YW     = 48
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NB_W-1:0]       nb,
  input  logic signed [XW-1:0]  x    [K],
  input  logic signed [WW-1:0]  w    [L][K],
  input  logic signed [BIW-1:0] bias [L],
  input  logic                  first_tile,
  input  logic                  last_tile,
  input  logic [TAGW-1:0]       tag,
  output logic                  idle,
  output logic                  y_valid,
  output logic signed [YW-1:0]  y    [L],
  output logic [TAGW-1:0]       y_tag
);
  localparam int BMAX = (SCHEME == SCHEME_A) ? XW : WW;   // serial operand width
  localparam int PW   = (SCHEME == SCHEME_A) ? WW : XW;   // LUT operand width
  localparam int LW   = PW + $clog2(K) + 1;
  localparam int OFW  = ((LW > BIW + BMAX) ? LW : BIW + BMAX) + 2;

  // ---- operand registers and sequencing --------------------------------
  logic signed [XW-1:0]  xr [K];
  logic signed [WW-1:0]  wr [L][K];
  logic signed [BIW-1:0] br [L];
  logic [NB_W-1:0]       nbr;
  logic                  busy, cur_first, cur_last;
  logic [TAGW-1:0]       cur_tag;
  logic [NB_W-1:0]       j;
  logic                  s1, s2;
  logic                  fin, fin_first, fin_last;
  logic [NB_W-1:0]       fin_nb;     // width of the tile being finished
  logic [TAGW-1:0]       fin_tag;

  assign s1 = busy && (j == '0);
  assign s2 = busy && (j == nbr - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; j <= '0; nbr <= NB_W'(2);
      cur_first <= 1'b0; cur_last <= 1'b0; cur_tag <= '0;
      fin <= 1'b0; fin_first <= 1'b0; fin_last <= 1'b0; fin_tag <= '0; fin_nb <= NB_W'(2);
      for (int k = 0; k < K; k++) xr[k] <= '0;
      for (int l = 0; l < L; l++) begin
        br[l] <= '0;
        for (int k = 0; k < K; k++) wr[l][k] <= '0;
      end
    end else begin
      fin <= 1'b0;
      if (busy) begin
        j <= j + 1'b1;
        if (s2) begin
          busy      <= 1'b0;
          fin       <= 1'b1;
          fin_first <= cur_first;
          fin_last  <= cur_last;
          fin_tag   <= cur_tag;
          fin_nb    <= nbr;
        end
      end
      if (start) begin
        busy      <= 1'b1;
        j         <= '0;
        nbr       <= nb;
        cur_first <= first_tile;
        cur_last  <= last_tile;
        cur_tag   <= tag;
        xr        <= x;
        wr        <= w;
        br        <= bias;
      end
    end
  end

  // ---- PISO bank -------------------------------------------------------
  localparam int NPISO = (SCHEME == SCHEME_A) ? 1 : L;
  logic [K-1:0] slice [NPISO];

  for (genvar p = 0; p < NPISO; p++) begin : g_piso
    logic [BMAX-1:0] din [K];
    always_comb begin
      for (int k = 0; k < K; k++) begin
        if (SCHEME == SCHEME_A) din[k] = BMAX'(x[k]);
        else                    din[k] = BMAX'(w[p][k]);
      end
    end
    obc_piso #(.N(K), .BMAX(BMAX)) u_piso (
      .clk(clk), .rst_n(rst_n), .load(start), .shift(busy),
      .din(din), .bits(slice[p]));
  end

  // ---- columns: LUT + offset/bias adder + SA + tile accumulator --------
  logic signed [YW-1:0] ysa  [L];
  logic signed [YW-1:0] psum [L];

  for (genvar l = 0; l < L; l++) begin : g_col
    logic signed [PW-1:0]  lop [K];
    logic [K-1:0]          bits;
    logic signed [LW-1:0]  lval, lpos;
    logic signed [OFW-1:0] off;

    always_comb begin
      for (int k = 0; k < K; k++) begin
        if (SCHEME == SCHEME_A) lop[k] = PW'(wr[l][k]);
        else                    lop[k] = PW'(xr[k]);
      end
      bits = slice[(SCHEME == SCHEME_A) ? 0 : l];
    end

    obc_lut #(.K(K), .Q(Q), .DW(PW), .TECH(TECH)) u_lut (
      .op(lop), .bits(bits), .val(lval), .all_pos(lpos));

    obc_offset_bias #(.LW(LW), .BIW(BIW), .BMAX(BMAX)) u_off (
      .all_pos(lpos), .bias(br[l]), .bias_en(cur_last), .nb(nbr), .offset(off));

    obc_sa #(.LW(LW), .OFW(OFW), .BMAX(BMAX), .YW(YW)) u_sa (
      .clk(clk), .rst_n(rst_n), .step(busy), .first(s1), .last(s2), .nb(fin_nb),
      .lut_val(lval), .offset(off), .y(ysa[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y_tag   <= '0;
      for (int l = 0; l < L; l++) begin
        psum[l] <= '0;
        y[l]    <= '0;
      end
    end else begin
      y_valid <= 1'b0;
      if (fin) begin
        for (int l = 0; l < L; l++) begin
          logic signed [YW-1:0] s;
          s = fin_first ? ysa[l] : psum[l] + ysa[l];
          psum[l] <= s;
          if (fin_last) y[l] <= s;
        end
        if (fin_last) begin
          y_valid <= 1'b1;
          y_tag   <= fin_tag;
        end
      end
    end
  end

  assign idle = !busy && !fin && !y_valid;
endmodule
