// obc_lut_split: "split" OBC hardware LUT for one group of Q operands.
//
// Function: val = sum_i (bits[i] ? +op[i] : -op[i]); all_pos = sum_i op[i].
//
// How: the group is split into two halves of Q/2 operands (the optimum split
// point P = Q/2). Each half builds the 2^(Q/2-1) entries whose first operand
// is positive (for Q = 4: the sum and the difference of the pair) and obtains
// the other half of its 2^(Q/2)-entry table as two's complements of those.
// A 2^(Q/2)-to-1 multiplexer per half, addressed directly by the half's sign
// bits, picks the half result; one adder combines the two halves.
//
// Departure: no 1/2 pre-scaling of operands. Purely combinational.
module obc_lut_split #(
  parameter int Q  = 4,    // operands in the group (even)
  parameter int DW = 16,
  localparam int OW = DW + $clog2(Q) + 1
) (
  input  logic signed [DW-1:0] op [Q],
  input  logic        [Q-1:0]  bits,   // 1: +op, 0: -op
  output logic signed [OW-1:0] val,
  output logic signed [OW-1:0] all_pos
);
  localparam int H  = Q / 2;
  localparam int NP = 2 ** (H - 1);   // entries with the half's first operand positive
  localparam int NT = 2 ** H;         // full table of one half

  logic signed [OW-1:0] ep  [2][NP];
  logic signed [OW-1:0] tab [2][NT];
  logic signed [OW-1:0] half [2];
  logic [H-1:0] s [2];

  always_comb begin
    for (int g = 0; g < 2; g++) begin
      // sign-select of this half: bit j set means operand j is subtracted
      for (int j = 0; j < H; j++) s[g][j] = ~bits[g*H + j];
      ep[g][0] = '0;
      for (int j = 0; j < H; j++) ep[g][0] = ep[g][0] + OW'(op[g*H + j]);
      for (int a = 1; a < NP; a++) begin
        int hb;
        hb = 0;
        for (int b = 0; b < H - 1; b++) if (a[b]) hb = b;
        ep[g][a] = ep[g][a & ~(1 << hb)] - (OW'(op[g*H + hb + 1]) <<< 1);
      end
      // full table: entries with the first operand negative are two's
      // complements of the mirrored positive entries
      for (int t = 0; t < NT; t++) begin
        if (t % 2 == 0) tab[g][t] = ep[g][t / 2];
        else            tab[g][t] = -ep[g][(~t & (NT - 1)) / 2];
      end
      half[g] = tab[g][s[g]];
    end
    val     = half[0] + half[1];
    all_pos = ep[0][0] + ep[1][0];
  end
endmodule
