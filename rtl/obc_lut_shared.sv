// obc_lut_shared: "shared" OBC hardware LUT for one group of Q operands.
//
// Function: val = sum_i (bits[i] ? +op[i] : -op[i]); all_pos = sum_i op[i].
//
// How: like the parallel LUT, operand 0 is the reference and the result is
// negated when its bit is 0. Operand 1 is not given table entries of its own:
// a 2-to-1 multiplexer loads +op[1] or -op[1] into the adder chain, so the
// mirrored halves of the table share one set of 2^(Q-2) entries, each one
// subtractor away from the chain result. The address of that smaller table is
// the relative sign of operands 2..Q-1.
//
// Departure: no 1/2 pre-scaling of operands (done once in the shift-
// accumulate stage instead). all_pos is a separate sum because the chain
// result here depends on the multiplexed sign of operand 1.
// Purely combinational.
module obc_lut_shared #(
  parameter int Q  = 4,    // operands in the group (>= 3)
  parameter int DW = 16,
  localparam int OW = DW + $clog2(Q) + 1
) (
  input  logic signed [DW-1:0] op [Q],
  input  logic        [Q-1:0]  bits,   // 1: +op, 0: -op
  output logic signed [OW-1:0] val,
  output logic signed [OW-1:0] all_pos
);
  localparam int NE = 2 ** (Q - 2);

  logic signed [OW-1:0] e [NE];
  logic signed [OW-1:0] t1;
  logic [Q-1:0] rel;
  logic [Q-3:0] addr;

  always_comb begin
    for (int i = 0; i < Q; i++) rel[i] = bits[0] ^ bits[i];
    for (int i = 2; i < Q; i++) addr[i-2] = rel[i];
    // shared operand: +op[1] or -op[1] through a 2-to-1 multiplexer
    t1 = rel[1] ? -OW'(op[1]) : OW'(op[1]);
    e[0] = OW'(op[Q-1]);
    for (int i = Q - 2; i >= 2; i--) e[0] = e[0] + OW'(op[i]);
    e[0] = e[0] + OW'(op[0]) + t1;
    for (int a = 1; a < NE; a++) begin
      int hb;
      hb = 0;
      for (int b = 0; b < Q - 2; b++) if (a[b]) hb = b;
      e[a] = e[a & ~(1 << hb)] - (OW'(op[hb+2]) <<< 1);
    end
    val = bits[0] ? e[addr] : -e[addr];
    all_pos = '0;
    for (int i = 0; i < Q; i++) all_pos = all_pos + OW'(op[i]);
  end
endmodule
