// obc_lut_parallel: "parallel" OBC hardware LUT for one group of Q operands.
//
// Function: val = sum_i (bits[i] ? +op[i] : -op[i]), i.e. the OBC partial
// product of one bit-slice; all_pos = sum_i op[i] (the address-0 content,
// whose negation is the OBC offset term).
//
// How: operand 0 is the reference. A chain of Q-1 adders forms the address-0
// entry (all operands added). Every other entry of the 2^(Q-1)-entry table is
// one subtractor away from an earlier entry: it removes twice one operand
// (the "<<1" taps of the parallel LUT). The address is the XOR of the
// reference bit with each other bit (the address logic of OBC-DA); the
// selected entry is negated when the reference bit is 0, because in OBC the
// table holds only the half whose reference term is positive.
//
// Departure: the published LUT pre-scales each operand by 1/2 (">>1"); here
// the factor 1/2 is left to the shift-accumulate stage so no LSB is lost.
// Purely combinational.
module obc_lut_parallel #(
  parameter int Q  = 4,    // operands in the group
  parameter int DW = 16,   // operand width
  localparam int OW = DW + $clog2(Q) + 1
) (
  input  logic signed [DW-1:0] op [Q],
  input  logic        [Q-1:0]  bits,   // 1: +op, 0: -op
  output logic signed [OW-1:0] val,
  output logic signed [OW-1:0] all_pos
);
  localparam int NE = 2 ** (Q - 1);

  logic signed [OW-1:0] e [NE];
  logic [Q-2:0] addr;

  always_comb begin
    // address logic: relative sign of operands 1..Q-1 against operand 0
    for (int i = 1; i < Q; i++) addr[i-1] = bits[0] ^ bits[i];
    // address 0: chain of adders over all operands
    e[0] = OW'(op[Q-1]);
    for (int i = Q - 2; i >= 0; i--) e[0] = e[0] + OW'(op[i]);
    // remaining entries: one subtractor each, from the entry without the top bit
    for (int a = 1; a < NE; a++) begin
      int hb;
      hb = 0;
      for (int b = 0; b < Q - 1; b++) if (a[b]) hb = b;
      e[a] = e[a & ~(1 << hb)] - (OW'(op[hb+1]) <<< 1);
    end
    val     = bits[0] ? e[addr] : -e[addr];
    all_pos = e[0];
  end
endmodule
