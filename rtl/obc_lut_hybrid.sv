// obc_lut_hybrid: "hybrid" OBC hardware LUT for one group of Q operands.
//
// Function: val = sum_i (bits[i] ? +op[i] : -op[i]); all_pos = sum_i op[i].
//
// How: consecutive operands are paired. Operand 0 is the OBC reference; its
// pair partner is added or subtracted by one conditional adder/subtractor
// driven by the partner's relative sign. Every other pair (a, b) has one adder
// (a+b) and one subtractor (a-b); an XOR of the two relative sign bits picks
// sum or difference through a 2-to-1 multiplexer, and the relative sign of a
// picks that value or its two's complement. The pair results are summed and
// the total is negated when the reference bit is 0. Adder count grows
// linearly with Q instead of exponentially.
//
// Departure: no 1/2 pre-scaling of operands. Purely combinational.
module obc_lut_hybrid #(
  parameter int Q  = 4,    // operands in the group (even)
  parameter int DW = 16,
  localparam int OW = DW + $clog2(Q) + 1
) (
  input  logic signed [DW-1:0] op [Q],
  input  logic        [Q-1:0]  bits,   // 1: +op, 0: -op
  output logic signed [OW-1:0] val,
  output logic signed [OW-1:0] all_pos
);
  localparam int NPR = Q / 2;

  logic [Q-1:0] rel;
  logic signed [OW-1:0] ps [NPR];   // pair sums
  logic signed [OW-1:0] pd [NPR];   // pair differences
  logic signed [OW-1:0] pv [NPR];   // selected pair contributions
  logic signed [OW-1:0] sum;

  always_comb begin
    for (int i = 0; i < Q; i++) rel[i] = bits[0] ^ bits[i];
    for (int j = 0; j < NPR; j++) begin
      ps[j] = OW'(op[2*j]) + OW'(op[2*j+1]);
      pd[j] = OW'(op[2*j]) - OW'(op[2*j+1]);
    end
    // reference pair: conditional adder
    pv[0] = rel[1] ? pd[0] : ps[0];
    for (int j = 1; j < NPR; j++) begin
      logic signed [OW-1:0] m;
      m     = (rel[2*j] ^ rel[2*j+1]) ? pd[j] : ps[j];
      pv[j] = rel[2*j] ? -m : m;
    end
    sum = '0;
    all_pos = '0;
    for (int j = 0; j < NPR; j++) begin
      sum     = sum + pv[j];
      all_pos = all_pos + ps[j];
    end
    val = bits[0] ? sum : -sum;
  end
endmodule
