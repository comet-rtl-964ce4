// obc_lut: OBC hardware LUT of size K, built from P = K/Q groups of Q.
//
// Function: val = sum_{i<K} (bits[i] ? +op[i] : -op[i]) for the current
// bit-slice, and all_pos = sum_{i<K} op[i] (address-0 content, used for the
// OBC offset term).
//
// How: the exponential part of each LUT technique is confined to groups of
// Q operands; the P group results are combined by a sum over the groups (the
// adder tree of depth log2(P)). TECH selects the parallel, shared, split or
// hybrid group structure; all four compute the same value and differ only in
// adder/multiplexer count and delay. Each group uses its own first operand as
// OBC reference.
//
// Interface: op[K] operands (weights in scheme A, inputs in scheme B), bits[K]
// the current bit-slice of the serial operand. Purely combinational.
module obc_lut
  import obc_pkg::*;
#(
  parameter int        K    = 4,
  parameter int        Q    = 4,
  parameter int        DW   = 16,
  parameter lut_tech_e TECH = LUT_HYBRID,
  localparam int OW = DW + $clog2(K) + 1
) (
  input  logic signed [DW-1:0] op [K],
  input  logic        [K-1:0]  bits,
  output logic signed [OW-1:0] val,
  output logic signed [OW-1:0] all_pos
);
  localparam int P  = K / Q;
  localparam int GW = DW + $clog2(Q) + 1;

  initial begin
    assert (K % Q == 0) else $error("obc_lut: K must be a multiple of Q");
    assert (Q % 2 == 0 && Q >= 4) else $error("obc_lut: Q must be even and >= 4");
  end

  logic signed [GW-1:0] gval [P];
  logic signed [GW-1:0] gpos [P];

  for (genvar g = 0; g < P; g++) begin : g_grp
    logic signed [DW-1:0] gop [Q];
    for (genvar i = 0; i < Q; i++) begin : g_op
      assign gop[i] = op[g*Q + i];
    end
    if (TECH == LUT_PARALLEL) begin : g_par
      obc_lut_parallel #(.Q(Q), .DW(DW)) u_lut (
        .op(gop), .bits(bits[g*Q +: Q]), .val(gval[g]), .all_pos(gpos[g]));
    end else if (TECH == LUT_SHARED) begin : g_shr
      obc_lut_shared #(.Q(Q), .DW(DW)) u_lut (
        .op(gop), .bits(bits[g*Q +: Q]), .val(gval[g]), .all_pos(gpos[g]));
    end else if (TECH == LUT_SPLIT) begin : g_spl
      obc_lut_split #(.Q(Q), .DW(DW)) u_lut (
        .op(gop), .bits(bits[g*Q +: Q]), .val(gval[g]), .all_pos(gpos[g]));
    end else begin : g_hyb
      obc_lut_hybrid #(.Q(Q), .DW(DW)) u_lut (
        .op(gop), .bits(bits[g*Q +: Q]), .val(gval[g]), .all_pos(gpos[g]));
    end
  end

  // combine the group results (adder tree over P groups)
  always_comb begin
    val = '0;
    all_pos = '0;
    for (int g = 0; g < P; g++) begin
      val     = val + OW'(gval[g]);
      all_pos = all_pos + OW'(gpos[g]);
    end
  end
endmodule
