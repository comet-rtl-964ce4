// tb_obc_lut: self-checking test of the K = p x q OBC LUT.
// Instantiates the default LUT (K = 4, hybrid) and LUTs of all four
// techniques for K = 8, 16 and 32 (p = 2, 4, 8 groups of q = 4, the sizes of
// the LUT comparison), drives random operands (including the most negative
// value) and bit-slices and compares with a signed sum computed here.
module tb_obc_lut;
  import obc_pkg::*;
  localparam int K1 = 4,  D = 16, O1 = D + $clog2(K1) + 1;
  localparam int K2 = 16, O2 = D + $clog2(K2) + 1;
  localparam int K3 = 8,  O3 = D + $clog2(K3) + 1;
  localparam int K4 = 32, O4 = D + $clog2(K4) + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [D-1:0] op1 [K1];
  logic [K1-1:0] b1;
  logic signed [O1-1:0] v1, p1;
  logic signed [D-1:0] op2 [K2];
  logic [K2-1:0] b2;
  logic signed [O2-1:0] v2 [4], p2 [4];

  logic signed [D-1:0] op3 [K3];
  logic [K3-1:0] b3;
  logic signed [O3-1:0] v3 [4], p3 [4];
  logic signed [D-1:0] op4 [K4];
  logic [K4-1:0] b4;
  logic signed [O4-1:0] v4 [4], p4 [4];
  for (genvar t = 0; t < 4; t++) begin : g_tech
    obc_lut #(.K(K3), .Q(4), .DW(D), .TECH(lut_tech_e'(t))) u8  (.op(op3), .bits(b3), .val(v3[t]), .all_pos(p3[t]));
    obc_lut #(.K(K4), .Q(4), .DW(D), .TECH(lut_tech_e'(t))) u32 (.op(op4), .bits(b4), .val(v4[t]), .all_pos(p4[t]));
  end

  obc_lut dut_def (.op(op1), .bits(b1), .val(v1), .all_pos(p1));
  obc_lut #(.K(K2), .Q(4), .DW(D), .TECH(LUT_PARALLEL)) dut_p  (.op(op2), .bits(b2), .val(v2[0]), .all_pos(p2[0]));
  obc_lut #(.K(K2), .Q(4), .DW(D), .TECH(LUT_SHARED))   dut_s  (.op(op2), .bits(b2), .val(v2[1]), .all_pos(p2[1]));
  obc_lut #(.K(K2), .Q(4), .DW(D), .TECH(LUT_SPLIT))    dut_sp (.op(op2), .bits(b2), .val(v2[2]), .all_pos(p2[2]));
  obc_lut #(.K(K2), .Q(4), .DW(D), .TECH(LUT_HYBRID))   dut_h  (.op(op2), .bits(b2), .val(v2[3]), .all_pos(p2[3]));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ev, ep;
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < K1; i++) op1[i] = D'($urandom);
      for (int i = 0; i < K2; i++) op2[i] = (it % 5 == 0) ? -(1 <<< (D - 1)) : D'($urandom);
      b1 = K1'($urandom);
      b2 = K2'($urandom);
      for (int i = 0; i < K3; i++) op3[i] = D'($urandom);
      for (int i = 0; i < K4; i++) op4[i] = (it % 7 == 0) ? -(1 <<< (D - 1)) : D'($urandom);
      b3 = K3'($urandom);
      b4 = K4'($urandom);
      #1;
      ev = 0; ep = 0;
      for (int i = 0; i < K3; i++) begin
        ev += b3[i] ? longint'(op3[i]) : -longint'(op3[i]);
        ep += longint'(op3[i]);
      end
      for (int t = 0; t < 4; t++) begin
        checks++;
        if (longint'(v3[t]) != ev || longint'(p3[t]) != ep) begin
          failures++;
          if (failures < 10) $display("K=8 tech %0d mismatch val=%0d exp=%0d", t, v3[t], ev);
        end
      end
      ev = 0; ep = 0;
      for (int i = 0; i < K4; i++) begin
        ev += b4[i] ? longint'(op4[i]) : -longint'(op4[i]);
        ep += longint'(op4[i]);
      end
      for (int t = 0; t < 4; t++) begin
        checks++;
        if (longint'(v4[t]) != ev || longint'(p4[t]) != ep) begin
          failures++;
          if (failures < 10) $display("K=32 tech %0d mismatch val=%0d exp=%0d", t, v4[t], ev);
        end
      end
      ev = 0; ep = 0;
      for (int i = 0; i < K1; i++) begin
        ev += b1[i] ? longint'(op1[i]) : -longint'(op1[i]);
        ep += longint'(op1[i]);
      end
      checks++;
      if (longint'(v1) != ev || longint'(p1) != ep) begin
        failures++;
        if (failures < 10) $display("K=4 mismatch val=%0d exp=%0d", v1, ev);
      end
      ev = 0; ep = 0;
      for (int i = 0; i < K2; i++) begin
        ev += b2[i] ? longint'(op2[i]) : -longint'(op2[i]);
        ep += longint'(op2[i]);
      end
      for (int t = 0; t < 4; t++) begin
        checks++;
        if (longint'(v2[t]) != ev || longint'(p2[t]) != ep) begin
          failures++;
          if (failures < 10) $display("K=16 tech %0d mismatch val=%0d exp=%0d", t, v2[t], ev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
