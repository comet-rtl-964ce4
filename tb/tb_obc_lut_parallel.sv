// tb_obc_lut_parallel: self-checking test of the parallel OBC LUT group.
// Drives random operands with every sign pattern, at the default size
// (Q = 4, 16-bit) and at Q = 8 with 8-bit operands, including the extreme
// values, and compares val and all_pos with a signed sum computed here.
module tb_obc_lut_parallel;
  localparam int Q1 = 4, D1 = 16, O1 = D1 + $clog2(Q1) + 1;
  localparam int Q2 = 8, D2 = 8,  O2 = D2 + $clog2(Q2) + 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [D1-1:0] op1 [Q1];
  logic [Q1-1:0] b1;
  logic signed [O1-1:0] v1, p1;
  logic signed [D2-1:0] op2 [Q2];
  logic [Q2-1:0] b2;
  logic signed [O2-1:0] v2, p2;

  obc_lut_parallel #(.Q(Q1), .DW(D1)) dut1 (.op(op1), .bits(b1), .val(v1), .all_pos(p1));
  obc_lut_parallel #(.Q(Q2), .DW(D2)) dut2 (.op(op2), .bits(b2), .val(v2), .all_pos(p2));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ev, ep;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < Q1; i++) begin
        case (it % 3)
          0: op1[i] = D1'($urandom);
          1: op1[i] = ($urandom % 2) ? -(1 <<< (D1 - 1)) : (1 <<< (D1 - 1)) - 1;
          default: op1[i] = D1'($signed($urandom % 64) - 32);
        endcase
      end
      for (int i = 0; i < Q2; i++) op2[i] = D2'($urandom);
      for (int s = 0; s < (1 << Q1); s++) begin
        b1 = Q1'(s);
        b2 = Q2'($urandom);
        #1;
        ev = 0; ep = 0;
        for (int i = 0; i < Q1; i++) begin
          ev += b1[i] ? longint'(op1[i]) : -longint'(op1[i]);
          ep += longint'(op1[i]);
        end
        checks++;
        if (longint'(v1) != ev || longint'(p1) != ep) begin
          failures++;
          if (failures < 10) $display("Q=4 mismatch bits=%b val=%0d exp=%0d pos=%0d exp=%0d", b1, v1, ev, p1, ep);
        end
        ev = 0; ep = 0;
        for (int i = 0; i < Q2; i++) begin
          ev += b2[i] ? longint'(op2[i]) : -longint'(op2[i]);
          ep += longint'(op2[i]);
        end
        checks++;
        if (longint'(v2) != ev || longint'(p2) != ep) begin
          failures++;
          if (failures < 10) $display("Q=8 mismatch bits=%b val=%0d exp=%0d", b2, v2, ev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
