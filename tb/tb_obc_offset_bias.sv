// tb_obc_offset_bias: self-checking test of the offset/bias adder.
// offset must equal (bias_en ? bias * 2^nb : 0) - all_pos for random inputs.
module tb_obc_offset_bias;
  localparam int LW = 19, BIW = 16, BMAX = 16;
  localparam int OFW = ((LW > BIW + BMAX) ? LW : BIW + BMAX) + 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [LW-1:0] all_pos;
  logic signed [BIW-1:0] bias;
  logic bias_en;
  logic [4:0] nb;
  logic signed [OFW-1:0] offset;
  int checks = 0, failures = 0;

  obc_offset_bias dut (.all_pos, .bias, .bias_en, .nb, .offset);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int it = 0; it < 5000; it++) begin
      all_pos = LW'($urandom);
      bias    = BIW'($urandom);
      bias_en = $urandom % 2;
      nb      = 5'(2 + $urandom % (BMAX - 1));
      #1;
      e = (bias_en ? (longint'(bias) * (longint'(1) << nb)) : 0) - longint'(all_pos);
      checks++;
      if (longint'(offset) != e) begin
        failures++;
        if (failures < 10) $display("mismatch got %0d exp %0d", offset, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
