// tb_obc_sa: self-checking test of the shift-accumulate unit.
// For random K = 4 weight vectors, input vectors of nb bits and biases it
// forms the OBC partial sums D_j = sum_i (x_i bit j ? +w_i : -w_i) here,
// feeds them LSB first with S1/S2 as the core does, and checks that after
// exactly nb steps y = sum_i w_i x_i + bias * 2^(nb-1).
module tb_obc_sa;
  localparam int K = 4, LW = 19, BIW = 16, BMAX = 16, YW = 48;
  localparam int OFW = ((LW > BIW + BMAX) ? LW : BIW + BMAX) + 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic step = 1'b0, first = 1'b0, last = 1'b0;
  logic [4:0] nb;
  logic signed [LW-1:0] lut_val;
  logic signed [OFW-1:0] offset;
  logic signed [YW-1:0] y;
  int checks = 0, failures = 0;

  obc_sa dut (.clk, .rst_n, .step, .first, .last, .nb, .lut_val, .offset, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] w [K];
    longint x [K];
    longint bias, e, d, sp;
    int n, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      n = 2 + $urandom % (BMAX - 1);
      sp = 0;
      for (int i = 0; i < K; i++) begin
        w[i] = (it % 7 == 0) ? -16'sd32768 : 16'($urandom);
        x[i] = (it % 7 == 0) ? -(longint'(1) << (n - 1)) : longint'($signed($urandom)) % (longint'(1) << (n - 1));
        sp  += longint'(w[i]);
      end
      bias = longint'($signed(16'($urandom)));
      e = 0;
      for (int i = 0; i < K; i++) e += longint'(w[i]) * x[i];
      e += bias * (longint'(1) << (n - 1));
      @(negedge clk);
      nb = 5'(n);
      offset = OFW'(bias * (longint'(1) << n) - sp);
      cyc = 0;
      for (int j = 0; j < n; j++) begin
        d = 0;
        for (int i = 0; i < K; i++) d += x[i][j] ? longint'(w[i]) : -longint'(w[i]);
        lut_val = LW'(d);
        step = 1'b1; first = (j == 0); last = (j == n - 1);
        @(negedge clk);
        cyc++;
      end
      step = 1'b0; first = 1'b0; last = 1'b0;
      checks++;
      if (longint'(y) != e || cyc != n) begin
        failures++;
        if (failures < 10) $display("nb=%0d got %0d exp %0d", n, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
