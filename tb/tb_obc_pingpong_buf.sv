// tb_obc_pingpong_buf: self-checking test of the ping-pong buffer.
// Fills the shadow bank while checking that the active bank is unchanged,
// swaps, and checks that the filled data become visible; the last write of a
// fill happens in the swap cycle.
module tb_obc_pingpong_buf;
  localparam int W = 16, D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, swap = 1'b0;
  logic [1:0] widx;
  logic [W-1:0] wdata;
  logic [W-1:0] rdata [D];
  logic [W-1:0] act_ref [D], sh_ref [D];
  int checks = 0, failures = 0;

  obc_pingpong_buf #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .we, .widx, .wdata, .swap, .rdata);

  task automatic check_active(string what);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (rdata[i] !== act_ref[i]) begin
        failures++;
        if (failures < 10) $display("%s slot %0d got %h exp %h", what, i, rdata[i], act_ref[i]);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin act_ref[i] = '0; sh_ref[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        we = 1'b1; widx = 2'(i); wdata = W'($urandom);
        swap = (i == D - 1);
        sh_ref[i] = wdata;
        check_active("during fill");
      end
      @(negedge clk);
      we = 1'b0; swap = 1'b0;
      for (int i = 0; i < D; i++) act_ref[i] = sh_ref[i];
      check_active("after swap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
