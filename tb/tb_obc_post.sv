// tb_obc_post: self-checking test of the ReLU / requantisation stage.
module tb_obc_post;
  localparam int IW = 48, OW = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [IW-1:0] din;
  logic relu;
  logic [5:0] shift;
  logic signed [OW-1:0] dout;
  logic clipped, saturated;
  int checks = 0, failures = 0;

  obc_post #(.IW(IW), .OW(OW)) dut (.din, .relu, .shift, .dout, .clipped, .saturated);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, e;
    bit sat;
    for (int it = 0; it < 5000; it++) begin
      v = longint'($signed($urandom)) * (it % 3 == 0 ? 1000 : 1);
      din = IW'(v);
      relu = $urandom % 2;
      shift = 6'($urandom % 24);
      #1;
      e = (relu && v < 0) ? 0 : v;
      e = e >>> shift;
      sat = 0;
      if (e > 32767) begin e = 32767; sat = 1; end
      if (e < -32768) begin e = -32768; sat = 1; end
      checks++;
      if (longint'(dout) != e || saturated != sat || clipped != (relu && v < 0)) begin
        failures++;
        if (failures < 10) $display("din=%0d relu=%0d sh=%0d got %0d exp %0d", v, relu, shift, dout, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
