// tb_obc_ram: self-checking test of the on-chip RAM.
// Writes random words to random addresses, keeps a reference copy, and
// checks combinational reads, including a read of the address being written
// (old data before the clock edge, new data after).
module tb_obc_ram;
  localparam int W = 16, D = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [7:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_m [D];
  int checks = 0, failures = 0;

  obc_ram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) ref_m[i] = '0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = ($urandom % 2);
      waddr = 8'($urandom);
      wdata = W'($urandom);
      raddr = (it % 4 == 0) ? waddr : 8'($urandom);
      #1;
      checks++;
      if (rdata !== ref_m[raddr]) begin
        failures++;
        if (failures < 10) $display("read %0d got %h exp %h", raddr, rdata, ref_m[raddr]);
      end
      @(posedge clk);
      if (we) ref_m[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== ref_m[raddr]) begin
        failures++;
        if (failures < 10) $display("post-write read %0d got %h exp %h", raddr, rdata, ref_m[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
