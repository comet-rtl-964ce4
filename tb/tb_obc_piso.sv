// tb_obc_piso: self-checking test of the PISO bank.
// Loads random words and checks that bit j of every word appears in the j-th
// cycle after the load, LSB first; checks that a load overrides a shift.
module tb_obc_piso;
  localparam int N = 4, B = 16;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, shift = 1'b0;
  always #5 clk = ~clk;
  logic [B-1:0] din [N];
  logic [N-1:0] bits;
  int checks = 0, failures = 0;

  obc_piso dut (.clk, .rst_n, .load, .shift, .din, .bits);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0] ref_w [N];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < N; i++) begin din[i] = B'($urandom); ref_w[i] = din[i]; end
      @(negedge clk); load = 1'b1; shift = (it % 2 == 1);   // load wins over shift
      @(negedge clk); load = 1'b0; shift = 1'b1;
      for (int j = 0; j < B; j++) begin
        logic [N-1:0] e;
        for (int i = 0; i < N; i++) e[i] = ref_w[i][j];
        checks++;
        if (bits !== e) begin
          failures++;
          if (failures < 10) $display("it %0d bit %0d: got %b exp %b", it, j, bits, e);
        end
        @(negedge clk);
      end
      shift = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
