// tb_obc_ctrl: self-checking test of the layer sequencer.
// The host writes random configuration words; the address generator is
// replaced by a layer counter that steps at each layer_start and a
// layer_done that arrives a random time later. Three runs (3 layers, all 16
// layers, 1 layer) check that each layer sees its own configuration word in
// order, that exactly num_layers layers are launched, that done pulses once
// at the end, that busy covers the run, that start with num_layers = 0 does
// nothing and that configuration writes during a run are ignored.
module tb_obc_ctrl;
  import obc_pkg::*;
  localparam int NLAYER = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, cfg_we = 1'b0, layer_done = 1'b0;
  logic [4:0] num_layers = '0;
  logic [3:0] cfg_waddr = '0, layer = '0;
  layer_cfg_t cfg_wdata = '0, cfg;
  logic net_start, layer_start, busy, done;

  obc_ctrl #(.NLAYER(NLAYER)) dut (.clk, .rst_n, .start, .num_layers, .cfg_we, .cfg_waddr,
    .cfg_wdata, .layer, .layer_done, .cfg, .net_start, .layer_start, .busy, .done);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("%t: %s", $time, what); end
  endtask

  layer_cfg_t tbl [NLAYER];

  // stand-in for the address generator's layer counter and completion
  int starts = 0, dones = 0, exp_layer = 0;
  always @(posedge clk) begin
    if (net_start) layer <= '0;
    else if (layer_start) layer <= layer + 1'b1;
  end
  always @(negedge clk) if (rst_n) begin
    if (layer_start) begin
      chk(cfg == tbl[exp_layer], $sformatf("layer %0d configuration", exp_layer));
      chk(busy, "busy during run");
      exp_layer++; starts++;
      fork begin
        repeat (2 + $urandom_range(0, 30)) @(negedge clk);
        layer_done = 1'b1; @(negedge clk); layer_done = 1'b0;
      end join_none
    end
    if (done) dones++;
  end

  task automatic run(int n);
    starts = 0; dones = 0; exp_layer = 0;
    num_layers = 5'(n);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    // a configuration write during the run must be ignored
    cfg_we = 1'b1; cfg_waddr = 4'(n - 1); cfg_wdata = layer_cfg_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
    @(negedge clk); cfg_we = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(starts == n, $sformatf("launched %0d layers, expected %0d", starts, n));
    chk(dones == 1, "one done pulse");
    chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NLAYER; i++) begin
      tbl[i] = layer_cfg_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      @(negedge clk); cfg_we = 1'b1; cfg_waddr = 4'(i); cfg_wdata = tbl[i];
    end
    @(negedge clk); cfg_we = 1'b0;
    chk(!busy, "idle after reset");
    run(3);
    run(NLAYER);
    run(1);
    // start with zero layers does nothing
    num_layers = '0;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (5) @(negedge clk);
    chk(starts == 1, "zero-layer start launches nothing");
    chk(!busy, "still idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
