// obc_ctrl: control unit of the accelerator.
//
// Function: holds the per-layer configuration words (written by the host
// before a run) and sequences the layers of a network. On start it clears
// the layer counter, then for every layer loads that layer's configuration
// word into the working register (cfg), pulses layer_start for the address
// generator and waits for layer_done; after num_layers layers it pulses done.
//
// FSM: IDLE -> LOAD -> LAUNCH -> RUN -> (LOAD | FINISH) -> IDLE.
// The layer index is the address generator's layer counter (rd_cntr4),
// which steps when the last tile of a layer has been read. Layers run one
// after the other with the pipeline drained in between, because a layer
// reads what the previous one wrote. cfg is stable from LAUNCH until the next
// LOAD, so the core and the write-back still see it while the layer drains.
// Host configuration writes are ignored while busy. The end of the run is
// decided by a 5-bit count of finished layers kept here, not by the 4-bit
// layer counter, which wraps to 0 after the sixteenth layer.
module obc_ctrl
  import obc_pkg::*;
#(
  parameter int NLAYER = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [4:0]                num_layers,
  input  logic                      cfg_we,
  input  logic [$clog2(NLAYER)-1:0] cfg_waddr,
  input  layer_cfg_t                cfg_wdata,
  input  logic [3:0]                layer,
  input  logic                      layer_done,
  output layer_cfg_t                cfg,
  output logic                      net_start,
  output logic                      layer_start,
  output logic                      busy,
  output logic                      done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LAUNCH, S_RUN, S_FINISH} state_e;
  state_e state;

  layer_cfg_t table_q [NLAYER];
  logic [4:0] ndone;   // layers finished in this run (5 bits: up to 16)

  always_ff @(posedge clk) begin
    if (cfg_we && state == S_IDLE) table_q[cfg_waddr] <= cfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg   <= '0;
      ndone <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && num_layers != '0) begin
          state <= S_LOAD;
          ndone <= '0;
        end
        S_LOAD: begin
          cfg   <= table_q[layer[$clog2(NLAYER)-1:0]];
          state <= S_LAUNCH;
        end
        S_LAUNCH: state <= S_RUN;
        S_RUN: if (layer_done) begin
          ndone <= ndone + 5'd1;
          state <= (ndone + 5'd1 >= num_layers) ? S_FINISH : S_LOAD;
        end
        S_FINISH: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    net_start   = (state == S_IDLE) && start && (num_layers != '0);
    layer_start = (state == S_LAUNCH);
    busy        = (state != S_IDLE);
    done        = (state == S_FINISH);
  end
endmodule
