// dp_controller: main control unit of the network.
//
// A mode FSM and the data-flow triggers for NUM_LAYERS layers.
//  LOAD   (after reset): parameter writes from the host are routed to the
//         addressed layer's memory (cfg_we_layer); no input is accepted.
//  STREAM: input vectors are accepted whenever layer 0 is idle. Each
//         layer l > 0 is started as soon as layer l-1 holds a result and
//         layer l is idle, and that same cycle empties layer l-1's output
//         register (layer l copies it). The last layer's result is offered
//         to the host (out_valid) and freed by out_ready. Different layers
//         thus work on consecutive input vectors at once.
//  DRAIN: entered from STREAM when cfg_mode asks for LOAD; new inputs are
//         refused while the vectors in flight finish and are read out, then
//         the FSM moves to LOAD. cfg_mode low in LOAD returns to STREAM.
// Outputs are combinational from the state and the layer flags; the state
// changes at the clock. The paper says only that a finite state machine
// controls the flow of inputs and activations and that a layer starts when
// the one before it has finished; the modes and the handshake are this
// design's own.
module dp_controller #(
  parameter int NUM_LAYERS = 3,
  localparam int LW = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_mode,      // 1: go to / stay in LOAD
  input  logic                  cfg_we,
  input  logic [LW-1:0]         cfg_layer,
  output logic [NUM_LAYERS-1:0] cfg_we_layer,
  input  logic                  in_valid,
  output logic                  in_ready,
  output logic                  out_valid,
  input  logic                  out_ready,
  input  logic [NUM_LAYERS-1:0] layer_busy,
  input  logic [NUM_LAYERS-1:0] layer_full,
  output logic [NUM_LAYERS-1:0] layer_start,
  output logic [NUM_LAYERS-1:0] layer_consume,
  output logic [1:0]            mode,          // 0 LOAD, 1 STREAM, 2 DRAIN
  output logic                  busy
);
  typedef enum logic [1:0] {M_LOAD = 2'd0, M_STREAM = 2'd1, M_DRAIN = 2'd2} mode_e;
  mode_e state;

  logic flowing;
  assign flowing = (state == M_STREAM) || (state == M_DRAIN);
  assign busy    = |layer_busy || |layer_full;
  assign mode    = state;

  always_comb begin
    in_ready       = (state == M_STREAM) && !layer_busy[0];
    layer_start    = '0;
    layer_consume  = '0;
    layer_start[0] = in_ready && in_valid;
    for (int l = 1; l < NUM_LAYERS; l++) begin
      layer_start[l]     = flowing && layer_full[l-1] && !layer_busy[l];
      layer_consume[l-1] = layer_start[l];
    end
    out_valid                   = layer_full[NUM_LAYERS-1];
    layer_consume[NUM_LAYERS-1] = out_valid && out_ready;
    for (int l = 0; l < NUM_LAYERS; l++)
      cfg_we_layer[l] = (state == M_LOAD) && cfg_we && (int'(cfg_layer) == l);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= M_LOAD;
    else begin
      unique case (state)
        M_LOAD:   if (!cfg_mode) state <= M_STREAM;
        M_STREAM: if (cfg_mode)  state <= M_DRAIN;
        M_DRAIN:  if (!busy && !(in_valid && in_ready)) state <= M_LOAD;
        default:  state <= M_LOAD;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (layer_start & layer_busy) == '0)
    else $error("dp_controller: layer started while busy");
endmodule
