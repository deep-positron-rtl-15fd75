// deep_positron: a feed-forward DNN built from exact multiply-and-accumulate
// (EMAC) layers, for low-precision (<= 8-bit) inference.
//
// NUM_LAYERS fully connected layers of sizes SIZES[0] -> SIZES[1] -> ...
// -> SIZES[NUM_LAYERS] (default 4-5-5-2: two hidden layers and a readout).
// Every neuron is its own EMAC; each layer keeps its weights and biases in
// a local memory; hidden layers apply ReLU, the readout layer is affine.
// The main control unit (dp_controller) loads parameters in LOAD mode and,
// in STREAM mode, starts each layer as soon as the layer before it has
// finished, so consecutive input vectors flow through the layers in a
// pipeline. All arithmetic uses one number format, chosen by FORMAT:
// posit (default, N bits, ES exponent bits), float (WE exponent bits) or
// fixed point (Q fraction bits).
//
// Host interface (all synchronous to clk, rst_n asynchronous active low):
//  cfg_*   : while in LOAD (cfg_mode high, or after reset), cfg_we writes
//            cfg_data to layer cfg_layer: the bias of neuron cfg_neuron if
//            cfg_bias, else its weight for input cfg_index.
//  in_*    : valid/ready stream of input vectors (STREAM mode).
//  out_*   : valid/ready stream of output vectors.
// Latency of one vector with no back-pressure: sum over layers of
// (SIZES[l] + 3) clocks plus one clock per layer hand-over; throughput one
// vector per max_l(SIZES[l] + 4) clocks.
module deep_positron
  import dp_pkg::*;
#(
  parameter format_e FORMAT     = FMT_POSIT,
  parameter int      N          = 8,
  parameter int      ES         = 0,
  parameter int      WE         = 4,
  parameter int      Q          = 4,
  parameter int      NUM_LAYERS = 3,
  parameter int      SIZES [NUM_LAYERS+1] = '{4, 5, 5, 2},
  localparam int     MAXW = max_size(SIZES),
  localparam int     AW   = (MAXW > 1) ? $clog2(MAXW) : 1,
  localparam int     LW   = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               cfg_mode,
  input  logic                               cfg_we,
  input  logic [LW-1:0]                      cfg_layer,
  input  logic [AW-1:0]                      cfg_neuron,
  input  logic [AW-1:0]                      cfg_index,
  input  logic                               cfg_bias,
  input  logic [N-1:0]                       cfg_data,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [SIZES[0]-1:0][N-1:0]         in_vec,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [SIZES[NUM_LAYERS]-1:0][N-1:0] out_vec,
  output logic [1:0]                         mode,
  output logic                               busy
);
  function automatic int max_size(input int s [NUM_LAYERS+1]);
    int m = 1;
    foreach (s[i]) if (s[i] > m) m = s[i];
    return m;
  endfunction

  logic [NUM_LAYERS-1:0] l_busy, l_full, l_start, l_consume, l_we, l_stall;
  logic [MAXW-1:0][N-1:0] vec [NUM_LAYERS+1];

  always_comb begin
    vec[0] = '0;
    vec[0][SIZES[0]-1:0] = in_vec;
  end

  dp_controller #(.NUM_LAYERS(NUM_LAYERS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .cfg_mode(cfg_mode), .cfg_we(cfg_we),
    .cfg_layer(cfg_layer), .cfg_we_layer(l_we), .in_valid(in_valid),
    .in_ready(in_ready), .out_valid(out_valid), .out_ready(out_ready),
    .layer_busy(l_busy), .layer_full(l_full), .layer_start(l_start),
    .layer_consume(l_consume), .mode(mode), .busy(busy));

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int NI  = SIZES[l];
    localparam int NO  = SIZES[l+1];
    localparam int IWL = (NI > 1) ? $clog2(NI) : 1;
    localparam int OWL = (NO > 1) ? $clog2(NO) : 1;
    logic [NO-1:0][N-1:0] out_l;

    dp_layer #(
      .FORMAT(FORMAT), .N(N), .ES(ES), .WE(WE), .Q(Q),
      .N_IN(NI), .N_OUT(NO), .USE_RELU(l < NUM_LAYERS - 1)
    ) u_layer (
      .clk(clk), .rst_n(rst_n),
      .wr_en(l_we[l]), .wr_bias(cfg_bias), .wr_neuron(cfg_neuron[OWL-1:0]),
      .wr_index(cfg_index[IWL-1:0]), .wr_data(cfg_data),
      .start(l_start[l]), .in_vec(vec[l][NI-1:0]), .busy(l_busy[l]),
      .out_full(l_full[l]), .stall(l_stall[l]), .consume(l_consume[l]),
      .out_vec(out_l));

    always_comb begin
      vec[l+1] = '0;
      vec[l+1][NO-1:0] = out_l;
    end
  end

  assign out_vec = vec[NUM_LAYERS][SIZES[NUM_LAYERS]-1:0];
endmodule
