// param_mem: the local weight and bias memory of one layer.
//
// Holds N_OUT x N_IN weights and N_OUT biases on chip, so inference never
// goes off chip for parameters. It is written one word at a time by the
// control unit (wr_bias selects the bias of neuron wr_neuron, otherwise
// the weight (wr_neuron, wr_index)), and read one input index at a time:
// rd_weight gives, for every neuron at once, its weight for input
// rd_index, which is what the layer's EMACs need on each cycle. Biases are
// read in parallel. Writes take effect at the clock edge; reads are
// combinational (distributed RAM in an FPGA). Contents are not reset: they
// are undefined until loaded. The organisation is this design's choice;
// the paper states only that each layer has local memory for its weights
// and biases.
module param_mem #(
  parameter int N     = 8,
  parameter int N_IN  = 4,
  parameter int N_OUT = 5,
  localparam int IW = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int OW = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic                      wr_bias,
  input  logic [OW-1:0]             wr_neuron,
  input  logic [IW-1:0]             wr_index,
  input  logic [N-1:0]              wr_data,
  input  logic [IW-1:0]             rd_index,
  output logic [N_OUT-1:0][N-1:0]   rd_weight,
  output logic [N_OUT-1:0][N-1:0]   rd_bias
);
  logic [N-1:0] weights [N_OUT][N_IN];
  logic [N-1:0] biases  [N_OUT];

  always_ff @(posedge clk) begin
    if (we && int'(wr_neuron) < N_OUT) begin
      if (wr_bias)                     biases[wr_neuron]            <= wr_data;
      else if (int'(wr_index) < N_IN)  weights[wr_neuron][wr_index] <= wr_data;
    end
  end

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      rd_weight[j] = (int'(rd_index) < N_IN) ? weights[j][rd_index] : '0;
      rd_bias[j]   = biases[j];
    end
  end
endmodule
