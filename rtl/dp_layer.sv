// dp_layer: one fully connected layer of the network.
//
// N_OUT EMACs, one per neuron, compute in parallel. When `start` is seen
// in IDLE the layer copies the input vector into its own register (so the
// layer before it is free again at once) and loads every EMAC's
// accumulator with that neuron's bias. Then, for N_IN cycles, input x[i]
// is broadcast to all EMACs together with each neuron's weight w[j][i]
// read from the local memory (param_mem). One DRAIN cycle lets the last
// product reach the accumulators; in WB the rounded results pass through
// ReLU (or straight through for the readout layer, USE_RELU = 0) into the
// output register and `out_full` rises. If the output register is still
// full (the next layer has not taken it), WB waits: that is the layer's
// stall. `consume` empties the output register.
//
// Timing: start -> out_full in N_IN + 3 clocks when not stalled; `busy` is
// high from the cycle after start until the result is written.
// FORMAT selects the EMAC: posit (n, es), float (w_e, w_f = N-1-w_e) or
// fixed (q fraction bits). The per-neuron EMAC and local memory follow the
// paper; the broadcast schedule, the input copy and the handshake are this
// design's own.
module dp_layer
  import dp_pkg::*;
#(
  parameter format_e FORMAT   = FMT_POSIT,
  parameter int      N        = 8,
  parameter int      ES       = 0,
  parameter int      WE       = 4,
  parameter int      Q        = 4,
  parameter int      N_IN     = 4,
  parameter int      N_OUT    = 5,
  parameter bit      USE_RELU = 1'b1,
  localparam int IW = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int OW = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // parameter write port
  input  logic                     wr_en,
  input  logic                     wr_bias,
  input  logic [OW-1:0]            wr_neuron,
  input  logic [IW-1:0]            wr_index,
  input  logic [N-1:0]             wr_data,
  // data flow
  input  logic                     start,
  input  logic [N_IN-1:0][N-1:0]   in_vec,
  output logic                     busy,
  output logic                     out_full,
  output logic                     stall,
  input  logic                     consume,
  output logic [N_OUT-1:0][N-1:0]  out_vec
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_WB} state_e;
  state_e state;

  logic [N_IN-1:0][N-1:0]  x_reg;
  logic [IW-1:0]           cnt;
  logic                    clr, en;
  logic [N_OUT-1:0][N-1:0] w_col, b_col, res, act;

  param_mem #(.N(N), .N_IN(N_IN), .N_OUT(N_OUT)) u_mem (
    .clk(clk), .we(wr_en), .wr_bias(wr_bias), .wr_neuron(wr_neuron),
    .wr_index(wr_index), .wr_data(wr_data), .rd_index(cnt),
    .rd_weight(w_col), .rd_bias(b_col));

  assign clr = (state == S_IDLE) && start;
  assign en  = (state == S_RUN);

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    if (FORMAT == FMT_POSIT) begin : g_posit
      posit_emac #(.N(N), .ES(ES), .K(N_IN + 1)) u_emac (
        .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bias(b_col[j]),
        .weight(w_col[j]), .activation(x_reg[cnt]), .result(res[j]));
    end else if (FORMAT == FMT_FLOAT) begin : g_float
      float_emac #(.WE(WE), .WF(N - 1 - WE), .K(N_IN + 1)) u_emac (
        .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bias(b_col[j]),
        .weight(w_col[j]), .activation(x_reg[cnt]), .result(res[j]));
    end else begin : g_fixed
      fixed_emac #(.N(N), .Q(Q), .K(N_IN + 1)) u_emac (
        .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bias(b_col[j]),
        .weight(w_col[j]), .activation(x_reg[cnt]), .result(res[j]));
    end
    if (USE_RELU) begin : g_relu
      relu #(.N(N)) u_relu (.in(res[j]), .out(act[j]));
    end else begin : g_identity
      assign act[j] = res[j];
    end
  end

  assign busy  = (state != S_IDLE);
  assign stall = (state == S_WB) && out_full && !consume;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      x_reg    <= '0;
      out_full <= 1'b0;
      out_vec  <= '0;
    end else begin
      if (consume) out_full <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_reg <= in_vec;
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (int'(cnt) == N_IN - 1) state <= S_DRAIN;
          else                       cnt   <= cnt + 1'b1;
        end
        S_DRAIN: state <= S_WB;
        S_WB: if (!out_full || consume) begin
          out_vec  <= act;
          out_full <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("dp_layer: start while busy");
endmodule
