// tb_dp_net_run: loads random parameters into a deep_positron network of
// the given format and layer sizes, streams NVEC random input vectors with
// random gaps and output back-pressure, and checks every output vector
// against a reference network (exact sums, one rounding per neuron, ReLU
// on hidden layers). Reports check and failure counts through its ports.
module tb_dp_net_run
  import dp_pkg::*;
#(
  parameter format_e FORMAT = FMT_POSIT,
  parameter int      ES     = 0,
  parameter int      WE     = 4,
  parameter int      Q      = 4,
  parameter int      S0 = 4, S1 = 5, S2 = 5, S3 = 3,
  parameter int      NVEC   = 50
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles
);
  import dp_ref_pkg::*;
  localparam int N = 8, NL = 3;
  localparam int SZ [NL+1] = '{S0, S1, S2, S3};
  localparam int MAXW = (S0 > S1 ? (S0 > S2 ? S0 : S2) : (S1 > S2 ? S1 : S2)) > S3 ?
                        (S0 > S1 ? (S0 > S2 ? S0 : S2) : (S1 > S2 ? S1 : S2)) : S3;
  localparam int AW = $clog2(MAXW);
  localparam int FMT = int'(FORMAT);
  localparam int SC  = fmt_scale(FMT, N, ES, WE, Q);

  logic rst_n = 1'b0, cfg_mode = 1'b1, cfg_we = 1'b0, cfg_bias = 1'b0;
  logic [1:0] cfg_layer = '0, mode;
  logic [AW-1:0] cfg_neuron = '0, cfg_index = '0;
  logic [N-1:0] cfg_data = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, busy;
  logic [S0-1:0][N-1:0] in_vec = '0;
  logic [S3-1:0][N-1:0] out_vec;

  deep_positron #(.FORMAT(FORMAT), .N(N), .ES(ES), .WE(WE), .Q(Q), .NUM_LAYERS(NL),
                  .SIZES(SZ)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_mode(cfg_mode), .cfg_we(cfg_we), .cfg_layer(cfg_layer),
    .cfg_neuron(cfg_neuron), .cfg_index(cfg_index), .cfg_bias(cfg_bias), .cfg_data(cfg_data),
    .in_valid(in_valid), .in_ready(in_ready), .in_vec(in_vec), .out_valid(out_valid),
    .out_ready(out_ready), .out_vec(out_vec), .mode(mode), .busy(busy));

  logic [N-1:0] W [NL][MAXW][MAXW];
  logic [N-1:0] B [NL][MAXW];
  logic [S3-1:0][N-1:0] expq [$];

  function automatic logic [N-1:0] rnd_val();
    logic [N-1:0] v;
    v = N'($urandom);
    if (FORMAT == FMT_POSIT) begin
      v = {v[N-1], ~v[N-1], v[N-3:0]};
    end else if (FORMAT == FMT_FLOAT) begin
      v[N-2:N-1-WE] = WE'((1 << (WE - 1)) - 3 + ($urandom % 4));
    end else begin
      v = N'(int'($urandom % 33) - 16);           // |x| <= 1 with Q = 4
    end
    return v;
  endfunction

  function automatic logic [S3-1:0][N-1:0] ref_net(input logic [S0-1:0][N-1:0] x);
    logic [N-1:0] a [MAXW], o [MAXW];
    big_t s;
    for (int i = 0; i < S0; i++) a[i] = x[i];
    for (int l = 0; l < NL; l++) begin
      for (int j = 0; j < SZ[l+1]; j++) begin
        s = fmt_value(32'(B[l][j]), FMT, N, ES, WE, Q, 2 * SC);
        for (int i = 0; i < SZ[l]; i++)
          s += fmt_value(32'(W[l][j][i]), FMT, N, ES, WE, Q, SC) *
               fmt_value(32'(a[i]), FMT, N, ES, WE, Q, SC);
        o[j] = N'(fmt_round(s, FMT, N, ES, WE, Q, 2 * SC));
        if (l < NL - 1 && o[j][N-1]) o[j] = '0;
      end
      for (int j = 0; j < SZ[l+1]; j++) a[j] = o[j];
    end
    for (int j = 0; j < S3; j++) ref_net[j] = a[j];
  endfunction

  initial begin
    int sent, t0;
    done = 0; checks = 0; failures = 0; cycles = 0; sent = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < SZ[l+1]; j++) begin
        B[l][j] = rnd_val();
        cfg_we = 1; cfg_layer = 2'(l); cfg_neuron = AW'(j); cfg_bias = 1; cfg_data = B[l][j];
        @(negedge clk);
        for (int i = 0; i < SZ[l]; i++) begin
          W[l][j][i] = rnd_val();
          cfg_bias = 0; cfg_index = AW'(i); cfg_data = W[l][j][i];
          @(negedge clk);
        end
      end
    cfg_we = 0; cfg_mode = 0;
    @(negedge clk);
    t0 = 0;
    while (sent < NVEC || expq.size() != 0) begin
      in_valid  = (sent < NVEC) && ($urandom % 8 != 0);
      out_ready = ($urandom % 8 != 0);
      if (in_valid) for (int i = 0; i < S0; i++) in_vec[i] = rnd_val();
      @(posedge clk);
      t0++;
      if (in_valid && in_ready) begin expq.push_back(ref_net(in_vec)); sent++; end
      if (out_valid && out_ready) begin
        logic [S3-1:0][N-1:0] e;
        checks++;
        e = expq.pop_front();
        if (out_vec !== e) begin
          failures++;
          $display("net fmt=%0d %0d-%0d-%0d-%0d: got %h expected %h", FMT, S0, S1, S2, S3,
                   out_vec, e);
        end
      end
      @(negedge clk);
    end
    cycles = t0;
    in_valid = 0;
    done = 1;
  end
endmodule
