// tb_dp_layer_run: loads random parameters into one dp_layer, streams
// random input vectors through it and checks every neuron's output, the
// start-to-result latency (N_IN + 3 clocks) and the stall of the write-back
// when the output register has not been consumed.
module tb_dp_layer_run
  import dp_pkg::*;
#(
  parameter format_e FORMAT = FMT_POSIT,
  parameter int      ES     = 0,
  parameter int      WE     = 4,
  parameter int      Q      = 4,
  parameter int      NI     = 4,
  parameter int      NO     = 3,
  parameter bit      RELU   = 1'b1,
  parameter int      NVEC   = 40
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output int   n_relu_zero
);
  import dp_ref_pkg::*;
  localparam int N   = 8;
  localparam int FMT = int'(FORMAT);
  localparam int SC  = fmt_scale(FMT, N, ES, WE, Q);

  logic rst_n = 1'b0, wr_en = 1'b0, wr_bias = 1'b0, start = 1'b0, consume = 1'b0;
  logic [$clog2(NO)-1:0] wr_neuron = '0;
  logic [$clog2(NI)-1:0] wr_index = '0;
  logic [N-1:0] wr_data = '0;
  logic [NI-1:0][N-1:0] in_vec = '0;
  logic [NO-1:0][N-1:0] out_vec;
  logic busy, out_full, stall;
  logic [N-1:0] wm [NO][NI];
  logic [N-1:0] bm [NO];

  dp_layer #(.FORMAT(FORMAT), .N(N), .ES(ES), .WE(WE), .Q(Q), .N_IN(NI), .N_OUT(NO),
             .USE_RELU(RELU)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_bias(wr_bias), .wr_neuron(wr_neuron),
    .wr_index(wr_index), .wr_data(wr_data), .start(start), .in_vec(in_vec), .busy(busy),
    .out_full(out_full), .stall(stall), .consume(consume), .out_vec(out_vec));

  function automatic logic [N-1:0] rnd_val();
    logic [N-1:0] v;
    v = N'($urandom);
    if (FORMAT == FMT_POSIT) begin
      v = {v[N-1], ~v[N-1], v[N-3:0]};               // magnitudes near 1
    end else if (FORMAT == FMT_FLOAT) begin
      v[N-2:N-1-WE] = WE'((1 << (WE - 1)) - 2 + ($urandom % 3));
    end
    return v;
  endfunction

  function automatic logic [NO-1:0][N-1:0] ref_out(input logic [NI-1:0][N-1:0] x);
    big_t s;
    logic [N-1:0] r;
    for (int j = 0; j < NO; j++) begin
      s = fmt_value(32'(bm[j]), FMT, N, ES, WE, Q, 2 * SC);
      for (int i = 0; i < NI; i++)
        s += fmt_value(32'(wm[j][i]), FMT, N, ES, WE, Q, SC) *
             fmt_value(32'(x[i]), FMT, N, ES, WE, Q, SC);
      r = N'(fmt_round(s, FMT, N, ES, WE, Q, 2 * SC));
      if (RELU && r[N-1]) begin r = '0; n_relu_zero++; end
      ref_out[j] = r;
    end
  endfunction

  task automatic compare(input logic [NO-1:0][N-1:0] expv, input string what);
    checks++;
    if (out_vec !== expv) begin
      failures++;
      $display("dp_layer fmt=%0d %s: got %h expected %h", FMT, what, out_vec, expv);
    end
  endtask

  initial begin
    logic [NI-1:0][N-1:0] x1, x2;
    logic [NO-1:0][N-1:0] e1, e2;
    int lat;
    done = 0; checks = 0; failures = 0; n_stall = 0; n_relu_zero = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < NO; j++) begin
      bm[j] = rnd_val();
      wr_en = 1; wr_bias = 1; wr_neuron = $bits(wr_neuron)'(j); wr_data = bm[j];
      @(negedge clk);
      for (int i = 0; i < NI; i++) begin
        wm[j][i] = rnd_val();
        wr_bias = 0; wr_index = $bits(wr_index)'(i); wr_data = wm[j][i];
        @(negedge clk);
      end
    end
    wr_en = 0;
    for (int t = 0; t < NVEC; t++) begin
      for (int i = 0; i < NI; i++) x1[i] = rnd_val();
      e1 = ref_out(x1);
      in_vec = x1; start = 1;
      @(negedge clk);
      start = 0; in_vec = '0;              // the layer must have copied its input
      lat = 1;
      while (!out_full && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != NI + 3) begin failures++; $display("latency %0d, expected %0d", lat, NI + 3); end
      compare(e1, "single");
      consume = 1; @(negedge clk); consume = 0;
    end
    // back-to-back: second vector finishes while the first is still held
    for (int i = 0; i < NI; i++) begin x1[i] = rnd_val(); x2[i] = rnd_val(); end
    e1 = ref_out(x1); e2 = ref_out(x2);
    in_vec = x1; start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    in_vec = x2; start = 1; @(negedge clk); start = 0;
    for (int c = 0; c < NI + 8; c++) begin
      if (stall) n_stall++;
      @(negedge clk);
    end
    compare(e1, "held during stall");
    consume = 1; @(negedge clk); consume = 0;
    @(negedge clk);
    compare(e2, "after stall");
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    consume = 1; @(negedge clk); consume = 0;
    done = 1;
  end
endmodule
