// tb_deep_positron: end-to-end test of the whole network at its default
// configuration (8-bit posits, es = 0, layers 4-5-5-2).
// It loads random weights and biases through the parameter port, streams
// input vectors with random gaps and random output back-pressure, and
// compares every output vector with a reference network that forms each
// neuron's sum exactly and rounds it once to a posit, applying ReLU on the
// hidden layers. It then requests parameter loading mid-stream (the
// pipeline must drain), loads a second parameter set and streams again.
// Counted, and required at least once: layer write-back stalls, several
// layers busy at once (pipelined streaming), ReLU zeroing a value,
// saturation to maxpos/minpos, the DRAIN and LOAD modes. The latency of a
// lone vector must be sum over layers of (inputs + 3) clocks.
module tb_deep_positron;
  import dp_ref_pkg::*;
  localparam int N = 8, ES = 0, NL = 3;
  localparam int SZ [NL+1] = '{4, 5, 5, 2};
  localparam int MAXW = 5;
  localparam int SC = (N - 1) * (1 << ES) + N;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, cfg_mode = 1'b1, cfg_we = 1'b0, cfg_bias = 1'b0;
  logic [1:0] cfg_layer = '0, mode;
  logic [2:0] cfg_neuron = '0, cfg_index = '0;
  logic [N-1:0] cfg_data = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, busy;
  logic [SZ[0]-1:0][N-1:0] in_vec = '0;
  logic [SZ[NL]-1:0][N-1:0] out_vec;

  deep_positron dut (
    .clk(clk), .rst_n(rst_n), .cfg_mode(cfg_mode), .cfg_we(cfg_we), .cfg_layer(cfg_layer),
    .cfg_neuron(cfg_neuron), .cfg_index(cfg_index), .cfg_bias(cfg_bias), .cfg_data(cfg_data),
    .in_valid(in_valid), .in_ready(in_ready), .in_vec(in_vec), .out_valid(out_valid),
    .out_ready(out_ready), .out_vec(out_vec), .mode(mode), .busy(busy));

  logic [N-1:0] W [NL][MAXW][MAXW];
  logic [N-1:0] B [NL][MAXW];
  logic [SZ[NL]-1:0][N-1:0] expq [$];
  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_relu = 0, n_sat = 0, n_drain = 0, n_load = 0, n_out = 0;

  function automatic logic [N-1:0] rnd_posit();
    logic [N-1:0] v;
    v = N'($urandom);
    if ($urandom % 8 != 0) v = {v[N-1], ~v[N-1], v[N-3:0]};     // mostly near +-1
    if (v == {1'b1, {(N-1){1'b0}}}) v = '0;                      // no NaR
    return v;
  endfunction

  function automatic logic [SZ[NL]-1:0][N-1:0] ref_net(input logic [SZ[0]-1:0][N-1:0] x);
    logic [N-1:0] a [MAXW], o [MAXW];
    big_t s;
    for (int i = 0; i < SZ[0]; i++) a[i] = x[i];
    for (int l = 0; l < NL; l++) begin
      for (int j = 0; j < SZ[l+1]; j++) begin
        s = posit_value(32'(B[l][j]), N, ES, 2 * SC);
        for (int i = 0; i < SZ[l]; i++)
          s += posit_value(32'(W[l][j][i]), N, ES, SC) * posit_value(32'(a[i]), N, ES, SC);
        o[j] = N'(posit_round(s, N, ES, 2 * SC));
        if (o[j][N-2:0] == '1 || o[j] == N'(1) || o[j] == '1 || o[j] == {1'b1, {(N-2){1'b0}}, 1'b1})
          n_sat++;
        if (l < NL - 1 && o[j][N-1]) begin o[j] = '0; n_relu++; end
      end
      for (int j = 0; j < SZ[l+1]; j++) a[j] = o[j];
    end
    for (int j = 0; j < SZ[NL]; j++) ref_net[j] = a[j];
  endfunction

  task automatic load_params();
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < SZ[l+1]; j++) begin
        B[l][j] = rnd_posit();
        cfg_we = 1; cfg_layer = 2'(l); cfg_neuron = 3'(j); cfg_bias = 1; cfg_data = B[l][j];
        @(negedge clk);
        for (int i = 0; i < SZ[l]; i++) begin
          W[l][j][i] = rnd_posit();
          cfg_bias = 0; cfg_index = 3'(i); cfg_data = W[l][j][i];
          @(negedge clk);
        end
      end
    cfg_we = 0;
  endtask

  task automatic stream(input int nvec);
    int sent = 0;
    while ((sent < nvec && !cfg_mode) || expq.size() != 0) begin
      in_valid  = (sent < nvec) && !cfg_mode && ($urandom % 3 != 0);
      out_ready = ($urandom % 3 != 0);
      if (in_valid) for (int i = 0; i < SZ[0]; i++) in_vec[i] = rnd_posit();
      @(posedge clk);
      if (in_valid && in_ready) begin expq.push_back(ref_net(in_vec)); sent++; end
      if (out_valid && out_ready) begin
        checks++; n_out++;
        if (expq.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          logic [SZ[NL]-1:0][N-1:0] e;
          e = expq.pop_front();
          if (out_vec !== e) begin
            failures++;
            $display("output %0d: got %h expected %h", n_out, out_vec, e);
          end
        end
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 0;
  endtask

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.g_layer[0].u_layer.stall || dut.g_layer[1].u_layer.stall ||
        dut.g_layer[2].u_layer.stall) n_stall++;
    if (int'(dut.g_layer[0].u_layer.busy) + int'(dut.g_layer[1].u_layer.busy) +
        int'(dut.g_layer[2].u_layer.busy) >= 2) n_overlap++;
    if (mode == 2'd2) n_drain++;
  end

  initial begin
    int lat, expl;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (mode != 2'd0) begin failures++; $display("not in LOAD after reset"); end
    load_params(); n_load++;
    cfg_mode = 0;
    @(negedge clk);
    // latency of a lone vector
    for (int i = 0; i < SZ[0]; i++) in_vec[i] = rnd_posit();
    expq.push_back(ref_net(in_vec));
    in_valid = 1; out_ready = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 200) begin @(negedge clk); lat++; end
    expl = 0;
    for (int l = 0; l < NL; l++) expl += SZ[l] + 3;
    checks++;
    if (lat != expl) begin failures++; $display("latency %0d expected %0d", lat, expl); end
    checks++;
    if (out_vec !== expq.pop_front()) begin failures++; $display("lone vector wrong"); end
    @(negedge clk); out_ready = 0;
    stream(30);
    // mode switch mid-stream: request LOAD with vectors in flight
    fork
      stream(10);
      begin repeat (12) @(negedge clk); cfg_mode = 1; end
    join
    wait (mode == 2'd0);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("LOAD entered with data in flight"); end
    load_params(); n_load++;
    cfg_mode = 0;
    @(negedge clk);
    stream(30);
    $display("deep_positron: outputs %0d stalls %0d overlap %0d relu %0d saturations %0d drain %0d loads %0d latency %0d",
             n_out, n_stall, n_overlap, n_relu, n_sat, n_drain, n_load, lat);
    checks++;
    if (n_stall == 0 || n_overlap == 0 || n_relu == 0 || n_sat == 0 || n_drain == 0 || n_load < 2) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
