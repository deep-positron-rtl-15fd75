// tb_dp_controller: drives dp_controller with a cycle model of three
// layers (a started layer is busy for a few clocks, then holds a result
// until consumed) and checks every cycle that: parameter writes reach only
// the addressed layer and only in LOAD; inputs are taken only in STREAM
// with layer 0 idle; layer l starts exactly when layer l-1 is full and
// layer l idle, consuming layer l-1's result; results leave on out_ready;
// a load request drains the pipeline before LOAD is entered.
module tb_dp_controller;
  localparam int NL = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, cfg_mode = 1'b1, cfg_we = 1'b0, in_valid = 1'b0, out_ready = 1'b0;
  logic [1:0] cfg_layer = '0, mode;
  logic [NL-1:0] cfg_we_layer, busy_l, full_l, start_l, consume_l;
  logic in_ready, out_valid, busy;
  int cnt [NL];
  int checks = 0, failures = 0, n_in = 0, n_out = 0, n_drain = 0;

  dp_controller #(.NUM_LAYERS(NL)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_mode(cfg_mode), .cfg_we(cfg_we), .cfg_layer(cfg_layer),
    .cfg_we_layer(cfg_we_layer), .in_valid(in_valid), .in_ready(in_ready),
    .out_valid(out_valid), .out_ready(out_ready), .layer_busy(busy_l), .layer_full(full_l),
    .layer_start(start_l), .layer_consume(consume_l), .mode(mode), .busy(busy));

  // layer model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_l <= '0; full_l <= '0;
      for (int l = 0; l < NL; l++) cnt[l] <= 0;
    end else begin
      for (int l = 0; l < NL; l++) begin
        if (consume_l[l]) full_l[l] <= 1'b0;
        if (start_l[l]) begin busy_l[l] <= 1'b1; cnt[l] <= 3 + l; end
        else if (busy_l[l]) begin
          if (cnt[l] > 0) cnt[l] <= cnt[l] - 1;
          else if (!full_l[l] || consume_l[l]) begin busy_l[l] <= 1'b0; full_l[l] <= 1'b1; end
        end
      end
    end
  end

  // expected outputs, from the rules above
  always @(negedge clk) if (rst_n) begin
    logic [NL-1:0] es, ec, ew;
    logic er, flow;
    flow = (mode == 2'd1) || (mode == 2'd2);
    er = (mode == 2'd1) && !busy_l[0];
    es = '0; ec = '0;
    es[0] = er && in_valid;
    for (int l = 1; l < NL; l++) begin
      es[l] = flow && full_l[l-1] && !busy_l[l];
      ec[l-1] = es[l];
    end
    ec[NL-1] = full_l[NL-1] && out_ready;
    for (int l = 0; l < NL; l++) ew[l] = (mode == 2'd0) && cfg_we && (int'(cfg_layer) == l);
    checks++;
    if (start_l !== es || consume_l !== ec || cfg_we_layer !== ew || in_ready !== er ||
        out_valid !== full_l[NL-1]) begin
      failures++;
      $display("%0t mode=%0d start %b/%b consume %b/%b we %b/%b", $time, mode, start_l, es,
               consume_l, ec, cfg_we_layer, ew);
    end
    if (in_valid && in_ready) n_in++;
    if (out_valid && out_ready) n_out++;
    if (mode == 2'd2) n_drain++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 4; l++) begin
      cfg_we = 1; cfg_layer = 2'(l); @(negedge clk);
    end
    cfg_we = 0; cfg_mode = 0;
    @(negedge clk);
    checks++;
    if (mode != 2'd1) begin failures++; $display("not in STREAM"); end
    for (int c = 0; c < 400; c++) begin
      in_valid  = 1'($urandom % 3 != 0);
      out_ready = 1'($urandom % 4 != 0);
      cfg_we    = 1'($urandom);            // ignored outside LOAD
      cfg_layer = 2'($urandom % 3);
      if (c == 200) cfg_mode = 1;          // request LOAD mid-stream
      if (c == 260) cfg_mode = 0;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (60) @(negedge clk);
    checks++;
    if (n_in != n_out || n_in < 10 || n_drain == 0 || busy) begin
      failures++;
      $display("in %0d out %0d drain cycles %0d busy %b", n_in, n_out, n_drain, busy);
    end
    $display("dp_controller: %0d vectors in, %0d out, %0d drain cycles", n_in, n_out, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
