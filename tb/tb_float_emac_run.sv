// tb_float_emac_run: random and corner-case dot products for one
// float_emac configuration, checked at the due cycle against the exact
// sum rounded by dp_ref_pkg::float_round.
module tb_float_emac_run #(
  parameter int WE = 4,
  parameter int WF = 3,
  parameter int K  = 16,
  parameter int NTESTS = 300
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_clip,
  output int   n_sub
);
  import dp_ref_pkg::*;
  localparam int N  = 1 + WE + WF;
  localparam int EB = (1 << (WE - 1)) - 1;
  localparam int SC = EB + WF + 1;
  localparam logic [N-1:0] MAXV = {1'b0, WE'((1 << WE) - 2), {WF{1'b1}}};

  logic         rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [N-1:0] bias = '0, w = '0, a = '0, result;
  logic [N-1:0] ws[K], as[K];

  float_emac #(.WE(WE), .WF(WF), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bias(bias),
    .weight(w), .activation(a), .result(result));

  function automatic logic [N-1:0] rnd_float();
    logic [N-1:0] v;
    do v = N'($urandom); while (v[N-2:WF] == '1);       // no inf/NaN
    return v;
  endfunction

  task automatic run_dot(input int len, input logic [N-1:0] b);
    big_t sum;
    logic [N-1:0] expv;
    sum = float_value(32'(b), WE, WF, 2 * SC);
    for (int i = 0; i < len; i++)
      sum += float_value(32'(ws[i]), WE, WF, SC) * float_value(32'(as[i]), WE, WF, SC);
    expv = N'(float_round(sum, WE, WF, 2 * SC));
    if (expv[N-2:0] == MAXV[N-2:0]) n_clip++;
    if (expv[N-2:WF] == '0 && expv[WF-1:0] != '0) n_sub++;
    @(negedge clk);
    for (int i = 0; i < len; i++) begin
      clr = (i == 0); bias = b; en = 1'b1; w = ws[i]; a = as[i];
      @(negedge clk);
    end
    clr = 1'b0; en = 1'b0;
    @(negedge clk);
    checks++;
    if (result !== expv) begin
      failures++;
      $display("float_emac WE=%0d WF=%0d len=%0d bias=%h: got %h expected %h",
               WE, WF, len, b, result, expv);
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; n_clip = 0; n_sub = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ws[0] = MAXV; as[0] = MAXV; run_dot(1, MAXV);             // clip
    ws[0] = N'(1); as[0] = N'(1); run_dot(1, N'(1));          // subnormals
    ws[0] = MAXV; as[0] = MAXV; ws[1] = MAXV; as[1] = MAXV | (N'(1) << (N-1)); run_dot(2, '0);
    for (int t = 0; t < NTESTS; t++) begin
      int len;
      len = 1 + int'($urandom % (K - 1));
      for (int i = 0; i < len; i++) begin
        ws[i] = rnd_float();
        as[i] = rnd_float();
        // every third dot product uses tiny operands so sums land in the subnormal range
        if (t % 3 == 0) begin
          ws[i][N-2:WF] = WE'($urandom % 2);
          as[i][N-2:WF] = WE'(EB - 1 + ($urandom % 2));
        end
      end
      run_dot(len, (t % 3 == 0) ? N'($urandom % 4) : rnd_float());
    end
    done = 1;
  end
endmodule
