// tb_fixed_emac: self-checking test of fixed_emac (N=8, Q=4). Random dot
// products, plus sums that saturate high and low, are compared at their
// due cycle with the exact integer sum shifted right by Q and clipped.
module tb_fixed_emac;
  localparam int N = 8, Q = 4, K = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [N-1:0] bias = '0, w = '0, a = '0, result;
  logic [N-1:0] ws[K], as[K];
  int checks = 0, failures = 0, n_sat_hi = 0, n_sat_lo = 0;

  fixed_emac #(.N(N), .Q(Q), .K(K)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en),
    .bias(bias), .weight(w), .activation(a), .result(result));

  task automatic run_dot(input int len, input logic [N-1:0] b);
    longint sum, sh;
    logic [N-1:0] expv;
    sum = longint'(signed'(b)) * (64'sd1 << Q);
    for (int i = 0; i < len; i++) sum += longint'(signed'(ws[i])) * longint'(signed'(as[i]));
    sh = sum >>> Q;
    if (sh > 127) begin expv = 8'h7F; n_sat_hi++; end
    else if (sh < -128) begin expv = 8'h80; n_sat_lo++; end
    else expv = N'(sh);
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
      $display("fixed_emac len=%0d: got %h expected %h", len, result, expv);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) begin ws[i] = 8'h7F; as[i] = 8'h7F; end
    run_dot(8, 8'h7F);
    for (int i = 0; i < 8; i++) begin ws[i] = 8'h80; as[i] = 8'h7F; end
    run_dot(8, 8'h80);
    for (int t = 0; t < 400; t++) begin
      int len;
      len = 1 + int'($urandom % (K - 1));
      for (int i = 0; i < len; i++) begin ws[i] = N'($urandom); as[i] = N'($urandom); end
      run_dot(len, N'($urandom));
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) failures++;
    $display("fixed_emac: saturated high %0d low %0d", n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
