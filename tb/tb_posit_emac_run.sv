// tb_posit_emac_run: drives one posit_emac configuration with random and
// corner-case dot products and compares each result, at the expected
// cycle, against the exact reference sum rounded by dp_ref_pkg.
// Reports its check and failure counts through its ports.
module tb_posit_emac_run #(
  parameter int N  = 8,
  parameter int ES = 0,
  parameter int K  = 16,
  parameter int NTESTS = 300
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_clip_max,
  output int   n_clip_min
);
  import dp_ref_pkg::*;
  localparam int SC = (N - 1) * (1 << ES) + N;      // reference scale
  localparam logic [N-1:0] NAR    = {1'b1, {(N-1){1'b0}}};
  localparam logic [N-1:0] MAXPOS = {1'b0, {(N-1){1'b1}}};
  localparam logic [N-1:0] MINPOS = N'(1);

  logic         rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [N-1:0] bias = '0, w = '0, a = '0, result;

  posit_emac #(.N(N), .ES(ES), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bias(bias),
    .weight(w), .activation(a), .result(result));

  function automatic logic [N-1:0] rnd_posit();
    logic [N-1:0] v;
    do v = N'($urandom); while (v == NAR);
    return v;
  endfunction

  logic [N-1:0] ws[K], as[K];

  task automatic run_dot(input int len, input logic [N-1:0] b);
    big_t          sum;
    logic [N-1:0]  expv;
    sum = posit_value(32'(b), N, ES, 2 * SC);
    for (int i = 0; i < len; i++)
      sum += posit_value(32'(ws[i]), N, ES, SC) * posit_value(32'(as[i]), N, ES, SC);
    expv = N'(posit_round(sum, N, ES, 2 * SC));
    if (expv == MAXPOS || expv == {1'b1, {(N-2){1'b0}}, 1'b1}) n_clip_max++;
    if (expv == MINPOS || expv == '1) n_clip_min++;
    @(negedge clk);
    for (int i = 0; i < len; i++) begin
      clr  = (i == 0);
      bias = b;
      en   = 1'b1;
      w    = ws[i];
      a    = as[i];
      @(negedge clk);
    end
    clr = 1'b0; en = 1'b0;
    // last pair registered at the previous edge; accumulated at the next one
    @(negedge clk);
    checks++;
    if (result !== expv) begin
      failures++;
      $display("posit_emac N=%0d ES=%0d len=%0d bias=%h: got %h expected %h",
               N, ES, len, b, result, expv);
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; n_clip_max = 0; n_clip_min = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // corner cases: overflow to maxpos, underflow to minpos, exact cancellation
    ws[0] = MAXPOS; as[0] = MAXPOS; run_dot(1, MAXPOS);
    ws[0] = MINPOS; as[0] = MINPOS; run_dot(1, '0);
    ws[0] = -MINPOS; as[0] = MINPOS; run_dot(1, '0);
    ws[0] = 8'h40; as[0] = 8'h40; ws[1] = 8'h40; as[1] = 8'hC0; run_dot(2, '0);
    ws[0] = MAXPOS; as[0] = MAXPOS; ws[1] = MAXPOS; as[1] = -MAXPOS; run_dot(2, MINPOS);
    for (int t = 0; t < NTESTS; t++) begin
      int len;
      len = 1 + int'($urandom % (K - 1));
      for (int i = 0; i < len; i++) begin
        ws[i] = rnd_posit();
        as[i] = rnd_posit();
        // mostly values near 1, as in a trained network, sometimes any
        if ($urandom % 4 != 0) begin
          ws[i] = {ws[i][N-1], ~ws[i][N-1], ws[i][N-3:0]};
          as[i] = {as[i][N-1], ~as[i][N-1], as[i][N-3:0]};
        end
      end
      run_dot(len, rnd_posit());
    end
    $display("run N=%0d ES=%0d finished at %0t", N, ES, $time);
    done = 1;
  end
endmodule
