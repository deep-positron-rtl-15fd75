// fixed_emac: exact multiply-and-accumulate for n-bit fixed-point numbers.
//
// Weight, activation and bias are two's complement with Q fraction bits
// and N-Q integer bits. Each full 2N-bit product is registered, sign
// extended to the accumulator width w_a = ceil(log2 K) + 2N and added to
// the accumulator, which `clr` preloads with the bias shifted left by Q
// (so it sits on the products' 2Q-fraction-bit grid). The output takes the
// accumulator shifted right by Q (truncation toward minus infinity) and
// clips it to the N-bit range. This is the published fixed-point EMAC;
// the clip to the full two's complement range [-2^(N-1), 2^(N-1)-1] and
// truncation by an arithmetic shift are this design's reading of
// "shifted right by q bits and truncated to n bits ... clip at the maximum
// magnitude".
//
// Timing: `clr` loads the bias; a pair presented with `en` is registered
// and accumulated on the next clock; `result` (combinational from the
// accumulator) is valid two clocks after the last pair's `en` cycle.
module fixed_emac #(
  parameter int N = 8,
  parameter int Q = 4,
  parameter int K = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [N-1:0] bias,
  input  logic [N-1:0] weight,
  input  logic [N-1:0] activation,
  output logic [N-1:0] result
);
  import dp_pkg::*;
  localparam int WA = fixed_wa(N, K);

  logic signed [2*N-1:0] prod, r_prod;
  logic                  r_vld;
  logic signed [WA-1:0]  acc, bias_fixed, shifted;

  assign prod = signed'(weight) * signed'(activation);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_prod <= '0;
      r_vld  <= 1'b0;
    end else begin
      r_vld <= en;
      if (en) r_prod <= prod;
    end
  end

  assign bias_fixed = WA'(signed'(bias)) <<< Q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clr)   acc <= bias_fixed;
    else if (r_vld) acc <= acc + WA'(r_prod);
  end

  assert property (@(posedge clk) disable iff (!rst_n) clr |-> !r_vld)
    else $error("fixed_emac: clr while a product is in flight");

  localparam logic signed [WA-1:0] MAXV = WA'((1 << (N - 1)) - 1);
  localparam logic signed [WA-1:0] MINV = -WA'(1 << (N - 1));

  always_comb begin
    shifted = acc >>> Q;
    if (shifted > MAXV)      result = MAXV[N-1:0];
    else if (shifted < MINV) result = MINV[N-1:0];
    else                     result = shifted[N-1:0];
  end
endmodule
