// float_emac: exact multiply-and-accumulate for small floating-point numbers.
//
// Operands are {sign, WE exponent bits, WF fraction bits} with exponent
// bias 2^(WE-1)-1 and subnormals; infinities and NaNs are not considered
// (inputs never hold them and the result clips at the largest finite
// value instead of overflowing).
// Stage 1: the hidden bit is the OR of the exponent bits (subnormal
//   detection) and a zero exponent is used as 1; the (WF+1)-bit
//   significands are multiplied, the signs XORed, and the shift
//   S - 3 = e_w + e_a - 2 computed (S = e_w + e_a + 1). All registered.
// Stage 2: the product is two's complemented by its sign, shifted left by
//   S - 3 into the w_a-bit accumulator and added. The accumulator LSB then
//   weighs min^2 = 2^(2(1 - bias - WF)), so every product is exact. `clr`
//   preloads the bias at its own place (shift e_b + bias + WF - 2).
// Output (combinational): magnitude (inverse two's complement), LZD
//   normalise, round to nearest, ties to even, at the LSB of a normal
//   result or, for subnormal results, at the subnormal LSB (exponent
//   field 0), clip to the largest finite magnitude, restore the sign.
//   A result that rounds to zero is +0.
// This follows the published float EMAC; the exact placement of the bias
// and the subnormal rounding rule are this design's own derivation.
// Timing as fixed_emac: result valid two clocks after the last `en`.
module float_emac #(
  parameter int WE = 4,
  parameter int WF = 3,
  parameter int K  = 16,
  localparam int N = 1 + WE + WF
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
  localparam int WA     = float_wa(WE, WF, K);
  localparam int EBIAS  = (1 << (WE - 1)) - 1;
  localparam int EXPMAX = (1 << WE) - 2;
  localparam int SUBLSB = EBIAS + WF - 1;             // accumulator index of the subnormal LSB
  localparam logic [WE+WF-1:0] MAXENC = {WE'(EXPMAX), {WF{1'b1}}};

  // ---------------- stage 1 ----------------
  logic          s_w, s_a, s_b, h_w, h_a, h_b;
  logic [WE-1:0] e_w, e_a, e_b, ee_w, ee_a, ee_b;
  logic [WF:0]   m_w, m_a, m_b;
  logic [2*WF+1:0] prod;
  logic [WE:0]   shamt;

  assign {s_w, e_w} = {weight[N-1], weight[N-2:WF]};
  assign {s_a, e_a} = {activation[N-1], activation[N-2:WF]};
  assign {s_b, e_b} = {bias[N-1], bias[N-2:WF]};
  assign h_w  = |e_w;
  assign h_a  = |e_a;
  assign h_b  = |e_b;
  assign ee_w = h_w ? e_w : WE'(1);
  assign ee_a = h_a ? e_a : WE'(1);
  assign ee_b = h_b ? e_b : WE'(1);
  assign m_w  = {h_w, weight[WF-1:0]};
  assign m_a  = {h_a, activation[WF-1:0]};
  assign m_b  = {h_b, bias[WF-1:0]};
  assign prod = m_w * m_a;
  assign shamt = (WE+1)'(ee_w) + (WE+1)'(ee_a) - (WE+1)'(2);

  logic            r_sign, r_vld;
  logic [2*WF+1:0] r_prod;
  logic [WE:0]     r_shamt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_sign <= 1'b0; r_prod <= '0; r_shamt <= '0; r_vld <= 1'b0;
    end else begin
      r_vld <= en;
      if (en) begin
        r_sign  <= s_w ^ s_a;
        r_prod  <= prod;
        r_shamt <= shamt;
      end
    end
  end

  // ---------------- stage 2 ----------------
  logic signed [WA-1:0] prod_fixed, bias_fixed, acc;
  logic signed [2*WF+2:0] prods;
  logic signed [WF+1:0]   biass;

  always_comb begin
    prods = signed'({1'b0, r_prod});
    if (r_sign) prods = -prods;
    prod_fixed = WA'(prods) <<< r_shamt;
    biass = signed'({1'b0, m_b});
    if (s_b) biass = -biass;
    bias_fixed = WA'(biass) <<< (int'(ee_b) + EBIAS + WF - 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clr)   acc <= bias_fixed;
    else if (r_vld) acc <= acc + prod_fixed;
  end

  assert property (@(posedge clk) disable iff (!rst_n) clr |-> !r_vld)
    else $error("float_emac: clr while a product is in flight");

  // ---------------- output ----------------
  logic                     sign_o;
  logic [WA-1:0]            mag, low_mask;
  logic [$clog2(WA+1)-1:0]  zc;
  int                       msb, lsbpos, eb;
  logic [WF:0]              sig;
  logic                     guard, sticky, rnd;
  logic [WE+WF+1:0]         enc;

  lzd #(.W(WA)) u_lzd (.in(mag), .zc(zc));

  assign sign_o = acc[WA-1];
  assign mag    = sign_o ? WA'(-acc) : WA'(acc);

  always_comb begin
    msb    = WA - 1 - int'(zc);
    lsbpos = (msb - WF >= SUBLSB) ? msb - WF : SUBLSB;    // LSB of the result significand
    eb     = (msb - WF >= SUBLSB) ? lsbpos - SUBLSB + 1 : 0; // 0 for subnormal results
    sig    = (WF+1)'(mag >> lsbpos);
    guard  = mag[lsbpos-1];
    low_mask = (WA'(1) << (lsbpos - 1)) - WA'(1);
    sticky = |(mag & low_mask);
    rnd    = guard & (sig[0] | sticky);
    enc    = {2'b00, (WE)'(eb), sig[WF-1:0]} + (WE+WF+2)'(rnd);
    if (eb > EXPMAX || enc > (WE+WF+2)'(MAXENC)) enc = (WE+WF+2)'(MAXENC);
    if (mag == '0 || enc == '0) result = '0;
    else                        result = {sign_o, enc[WE+WF-1:0]};
  end
endmodule
