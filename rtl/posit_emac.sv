// posit_emac: exact multiply-and-accumulate for n-bit posits.
//
// Computes  result = round(bias + sum_i weight_i * activation_i)  where the
// sum is formed exactly in a quire (a Kulisch accumulator) of
// qsize = 2^(es+2)*(n-2) + 2 + ceil(log2 K) bits and rounded once, at the
// end, to the nearest posit (ties to even bit pattern).
//
// Stage 1 (combinational, then registered): both operands are decoded,
//   the hidden-bit fractions multiplied, the signs XORed, the scale factors
//   added, and the product two's complemented by its sign.
// Stage 2: the product is shifted to its fixed-point place by its scale
//   factor biased by 2^(es+1)*(n-2) (so the shift is never negative) and
//   added into the quire.
// Output (combinational from the quire): magnitude, LZD, scale factor of
//   the leading one minus the bias, regime/exponent/fraction packing,
//   round to nearest even, clip to maxpos/minpos, sign restored.
// The quire LSB weighs minpos^2 = 2^-(2^(es+1)*(n-2)); every product and
// the bias land on that grid, so nothing is lost before the final rounding.
//
// This follows the published posit EMAC. Choices made here:
//  * the product is not renormalised by its overflow bit before the shift
//    (that right shift would drop the product's LSB); the unnormalised
//    product is placed directly, which is the same value;
//  * the output is formed by direct posit packing with a guard and sticky
//    bit, giving the same round-to-nearest-even result as the published
//    encode steps; results above maxpos give maxpos and nonzero results
//    below minpos give minpos (posits neither overflow nor underflow);
//  * K counts every term of the sum including the bias.
//
// Interface/timing: `clr` loads the quire with the bias (a dot product
// starts); a pair presented with `en` is accumulated one cycle later (in
// the same cycle as a `clr`, it lands on top of the bias). `result` is
// valid the cycle after the last pair's accumulation, i.e. two clocks after
// its `en` cycle, and holds until the next `clr`/accumulation.
module posit_emac #(
  parameter int N  = 8,
  parameter int ES = 0,
  parameter int K  = 16
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

  localparam int RW   = $clog2(N) + 1;
  localparam int SFW  = ES + RW;              // decoded scale factor width
  localparam int FW   = N - 2 - ES;           // fraction incl. hidden bit
  localparam int PW   = 2 * FW;               // product width
  localparam int PF   = 2 * (FW - 1);         // product fraction bits
  localparam int BIAS = posit_bias(N, ES);
  localparam int QW   = posit_qsize(N, ES, K);
  localparam int MAXSF = (N - 2) << ES;       // scale factor of maxpos
  localparam int FB   = N;                    // fraction bits kept for rounding

  // ---------------- stage 1: decode and multiply ----------------
  logic              nz_w, nz_a, nz_b, s_w, s_a, s_b;
  logic signed [RW-1:0]  k_w, k_a, k_b;
  logic signed [SFW-1:0] sf_w, sf_a, sf_b;
  logic [FW-1:0]     f_w, f_a, f_b;

  posit_decode #(.N(N), .ES(ES)) u_dec_w (.in(weight),     .nzero(nz_w), .sign(s_w),
                                          .regime(k_w), .sf(sf_w), .frac(f_w));
  posit_decode #(.N(N), .ES(ES)) u_dec_a (.in(activation), .nzero(nz_a), .sign(s_a),
                                          .regime(k_a), .sf(sf_a), .frac(f_a));
  posit_decode #(.N(N), .ES(ES)) u_dec_b (.in(bias),       .nzero(nz_b), .sign(s_b),
                                          .regime(k_b), .sf(sf_b), .frac(f_b));

  logic [PW-1:0]         frac_mult;
  logic signed [PW:0]    fracs_mult;
  logic signed [SFW:0]   sf_mult;

  assign frac_mult  = f_w * f_a;
  assign fracs_mult = (s_w ^ s_a) ? -signed'({1'b0, frac_mult}) : signed'({1'b0, frac_mult});
  assign sf_mult    = SFW'(sf_w) + SFW'(sf_a);

  logic signed [PW:0]  r_fracs;
  logic signed [SFW:0] r_sf;
  logic                r_vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_fracs <= '0;
      r_sf    <= '0;
      r_vld   <= 1'b0;
    end else begin
      r_vld <= en;
      if (en) begin
        r_fracs <= fracs_mult;
        r_sf    <= sf_mult;
      end
    end
  end

  // ---------------- stage 2: shift to fixed point and accumulate ----------------
  logic signed [QW-1:0]    quire, prod_fixed, bias_fixed;
  logic signed [QW+PF-1:0] prod_ext;
  logic signed [QW+FW-2:0] bias_ext;
  logic signed [FW:0]      fracs_b;
  int                      sf_biased, sfb_biased;

  always_comb begin
    sf_biased = int'(r_sf) + BIAS;
    prod_ext  = (QW+PF)'(r_fracs);
    // a negative biased scale factor only occurs for a zero operand
    prod_ext  = (sf_biased < 0) ? '0 : (prod_ext <<< sf_biased);
    prod_fixed = prod_ext[QW+PF-1:PF];

    sfb_biased = int'(sf_b) + BIAS;
    fracs_b    = signed'({1'b0, f_b});
    if (s_b) fracs_b = -fracs_b;
    bias_ext   = (QW+FW-1)'(fracs_b);
    bias_ext   = (!nz_b || sfb_biased < 0) ? '0 : (bias_ext <<< sfb_biased);
    bias_fixed = bias_ext[QW+FW-2:FW-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      quire <= '0;
    else if (clr)    quire <= bias_fixed;
    else if (r_vld)  quire <= quire + prod_fixed;
  end

  // a pair accumulated in the cycle of a clr would be lost
  assert property (@(posedge clk) disable iff (!rst_n) clr |-> !r_vld)
    else $error("posit_emac: clr while a product is in flight");

  // ---------------- output: normalise, round, clip, encode ----------------
  logic                 sign_q, nz_q;
  logic [QW-1:0]        mag_q, norm_q;
  logic [$clog2(QW+1)-1:0] zc_q;
  int                   sf_q, k_q, rlen;
  logic [FB-1:0]        frac_q;
  logic                 sticky_q;
  localparam int BW = ES + FB + 1;            // exponent, fraction, sticky
  localparam int SW = N + BW;
  logic [BW-1:0]        body;
  logic [N-1:0]         reg_bits;
  logic [SW-1:0]        str;
  logic [N-2:0]         top;
  logic                 guard, lsb, stk, rnd;
  logic [N-1:0]         res_mag;

  lzd #(.W(QW)) u_lzd_q (.in(mag_q), .zc(zc_q));

  assign sign_q   = quire[QW-1];
  assign mag_q    = sign_q ? QW'(-quire) : QW'(quire);
  assign nz_q     = |mag_q;
  assign norm_q   = mag_q << zc_q;                   // leading one at the MSB
  assign frac_q   = norm_q[QW-2 -: FB];
  assign sticky_q = |norm_q[QW-2-FB:0];

  if (ES > 0) begin : g_body_exp
    assign body = {sf_q[ES-1:0], frac_q, sticky_q};
  end else begin : g_body
    assign body = {frac_q, sticky_q};
  end

  always_comb begin
    sf_q = (QW - 1 - int'(zc_q)) - BIAS;            // scale factor of the leading one
    k_q  = sf_q >>> ES;                             // regime
    if (k_q >= 0) begin
      rlen     = k_q + 2;                           // k+1 ones and a zero
      reg_bits = N'((64'd1 << rlen) - 64'd2);
    end else begin
      rlen     = 1 - k_q;                           // -k zeros and a one
      reg_bits = N'(1);
    end
    str   = {reg_bits, body} << (N - rlen);
    top   = str[SW-1 -: N-1];
    guard = str[SW-N];
    stk   = |str[SW-N-1:0];
    lsb   = top[0];
    rnd   = guard & (lsb | stk);
    if (!nz_q)               res_mag = '0;
    else if (sf_q > MAXSF)   res_mag = {1'b0, {(N-1){1'b1}}};   // maxpos
    else if (sf_q < -MAXSF)  res_mag = N'(1);                    // minpos
    else                     res_mag = {1'b0, top} + N'(rnd);
    result = sign_q ? -res_mag : res_mag;
  end
endmodule
