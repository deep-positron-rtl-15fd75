// posit_decode: field extraction of an n-bit posit with es exponent bits.
//
// A posit is sign | regime (a run of identical bits closed by the opposite
// bit) | es exponent bits | fraction. Its value is
//   (-1)^s * (2^(2^es))^k * 2^e * 1.f
// taken on the two's complement of the word when the sign is set.
// The steps follow the published data-extraction algorithm: two's complement
// the n-1 bits below the sign, read the regime-check bit rc (the first
// regime bit), XOR the word with rc so the regime run is always zeros, count
// that run with an LZD (zc), shift the run and its terminating bit out, and
// read the exponent and fraction from the top of what is left.
// k = rc ? zc-1 : -zc. The scale factor sf = {k, e} = k*2^es + e is returned
// as one signed number, since that is how the EMAC uses it.
// The only departure from the published indexing is that the shift is done
// on {twos, 0} by zc+1 instead of on twos[n-4:0] by zc-1; the two give the
// same bits and this form also works when no fraction bits remain.
// Zero decodes with nzero = 0 and frac = 0. NaR (10...0) is not handled,
// as in the source: all inputs are expected to be real.
// Combinational, no clock.
module posit_decode #(
  parameter int N  = 8,
  parameter int ES = 0
) (
  input  logic [N-1:0]                     in,
  output logic                             nzero,
  output logic                             sign,
  output logic signed [$clog2(N):0]        regime,  // k
  output logic signed [ES+$clog2(N):0]     sf,      // k*2^es + e
  output logic [N-3-ES:0]                  frac     // {hidden bit, fraction}
);
  localparam int RW  = $clog2(N) + 1;
  localparam int SFW = ES + RW;
  localparam int FW  = N - 2 - ES;   // fraction width including hidden bit

  logic [N-2:0]          twos, inv;
  logic                  rc;
  logic [$clog2(N)-1:0]  zc;
  logic [N-1:0]          rest;        // bits after the regime terminator, MSB aligned
  logic [SFW-1:0]        sf_bits;

  assign nzero = |in;
  assign sign  = in[N-1];
  assign twos  = ({(N-1){sign}} ^ in[N-2:0]) + (N-1)'(sign);
  assign rc    = twos[N-2];
  assign inv   = {(N-1){rc}} ^ twos;

  lzd #(.W(N-1)) u_lzd (.in(inv), .zc(zc));

  assign rest   = {twos, 1'b0} << (32'(zc) + 1);
  assign regime = rc ? (RW'(zc) - RW'(1)) : -RW'(zc);

  if (ES > 0) begin : g_exp
    assign sf_bits = {regime, rest[N-1 -: ES]};
  end else begin : g_noexp
    assign sf_bits = regime;
  end
  assign sf = signed'(sf_bits);

  if (FW > 1) begin : g_frac
    assign frac = {nzero, rest[N-1-ES -: FW-1]};
  end else begin : g_nofrac
    assign frac = nzero;
  end
endmodule
