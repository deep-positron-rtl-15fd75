// tb_posit_decode: exhaustive test of posit_decode for (n, es) = (8, 0),
// (8, 2) and (5, 1). The value rebuilt from the decoded sign, scale factor
// and fraction, (-1)^s * frac * 2^(sf - fraction bits), must equal the
// reference value of every bit pattern (NaR excluded); the regime must
// match the run-length count of the reference.
module tb_posit_decode;
  import dp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0] in_a, in_b;
  logic [4:0] in_c;
  logic nz_a, nz_b, nz_c, s_a, s_b, s_c;
  logic signed [3:0] k_a, k_b, k_c;
  logic signed [3:0] sf_a; logic signed [5:0] sf_b; logic signed [4:0] sf_c;
  logic [5:0] f_a; logic [3:0] f_b; logic [1:0] f_c;

  posit_decode #(.N(8), .ES(0)) ua (.in(in_a), .nzero(nz_a), .sign(s_a), .regime(k_a), .sf(sf_a), .frac(f_a));
  posit_decode #(.N(8), .ES(2)) ub (.in(in_b), .nzero(nz_b), .sign(s_b), .regime(k_b), .sf(sf_b), .frac(f_b));
  posit_decode #(.N(5), .ES(1)) uc (.in(in_c), .nzero(nz_c), .sign(s_c), .regime(k_c), .sf(sf_c), .frac(f_c));

  function automatic big_t rebuild(input logic s, input int sf, input int frac, input int fbits,
                                   input int scale);
    big_t v;
    v = big_t'(frac) <<< (scale + sf - fbits);
    return s ? -v : v;
  endfunction

  function automatic int ref_regime(input logic [31:0] u, input int n);
    logic [31:0] t;
    int i, run;
    logic r0;
    t = u[n-1] ? ((~u + 1) & ((32'd1 << n) - 1)) : u;
    i = n - 2; r0 = t[i]; run = 0;
    while (i >= 0 && t[i] == r0) begin run++; i--; end
    return r0 ? run - 1 : -run;
  endfunction

  task automatic check(input int n, input int es, input logic [31:0] u, input logic nz,
                       input logic s, input int k, input int sf, input int frac);
    big_t got, expv;
    int   scale;
    scale = ((n + 2) << es) + n;
    got   = nz ? rebuild(s, sf, frac, n - 3 - es, scale) : '0;
    expv  = posit_value(u, n, es, scale);
    checks++;
    if (got != expv || (u != 0 && k != ref_regime(u, n)) || (nz != (u != 0))) begin
      failures++;
      $display("n=%0d es=%0d in=%h: k=%0d sf=%0d frac=%h", n, es, u, k, sf, frac);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      if (v == 128) continue;
      in_a = 8'(v); in_b = 8'(v);
      #1;
      check(8, 0, 32'(v), nz_a, s_a, int'(k_a), int'(sf_a), int'(f_a));
      check(8, 2, 32'(v), nz_b, s_b, int'(k_b), int'(sf_b), int'(f_b));
    end
    for (int v = 0; v < 32; v++) begin
      if (v == 16) continue;
      in_c = 5'(v);
      #1;
      check(5, 1, 32'(v), nz_c, s_c, int'(k_c), int'(sf_c), int'(f_c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
