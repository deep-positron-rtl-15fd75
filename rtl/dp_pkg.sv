// dp_pkg: types and width formulas shared by the Deep Positron datapath.
//
// Three number formats can be built into a layer; all three use exact
// multiply-and-accumulate (EMAC) units whose accumulator is wide enough
// to hold any sum of k products without rounding. The accumulator widths
// below follow the published formulas:
//   fixed/float : w_a   = ceil(log2 k) + 2*ceil(log2(max/min)) + 2
//   posit       : qsize = 2^(es+2)*(n-2) + 2 + ceil(log2 k)
// For fixed point max/min = 2^(n-1)-1 (ceil(log2) = n-1); for a float with
// w_e exponent and w_f fraction bits ceil(log2(max/min)) = exp_max + w_f
// with exp_max = 2^w_e - 2.
package dp_pkg;

  typedef enum logic [1:0] {
    FMT_FIXED = 2'd0,
    FMT_FLOAT = 2'd1,
    FMT_POSIT = 2'd2
  } format_e;

  function automatic int clog2i(input int v);
    return (v <= 1) ? 0 : $clog2(v);
  endfunction

  // Quire width of an n-bit, es posit EMAC summing k terms.
  function automatic int posit_qsize(input int n, input int es, input int k);
    return ((n - 2) << (es + 2)) + 2 + clog2i(k);
  endfunction

  // Scale-factor bias 2^(es+1)*(n-2): the biased scale factor of a product
  // of two nonzero posits is never negative.
  function automatic int posit_bias(input int n, input int es);
    return (n - 2) << (es + 1);
  endfunction

  function automatic int fixed_wa(input int n, input int k);
    return clog2i(k) + 2 * (n - 1) + 2;
  endfunction

  function automatic int float_wa(input int we, input int wf, input int k);
    return clog2i(k) + 2 * (((1 << we) - 2) + wf) + 2;
  endfunction

endpackage
