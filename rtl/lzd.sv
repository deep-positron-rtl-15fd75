// lzd: leading-zero detector.
//
// Counts the zeros above the most significant 1 of `in`. The posit decoder
// uses it to measure the regime run (after inverting the run so that it is
// always made of zeros) and the EMAC output stages use it to normalise the
// accumulator. Purely combinational: a priority scan from the LSB upward so
// the last hit is the highest set bit. An all-zero input gives W. The scan
// structure is this design's choice; the count is what the datapath needs.
module lzd #(
  parameter int W = 8
) (
  input  logic [W-1:0]           in,
  output logic [$clog2(W+1)-1:0] zc
);
  always_comb begin
    zc = ($clog2(W+1))'(W);
    for (int i = 0; i < W; i++) begin
      if (in[i]) zc = ($clog2(W+1))'(W - 1 - i);
    end
  end
endmodule
