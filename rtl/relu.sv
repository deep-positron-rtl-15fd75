// relu: rectified linear activation for the hidden layers.
//
// In all three number formats of this design (two's complement fixed
// point, sign-magnitude float, posit) a set MSB means a negative value and
// the all-zero word is zero, so max(x, 0) is: zero when the sign bit is
// set, x otherwise. Negative zero of the float format also maps to +0.
// Combinational. The paper applies ReLU on every layer but the readout;
// the sign-bit form of it is this design's implementation.
module relu #(
  parameter int N = 8
) (
  input  logic [N-1:0] in,
  output logic [N-1:0] out
);
  assign out = in[N-1] ? '0 : in;
endmodule
