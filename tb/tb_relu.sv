// tb_relu: exhaustive test of relu for N = 8: negative words (sign set)
// give zero, all others pass unchanged.
module tb_relu;
  logic [7:0] in, out;
  int checks = 0, failures = 0;
  relu #(.N(8)) dut (.in(in), .out(out));
  initial begin
    for (int v = 0; v < 256; v++) begin
      in = 8'(v);
      #1;
      checks++;
      if (out !== ((v >= 128) ? 8'h00 : 8'(v))) begin
        failures++;
        $display("in=%h out=%h", in, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
