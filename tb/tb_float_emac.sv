// tb_float_emac: self-checking test of float_emac at its default format
// (1 sign, 4 exponent, 3 fraction bits) and at w_e = 3, w_f = 4. Each dot
// product is compared, at its due cycle, with the exact sum rounded to
// nearest even and clipped; clipped and subnormal results are counted.
module tb_float_emac;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic d0, d1;
  int c0, c1, f0, f1, cl0, cl1, s0, s1, checks, failures;

  tb_float_emac_run #(.WE(4), .WF(3), .K(16)) r0 (.clk(clk), .done(d0), .checks(c0), .failures(f0),
                                                  .n_clip(cl0), .n_sub(s0));
  tb_float_emac_run #(.WE(3), .WF(4), .K(16)) r1 (.clk(clk), .done(d1), .checks(c1), .failures(f1),
                                                  .n_clip(cl1), .n_sub(s1));
  initial begin
    #1;
    wait (d0 && d1);
    checks = c0 + c1 + 1;
    failures = f0 + f1;
    if (cl0 == 0 || cl1 == 0 || s0 == 0 || s1 == 0) begin
      failures++;
      $display("clip or subnormal path not exercised");
    end
    $display("float_emac: %0d/%0d dot products, clipped %0d/%0d, subnormal %0d/%0d",
             c0, c1, cl0, cl1, s0, s1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
