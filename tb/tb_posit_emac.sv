// tb_posit_emac: self-checking test of posit_emac at its default size and
// at two other (n, es) points. Each dot product is checked, at the cycle
// its result is due, against an exact reference sum rounded to a posit.
// Counts of clipped results (maxpos/minpos) show those paths were taken.
module tb_posit_emac;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2, mx0, mx1, mx2, mn0, mn1, mn2;
  int   checks, failures;

  tb_posit_emac_run #(.N(8), .ES(0), .K(16)) r0 (.clk(clk), .done(d0), .checks(c0), .failures(f0),
                                                 .n_clip_max(mx0), .n_clip_min(mn0));
  tb_posit_emac_run #(.N(8), .ES(2), .K(16)) r1 (.clk(clk), .done(d1), .checks(c1), .failures(f1),
                                                 .n_clip_max(mx1), .n_clip_min(mn1));
  tb_posit_emac_run #(.N(6), .ES(1), .K(8))  r2 (.clk(clk), .done(d2), .checks(c2), .failures(f2),
                                                 .n_clip_max(mx2), .n_clip_min(mn2));

  initial begin
    #1;
    wait (d0 && d1 && d2);
    checks   = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2;
    if (mx0 == 0 || mn0 == 0 || mx1 == 0 || mn1 == 0 || mx2 == 0 || mn2 == 0) begin
      failures++;
      $display("clip paths not exercised");
    end
    $display("posit_emac: %0d/%0d/%0d dot products, clips max %0d/%0d/%0d min %0d/%0d/%0d",
             c0, c1, c2, mx0, mx1, mx2, mn0, mn1, mn2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
