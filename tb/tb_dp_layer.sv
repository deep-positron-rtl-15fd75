// tb_dp_layer: runs dp_layer in its three formats: a posit layer with
// ReLU (4 -> 3), a float layer with ReLU (5 -> 2) and a fixed-point
// readout layer without ReLU (3 -> 4). Checks values, latency and the
// write-back stall; ReLU must have zeroed at least one negative output.
module tb_dp_layer;
  import dp_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2, s0, s1, s2, z0, z1, z2, checks, failures;

  tb_dp_layer_run #(.FORMAT(FMT_POSIT), .NI(4), .NO(3), .RELU(1'b1)) r0 (
    .clk(clk), .done(d0), .checks(c0), .failures(f0), .n_stall(s0), .n_relu_zero(z0));
  tb_dp_layer_run #(.FORMAT(FMT_FLOAT), .NI(5), .NO(2), .RELU(1'b1)) r1 (
    .clk(clk), .done(d1), .checks(c1), .failures(f1), .n_stall(s1), .n_relu_zero(z1));
  tb_dp_layer_run #(.FORMAT(FMT_FIXED), .NI(3), .NO(4), .RELU(1'b0)) r2 (
    .clk(clk), .done(d2), .checks(c2), .failures(f2), .n_stall(s2), .n_relu_zero(z2));

  initial begin
    #1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2;
    if (z0 == 0 || z1 == 0) begin failures++; $display("ReLU never zeroed an output"); end
    $display("dp_layer: stalls %0d/%0d/%0d, relu zeros %0d/%0d", s0, s1, s2, z0, z1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
