// tb_dp_workloads: runs networks shaped like the three evaluated
// classification tasks, each for its full test-set size, with random
// parameters and inputs (the trained weights and data are not available):
//   Iris              4-5-5-3, 50 inferences: posit es=0 and es=2, float
//                     w_e=4 and w_e=3, fixed point
//   Breast cancer    30-5-5-2, 190 inferences, posit
//   Mushroom         22-5-5-2, 2708 inferences, posit
// Input and output sizes are the usual dataset dimensions; the hidden
// sizes (5, 5) are those of the default network. Every output vector is
// checked against the reference network; the clock counts are printed.
module tb_dp_workloads;
  import dp_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  localparam int R = 7;
  logic d [R];
  int   c [R], f [R], cy [R];
  int   checks, failures;

  tb_dp_net_run #(.FORMAT(FMT_POSIT), .S0(4),  .S3(3), .NVEC(50))   r_iris  (.clk(clk), .done(d[0]), .checks(c[0]), .failures(f[0]), .cycles(cy[0]));
  tb_dp_net_run #(.FORMAT(FMT_FLOAT), .S0(4),  .S3(3), .NVEC(50))   r_irisf (.clk(clk), .done(d[1]), .checks(c[1]), .failures(f[1]), .cycles(cy[1]));
  tb_dp_net_run #(.FORMAT(FMT_FIXED), .S0(4),  .S3(3), .NVEC(50))   r_irisx (.clk(clk), .done(d[2]), .checks(c[2]), .failures(f[2]), .cycles(cy[2]));
  tb_dp_net_run #(.FORMAT(FMT_POSIT), .ES(2), .S0(4), .S3(3), .NVEC(50)) r_iris2 (.clk(clk), .done(d[5]), .checks(c[5]), .failures(f[5]), .cycles(cy[5]));
  tb_dp_net_run #(.FORMAT(FMT_FLOAT), .WE(3), .S0(4), .S3(3), .NVEC(50)) r_irisf3 (.clk(clk), .done(d[6]), .checks(c[6]), .failures(f[6]), .cycles(cy[6]));
  tb_dp_net_run #(.FORMAT(FMT_POSIT), .S0(30), .S3(2), .NVEC(190))  r_wbc   (.clk(clk), .done(d[3]), .checks(c[3]), .failures(f[3]), .cycles(cy[3]));
  tb_dp_net_run #(.FORMAT(FMT_POSIT), .S0(22), .S3(2), .NVEC(2708)) r_mush  (.clk(clk), .done(d[4]), .checks(c[4]), .failures(f[4]), .cycles(cy[4]));

  initial begin
    #1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && d[6]);
    checks = 0; failures = 0;
    for (int i = 0; i < R; i++) begin checks += c[i]; failures += f[i]; end
    if (c[0] != 50 || c[1] != 50 || c[2] != 50 || c[3] != 190 || c[4] != 2708 ||
        c[5] != 50 || c[6] != 50) begin
      failures++;
      $display("wrong number of inferences");
    end
    $display("iris posit/float/fixed: %0d/%0d/%0d clocks; breast cancer %0d clocks; mushroom %0d clocks",
             cy[0], cy[1], cy[2], cy[3], cy[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4] + c[5] + c[6],
             f[0] + f[1] + f[2] + f[3] + f[4] + f[5] + f[6] + 1);
    $finish;
  end
endmodule
