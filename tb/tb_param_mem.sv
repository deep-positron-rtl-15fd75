// tb_param_mem: fills a 4-input, 5-neuron memory with random weights and
// biases, then reads every input index and checks all neurons' weights and
// biases against a copy kept by the testbench; then overwrites a few words
// and checks again (writes land at the clock edge, reads are immediate).
module tb_param_mem;
  localparam int N = 8, NI = 4, NO = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, wr_bias = 1'b0;
  logic [2:0] wr_neuron = '0;
  logic [1:0] wr_index = '0, rd_index = '0;
  logic [N-1:0] wr_data = '0;
  logic [NO-1:0][N-1:0] rd_weight, rd_bias;
  logic [N-1:0] wref [NO][NI];
  logic [N-1:0] bref [NO];
  int checks = 0, failures = 0;

  param_mem #(.N(N), .N_IN(NI), .N_OUT(NO)) dut (.clk(clk), .we(we), .wr_bias(wr_bias),
    .wr_neuron(wr_neuron), .wr_index(wr_index), .wr_data(wr_data), .rd_index(rd_index),
    .rd_weight(rd_weight), .rd_bias(rd_bias));

  task automatic write(input int j, input int i, input logic b, input logic [N-1:0] d);
    @(negedge clk);
    we = 1'b1; wr_bias = b; wr_neuron = 3'(j); wr_index = 2'(i); wr_data = d;
    @(negedge clk);
    we = 1'b0;
    if (b) bref[j] = d; else wref[j][i] = d;
  endtask

  task automatic check_all();
    for (int i = 0; i < NI; i++) begin
      rd_index = 2'(i);
      #1;
      for (int j = 0; j < NO; j++) begin
        checks += 2;
        if (rd_weight[j] !== wref[j][i]) begin failures++; $display("w[%0d][%0d]", j, i); end
        if (rd_bias[j] !== bref[j])      begin failures++; $display("b[%0d]", j); end
      end
    end
  endtask

  initial begin
    for (int j = 0; j < NO; j++) begin
      write(j, 0, 1'b1, N'($urandom));
      for (int i = 0; i < NI; i++) write(j, i, 1'b0, N'($urandom));
    end
    check_all();
    for (int t = 0; t < 10; t++) write(int'($urandom % NO), int'($urandom % NI), 1'($urandom), N'($urandom));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
