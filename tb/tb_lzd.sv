// tb_lzd: exhaustive test of lzd for W = 8 and random test for W = 13,
// against a count made by scanning from the MSB.
module tb_lzd;
  logic [7:0]  in8;
  logic [12:0] in13;
  logic [3:0]  zc8, zc13;
  int checks = 0, failures = 0;

  lzd #(.W(8))  u8  (.in(in8),  .zc(zc8));
  lzd #(.W(13)) u13 (.in(in13), .zc(zc13));

  function automatic int ref_lz(input logic [31:0] v, input int w);
    int c = 0;
    for (int i = w - 1; i >= 0; i--) begin
      if (v[i]) break;
      c++;
    end
    return c;
  endfunction

  initial begin
    for (int v = 0; v < 256; v++) begin
      in8 = 8'(v);
      #1;
      checks++;
      if (int'(zc8) != ref_lz(32'(v), 8)) begin
        failures++;
        $display("W=8 in=%h zc=%0d", in8, zc8);
      end
    end
    for (int t = 0; t < 2000; t++) begin
      in13 = 13'($urandom) >> ($urandom % 14);
      #1;
      checks++;
      if (int'(zc13) != ref_lz(32'(in13), 13)) begin
        failures++;
        $display("W=13 in=%h zc=%0d", in13, zc13);
      end
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
