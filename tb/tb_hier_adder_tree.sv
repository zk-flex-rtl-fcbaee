// tb_hier_adder_tree: checks recomposition sum_i c_i 2^(i*128) of signed random
// coefficients against a sum formed here with a plain loop.
module tb_hier_adder_tree;
  localparam int CW = 276, SH = 128, OW = 784;
  logic signed [CW-1:0] c [5];
  logic signed [OW-1:0] y;
  int checks = 0, failures = 0;

  hier_adder_tree #(.CW(CW), .SH(SH), .OW(OW)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic signed [OW-1:0] e;
      e = '0;
      for (int i = 0; i < 5; i++) begin
        logic [CW-1:0] x;
        for (int j = 0; j < (CW + 31) / 32; j++) x[j*32 +: 32] = $urandom;
        c[i] = $signed(x) >>> ($urandom % 16);
        e = e + (OW'(c[i]) * (OW'(1) << (i * SH)));
      end
      #1; checks++;
      if (y !== e) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
