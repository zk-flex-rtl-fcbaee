// tb_interp_pe: builds random signed coefficient vectors c0..c4 (Toom-3) or c0..c2
// (Toom-2), evaluates the product polynomial at the points 0, 1, -1, 2, inf here,
// and checks that the interpolator returns 36*c (Toom-3) or c (Toom-2).
module tb_interp_pe;
  localparam int IW = 268, OW = IW + 8;
  logic toom3;
  logic signed [IW-1:0] w0, w1, wm1, w2, winf;
  logic signed [OW-1:0] c [5];
  int checks = 0, failures = 0;

  interp_pe #(.IW(IW), .OW(OW)) dut (.*);

  function automatic logic signed [IW-1:0] rc();
    logic [IW-1:0] x;
    for (int i = 0; i < (IW + 31) / 32; i++) x[i*32 +: 32] = $urandom;
    return $signed(x) >>> 8;   // keeps 2-point sums inside IW
  endfunction

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic signed [IW-1:0] k [5];
      toom3 = t[0];
      for (int i = 0; i < 5; i++) k[i] = rc() >>> 4;
      if (!toom3) begin k[3] = '0; k[4] = '0; end
      w0   = k[0];
      w1   = k[0] + k[1] + k[2] + k[3] + k[4];
      wm1  = k[0] - k[1] + k[2] - k[3] + k[4];
      w2   = k[0] + 2*k[1] + 4*k[2] + 8*k[3] + 16*k[4];
      winf = toom3 ? k[4] : k[2];
      #1;
      for (int i = 0; i < 5; i++) begin
        logic signed [OW-1:0] e;
        if (toom3) e = 36 * OW'(k[i]);
        else       e = (i < 3) ? OW'(k[i]) : '0;
        checks++;
        if (c[i] !== e) begin failures++; $display("FAIL t=%0d i=%0d", t, i); end
      end
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
