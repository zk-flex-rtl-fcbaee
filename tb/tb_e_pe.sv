// tb_e_pe: checks every evaluation point of the E-PE, Toom-3 and Toom-2, on random
// slices (128, 128 and up to 130 bits) against the polynomial value computed here.
module tb_e_pe;
  import zkf_pkg::*;
  logic toom3;
  eval_pt_e pt;
  logic [MW-1:0] a0, a1, a2;
  logic signed [MW-1:0] v;
  int checks = 0, failures = 0;

  e_pe dut (.*);

  function automatic logic [MW-1:0] rs(int bits);
    logic [MW-1:0] x;
    for (int i = 0; i < (MW + 31) / 32; i++) x[i*32 +: 32] = $urandom;
    return x & ((MW'(1) << bits) - 1);
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      a0 = (t == 0) ? (MW'(1) << 128) - 1 : rs(128);
      a1 = (t == 0) ? (MW'(1) << 128) - 1 : rs(128);
      a2 = (t == 0) ? (MW'(1) << 130) - 1 : rs(130);
      for (int k = 0; k < 5; k++) begin
        logic signed [MW+3:0] e, s0, s1, s2;
        toom3 = 1'b1;
        pt = eval_pt_e'(k);
        s0 = (MW+4)'(a0); s1 = (MW+4)'(a1); s2 = (MW+4)'(a2);
        case (k)
          0: e = s0;
          1: e = s0 + s1 + s2;
          2: e = s0 - s1 + s2;
          3: e = s0 + 2 * s1 + 4 * s2;
          default: e = s2;
        endcase
        #1; checks++;
        if ((MW+4)'(v) !== e) begin failures++; $display("FAIL toom3 pt=%0d", k); end
        toom3 = 1'b0;
        case (k)
          0: e = s0;
          1: e = s0 + s1;
          4: e = s1;
          default: e = 'x;
        endcase
        #1;
        if (k == 0 || k == 1 || k == 4) begin
          checks++;
          if ((MW+4)'(v) !== e) begin failures++; $display("FAIL toom2 pt=%0d", k); end
        end
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
