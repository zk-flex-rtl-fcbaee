// tb_modadd_array: drives all lanes of the modular adder array in the three modes
// with random operands below Q (and Q-1 corner cases), random add/sub per lane, and
// compares each lane with (a + b) mod Q or (a - b) mod Q computed here.
module tb_modadd_array;
  import zkf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_mode_e mode;
  logic [MAXW-1:0] q;
  logic in_valid, out_valid;
  logic [11:0] sub;
  logic [3071:0] a, b, y;
  int checks = 0, failures = 0;

  modadd_array dut (.*);

  function automatic logic [MAXW-1:0] rnd_below(logic [MAXW-1:0] qq, int bits);
    logic [MAXW+31:0] v;
    for (int i = 0; i < MAXW/32 + 1; i++) v[i*32 +: 32] = $urandom;
    return MAXW'(v % (MAXW+32)'(qq));
  endfunction

  initial begin
    in_valid = 0; sub = '0; a = '0; b = '0; mode = MODE_256; q = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      int unsigned n, lanes;
      mode  = prec_mode_e'(m);
      n     = mode_bits(mode);
      lanes = 3072 / n;
      for (int t = 0; t < 60; t++) begin
        logic [MAXW-1:0] ea [12];
        for (int i = 0; i < MAXW/32; i++) q[i*32 +: 32] = $urandom;
        q = (q >> (MAXW - n)) | (MAXW'(1) << (n - 1)) | MAXW'(1);
        if (t % 3 == 0) q = q >> 1 | (MAXW'(1) << (n - 3));   // also moduli well below 2^n
        @(negedge clk);
        for (int l = 0; l < int'(lanes); l++) begin
          logic [MAXW-1:0] x, z;
          logic [MAXW+1:0] s;
          x = (t == 1) ? q - 1 : rnd_below(q, n);
          z = (t == 1) ? q - 1 : rnd_below(q, n);
          sub[l] = $urandom % 2;

          for (int k = 0; k < int'(n); k++) begin a[l*n + k] = x[k]; b[l*n + k] = z[k]; end
          if (sub[l]) s = (x >= z) ? (MAXW+2)'(x - z) : (MAXW+2)'(x) + (MAXW+2)'(q) - (MAXW+2)'(z);
          else        s = ((MAXW+2)'(x) + (MAXW+2)'(z)) % (MAXW+2)'(q);
          ea[l] = MAXW'(s);
        end
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("no valid"); end
        for (int l = 0; l < int'(lanes); l++) begin
          logic [MAXW-1:0] got;
          got = '0;
          for (int k = 0; k < int'(n); k++) got[k] = y[l*n + k];
          checks++;
          if (got !== ea[l]) begin failures++; $display("FAIL mode=%0d lane=%0d sub=%0d", m, l, sub[l]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
