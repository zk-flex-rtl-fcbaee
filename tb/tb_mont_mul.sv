// tb_mont_mul: checks the pipelined Toom-Cook Montgomery multipliers in all three
// modes. Moduli: the BN254 base field prime (256-bit mode), the BLS12-381 base field
// prime (384-bit mode) and a random odd 753-bit modulus (768-bit mode, the size of
// MNT4-753). Q' = -Q^-1 mod 2^n is computed here by Newton iteration. A result Y is
// correct when Y < Q and Y * 2^n = d^3 * A * B (mod Q), checked with wide modular
// arithmetic independent of the design. Also checks the 8-cycle latency and
// back-to-back issue.
module tb_mont_mul;
  import zkf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_mode_e mode;
  logic [MAXW-1:0] q, qinv;
  logic in_valid, out_valid;
  logic [MAXW-1:0] a [MAX_LANES], b [MAX_LANES], y [MAX_LANES];
  int checks = 0, failures = 0;

  mont_mul dut (.*);

  localparam logic [255:0] P_BN254 =
    256'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;
  localparam logic [383:0] P_BLS381 =
    384'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;

  typedef logic [2*MAXW+15:0] wide_t;

  function automatic logic [MAXW-1:0] neg_inv(logic [MAXW-1:0] qq, int unsigned n);
    logic [MAXW-1:0] x, m;
    m = (n == MAXW) ? '1 : ((MAXW'(1) << n) - 1);
    x = 1;
    for (int i = 0; i < 11; i++) x = (x * (MAXW'(2) - qq * x)) & m;  // x = Q^-1 mod 2^n
    return (MAXW'(0) - x) & m;
  endfunction

  function automatic logic [MAXW-1:0] rnd_below(logic [MAXW-1:0] qq);
    logic [MAXW-1:0] v;
    for (int i = 0; i < MAXW/32; i++) v[i*32 +: 32] = $urandom;
    return MAXW'(wide_t'(v) % wide_t'(qq));
  endfunction

  logic [MAXW-1:0] ea [$], eb [$];
  int              st  [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int unsigned n_cur, lanes_cur, d_cur;

  always @(posedge clk) if (rst_n && out_valid) begin
    int c0;
    c0 = st.pop_front();
    checks++;
    if (cyc - c0 != 8) begin failures++; $display("latency %0d", cyc - c0); end
    for (int l = 0; l < lanes_cur; l++) begin
      wide_t lhs, rhs;
      logic [MAXW-1:0] aa, bb;
      aa  = ea.pop_front();
      bb  = eb.pop_front();
      lhs = (wide_t'(y[l]) << n_cur) % wide_t'(q);
      rhs = (((wide_t'(aa) * wide_t'(bb)) % wide_t'(q)) * wide_t'(d_cur * d_cur * d_cur)) % wide_t'(q);
      checks++;
      if (y[l] >= q || lhs != rhs) begin
        failures++;
        $display("FAIL mode=%0d lane=%0d", mode, l);
      end
    end
  end

  task automatic run(prec_mode_e m, logic [MAXW-1:0] qq, int n_ops);
    mode = m; q = qq;
    n_cur = mode_bits(m); lanes_cur = mode_lanes(m); d_cur = (m == MODE_256) ? 1 : 36;
    qinv = neg_inv(qq, n_cur);
    for (int t = 0; t < n_ops; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < MAX_LANES; l++) begin
        a[l] = (t == 0) ? qq - 1 : rnd_below(qq);
        b[l] = (t == 0) ? qq - 1 : rnd_below(qq);
        if (l < lanes_cur) begin ea.push_back(a[l]); eb.push_back(b[l]); end
      end
      st.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(negedge clk);
  endtask

  initial begin
    logic [MAXW-1:0] q768;
    in_valid = 0; mode = MODE_256; q = '0; qinv = '0;
    for (int l = 0; l < MAX_LANES; l++) begin a[l] = '0; b[l] = '0; end
    for (int i = 0; i < MAXW/32; i++) q768[i*32 +: 32] = $urandom;
    q768 = (q768 >> 15) | (MAXW'(1) << 752) | MAXW'(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(MODE_256, MAXW'(P_BN254), 16);
    run(MODE_384, MAXW'(P_BLS381), 16);
    run(MODE_768, q768, 16);
    if (ea.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
