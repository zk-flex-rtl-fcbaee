// tb_ntt_ctrl: runs whole mixed-radix NTTs modulo the prime 2521 (2520 = 2^3 3^2 5 7,
// so roots of unity of all these orders exist) by executing, in the testbench, the
// butterflies the controller describes: read x at rd_base + k*rd_stride, radix-r DFT,
// twiddle w_N^(j*tw), write at wr_base + j*wr_stride, swapping buffers each stage.
// The result is compared with a direct O(N^2) DFT. Sizes: 210 = 2*3*5*7, 56 = 8*7, 120 = 8*3*5,
// 24 = 4*3*2, 40 = 5*8, 2*2*2. Also checks that each stage issues N/r descriptors,
// one per cycle with ready held high, and that `done` pulses.
module tb_ntt_ctrl;
  localparam int P = 2521;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, bf_valid, bf_ready, last_bf;
  logic [31:0] n;
  logic [123:0] radices;
  logic [4:0] n_stages, bf_stage;
  logic [3:0] bf_radix;
  logic [30:0] rd_base, rd_stride, wr_base, wr_stride, tw;
  int checks = 0, failures = 0;

  ntt_ctrl dut (.*);

  function automatic int mpow(int b, int e);
    longint r, x;
    r = 1; x = b;
    while (e > 0) begin
      if (e % 2) r = (r * x) % P;
      x = (x * x) % P; e = e / 2;
    end
    return int'(r);
  endfunction

  int g;
  int xa [], xb [], ref_y [];

  task automatic run(int nn, int rs [$]);
    int wn, cyc0, cnt, st_cnt;
    xa = new[nn]; xb = new[nn]; ref_y = new[nn];
    for (int i = 0; i < nn; i++) xa[i] = $urandom % P;
    wn = mpow(g, (P - 1) / nn);
    for (int k = 0; k < nn; k++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < nn; i++) begin
        int f;
        f = mpow(wn, (i * k) % nn);
        acc = (acc + longint'(xa[i]) * longint'(f)) % P;
      end
      ref_y[k] = int'(acc);
    end
    radices = '0;
    for (int s = 0; s < rs.size(); s++) radices[s*4 +: 4] = 4'(rs[s]);
    n = 32'(nn); n_stages = 5'(rs.size());
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cnt = 0; st_cnt = 0;
    while (!done) begin
      if (bf_valid) begin
        int r, wr;
        longint v [8];
        r = int'(bf_radix);
        wr = mpow(wn, nn / r);
        checks++;
        if (int'(bf_stage) != st_cnt || r != rs[st_cnt] || int'(rd_stride) != nn / r) begin
          failures++; $display("FAIL descriptor");
        end
        for (int j = 0; j < r; j++) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < r; k++) begin
            int idx, f;
            longint xv;
            idx = int'(rd_base) + k * int'(rd_stride);
            xv  = longint'(xa[idx]);
            f   = mpow(wr, (j * k) % r);
            acc = (acc + xv * longint'(f)) % P;
          end
          begin
            int te, f;
            te = int'((longint'(j) * longint'(tw)) % longint'(nn));
            f  = mpow(wn, te);
            v[j] = (acc * longint'(f)) % P;
          end
          begin
            int widx;
            widx = int'(wr_base) + j * int'(wr_stride);
            xb[widx] = int'(v[j]);
          end
        end
        cnt++;
        if (last_bf) begin
          checks++;
          if (cnt != nn / r) begin failures++; $display("FAIL stage count"); end
          cnt = 0; st_cnt++;
          xa = xb; xb = new[nn];
        end
      end
      @(negedge clk);
    end
    for (int k = 0; k < nn; k++) begin
      checks++;
      if (xa[k] != ref_y[k]) begin failures++; $display("FAIL N=%0d k=%0d", nn, k); end
    end
  endtask

  initial begin
    start = 0; bf_ready = 1; n = '0; radices = '0; n_stages = '0;
    // find a generator of Z_2521^*
    for (g = 2; g < P; g++)
      if (mpow(g, 1260) != 1 && mpow(g, 840) != 1 && mpow(g, 504) != 1 && mpow(g, 360) != 1) break;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(210, '{2, 3, 5, 7});
    run(210, '{7, 5, 3, 2});
    run(56, '{8, 7});
    run(120, '{8, 3, 5});
    run(24, '{4, 3, 2});
    run(40, '{5, 8});
    run(8, '{2, 2, 2});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
