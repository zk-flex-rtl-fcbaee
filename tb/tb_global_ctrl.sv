// tb_global_ctrl: drives the global controller through its host command port only.
// An MSM tile of 300 random 768-bit scalars is loaded with G_SCALAR while an NTT of
// size 2*3*4*5 = 120 runs in parallel; G_MSM_RUN streams window 0 to 3 MPADD engines,
// then G_MSM_WIN / G_MSM_RUN repeat it for windows 1 and 20. Every streamed point is
// checked against a signed-digit recoding computed here (bucket, sign, first/last,
// one engine per bucket, count), the NTT must emit stages * N / radix descriptors in
// stage order and pulse ntt_done, and engine streams beyond the configured 3 must
// stay silent. Default (full-size) parameters are used.
module tb_global_ctrl;
  import zkf_pkg::*;
  localparam int NE = 15, PT_AW = 12, BK_AW = 11;
  localparam int NPTS = 300, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, bf_valid, bf_ready, bf_last, ntt_done, msm_win_done;
  host_cmd_t cmd;
  logic [4:0] bf_stage;
  logic [3:0] bf_radix;
  logic [30:0] bf_rd_base, bf_rd_stride, bf_wr_base, bf_wr_stride, bf_tw;
  logic e_valid [NE], e_ready [NE], e_neg [NE], e_first [NE], e_last [NE];
  logic [BK_AW-1:0] e_bkt [NE];
  logic [PT_AW-1:0] e_pt [NE];
  int checks = 0, failures = 0;

  global_ctrl dut (.*);

  logic [SCALAR_W-1:0] sc [NPTS];
  int   exp_b [NPTS];          // expected bucket (-1: zero digit)
  logic exp_n [NPTS];
  int   got   [NPTS];
  int   owner [1 << BK_AW];
  int   run_cnt [1 << BK_AW];
  logic in_bkt [NE];
  int   streamed, bf_count, bf_stage_now, done_seen, wrong_engine;

  function automatic void ref_digit(logic [SCALAR_W-1:0] k, int w, output int b, output logic neg);
    logic signed [SCALAR_W+16:0] v;
    int d;
    v = (SCALAR_W+17)'(k);
    d = 0;
    for (int j = 0; j <= w; j++) begin
      d = int'(v % (1 << C));
      if (d >= (1 << (C - 1))) d = d - (1 << C);
      v = (v - (SCALAR_W+17)'(d)) >>> C;
    end
    neg = (d < 0);
    b = (d == 0) ? -1 : ((d < 0 ? -d : d) - 1);
  endfunction

  always @(negedge clk) begin
    for (int e = 0; e < NE; e++) e_ready[e] <= ($urandom % 4 != 0);
    bf_ready <= ($urandom % 5 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < NE; e++) if (e_valid[e] && e_ready[e]) begin
      int b, p;
      b = int'(e_bkt[e]); p = int'(e_pt[e]);
      if (e >= 3) wrong_engine++;
      checks++;
      if (p >= NPTS || exp_b[p] != b || exp_n[p] !== e_neg[e]) begin
        failures++; $display("FAIL point %0d bucket %0d", p, b);
      end else got[p]++;
      if (e_first[e] !== !in_bkt[e]) begin failures++; $display("FAIL first flag"); end
      in_bkt[e] = !e_last[e];
      if (owner[b] < 0) owner[b] = e;
      else if (owner[b] != e) begin failures++; $display("FAIL bucket %0d on two engines", b); end
      run_cnt[b]++;
      streamed++;
    end
    if (bf_valid && bf_ready) begin
      bf_count++;
      if (int'(bf_stage) < bf_stage_now) begin failures++; $display("FAIL stage order"); end
      bf_stage_now = int'(bf_stage);
    end
    if (ntt_done) done_seen++;
  end

  task automatic send(gop_e op, logic [31:0] arg, logic [SCALAR_W-1:0] data);
    cmd.op = op; cmd.arg = arg; cmd.data = data; cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic run_window(int w);
    int expect_cnt;
    expect_cnt = 0;
    for (int i = 0; i < NPTS; i++) begin
      ref_digit(sc[i], w, exp_b[i], exp_n[i]);
      got[i] = 0;
      if (exp_b[i] >= 0) expect_cnt++;
    end
    for (int b = 0; b < (1 << BK_AW); b++) begin owner[b] = -1; run_cnt[b] = 0; end
    if (w != 0) send(G_MSM_WIN, 32'(w), '0);
    send(G_MSM_RUN, '0, '0);
    while (!msm_win_done) @(negedge clk);
    for (int i = 0; i < NPTS; i++) begin
      checks++;
      if (got[i] != (exp_b[i] >= 0 ? 1 : 0)) begin failures++; $display("FAIL w=%0d pt %0d seen %0d", w, i, got[i]); end
    end
  endtask

  initial begin
    logic [127:0] rad;
    cmd_valid = 0; cmd = '0;
    streamed = 0; bf_count = 0; bf_stage_now = 0; done_seen = 0; wrong_engine = 0;
    for (int e = 0; e < NE; e++) in_bkt[e] = 0;
    for (int i = 0; i < NPTS; i++)
      for (int k = 0; k < SCALAR_W / 32; k++) sc[i][k*32 +: 32] = $urandom;
    sc[0] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // NTT 120 = 2*3*4*5, runs beside the MSM loading
    rad = '0;
    rad[32 +: 4] = 4'd2; rad[36 +: 4] = 4'd3; rad[40 +: 4] = 4'd4; rad[44 +: 4] = 4'd5;
    send(G_NTT, '0, SCALAR_W'({rad[127:32], 5'd4, 32'd120}));
    send(G_MSM_CFG, 32'({4'd3, 13'(NPTS), 4'(C)}), '0);
    for (int i = 0; i < NPTS; i++) send(G_SCALAR, 32'(i), sc[i]);
    run_window(0);
    run_window(1);
    run_window(20);
    while (done_seen == 0) @(negedge clk);
    checks++;
    if (bf_count != 120/2 + 120/3 + 120/4 + 120/5) begin failures++; $display("FAIL bf count %0d", bf_count); end
    checks++;
    if (done_seen != 1) begin failures++; $display("FAIL ntt_done %0d", done_seen); end
    checks++;
    if (wrong_engine != 0) begin failures++; $display("FAIL engines above n_eng used"); end
    $display("points streamed %0d, butterflies %0d", streamed, bf_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
