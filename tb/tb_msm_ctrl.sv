// tb_msm_ctrl: streams random full-width (768-bit) scalars (small tile of 64 points) into the MSM
// controller with window size c = 5 and checks every linked-list insertion against
// a signed-digit recoding computed here by a different method (peel c bits, subtract
// the digit, shift). Zero digits must produce no insertion. Then moves to windows
// 1, 7 and 51 with win_start and checks the rescan, and repeats with c = 12.
module tb_msm_ctrl;
  import zkf_pkg::*;
  localparam int PT_AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid, sc_valid, sc_ready, win_start, busy, ll_clr, ins_valid, ins_neg;
  logic [3:0] cfg_c;
  logic [PT_AW:0] cfg_npts;
  logic [PT_AW-1:0] sc_pt, ins_pt;
  logic [SCALAR_W-1:0] sc_scalar;
  logic [7:0] win_idx;
  logic [11:0] nb;
  logic [10:0] ins_bkt;
  int checks = 0, failures = 0;

  msm_ctrl #(.PT_AW(PT_AW)) dut (.*);

  logic [SCALAR_W-1:0] sc [64];
  int exp_mag [64], got_mag [64];
  logic exp_neg [64], got_neg [64];
  int ins_count;

  // reference: digit w of k in signed base 2^c
  function automatic void ref_digit(logic [SCALAR_W-1:0] k, int c, int w, output int mag, output logic neg);
    logic signed [SCALAR_W+16:0] v;
    int d;
    v = (SCALAR_W+17)'(k);
    d = 0;
    for (int j = 0; j <= w; j++) begin
      d = int'(v % (1 << c));
      if (d >= (1 << (c - 1))) d = d - (1 << c);
      v = (v - (SCALAR_W+17)'(d)) >>> c;
    end
    neg = (d < 0);
    mag = neg ? -d : d;
  endfunction

  always @(posedge clk) if (rst_n && ins_valid) begin
    got_mag[ins_pt] = int'(ins_bkt) + 1;
    got_neg[ins_pt] = ins_neg;
    ins_count++;
  end

  task automatic compare(int c, int w);
    for (int i = 0; i < 64; i++) begin
      ref_digit(sc[i], c, w, exp_mag[i], exp_neg[i]);
      checks++;
      if (got_mag[i] != exp_mag[i] || (exp_mag[i] != 0 && got_neg[i] !== exp_neg[i])) begin
        failures++; $display("FAIL c=%0d w=%0d pt=%0d got %0d/%0d exp %0d/%0d", c, w, i,
                             got_mag[i], got_neg[i], exp_mag[i], exp_neg[i]);
      end
      got_mag[i] = 0;
    end
  endtask

  task automatic run(int c);
    int wins [3];
    wins = '{1, 7, 51};
    @(negedge clk);
    cfg_valid = 1; cfg_c = 4'(c); cfg_npts = 7'd64;
    @(negedge clk) cfg_valid = 0;
    checks++;
    if (int'(nb) != (1 << (c - 1))) begin failures++; $display("FAIL nb"); end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      sc_valid = 1; sc_pt = PT_AW'(i);
      for (int j = 0; j < SCALAR_W / 32; j++) sc_scalar[j*32 +: 32] = $urandom;
      if (i == 0) sc_scalar = '1;
      if (i == 1) sc_scalar = '0;
      sc[i] = sc_scalar;
    end
    @(negedge clk) sc_valid = 0;
    @(negedge clk);
    compare(c, 0);
    foreach (wins[k]) begin
      if (wins[k] * c >= SCALAR_W) continue;
      @(negedge clk);
      win_start = 1; win_idx = 8'(wins[k]);
      @(negedge clk) win_start = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      compare(c, wins[k]);
    end
  endtask

  initial begin
    cfg_valid = 0; sc_valid = 0; win_start = 0; cfg_c = 4'd5; cfg_npts = '0; sc_pt = '0;
    sc_scalar = '0; win_idx = '0; ins_count = 0;
    for (int i = 0; i < 64; i++) got_mag[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5);
    run(12);
    run(4);
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
