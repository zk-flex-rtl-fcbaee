// tb_tc_slot: checks that one tc_slot returns d*a*b for every lane in all three
// precision modes (d = 1 at 256 bits, 36 at 384 and 768 bits), with random operands
// and all-ones corner operands, a new operand set every cycle, and a latency of
// exactly 2 cycles. Expected values are computed with wide SystemVerilog arithmetic.
module tb_tc_slot;
  import zkf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_mode_e mode;
  logic in_valid, out_valid;
  logic [MAXW-1:0] a [MAX_LANES], b [MAX_LANES];
  logic [PW-1:0]   p [MAX_LANES];
  int checks = 0, failures = 0;

  tc_slot dut (.*);

  function automatic logic [MAXW-1:0] rnd(int unsigned bits, bit ones);
    logic [MAXW-1:0] v;
    for (int i = 0; i < MAXW/32; i++) v[i*32 +: 32] = $urandom;
    if (ones) v = '1;
    return (bits == MAXW) ? v : (v & ((MAXW'(1) << bits) - 1));
  endfunction

  // expected-value queue
  logic [PW-1:0] exp_q [$];
  int            nl_q  [$];
  int            lat_q [$];
  int            cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_mode(prec_mode_e m, int n_ops);
    int unsigned bits, lanes, d;
    bits  = mode_bits(m);
    lanes = mode_lanes(m);
    d     = (m == MODE_256) ? 1 : 36;
    mode  = m;
    for (int t = 0; t < n_ops; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < MAX_LANES; l++) begin
        a[l] = rnd(bits, t == 0);
        b[l] = rnd(bits, t == 0);
        if (l < lanes) exp_q.push_back(PW'(d) * PW'(a[l]) * PW'(b[l]));
      end
      nl_q.push_back(lanes);
      lat_q.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int n, c0;
    n  = nl_q.pop_front();
    c0 = lat_q.pop_front();
    checks++;
    if (cyc - c0 != 2) begin failures++; $display("latency %0d", cyc - c0); end
    for (int l = 0; l < n; l++) begin
      logic [PW-1:0] e;
      e = exp_q.pop_front();
      checks++;
      if (p[l] !== e) begin
        failures++;
        $display("FAIL mode=%0d lane=%0d", mode, l);
      end
    end
  end

  initial begin
    in_valid = 0; mode = MODE_256;
    for (int l = 0; l < MAX_LANES; l++) begin a[l] = '0; b[l] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mode(MODE_256, 20);
    run_mode(MODE_384, 20);
    run_mode(MODE_768, 20);
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
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
