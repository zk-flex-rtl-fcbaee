// tb_bucket_assigner: fills an ll_mem with random bucket lists (some buckets empty,
// one long), runs the bucket assigner with 4 engines whose ready lines stall at
// random, and checks that every point comes out exactly once, on the right bucket,
// with its sign and correct first/last marks; that a bucket's points all come from
// one engine and in chain order; that more than one engine was streaming at the
// same time; and that `done` follows. A second run uses a single engine.
module tb_bucket_assigner;
  localparam int PT_AW = 8, BK_AW = 6, NE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, ins_valid, ins_neg, hr_en, hr_hit, lr_en, lr_has_next, lr_neg;
  logic [PT_AW-1:0] ins_pt, hr_pt, lr_pt, lr_next;
  logic [BK_AW-1:0] ins_bkt, hr_bkt;
  logic start, busy, done;
  logic [BK_AW:0] nb;
  logic [2:0] n_eng;
  logic e_valid [NE], e_ready [NE], e_neg [NE], e_first [NE], e_last [NE];
  logic [BK_AW-1:0] e_bkt [NE];
  logic [PT_AW-1:0] e_pt [NE];
  int checks = 0, failures = 0;

  ll_mem #(.PT_AW(PT_AW), .BK_AW(BK_AW)) u_ll (.*);
  bucket_assigner #(.N_ENG(NE), .PT_AW(PT_AW), .BK_AW(BK_AW)) dut (.*);

  int   chain [64][$];
  logic sign  [256];
  int   pos   [64];
  int   owner [64];
  int   max_par;

  always @(negedge clk) for (int e = 0; e < NE; e++) e_ready[e] <= ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    int par;
    par = 0;
    for (int e = 0; e < NE; e++) begin
      if (e_valid[e]) par++;
      if (e_valid[e] && e_ready[e]) begin
        int b;
        b = int'(e_bkt[e]);
        checks++;
        if (pos[b] >= chain[b].size() || chain[b][pos[b]] != int'(e_pt[e])) begin
          failures++; $display("FAIL order b=%0d", b);
        end else begin
          if (e_neg[e] !== sign[e_pt[e]]) begin failures++; $display("FAIL sign"); end
          if (e_first[e] !== (pos[b] == 0)) begin failures++; $display("FAIL first"); end
          if (e_last[e] !== (pos[b] == chain[b].size() - 1)) begin failures++; $display("FAIL last"); end
          if (owner[b] < 0) owner[b] = e;
          else if (owner[b] != e) begin failures++; $display("FAIL two engines b=%0d", b); end
        end
        pos[b]++;
      end
    end
    if (par > max_par) max_par = par;
  end

  task automatic run(int engines);
    int total, seen;
    for (int b = 0; b < 64; b++) begin chain[b].delete(); pos[b] = 0; owner[b] = -1; end
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int i = 0; i < 256; i++) begin
      int b;
      b = (i < 24) ? 7 : $urandom % 64;
      if (b % 9 == 4) continue;                    // leave some buckets empty
      @(negedge clk);
      ins_valid = 1; ins_pt = PT_AW'(i); ins_bkt = BK_AW'(b); ins_neg = $urandom % 2;
      chain[b].push_front(i); sign[i] = ins_neg;
    end
    @(negedge clk) ins_valid = 0;
    n_eng = 3'(engines); nb = 7'd64;
    start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    total = 0; seen = 0;
    for (int b = 0; b < 64; b++) begin total += chain[b].size(); seen += pos[b]; end
    checks++;
    if (seen != total) begin failures++; $display("FAIL count %0d of %0d", seen, total); end
  endtask

  initial begin
    clr = 0; ins_valid = 0; ins_pt = '0; ins_bkt = '0; ins_neg = 0; start = 0; nb = '0; n_eng = 3'd4;
    max_par = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4);
    checks++;
    if (max_par < 2) begin failures++; $display("FAIL engines never overlapped"); end
    max_par = 0;
    run(1);
    checks++;
    if (max_par != 1) begin failures++; $display("FAIL single engine mode used %0d", max_par); end
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
