// tb_ll_mem: inserts random points into random buckets (small sizes: 256 points,
// 64 buckets), then walks every bucket's chain through the head and link read
// ports and checks that each bucket holds exactly the points inserted into it, with
// their signs, most recent first. Then clears and checks that all buckets read empty.
module tb_ll_mem;
  localparam int PT_AW = 8, BK_AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, ins_valid, ins_neg, hr_en, hr_hit, lr_en, lr_has_next, lr_neg;
  logic [PT_AW-1:0] ins_pt, hr_pt, lr_pt, lr_next;
  logic [BK_AW-1:0] ins_bkt, hr_bkt;
  int checks = 0, failures = 0;

  ll_mem #(.PT_AW(PT_AW), .BK_AW(BK_AW)) dut (.*);

  int   chain [64][$];
  logic sign  [256];

  task automatic walk_all();
    for (int b = 0; b < 64; b++) begin
      int n;
      @(negedge clk); hr_en = 1; hr_bkt = BK_AW'(b);
      @(negedge clk); hr_en = 0;
      checks++;
      if (hr_hit !== (chain[b].size() != 0)) begin failures++; $display("FAIL head b=%0d", b); end
      n = 0;
      if (hr_hit) begin
        logic [PT_AW-1:0] p;
        logic more;
        p = hr_pt; more = 1;
        while (more) begin
          checks++;
          if (n >= chain[b].size() || int'(p) != chain[b][n]) begin
            failures++; $display("FAIL chain b=%0d n=%0d", b, n); break;
          end
          lr_en = 1; lr_pt = p;
          @(negedge clk); lr_en = 0;
          checks++;
          if (lr_neg !== sign[p]) begin failures++; $display("FAIL sign p=%0d", p); end
          more = lr_has_next; p = lr_next; n++;
        end
        checks++;
        if (n != chain[b].size()) begin failures++; $display("FAIL length b=%0d", b); end
      end
    end
  endtask

  initial begin
    int perm [256];
    clr = 0; ins_valid = 0; hr_en = 0; lr_en = 0; ins_pt = '0; ins_bkt = '0; ins_neg = 0;
    hr_bkt = '0; lr_pt = '0;
    for (int i = 0; i < 256; i++) perm[i] = i;
    perm.shuffle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      ins_valid = 1; ins_pt = PT_AW'(perm[i]); ins_bkt = BK_AW'($urandom % 64);
      if (i < 20) ins_bkt = 6'd5;   // one long chain
      ins_neg = $urandom % 2;
      chain[ins_bkt].push_front(perm[i]);
      sign[perm[i]] = ins_neg;
    end
    @(negedge clk) ins_valid = 0;
    walk_all();
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int b = 0; b < 64; b++) chain[b].delete();
    walk_all();
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
