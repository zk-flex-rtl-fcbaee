// bucket_assigner: hands whole buckets of one window to MPADD engines.
//
// Several MPADD engines share one window and one bucket memory. To keep their updates
// free of conflicts, each bucket is given to exactly one engine, which then walks the
// bucket's chain in ll_mem and streams the bucket's points to its engine. Buckets are
// dispensed in order, one per cycle, to the lowest-numbered idle engine among the
// n_eng active ones; empty buckets cost one head lookup. Two round-robin arbiters share
// the single head-memory and link-memory read ports among the engines. That division
// of work (bucket assigner, arbiter, head and link memory) is the paper's; the order of
// dispensing, the per-engine walk and the stream format are this design's choices.
//
// Per engine e the stream is (valid, ready, bkt, pt, neg, first, last): one point
// address of bucket bkt, its sign, and whether it opens or closes the bucket.
// Walk timing: head lookup 2 cycles, then 2 cycles per point (link read, emit).
// `done` rises once all nb buckets were dispensed and every engine is idle again.
module bucket_assigner #(
  parameter int unsigned N_ENG = 15,   // MPADD engines (256-bit mode, Fig. 6b)
  parameter int unsigned PT_AW = 12,
  parameter int unsigned BK_AW = 11,
  parameter int unsigned EW    = $clog2(N_ENG + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BK_AW:0]   nb,          // buckets in this window
  input  logic [EW-1:0]    n_eng,       // active engines, 1..N_ENG
  output logic             busy,
  output logic             done,
  // ll_mem read ports
  output logic             hr_en,
  output logic [BK_AW-1:0] hr_bkt,
  input  logic             hr_hit,
  input  logic [PT_AW-1:0] hr_pt,
  output logic             lr_en,
  output logic [PT_AW-1:0] lr_pt,
  input  logic             lr_has_next,
  input  logic [PT_AW-1:0] lr_next,
  input  logic             lr_neg,
  // engine streams
  output logic             e_valid [N_ENG],
  input  logic             e_ready [N_ENG],
  output logic [BK_AW-1:0] e_bkt   [N_ENG],
  output logic [PT_AW-1:0] e_pt    [N_ENG],
  output logic             e_neg   [N_ENG],
  output logic             e_first [N_ENG],
  output logic             e_last  [N_ENG]
);
  typedef enum logic [2:0] {S_IDLE, S_HREQ, S_HWAIT, S_LREQ, S_LWAIT, S_EMIT} est_e;
  est_e             st   [N_ENG];
  logic [BK_AW-1:0] bkt  [N_ENG];
  logic [PT_AW-1:0] cur  [N_ENG];
  logic             frst [N_ENG];
  logic             nxt_v[N_ENG];
  logic [PT_AW-1:0] nxt  [N_ENG];

  logic [BK_AW:0]   next_bkt;
  logic             running;

  // dispense: lowest idle active engine gets the next bucket
  logic             give;
  logic [EW-1:0]    give_e;
  always_comb begin
    give = 1'b0; give_e = '0;
    for (int e = N_ENG - 1; e >= 0; e--)
      if (running && next_bkt < nb && st[e] == S_IDLE && EW'(e) < n_eng) begin
        give = 1'b1; give_e = EW'(e);
      end
  end

  // arbiters
  logic [EW-1:0] hrr, lrr;
  logic          hgnt_v, lgnt_v;
  logic [EW-1:0] hgnt, lgnt;
  always_comb begin
    hgnt_v = 1'b0; hgnt = '0; lgnt_v = 1'b0; lgnt = '0;
    for (int k = 0; k < N_ENG; k++) begin
      int unsigned e;
      e = (32'(hrr) + k) % N_ENG;
      if (!hgnt_v && st[e] == S_HREQ) begin hgnt_v = 1'b1; hgnt = EW'(e); end
    end
    for (int k = 0; k < N_ENG; k++) begin
      int unsigned e;
      e = (32'(lrr) + k) % N_ENG;
      if (!lgnt_v && st[e] == S_LREQ) begin lgnt_v = 1'b1; lgnt = EW'(e); end
    end
  end
  assign hr_en  = hgnt_v;
  assign hr_bkt = bkt[hgnt];
  assign lr_en  = lgnt_v;
  assign lr_pt  = cur[lgnt];

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int e = 0; e < N_ENG; e++) if (st[e] != S_IDLE) all_idle = 1'b0;
  end
  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0; next_bkt <= '0; hrr <= '0; lrr <= '0;
      for (int e = 0; e < N_ENG; e++) st[e] <= S_IDLE;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running  <= 1'b1;
        next_bkt <= '0;
      end else if (running && next_bkt == nb && all_idle) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
      if (give) next_bkt <= next_bkt + 1;
      if (hgnt_v) hrr <= (32'(hgnt) == N_ENG - 1) ? '0 : hgnt + 1;
      if (lgnt_v) lrr <= (32'(lgnt) == N_ENG - 1) ? '0 : lgnt + 1;

      for (int e = 0; e < N_ENG; e++) begin
        unique case (st[e])
          S_IDLE:  if (give && give_e == EW'(e)) begin
                     st[e]  <= S_HREQ;
                     bkt[e] <= BK_AW'(next_bkt);
                   end
          S_HREQ:  if (hgnt_v && hgnt == EW'(e)) st[e] <= S_HWAIT;
          S_HWAIT: if (hr_hit) begin
                     cur[e]  <= hr_pt;
                     frst[e] <= 1'b1;
                     st[e]   <= S_LREQ;
                   end else st[e] <= S_IDLE;            // empty bucket
          S_LREQ:  if (lgnt_v && lgnt == EW'(e)) st[e] <= S_LWAIT;
          S_LWAIT: begin
                     nxt_v[e] <= lr_has_next;
                     nxt[e]   <= lr_next;
                     e_neg[e] <= lr_neg;
                     st[e]    <= S_EMIT;
                   end
          S_EMIT:  if (e_ready[e]) begin
                     frst[e] <= 1'b0;
                     if (nxt_v[e]) begin
                       cur[e] <= nxt[e];
                       st[e]  <= S_LREQ;
                     end else st[e] <= S_IDLE;
                   end
          default: st[e] <= S_IDLE;
        endcase
      end
    end
  end

  for (genvar e = 0; e < N_ENG; e++) begin : g_out
    assign e_valid[e] = (st[e] == S_EMIT);
    assign e_bkt[e]   = bkt[e];
    assign e_pt[e]    = cur[e];
    assign e_first[e] = frst[e];
    assign e_last[e]  = !nxt_v[e];
  end

  // one engine per bucket: two engines never stream the same bucket at once
  always_ff @(posedge clk)
    if (rst_n)
      for (int i = 0; i < N_ENG; i++)
        for (int j = i + 1; j < N_ENG; j++)
          if (st[i] != S_IDLE && st[j] != S_IDLE)
            assert (bkt[i] != bkt[j]) else $error("bucket_assigner: bucket %0d on two engines", bkt[i]);
endmodule
