// ll_mem: linked-list memory that chains the points of each Pippenger bucket.
//
// Two small memories replace per-engine bucket lists: the head memory holds, per
// bucket, the address of the most recently inserted point (or nothing), and the link
// memory holds, per point address, the address of the next point of the same bucket
// (or nothing) together with that point's sign from signed-digit recoding. Inserting
// point p into bucket b is one cycle: link[p] <= head[b]; head[b] <= p. Lists are
// built on the fly while scalar digits arrive. `clr` empties all buckets in one cycle
// (the head valid bits are flip-flops). The two memories and their contents are the
// paper's; insertion at the head (the paper's figure shows the chains, not the
// insertion order) and the flags are this design's choice.
// Read ports, one per memory, return data one cycle after the request, like an SRAM.
module ll_mem #(
  parameter int unsigned PT_AW = 12,   // point addresses per tile: 4096
  parameter int unsigned BK_AW = 11,   // buckets per window: 2048 (12-bit signed digits)
  parameter int unsigned NB    = 1 << BK_AW,
  parameter int unsigned NP    = 1 << PT_AW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  // insertion
  input  logic             ins_valid,
  input  logic [PT_AW-1:0] ins_pt,
  input  logic [BK_AW-1:0] ins_bkt,
  input  logic             ins_neg,
  // head memory read
  input  logic             hr_en,
  input  logic [BK_AW-1:0] hr_bkt,
  output logic             hr_hit,     // bucket non-empty
  output logic [PT_AW-1:0] hr_pt,
  // link memory read
  input  logic             lr_en,
  input  logic [PT_AW-1:0] lr_pt,
  output logic             lr_has_next,
  output logic [PT_AW-1:0] lr_next,
  output logic             lr_neg
);
  typedef struct packed {
    logic             has_next;
    logic [PT_AW-1:0] next;
    logic             neg;
  } link_t;

  logic [NB-1:0]    head_v;
  logic [PT_AW-1:0] head_mem [NB];
  link_t            link_mem [NP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         head_v <= '0;
    else if (clr)       head_v <= '0;
    else if (ins_valid) head_v[ins_bkt] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (ins_valid && !clr) begin
      head_mem[ins_bkt] <= ins_pt;
      link_mem[ins_pt]  <= '{has_next: head_v[ins_bkt], next: head_mem[ins_bkt], neg: ins_neg};
    end
    if (hr_en) begin
      hr_hit <= head_v[hr_bkt];
      hr_pt  <= head_mem[hr_bkt];
    end
    if (lr_en) begin
      lr_has_next <= link_mem[lr_pt].has_next;
      lr_next     <= link_mem[lr_pt].next;
      lr_neg      <= link_mem[lr_pt].neg;
    end
  end
endmodule
