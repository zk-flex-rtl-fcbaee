// global_ctrl: global controller: host command decoder, NTT controller and the MSM
// linked-list machinery (scalar memory, head/link memory, bucket assigner).
//
// Host instructions (arriving over the PCIe interface) are decoded here and steer
// the sub-blocks: G_NTT starts a mixed-radix NTT schedule in ntt_ctrl; G_MSM_CFG sets
// the window size, tile size and number of MPADD engines and empties the bucket
// lists; G_SCALAR stores a scalar and links its point into the bucket of the current
// window; G_MSM_WIN rebuilds the lists for another window from the scalar memory;
// G_MSM_RUN lets the bucket assigner stream the window's buckets to the MPADD engines.
// The paper shows these units inside the global controller; the command set and its
// encoding (zkf_pkg::gop_e) are this design's. A command is taken when cmd_valid and
// cmd_ready are high; cmd_ready is low while the unit it needs is busy.
module global_ctrl
  import zkf_pkg::*;
#(
  parameter int unsigned N_ENG = 15,
  parameter int unsigned PT_AW = 12,
  parameter int unsigned C_MAX = 12,
  parameter int unsigned BK_AW = C_MAX - 1,
  parameter int unsigned EW    = $clog2(N_ENG + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  host_cmd_t        cmd,
  // NTT butterfly descriptors
  output logic             bf_valid,
  input  logic             bf_ready,
  output logic [4:0]       bf_stage,
  output logic [3:0]       bf_radix,
  output logic [NTT_AW-1:0] bf_rd_base,
  output logic [NTT_AW-1:0] bf_rd_stride,
  output logic [NTT_AW-1:0] bf_wr_base,
  output logic [NTT_AW-1:0] bf_wr_stride,
  output logic [NTT_AW-1:0] bf_tw,
  output logic             bf_last,
  output logic             ntt_done,
  // MPADD engine streams
  output logic             e_valid [N_ENG],
  input  logic             e_ready [N_ENG],
  output logic [BK_AW-1:0] e_bkt   [N_ENG],
  output logic [PT_AW-1:0] e_pt    [N_ENG],
  output logic             e_neg   [N_ENG],
  output logic             e_first [N_ENG],
  output logic             e_last  [N_ENG],
  output logic             msm_win_done
);
  logic ntt_busy, msm_busy, asg_busy;
  logic sc_ready;
  logic acc;
  assign acc = cmd_valid && cmd_ready;

  always_comb begin
    unique case (cmd.op)
      G_NTT:                          cmd_ready = !ntt_busy;
      G_MSM_CFG, G_MSM_WIN, G_MSM_RUN: cmd_ready = !msm_busy && !asg_busy;
      G_SCALAR:                       cmd_ready = sc_ready && !asg_busy;
      default:                        cmd_ready = 1'b1;
    endcase
  end

  // ---------------------------------------------------------------- NTT
  ntt_ctrl #(.AW(NTT_AW), .MAX_ST(NTT_ST)) u_ntt (
    .clk, .rst_n, .start(acc && cmd.op == G_NTT), .n(cmd.data[31:0]),
    .radices(cmd.data[37 +: 4*NTT_ST]), .n_stages(cmd.data[36:32]),
    .busy(ntt_busy), .done(ntt_done), .bf_valid, .bf_ready, .bf_stage, .bf_radix,
    .rd_base(bf_rd_base), .rd_stride(bf_rd_stride), .wr_base(bf_wr_base),
    .wr_stride(bf_wr_stride), .tw(bf_tw), .last_bf(bf_last));

  // ---------------------------------------------------------------- MSM
  logic [BK_AW:0]   nb;
  logic             ll_clr, ins_valid, ins_neg;
  logic [PT_AW-1:0] ins_pt;
  logic [BK_AW-1:0] ins_bkt;
  logic [EW-1:0]    n_eng_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                          n_eng_q <= EW'(N_ENG);
    else if (acc && cmd.op == G_MSM_CFG) n_eng_q <= EW'(cmd.arg[20:17]);

  msm_ctrl #(.PT_AW(PT_AW), .C_MAX(C_MAX), .BK_AW(BK_AW)) u_msm (
    .clk, .rst_n,
    .cfg_valid(acc && cmd.op == G_MSM_CFG), .cfg_c(cmd.arg[3:0]), .cfg_npts(cmd.arg[4 +: PT_AW+1]),
    .sc_valid(cmd_valid && cmd.op == G_SCALAR && !asg_busy), .sc_ready,
    .sc_pt(cmd.arg[PT_AW-1:0]), .sc_scalar(cmd.data),
    .win_start(acc && cmd.op == G_MSM_WIN), .win_idx(cmd.arg[7:0]),
    .busy(msm_busy), .nb, .ll_clr, .ins_valid, .ins_pt, .ins_bkt, .ins_neg);

  logic             hr_en, hr_hit, lr_en, lr_has_next, lr_neg;
  logic [BK_AW-1:0] hr_bkt;
  logic [PT_AW-1:0] hr_pt, lr_pt, lr_next;

  ll_mem #(.PT_AW(PT_AW), .BK_AW(BK_AW)) u_ll (
    .clk, .rst_n, .clr(ll_clr), .ins_valid, .ins_pt, .ins_bkt, .ins_neg,
    .hr_en, .hr_bkt, .hr_hit, .hr_pt, .lr_en, .lr_pt, .lr_has_next, .lr_next, .lr_neg);

  bucket_assigner #(.N_ENG(N_ENG), .PT_AW(PT_AW), .BK_AW(BK_AW)) u_asg (
    .clk, .rst_n, .start(acc && cmd.op == G_MSM_RUN), .nb, .n_eng(n_eng_q),
    .busy(asg_busy), .done(msm_win_done),
    .hr_en, .hr_bkt, .hr_hit, .hr_pt, .lr_en, .lr_pt, .lr_has_next, .lr_next, .lr_neg,
    .e_valid, .e_ready, .e_bkt, .e_pt, .e_neg, .e_first, .e_last);
endmodule
