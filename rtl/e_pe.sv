// e_pe: evaluation processing element (E-PE) of a TCore PE-thread.
//
// Evaluates one operand's slice polynomial A(x) = a0 + a1 x + a2 x^2 at one
// Toom-Cook point, using only additions and shifts (the paper's E-PEs hold 128-bit
// adders and shifters). Toom-3 uses the points {0, 1, -1, 2, inf}; Toom-2 uses
// {0, 1, inf} with a2 = 0, where inf selects the top slice a1. The paper gives the
// evaluation step but not the point set; {0, 1, -1, 2, inf} is this design's choice
// and is the set for which the division-free constant d = 36 of the paper works out
// (see interp_pe). Two E-PEs (one for A, one for B) feed each M-PE.
// Purely combinational.
module e_pe
  import zkf_pkg::*;
#(
  parameter int unsigned W = MW
) (
  input  logic                toom3,  // 1: Toom-3 point set, 0: Toom-2
  input  eval_pt_e            pt,
  input  logic [W-1:0]        a0,     // slices, unsigned, a0/a1 < 2^128, a2 < 2^130
  input  logic [W-1:0]        a1,
  input  logic [W-1:0]        a2,
  output logic signed [W-1:0] v
);
  logic signed [W-1:0] s0, s1, s2;
  assign s0 = $signed(a0);
  assign s1 = $signed(a1);
  assign s2 = toom3 ? $signed(a2) : '0;

  always_comb begin
    unique case (pt)
      EV_0:    v = s0;
      EV_1:    v = s0 + s1 + s2;
      EV_M1:   v = s0 - s1 + s2;
      EV_2:    v = s0 + (s1 <<< 1) + (s2 <<< 2);
      EV_INF:  v = toom3 ? s2 : s1;
      default: v = '0;
    endcase
  end
endmodule
