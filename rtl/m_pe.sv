// m_pe: integer processing element (M-PE) of a TCore PE-thread.
//
// One signed multiplier that multiplies the two evaluation-point values a Toom-Cook
// evaluation stage hands it (one of A, one of B) and registers the product. A TCore
// holds 45 of them, one per PE group, and the precision mode only changes which
// evaluation points reach them. The paper draws these as 128-bit multipliers; the
// operands here are MW = 134 bits signed because evaluation points such as A(2) and
// A(-1) of 128-bit slices (129-bit slices inside the 768-bit hybrid) outgrow 128
// bits and may be negative. Timing: product valid one cycle after `en`.
module m_pe
  import zkf_pkg::*;
#(
  parameter int unsigned W = MW
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic signed [W-1:0]   a,
  input  logic signed [W-1:0]   b,
  output logic signed [2*W-1:0] p
);
  always_ff @(posedge clk) begin
    if (en) p <= a * b;
  end
endmodule
