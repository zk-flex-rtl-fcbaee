// hier_adder_tree: Toom-Cook recomposition C = sum_i c_i * 2^(i*SH).
//
// Adds five sign-extended, shifted coefficients in a two-level tree
// ((c0 + c1') + (c2' + c3')) + c4', which is how the TCore's hierarchical adder
// trees join the interpolated coefficients of one multiplication. SH is the slice
// width of the level being recomposed (128 for the inner Toom-2/Toom-3 level, 384 for
// the outer Toom-2 of the 768-bit hybrid). The paper names the adder trees; the tree
// shape is this design's choice. Purely combinational; the result is taken modulo
// 2^OW, so OW must hold the true (signed) value.
module hier_adder_tree #(
  parameter int unsigned CW = 276,
  parameter int unsigned SH = 128,
  parameter int unsigned OW = 784
) (
  input  logic signed [CW-1:0] c [5],
  output logic signed [OW-1:0] y
);
  logic signed [OW-1:0] t [5];
  logic signed [OW-1:0] l1a, l1b, l2;

  always_comb begin
    for (int i = 0; i < 5; i++) t[i] = OW'(c[i]) <<< (i * SH);
    l1a = t[0] + t[1];
    l1b = t[2] + t[3];
    l2  = l1a + l1b;
    y   = l2 + t[4];
  end
endmodule
