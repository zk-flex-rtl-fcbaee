// interp_pe: division-free Toom-Cook interpolation (one group of I-PEs).
//
// Turns the point products w(v) = A(v)B(v) back into the coefficients of
// C(x) = A(x)B(x), scaled by the constant d so that d*V^-1 has no fractions:
// the result is d*c_i. Following the paper, d = 1 for Toom-2 and d = 36 for Toom-3.
// With the points {0, 1, -1, 2, inf} the scaled inverse reduces to shifts and adds:
//   6c2   = 3(w1 + w-1) - 6w0 - 6winf
//   6r    = 6w2 - 6w0 - 4(6c2) - 96winf          (r = 2c1 + 8c3)
//   s     = w1 - w-1                               (= 2c1 + 2c3)
//   36c3  = 6r - 6s,   36c1 = 18s - 36c3,   36c2 = 6(6c2),   36c0 = 36w0,   36c4 = 36winf
// Toom-2 (toom3 = 0) uses w0, w1 = (a0+a1)(b0+b1) and winf: c0 = w0, c1 = w1-w0-winf,
// c2 = winf; the other outputs are zero. Every constant multiply is written as
// shifts and adds. Purely combinational; inputs are signed, outputs OW = IW+8 bits.
module interp_pe #(
  parameter int unsigned IW = 268,
  parameter int unsigned OW = IW + 8
) (
  input  logic                 toom3,
  input  logic signed [IW-1:0] w0,
  input  logic signed [IW-1:0] w1,
  input  logic signed [IW-1:0] wm1,
  input  logic signed [IW-1:0] w2,
  input  logic signed [IW-1:0] winf,
  output logic signed [OW-1:0] c [5]
);
  logic signed [OW-1:0] x0, x1, xm1, x2, xi;
  logic signed [OW-1:0] c2x6, r6, s, c3x36;

  assign x0  = OW'(w0);
  assign x1  = OW'(w1);
  assign xm1 = OW'(wm1);
  assign x2  = OW'(w2);
  assign xi  = OW'(winf);

  always_comb begin
    // 6c2 = 3(w1 + w-1) - 6w0 - 6winf
    c2x6  = ((x1 + xm1) <<< 1) + (x1 + xm1)
          - ((x0 <<< 2) + (x0 <<< 1)) - ((xi <<< 2) + (xi <<< 1));
    // 6r = 6w2 - 6w0 - 4*(6c2) - 96winf
    r6    = ((x2 <<< 2) + (x2 <<< 1)) - ((x0 <<< 2) + (x0 <<< 1))
          - (c2x6 <<< 2) - ((xi <<< 6) + (xi <<< 5));
    s     = x1 - xm1;
    c3x36 = r6 - ((s <<< 2) + (s <<< 1));
    if (toom3) begin
      c[0] = (x0 <<< 5) + (x0 <<< 2);
      c[1] = ((s <<< 4) + (s <<< 1)) - c3x36;
      c[2] = (c2x6 <<< 2) + (c2x6 <<< 1);
      c[3] = c3x36;
      c[4] = (xi <<< 5) + (xi <<< 2);
    end else begin
      c[0] = x0;
      c[1] = x1 - x0 - xi;
      c[2] = xi;
      c[3] = '0;
      c[4] = '0;
    end
  end
endmodule
