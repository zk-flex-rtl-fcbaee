// mont_mul: pipelined Toom-Cook Montgomery multipliers of one TCore.
//
// Three tc_slot integer multipliers (45 PE-threads) are chained as in the paper's
// Toom-Cook Montgomery multiplier. With d the division-free constant of the mode
// (1 for 256-bit, 36 otherwise), n the mode's width and R = 2^n:
//   T  = d*A*B                      slot 0
//   m  = (d*(T mod R)*Q') mod R     slot 1, Q' = -Q^-1 mod R
//   U  = d*m*Q                      slot 2
//   Z  = (d^2*T + U) / R            exact: d^2*T + U = 0 mod R
//   Y  = Z mod Q                    by conditional subtraction of Q*2^k, k = 12..0
// so Y = d^3 * A * B * R^-1 mod Q. In MODE_256 (d = 1) this is the plain Montgomery
// product; for d = 36 software folds the constant d^3 into its Montgomery domain.
// The three multiplies, the d^2 scaling, the mod-R steps and the n-bit shift follow
// the paper's figure (which labels the shift "left shift n-bit"; dividing by R is
// a right shift, and that is what is built). The final reduction, which the paper
// does not show, is this design's own: Z < d^3 Q^2 / R + d Q stays below 2^13 Q for
// the paper's curves (Q <= 2^381 at n = 384, Q <= 2^753 at n = 768, Q <= 2^255 at
// n = 256), so 13 stages suffice. Inputs must satisfy A, B < Q < 2^n.
// Each mode runs 5 / 3 / 1 independent lanes (lane l uses a[l], b[l]).
// Timing: in_valid -> out_valid after LATENCY = 8 cycles, one issue per cycle.
module mont_mul
  import zkf_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  prec_mode_e      mode,
  input  logic [MAXW-1:0] q,       // modulus Q (Q_reg)
  input  logic [MAXW-1:0] qinv,    // Q' = -Q^-1 mod 2^n (Qinv_reg)
  input  logic            in_valid,
  input  logic [MAXW-1:0] a [MAX_LANES],
  input  logic [MAXW-1:0] b [MAX_LANES],
  output logic            out_valid,
  output logic [MAXW-1:0] y [MAX_LANES]
);
  localparam int unsigned LATENCY = 8;
  localparam int unsigned ZW = 784;    // Z < 2^13 * Q
  localparam int unsigned SW = 1560;   // d^2*T + U

  logic [MAXW-1:0] mask;               // R - 1
  always_comb begin
    unique case (mode)
      MODE_256: mask = MAXW'({256{1'b1}});
      MODE_384: mask = MAXW'({384{1'b1}});
      default:  mask = {MAXW{1'b1}};
    endcase
  end

  // slot 0: T = d*A*B
  logic            v0;
  logic [PW-1:0]   t0 [MAX_LANES];
  tc_slot u_slot0 (.clk, .rst_n, .mode, .in_valid, .a, .b, .out_valid(v0), .p(t0));

  // slot 1: d*(T mod R)*Q'
  logic [MAXW-1:0] s1a [MAX_LANES], s1b [MAX_LANES];
  logic            v1;
  logic [PW-1:0]   t1 [MAX_LANES];
  always_comb
    for (int l = 0; l < MAX_LANES; l++) begin
      s1a[l] = t0[l][MAXW-1:0] & mask;
      s1b[l] = qinv;
    end
  tc_slot u_slot1 (.clk, .rst_n, .mode, .in_valid(v0), .a(s1a), .b(s1b), .out_valid(v1), .p(t1));

  // slot 2: U = d*m*Q
  logic [MAXW-1:0] s2a [MAX_LANES], s2b [MAX_LANES];
  logic            v2;
  logic [PW-1:0]   u2 [MAX_LANES];
  always_comb
    for (int l = 0; l < MAX_LANES; l++) begin
      s2a[l] = t1[l][MAXW-1:0] & mask;
      s2b[l] = q;
    end
  tc_slot u_slot2 (.clk, .rst_n, .mode, .in_valid(v1), .a(s2a), .b(s2b), .out_valid(v2), .p(u2));

  // T delayed to line up with U (two slots of two cycles each)
  logic [PW-1:0] td [4][MAX_LANES];
  always_ff @(posedge clk) begin
    td[0] <= t0;
    for (int k = 1; k < 4; k++) td[k] <= td[k-1];
  end

  // Z = (d^2*T + U) >> n
  logic [SW-1:0] zsum [MAX_LANES];
  logic [ZW-1:0] zc   [MAX_LANES];
  always_comb
    for (int l = 0; l < MAX_LANES; l++) begin
      if (mode == MODE_256) zsum[l] = SW'(td[3][l]) + SW'(u2[l]);
      else                  // d^2 = 1296 = 1024 + 256 + 16
        zsum[l] = (SW'(td[3][l]) << 10) + (SW'(td[3][l]) << 8) + (SW'(td[3][l]) << 4)
                + SW'(u2[l]);
      unique case (mode)
        MODE_256: zc[l] = ZW'(zsum[l] >> 256);
        MODE_384: zc[l] = ZW'(zsum[l] >> 384);
        default:  zc[l] = ZW'(zsum[l] >> 768);
      endcase
    end

  logic          vz;
  logic [ZW-1:0] z [MAX_LANES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vz <= 1'b0;
    else        vz <= v2;
  end
  always_ff @(posedge clk) z <= zc;

  // final reduction: 13 conditional subtractions of Q*2^k
  logic [ZW-1:0] r [MAX_LANES];
  always_comb
    for (int l = 0; l < MAX_LANES; l++) begin
      r[l] = z[l];
      for (int k = 12; k >= 0; k--)
        if (r[l] >= (ZW'(q) << k)) r[l] = r[l] - (ZW'(q) << k);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vz;
  end
  always_ff @(posedge clk)
    for (int l = 0; l < MAX_LANES; l++) y[l] <= r[l][MAXW-1:0];
endmodule
