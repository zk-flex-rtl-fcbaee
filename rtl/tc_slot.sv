// tc_slot: fifteen PE-threads configured as multi-precision integer multipliers.
//
// A PE-thread is one M-PE with its two E-PEs and its share of interpolation. Fifteen
// of them (a third of a TCore) form one slot that, depending on the precision mode,
// computes
//   MODE_256: five 256-bit products, each by Toom-2 on two 128-bit slices (3 M-PEs);
//   MODE_384: three 384-bit products, each by Toom-3 on three 128-bit slices (5 M-PEs);
//   MODE_768: one 768-bit product by the hybrid scheme: an outer Toom-2 on 384-bit
//             halves whose three half-products (A0B0, (A0+A1)(B0+B1), A1B1) are each
//             an inner Toom-3 on 128-bit slices (15 M-PEs).
// The mapping follows the paper (Toom-2 for 256, Toom-3 for 384, hybrid with two
// recursion levels for 768, 45 M-PEs per TCore giving 5/3/1 Montgomery multipliers).
// Interpolation is division-free, so the output is d*A*B with d = 1 in MODE_256 and
// d = 36 in MODE_384 and MODE_768 (outer Toom-2 has d = 1, inner Toom-3 d = 36).
// Operand lane l uses a[l], b[l]; lanes beyond the mode's count are ignored.
// Timing: in_valid -> out_valid after 2 cycles (M-PE register, output register),
// fully pipelined, one set of products per cycle. `mode` must not change while
// products are in flight.
module tc_slot
  import zkf_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  prec_mode_e       mode,
  input  logic             in_valid,
  input  logic [MAXW-1:0]  a [MAX_LANES],
  input  logic [MAXW-1:0]  b [MAX_LANES],
  output logic             out_valid,
  output logic [PW-1:0]    p [MAX_LANES]    // d*a*b, unsigned
);
  localparam int unsigned G  = GROUPS_PER_SLOT;  // 15
  localparam int unsigned CW = PRODW + 8;        // inner coefficient width
  localparam int unsigned IPW = 784;             // inner recomposed product width (signed)
  localparam int unsigned OCW = IPW + 8;         // outer coefficient width

  // ---------------------------------------------------------------- evaluation
  // outer Toom-2 evaluation of the 768-bit hybrid: A0, A0+A1 (385 bits), A1
  logic [384:0] oa [3], ob [3];
  always_comb begin
    oa[0] = {1'b0, a[0][383:0]};
    oa[1] = {1'b0, a[0][383:0]} + {1'b0, a[0][767:384]};
    oa[2] = {1'b0, a[0][767:384]};
    ob[0] = {1'b0, b[0][383:0]};
    ob[1] = {1'b0, b[0][383:0]} + {1'b0, b[0][767:384]};
    ob[2] = {1'b0, b[0][767:384]};
  end

  logic [MW-1:0]        ea0 [G], ea1 [G], ea2 [G], eb0 [G], eb1 [G], eb2 [G];
  eval_pt_e             ept [G];
  logic                 et3 [G];
  logic signed [MW-1:0] va [G], vb [G];
  logic signed [PRODW-1:0] prod [G];

  localparam eval_pt_e PT2 [3] = '{EV_0, EV_1, EV_INF};
  localparam eval_pt_e PT3 [5] = '{EV_0, EV_1, EV_M1, EV_2, EV_INF};

  for (genvar g = 0; g < G; g++) begin : g_thread
    always_comb begin
      ea0[g] = '0; ea1[g] = '0; ea2[g] = '0;
      eb0[g] = '0; eb1[g] = '0; eb2[g] = '0;
      ept[g] = EV_0; et3[g] = 1'b0;
      unique case (mode)
        MODE_256: begin  // lane g/3, point g%3
          ea0[g] = MW'(a[g/3][127:0]);   ea1[g] = MW'(a[g/3][255:128]);
          eb0[g] = MW'(b[g/3][127:0]);   eb1[g] = MW'(b[g/3][255:128]);
          ept[g] = PT2[g%3];             et3[g] = 1'b0;
        end
        MODE_384: begin  // lane g/5, point g%5
          ea0[g] = MW'(a[g/5][127:0]);   ea1[g] = MW'(a[g/5][255:128]);
          ea2[g] = MW'(a[g/5][383:256]);
          eb0[g] = MW'(b[g/5][127:0]);   eb1[g] = MW'(b[g/5][255:128]);
          eb2[g] = MW'(b[g/5][383:256]);
          ept[g] = PT3[g%5];             et3[g] = 1'b1;
        end
        default: begin   // MODE_768: outer half-product g/5, inner point g%5
          ea0[g] = MW'(oa[g/5][127:0]);  ea1[g] = MW'(oa[g/5][255:128]);
          ea2[g] = MW'(oa[g/5][384:256]);
          eb0[g] = MW'(ob[g/5][127:0]);  eb1[g] = MW'(ob[g/5][255:128]);
          eb2[g] = MW'(ob[g/5][384:256]);
          ept[g] = PT3[g%5];             et3[g] = 1'b1;
        end
      endcase
    end

    e_pe u_epe_a (.toom3(et3[g]), .pt(ept[g]), .a0(ea0[g]), .a1(ea1[g]), .a2(ea2[g]), .v(va[g]));
    e_pe u_epe_b (.toom3(et3[g]), .pt(ept[g]), .a0(eb0[g]), .a1(eb1[g]), .a2(eb2[g]), .v(vb[g]));
    m_pe u_mpe   (.clk(clk), .en(in_valid), .a(va[g]), .b(vb[g]), .p(prod[g]));
  end

  logic v1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  // ---------------------------------------------------------------- interpolation
  // five inner interpolators: Toom-2 on products 3l..3l+2 (MODE_256) or
  // Toom-3 on products 5l..5l+4 (lanes of MODE_384, inner levels of MODE_768)
  logic signed [PRODW-1:0] iw [5][5];
  logic signed [CW-1:0]    ic [5][5];
  logic signed [IPW-1:0]   ip [5];
  logic                    i3;
  assign i3 = (mode != MODE_256);

  for (genvar l = 0; l < 5; l++) begin : g_interp
    always_comb begin
      for (int k = 0; k < 5; k++) iw[l][k] = '0;
      if (mode == MODE_256) begin
        iw[l][0] = prod[3*l];      // w0
        iw[l][1] = prod[3*l + 1];  // w1
        iw[l][4] = prod[3*l + 2];  // winf
      end else if (l < 3) begin
        for (int k = 0; k < 5; k++) iw[l][k] = prod[5*l + k];
      end
    end
    interp_pe #(.IW(PRODW), .OW(CW)) u_ipe (
      .toom3(i3), .w0(iw[l][0]), .w1(iw[l][1]), .wm1(iw[l][2]), .w2(iw[l][3]),
      .winf(iw[l][4]), .c(ic[l]));
    hier_adder_tree #(.CW(CW), .SH(SLICE_W), .OW(IPW)) u_tree (.c(ic[l]), .y(ip[l]));
  end

  // outer Toom-2 of the hybrid: inputs are 36*A0B0, 36*(A0+A1)(B0+B1), 36*A1B1
  logic signed [OCW-1:0] oc [5];
  logic signed [PW-1:0]  op768;
  interp_pe #(.IW(IPW), .OW(OCW)) u_ipe_outer (
    .toom3(1'b0), .w0(ip[0]), .w1(ip[1]), .wm1('0), .w2('0), .winf(ip[2]), .c(oc));
  hier_adder_tree #(.CW(OCW), .SH(384), .OW(PW)) u_tree_outer (.c(oc), .y(op768));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      for (int l = 0; l < MAX_LANES; l++) p[l] <= PW'(ip[l]);
      if (mode == MODE_768) p[0] <= op768;
    end
  end
endmodule
