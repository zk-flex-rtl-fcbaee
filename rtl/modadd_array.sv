// modadd_array: the TCore's 24 128-bit modular adder slices, ganged by mode.
//
// Each slice adds (or subtracts) one 128-bit limb with a carry chained from the
// slice below. The precision mode cuts the chain into lanes: 12 lanes of 2 slices
// (256-bit), 8 lanes of 3 slices (384-bit) or 4 lanes of 6 slices (768-bit), all
// lanes working at once on the packed operands a and b. Per lane, a first pass forms
// s = a + b (or a - b) and a second pass t = s - Q (or s + Q); the lane result is
// t when the sum overflowed 2^n or s >= Q (addition), or when a < b (subtraction),
// otherwise s. Inputs must be below Q. The 24 x 128-bit organisation is the paper's;
// the two-pass carry-select structure is this design's choice.
// Timing: result registered, valid one cycle after in_valid.
module modadd_array
  import zkf_pkg::*;
#(
  parameter int unsigned SLICES = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  prec_mode_e              mode,
  input  logic [MAXW-1:0]         q,
  input  logic                    in_valid,
  input  logic [SLICES/2-1:0]     sub,       // per lane: 1 = a - b, 0 = a + b
  input  logic [SLICES*128-1:0]   a,
  input  logic [SLICES*128-1:0]   b,
  output logic                    out_valid,
  output logic [SLICES*128-1:0]   y
);
  logic [SLICES*128-1:0] yc;

  always_comb begin
    int unsigned spl, lane, pos;
    logic [128:0] s1, s2;
    logic c1, c2, op;
    logic [127:0] s_lo [SLICES];
    logic [127:0] t_lo [SLICES];
    logic         lane_c1 [SLICES];
    logic         lane_c2 [SLICES];
    unique case (mode)
      MODE_256: spl = 2;
      MODE_384: spl = 3;
      default:  spl = 6;
    endcase
    c1 = 1'b0; c2 = 1'b0;
    for (int i = 0; i < SLICES; i++) begin
      lane = i / spl;
      pos  = i % spl;
      op   = sub[lane];
      if (pos == 0) begin c1 = op; c2 = ~op; end
      // pass 1: a +/- b
      s1 = {1'b0, a[i*128 +: 128]} + {1'b0, (op ? ~b[i*128 +: 128] : b[i*128 +: 128])} + 129'(c1);
      c1 = s1[128];
      s_lo[i] = s1[127:0];
      // pass 2: s -/+ Q
      s2 = {1'b0, s1[127:0]} + {1'b0, (op ? q[pos*128 +: 128] : ~q[pos*128 +: 128])} + 129'(c2);
      c2 = s2[128];
      t_lo[i] = s2[127:0];
      lane_c1[i] = c1;
      lane_c2[i] = c2;
    end
    // select per lane using the carries of the lane's top slice
    for (int i = 0; i < SLICES; i++) begin
      int unsigned top;
      logic use_t;
      lane = i / spl;
      top  = lane * spl + spl - 1;
      op   = sub[lane];
      if (op) use_t = ~lane_c1[top];                 // borrow: a < b, add Q back
      else    use_t = lane_c1[top] | lane_c2[top];   // overflow or s >= Q
      yc[i*128 +: 128] = use_t ? t_lo[i] : s_lo[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) if (in_valid) y <= yc;
endmodule
