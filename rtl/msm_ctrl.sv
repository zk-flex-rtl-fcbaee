// msm_ctrl: MSM controller front end: scalar memory and Pippenger digit slicing.
//
// Pippenger's MSM splits every scalar into c-bit windows and adds each point into the
// bucket named by its window digit. With signed-digit recoding a digit above
// 2^(c-1) - 1 becomes digit - 2^c with a carry into the next window, so a window needs
// only 2^(c-1) buckets; a negative digit adds the negated point. This block stores
// each incoming scalar in the scalar memory and, in the same cycle, recodes the digit
// of the current window and inserts the point into the linked-list memory (bucket
// |digit| - 1, sign flag), so the lists are built while the scalars stream in. Zero
// digits are not inserted. For a later window, `win_start` clears the lists and
// rescans the scalar memory, one point per cycle. Windows run one at a time, shared
// by all MPADD engines, as the paper's tiling does.
// Window sizes from C_MIN to C_MAX bits are supported; the paper leaves the choice of
// c to its software optimizer and gives no range, so C_MAX = 12 is this design's.
// Timing: insertion in the cycle a scalar is accepted; rescan takes npts cycles.
module msm_ctrl
  import zkf_pkg::*;
#(
  parameter int unsigned PT_AW = 12,
  parameter int unsigned C_MIN = 4,
  parameter int unsigned C_MAX = 12,
  parameter int unsigned BK_AW = C_MAX - 1,
  parameter int unsigned MAX_WIN = (SCALAR_W + C_MIN - 1) / C_MIN + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_valid,
  input  logic [3:0]           cfg_c,       // window size in bits
  input  logic [PT_AW:0]       cfg_npts,    // points in the tile
  // scalar write port (host)
  input  logic                 sc_valid,
  output logic                 sc_ready,
  input  logic [PT_AW-1:0]     sc_pt,
  input  logic [SCALAR_W-1:0]  sc_scalar,
  // window control
  input  logic                 win_start,   // move to window win_idx and rebuild
  input  logic [7:0]           win_idx,
  output logic                 busy,
  output logic [BK_AW:0]       nb,          // buckets per window, 2^(c-1)
  // ll_mem insertion
  output logic                 ll_clr,
  output logic                 ins_valid,
  output logic [PT_AW-1:0]     ins_pt,
  output logic [BK_AW-1:0]     ins_bkt,
  output logic                 ins_neg
);
  logic [SCALAR_W-1:0] smem [1 << PT_AW];
  logic [3:0]          c_q;
  logic [7:0]          w_q;
  logic [PT_AW:0]      npts_q;
  logic                scanning;
  logic [PT_AW:0]      scan_i;
  logic [SCALAR_W-1:0] scan_k;

  assign nb = (BK_AW+1)'(1) << (c_q - 1);

  // signed digit of window w of scalar k
  function automatic void sdigit(input logic [SCALAR_W-1:0] k, input logic [3:0] c,
                                 input logic [7:0] w, output logic [C_MAX:0] mag,
                                 output logic neg);
    logic carry;
    logic [C_MAX:0] raw;
    logic [SCALAR_W+C_MAX-1:0] kx;
    carry = 1'b0;
    mag = '0; neg = 1'b0;
    kx = (SCALAR_W+C_MAX)'(k);
    for (int j = 0; j < MAX_WIN; j++) begin
      if (j <= int'(w)) begin
        raw = (C_MAX+1)'((kx >> (j * int'(c))) & ((SCALAR_W+C_MAX)'(1) << c) - 1) + (C_MAX+1)'(carry);
        if (raw >= ((C_MAX+1)'(1) << (c - 1))) begin
          carry = 1'b1;
          mag = ((C_MAX+1)'(1) << c) - raw;
          neg = 1'b1;
        end else begin
          carry = 1'b0;
          mag = raw;
          neg = 1'b0;
        end
      end
    end
  endfunction

  logic [SCALAR_W-1:0] dk;
  logic [PT_AW-1:0]    dpt;
  logic                dv;
  logic [C_MAX:0]      mag;
  logic                dneg;

  assign sc_ready = !scanning;   // scalar writes and win_start never coincide
  always_comb begin
    if (scanning) begin dk = scan_k;    dpt = PT_AW'(scan_i - 1); dv = (scan_i != 0); end
    else          begin dk = sc_scalar; dpt = sc_pt;              dv = sc_valid && sc_ready; end
    sdigit(dk, c_q, w_q, mag, dneg);
  end

  assign ins_valid = dv && (mag != 0);
  assign ins_pt    = dpt;
  assign ins_bkt   = BK_AW'(mag - 1);
  assign ins_neg   = dneg;
  assign ll_clr    = cfg_valid || win_start;
  assign busy      = scanning;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= 4'(C_MAX); w_q <= '0; npts_q <= '0; scanning <= 1'b0; scan_i <= '0;
    end else begin
      if (cfg_valid) begin
        c_q <= cfg_c; npts_q <= cfg_npts; w_q <= '0;
      end
      if (win_start) begin
        w_q      <= win_idx;
        scanning <= (npts_q != 0);
        scan_i   <= '0;
      end else if (scanning) begin
        // scan_i = i + 1 while scan_k holds scalar i (one cycle memory read)
        if (scan_i == npts_q) scanning <= 1'b0;
        scan_i <= scan_i + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (sc_valid && sc_ready) smem[sc_pt] <= sc_scalar;
    scan_k <= smem[PT_AW'(win_start ? '0 : scan_i)];
  end

  always_ff @(posedge clk)
    if (rst_n && cfg_valid) assert (cfg_c >= 4'(C_MIN) && cfg_c <= 4'(C_MAX)) else $error("msm_ctrl: window size");
endmodule
