// zkflex_top: the ZK-Flex accelerator: an 8x8 ruche network of compute and memory
// nodes plus the global controller.
//
// The 36 interior nodes of the grid (x, y in 1..6) are TCores; the 28 nodes on the
// border are memory nodes of 1.21 MB each, so operands always flow between the
// border and the middle. Every node sits on a ruche_router with 768-bit links.
// Node id = {ext, y, x}. Outside connections:
//   - host_*: packets from the host (the PCIe side) enter at the west port of the
//     router at (0, 0); the host configures TCores and fills memory nodes this way.
//   - ext_*[x]: the south ports of the bottom row, where the HBM controller attaches;
//     a packet whose destination has the ext bit set leaves the grid below column x.
//   - cmd_*: host instructions for the global controller; bf_* (NTT butterfly
//     descriptors) and e_* (bucket streams for the MPADD engines) leave the chip
//     top, since the mapping of butterflies and point additions onto TCore groups
//     is done by the instruction generator, not by hardware described here.
// GX x GY (default 8 x 8, at most 8 x 8) sets the grid size; smaller grids keep the
// same layout (TCores inside, memory nodes on the border) and serve for simulation.
// Grid size, node counts and kinds, link width and memory size follow the paper;
// host and HBM attachment points are this design's choice. The PCIe controller,
// the HBM controller and PHY are external.
module zkflex_top
  import zkf_pkg::*;
#(
  parameter int unsigned N_ENG = 15,
  parameter int unsigned PT_AW = 12,
  parameter int unsigned C_MAX = 12,
  parameter int unsigned BK_AW = C_MAX - 1,
  parameter int unsigned GX    = GRID,    // grid columns (at most GRID)
  parameter int unsigned GY    = GRID,    // grid rows (at most GRID)
  parameter int unsigned NTC   = (GX - 2) * (GY - 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host packets into the network
  input  logic             host_valid,
  output logic             host_ready,
  input  flit_t            host_flit,
  // HBM-side ports below the bottom row
  output logic             ext_out_valid [GRID],
  input  logic             ext_out_ready [GRID],
  output flit_t            ext_out_flit  [GRID],
  input  logic             ext_in_valid  [GRID],
  output logic             ext_in_ready  [GRID],
  input  flit_t            ext_in_flit   [GRID],
  // global controller
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  host_cmd_t        cmd,
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
  output logic             e_valid [N_ENG],
  input  logic             e_ready [N_ENG],
  output logic [BK_AW-1:0] e_bkt   [N_ENG],
  output logic [PT_AW-1:0] e_pt    [N_ENG],
  output logic             e_neg   [N_ENG],
  output logic             e_first [N_ENG],
  output logic             e_last  [N_ENG],
  output logic             msm_win_done,
  output logic [NTC-1:0]   tcore_busy
);
  localparam int unsigned NN = GX * GY;

  logic  ri_v [NN][N_PORTS], ri_r [NN][N_PORTS], ro_v [NN][N_PORTS], ro_r [NN][N_PORTS];
  flit_t ri_f [NN][N_PORTS], ro_f [NN][N_PORTS];

  // neighbour in direction p, -1 if outside the grid
  function automatic int nbr(int x, int y, int p);
    int nx, ny;
    nx = x; ny = y;
    case (p)
      int'(P_N):  ny = y - 1;
      int'(P_S):  ny = y + 1;
      int'(P_E):  nx = x + 1;
      int'(P_W):  nx = x - 1;
      int'(P_RN): ny = y - RUCHE;
      int'(P_RS): ny = y + RUCHE;
      int'(P_RE): nx = x + RUCHE;
      int'(P_RW): nx = x - RUCHE;
      default: ;
    endcase
    if (nx < 0 || ny < 0 || nx >= int'(GX) || ny >= int'(GY)) return -1;
    return ny * int'(GX) + nx;
  endfunction

  function automatic int opp(int p);
    case (p)
      int'(P_N): return int'(P_S);   int'(P_S): return int'(P_N);   int'(P_E): return int'(P_W);   int'(P_W): return int'(P_E);
      int'(P_RN): return int'(P_RS); int'(P_RS): return int'(P_RN); int'(P_RE): return int'(P_RW); int'(P_RW): return int'(P_RE);
      default: return int'(P_LOCAL);
    endcase
  endfunction

  for (genvar y = 0; y < GY; y++) begin : g_y
    for (genvar x = 0; x < GX; x++) begin : g_x
      localparam int ID = y * GX + x;

      ruche_router #(.ROWS(GY)) u_rt (
        .clk, .rst_n, .x_pos(3'(x)), .y_pos(3'(y)), .in_valid(ri_v[ID]), .in_ready(ri_r[ID]), .in_flit(ri_f[ID]),
        .out_valid(ro_v[ID]), .out_ready(ro_r[ID]), .out_flit(ro_f[ID]));

      // links to neighbours
      for (genvar p = 1; p < N_PORTS; p++) begin : g_p
        localparam int NB = nbr(x, y, p);
        if (NB >= 0) begin : g_link
          assign ri_v[ID][p] = ro_v[NB][opp(p)];
          assign ri_f[ID][p] = ro_f[NB][opp(p)];
          assign ro_r[ID][p] = ri_r[NB][opp(p)];
        end else if (p == P_W && x == 0 && y == 0) begin : g_host
          assign ri_v[ID][p] = host_valid;
          assign ri_f[ID][p] = host_flit;
          assign host_ready  = ri_r[ID][p];
          assign ro_r[ID][p] = 1'b1;
        end else if (p == P_S && y == GY - 1) begin : g_ext
          assign ri_v[ID][p]      = ext_in_valid[x];
          assign ri_f[ID][p]      = ext_in_flit[x];
          assign ext_in_ready[x]  = ri_r[ID][p];
          assign ext_out_valid[x] = ro_v[ID][p];
          assign ext_out_flit[x]  = ro_f[ID][p];
          assign ro_r[ID][p]      = ext_out_ready[x];
        end else begin : g_edge
          assign ri_v[ID][p] = 1'b0;
          assign ri_f[ID][p] = '0;
          assign ro_r[ID][p] = 1'b1;
        end
      end

      // the node on the local port
      if (x >= 1 && x <= GX - 2 && y >= 1 && y <= GY - 2) begin : g_tc
        tcore u_tc (
          .clk, .rst_n, .node_id(node_id(x, y)),
          .in_valid(ro_v[ID][P_LOCAL]), .in_ready(ro_r[ID][P_LOCAL]), .in_flit(ro_f[ID][P_LOCAL]),
          .out_valid(ri_v[ID][P_LOCAL]), .out_ready(ri_r[ID][P_LOCAL]), .out_flit(ri_f[ID][P_LOCAL]),
          .busy(tcore_busy[(y - 1) * (GX - 2) + (x - 1)]));
      end else begin : g_mem
        mem_node u_mem (
          .clk, .rst_n,
          .in_valid(ro_v[ID][P_LOCAL]), .in_ready(ro_r[ID][P_LOCAL]), .in_flit(ro_f[ID][P_LOCAL]),
          .out_valid(ri_v[ID][P_LOCAL]), .out_ready(ri_r[ID][P_LOCAL]), .out_flit(ri_f[ID][P_LOCAL]));
      end
    end
  end

  // HBM-side ports of columns beyond a narrower grid stay idle
  for (genvar x = GX; x < GRID; x++) begin : g_noext
    assign ext_out_valid[x] = 1'b0;
    assign ext_out_flit[x]  = '0;
    assign ext_in_ready[x]  = 1'b0;
  end

  global_ctrl #(.N_ENG(N_ENG), .PT_AW(PT_AW), .C_MAX(C_MAX), .BK_AW(BK_AW)) u_gc (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .bf_valid, .bf_ready, .bf_stage, .bf_radix, .bf_rd_base, .bf_rd_stride, .bf_wr_base,
    .bf_wr_stride, .bf_tw, .bf_last, .ntt_done,
    .e_valid, .e_ready, .e_bkt, .e_pt, .e_neg, .e_first, .e_last, .msm_win_done);
endmodule
