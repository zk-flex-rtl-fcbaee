// ruche_router: one router of the 8x8 ruche network-on-chip.
//
// A ruche network is a 2-D mesh with extra long links ("ruche" links) that skip
// RUCHE_F nodes in each direction, so far destinations are reached in fewer hops.
// Each router has nine ports: local, the four mesh neighbours (N = y-1, S = y+1,
// E = x+1, W = x-1) and the four ruche neighbours (RN, RS, RE, RW). Packets are single
// 768-bit flits (the paper's link width) and are routed dimension-ordered, X first:
// a ruche link is taken while the remaining distance in that dimension is at least
// RUCHE_F, a mesh link otherwise. A destination with the ext bit set is an off-chip
// port on the south edge below column x (the HBM side of the grid). The paper gives
// the topology, size and link width; the ruche factor, routing, buffering and
// arbitration are this design's choices.
// The router's own coordinates come in on the x_pos / y_pos ports (tied to constants
// at the instance) and are kept in a register, so that all 64 routers are one module
// with identical logic.
// Each input has a two-entry FIFO (ready = not full); each output a register loaded
// by a round-robin arbiter over the inputs whose head flit wants it. Handshake:
// a flit moves when valid and ready are both high. Latency: 2 cycles per hop.
module ruche_router
  import zkf_pkg::*;
#(
  parameter int unsigned RUCHE_F = RUCHE,
  parameter int unsigned ROWS    = GRID     // rows of the grid: ext packets leave below row ROWS-1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic [2:0] x_pos,
  input  logic [2:0] y_pos,
  input  logic  in_valid  [N_PORTS],
  output logic  in_ready  [N_PORTS],
  input  flit_t in_flit   [N_PORTS],
  output logic  out_valid [N_PORTS],
  input  logic  out_ready [N_PORTS],
  output flit_t out_flit  [N_PORTS]
);
  logic [5:0] pos_q;
  always_ff @(posedge clk) pos_q <= {y_pos, x_pos};

  // ---------------------------------------------------------------- route compute
  function automatic port_e route(flit_t f);
    int unsigned dx, dy;
    logic ext;
    int unsigned X, Y;
    X   = 32'(pos_q[2:0]);
    Y   = 32'(pos_q[5:3]);
    dx  = 32'(f.dst[2:0]);
    dy  = f.dst[6] ? ROWS - 1 : 32'(f.dst[5:3]);
    ext = f.dst[6];
    if (dx > X)      return (dx - X >= RUCHE_F) ? P_RE : P_E;
    else if (dx < X) return (X - dx >= RUCHE_F) ? P_RW : P_W;
    else if (dy > Y) return (dy - Y >= RUCHE_F) ? P_RS : P_S;
    else if (dy < Y) return (Y - dy >= RUCHE_F) ? P_RN : P_N;
    else             return ext ? P_S : P_LOCAL;
  endfunction

  // ---------------------------------------------------------------- input FIFOs
  flit_t      fbuf [N_PORTS][2];
  logic [1:0] fcnt [N_PORTS];
  logic       frd  [N_PORTS];
  logic       fptr [N_PORTS];   // read pointer
  port_e      want [N_PORTS];
  flit_t      headf [N_PORTS];

  for (genvar i = 0; i < N_PORTS; i++) begin : g_in
    assign in_ready[i] = (fcnt[i] != 2'd2);
    assign headf[i]    = fbuf[i][fptr[i]];
    assign want[i]     = route(headf[i]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fcnt[i] <= '0;
        fptr[i] <= 1'b0;
      end else begin
        logic wr;
        wr = in_valid[i] && in_ready[i];
        if (wr) fbuf[i][fptr[i] ^ fcnt[i][0]] <= in_flit[i];
        if (frd[i]) fptr[i] <= ~fptr[i];
        fcnt[i] <= fcnt[i] + 2'(wr) - 2'(frd[i]);
      end
    end
  end

  // ---------------------------------------------------------------- switch allocation
  logic [3:0] rr   [N_PORTS];       // round-robin pointer per output
  logic       load [N_PORTS];
  logic [3:0] gsel [N_PORTS];

  always_comb begin
    int unsigned i;
    i = 0;
    for (int n = 0; n < N_PORTS; n++) frd[n] = 1'b0;
    for (int o = 0; o < N_PORTS; o++) begin
      load[o] = 1'b0;
      gsel[o] = '0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < N_PORTS; k++) begin
          i = (32'(rr[o]) + k) % N_PORTS;
          if (!load[o] && fcnt[i] != 0 && want[i] == port_e'(o)) begin
            load[o] = 1'b1;
            gsel[o] = 4'(i);
            frd[i]  = 1'b1;
          end
        end
      end
    end
  end

  for (genvar o = 0; o < N_PORTS; o++) begin : g_out
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[o] <= 1'b0;
        rr[o]        <= '0;
      end else begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          rr[o]        <= (gsel[o] == 4'(N_PORTS - 1)) ? 4'd0 : gsel[o] + 4'd1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
    always_ff @(posedge clk) if (load[o]) out_flit[o] <= headf[gsel[o]];
  end

endmodule
