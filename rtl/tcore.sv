// tcore: Toom-Cook core (TCore), one compute node of the ZK-Flex grid.
//
// Holds the TCore controller, the Q_reg / Qinv_reg modulus registers, 45 PE-threads
// arranged as three tc_slot multipliers inside mont_mul (5, 3 or 1 Montgomery
// multipliers depending on the precision mode), the 24-slice modular adder array
// and the 2.13 KB shared memory, and talks to its router through one flit port each
// way. Those parts and their counts are the paper's; the packet protocol and the
// controller behaviour below are this design's own, since the paper only names
// the TCore controller.
//
// Packets (one 768-bit flit each, see zkf_pkg):
//   OP_CFG_MODE / OP_CFG_Q / OP_CFG_QINV  set mode, Q, Q' (accepted once idle)
//   OP_MUL   Montgomery product of a packed pair: 256-bit mode A = data[255:0],
//            B = data[511:256]; 384-bit mode A = data[383:0], B = data[767:384];
//            768-bit mode B = data and A from the preceding OP_MULA.
//   OP_ADD / OP_SUB  modular sum / difference of a pair packed the same way
//   OP_SMRD  read shared-memory slot `tag` and send it out
// A result goes to node rdst as a packet with opcode rop and tag rtag; when rdst is
// this node it is stored instead in shared-memory slot rtag (6 words per slot,
// 22 slots). MUL packets are gathered into a batch that fills the mode's lanes and
// is issued when full or when the next packet is not a MUL, so all 45 M-PEs work
// when multiplications arrive back to back. A 16-entry output queue with credit
// counting back-pressures the input instead of dropping results.
// The node's own id comes in on the node_id port (a constant at the instance) and is
// kept in a register, so all 36 TCores are one module with identical logic.
// Timing: MUL result leaves 8 cycles after issue (+ queueing), ADD/SUB after 1.
module tcore
  import zkf_pkg::*;
#(
  parameter int unsigned QDEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic [NODE_W-1:0] node_id,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit,
  output logic  busy
);
  localparam int unsigned MUL_LAT = 8;

  logic [NODE_W-1:0] id_q;
  always_ff @(posedge clk) id_q <= node_id;
  localparam int unsigned SM_SLOTS = 22;

  // ---------------------------------------------------------------- config registers
  prec_mode_e      mode_q;
  logic [MAXW-1:0] q_reg, qinv_reg, a768_q;

  // ---------------------------------------------------------------- output queue
  typedef enum logic [1:0] {K_SEND, K_SMWR, K_SMRD} kind_e;
  typedef struct packed {
    kind_e kind;
    flit_t f;
  } qent_t;

  localparam int unsigned QAW = $clog2(QDEPTH);
  qent_t            qmem [QDEPTH];
  logic [QAW-1:0]   qhead;
  logic [QAW:0]     qcount;

  // ---------------------------------------------------------------- batch + pipes
  logic [MAXW-1:0] ba [MAX_LANES], bb [MAX_LANES];
  flit_t           bmeta [MAX_LANES];
  logic [2:0]      bcnt;
  logic [2:0]      nlanes;
  assign nlanes = 3'(mode_lanes(mode_q));

  logic            mm_in_valid, mm_out_valid;
  logic [MAXW-1:0] mm_y [MAX_LANES];
  logic [2:0]      pipe_n [MUL_LAT];
  flit_t           pipe_meta [MUL_LAT][MAX_LANES];
  logic [5:0]      inflight;

  logic            ma_in_valid, ma_out_valid;
  logic [24*128-1:0] ma_a, ma_b, ma_y;
  flit_t           ma_meta;

  mont_mul u_mm (.clk, .rst_n, .mode(mode_q), .q(q_reg), .qinv(qinv_reg),
                 .in_valid(mm_in_valid), .a(ba), .b(bb), .out_valid(mm_out_valid), .y(mm_y));

  modadd_array u_ma (.clk, .rst_n, .mode(mode_q), .q(q_reg), .in_valid(ma_in_valid),
                     .sub({11'b0, in_flit.op == OP_SUB}), .a(ma_a), .b(ma_b),
                     .out_valid(ma_out_valid), .y(ma_y));

  // ---------------------------------------------------------------- input decode
  logic [MAXW-1:0] opa, opb;
  always_comb begin
    unique case (mode_q)
      MODE_256: begin opa = MAXW'(in_flit.data[255:0]); opb = MAXW'(in_flit.data[511:256]); end
      MODE_384: begin opa = MAXW'(in_flit.data[383:0]); opb = MAXW'(in_flit.data[767:384]); end
      default:  begin opa = a768_q;                      opb = in_flit.data; end
    endcase
  end
  assign ma_a = (24*128)'(opa);
  assign ma_b = (24*128)'(opb);

  logic idle, is_mul, issue;
  logic ma_in_valid_q;
  logic [QAW+3:0] pending;
  assign pending = (QAW+4)'(qcount) + (QAW+4)'(inflight) + (QAW+4)'(ma_in_valid_q) + (QAW+4)'(bcnt);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ma_in_valid_q <= 1'b0; else ma_in_valid_q <= ma_in_valid;

  assign idle   = (bcnt == 0) && (inflight == 0) && (qcount == 0) && !ma_in_valid_q;
  assign busy   = !idle;
  assign is_mul = in_valid && (in_flit.op == OP_MUL);
  // issue the batch when it is full, or when no further multiplication arrives now
  assign issue  = (bcnt != 0) && ((bcnt == nlanes) || !is_mul);

  always_comb begin
    in_ready = 1'b0;
    unique case (in_flit.op)
      OP_CFG_MODE, OP_CFG_Q, OP_CFG_QINV: in_ready = idle;
      OP_MULA:                            in_ready = 1'b1;
      OP_MUL, OP_ADD, OP_SUB, OP_SMRD:    in_ready = (32'(pending) + 1 <= QDEPTH);
      default:                            in_ready = 1'b1;   // unknown packets are dropped
    endcase
  end

  logic acc;
  assign acc          = in_valid && in_ready;
  assign mm_in_valid  = issue;
  assign ma_in_valid  = acc && (in_flit.op == OP_ADD || in_flit.op == OP_SUB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_256;
      q_reg <= '0; qinv_reg <= '0; a768_q <= '0;
      bcnt <= '0;
    end else begin
      logic [2:0] nb;
      nb = issue ? 3'd0 : bcnt;
      if (acc) begin
        unique case (in_flit.op)
          OP_CFG_MODE: mode_q   <= prec_mode_e'(in_flit.data[1:0]);
          OP_CFG_Q:    q_reg    <= in_flit.data;
          OP_CFG_QINV: qinv_reg <= in_flit.data;
          OP_MULA:     a768_q   <= in_flit.data;
          OP_MUL: begin
            ba[nb]    <= opa;
            bb[nb]    <= opb;
            bmeta[nb] <= in_flit;
            nb = nb + 1;
          end
          default: ;
        endcase
      end
      bcnt <= nb;
    end
  end

  // ---------------------------------------------------------------- result pipes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MUL_LAT; k++) pipe_n[k] <= '0;
      inflight <= '0;
    end else begin
      pipe_n[0] <= issue ? bcnt : 3'd0;
      for (int k = 1; k < MUL_LAT; k++) pipe_n[k] <= pipe_n[k-1];
      inflight <= inflight + (issue ? 6'(bcnt) : 6'd0) - (mm_out_valid ? 6'(pipe_n[MUL_LAT-1]) : 6'd0);
    end
  end
  always_ff @(posedge clk) begin
    pipe_meta[0] <= bmeta;
    for (int k = 1; k < MUL_LAT; k++) pipe_meta[k] <= pipe_meta[k-1];
    if (ma_in_valid) ma_meta <= in_flit;
  end

  function automatic qent_t mk_result(flit_t req, logic [MAXW-1:0] val);
    qent_t e;
    e.f      = '0;
    e.f.dst  = req.rdst;
    e.f.op   = req.rop;
    e.f.tag  = req.rtag;
    e.f.data = val;
    e.kind   = (req.rdst == id_q) ? K_SMWR : K_SEND;
    return e;
  endfunction

  // ---------------------------------------------------------------- queue push / pop
  logic pop;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qhead  <= '0;
      qcount <= '0;
    end else begin
      logic [QAW:0] n;
      logic [QAW-1:0] tail;
      n    = qcount;
      tail = qhead + QAW'(qcount);
      if (mm_out_valid)
        for (int l = 0; l < MAX_LANES; l++)
          if (l < int'(pipe_n[MUL_LAT-1])) begin
            qmem[tail] <= mk_result(pipe_meta[MUL_LAT-1][l], mm_y[l]);
            tail = tail + 1; n = n + 1;
          end
      if (ma_out_valid) begin
        qmem[tail] <= mk_result(ma_meta, ma_y[MAXW-1:0] & ((mode_q == MODE_768) ? {MAXW{1'b1}} :
                                  (mode_q == MODE_384) ? MAXW'({384{1'b1}}) : MAXW'({256{1'b1}})));
        tail = tail + 1; n = n + 1;
      end
      if (acc && in_flit.op == OP_SMRD) begin
        qent_t e;
        e.kind = K_SMRD; e.f = in_flit;
        qmem[tail] <= e;
        tail = tail + 1; n = n + 1;
      end
      if (pop) begin
        qhead <= qhead + 1;
        n = n - 1;
      end
      qcount <= n;
    end
  end

  // ---------------------------------------------------------------- output engine
  qent_t          head;
  assign head = qmem[qhead];
  logic [2:0]     wcnt;          // shared-memory word counter
  logic           rd_done;
  logic [MAXW-1:0] rbuf;
  logic           sm_en, sm_we;
  logic [7:0]     sm_addr;
  logic [127:0]   sm_rdata;

  shared_mem u_sm (.clk, .en(sm_en), .we(sm_we), .addr(sm_addr), .wdata(head.f.data[wcnt*128 +: 128]),
                   .rdata(sm_rdata));

  always_comb begin
    sm_en = 1'b0; sm_we = 1'b0; pop = 1'b0;
    sm_addr = 8'(head.f.tag[4:0] * 6 + 5'(wcnt));
    out_valid = 1'b0;
    out_flit  = head.f;
    if (qcount != 0) begin
      unique case (head.kind)
        K_SEND: begin
          out_valid = 1'b1;
          pop = out_ready;
        end
        K_SMWR: begin
          sm_en = 1'b1; sm_we = 1'b1;
          sm_addr = 8'(head.f.tag[4:0] * 6 + 5'(wcnt));
          pop = (wcnt == 3'd5);
        end
        default: begin  // K_SMRD
          sm_en   = !rd_done && (wcnt < 3'd6);
          out_flit      = '0;
          out_flit.dst  = head.f.rdst;
          out_flit.op   = head.f.rop;
          out_flit.tag  = head.f.rtag;
          out_flit.data = rbuf;
          out_valid = rd_done;
          pop = rd_done && out_ready;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0; rd_done <= 1'b0;
    end else if (qcount != 0) begin
      unique case (head.kind)
        K_SMWR: wcnt <= (wcnt == 3'd5) ? 3'd0 : wcnt + 1;
        K_SMRD: begin
          if (pop) begin wcnt <= '0; rd_done <= 1'b0; end
          else if (!rd_done) begin
            if (wcnt < 3'd6) wcnt <= wcnt + 1;
            if (wcnt != 0) rbuf[(32'(wcnt)-1)*128 +: 128] <= sm_rdata;
            if (wcnt == 3'd6) rd_done <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
