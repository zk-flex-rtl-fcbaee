// tb_zkflex_top: end-to-end test of the whole chip on a 4 x 4 grid (4 TCores, 12
// memory nodes of 1.21 MiB, the global controller with its 15 MPADD engine streams);
// every other parameter is at its default. Everything is driven through the top-level
// ports only:
//   - the host port configures the TCores (two in 256-bit mode with the BN254 prime,
//     one in 384-bit mode with the BLS12-381 prime, one in 768-bit mode with a random
//     odd 753-bit modulus) and sends them multiplications and additions whose results
//     leave through the south (HBM-side) ports, with random back-pressure;
//   - operand pairs are written into memory nodes, then memory reads forward them to
//     TCores as multiplications whose products are written into other memory nodes,
//     and read back out later (memory -> TCore -> memory chain);
//   - products are parked in TCore shared memory and read back;
//   - values are written into memory nodes from the HBM-side input ports;
//   - the global controller runs a mixed-radix NTT schedule of size 1680 and two
//     windows of an MSM tile of 1000 points with c = 12 over its 15 engine streams.
// Every result is checked by tag (products: Y < Q and Y * 2^n = d^3 A B mod Q;
// other values exactly), every MSM point must be streamed once in the right bucket,
// and each mechanism is counted: a count of zero is a failure. Change GX / GY to
// run other grid sizes (the simulator's build time grows with the TCore count).
module tb_zkflex_top;
  import zkf_pkg::*;
  localparam int NE = 15, PT_AW = 12, BK_AW = 11;
  localparam int GX = 4, GY = 4;                    // simulated grid
  localparam int TX = GX - 2, NT = (GX - 2) * (GY - 2), NM = GX * GY - NT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             host_valid, host_ready;
  flit_t            host_flit;
  logic             ext_out_valid [GRID], ext_out_ready [GRID], ext_in_valid [GRID], ext_in_ready [GRID];
  flit_t            ext_out_flit [GRID], ext_in_flit [GRID];
  logic             cmd_valid, cmd_ready;
  host_cmd_t        cmd;
  logic             bf_valid, bf_ready, bf_last, ntt_done, msm_win_done;
  logic [4:0]       bf_stage;
  logic [3:0]       bf_radix;
  logic [30:0]      bf_rd_base, bf_rd_stride, bf_wr_base, bf_wr_stride, bf_tw;
  logic             e_valid [NE], e_ready [NE], e_neg [NE], e_first [NE], e_last [NE];
  logic [BK_AW-1:0] e_bkt [NE];
  logic [PT_AW-1:0] e_pt [NE];
  logic [NT-1:0]    tcore_busy;
  int checks = 0, failures = 0;

  zkflex_top #(.GX(GX), .GY(GY)) dut (.*);

  localparam logic [255:0] P_BN254 =
    256'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;
  localparam logic [383:0] P_BLS381 =
    384'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;
  typedef logic [2*MAXW+15:0] wide_t;

  // ---------------------------------------------------------------- mechanism counters
  int n_host, n_ext_in, n_ext_out, n_ext_stall, n_ruche, n_mesh, n_full_batch, n_tc_stall;
  int n_res_256, n_res_384, n_res_768, n_res_add, n_chain, n_smem, n_hbm_wr;
  int n_bf, n_ntt_done, n_msm_pts, n_win_done, n_empty_bkt;

  // ---------------------------------------------------------------- expected results by tag
  int              ekind [int];   // 0 product, 1 exact value
  logic [MAXW-1:0] ea [int], eb [int], eq [int];
  int              en [int], ed [int], ecls [int];   // ecls: 0 direct 256, 1 direct 384, 2 768, 3 add, 4 chain, 5 smem, 6 hbm
  int              ecol [int];

  // per-TCore configuration
  prec_mode_e tmode [NT];
  logic [MAXW-1:0] tq [NT];
  logic [MAXW-1:0] q768;

  function automatic logic [NODE_W-1:0] tc_id(int t);
    return node_id(t % TX + 1, t / TX + 1);
  endfunction
  function automatic logic [NODE_W-1:0] mem_id(int m);   // the border nodes
    int k;
    k = 0;
    for (int y = 0; y < GY; y++)
      for (int x = 0; x < GX; x++)
        if (x == 0 || y == 0 || x == GX - 1 || y == GY - 1) begin
          if (k == m) return node_id(x, y);
          k++;
        end
    return '0;
  endfunction
  function automatic logic [NODE_W-1:0] ext_id(int col);
    return NODE_W'(64 + col);
  endfunction

  function automatic logic [MAXW-1:0] neg_inv(logic [MAXW-1:0] qq, int unsigned nn);
    logic [MAXW-1:0] x, m;
    m = (nn == MAXW) ? '1 : ((MAXW'(1) << nn) - 1);
    x = 1;
    for (int i = 0; i < 11; i++) x = (x * (MAXW'(2) - qq * x)) & m;
    return (MAXW'(0) - x) & m;
  endfunction
  function automatic logic [MAXW-1:0] rnd_below(logic [MAXW-1:0] qq);
    logic [MAXW-1:0] v;
    for (int i = 0; i < MAXW/32; i++) v[i*32 +: 32] = $urandom;
    return MAXW'(wide_t'(v) % wide_t'(qq));
  endfunction
  function automatic logic [MAXW-1:0] pack(prec_mode_e m, logic [MAXW-1:0] a, logic [MAXW-1:0] b);
    if (m == MODE_256) return {256'b0, b[255:0], a[255:0]};
    return {b[383:0], a[383:0]};
  endfunction
  function automatic flit_t pkt(logic [NODE_W-1:0] dst, op_e op, int tag, logic [MAXW-1:0] data,
                                logic [NODE_W-1:0] rdst, op_e rop, int rtag);
    flit_t f;
    f = '0; f.dst = dst; f.op = op; f.tag = 16'(tag); f.data = data;
    f.rdst = rdst; f.rop = rop; f.rtag = 16'(rtag);
    return f;
  endfunction

  task automatic host_send(flit_t f);
    host_flit = f; host_valid = 1;
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
    n_host++;
  endtask

  task automatic expect_prod(int tag, int t, logic [MAXW-1:0] a, logic [MAXW-1:0] b, int cls);
    ekind[tag] = 0; ea[tag] = a; eb[tag] = b; eq[tag] = tq[t];
    en[tag] = int'(mode_bits(tmode[t])); ed[tag] = (tmode[t] == MODE_256) ? 1 : 36; ecls[tag] = cls;
  endtask

  bit hold0 = 0;  // hold column 0's external output shut during the burst

  // ---------------------------------------------------------------- monitors
  always @(negedge clk) begin
    for (int x = 0; x < GRID; x++) ext_out_ready[x] <= (x == 0 && hold0) ? 1'b0 : ($urandom % 4 != 0);
    for (int e = 0; e < NE; e++) e_ready[e] <= ($urandom % 4 != 0);
    bf_ready <= ($urandom % 5 != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < GX * GY; i++)
      for (int p = 1; p < N_PORTS; p++)
        if (dut.ro_v[i][p] && dut.ro_r[i][p]) begin
          if (p >= int'(P_RN)) n_ruche++; else n_mesh++;
        end
    for (int x = 0; x < GRID; x++) begin
      if (ext_out_valid[x] && !ext_out_ready[x]) n_ext_stall++;
      if (ext_out_valid[x] && ext_out_ready[x]) begin
        int t, cls;
        flit_t f;
        f = ext_out_flit[x];
        t = int'(f.tag);
        n_ext_out++;
        checks++;
        if (!ekind.exists(t)) begin failures++; $display("FAIL unexpected tag %0d at column %0d", t, x); end
        else begin
          if (f.op != OP_RESP || ecol[t] != x) begin failures++; $display("FAIL header tag %0d", t); end
          if (ekind[t] == 0) begin
            wide_t lhs, rhs;
            lhs = (wide_t'(f.data) << en[t]) % wide_t'(eq[t]);
            rhs = (((wide_t'(ea[t]) * wide_t'(eb[t])) % wide_t'(eq[t])) * wide_t'(ed[t] * ed[t] * ed[t])) % wide_t'(eq[t]);
            if (f.data >= eq[t] || lhs != rhs) begin failures++; $display("FAIL product tag %0d", t); end
          end else if (f.data !== ea[t]) begin
            failures++; $display("FAIL value tag %0d", t);
          end
          cls = ecls[t];
          if (cls == 0) n_res_256++;
          else if (cls == 1) n_res_384++;
          else if (cls == 2) n_res_768++;
          else if (cls == 3) n_res_add++;
          else if (cls == 4) n_chain++;
          else if (cls == 5) n_smem++;
          else n_hbm_wr++;
          ekind.delete(t);
        end
      end
      if (ext_in_valid[x] && ext_in_ready[x]) n_ext_in++;
    end
    for (int i = 0; i < GX * GY; i++)
      if (dut.ro_v[i][0] && !dut.ro_r[i][0]) n_tc_stall++;
    if (bf_valid && bf_ready) n_bf++;
    if (ntt_done) n_ntt_done++;
    if (msm_win_done) n_win_done++;
  end

  for (genvar ty = 1; ty <= GY - 2; ty++) begin : g_my
    for (genvar tx = 1; tx <= GX - 2; tx++) begin : g_mx
      always @(posedge clk)
        if (rst_n && dut.g_y[ty].g_x[tx].g_tc.u_tc.mm_in_valid && dut.g_y[ty].g_x[tx].g_tc.u_tc.bcnt == 3'd5)
          n_full_batch++;
    end
  end

  // ---------------------------------------------------------------- MSM stream check
  localparam int NPTS = 1000, C = 12;
  logic [SCALAR_W-1:0] sc [NPTS];
  int   exp_b [NPTS];
  logic exp_n [NPTS];
  int   got   [NPTS];
  logic bkt_seen [1 << BK_AW];

  function automatic void ref_digit(logic [SCALAR_W-1:0] k, int w, output int b, output logic neg);
    logic signed [SCALAR_W+16:0] v;
    int d;
    v = (SCALAR_W+17)'(k);
    d = 0;
    for (int j = 0; j <= w; j++) begin
      d = int'(v % (1 << C));
      if (d >= (1 << (C - 1))) d = d - (1 << C);
      v = (v - (SCALAR_W+17)'(d)) >>> C;
    end
    neg = (d < 0);
    b = (d == 0) ? -1 : ((d < 0 ? -d : d) - 1);
  endfunction

  always @(posedge clk) if (rst_n)
    for (int e = 0; e < NE; e++) if (e_valid[e] && e_ready[e]) begin
      int p;
      p = int'(e_pt[e]);
      checks++;
      if (p >= NPTS || exp_b[p] != int'(e_bkt[e]) || exp_n[p] !== e_neg[e]) begin
        failures++; $display("FAIL msm point %0d", p);
      end else got[p]++;
      bkt_seen[e_bkt[e]] = 1'b1;
      n_msm_pts++;
    end

  task automatic gc_send(gop_e op, logic [31:0] arg, logic [SCALAR_W-1:0] data);
    cmd.op = op; cmd.arg = arg; cmd.data = data; cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic msm_window(int w);
    for (int i = 0; i < NPTS; i++) begin ref_digit(sc[i], w, exp_b[i], exp_n[i]); got[i] = 0; end
    for (int b = 0; b < (1 << BK_AW); b++) bkt_seen[b] = 1'b0;
    if (w != 0) gc_send(G_MSM_WIN, 32'(w), '0);
    gc_send(G_MSM_RUN, '0, '0);
    while (!msm_win_done) @(negedge clk);
    for (int i = 0; i < NPTS; i++) begin
      checks++;
      if (got[i] != (exp_b[i] >= 0 ? 1 : 0)) begin failures++; $display("FAIL msm w=%0d pt %0d seen %0d", w, i, got[i]); end
    end
    for (int b = 0; b < (1 << BK_AW); b++) if (!bkt_seen[b]) n_empty_bkt++;
  endtask

  task automatic gc_stream();
    logic [127:0] rad;
    rad = '0;   // 1680 = 8 * 7 * 5 * 3 * 2
    rad[32 +: 4] = 4'd8; rad[36 +: 4] = 4'd7; rad[40 +: 4] = 4'd5; rad[44 +: 4] = 4'd3; rad[48 +: 4] = 4'd2;
    gc_send(G_NTT, '0, SCALAR_W'({rad[127:32], 5'd5, 32'd1680}));
    gc_send(G_MSM_CFG, 32'({4'(NE), 13'(NPTS), 4'(C)}), '0);
    for (int i = 0; i < NPTS; i++) gc_send(G_SCALAR, 32'(i), sc[i]);
    msm_window(0);
    msm_window(5);
    while (n_ntt_done == 0) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- HBM-side writes
  logic [MAXW-1:0] hbm_val [16];
  int              hbm_mem [16];
  bit              hbm_done;
  task automatic ext_stream();
    for (int k = 0; k < 16; k++) begin
      int col;
      col = k % GX;
      hbm_mem[k] = $urandom % NM;
      hbm_val[k] = rnd_below('1);
      ext_in_flit[col] = pkt(mem_id(hbm_mem[k]), OP_WR, 300 + k, hbm_val[k], '0, OP_NOP, 0);
      ext_in_valid[col] = 1;
      #1;
      while (!ext_in_ready[col]) begin @(negedge clk); #1; end
      @(negedge clk);
      ext_in_valid[col] = 0;
    end
    hbm_done = 1;
  endtask

  // ---------------------------------------------------------------- host traffic
  int tag = 0;
  localparam int NCH = 24;
  logic [MAXW-1:0] cha [NCH], chb [NCH];
  int chs [NCH], cht [NCH];
  logic [MAXW-1:0] sma [6], smb [6];

  task automatic direct_mul(int t, logic [MAXW-1:0] a, logic [MAXW-1:0] b, int fixcol = -1);
    int col;
    col = (fixcol >= 0) ? fixcol : tag % GX;
    ecol[tag] = col;
    expect_prod(tag, t, a, b, (tmode[t] == MODE_256) ? 0 : (tmode[t] == MODE_384) ? 1 : 2);
    if (tmode[t] == MODE_768) begin
      host_send(pkt(tc_id(t), OP_MULA, 0, a, '0, OP_NOP, 0));
      host_send(pkt(tc_id(t), OP_MUL, 0, b, ext_id(col), OP_RESP, tag));
    end else host_send(pkt(tc_id(t), OP_MUL, 0, pack(tmode[t], a, b), ext_id(col), OP_RESP, tag));
    tag++;
  endtask

  task automatic host_stream();
    // configuration of every TCore
    for (int t = 0; t < NT; t++) begin
      host_send(pkt(tc_id(t), OP_CFG_MODE, 0, MAXW'(tmode[t]), '0, OP_NOP, 0));
      host_send(pkt(tc_id(t), OP_CFG_Q, 0, tq[t], '0, OP_NOP, 0));
      host_send(pkt(tc_id(t), OP_CFG_QINV, 0, neg_inv(tq[t], mode_bits(tmode[t])), '0, OP_NOP, 0));
    end
    // operand pairs into memory nodes for the chain
    for (int j = 0; j < NCH; j++) begin
      cht[j] = j % (NT - 1);
      chs[j] = (j * 5) % NM;
      cha[j] = rnd_below(tq[cht[j]]); chb[j] = rnd_below(tq[cht[j]]);
      host_send(pkt(mem_id(chs[j]), OP_WR, 100 + j, pack(tmode[cht[j]], cha[j], chb[j]), '0, OP_NOP, 0));
    end
    // direct work: every TCore, then a burst at one TCore, then additions
    for (int r = 0; r < 4; r++)
      for (int t = 0; t < NT; t++) direct_mul(t, rnd_below(tq[t]), rnd_below(tq[t]));
    // burst at one TCore whose results all leave through column 0, held shut for a
    // while: the TCore's queue fills and it must push back on the network
    hold0 = 1;
    fork begin repeat (400) @(negedge clk); hold0 = 0; end join_none
    for (int i = 0; i < 24; i++) direct_mul(0, rnd_below(tq[0]), rnd_below(tq[0]), 0);
    for (int i = 0; i < 8; i++) begin
      int t, col;
      logic [MAXW-1:0] a, b;
      wide_t s;
      t = i % NT; col = tag % GX;
      a = rnd_below(tq[t]); b = rnd_below(tq[t]);
      s = i[0] ? (wide_t'(a) + wide_t'(tq[t]) - wide_t'(b)) % wide_t'(tq[t]) : (wide_t'(a) + wide_t'(b)) % wide_t'(tq[t]);
      ekind[tag] = 1; ea[tag] = MAXW'(s); ecls[tag] = 3; ecol[tag] = col;
      if (tmode[t] == MODE_768) host_send(pkt(tc_id(t), OP_MULA, 0, a, '0, OP_NOP, 0));
      host_send(pkt(tc_id(t), i[0] ? OP_SUB : OP_ADD, 0, (tmode[t] == MODE_768) ? b : pack(tmode[t], a, b),
                    ext_id(col), OP_RESP, tag));
      tag++;
    end
    // memory -> TCore -> memory
    for (int j = 0; j < NCH; j++) begin
      logic [MAXW-1:0] nh;
      nh = '0;
      nh[6:0] = mem_id((chs[j] + 5) % NM); nh[8 +: $bits(op_e)] = OP_WR; nh[31:16] = 16'(200 + j);
      host_send(pkt(mem_id(chs[j]), OP_RD, 100 + j, nh, tc_id(cht[j]), OP_MUL, 0));
    end
    // products parked in shared memory
    for (int j = 0; j < 6; j++) begin
      int t;
      t = j % NT;
      sma[j] = rnd_below(tq[t]); smb[j] = rnd_below(tq[t]);
      if (tmode[t] == MODE_768) host_send(pkt(tc_id(t), OP_MULA, 0, sma[j], '0, OP_NOP, 0));
      host_send(pkt(tc_id(t), OP_MUL, 0, (tmode[t] == MODE_768) ? smb[j] : pack(tmode[t], sma[j], smb[j]),
                    tc_id(t), OP_RESP, j + 1));
    end
  endtask

  task automatic readback();
    // chain results
    for (int j = 0; j < NCH; j++) begin
      int col;
      col = tag % GX; ecol[tag] = col;
      expect_prod(tag, cht[j], cha[j], chb[j], 4);
      host_send(pkt(mem_id((chs[j] + 5) % NM), OP_RD, 200 + j, '0, ext_id(col), OP_RESP, tag));
      tag++;
    end
    for (int j = 0; j < 6; j++) begin
      int col;
      flit_t f;
      col = tag % GX; ecol[tag] = col;
      expect_prod(tag, j % NT, sma[j], smb[j], 5);
      f = pkt(tc_id(j % NT), OP_SMRD, j + 1, '0, ext_id(col), OP_RESP, tag);
      host_send(f);
      tag++;
    end
    for (int k = 0; k < 16; k++) begin
      int col;
      col = tag % GX; ecol[tag] = col;
      ekind[tag] = 1; ea[tag] = hbm_val[k]; ecls[tag] = 6;
      host_send(pkt(mem_id(hbm_mem[k]), OP_RD, 300 + k, '0, ext_id(col), OP_RESP, tag));
      tag++;
    end
  endtask


  task automatic check_count(string what, int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    int lat;
    host_valid = 0; host_flit = '0; cmd_valid = 0; cmd = '0; hbm_done = 0;
    for (int x = 0; x < GRID; x++) begin ext_in_valid[x] = 0; ext_in_flit[x] = '0; end
    {n_host, n_ext_in, n_ext_out, n_ext_stall, n_ruche, n_mesh, n_full_batch, n_tc_stall} = '0;
    {n_res_256, n_res_384, n_res_768, n_res_add, n_chain, n_smem, n_hbm_wr} = '0;
    {n_bf, n_ntt_done, n_msm_pts, n_win_done, n_empty_bkt} = '0;
    for (int i = 0; i < MAXW/32; i++) q768[i*32 +: 32] = $urandom;
    q768 = (q768 >> 15) | (MAXW'(1) << 752) | MAXW'(1);
    for (int t = 0; t < NT; t++) begin
      tmode[t] = (t == NT - 1) ? MODE_768 : (t == NT - 2) ? MODE_384 : MODE_256;
      tq[t]    = (t == NT - 1) ? q768 : (t == NT - 2) ? MAXW'(P_BLS381) : MAXW'(P_BN254);
    end
    for (int i = 0; i < NPTS; i++)
      for (int k = 0; k < SCALAR_W / 32; k++) sc[i][k*32 +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      host_stream();
      ext_stream();
      gc_stream();
    join
    while (tcore_busy != 0 || !hbm_done) @(negedge clk);
    repeat (200) @(negedge clk);
    readback();
    lat = 0;
    while (ekind.size() != 0 && lat < 5000) begin @(negedge clk); lat++; end
    checks++;
    if (ekind.size() != 0) begin failures++; $display("FAIL %0d results never arrived", ekind.size()); end
    $display("mechanisms:");
    check_count("host packets", n_host);
    check_count("HBM-side packets in", n_ext_in);
    check_count("HBM-side packets out", n_ext_out);
    check_count("HBM-side output stalls", n_ext_stall);
    check_count("mesh link transfers", n_mesh);
    check_count("ruche link transfers", n_ruche);
    check_count("full 5-lane TCore batches", n_full_batch);
    check_count("TCore input back-pressure cycles", n_tc_stall);
    check_count("256-bit products", n_res_256);
    check_count("384-bit products", n_res_384);
    check_count("768-bit products", n_res_768);
    check_count("modular additions/subtractions", n_res_add);
    check_count("memory->TCore->memory products", n_chain);
    check_count("shared-memory stored products", n_smem);
    check_count("HBM-side writes read back", n_hbm_wr);
    check_count("NTT butterfly descriptors", n_bf);
    check_count("NTT done", n_ntt_done);
    check_count("MSM points streamed", n_msm_pts);
    check_count("MSM windows done", n_win_done);
    check_count("empty buckets skipped", n_empty_bkt);
    checks++;
    if (n_bf != 1680/8 + 1680/7 + 1680/5 + 1680/3 + 1680/2) begin failures++; $display("FAIL butterfly count %0d", n_bf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: %0d results outstanding", ekind.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
