// tb_tcore: drives one TCore through its packet port. In each precision mode
// (BN254 prime at 256 bits, BLS12-381 prime at 384 bits, a random odd 753-bit modulus
// at 768 bits) it configures mode, Q and Q', sends bursts of multiplications, modular
// additions and subtractions with random back-pressure on the output, stores a
// product in shared memory and reads it back. Each result packet is matched by its
// tag: a product Y must satisfy Y < Q and Y * 2^n = d^3 * A * B (mod Q), a sum or
// difference must equal the value computed here. Also checks that a full batch of
// lanes was issued (all 45 M-PEs busy) in the 256-bit mode.
module tb_tcore;
  import zkf_pkg::*;
  localparam logic [NODE_W-1:0] ME = 7'd9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  flit_t in_flit, out_flit;
  int checks = 0, failures = 0;

  tcore dut (.*, .node_id(ME));

  localparam logic [255:0] P_BN254 =
    256'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;
  localparam logic [383:0] P_BLS381 =
    384'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;
  typedef logic [2*MAXW+15:0] wide_t;

  logic [MAXW-1:0] q;
  int unsigned n, d;
  // expected results by tag: kind 0 = product of (ea, eb), 1 = exact value
  int              ekind [int];
  logic [MAXW-1:0] ea [int], eb [int];
  int  full_batches = 0;
  logic stall = 0;

  always @(negedge clk) out_ready <= stall ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && dut.mm_in_valid && dut.bcnt == 3'd5) full_batches++;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int t;
    t = int'(out_flit.tag);
    checks++;
    if (!ekind.exists(t)) begin failures++; $display("FAIL unexpected tag %0d", t); end
    else begin
      if (out_flit.dst != 7'd1 || out_flit.op != OP_RESP) begin failures++; $display("FAIL header"); end
      if (ekind[t] == 0) begin
        wide_t lhs, rhs;
        lhs = (wide_t'(out_flit.data) << n) % wide_t'(q);
        rhs = (((wide_t'(ea[t]) * wide_t'(eb[t])) % wide_t'(q)) * wide_t'(d * d * d)) % wide_t'(q);
        if (out_flit.data >= q || lhs != rhs) begin failures++; $display("FAIL product tag %0d", t); end
      end else if (out_flit.data !== ea[t]) begin
        failures++; $display("FAIL value tag %0d", t);
      end
      ekind.delete(t);
    end
  end

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

  task automatic send(flit_t f);
    in_flit = f; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic flit_t pkt(op_e op, logic [MAXW-1:0] data, int tag, logic [NODE_W-1:0] rdst);
    flit_t f;
    f = '0; f.dst = ME; f.op = op; f.data = data; f.rdst = rdst; f.rop = OP_RESP; f.rtag = 16'(tag);
    return f;
  endfunction

  function automatic logic [MAXW-1:0] pack(logic [MAXW-1:0] a, logic [MAXW-1:0] b);
    if (n == 256) return {256'b0, b[255:0], a[255:0]};
    return {b[383:0], a[383:0]};
  endfunction

  int tag = 0;
  task automatic run_mode(prec_mode_e m, logic [MAXW-1:0] qq);
    q = qq; n = mode_bits(m); d = (m == MODE_256) ? 1 : 36;
    send(pkt(OP_CFG_MODE, MAXW'(m), 0, 0));
    send(pkt(OP_CFG_Q, qq, 0, 0));
    send(pkt(OP_CFG_QINV, neg_inv(qq, n), 0, 0));
    stall = 1;
    // a burst of multiplications, back to back
    for (int i = 0; i < 23; i++) begin
      logic [MAXW-1:0] a, b;
      a = (i == 0) ? qq - 1 : rnd_below(qq);
      b = (i == 0) ? qq - 1 : rnd_below(qq);
      ekind[tag] = 0; ea[tag] = a; eb[tag] = b;
      if (m == MODE_768) begin
        in_flit = pkt(OP_MULA, a, 0, 0); in_valid = 1;
        @(negedge clk);
        in_flit = pkt(OP_MUL, b, tag, 7'd1);
      end else in_flit = pkt(OP_MUL, pack(a, b), tag, 7'd1);
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      tag++;
    end
    in_valid = 0;
    // modular additions and subtractions
    for (int i = 0; i < 10; i++) begin
      logic [MAXW-1:0] a, b;
      wide_t s;
      logic sub;
      a = rnd_below(qq); b = rnd_below(qq); sub = i[0];
      if (i == 2) begin a = qq - 1; b = qq - 1; end
      s = sub ? ((wide_t'(a) + wide_t'(qq) - wide_t'(b)) % wide_t'(qq)) : ((wide_t'(a) + wide_t'(b)) % wide_t'(qq));
      ekind[tag] = 1; ea[tag] = MAXW'(s);
      if (m == MODE_768) send(pkt(OP_MULA, a, 0, 0));
      send(pkt(sub ? OP_SUB : OP_ADD, (m == MODE_768) ? b : pack(a, b), tag, 7'd1));
      tag++;
    end
    // product parked in shared memory slot 3, then read back
    begin
      logic [MAXW-1:0] a, b;
      a = rnd_below(qq); b = rnd_below(qq);
      if (m == MODE_768) send(pkt(OP_MULA, a, 0, 0));
      begin flit_t f; f = pkt(OP_MUL, (m == MODE_768) ? b : pack(a, b), 3, ME); send(f); end
      repeat (30) @(negedge clk);
      ekind[tag] = 0; ea[tag] = a; eb[tag] = b;
      begin flit_t f; f = pkt(OP_SMRD, '0, 0, 7'd1); f.tag = 16'd3; f.rtag = 16'(tag); send(f); end
      tag++;
    end
    while (busy) @(negedge clk);
    stall = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (ekind.size() != 0) begin failures++; $display("FAIL %0d results missing", ekind.size()); ekind.delete(); end
  endtask

  initial begin
    logic [MAXW-1:0] q768;
    in_valid = 0; in_flit = '0;
    for (int i = 0; i < MAXW/32; i++) q768[i*32 +: 32] = $urandom;
    q768 = (q768 >> 15) | (MAXW'(1) << 752) | MAXW'(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mode(MODE_256, MAXW'(P_BN254));
    checks++;
    if (full_batches == 0) begin failures++; $display("FAIL no full batch"); end
    run_mode(MODE_384, MAXW'(P_BLS381));
    run_mode(MODE_768, q768);
    $display("full batches: %0d", full_batches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
