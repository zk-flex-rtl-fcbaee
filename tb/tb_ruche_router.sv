// tb_ruche_router: one router at (3, 3) of the 8x8 grid. Flits with unique tags and
// random destinations (grid nodes and off-grid south ports) enter on all nine inputs
// while the outputs stall at random. Each flit must leave exactly once, unchanged, on
// the port that X-first ruche routing gives (worked out here from the coordinates),
// and a lone flit must cross in 2 cycles.
module tb_ruche_router;
  import zkf_pkg::*;
  localparam int X = 3, Y = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  in_valid [N_PORTS], in_ready [N_PORTS], out_valid [N_PORTS], out_ready [N_PORTS];
  flit_t in_flit [N_PORTS], out_flit [N_PORTS];
  int checks = 0, failures = 0;

  ruche_router dut (.*, .x_pos(3'(X)), .y_pos(3'(Y)));

  function automatic int exp_port(logic [NODE_W-1:0] d);
    int dx, dy;
    dx = int'(d[2:0]);
    dy = d[6] ? 7 : int'(d[5:3]);
    if (dx - X >= 2) return 7;      // RE
    if (dx - X == 1) return 3;      // E
    if (X - dx >= 2) return 8;      // RW
    if (X - dx == 1) return 4;      // W
    if (dy - Y >= 2) return 6;      // RS
    if (dy - Y == 1) return 2;      // S
    if (Y - dy >= 2) return 5;      // RN
    if (Y - dy == 1) return 1;      // N
    return d[6] ? 2 : 0;
  endfunction

  int   want [int];      // tag -> expected port
  flit_t sent [int];
  int   received;
  logic stall = 0;

  always @(negedge clk) for (int o = 0; o < N_PORTS; o++) out_ready[o] <= stall ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n) for (int o = 0; o < N_PORTS; o++)
    if (out_valid[o] && out_ready[o]) begin
      int t;
      t = int'(out_flit[o].tag);
      checks++;
      if (!want.exists(t)) begin failures++; $display("FAIL unknown/duplicate tag %0d", t); end
      else begin
        if (want[t] != o) begin failures++; $display("FAIL tag %0d port %0d want %0d", t, o, want[t]); end
        if (out_flit[o] !== sent[t]) begin failures++; $display("FAIL payload"); end
        want.delete(t);
      end
      received++;
    end

  int next_tag = 0;
  logic took [N_PORTS];
  function automatic flit_t mk();
    flit_t f;
    f = '0;
    f.dst = 7'($urandom % 72);          // 64 nodes + 8 ext ports
    if (f.dst >= 7'd64) f.dst = {1'b1, 3'b0, 3'(f.dst - 7'd64)};
    f.op = OP_WR;
    f.tag = 16'(next_tag);
    f.data = {24{$urandom}};
    return f;
  endfunction

  initial begin
    int c0;
    for (int i = 0; i < N_PORTS; i++) begin in_valid[i] = 0; in_flit[i] = '0; end
    received = 0;
    for (int i = 0; i < N_PORTS; i++) took[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency of a lone flit: local -> E
    @(negedge clk);
    in_flit[0] = '0; in_flit[0].dst = node_id(4, 3); in_flit[0].tag = 16'hffff;
    in_valid[0] = 1; want[16'hffff] = 3; sent[16'hffff] = in_flit[0];
    @(negedge clk) in_valid[0] = 0;
    c0 = 1;
    while (!(out_valid[3])) begin @(negedge clk); c0++; end
    checks++;
    if (c0 != 2) begin failures++; $display("FAIL latency %0d", c0); end
    @(negedge clk);
    // random traffic on all inputs
    stall = 1;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N_PORTS; i++) begin
        if (!in_valid[i] || took[i]) begin
          if ($urandom % 2) begin
            in_flit[i] = mk();
            want[next_tag] = exp_port(in_flit[i].dst);
            sent[next_tag] = in_flit[i];
            next_tag++;
            in_valid[i] = 1;
          end else in_valid[i] = 0;
        end
      end
      #1;
      for (int i = 0; i < N_PORTS; i++) took[i] = in_valid[i] && in_ready[i];
      @(negedge clk);
    end
    // hold the last flits until each is taken
    for (int i = 0; i < N_PORTS; i++) if (took[i]) in_valid[i] = 0;
    for (int k = 0; k < 20; k++) begin
      #1;
      for (int i = 0; i < N_PORTS; i++) took[i] = in_valid[i] && in_ready[i];
      @(negedge clk);
      for (int i = 0; i < N_PORTS; i++) if (took[i]) in_valid[i] = 0;
    end
    stall = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (want.size() != 0) begin failures++; $display("FAIL %0d flits lost", want.size()); end
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
