// tb_mem_node: writes random 768-bit values to random value addresses of a memory
// node and reads them back through read packets, with the response port stalled at
// random. Checks data, the forwarded header (rdst, rop, rtag), the next-hop header
// taken from the read payload, and that a read answers
// one cycle after it is accepted when the port is free. Uses the full 1.21 MiB node.
module tb_mem_node;
  import zkf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  int checks = 0, failures = 0;

  mem_node dut (.*);

  logic [MAXW-1:0] model [int];
  flit_t exp_q [$];

  function automatic logic [MAXW-1:0] rv();
    logic [MAXW-1:0] v;
    for (int i = 0; i < MAXW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  logic stall_on = 0;
  always @(negedge clk) if (stall_on) out_ready <= ($urandom % 4 != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    flit_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected response"); end
    else begin
      e = exp_q.pop_front();
      if (out_flit.data !== e.data || out_flit.dst !== e.dst || out_flit.op !== e.op || out_flit.tag !== e.tag ||
          out_flit.rdst !== e.rdst || out_flit.rop !== e.rop || out_flit.rtag !== e.rtag) begin
        failures++; $display("FAIL read tag=%0d", e.rtag);
      end
    end
  end

  initial begin
    int keys [$];
    in_valid = 0; in_flit = '0; out_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency: write then read with a free port
    @(negedge clk);
    in_valid = 1; in_flit = '0; in_flit.op = OP_WR; in_flit.tag = 16'd13215; in_flit.data = rv();
    model[13215] = in_flit.data;
    @(negedge clk);
    in_flit.op = OP_RD; in_flit.rdst = 7'd9; in_flit.rop = OP_MUL; in_flit.rtag = 16'd77; in_flit.data = '0;
    begin flit_t e; e = '0; e.dst = 7'd9; e.op = OP_MUL; e.tag = 16'd77; e.data = model[13215]; exp_q.push_back(e); end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("read latency"); end
    @(negedge clk);
    // random traffic
    stall_on = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      in_valid = 1;
      in_flit = '0;
      if (keys.size() == 0 || $urandom % 2) begin
        int k;
        k = $urandom % 13216;
        in_flit.op = OP_WR; in_flit.tag = 16'(k); in_flit.data = rv();
      end else begin
        int k;
        k = keys[$urandom % keys.size()];
        in_flit.op = OP_RD; in_flit.tag = 16'(k);
        in_flit.rdst = 7'($urandom % 64); in_flit.rop = OP_RESP; in_flit.rtag = 16'($urandom);
        in_flit.data = '0;
        in_flit.data[6:0] = 7'($urandom); in_flit.data[8 +: $bits(op_e)] = OP_WR; in_flit.data[31:16] = 16'($urandom);
      end
      do @(posedge clk); while (!in_ready);
      if (in_flit.op == OP_WR) begin
        if (!model.exists(int'(in_flit.tag))) keys.push_back(int'(in_flit.tag));
        model[int'(in_flit.tag)] = in_flit.data;
      end else begin
        flit_t e;
        e = '0; e.dst = in_flit.rdst; e.op = in_flit.rop; e.tag = in_flit.rtag;
        e.rdst = in_flit.data[6:0]; e.rop = OP_WR; e.rtag = in_flit.data[31:16];
        e.data = model[int'(in_flit.tag)];
        exp_q.push_back(e);
      end
      #1;
    end
    @(negedge clk);
    in_valid = 0; stall_on = 0;
    @(negedge clk) out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("lost responses"); end
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
