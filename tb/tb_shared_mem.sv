// tb_shared_mem: random writes and reads over all 136 words of the TCore shared
// memory against a model array; read data must appear one cycle after the request.
module tb_shared_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [7:0] addr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [136];
  logic         known [136];
  int checks = 0, failures = 0;

  shared_mem dut (.*);

  initial begin
    en = 0; we = 0; addr = 0; wdata = '0;
    for (int i = 0; i < 136; i++) known[i] = 1'b0;
    // fill every word once
    for (int i = 0; i < 136; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 8'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata; known[i] = 1'b1;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en = 1; we = ($urandom % 3 == 0); addr = 8'($urandom % 136);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      if (we) model[addr] = wdata;
      else begin
        logic [127:0] e;
        e = model[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL addr=%0d", addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
