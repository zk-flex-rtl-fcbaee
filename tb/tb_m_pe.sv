// tb_m_pe: checks the integer PE against signed products computed here, including
// the extreme operand values, and that the product appears one cycle after `en`
// and is held while `en` is low.
module tb_m_pe;
  import zkf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en;
  logic signed [MW-1:0]   a, b;
  logic signed [2*MW-1:0] p;
  int checks = 0, failures = 0;

  m_pe dut (.*);

  function automatic logic signed [MW-1:0] rnd();
    logic [MW-1:0] v;
    for (int i = 0; i < (MW + 31) / 32; i++) v[i*32 +: 32] = $urandom;
    return $signed(v >>> ($urandom % 8));
  endfunction

  initial begin
    logic signed [2*MW-1:0] e;
    en = 0; a = '0; b = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      case (t)
        0: begin a = {1'b1, {(MW-1){1'b0}}}; b = {1'b1, {(MW-1){1'b0}}}; end
        1: begin a = {1'b0, {(MW-1){1'b1}}}; b = {1'b1, {(MW-1){1'b0}}}; end
        2: begin a = -1; b = {1'b0, {(MW-1){1'b1}}}; end
        default: begin a = rnd(); b = rnd(); end
      endcase
      e  = (2*MW)'(a) * (2*MW)'(b);
      en = 1;
      @(negedge clk);
      checks++;
      if (p !== e) begin failures++; $display("FAIL t=%0d", t); end
      en = 0; a = rnd();
      @(negedge clk);
      checks++;
      if (p !== e) begin failures++; $display("FAIL hold t=%0d", t); end
    end
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
