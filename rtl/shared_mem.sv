// shared_mem: the TCore's local shared memory (single-port, 128-bit words).
//
// Holds values passed between PE-thread groups and the ModAdd unit; here the TCore
// controller parks results in it and reads them back on request. The paper gives
// 2.13 KB of single-port 128-bit SRAM; 136 words x 16 bytes = 2176 bytes is the
// nearest whole-word size. One access per cycle: a write when en & we, otherwise a
// read whose data appears on rdata on the next cycle. Written as an array; a
// physical design would use an SRAM macro with the same ports.
module shared_mem #(
  parameter int unsigned DEPTH = 136,
  parameter int unsigned W     = 128,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
