// mem_node: boundary memory node of the ZK-Flex grid (global on-chip memory).
//
// A multi-bank store of single-port 128-bit words serving single-flit packets from
// the network. A 768-bit value occupies six consecutive words; word w lives in bank
// w mod BANKS at row w / BANKS, so the six words of one value always fall in six
// different banks and a whole value is read or written in one cycle.
//   OP_WR  store the payload at value address `tag`
//   OP_RD  read value `tag` and send it to node rdst as a packet with opcode rop and
//          tag rtag. The request's payload is unused by the read, so its low bits
//          carry the routing of the packet after that: data[6:0], data[15:8] and
//          data[31:16] become the rdst, rop and rtag of the response. A memory node
//          can thus stream an operand to a TCore together with the place where the
//          TCore must put its result (e.g. back into a memory node with OP_WR).
// The paper gives 1.21 MB per node built from single-port, multi-bank, 128-bit
// SRAMs; the bank count is not given. 16 banks x 4956 words x 16 bytes = 1.21 MiB
// (13216 values of 768 bits). Banks are written as arrays standing in for SRAM macros.
// Timing: read data leaves one cycle after the request is accepted; one request per
// cycle while the response port is free.
module mem_node
  import zkf_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned ROWS  = 4956,
  parameter int unsigned RAW   = $clog2(ROWS)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);
  localparam int unsigned WPV = MAXW / 128;          // words per value (6)
  localparam int unsigned NVAL = BANKS * ROWS / WPV; // values held

  logic [127:0] mem [BANKS][ROWS];
  logic [127:0] rdata [BANKS];
  logic         rd_pending;
  flit_t        req_q;
  logic [$clog2(BANKS)-1:0] bank0_q;                            // bank of word 0 of the pending read

  logic acc, in_range;
  assign in_ready = !rd_pending || out_ready;
  assign acc      = in_valid && in_ready;
  assign in_range = 32'(in_flit.tag) < NVAL;

  // word-to-bank mapping of value `tag`
  logic [31:0] w0;
  assign w0 = 32'(in_flit.tag) * WPV;

  always_ff @(posedge clk) begin
    if (acc && in_range) begin
      for (int i = 0; i < WPV; i++) begin
        int unsigned w;
        w = w0 + 32'(i);
        if (in_flit.op == OP_WR)
          mem[w % BANKS][RAW'(w / BANKS)] <= in_flit.data[i*128 +: 128];
        else if (in_flit.op == OP_RD)
          rdata[w % BANKS] <= mem[w % BANKS][RAW'(w / BANKS)];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pending <= 1'b0;
    end else begin
      if (acc && in_flit.op == OP_RD) rd_pending <= 1'b1;
      else if (out_ready)             rd_pending <= 1'b0;
    end
  end
  always_ff @(posedge clk)
    if (acc && in_flit.op == OP_RD) begin
      req_q   <= in_flit;
      bank0_q <= $clog2(BANKS)'(w0 % BANKS);
    end

  always_comb begin
    out_valid     = rd_pending;
    out_flit      = '0;
    out_flit.dst  = req_q.rdst;
    out_flit.op   = req_q.rop;
    out_flit.tag  = req_q.rtag;
    out_flit.rdst = req_q.data[NODE_W-1:0];
    out_flit.rop  = op_e'(req_q.data[8 +: $bits(op_e)]);
    out_flit.rtag = req_q.data[16 +: TAG_W];
    for (int i = 0; i < WPV; i++)
      out_flit.data[i*128 +: 128] = rdata[(32'(bank0_q) + 32'(i)) % BANKS];
  end
endmodule
