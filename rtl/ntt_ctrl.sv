// ntt_ctrl: NTT controller, the stage-by-stage butterfly address generator.
//
// A mixed-radix NTT of size N = r_0 * r_1 * ... runs one stage at a time; all
// butterflies of a stage share the stage's radix r (2, 3, 4, 5, 7 or 8, the paper's
// set). For each butterfly the controller issues one descriptor: the r inputs are
// read at rd_base + k*rd_stride with rd_stride = N/r in every stage (the reads have
// the same geometry each stage, so the memory-to-core routing need not change), the
// r outputs y_j (j = 0..r-1) are written at wr_base + j*wr_stride, and output j is
// multiplied by the twiddle w_N^(j*tw). This is the Stockham autosort ordering (decimation
// in frequency): with s the product of the radices already done and n = N/s,
// butterfly (p, q), q < s, p < n/r reads x[q + s(p + k n/r)], and
//   y[q + s(r p + j)] = w_N^(j p s) * sum_k x[q + s(p + k n/r)] * w_r^(j k),
// so after the last stage the result is in natural order. The one-stage-at-a-time
// schedule, the radix set and the constant read geometry follow the paper; the exact
// index scheme is this design's (the paper does not spell it out).
// Interface: present N and up to MAX_ST radices (4 bits each, stage 0 first) with a
// start pulse; they are captured then and may change afterwards;
// descriptors come out with a valid/ready handshake, one per cycle, and `last_bf`
// marks the final butterfly of a stage. `done` pulses after the final stage.
module ntt_ctrl #(
  parameter int unsigned AW     = 31,   // log2 of the largest transform
  parameter int unsigned MAX_ST = 31
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [AW:0]           n,
  input  logic [4*MAX_ST-1:0]   radices,
  input  logic [4:0]            n_stages,
  output logic                  busy,
  output logic                  done,
  output logic                  bf_valid,
  input  logic                  bf_ready,
  output logic [4:0]            bf_stage,
  output logic [3:0]            bf_radix,
  output logic [AW-1:0]         rd_base,
  output logic [AW-1:0]         rd_stride,
  output logic [AW-1:0]         wr_base,
  output logic [AW-1:0]         wr_stride,
  output logic [AW-1:0]         tw,
  output logic                  last_bf
);
  logic [4:0]    stage;
  logic [3:0]    r;
  logic [AW:0]   s;          // product of radices done so far
  logic [AW:0]   q;          // 0..s-1
  logic [AW:0]   pbase;      // p * s * r
  logic [AW:0]   twb;        // p * s
  logic [AW:0]   j;          // butterfly index = q + s*p
  logic [AW+4:0] acc;        // (j + 1) * r
  logic [AW:0]   m;          // N / r (found while running: acc reaches N)
  logic [AW:0]         n_q;
  logic [4*MAX_ST-1:0] rad_q;
  logic [4:0]          nst_q;

  assign r         = rad_q[stage*4 +: 4];
  assign bf_valid  = busy;
  assign bf_stage  = stage;
  assign bf_radix  = r;
  assign rd_base   = AW'(j);
  assign wr_base   = AW'(q + pbase);
  assign wr_stride = AW'(s);
  assign tw        = AW'(twb);
  assign last_bf   = (acc == (AW+5)'(n_q));
  // N / r by a small constant divide (r is 2..8)
  assign m         = (AW+1)'(n_q / (AW+1)'(r));
  assign rd_stride = AW'(m);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; stage <= '0; s <= '0; q <= '0; pbase <= '0;
      twb <= '0; j <= '0; acc <= '0; n_q <= '0; rad_q <= '0; nst_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (n_stages != 0);
        stage <= '0; s <= 1; q <= '0; pbase <= '0; twb <= '0; j <= '0;
        acc <= (AW+5)'(radices[3:0]);
        n_q <= n; rad_q <= radices; nst_q <= n_stages;
      end else if (busy && bf_ready) begin
        if (last_bf) begin
          // next stage
          if (stage + 1 == nst_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          stage <= stage + 1;
          s     <= (AW+1)'(s * r);
          q <= '0; pbase <= '0; twb <= '0; j <= '0;
          acc <= (AW+5)'(rad_q[(stage+1)*4 +: 4]);
        end else begin
          j   <= j + 1;
          acc <= acc + (AW+5)'(r);
          if (q + 1 == s) begin
            q     <= '0;
            pbase <= pbase + (AW+1)'(s * r);
            twb   <= twb + s;
          end else begin
            q <= q + 1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n && busy)
      assert (r == 2 || r == 3 || r == 4 || r == 5 || r == 7 || r == 8)
        else $error("ntt_ctrl: unsupported radix %0d", r);
endmodule
