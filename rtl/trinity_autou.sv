// trinity_autou: automorphism unit (AutoU).
//
// Applies the Galois automorphism X -> X^k (k odd; k = 5^r mod 2N for a CKKS rotation
// by r slots) to a polynomial in coefficient form over Z_q[X]/(X^N+1): coefficient i
// moves to position i*k mod N and is negated when i*k mod 2N >= N.
// The polynomial enters as N/LANES vectors in natural order (vector t, lane l holds
// coefficient t*LANES+l). Each coefficient is written straight to its permuted place in
// one half of a ping-pong buffer; when a block is complete its half is read out in
// natural order, N/LANES vectors on consecutive cycles, while the other half fills.
// N = 2^log_n with LANES <= N <= NMAX; log_n and k are taken at a block's first vector.
// First output: 2 cycles after the block's last input.
// The buffer-based permutation is this design's choice; the paper's AutoU is a
// multi-stage shuffle network (it refers to ARK for it).
module trinity_autou
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned NMAX  = 65536,
  localparam int unsigned ROWS = NMAX / LANES,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned NW = $clog2(NMAX) + 1,
  localparam int unsigned LGL = $clog2(LANES)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        log_n,
  input  logic [NW-1:0]     k,
  input  modq_t             modq,
  input  logic              in_v,
  input  word_t [LANES-1:0] in_d,
  output logic              out_v,
  output word_t [LANES-1:0] out_d
);
  word_t [LANES-1:0] mem [2][ROWS];
  logic          wb, rb, rd_act;
  logic [RW-1:0] wc, rc, rlast;
  logic [4:0]    wlg;
  logic [NW-1:0] wk;
  word_t         q_w;

  logic [4:0]    lg_use;
  logic [NW-1:0] k_use;
  logic          last_in;
  always_comb begin
    lg_use  = (wc == '0) ? log_n : wlg;
    k_use   = (wc == '0) ? k : wk;
    last_in = in_v && (32'(wc) == (1 << (lg_use - 5'(LGL))) - 1);
  end

  always_ff @(posedge clk) begin
    if (in_v) begin
      for (int l = 0; l < LANES; l++) begin
        logic [2*NW-1:0] prod;
        logic [NW-1:0]   j;
        prod = (2*NW)'((32'(wc) << LGL) + l) * (2*NW)'(k_use);
        j    = NW'(prod & ((64'(1) << (lg_use + 1)) - 1));     // i*k mod 2N
        if (32'(j) >= (1 << lg_use)) begin
          j = NW'(32'(j) - (1 << lg_use));
          mem[wb][j >> LGL][j & (LANES - 1)] <= mod_neg(in_d[l], (wc == '0) ? modq.q : q_w);
        end else begin
          mem[wb][j >> LGL][j & (LANES - 1)] <= in_d[l];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb <= 1'b0; wc <= '0; rb <= 1'b0; rc <= '0; rd_act <= 1'b0; rlast <= '0;
      wlg <= 5'(LGL); wk <= NW'(1); q_w <= '0;
    end else begin
      if (in_v) begin
        if (wc == '0) begin wlg <= log_n; wk <= k; q_w <= modq.q; end
        if (last_in) begin
          wc <= '0; wb <= ~wb;
          rd_act <= 1'b1; rb <= wb; rc <= '0; rlast <= wc;
        end else begin
          wc <= wc + 1'b1;
        end
      end
      if (rd_act && !last_in) begin
        if (rc == rlast) rd_act <= 1'b0;
        else rc <= rc + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= rd_act;
    out_d <= mem[rb][rc];
  end
endmodule
