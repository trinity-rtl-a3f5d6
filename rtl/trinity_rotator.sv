// trinity_rotator: Rotator, vector rotation and SampleExtract.
//
// A polynomial of N = 2^log_n coefficients (LANES <= N <= NMAX) over Z_q[X]/(X^N+1) is
// loaded into the buffer as N/LANES vectors in natural order (ld_v; the write pointer
// restarts after ld_first). A start pulse then emits N/LANES vectors, one per cycle,
// through an index map (the vector rotate unit) and a conditional negation (the vector
// negation unit):
//   ROT_ROTATE,  r in [0, 2N):  out = a(X) * X^r, i.e. out[j] = +-a[(j - r) mod N],
//                               negated when the coefficient wraps past X^N an odd time;
//   ROT_EXTRACT, idx in [0, N): LWE mask of SampleExtract at coefficient idx,
//                               out[j] = a[idx - j] for j <= idx, -a[N + idx - j] otherwise
//                               (applied to the b polynomial, lane 0 of the first vector
//                               is the LWE body b[idx]).
// The buffer is kept after emission, so one RLWE polynomial can be extracted at many
// indices (CKKS-to-TFHE conversion) or rotated by several amounts. Output vector u
// appears 2+u cycles after the start pulse. The paper gives the unit's parts (buffers,
// rotate unit, negation unit); the one-buffer organisation is this design's choice.
module trinity_rotator
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
  input  modq_t             modq,
  // load
  input  logic              ld_first,
  input  logic              ld_v,
  input  word_t [LANES-1:0] ld_d,
  // emit
  input  logic              start,
  input  rot_op_e           op,
  input  logic [4:0]        log_n,
  input  logic [NW-1:0]     amount,     // r (rotate) or idx (extract)
  output logic              out_v,
  output word_t [LANES-1:0] out_d
);
  word_t [LANES-1:0] mem [ROWS];
  logic [RW-1:0] wc, rc;
  logic          act;
  rot_op_e       op_r;
  logic [4:0]    lg_r;
  logic [NW-1:0] amt_r;
  word_t         q_r;

  always_ff @(posedge clk) begin
    if (ld_v) mem[ld_first ? '0 : wc] <= ld_d;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wc <= '0; rc <= '0; act <= 1'b0;
      op_r <= ROT_ROTATE; lg_r <= 5'(LGL); amt_r <= '0; q_r <= '0;
    end else begin
      if (ld_v) wc <= (ld_first ? RW'(0) : wc) + 1'b1;
      else if (ld_first) wc <= '0;
      if (start) begin
        act <= 1'b1; rc <= '0;
        op_r <= op; lg_r <= log_n; amt_r <= amount; q_r <= modq.q;
      end else if (act) begin
        if (32'(rc) == (1 << (lg_r - 5'(LGL))) - 1) act <= 1'b0;
        else rc <= rc + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= act;
    for (int m = 0; m < LANES; m++) begin
      int unsigned n, j, src, tot;
      logic neg;
      n = 1 << lg_r;
      j = (32'(rc) << LGL) + m;
      if (op_r == ROT_ROTATE) begin
        src = (j + 2 * n - 32'(amt_r)) & (n - 1);
        tot = (src + 32'(amt_r)) & (2 * n - 1);      // exponent of X after the shift, mod 2N
        neg = (tot >= n);
      end else begin
        src = (32'(amt_r) + n - j) & (n - 1);
        neg = (j > 32'(amt_r));
      end
      out_d[m] <= neg ? mod_neg(mem[src >> LGL][src & (LANES - 1)], q_r)
                      : mem[src >> LGL][src & (LANES - 1)];
    end
  end
endmodule
