// trinity_nttu: NTT unit (NTTU), a fully pipelined 2M-point NTT / inverse NTT.
//
// Structure (as in the paper): log2(2M) stages of M butterfly units (trinity_bu)
// followed by one stage of 2M twisting units (trinity_tw). Every stage uses the same
// constant-geometry wiring: BU i of a stage reads lanes i and i+M of the previous stage
// and drives lanes 2i and 2i+1 of the next, so each stage's access pattern is identical.
// A new 2M-element vector is accepted every cycle; it leaves S+1 cycles later (S BU
// stages plus the TW stage, which is registered also when bypassed).
//
// Twiddles: each BU holds its twiddle in a register loaded from the local buffer
// (tw_we, tw_stage, tw_d: one stage of M twiddles per load cycle). With w a primitive
// 2M-th root of unity, n = 2M, stage s and BU i, the schedule that yields the cyclic
// DFT X[k] = sum_j x[j] w^(jk) in bit-reversed lane order (lane j holds X[bitrev(j)]) is
//   forward (inv=0):  tw[s][i] = w ^ ( (n >> (s+1)) * bitrev_s(i mod 2^s) )
//   inverse (inv=1):  tw[s][i] = winv ^ ( 2^s * (i >> s) )     (no 1/n scaling)
// The hardware itself does not depend on the schedule. The negacyclic pre-twist
// and the four-step twist are done by the TW stage, whose seeds (first item and
// common ratio per lane) are loaded with ts_we. q/mu and inv travel with each vector.
module trinity_nttu
  import trinity_pkg::*;
#(
  parameter int unsigned M = 128,
  localparam int unsigned N = 2 * M,
  localparam int unsigned S = $clog2(N),
  localparam int unsigned SW = (S > 1) ? $clog2(S) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  // twiddle register load
  input  logic           tw_we,
  input  logic [SW-1:0]  tw_stage,
  input  word_t [M-1:0]  tw_d,
  // OF-Twist seed load
  input  logic           ts_we,
  input  word_t [N-1:0]  ts_first,
  input  word_t [N-1:0]  ts_ratio,
  // data
  input  logic           in_v,
  input  logic           inv,
  input  logic           tw_bypass,
  input  modq_t          modq,
  input  word_t [N-1:0]  in_d,
  output logic           out_v,
  output word_t [N-1:0]  out_d
);
  word_t [M-1:0] tw [S];
  always_ff @(posedge clk) begin
    if (tw_we) tw[tw_stage] <= tw_d;
  end

  // per-stage data and the control that travels with it
  word_t [N-1:0] x [S+1];     // x[s+1]: output of stage s; x[0] unused
  logic  [S:0]   v;
  logic  [S:0]   iv;
  logic  [S:0]   byp;
  modq_t         mq [S+1];

  assign x[0]   = '0;
  assign v[0]   = in_v;
  assign iv[0]  = inv;
  assign byp[0] = tw_bypass;
  assign mq[0]  = modq;

  for (genvar s = 0; s < S; s++) begin : g_stage
    word_t [N-1:0] xi;
    if (s == 0) begin : g_first
      assign xi = in_d;
    end else begin : g_next
      assign xi = x[s];
    end
    for (genvar i = 0; i < M; i++) begin : g_bu
      trinity_bu u_bu (
        .clk (clk), .inv (iv[s]), .q (mq[s].q), .mu (mq[s].mu),
        .a (xi[i]), .b (xi[i+M]), .w (tw[s][i]),
        .a_o (x[s+1][2*i]), .b_o (x[s+1][2*i+1])
      );
    end
    always_ff @(posedge clk) begin
      if (!rst_n) v[s+1] <= 1'b0;
      else        v[s+1] <= v[s];
      iv[s+1]  <= iv[s];
      byp[s+1] <= byp[s];
      mq[s+1]  <= mq[s];
    end
  end

  for (genvar l = 0; l < N; l++) begin : g_tw
    trinity_tw u_tw (
      .clk (clk), .q (mq[S].q), .mu (mq[S].mu),
      .load (ts_we), .first (ts_first[l]), .ratio (ts_ratio[l]),
      .bypass (byp[S]), .x_v (v[S]), .x_i (x[S][l]), .x_o (out_d[l])
    );
  end
  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= v[S];
  end
endmodule
