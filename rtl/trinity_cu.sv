// trinity_cu: configurable unit CU-X, X columns of NR processing elements.
//
// Each column is a trinity_cu_noc followed by NR trinity_pe. The unit is fully
// pipelined, one vector of 2*NR lanes per cycle, latency X cycles.
//  * NTT / iNTT (mode PE_NTT / PE_INTT): each column is one constant-geometry butterfly
//    stage over independent groups of 2^log_g lanes, so a CU-X performs X stages of the
//    phase-2 NTTs of a four-step NTT (2*NR elements per cycle). c[k][p] is the twiddle
//    of PE p in column k (from the local buffer). Column outputs: PE p -> lanes 2p, 2p+1.
//  * MAC (mode PE_MAC): the network is a straight mesh. Lanes [0,NR) carry the partial
//    sums a and lanes [NR,2NR) the data b (NR new elements per cycle). b moves one
//    column per cycle; a row's a output is a_in plus the accumulators of the columns
//    whose out_acc is raised. c[k] is the coefficient vector column k uses when the
//    vector reaches it (k cycles after entry), so the scheduler skews it.
//    Column outputs: a -> lane p, b -> lane p+NR.
// Mode, log_g, out_acc and the modulus travel with the vector from column to column.
module trinity_cu
  import trinity_pkg::*;
#(
  parameter int unsigned X  = 1,
  parameter int unsigned NR = 128,
  localparam int unsigned LW = $clog2($clog2(2 * NR) + 1)
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_v,
  input  pe_mode_e           mode,
  input  logic [LW-1:0]      log_g,
  input  logic               out_acc,
  input  modq_t              modq,
  input  word_t [2*NR-1:0]   in_d,
  input  word_t [NR-1:0]     c [X],
  output logic               out_v,
  output word_t [2*NR-1:0]   out_d
);
  word_t [2*NR-1:0] y  [X];      // column outputs
  logic  [X:0]      v, oa;
  pe_mode_e         md [X+1];
  logic [LW-1:0]    lg [X+1];
  modq_t            mq [X+1];

  assign v[0]  = in_v;
  assign oa[0] = out_acc;
  assign md[0] = mode;
  assign lg[0] = log_g;
  assign mq[0] = modq;

  for (genvar k = 0; k < X; k++) begin : g_col
    word_t [NR-1:0] a, b, a_o, b_o;
    word_t [2*NR-1:0] xi;
    if (k == 0) begin : g_first
      assign xi = in_d;
    end else begin : g_next
      assign xi = y[k-1];
    end
    trinity_cu_noc #(.NR(NR)) u_noc (
      .mesh (md[k] == PE_MAC), .log_g (lg[k]), .in_d (xi), .a (a), .b (b));
    for (genvar p = 0; p < NR; p++) begin : g_pe
      trinity_pe u_pe (
        .clk, .rst_n, .mode (md[k]), .v (v[k]), .out_acc (oa[k]),
        .q (mq[k].q), .mu (mq[k].mu), .a (a[p]), .b (b[p]), .c (c[k][p]),
        .a_o (a_o[p]), .b_o (b_o[p]));
    end
    always_ff @(posedge clk) begin
      if (!rst_n) v[k+1] <= 1'b0;
      else        v[k+1] <= v[k];
      oa[k+1] <= oa[k];
      md[k+1] <= md[k];
      lg[k+1] <= lg[k];
      mq[k+1] <= mq[k];
    end
    always_comb begin
      for (int p = 0; p < NR; p++) begin
        if (md[k+1] == PE_MAC) begin
          y[k][p]      = a_o[p];
          y[k][p + NR] = b_o[p];
        end else begin
          y[k][2*p]     = a_o[p];
          y[k][2*p + 1] = b_o[p];
        end
      end
    end
  end
  assign out_v = v[X];
  assign out_d = y[X-1];
endmodule
