// trinity_top: the Trinity FHE accelerator, NC (4) clusters joined by the
// fully connected inter-cluster network, with two HBM ports.
//
// Each cluster (trinity_cluster) holds the NTT units, transpose units, configurable
// units, Rotator, automorphism unit, element-wise engine, vector processing unit, three
// local buffers and a scratchpad; it is steered cycle by cycle by its own control word
// ctl[c], produced by an external sequencer that replays the compiler's statically
// scheduled kernel flow. The inter-cluster network (trinity_icnoc) takes each cluster's
// outgoing vector and delivers either a permutation (noc_src) or an all-to-all exchange
// (noc_a2a), the latter switching between limb-wise and slot-wise layouts.
//
// HBM: the HBM2 stacks and PHYs are outside this RTL. Port h carries one LANES-wide
// vector per cycle in each direction and serves clusters NC/NHBM*h .. NC/NHBM*(h+1)-1
// (with 4 clusters and 2 ports: clusters 0,1 on port 0 and clusters 2,3 on port 1, as
// drawn in the paper's floor plan). An incoming vector is offered to all clusters of
// the port; the outgoing vector is that of the cluster chosen by hbm_sel[h].
module trinity_top
  import trinity_pkg::*;
#(
  parameter int unsigned NC        = 4,
  parameter int unsigned NHBM      = 2,
  parameter int unsigned LANES     = 256,
  parameter int unsigned LB_DEPTH  = 512,
  parameter int unsigned SPM_DEPTH = 10240,
  parameter int unsigned NMAX      = 65536,
  localparam int unsigned CW  = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned CPH = NC / NHBM,
  localparam int unsigned HW  = (CPH > 1) ? $clog2(CPH) : 1
)(
  input  logic              clk,
  input  logic              rst_n,
  input  cluster_ctl_t      ctl     [NC],
  input  logic              noc_a2a,
  input  logic [CW-1:0]     noc_src [NC],
  input  logic [NHBM-1:0]   hbm_in_v,
  input  word_t [LANES-1:0] hbm_in_d  [NHBM],
  input  logic [HW-1:0]     hbm_sel   [NHBM],
  output logic [NHBM-1:0]   hbm_out_v,
  output word_t [LANES-1:0] hbm_out_d [NHBM]
);
  logic [NC-1:0]     nin_v, nout_v, c_hv;
  word_t [LANES-1:0] nin_d [NC], nout_d [NC], c_hd [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cl
    trinity_cluster #(.LANES(LANES), .LB_DEPTH(LB_DEPTH), .SPM_DEPTH(SPM_DEPTH), .NMAX(NMAX)) u_cl (
      .clk, .rst_n, .ctl (ctl[c]),
      .noc_in_v (nin_v[c]), .noc_in_d (nin_d[c]), .noc_out_v (nout_v[c]), .noc_out_d (nout_d[c]),
      .hbm_in_v (hbm_in_v[c / CPH]), .hbm_in_d (hbm_in_d[c / CPH]),
      .hbm_out_v (c_hv[c]), .hbm_out_d (c_hd[c]));
  end

  trinity_icnoc #(.NC(NC), .LANES(LANES)) u_noc (
    .clk, .rst_n, .a2a (noc_a2a), .src (noc_src),
    .in_v (nout_v), .in_d (nout_d), .out_v (nin_v), .out_d (nin_d));

  always_comb begin
    for (int h = 0; h < NHBM; h++) begin
      hbm_out_v[h] = c_hv[h * CPH + int'(hbm_sel[h])];
      hbm_out_d[h] = c_hd[h * CPH + int'(hbm_sel[h])];
    end
  end
endmodule
