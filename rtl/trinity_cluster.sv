// trinity_cluster: one Trinity cluster.
//
// Contents, as in the paper: Group 0 (two NTT units, two transpose units, local
// buffer), Group 1 (configurable units CU-1, 4 x CU-2, CU-3, local buffer), Group 2
// (Rotator, automorphism unit, element-wise engine, vector processing unit, local
// buffer) and the scratchpad shared by the groups, the HBM port and the inter-cluster
// network. Every datapath is LANES wide (the EWE takes two vectors, 2*LANES lanes).
//
// Network: the inter-group and intra-group networks are modelled together as one
// combinational crossbar over the NSRC source vectors (local-buffer and scratchpad
// bank read data, unit outputs, inter-cluster input, HBM input; see the SRC_* constants
// in trinity_pkg). Each unit input, each memory bank's write port and each outgoing port
// names its source in the control word. Every unit registers its outputs, so the
// crossbar closes no combinational loop.
//
// Control: a cluster_ctl_t word per cycle from the sequencer, which runs the
// statically scheduled kernel flow (the paper gives no instruction format). A unit
// consumes a vector in a cycle when its enable is set and its source is valid; the
// modulus in the word applies to every unit fed in that cycle. Timing: memories and
// units have the latencies documented in their modules; the crossbar adds none.
module trinity_cluster
  import trinity_pkg::*;
#(
  parameter int unsigned LANES     = 256,
  parameter int unsigned LB_DEPTH  = 512,
  parameter int unsigned SPM_DEPTH = 10240,
  parameter int unsigned NMAX      = 65536,
  localparam int unsigned M   = LANES / 2,
  localparam int unsigned NR  = LANES / 2,
  localparam int unsigned S   = $clog2(LANES),
  localparam int unsigned SW  = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned LW  = $clog2(LANES) + 1,
  localparam int unsigned LGW = $clog2($clog2(LANES) + 1),
  localparam int unsigned NW  = $clog2(NMAX) + 1,
  localparam int unsigned LAW = $clog2(LB_DEPTH),
  localparam int unsigned SAW = $clog2(SPM_DEPTH)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  cluster_ctl_t      ctl,
  // inter-cluster network
  input  logic              noc_in_v,
  input  word_t [LANES-1:0] noc_in_d,
  output logic              noc_out_v,
  output word_t [LANES-1:0] noc_out_d,
  // HBM port
  input  logic              hbm_in_v,
  input  word_t [LANES-1:0] hbm_in_d,
  output logic              hbm_out_v,
  output word_t [LANES-1:0] hbm_out_d
);
  word_t [LANES-1:0] sv [NSRC];      // source vectors
  logic  [NSRC-1:0]  sval;           // their valids

  // ---------------- memories ----------------
  localparam int unsigned NLB = 3 * N_LB_BANK;
  logic [N_LB_BANK-1:0]  lb_en [3], lb_we [3];
  logic [LAW-1:0]        lb_addr [3][N_LB_BANK];
  word_t [LANES-1:0]     lb_wd [3][N_LB_BANK], lb_rd [3][N_LB_BANK];
  logic [NLB-1:0]        lb_rv;
  logic [N_SPM_BANK-1:0] sp_en, sp_we, sp_rv;
  logic [SAW-1:0]        sp_addr [N_SPM_BANK];
  word_t [LANES-1:0]     sp_wd [N_SPM_BANK], sp_rd [N_SPM_BANK];

  always_comb begin
    for (int g = 0; g < 3; g++)
      for (int b = 0; b < N_LB_BANK; b++) begin
        mem_ctl_t mc;
        mc = ctl.lb[g*N_LB_BANK + b];
        lb_en[g][b]   = mc.en && (!mc.we || sval[mc.wsrc]);
        lb_we[g][b]   = mc.we;
        lb_addr[g][b] = mc.addr[LAW-1:0];
        lb_wd[g][b]   = sv[mc.wsrc];
      end
    for (int b = 0; b < N_SPM_BANK; b++) begin
      sp_en[b]   = ctl.spm[b].en && (!ctl.spm[b].we || sval[ctl.spm[b].wsrc]);
      sp_we[b]   = ctl.spm[b].we;
      sp_addr[b] = ctl.spm[b].addr[SAW-1:0];
      sp_wd[b]   = sv[ctl.spm[b].wsrc];
    end
  end
  for (genvar g = 0; g < 3; g++) begin : g_lb
    trinity_lbuf #(.LANES(LANES), .NBANK(N_LB_BANK), .DEPTH(LB_DEPTH)) u_lb (
      .clk, .en (lb_en[g]), .we (lb_we[g]), .addr (lb_addr[g]), .wdata (lb_wd[g]), .rdata (lb_rd[g]));
  end
  trinity_spm #(.LANES(LANES), .NBANK(N_SPM_BANK), .DEPTH(SPM_DEPTH)) u_spm (
    .clk, .en (sp_en), .we (sp_we), .addr (sp_addr), .wdata (sp_wd), .rdata (sp_rd));
  always_ff @(posedge clk) begin
    if (!rst_n) begin lb_rv <= '0; sp_rv <= '0; end
    else begin
      for (int g = 0; g < 3; g++)
        for (int b = 0; b < N_LB_BANK; b++) lb_rv[g*N_LB_BANK + b] <= lb_en[g][b] && !lb_we[g][b];
      for (int b = 0; b < N_SPM_BANK; b++) sp_rv[b] <= sp_en[b] && !sp_we[b];
    end
  end

  // ---------------- Group 0: NTTU and TP ----------------
  logic [1:0] nt_v, tp_v;
  word_t [LANES-1:0] nt_o [2], tp_o [2];
  for (genvar u = 0; u < 2; u++) begin : g_g0
    nttu_ctl_t c;
    assign c = ctl.nttu[u];
    trinity_nttu #(.M(M)) u_nttu (
      .clk, .rst_n,
      .tw_we (c.tw_we), .tw_stage (c.tw_stage[SW-1:0]), .tw_d (sv[c.tw_src][M-1:0]),
      .ts_we (c.ts_we), .ts_first (sv[c.ts_first_src]), .ts_ratio (sv[c.ts_ratio_src]),
      .in_v (c.en && sval[c.src]), .inv (c.inv), .tw_bypass (c.bypass), .modq (ctl.modq),
      .in_d (sv[c.src]), .out_v (nt_v[u]), .out_d (nt_o[u]));
    trinity_tp #(.LANES(LANES)) u_tp (
      .clk, .rst_n, .log_n2 (ctl.tp[u].log_n2[LGW-1:0]),
      .in_v (ctl.tp[u].en && sval[ctl.tp[u].src]), .in_d (sv[ctl.tp[u].src]),
      .out_v (tp_v[u]), .out_d (tp_o[u]));
  end

  // ---------------- Group 1: CU-1, 4 x CU-2, CU-3 ----------------
  logic [N_CU-1:0] cu_v;
  word_t [LANES-1:0] cu_o [N_CU];
  for (genvar u = 0; u < N_CU; u++) begin : g_cu
    localparam int unsigned X = (u == 0) ? 1 : (u == N_CU - 1) ? 3 : 2;
    cu_ctl_t c;
    word_t [NR-1:0] cc [X];
    assign c = ctl.cu[u];
    for (genvar k = 0; k < X; k++) begin : g_c
      assign cc[k] = sv[c.c_src[k]][NR-1:0];
    end
    trinity_cu #(.X(X), .NR(NR)) u_cu (
      .clk, .rst_n, .in_v (c.en && sval[c.src]), .mode (c.mode), .log_g (c.log_g[LGW-1:0]),
      .out_acc (c.out_acc), .modq (ctl.modq), .in_d (sv[c.src]), .c (cc),
      .out_v (cu_v[u]), .out_d (cu_o[u]));
  end

  // ---------------- Group 2: Rotator, AutoU, EWE, VPU ----------------
  logic rot_v, au_v, ewe_v, vpu_v;
  word_t [LANES-1:0] rot_o, au_o, vpu_o;
  word_t [2*LANES-1:0] ewe_x, ewe_y, ewe_z, ewe_o;
  trinity_rotator #(.LANES(LANES), .NMAX(NMAX)) u_rot (
    .clk, .rst_n, .modq (ctl.modq),
    .ld_first (ctl.rot.ld_first), .ld_v (ctl.rot.ld_en && sval[ctl.rot.src]), .ld_d (sv[ctl.rot.src]),
    .start (ctl.rot.start), .op (ctl.rot.op), .log_n (ctl.rot.log_n), .amount (ctl.rot.amount[NW-1:0]),
    .out_v (rot_v), .out_d (rot_o));
  trinity_autou #(.LANES(LANES), .NMAX(NMAX)) u_auto (
    .clk, .rst_n, .log_n (ctl.autou.log_n), .k (ctl.autou.k[NW-1:0]), .modq (ctl.modq),
    .in_v (ctl.autou.en && sval[ctl.autou.src]), .in_d (sv[ctl.autou.src]),
    .out_v (au_v), .out_d (au_o));
  assign ewe_x = {sv[ctl.ewe.src[1]], sv[ctl.ewe.src[0]]};
  assign ewe_y = {sv[ctl.ewe.src[3]], sv[ctl.ewe.src[2]]};
  assign ewe_z = {sv[ctl.ewe.src[5]], sv[ctl.ewe.src[4]]};
  trinity_ewe #(.LANES(2*LANES)) u_ewe (
    .clk, .rst_n, .in_v (ctl.ewe.en && sval[ctl.ewe.src[0]]), .op (ctl.ewe.op), .modq (ctl.modq),
    .x (ewe_x), .y (ewe_y), .z (ewe_z), .out_v (ewe_v), .out_d (ewe_o));
  trinity_vpu #(.LANES(LANES)) u_vpu (
    .clk, .rst_n, .in_v (ctl.vpu.en && sval[ctl.vpu.x_src]), .op (ctl.vpu.op), .modq (ctl.modq),
    .log_n (ctl.vpu.log_n), .base_log (ctl.vpu.base_log), .dig (ctl.vpu.dig),
    .a (sv[ctl.vpu.a_src][ctl.vpu.a_lane[LW-2:0]]), .x (sv[ctl.vpu.x_src]), .ksk (sv[ctl.vpu.ksk_src]),
    .out_v (vpu_v), .out_d (vpu_o));

  // ---------------- source vectors ----------------
  always_comb begin
    for (int g = 0; g < 3; g++)
      for (int b = 0; b < N_LB_BANK; b++) begin
        sv[SRC_LB0 + g*N_LB_BANK + b]   = lb_rd[g][b];
        sval[SRC_LB0 + g*N_LB_BANK + b] = lb_rv[g*N_LB_BANK + b];
      end
    for (int b = 0; b < N_SPM_BANK; b++) begin sv[SRC_SPM + b] = sp_rd[b]; sval[SRC_SPM + b] = sp_rv[b]; end
    for (int u = 0; u < 2; u++) begin
      sv[SRC_NTTU + u] = nt_o[u]; sval[SRC_NTTU + u] = nt_v[u];
      sv[SRC_TP + u]   = tp_o[u]; sval[SRC_TP + u]   = tp_v[u];
    end
    for (int u = 0; u < N_CU; u++) begin sv[SRC_CU + u] = cu_o[u]; sval[SRC_CU + u] = cu_v[u]; end
    sv[SRC_ROT]     = rot_o;                 sval[SRC_ROT]     = rot_v;
    sv[SRC_AUTO]    = au_o;                  sval[SRC_AUTO]    = au_v;
    sv[SRC_EWE]     = ewe_o[LANES-1:0];      sval[SRC_EWE]     = ewe_v;
    sv[SRC_EWE + 1] = ewe_o[2*LANES-1:LANES]; sval[SRC_EWE + 1] = ewe_v;
    sv[SRC_VPU]     = vpu_o;                 sval[SRC_VPU]     = vpu_v;
    sv[SRC_NOC]     = noc_in_d;              sval[SRC_NOC]     = noc_in_v;
    sv[SRC_HBM]     = hbm_in_d;              sval[SRC_HBM]     = hbm_in_v;
  end

  assign noc_out_v = ctl.noc_en && sval[ctl.noc_src];
  assign noc_out_d = sv[ctl.noc_src];
  assign hbm_out_v = ctl.hbm_en && sval[ctl.hbm_src];
  assign hbm_out_d = sv[ctl.hbm_src];
endmodule
