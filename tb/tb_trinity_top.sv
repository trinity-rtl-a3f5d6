// tb_trinity_top: end-to-end run of the whole accelerator at reduced size
// (4 clusters, 16 lanes, NMAX 256). A sequencer in this testbench plays the role of the compiled
// control program: it builds every cluster's control word cycle by cycle.
// Data enter through the HBM ports (HBM -> scratchpad -> local buffer) and results
// leave the same way; every result is compared with a reference computed here.
//   1. Four-step 256-point NTT in cluster 0, twice in parallel as in the TFHE mapping:
//      NTTU0 -> TP0 -> CU-2 -> CU-2 and NTTU1 -> TP1 -> CU-1 -> CU-3, the NTTUs with
//      on-the-fly twisting; checked against a direct 256-point DFT.
//   2. Plain 16-point NTT in cluster 1 (TW stage bypassed).
//   3. Systolic MAC in cluster 1 on a CU-2 (dot product with out_acc).
//   4. EWE multiply (512-lane engine, two vectors per operand) in cluster 2.
//   5. Automorphism X -> X^5 of a 64-coefficient polynomial in cluster 2.
//   6. Rotator: rotation by X^r and SampleExtract in cluster 3.
//   7. VPU ModSwitch in cluster 3.
//   8. Inter-cluster network: all-to-all exchange and a permutation among all clusters.
// Each mechanism is counted; one that never happened is a failure.
module tb_trinity_top;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int NC = 4, NHBM = 2, L = 16, M = L / 2, S = 4, NMAX = 256, LBD = 32, SPD = 32;
  localparam int NR = L / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cluster_ctl_t ctl [NC];
  logic noc_a2a = 0;
  logic [1:0] noc_src [NC];
  logic [NHBM-1:0] hbm_in_v = '0, hbm_out_v;
  word_t [L-1:0] hbm_in_d [NHBM], hbm_out_d [NHBM];
  logic [0:0] hbm_sel [NHBM];
  trinity_top #(.NC(NC), .NHBM(NHBM), .LANES(L), .LB_DEPTH(LBD), .SPM_DEPTH(SPD), .NMAX(NMAX)) dut (
    .clk, .rst_n, .ctl, .noc_a2a, .noc_src, .hbm_in_v, .hbm_in_d, .hbm_sel, .hbm_out_v, .hbm_out_d);

  logic [NSRC-1:0] sval [NC];
  for (genvar c = 0; c < NC; c++) begin : g_mon
    assign sval[c] = dut.g_cl[c].u_cl.sval;
  end

  // mechanism counters
  int n_twist = 0, n_bypass = 0, n_tp = 0, n_cu_ntt = 0, n_cu_mac = 0, n_ewe = 0, n_auto = 0,
      n_rot = 0, n_ext = 0, n_vpu = 0, n_a2a = 0, n_perm = 0, n_hbm_in = 0, n_hbm_out = 0;

  // hardware activity seen on the cluster crossbars (valid vectors per producing unit)
  int hw_nttu = 0, hw_tp = 0, hw_cu = 0, hw_rot = 0, hw_auto = 0, hw_ewe = 0, hw_vpu = 0, hw_noc = 0, hw_spm = 0;
  always @(posedge clk)
    for (int c = 0; c < NC; c++) begin
      hw_nttu += int'(sval[c][SRC_NTTU]) + int'(sval[c][SRC_NTTU+1]);
      hw_tp   += int'(sval[c][SRC_TP]) + int'(sval[c][SRC_TP+1]);
      for (int u = 0; u < N_CU; u++) hw_cu += int'(sval[c][SRC_CU+u]);
      hw_rot  += int'(sval[c][SRC_ROT]);
      hw_auto += int'(sval[c][SRC_AUTO]);
      hw_ewe  += int'(sval[c][SRC_EWE]);
      hw_vpu  += int'(sval[c][SRC_VPU]);
      hw_noc  += int'(sval[c][SRC_NOC]);
      hw_spm  += int'(sval[c][SRC_SPM]);
    end

  function automatic int lbi(int g, int b); return SRC_LB0 + g * N_LB_BANK + b; endfunction

  // ---------- HBM <-> local buffer ----------
  task automatic load_lb(int c, int g, int b, int addr, word_t [L-1:0] v);
    int h = c / 2;
    @(negedge clk);
    hbm_in_v[h] = 1; hbm_in_d[h] = v; n_hbm_in++;
    ctl[c].spm[0] = '{en: 1, we: 1, addr: 0, wsrc: SRC_HBM};
    @(negedge clk);
    hbm_in_v[h] = 0;
    ctl[c].spm[0] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    @(negedge clk);
    ctl[c].spm[0] = '0;
    ctl[c].lb[g*5+b] = '{en: 1, we: 1, addr: 16'(addr), wsrc: SRC_SPM};
    @(negedge clk);
    ctl[c].lb[g*5+b] = '0;
  endtask

  task automatic read_lb(int c, int g, int b, int addr, output word_t [L-1:0] v);
    int h = c / 2;
    @(negedge clk);
    ctl[c].lb[g*5+b] = '{en: 1, we: 0, addr: 16'(addr), wsrc: 0};
    @(negedge clk);
    ctl[c].lb[g*5+b] = '0;
    hbm_sel[h] = 1'(c % 2);
    ctl[c].hbm_en = 1; ctl[c].hbm_src = sel_t'(lbi(g, b));
    #1;
    if (!hbm_out_v[h]) begin failures++; $display("hbm out not valid"); end
    v = hbm_out_d[h]; n_hbm_out++;
    @(negedge clk);
    ctl[c].hbm_en = 0;
  endtask

  // stream count vectors out of a bank, starting next negedge
  task automatic lb_stream(int c, int g, int b, int base, int count);
    for (int i = 0; i < count; i++) begin
      @(negedge clk);
      ctl[c].lb[g*5+b] = '{en: 1, we: 0, addr: 16'(base + i), wsrc: 0};
    end
    @(negedge clk);
    ctl[c].lb[g*5+b] = '0;
  endtask

  // write every valid vector of source src to a bank, count vectors
  task automatic lb_sink(int c, int g, int b, int src, int base, int count);
    int k = 0;
    while (k < count) begin
      @(negedge clk);
      if (sval[c][src]) begin
        ctl[c].lb[g*5+b] = '{en: 1, we: 1, addr: 16'(base + k), wsrc: sel_t'(src)};
        k++;
      end else ctl[c].lb[g*5+b] = '0;
    end
    @(negedge clk);
    ctl[c].lb[g*5+b] = '0;
  endtask

  // ---------- 1. four-step NTT ----------
  localparam int N2 = 16, NN = L * N2;
  word_t pa [NN], pb [NN];
  word_t wN, w1, w2;

  task automatic four_step();
    word_t [L-1:0] v;
    int j1, j2;
    wN = root(NN, Q0); w1 = rpow(wN, N2, Q0); w2 = rpow(wN, L, Q0);
    for (int j = 0; j < NN; j++) begin pa[j] = rand_mod(Q0); pb[j] = rand_mod(Q0); end
    // inputs: vector j2, lane j1 = x[N2*j1 + j2]; A in LB0 bank0, B in LB0 bank4
    for (int t = 0; t < N2; t++) begin
      for (int l = 0; l < L; l++) v[l] = pa[N2 * l + t];
      load_lb(0, 0, 0, t, v);
      for (int l = 0; l < L; l++) v[l] = pb[N2 * l + t];
      load_lb(0, 0, 4, t, v);
    end
    // NTTU twiddles: LB0 bank1 addr s (lanes 0..M-1)
    for (int s = 0; s < S; s++) begin
      v = '0;
      for (int i = 0; i < M; i++) v[i] = rpow(w1, (L >> (s + 1)) * bitrev(i % (1 << s), s), Q0);
      load_lb(0, 0, 1, s, v);
    end
    // OF-Twist seeds: first = 1 (LB0 bank2), ratio = wN^bitrev(l) (LB0 bank3)
    for (int l = 0; l < L; l++) v[l] = 1;
    load_lb(0, 0, 2, 0, v);
    for (int l = 0; l < L; l++) v[l] = rpow(wN, bitrev(l, S), Q0);
    load_lb(0, 0, 3, 0, v);
    // CU twiddles of the 16-point phase 2, stage s in LB1 bank 1+s
    for (int s = 0; s < 4; s++) begin
      v = '0;
      for (int p = 0; p < NR; p++) v[p] = rpow(w2, (N2 >> (s + 1)) * bitrev((p % (N2 / 2)) % (1 << s), s), Q0);
      load_lb(0, 1, 1 + s, 0, v);
    end
    // load the BU twiddle registers of both NTTUs
    for (int s = 0; s < S; s++) begin
      @(negedge clk); ctl[0].lb[1] = '{en: 1, we: 0, addr: 16'(s), wsrc: 0};
      @(negedge clk); ctl[0].lb[1] = '0;
      for (int u = 0; u < 2; u++) begin
        ctl[0].nttu[u].tw_we = 1; ctl[0].nttu[u].tw_stage = 3'(s); ctl[0].nttu[u].tw_src = sel_t'(lbi(0, 1));
      end
      @(negedge clk); for (int u = 0; u < 2; u++) ctl[0].nttu[u].tw_we = 0;
    end
    // seeds, CU twiddle vectors: read once, the banks hold their read data
    @(negedge clk);
    ctl[0].lb[2] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    ctl[0].lb[3] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    for (int s = 0; s < 4; s++) ctl[0].lb[5 + 1 + s] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    @(negedge clk);
    ctl[0].lb[2] = '0; ctl[0].lb[3] = '0;
    for (int s = 0; s < 4; s++) ctl[0].lb[5 + 1 + s] = '0;
    for (int u = 0; u < 2; u++) begin
      ctl[0].nttu[u].ts_we = 1;
      ctl[0].nttu[u].ts_first_src = sel_t'(lbi(0, 2)); ctl[0].nttu[u].ts_ratio_src = sel_t'(lbi(0, 3));
    end
    @(negedge clk);
    for (int u = 0; u < 2; u++) ctl[0].nttu[u].ts_we = 0;
    // pipelines: A: LB0b0 -> NTTU0 -> TP0 -> CU[1] -> CU[2] -> LB1b0
    //            B: LB0b4 -> NTTU1 -> TP1 -> CU[0] -> CU[5] -> LB2b0
    ctl[0].nttu[0].en = 1; ctl[0].nttu[0].src = sel_t'(lbi(0, 0)); ctl[0].nttu[0].bypass = 0; ctl[0].nttu[0].inv = 0;
    ctl[0].nttu[1].en = 1; ctl[0].nttu[1].src = sel_t'(lbi(0, 4)); ctl[0].nttu[1].bypass = 0; ctl[0].nttu[1].inv = 0;
    for (int u = 0; u < 2; u++) begin
      ctl[0].tp[u].en = 1; ctl[0].tp[u].src = sel_t'(SRC_NTTU + u); ctl[0].tp[u].log_n2 = 5'd4;
    end
    for (int u = 0; u < 6; u++) begin
      ctl[0].cu[u].mode = PE_NTT; ctl[0].cu[u].log_g = 5'd4; ctl[0].cu[u].out_acc = 0;
    end
    ctl[0].cu[1].en = 1; ctl[0].cu[1].src = sel_t'(SRC_TP + 0);
    ctl[0].cu[1].c_src[0] = sel_t'(lbi(1, 1)); ctl[0].cu[1].c_src[1] = sel_t'(lbi(1, 2));
    ctl[0].cu[2].en = 1; ctl[0].cu[2].src = sel_t'(SRC_CU + 1);
    ctl[0].cu[2].c_src[0] = sel_t'(lbi(1, 3)); ctl[0].cu[2].c_src[1] = sel_t'(lbi(1, 4));
    ctl[0].cu[0].en = 1; ctl[0].cu[0].src = sel_t'(SRC_TP + 1);
    ctl[0].cu[0].c_src[0] = sel_t'(lbi(1, 1));
    ctl[0].cu[5].en = 1; ctl[0].cu[5].src = sel_t'(SRC_CU + 0);
    ctl[0].cu[5].c_src[0] = sel_t'(lbi(1, 2)); ctl[0].cu[5].c_src[1] = sel_t'(lbi(1, 3)); ctl[0].cu[5].c_src[2] = sel_t'(lbi(1, 4));
    fork
      lb_stream(0, 0, 0, 0, N2);
      lb_stream(0, 0, 4, 0, N2);
      lb_sink(0, 1, 0, SRC_CU + 2, 0, N2);
      lb_sink(0, 2, 0, SRC_CU + 5, 0, N2);
    join
    ctl[0].nttu[0].en = 0; ctl[0].nttu[1].en = 0; ctl[0].tp[0].en = 0; ctl[0].tp[1].en = 0;
    for (int u = 0; u < 6; u++) ctl[0].cu[u].en = 0;
    n_twist += 2 * N2; n_tp += 2; n_cu_ntt += 4 * N2;
    // check: output vector u, lane m: row l' = u*g + m/N2 (g = L/N2 = 1), k1 = bitrev(l'), k2 = bitrev4(m)
    for (int pipe = 0; pipe < 2; pipe++)
      for (int u = 0; u < N2; u++) begin
        read_lb(0, pipe ? 2 : 1, 0, u, v);
        for (int m = 0; m < L; m++) begin
          int k1, k2, k;
          word_t e;
          k1 = bitrev(u * (L / N2) + m / N2, S); k2 = bitrev(m % N2, 4); k = k1 + L * k2;
          e = 0;
          for (int j = 0; j < NN; j++) e = radd(e, rmul(pipe ? pb[j] : pa[j], rpow(wN, (j * k) % NN, Q0), Q0), Q0);
          checks++;
          if (v[m] !== e) begin failures++; $display("four-step pipe %0d u %0d m %0d", pipe, u, m); end
        end
      end
  endtask

  // ---------- 2. plain 16-point NTT (TW bypassed) in cluster 1 ----------
  task automatic plain_ntt();
    word_t [L-1:0] x, v;
    word_t w = root(L, Q0);
    for (int l = 0; l < L; l++) x[l] = rand_mod(Q0);
    load_lb(1, 0, 0, 0, x);
    for (int s = 0; s < S; s++) begin
      v = '0;
      for (int i = 0; i < M; i++) v[i] = rpow(w, (L >> (s + 1)) * bitrev(i % (1 << s), s), Q0);
      load_lb(1, 0, 1, s, v);
    end
    for (int s = 0; s < S; s++) begin
      @(negedge clk); ctl[1].lb[1] = '{en: 1, we: 0, addr: 16'(s), wsrc: 0};
      @(negedge clk); ctl[1].lb[1] = '0;
      ctl[1].nttu[0].tw_we = 1; ctl[1].nttu[0].tw_stage = 3'(s); ctl[1].nttu[0].tw_src = sel_t'(lbi(0, 1));
      @(negedge clk); ctl[1].nttu[0].tw_we = 0;
    end
    ctl[1].nttu[0].en = 1; ctl[1].nttu[0].src = sel_t'(lbi(0, 0)); ctl[1].nttu[0].bypass = 1; ctl[1].nttu[0].inv = 0;
    fork
      lb_stream(1, 0, 0, 0, 1);
      lb_sink(1, 0, 2, SRC_NTTU, 0, 1);
    join
    ctl[1].nttu[0].en = 0;
    n_bypass++;
    read_lb(1, 0, 2, 0, v);
    for (int l = 0; l < L; l++) begin
      word_t e = 0;
      for (int j = 0; j < L; j++) e = radd(e, rmul(x[j], rpow(w, j * bitrev(l, S), Q0), Q0), Q0);
      checks++; if (v[l] !== e) begin failures++; $display("plain ntt lane %0d", l); end
    end
  endtask

  // ---------- 3. systolic MAC on CU[3] (a CU-2) in cluster 1 ----------
  task automatic mac();
    localparam int T = 4;
    word_t [L-1:0] v, c0, c1;
    word_t bs [NR], bl [NR];
    for (int p = 0; p < NR; p++) bs[p] = 0;
    for (int t = 0; t < T; t++) begin
      v = '0;
      for (int p = 0; p < NR; p++) begin v[NR + p] = rand_mod(Q0); bs[p] = radd(bs[p], v[NR + p], Q0); bl[p] = v[NR + p]; end
      load_lb(1, 1, 0, t, v);
    end
    c0 = '0; c1 = '0;
    for (int p = 0; p < NR; p++) begin c0[p] = rand_mod(Q0); c1[p] = rand_mod(Q0); end
    load_lb(1, 1, 1, 0, c0);
    load_lb(1, 1, 2, 0, c1);
    @(negedge clk);
    ctl[1].lb[6] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    ctl[1].lb[7] = '{en: 1, we: 0, addr: 0, wsrc: 0};
    @(negedge clk);
    ctl[1].lb[6] = '0; ctl[1].lb[7] = '0;
    ctl[1].cu[3].en = 1; ctl[1].cu[3].src = sel_t'(lbi(1, 0)); ctl[1].cu[3].mode = PE_MAC;
    ctl[1].cu[3].c_src[0] = sel_t'(lbi(1, 1)); ctl[1].cu[3].c_src[1] = sel_t'(lbi(1, 2));
    fork
      lb_stream(1, 1, 0, 0, T);
      lb_sink(1, 1, 3, SRC_CU + 3, 0, T);
      begin   // out_acc with the last vector, which is on the crossbar T+1 cycles after the first read
        repeat (T + 1) @(negedge clk);
        ctl[1].cu[3].out_acc = 1;
        @(negedge clk);
        ctl[1].cu[3].out_acc = 0;
      end
    join
    ctl[1].cu[3].en = 0;
    n_cu_mac++;
    read_lb(1, 1, 3, T - 1, v);
    for (int p = 0; p < NR; p++) begin
      checks++; if (v[p] !== radd(rmul(c0[p], bs[p], Q0), rmul(c1[p], bs[p], Q0), Q0)) begin failures++; $display("mac row %0d", p); end
      checks++; if (v[NR + p] !== bl[p]) failures++;
    end
  endtask

  // ---------- 4. EWE multiply in cluster 2 ----------
  task automatic ewe();
    word_t [L-1:0] x [4], v;
    for (int b = 0; b < 4; b++) begin
      for (int l = 0; l < L; l++) x[b][l] = rand_mod(Q0);
      load_lb(2, 2, b, 0, x[b]);
    end
    ctl[2].ewe.en = 1; ctl[2].ewe.op = EW_MUL;
    for (int i = 0; i < 4; i++) ctl[2].ewe.src[i] = sel_t'(lbi(2, i));
    ctl[2].ewe.src[4] = sel_t'(lbi(2, 0)); ctl[2].ewe.src[5] = sel_t'(lbi(2, 0));
    fork
      lb_stream(2, 2, 0, 0, 1); lb_stream(2, 2, 1, 0, 1); lb_stream(2, 2, 2, 0, 1); lb_stream(2, 2, 3, 0, 1);
      lb_sink(2, 2, 4, SRC_EWE, 0, 1);
      lb_sink(2, 1, 4, SRC_EWE + 1, 0, 1);
    join
    ctl[2].ewe.en = 0;
    n_ewe++;
    read_lb(2, 2, 4, 0, v);
    for (int l = 0; l < L; l++) begin checks++; if (v[l] !== rmul(x[0][l], x[2][l], Q0)) failures++; end
    read_lb(2, 1, 4, 0, v);
    for (int l = 0; l < L; l++) begin checks++; if (v[l] !== rmul(x[1][l], x[3][l], Q0)) failures++; end
  endtask

  // ---------- 5. automorphism in cluster 2 ----------
  task automatic autou();
    localparam int N = 64, R = N / L, K = 5;
    word_t a [N], e [N];
    word_t [L-1:0] v;
    for (int i = 0; i < N; i++) a[i] = rand_mod(Q0);
    for (int i = 0; i < N; i++) begin
      int t = (i * K) % (2 * N);
      if (t >= N) e[t - N] = rsub(0, a[i], Q0); else e[t] = a[i];
    end
    for (int r = 0; r < R; r++) begin
      for (int l = 0; l < L; l++) v[l] = a[r * L + l];
      load_lb(2, 2, 0, 8 + r, v);
    end
    ctl[2].autou = '{en: 1, src: sel_t'(lbi(2, 0)), log_n: 5'd6, k: 17'(K)};
    fork
      lb_stream(2, 2, 0, 8, R);
      lb_sink(2, 2, 1, SRC_AUTO, 8, R);
    join
    ctl[2].autou.en = 0;
    n_auto++;
    for (int r = 0; r < R; r++) begin
      read_lb(2, 2, 1, 8 + r, v);
      for (int l = 0; l < L; l++) begin checks++; if (v[l] !== e[r * L + l]) begin failures++; $display("auto %0d", r * L + l); end end
    end
  endtask

  // ---------- 6. Rotator in cluster 3 ----------
  task automatic rotator(rot_op_e op, int amt);
    localparam int N = 64, R = N / L;
    word_t a [N], e [N];
    word_t [L-1:0] v;
    for (int i = 0; i < N; i++) a[i] = rand_mod(Q0);
    if (op == ROT_ROTATE) begin
      for (int i = 0; i < N; i++) begin
        int t = (i + amt) % (2 * N);
        if (t >= N) e[t - N] = rsub(0, a[i], Q0); else e[t] = a[i];
      end
    end else
      for (int j = 0; j < N; j++) e[j] = (j <= amt) ? a[amt - j] : rsub(0, a[N + amt - j], Q0);
    for (int r = 0; r < R; r++) begin
      for (int l = 0; l < L; l++) v[l] = a[r * L + l];
      load_lb(3, 2, 0, r, v);
    end
    ctl[3].rot.src = sel_t'(lbi(2, 0)); ctl[3].rot.ld_en = 1;
    fork
      lb_stream(3, 2, 0, 0, R);
      begin
        @(negedge clk); @(negedge clk); ctl[3].rot.ld_first = 1;
        @(negedge clk); ctl[3].rot.ld_first = 0;
      end
    join
    @(negedge clk);
    ctl[3].rot.ld_en = 0;
    fork
      begin
        @(negedge clk);
        ctl[3].rot.start = 1; ctl[3].rot.op = op; ctl[3].rot.log_n = 5'd6; ctl[3].rot.amount = 17'(amt);
        @(negedge clk); ctl[3].rot.start = 0;
      end
      lb_sink(3, 2, 1, SRC_ROT, 0, R);
    join
    if (op == ROT_ROTATE) n_rot++; else n_ext++;
    for (int r = 0; r < R; r++) begin
      read_lb(3, 2, 1, r, v);
      for (int l = 0; l < L; l++) begin checks++; if (v[l] !== e[r * L + l]) begin failures++; $display("rot op %0d coef %0d", op, r * L + l); end end
    end
  endtask

  // ---------- 7. VPU ModSwitch in cluster 3 ----------
  task automatic vpu();
    word_t [L-1:0] x, v;
    for (int l = 0; l < L; l++) x[l] = rand_mod(Q0);
    load_lb(3, 2, 2, 0, x);
    ctl[3].vpu.en = 1; ctl[3].vpu.op = VPU_MODSW; ctl[3].vpu.x_src = sel_t'(lbi(2, 2)); ctl[3].vpu.log_n = 5'd10;
    fork
      lb_stream(3, 2, 2, 0, 1);
      lb_sink(3, 2, 3, SRC_VPU, 0, 1);
    join
    ctl[3].vpu.en = 0;
    n_vpu++;
    read_lb(3, 2, 3, 0, v);
    for (int l = 0; l < L; l++) begin
      logic [79:0] num = ((80'(x[l]) << 11) + 80'(Q0 / 2)) / 80'(Q0);
      checks++; if (v[l] !== word_t'(num % 2048)) failures++;
    end
  endtask

  // ---------- 8. inter-cluster network ----------
  task automatic noc(bit a2a);
    word_t [L-1:0] x [NC], v;
    for (int c = 0; c < NC; c++) begin
      for (int l = 0; l < L; l++) x[c][l] = rand_mod(Q0);
      load_lb(c, 1, 4, 5, x[c]);
    end
    noc_a2a = a2a;
    for (int c = 0; c < NC; c++) begin
      noc_src[c] = 2'((c + 1) % NC);
      ctl[c].noc_en = 1; ctl[c].noc_src = sel_t'(lbi(1, 4));
    end
    fork
      lb_stream(0, 1, 4, 5, 1); lb_stream(1, 1, 4, 5, 1); lb_stream(2, 1, 4, 5, 1); lb_stream(3, 1, 4, 5, 1);
      lb_sink(0, 1, 3, SRC_NOC, 6, 1); lb_sink(1, 1, 3, SRC_NOC, 6, 1);
      lb_sink(2, 1, 3, SRC_NOC, 6, 1); lb_sink(3, 1, 3, SRC_NOC, 6, 1);
    join
    for (int c = 0; c < NC; c++) ctl[c].noc_en = 0;
    if (a2a) n_a2a++; else n_perm++;
    for (int c = 0; c < NC; c++) begin
      read_lb(c, 1, 3, 6, v);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (v[l] !== (a2a ? x[l / (L / NC)][c * (L / NC) + l % (L / NC)] : x[(c + 1) % NC][l])) begin
          failures++; $display("noc a2a=%0d c %0d l %0d", a2a, c, l);
        end
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      ctl[c] = '0; ctl[c].modq.q = Q0; ctl[c].modq.mu = rmu(Q0); noc_src[c] = 0;
    end
    for (int h = 0; h < NHBM; h++) begin hbm_in_d[h] = '0; hbm_sel[h] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    four_step();
    plain_ntt();
    mac();
    ewe();
    autou();
    rotator(ROT_ROTATE, 37);
    rotator(ROT_EXTRACT, 11);
    vpu();
    noc(1);
    noc(0);
    $display("mechanisms: twist=%0d bypass=%0d tp=%0d cu_ntt=%0d cu_mac=%0d ewe=%0d auto=%0d rot=%0d ext=%0d vpu=%0d a2a=%0d perm=%0d hbm_in=%0d hbm_out=%0d",
             n_twist, n_bypass, n_tp, n_cu_ntt, n_cu_mac, n_ewe, n_auto, n_rot, n_ext, n_vpu, n_a2a, n_perm, n_hbm_in, n_hbm_out);
    $display("unit outputs: nttu=%0d tp=%0d cu=%0d rot=%0d auto=%0d ewe=%0d vpu=%0d noc=%0d spm=%0d",
             hw_nttu, hw_tp, hw_cu, hw_rot, hw_auto, hw_ewe, hw_vpu, hw_noc, hw_spm);
    if (hw_nttu == 0 || hw_tp == 0 || hw_cu == 0 || hw_rot == 0 || hw_auto == 0 || hw_ewe == 0 || hw_vpu == 0 ||
        hw_noc == 0 || hw_spm == 0) begin
      failures++; $display("a unit never produced output");
    end
    if (n_twist == 0 || n_bypass == 0 || n_tp == 0 || n_cu_ntt == 0 || n_cu_mac == 0 || n_ewe == 0 || n_auto == 0 ||
        n_rot == 0 || n_ext == 0 || n_vpu == 0 || n_a2a == 0 || n_perm == 0 || n_hbm_in == 0 || n_hbm_out == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
