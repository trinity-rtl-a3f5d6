// tb_trinity_cu: CU-3 and CU-2 with NR=4 (8 lanes).
//  * CU-3, log_g=3: one 8-point forward NTT and one inverse NTT per vector, compared
//    with a direct DFT (bit-reversed lane order), several vectors back to back.
//  * CU-2, log_g=2: two independent 4-point NTTs per vector.
//  * CU-3 in MAC mode: rounds of T vectors with out_acc on the last; the emitted a of
//    each row must be a_in + sum_k c_k * sum_t b_t, b must pass, and the accumulators
//    must restart after each round. Latency X cycles is checked.
module tb_trinity_cu;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NR = 4, L = 2*NR, LW = $clog2($clog2(L) + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  modq_t modq;
  logic v3 = 0, v2 = 0, oa = 0;
  pe_mode_e md = PE_NTT;
  logic [LW-1:0] lg3 = 3, lg2 = 2;
  word_t [L-1:0] d3, d2, o3, o2;
  word_t [NR-1:0] c3 [3];
  word_t [NR-1:0] c2 [2];
  logic ov3, ov2, ov2d;
  word_t [L-1:0] o2d;
  always @(posedge clk) begin o2d <= o2; ov2d <= ov2; end   // CU-2 is one cycle earlier than CU-3
  trinity_cu #(.X(3), .NR(NR)) u3 (.clk, .rst_n, .in_v(v3), .mode(md), .log_g(lg3), .out_acc(oa),
    .modq, .in_d(d3), .c(c3), .out_v(ov3), .out_d(o3));
  trinity_cu #(.X(2), .NR(NR)) u2 (.clk, .rst_n, .in_v(v2), .mode(PE_NTT), .log_g(lg2), .out_acc(1'b0),
    .modq, .in_d(d2), .c(c2), .out_v(ov2), .out_d(o2));

  // forward / inverse twiddle schedule for G-point groups (G = 2^s_total)
  function automatic word_t twf(int unsigned g, int unsigned s, int unsigned p, bit inv);
    word_t w = root(g, Q0);
    int unsigned i = p % (g / 2);
    if (inv) return rpow(rpow(w, g - 1, Q0), (1 << s) * (i >> s), Q0);
    return rpow(w, (g >> (s + 1)) * bitrev(i % (1 << s), s), Q0);
  endfunction
  function automatic word_t dft(word_t [L-1:0] x, int unsigned base, int unsigned g, int unsigned k, bit inv);
    word_t w = root(g, Q0), e = 0;
    if (inv) w = rpow(w, g - 1, Q0);
    for (int j = 0; j < g; j++) e = radd(e, rmul(x[base + j], rpow(w, j * k, Q0), Q0), Q0);
    return e;
  endfunction

  task automatic ntt_test(bit inv);
    localparam int NV = 4;
    word_t [L-1:0] x3 [NV], x2 [NV];
    int unsigned t0 [NV];
    int got = 0;
    md = inv ? PE_INTT : PE_NTT;
    for (int s = 0; s < 3; s++) for (int p = 0; p < NR; p++) c3[s][p] = twf(8, s, p, inv);
    for (int s = 0; s < 2; s++) for (int p = 0; p < NR; p++) c2[s][p] = twf(4, s, p, 0);
    for (int k = 0; k < NV; k++) for (int l = 0; l < L; l++) begin x3[k][l] = rand_mod(Q0); x2[k][l] = rand_mod(Q0); end
    fork
      for (int k = 0; k < NV; k++) begin
        @(negedge clk); v3 = 1; v2 = !inv; d3 = x3[k]; d2 = x2[k]; t0[k] = cyc;
        if (k == NV - 1) begin @(negedge clk); v3 = 0; v2 = 0; end
      end
      while (got < NV) begin
        @(posedge clk); #1;
        if (ov3) begin
          checks++; if (cyc - t0[got] != 3) failures++;
          for (int l = 0; l < L; l++) begin
            checks++;
            if (o3[l] !== dft(x3[got], 0, 8, bitrev(l, 3), inv)) begin failures++; $display("cu3 inv=%0d lane %0d", inv, l); end
          end
          if (!inv) begin
            checks++; if (!ov2d) failures++;
            for (int l = 0; l < L; l++) begin
              checks++;
              if (o2d[l] !== dft(x2[got], (l / 4) * 4, 4, bitrev(l % 4, 2), 0)) begin failures++; $display("cu2 lane %0d", l); end
            end
          end
          got++;
        end
      end
    join
  endtask

  task automatic mac_round(int T);
    word_t bsum [NR], ain [NR], bl [NR];
    word_t e;
    md = PE_MAC;
    for (int k = 0; k < 3; k++) for (int p = 0; p < NR; p++) c3[k][p] = rand_mod(Q0);
    for (int p = 0; p < NR; p++) begin bsum[p] = 0; ain[p] = rand_mod(Q0); end
    for (int t = 0; t < T; t++) begin
      @(negedge clk); v3 = 1; oa = (t == T - 1);
      for (int p = 0; p < NR; p++) begin
        d3[p] = (t == T - 1) ? ain[p] : 0;
        d3[p + NR] = rand_mod(Q0); bsum[p] = radd(bsum[p], d3[p + NR], Q0); bl[p] = d3[p + NR];
      end
    end
    @(negedge clk); v3 = 0; oa = 0;
    repeat (2) @(negedge clk);    // last vector leaves column 3 after 3 cycles
    #0;
    for (int p = 0; p < NR; p++) begin
      e = ain[p];
      for (int k = 0; k < 3; k++) e = radd(e, rmul(c3[k][p], bsum[p], Q0), Q0);
      checks++; if (o3[p] !== e) begin failures++; $display("mac row %0d got %0d exp %0d", p, o3[p], e); end
      checks++; if (o3[p + NR] !== bl[p]) failures++;
    end
  endtask

  initial begin
    modq.q = Q0; modq.mu = rmu(Q0);
    for (int k = 0; k < 3; k++) c3[k] = '0;
    for (int k = 0; k < 2; k++) c2[k] = '0;
    d3 = '0; d2 = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    ntt_test(0); ntt_test(1);
    mac_round(5); mac_round(3); mac_round(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
