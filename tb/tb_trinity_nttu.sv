// tb_trinity_nttu: NTTU at M=8 (16-point). Loads the documented twiddle schedule,
// streams random vectors back to back and compares every output lane with a directly
// computed DFT (bit-reversed lane order), for the forward and inverse modes, and with
// the TW stage enabled (outputs times first*ratio^k for the k-th vector). Checks the
// latency of S+1 cycles and the one-vector-per-cycle rate.
module tb_trinity_nttu;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned M = 8, N = 2*M, S = $clog2(N);
  localparam int unsigned SW = $clog2(S);
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

  logic tw_we = 0, ts_we = 0, in_v = 0, inv = 0, byp = 1;
  logic [SW-1:0] tw_stage = 0;
  word_t [M-1:0] tw_d;
  word_t [N-1:0] ts_first, ts_ratio, in_d, out_d;
  logic out_v;
  modq_t modq;
  trinity_nttu #(.M(M)) dut (.clk, .rst_n, .tw_we, .tw_stage, .tw_d, .ts_we, .ts_first, .ts_ratio,
    .in_v, .inv, .tw_bypass(byp), .modq, .in_d, .out_v, .out_d);

  localparam int NV = 6;
  word_t [N-1:0] xin [NV];
  int unsigned t_in [NV];
  word_t w, wi;

  task automatic load_tw(bit inverse);
    for (int s = 0; s < S; s++) begin
      @(negedge clk);
      tw_we = 1; tw_stage = SW'(s);
      for (int i = 0; i < M; i++)
        tw_d[i] = inverse ? rpow(wi, (1 << s) * (i >> s), Q0)
                          : rpow(w, (N >> (s+1)) * bitrev(i % (1 << s), s), Q0);
    end
    @(negedge clk); tw_we = 0;
  endtask

  // run NV vectors; mode 0 fwd, 1 inverse, 2 fwd + twist
  task automatic run(int mode);
    int got = 0;
    word_t f [N], r [N];
    load_tw(mode == 1);
    if (mode == 2) begin
      @(negedge clk); ts_we = 1;
      for (int l = 0; l < N; l++) begin
        f[l] = rand_mod(Q0); r[l] = rand_mod(Q0);
        ts_first[l] = f[l]; ts_ratio[l] = r[l];
      end
      @(negedge clk); ts_we = 0;
    end
    for (int k = 0; k < NV; k++)
      for (int l = 0; l < N; l++) xin[k][l] = rand_mod(Q0);
    fork
      begin
        for (int k = 0; k < NV; k++) begin
          @(negedge clk);
          in_v = 1; inv = (mode == 1); byp = (mode != 2); in_d = xin[k]; t_in[k] = cyc;
        end
        @(negedge clk); in_v = 0;
      end
      begin
        while (got < NV) begin
          @(posedge clk); #1;
          if (out_v) begin
            checks++;
            if (cyc - t_in[got] != S + 1) begin failures++; $display("latency %0d", cyc - t_in[got]); end
            for (int l = 0; l < N; l++) begin
              word_t e = 0;
              int unsigned kk = bitrev(l, S);
              for (int j = 0; j < N; j++)
                e = radd(e, rmul(xin[got][j], rpow((mode == 1) ? wi : w, j * kk, Q0), Q0), Q0);
              if (mode == 2) e = rmul(e, rmul(f[l], rpow(r[l], got, Q0), Q0), Q0);
              checks++;
              if (out_d[l] !== e) begin failures++; $display("mode %0d vec %0d lane %0d got %0d exp %0d", mode, got, l, out_d[l], e); end
            end
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    modq.q = Q0; modq.mu = rmu(Q0);
    w = root(N, Q0); wi = rpow(w, N - 1, Q0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0); run(1); run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
