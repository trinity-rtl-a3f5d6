// tb_trinity_rotator: Rotator at LANES=8, NMAX=64. Loads random polynomials of N=8, 32
// and 64, then checks negacyclic rotations a(X)*X^r for r across [0,2N) and
// SampleExtract masks for several indices against a direct computation, and the
// 2+u cycle timing of output vector u after the start pulse.
module tb_trinity_rotator;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8, NMAX = 64, NW = $clog2(NMAX) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  modq_t modq;
  logic ld_first = 0, ld_v = 0, start = 0, out_v;
  rot_op_e op = ROT_ROTATE;
  logic [4:0] log_n = 3;
  logic [NW-1:0] amount = 0;
  word_t [L-1:0] ld_d, out_d;
  trinity_rotator #(.LANES(L), .NMAX(NMAX)) dut (.clk, .rst_n, .modq, .ld_first, .ld_v, .ld_d,
    .start, .op, .log_n, .amount, .out_v, .out_d);
  word_t a [NMAX];

  task automatic emit(int lg, rot_op_e o, int amt);
    int n = 1 << lg, rows = n / L, got = 0, t0;
    word_t e [NMAX];
    for (int j = 0; j < n; j++) e[j] = 0;
    if (o == ROT_ROTATE) begin
      for (int i = 0; i < n; i++) begin
        int t = (i + amt) % (2 * n);
        if (t >= n) e[t - n] = rsub(0, a[i], Q0); else e[t] = a[i];
      end
    end else begin
      for (int j = 0; j < n; j++) e[j] = (j <= amt) ? a[amt - j] : rsub(0, a[n + amt - j], Q0);
    end
    @(negedge clk); start = 1; op = o; log_n = 5'(lg); amount = NW'(amt); t0 = cyc;
    @(negedge clk); start = 0;
    while (got < rows) begin
      @(posedge clk); #1;
      if (out_v) begin
        checks++; if (cyc - t0 != 2 + got) failures++;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (out_d[l] !== e[got * L + l]) begin failures++; $display("op %0d n %0d amt %0d j %0d", o, n, amt, got * L + l); end
        end
        got++;
      end
    end
  endtask

  initial begin
    modq.q = Q0; modq.mu = rmu(Q0);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int lg_ = 0; lg_ < 3; lg_++) begin
      int lg = (lg_ == 0) ? 3 : (lg_ == 1) ? 5 : 6;
      int n = 1 << lg;
      for (int i = 0; i < n; i++) a[i] = rand_mod(Q0);
      for (int t = 0; t < n / L; t++) begin
        @(negedge clk); ld_v = 1; ld_first = (t == 0);
        for (int l = 0; l < L; l++) ld_d[l] = a[t * L + l];
      end
      @(negedge clk); ld_v = 0; ld_first = 0;
      for (int r = 0; r < 6; r++) emit(lg, ROT_ROTATE, (r == 0) ? 0 : (r == 5) ? 2 * n - 1 : $urandom % (2 * n));
      for (int r = 0; r < 4; r++) emit(lg, ROT_EXTRACT, (r == 0) ? 0 : (r == 3) ? n - 1 : $urandom % n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
