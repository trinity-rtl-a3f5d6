// tb_trinity_autou: automorphism unit at LANES=8, NMAX=64. For N = 8, 32 and 64 and
// several odd k (powers of 5 among them) the output polynomial must equal a(X^k) mod
// (X^N+1), computed here coefficient by coefficient; two blocks run back to back.
module tb_trinity_autou;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8, NMAX = 64, NW = $clog2(NMAX) + 1;
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
  logic [4:0] log_n = 3;
  logic [NW-1:0] k = 1;
  modq_t modq;
  logic in_v = 0, out_v;
  word_t [L-1:0] in_d, out_d;
  trinity_autou #(.LANES(L), .NMAX(NMAX)) dut (.clk, .rst_n, .log_n, .k, .modq, .in_v, .in_d, .out_v, .out_d);

  word_t a [2][NMAX], e [2][NMAX];
  task automatic run(int lg, int kk0, int kk1);
    int n = 1 << lg, rows = n / L, got = 0;
    for (int b = 0; b < 2; b++) begin
      int kk = b ? kk1 : kk0;
      for (int i = 0; i < n; i++) a[b][i] = rand_mod(Q0);
      for (int i = 0; i < n; i++) begin
        int t = (i * kk) % (2 * n);
        if (t >= n) e[b][t - n] = rsub(0, a[b][i], Q0); else e[b][t] = a[b][i];
      end
    end
    fork
      for (int b = 0; b < 2; b++)
        for (int t = 0; t < rows; t++) begin
          @(negedge clk); in_v = 1; log_n = 5'(lg); k = NW'(b ? kk1 : kk0);
          for (int l = 0; l < L; l++) in_d[l] = a[b][t * L + l];
          if (b == 1 && t == rows - 1) begin @(negedge clk); in_v = 0; end
        end
      while (got < 2 * rows) begin
        @(posedge clk); #1;
        if (out_v) begin
          int b = got / rows, u = got % rows;
          for (int l = 0; l < L; l++) begin
            checks++;
            if (out_d[l] !== e[b][u * L + l]) begin failures++; $display("n %0d blk %0d coef %0d", n, b, u * L + l); end
          end
          got++;
        end
      end
    join
  endtask
  initial begin
    modq.q = Q0; modq.mu = rmu(Q0);
    repeat (2) @(negedge clk); rst_n = 1;
    run(3, 5, 3); run(5, 25, 63); run(6, 125 % 128, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
