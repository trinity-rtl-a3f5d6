// tb_trinity_tp: transpose unit at LANES=16. For every N2 = 2..16 streams one block
// (and, for N2=16 and N2=4, two blocks back to back) and checks each output lane against
// the definition: out vector u, lane m = element (u*L/N2 + m/N2, m mod N2) of the input,
// where input vector t lane l is element (l, t). Checks that a block's first output
// leaves 2 cycles after its last input and the rest follow one per cycle.
module tb_trinity_tp;
  import trinity_pkg::*;
  localparam int unsigned L = 16, LW = $clog2($clog2(L) + 1);
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
  logic [LW-1:0] log_n2 = 1;
  logic in_v = 0, out_v;
  word_t [L-1:0] in_d, out_d;
  trinity_tp #(.LANES(L)) dut (.clk, .rst_n, .log_n2, .in_v, .in_d, .out_v, .out_d);

  word_t blk [2][L][L];   // [block][t][l]
  task automatic run(int lg, int nblk);
    int n2 = 1 << lg, got = 0, t_last[2];
    fork
      for (int b = 0; b < nblk; b++)
        for (int t = 0; t < n2; t++) begin
          @(negedge clk); in_v = 1; log_n2 = LW'(lg);
          for (int l = 0; l < L; l++) begin blk[b][t][l] = word_t'({$urandom, $urandom}); in_d[l] = blk[b][t][l]; end
          if (t == n2 - 1) t_last[b] = cyc;
          if (b == nblk - 1 && t == n2 - 1) begin @(negedge clk); in_v = 0; end
        end
      while (got < nblk * n2) begin
        @(posedge clk); #1;
        if (out_v) begin
          int b = got / n2, u = got % n2;
          checks++;
          if (cyc - t_last[b] != 2 + u) begin failures++; $display("lg %0d timing %0d", lg, cyc - t_last[b]); end
          for (int m = 0; m < L; m++) begin
            checks++;
            if (out_d[m] !== blk[b][m % n2][u * (L / n2) + m / n2]) begin failures++; $display("lg %0d u %0d m %0d", lg, u, m); end
          end
          got++;
        end
      end
    join
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int lg = 1; lg <= 4; lg++) run(lg, (lg == 4 || lg == 2) ? 2 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
