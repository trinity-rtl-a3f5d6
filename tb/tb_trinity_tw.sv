// tb_trinity_tw: one twisting unit. After loading first item t0 and ratio r, the k-th
// valid element must leave multiplied by t0*r^k; idle cycles must not advance the
// factor; bypass must pass the element unchanged.
module tb_trinity_tw;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic load = 0, bypass = 0, x_v = 0;
  word_t first, ratio, x_i, x_o;
  word_t q = Q0;
  logic [36:0] mu;
  trinity_tw dut (.clk, .q, .mu, .load, .first, .ratio, .bypass, .x_v, .x_i, .x_o);
  initial begin
    mu = rmu(Q0);
    for (int r = 0; r < 20; r++) begin
      word_t f, rt;
      int k;
      f = rand_mod(Q0); rt = rand_mod(Q0); k = 0;
      @(negedge clk); load = 1; first = f; ratio = rt; x_v = 0;
      @(negedge clk); load = 0;
      for (int i = 0; i < 30; i++) begin
        @(negedge clk);
        x_v = ($urandom % 4) != 0; bypass = ($urandom % 8) == 0; x_i = rand_mod(Q0);
        @(posedge clk); #1;
        if (x_v) begin
          checks++;
          if (x_o !== (bypass ? x_i : rmul(x_i, rmul(f, rpow(rt, k, Q0), Q0), Q0))) failures++;
          if (!bypass) k++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
