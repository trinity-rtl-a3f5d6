// tb_trinity_vpu: VPU at 8 lanes. ModSwitch results against round(2N*x/q) computed
// with wide integers; a KeySwitch sequence (load b, then digits of several scalars
// times random ksk vectors) against a reference accumulation.
module tb_trinity_vpu;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic in_v = 0, out_v;
  vpu_op_e op = VPU_MODSW;
  modq_t modq;
  logic [4:0] log_n = 10, base_log = 7;
  logic [2:0] dig = 0;
  word_t a = 0;
  word_t [L-1:0] x, ksk, o;
  trinity_vpu #(.LANES(L)) dut (.clk, .rst_n, .in_v, .op, .modq, .log_n, .base_log, .dig, .a, .x, .ksk, .out_v, .out_d(o));
  initial begin
    word_t acc [L];
    modq.q = Q0; modq.mu = rmu(Q0);
    x = '0; ksk = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); in_v = 1; op = VPU_MODSW; log_n = 5'(8 + i % 6);
      for (int l = 0; l < L; l++) x[l] = rand_mod(Q0);
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) begin
        logic [79:0] num;
        num = ((80'(x[l]) << (log_n + 1)) + 80'(Q0 / 2)) / 80'(Q0);
        checks++; if (o[l] !== word_t'(num % (80'd1 << (log_n + 1)))) failures++;
      end
    end
    for (int r = 0; r < 5; r++) begin
      @(negedge clk); op = VPU_LOAD;
      for (int l = 0; l < L; l++) begin x[l] = rand_mod(Q0); acc[l] = x[l]; end
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 3; j++) begin
          word_t d;
          @(negedge clk); op = VPU_KSMAC; dig = 3'(j); base_log = 5'(6 + r); a = rand_mod(Q0);
          d = (a >> (j * base_log)) & ((1 << base_log) - 1);
          for (int l = 0; l < L; l++) begin ksk[l] = rand_mod(Q0); acc[l] = rsub(acc[l], rmul(d, ksk[l], Q0), Q0); end
        end
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) begin checks++; if (o[l] !== acc[l]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
