// tb_trinity_pe: one PE, random operands, every mode against the equations
// a'=a+b*c, b'=a-b*c (NTT); a'=a+b, b'=(a-b)*c (iNTT); MAC accumulation over a run
// of products with out_acc on the last one, followed by a restart of acc_buf.
module tb_trinity_pe;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  pe_mode_e mode = PE_NTT;
  logic v = 0, oa = 0;
  word_t a, b, c, a_o, b_o;
  word_t q = Q0;
  logic [36:0] mu;
  trinity_pe dut (.clk, .rst_n, .mode, .v, .out_acc(oa), .q, .mu, .a, .b, .c, .a_o, .b_o);
  initial begin
    mu = rmu(Q0); a = 0; b = 0; c = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      mode = (i % 2) ? PE_INTT : PE_NTT; v = 1; a = rand_mod(Q0); b = rand_mod(Q0); c = rand_mod(Q0);
      @(posedge clk); #1;
      checks += 2;
      if (mode == PE_NTT) begin
        if (a_o !== radd(a, rmul(b, c, Q0), Q0)) failures++;
        if (b_o !== rsub(a, rmul(b, c, Q0), Q0)) failures++;
      end else begin
        if (a_o !== radd(a, b, Q0)) failures++;
        if (b_o !== rmul(rsub(a, b, Q0), c, Q0)) failures++;
      end
    end
    for (int r = 0; r < 40; r++) begin
      word_t acc;
      int T;
      acc = 0; T = 1 + r % 7;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        mode = PE_MAC; v = 1; oa = (t == T - 1); a = rand_mod(Q0); b = rand_mod(Q0); c = rand_mod(Q0);
        acc = radd(acc, rmul(b, c, Q0), Q0);
        @(posedge clk); #1;
        checks += 2;
        if (a_o !== (oa ? radd(a, acc, Q0) : a)) begin failures++; $display("mac r%0d t%0d T%0d got %0d a %0d exp %0d", r, t, T, a_o, a, radd(a, acc, Q0)); end
        if (b_o !== b) failures++;
      end
      // idle (v=0) cycles must not disturb the accumulator
      @(negedge clk); v = 0; oa = 1; b = rand_mod(Q0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
