// tb_trinity_bu: one butterfly unit, random operands, both modes, against
// a+b*w / a-b*w (forward) and a+b / (a-b)*w (inverse), one cycle latency.
module tb_trinity_bu;
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
  logic inv = 0;
  word_t a, b, w, a_o, b_o;
  word_t q = Q0;
  logic [36:0] mu;
  trinity_bu dut (.clk, .inv, .q, .mu, .a, .b, .w, .a_o, .b_o);
  initial begin
    mu = rmu(Q0);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      inv = i[0]; a = rand_mod(Q0); b = rand_mod(Q0); w = rand_mod(Q0);
      if (i < 4) begin a = Q0 - 1; b = Q0 - 1; end
      @(posedge clk); #1;
      checks += 2;
      if (!inv) begin
        if (a_o !== radd(a, rmul(b, w, Q0), Q0)) failures++;
        if (b_o !== rsub(a, rmul(b, w, Q0), Q0)) failures++;
      end else begin
        if (a_o !== radd(a, b, Q0)) failures++;
        if (b_o !== rmul(rsub(a, b, Q0), w, Q0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
