// tb_trinity_pkg: checks the package's modular add, sub, neg and Barrett multiply
// against wide-integer '%' arithmetic on random operands for two 36-bit primes.
module tb_trinity_pkg;
  import trinity_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    word_t qs [2];
    qs[0] = 36'd68718428161;   // 2^36 - 2^20 + 1
    qs[1] = 36'd34359771137;   // a prime just above 2^35
    for (int k = 0; k < 2; k++) begin
      word_t q; mu_t mu; logic [79:0] wide;
      q = qs[k];
      wide = (80'd1 << 72) / 80'(q);
      mu = mu_t'(wide);
      for (int i = 0; i < 4000; i++) begin
        word_t a, b; logic [79:0] p;
        a = word_t'({$urandom, $urandom} % 64'(q));
        b = word_t'({$urandom, $urandom} % 64'(q));
        if (i == 0) begin a = q - 1; b = q - 1; end
        if (i == 1) begin a = 0; b = q - 1; end
        p = (80'(a) * 80'(b)) % 80'(q);
        checks++; if (mod_mul(a, b, q, mu) !== word_t'(p)) begin failures++; $display("mul %0d*%0d", a, b); end
        checks++; if (mod_add(a, b, q) !== word_t'((80'(a) + 80'(b)) % 80'(q))) failures++;
        checks++; if (mod_sub(a, b, q) !== word_t'((80'(a) + 80'(q) - 80'(b)) % 80'(q))) failures++;
        checks++; if (mod_neg(a, q) !== word_t'((80'(q) - 80'(a)) % 80'(q))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
