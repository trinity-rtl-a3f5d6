// tb_ref_pkg: reference arithmetic for the testbenches, written with wide-integer '%'
// so that it is independent of the Barrett reduction in the design.
package tb_ref_pkg;
  localparam logic [35:0] Q0 = 36'd68718428161;   // 2^36 - 2^20 + 1, 1 mod 2^20

  function automatic logic [35:0] rmul(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    return 36'((80'(a) * 80'(b)) % 80'(q));
  endfunction
  function automatic logic [35:0] radd(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    return 36'((80'(a) + 80'(b)) % 80'(q));
  endfunction
  function automatic logic [35:0] rsub(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    return 36'((80'(a) + 80'(q) - 80'(b)) % 80'(q));
  endfunction
  function automatic logic [35:0] rpow(logic [35:0] a, longint unsigned e, logic [35:0] q);
    logic [35:0] r = 1;
    while (e != 0) begin
      if (e[0]) r = rmul(r, a, q);
      a = rmul(a, a, q);
      e >>= 1;
    end
    return r;
  endfunction
  function automatic logic [36:0] rmu(logic [35:0] q);
    return 37'((80'd1 << 72) / 80'(q));
  endfunction
  // primitive n-th root of unity mod q (n a power of two dividing q-1)
  function automatic logic [35:0] root(int unsigned n, logic [35:0] q);
    for (int g = 2; g < 1000; g++) begin
      logic [35:0] w = rpow(36'(g), (64'(q) - 1) / n, q);
      if (n == 1 || rpow(w, n / 2, q) != 1) return w;
    end
    return 0;
  endfunction
  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int b = 0; b < bits; b++) if (x[b]) r |= (1 << (bits - 1 - b));
    return r;
  endfunction
  function automatic logic [35:0] rand_mod(logic [35:0] q);
    return 36'({$urandom, $urandom} % 64'(q));
  endfunction
endpackage
