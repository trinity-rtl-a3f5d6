// trinity_pe: processing element of a configurable unit (CU).
//
// One PE computes, on operands a and b from the CU network and c from the local
// buffer (all mod q), one of the datapaths the paper prints for it:
//   PE_NTT  : a' = a + b*c,   b' = a - b*c
//   PE_INTT : a' = a + b,     b' = (a - b)*c
//   PE_MAC  : acc_buf = acc_buf + b*c;  a' = a + acc_buf if out_acc, else a;  b' = b
// In MAC mode the product of the cycle in which out_acc is high is included in the
// emitted sum, and acc_buf then restarts from zero (this design's choice). acc_buf
// only changes on a valid input (v). Results are registered: latency one cycle.
module trinity_pe
  import trinity_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     v,
  input  logic     out_acc,
  input  word_t    q,
  input  mu_t      mu,
  input  word_t    a,
  input  word_t    b,
  input  word_t    c,
  output word_t    a_o,
  output word_t    b_o
);
  word_t bc, dif, acc_buf, acc_next;
  always_comb begin
    bc       = mod_mul(b, c, q, mu);
    dif      = mod_sub(a, b, q);
    acc_next = mod_add(acc_buf, bc, q);
  end
  always_ff @(posedge clk) begin
    unique case (mode)
      PE_NTT: begin
        a_o <= mod_add(a, bc, q);
        b_o <= mod_sub(a, bc, q);
      end
      PE_INTT: begin
        a_o <= mod_add(a, b, q);
        b_o <= mod_mul(dif, c, q, mu);
      end
      default: begin
        a_o <= (v && out_acc) ? mod_add(a, acc_next, q) : a;
        b_o <= b;
      end
    endcase
  end
  always_ff @(posedge clk) begin
    if (!rst_n) acc_buf <= '0;
    else if (mode == PE_MAC && v) acc_buf <= out_acc ? '0 : acc_next;
  end
endmodule
