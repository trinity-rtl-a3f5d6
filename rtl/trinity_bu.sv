// trinity_bu: butterfly unit (BU) of the NTT unit.
//
// Forward mode (inv=0) is the Cooley-Tukey butterfly  a' = a + b*w,  b' = a - b*w.
// Inverse mode (inv=1) is the Gentleman-Sande butterfly  a' = a + b,  b' = (a - b)*w.
// These are the equations the paper prints for the NTT and iNTT datapaths of its PE;
// the BU is taken to compute the same butterflies. All arithmetic is mod q (Barrett
// constant mu). One pair is accepted every cycle; results appear one cycle later
// (one register stage, this design's choice).
module trinity_bu
  import trinity_pkg::*;
(
  input  logic  clk,
  input  logic  inv,
  input  word_t q,
  input  mu_t   mu,
  input  word_t a,
  input  word_t b,
  input  word_t w,
  output word_t a_o,
  output word_t b_o
);
  word_t bw, dif;
  always_comb begin
    bw  = mod_mul(b, w, q, mu);
    dif = mod_sub(a, b, q);
  end
  always_ff @(posedge clk) begin
    if (!inv) begin
      a_o <= mod_add(a, bw, q);
      b_o <= mod_sub(a, bw, q);
    end else begin
      a_o <= mod_add(a, b, q);
      b_o <= mod_mul(dif, w, q, mu);
    end
  end
endmodule
