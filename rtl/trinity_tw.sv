// trinity_tw: twisting unit (TW) with on-the-fly twisting-factor generation (OF-Twist).
//
// In the four-step NTT the outputs of the phase-1 NTTs are multiplied by twisting
// factors that, along one lane, form a geometric sequence t0, t0*r, t0*r^2, ...
// Only the first item t0 and the common ratio r are loaded (load=1); afterwards every
// valid element x leaves as x*t and the held factor advances, t <- t*r.  With bypass=1
// (a plain 2M-point NTT) the element passes unchanged and the factor does not advance.
// Loading and a valid element in the same cycle: the element uses the new first item.
// Latency one cycle. The geometric-sequence scheme is the paper's; the update order
// and the register stage are this design's choice.
module trinity_tw
  import trinity_pkg::*;
(
  input  logic  clk,
  input  word_t q,
  input  mu_t   mu,
  input  logic  load,
  input  word_t first,
  input  word_t ratio,
  input  logic  bypass,
  input  logic  x_v,
  input  word_t x_i,
  output word_t x_o
);
  word_t t, r, t_use;
  always_comb t_use = load ? first : t;
  always_ff @(posedge clk) begin
    if (load) r <= ratio;
    if (x_v && !bypass) begin
      x_o <= mod_mul(x_i, t_use, q, mu);
      t   <= mod_mul(t_use, load ? ratio : r, q, mu);
    end else begin
      x_o <= x_i;
      if (load) t <= first;
    end
  end
endmodule
