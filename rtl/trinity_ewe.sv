// trinity_ewe: element-wise engine (EWE), LANES (512) lanes per cycle.
//
// Lane-wise modular operations on three operand vectors x, y, z:
//   EW_ADD: x+y   EW_SUB: x-y   EW_MUL: x*y   EW_MAC: x*y+z   (all mod q)
// ModAdd and ModMult are the operations the paper names; the subtract and the fused
// multiply-add are this design's choice (CKKS KeySwitch subtracts, and PMult+HAdd fuse).
// One register stage: results leave one cycle after the operands.
module trinity_ewe
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 512
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_v,
  input  ewe_op_e           op,
  input  modq_t             modq,
  input  word_t [LANES-1:0] x,
  input  word_t [LANES-1:0] y,
  input  word_t [LANES-1:0] z,
  output logic              out_v,
  output word_t [LANES-1:0] out_d
);
  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= in_v;
    for (int l = 0; l < LANES; l++) begin
      unique case (op)
        EW_ADD:  out_d[l] <= mod_add(x[l], y[l], modq.q);
        EW_SUB:  out_d[l] <= mod_sub(x[l], y[l], modq.q);
        EW_MUL:  out_d[l] <= mod_mul(x[l], y[l], modq.q, modq.mu);
        default: out_d[l] <= mod_add(mod_mul(x[l], y[l], modq.q, modq.mu), z[l], modq.q);
      endcase
    end
  end
endmodule
