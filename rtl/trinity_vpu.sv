// trinity_vpu: vector processing unit (VPU) for TFHE ModSwitch and KeySwitch.
//
//   VPU_MODSW: out[l] = round(2N * x[l] / q) mod 2N, N = 2^log_n  (ModSwitch of an LWE
//              ciphertext's coefficients before blind rotation)
//   VPU_LOAD : acc[l] <- x[l]
//   VPU_KSMAC: acc[l] <- acc[l] - d * ksk[l] mod q, where d is digit dig of the scalar a:
//              d = (a >> (dig*base_log)) mod 2^base_log   (TFHE KeySwitch: the LWE
//              ciphertexts ksk[i][j] are streamed LANES coefficients at a time and scaled by
//              digit j of mask coefficient a'_i)
// out_d shows acc after LOAD/KSMAC and the rounded value after MODSW, one cycle later.
// The operations are the ones the paper assigns to the VPU; the digit rule (unsigned,
// taken from the low end, no rounding) and the divider per lane are this design's choice.
module trinity_vpu
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_v,
  input  vpu_op_e           op,
  input  modq_t             modq,
  input  logic [4:0]        log_n,
  input  logic [4:0]        base_log,
  input  logic [2:0]        dig,
  input  word_t             a,
  input  word_t [LANES-1:0] x,
  input  word_t [LANES-1:0] ksk,
  output logic              out_v,
  output word_t [LANES-1:0] out_d
);
  word_t [LANES-1:0] acc;
  word_t d;
  always_comb d = (a >> (32'(dig) * 32'(base_log))) & word_t'((64'(1) << base_log) - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= in_v;
    if (in_v) begin
      for (int l = 0; l < LANES; l++) begin
        unique case (op)
          VPU_MODSW: begin
            logic [WORD+24:0] num;
            num = ((WORD+25)'(x[l]) << (log_n + 1)) + (WORD+25)'(modq.q >> 1);
            out_d[l] <= word_t'((num / (WORD+25)'(modq.q)) & ((64'(1) << (log_n + 1)) - 1));
          end
          VPU_LOAD: begin
            acc[l]   <= x[l];
            out_d[l] <= x[l];
          end
          default: begin
            acc[l]   <= mod_sub(acc[l], mod_mul(d, ksk[l], modq.q, modq.mu), modq.q);
            out_d[l] <= mod_sub(acc[l], mod_mul(d, ksk[l], modq.q, modq.mu), modq.q);
          end
        endcase
      end
    end
  end
endmodule
