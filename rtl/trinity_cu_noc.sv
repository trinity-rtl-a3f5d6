// trinity_cu_noc: network in front of one PE column of a configurable unit.
//
// Butterfly mode (mesh=0): the 2*NR lanes are split into groups of G = 2^log_g lanes
// (2 <= G <= 2*NR), each holding one small NTT. Within group k, PE k*G/2+i receives
// lanes k*G+i (a) and k*G+i+G/2 (b): the constant-geometry pattern, the same for every
// stage. A PE column writes PE p's results to lanes 2p and 2p+1, which is the other half
// of the constant-geometry step. Mesh mode (mesh=1, systolic array): PE r receives
// lane r as a and lane r+NR as b. Purely combinational.
module trinity_cu_noc
  import trinity_pkg::*;
#(
  parameter int unsigned NR = 128,
  localparam int unsigned LW = $clog2($clog2(2 * NR) + 1)
)(
  input  logic               mesh,
  input  logic [LW-1:0]      log_g,
  input  word_t [2*NR-1:0]   in_d,
  output word_t [NR-1:0]     a,
  output word_t [NR-1:0]     b
);
  always_comb begin
    for (int p = 0; p < NR; p++) begin
      int unsigned sh, base, i;
      sh   = (log_g == 0) ? 0 : int'(log_g) - 1;   // log2(G/2)
      i    = p & ((1 << sh) - 1);
      base = (p >> sh) << (sh + 1);
      if (mesh) begin
        a[p] = in_d[p];
        b[p] = in_d[p + NR];
      end else begin
        a[p] = in_d[base + i];
        b[p] = in_d[base + i + (1 << sh)];
      end
    end
  end
endmodule
