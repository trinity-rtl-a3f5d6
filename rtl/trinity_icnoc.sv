// trinity_icnoc: inter-cluster network-on-chip, fully connected between NC clusters.
//
// Every cluster sends one LANES-wide vector per cycle and receives one. Two modes:
//   a2a = 0 (permutation): cluster o receives the vector of cluster src[o];
//   a2a = 1 (all-to-all):  the vectors are cut into NC chunks of LANES/NC lanes and
//                          chunk c of cluster s is delivered as chunk s of cluster c,
//                          the exchange used to switch limb-wise <-> slot-wise layout.
// One register stage (latency one cycle). A receiving cluster's valid is the valid of
// its source (permutation) or the AND of all senders' valids (all-to-all).
// Full connectivity and its use for layout switching are the paper's; the two modes
// and the chunking are this design's choice.
module trinity_icnoc
  import trinity_pkg::*;
#(
  parameter int unsigned NC    = 4,
  parameter int unsigned LANES = 256,
  localparam int unsigned CW = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned CH = LANES / NC
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a2a,
  input  logic [CW-1:0]     src   [NC],
  input  logic [NC-1:0]     in_v,
  input  word_t [LANES-1:0] in_d  [NC],
  output logic [NC-1:0]     out_v,
  output word_t [LANES-1:0] out_d [NC]
);
  always_ff @(posedge clk) begin
    for (int o = 0; o < NC; o++) begin
      if (a2a) begin
        for (int c = 0; c < NC; c++)
          for (int l = 0; l < CH; l++)
            out_d[o][c*CH + l] <= in_d[c][o*CH + l];
      end else begin
        out_d[o] <= in_d[src[o]];
      end
    end
    if (!rst_n) out_v <= '0;
    else for (int o = 0; o < NC; o++) out_v[o] <= a2a ? &in_v : in_v[src[o]];
  end
endmodule
