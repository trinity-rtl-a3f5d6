// trinity_spm: scratchpad memory of one cluster.

// LANES (256) lanes with NBANK (4) single-ported 36-bit banks each, DEPTH (10240)
// words per lane-bank: 45 MiB per cluster, 180 MiB over four clusters. It is shared by
// the three groups (through the cluster network and the local buffers), the HBM port
// and the inter-cluster network. One vector access per bank per cycle, read latency one
// cycle. Lanes and banks follow the paper; the depth follows its 45 MB per-cluster
// capacity (the per-bank item count it also states would give four times that).
module trinity_spm
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned NBANK = 4,
  parameter int unsigned DEPTH = 10240,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic              clk,
  input  logic [NBANK-1:0]  en,
  input  logic [NBANK-1:0]  we,
  input  logic [AW-1:0]     addr  [NBANK],
  input  word_t [LANES-1:0] wdata [NBANK],
  output word_t [LANES-1:0] rdata [NBANK]
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    trinity_sram_sp #(.LANES(LANES), .DEPTH(DEPTH)) u_bank (
      .clk, .en (en[b]), .we (we[b]), .addr (addr[b]), .wdata (wdata[b]), .rdata (rdata[b]));
  end
endmodule
