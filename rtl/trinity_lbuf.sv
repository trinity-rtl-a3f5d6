// trinity_lbuf: local buffer of one group.

// LANES (256) lanes, each with NBANK (5) single-ported 36-bit banks; every bank holds
// DEPTH (512) words per lane, i.e. two polynomials of 65536 coefficients across the
// lanes, 2.81 MiB in all. Each bank serves one access per cycle, a whole LANES-wide
// vector (read latency one cycle), so the five banks give five vector accesses per
// cycle to the units of the group. The organisation and sizes are the paper's; the
// one-cycle read latency is this design's choice.
module trinity_lbuf
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned NBANK = 5,
  parameter int unsigned DEPTH = 512,
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
