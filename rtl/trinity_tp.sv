// trinity_tp: transpose unit (TP) for the four-step NTT.
//
// A polynomial of N = LANES * N2 coefficients leaves the NTTU as N2 vectors of LANES
// lanes: input vector t, lane l, holds element (l, t) of an LANES x N2 matrix. The TP
// regroups it so that each output vector holds LANES/N2 complete rows of N2 elements:
// output vector u, lane m holds element (u*LANES/N2 + m/N2, m mod N2). A phase-2 NTT of
// size N2 then sits in N2 consecutive lanes (the layout the CU network expects); for
// N2 = LANES this is a plain square transpose and the rows can go back into the NTTU.
// N2 = 2^log_n2, 2 <= N2 <= LANES, taken when a block starts; it covers polynomial sizes
// 2*LANES .. LANES^2 (512 .. 65536 at LANES=256).
//
// Implementation (this design's choice; the paper refers to F1's quad-swap network):
// a ping-pong buffer of two LANES x LANES banks. While one bank fills, the other drains,
// so a vector can enter every cycle. A block's first output leaves two cycles after its
// last input; the N2 output vectors follow on consecutive cycles.
module trinity_tp
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256,
  localparam int unsigned LG = $clog2(LANES),
  localparam int unsigned LW = $clog2(LG + 1)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LW-1:0]     log_n2,
  input  logic              in_v,
  input  word_t [LANES-1:0] in_d,
  output logic              out_v,
  output word_t [LANES-1:0] out_d
);
  word_t [LANES-1:0] mem [2][LANES];
  logic          wb, rb, rd_act;
  logic [LG-1:0] wc, rc;
  logic [LW-1:0] wlg, rlg;

  always_ff @(posedge clk) begin
    if (in_v) mem[wb][wc] <= in_d;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb <= 1'b0; wc <= '0; wlg <= LW'(1);
      rb <= 1'b0; rc <= '0; rd_act <= 1'b0; rlg <= LW'(1);
    end else begin
      if (in_v) begin
        if (wc == '0) wlg <= log_n2;
        if (32'(wc) == (1 << ((wc == '0) ? log_n2 : wlg)) - 1) begin
          wc <= '0; wb <= ~wb;
          rd_act <= 1'b1; rb <= wb; rc <= '0;
          rlg <= (wc == '0) ? log_n2 : wlg;
        end else begin
          wc <= wc + 1'b1;
        end
      end
      if (rd_act && !(in_v && 32'(wc) == (1 << ((wc == '0) ? log_n2 : wlg)) - 1)) begin
        if (32'(rc) == (1 << rlg) - 1) rd_act <= 1'b0;
        else rc <= rc + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_v <= 1'b0;
    else        out_v <= rd_act;
    for (int m = 0; m < LANES; m++) begin
      int unsigned t, row;
      t   = m & ((1 << rlg) - 1);
      row = (32'(rc) << (LG - rlg)) + (m >> rlg);
      out_d[m] <= mem[rb][t][row];
    end
  end
endmodule
