// trinity_sram_sp: one single-ported, vector-wide SRAM bank (LANES words of 36 bits
// per address), the building block of the local buffers and the scratchpad.
// Per cycle either a write (en & we) or a read (en & !we); read data appear one cycle
// later and hold until the next read. The chip would use the process's SRAM macros
// (double-pumped); this array model gives one access per cycle.
module trinity_sram_sp
  import trinity_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  word_t [LANES-1:0] wdata,
  output word_t [LANES-1:0] rdata
);
  word_t [LANES-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end
endmodule
