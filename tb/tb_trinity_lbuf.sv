// tb_trinity_lbuf: writes random vectors to random addresses of every bank (all banks
// in the same cycles), then reads them back, interleaved with further writes, and
// compares with a shadow copy; read data must appear one cycle after the read.
module tb_trinity_lbuf;
  import trinity_pkg::*;
  localparam int L = 8, NB = 5, D = 64, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [NB-1:0] en = '0, we = '0;
  logic [AW-1:0] addr [NB];
  word_t [L-1:0] wdata [NB], rdata [NB];
  word_t [L-1:0] shadow [NB][D];
  logic [D-1:0] written [NB];
  trinity_lbuf #(.LANES(L), .DEPTH(D)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  initial begin
    for (int b = 0; b < NB; b++) written[b] = '0;
    for (int i = 0; i < 2000; i++) begin
      logic [NB-1:0] rd;
      @(negedge clk);
      rd = '0;
      for (int b = 0; b < NB; b++) begin
        addr[b] = AW'($urandom);
        en[b] = 1;
        we[b] = (i < 100) || ($urandom % 2) || !written[b][addr[b]];
        rd[b] = !we[b];
        for (int l = 0; l < L; l++) wdata[b][l] = word_t'({$urandom, $urandom});
        if (we[b]) begin shadow[b][addr[b]] = wdata[b]; written[b][addr[b]] = 1; end
      end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) if (rd[b]) begin
        checks++;
        if (rdata[b] !== shadow[b][addr[b]]) begin failures++; $display("bank %0d addr %0d", b, addr[b]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
