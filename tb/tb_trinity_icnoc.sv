// tb_trinity_icnoc: 4 clusters, 8 lanes. Random permutations and all-to-all exchanges
// with random data; every output lane and valid is checked one cycle later.
module tb_trinity_icnoc;
  import trinity_pkg::*;
  localparam int NC = 4, L = 8, CH = L / NC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic a2a = 0;
  logic [1:0] src [NC];
  logic [NC-1:0] in_v = '0, out_v;
  word_t [L-1:0] in_d [NC], out_d [NC];
  trinity_icnoc #(.NC(NC), .LANES(L)) dut (.clk, .rst_n, .a2a, .src, .in_v, .in_d, .out_v, .out_d);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      a2a = i[0];
      in_v = NC'($urandom);
      for (int o = 0; o < NC; o++) begin
        src[o] = 2'($urandom);
        for (int l = 0; l < L; l++) in_d[o][l] = word_t'({$urandom, $urandom});
      end
      @(posedge clk); #1;
      for (int o = 0; o < NC; o++) begin
        checks++;
        if (out_v[o] !== (a2a ? &in_v : in_v[src[o]])) failures++;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (out_d[o][l] !== (a2a ? in_d[l / CH][o * CH + l % CH] : in_d[src[o]][l])) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
