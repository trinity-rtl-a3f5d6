// tb_trinity_ewe: element-wise engine at 16 lanes; random vectors for each operation
// against reference modular arithmetic, one-cycle latency.
module tb_trinity_ewe;
  import trinity_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic in_v = 0, out_v;
  ewe_op_e op = EW_ADD;
  modq_t modq;
  word_t [L-1:0] x, y, z, o;
  trinity_ewe #(.LANES(L)) dut (.clk, .rst_n, .in_v, .op, .modq, .x, .y, .z, .out_v, .out_d(o));
  initial begin
    modq.q = Q0; modq.mu = rmu(Q0);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_v = 1; op = ewe_op_e'(i % 4);
      for (int l = 0; l < L; l++) begin x[l] = rand_mod(Q0); y[l] = rand_mod(Q0); z[l] = rand_mod(Q0); end
      @(posedge clk); #1;
      checks++; if (!out_v) failures++;
      for (int l = 0; l < L; l++) begin
        word_t e;
        case (op)
          EW_ADD: e = radd(x[l], y[l], Q0);
          EW_SUB: e = rsub(x[l], y[l], Q0);
          EW_MUL: e = rmul(x[l], y[l], Q0);
          default: e = radd(rmul(x[l], y[l], Q0), z[l], Q0);
        endcase
        checks++; if (o[l] !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
