// tb_syndrome_unit: compares the syndrome unit's output with H_X * e computed from the
// explicit shift-matrix construction of the (144,12,12) code, for single-qubit and random
// error patterns, and checks that the output only changes when 'en' is high.
module tb_syndrome_unit;
  import ms_model_pkg::*;
  localparam int N = 144, M = 72;
  logic clk = 0, rst = 1, en = 0;
  logic [N-1:0] e = '0;
  logic [M-1:0] s;
  int checks = 0, failures = 0;

  syndrome_unit dut (.clk, .rst, .en, .e, .s);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  task automatic apply(logic [N-1:0] v);
    logic [MMAX-1:0] ref_s;
    e = v; en = 1;
    @(negedge clk); en = 0;
    ref_s = syndrome(NMAX'(v));
    check(s == ref_s[M-1:0], "syndrome differs from H_X * e");
  endtask

  initial begin
    logic [N-1:0] v;
    set_code(12, 6);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int q = 0; q < N; q++) begin v = '0; v[q] = 1; apply(v); check($countones(s) == 3, "qubit degree 3"); end
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < N; i += 32) v[i +: 32] = $urandom;
      apply(v);
    end
    v = s;
    e = ~e;
    @(negedge clk);
    check(s == M'(v), "syndrome held while en is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
