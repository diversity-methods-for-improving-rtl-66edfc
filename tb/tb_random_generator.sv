// tb_random_generator: checks the seeded generator against an independent xorshift32 model
// (seed load, zero-seed substitution, enable gating) and that the fraction of draws below a
// threshold matches the threshold.
module tb_random_generator;
  import qec_pkg::*;
  logic clk = 0, rst = 1, seed_load = 0, en = 0;
  logic [31:0] seed = '0;
  logic [RATE_W-1:0] rnd;
  int checks = 0, failures = 0;

  random_generator dut (.clk, .rst, .seed_load, .seed, .en, .rnd);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(logic [31:0] x);
    x = x ^ {x[18:0], 13'd0};
    x = x ^ {17'd0, x[31:17]};
    x = x ^ {x[26:0], 5'd0};
    return x;
  endfunction

  task automatic check(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  initial begin
    logic [31:0] st;
    int below;
    repeat (2) @(negedge clk);
    rst = 0;
    seed = 32'hDEAD_BEEF; seed_load = 1;
    @(negedge clk); seed_load = 0;
    st = 32'hDEAD_BEEF;
    check(rnd == st[31:14], "value after seed load");
    // held while en is low
    repeat (3) @(negedge clk);
    check(rnd == st[31:14], "state held without enable");
    en = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      st = model(st);
      check(rnd == st[31:14], $sformatf("draw %0d", i));
    end
    // zero seed is replaced by a non-zero constant
    en = 0; seed = '0; seed_load = 1;
    @(negedge clk); seed_load = 0; en = 1;
    @(negedge clk);
    check(rnd != '0, "zero seed does not lock the generator");
    // fraction below threshold 0.1 over 20000 draws
    below = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (rnd < 18'(26214)) below++;
    end
    check(below > 1800 && below < 2200, $sformatf("fraction below 0.1: %0d/20000", below));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
