// tb_noise_source: checks the noise source with N=22 qubits and NG=6 generators
// (K = ceil(22/6) = 4 cycles per pattern): 'full' comes K+1 cycles after gen_start, the
// noisy register holds exactly the pattern predicted by an independent model of the six
// generators and comparators, generation of the next pattern overlaps the held one, and the
// error density follows the threshold.
module tb_noise_source;
  import qec_pkg::*;
  localparam int N = 22, NG = 6, K = 4;
  logic clk = 0, rst = 1, seed_load = 0, gen_start = 0, load = 0;
  logic [31:0] seed = 32'h1234_5678;
  logic [RATE_W-1:0] thr = '0;
  logic full;
  logic [N-1:0] noisy;
  int checks = 0, failures = 0;
  logic [31:0] st [NG];

  noise_source #(.N(N), .NG(NG)) dut (.clk, .rst, .seed_load, .seed, .threshold(thr),
    .gen_start, .full, .load, .noisy);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction

  task automatic check(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  // expected next pattern; advances the model generators by K+1 steps
  function automatic logic [N-1:0] expect_pattern();
    logic [N-1:0] p = '0;
    for (int j = 0; j <= K; j++) begin
      for (int g = 0; g < NG; g++) begin
        if (j < K && j * NG + g < N) p[j * NG + g] = (st[g][31:14] < thr);
        st[g] = xs(st[g]);
      end
    end
    return p;
  endfunction

  task automatic gen_and_load(output logic [N-1:0] got, input bit with_next);
    int cyc;
    gen_start = 1;
    @(negedge clk); gen_start = 0;
    cyc = 1;
    while (!full) begin @(negedge clk); cyc++; end
    check(cyc == K + 2, $sformatf("full %0d edges after gen_start, expected %0d", cyc - 1, K + 1));
    load = 1;
    @(negedge clk); load = 0;
    got = noisy;
  endtask

  initial begin
    logic [N-1:0] got, exp_p;
    int ones;
    repeat (2) @(negedge clk);
    rst = 0;
    seed_load = 1; @(negedge clk); seed_load = 0;
    for (int g = 0; g < NG; g++) st[g] = seed + 32'(g) * 32'h9E37_79B9;
    thr = 18'(1 << 16);  // p = 0.25
    for (int f = 0; f < 30; f++) begin
      exp_p = expect_pattern();
      gen_and_load(got, 1);
      check(got == exp_p, $sformatf("pattern %0d: got %h expected %h", f, got, exp_p));
    end
    // the held pattern stays while the next one is generated
    exp_p = expect_pattern();
    gen_and_load(got, 1);
    gen_start = 1; @(negedge clk); gen_start = 0;
    repeat (K + 3) @(negedge clk);
    check(full, "next pattern complete");
    check(noisy == got, "held pattern unchanged while the next is generated");
    void'(expect_pattern());
    // density at threshold 0.25 over 300 patterns
    ones = 0;
    for (int f = 0; f < 300; f++) begin
      gen_and_load(got, 1);
      ones += $countones(got);
    end
    check(ones > 1400 && ones < 1900, $sformatf("error density %0d / 6600", ones));
    // threshold 0: no errors
    thr = '0;
    gen_and_load(got, 1);
    check(got == '0, "no errors at threshold 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
