// tb_quant_diversity_decoder: checks the four-stage quantization-diversity chain on the
// (72,12,6) code against a model that runs the reference min-sum decoder with q[7,4],
// q[8,4], q[4,2], q[3,1] in order and stops at the first convergence: result, stage reached,
// total iterations and cycle count (sum over stages of 2*it+2, plus one per hand-over and
// one for the result). Requires escalation beyond stage 0, a success in a later stage and a
// complete failure to have occurred.
module tb_quant_diversity_decoder;
  import qec_pkg::*;
  import ms_model_pkg::*;
  localparam int L = 6, MM = 6, N = 72, M = 36;
  localparam int QW [4] = '{7, 8, 4, 3};
  localparam int QF [4] = '{4, 4, 2, 1};

  logic clk = 0, rst = 1, start = 0;
  logic [M-1:0] syn = '0;
  logic signed [LLR_W-1:0] prior = '0;
  logic [ITER_W-1:0] max_iter = '0;
  logic ready, done, converged, escalated;
  logic [N-1:0] e_hat;
  logic [ITER_W+3:0] iterations;
  logic [1:0] stage;
  int checks = 0, failures = 0;
  int n_esc = 0, n_late = 0, n_none = 0;

  quant_diversity_decoder #(.BB_L(L), .BB_M(MM)) dut (
    .clk, .rst, .start, .syndrome(syn), .prior_llr(prior), .max_iter,
    .ready, .done, .converged, .e_hat, .iterations, .stage, .escalated);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  task automatic run(logic [N-1:0] e, int llr4, int maxit);
    logic [MMAX-1:0] s;
    logic [NMAX-1:0] er, e0, eres;
    int it, tot, cyc_exp, cyc, st;
    bit cv, cvres;
    s = syndrome(NMAX'(e));
    tot = 0; cyc_exp = 1; cvres = 0; st = 3; eres = '0;
    for (int i = 0; i < 4; i++) begin
      decode(s, llr4, QW[i], QF[i], 24, maxit, er, it, cv);
      if (i == 0) e0 = er;
      tot += it;
      cyc_exp += 2 * it + 2 + 1;
      if (cv) begin cvres = 1; eres = er; st = i; break; end
    end
    if (!cvres) eres = e0;
    @(negedge clk);
    syn = s[M-1:0]; prior = LLR_W'(llr4); max_iter = ITER_W'(maxit); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(converged == cvres, "convergence flag");
    check(e_hat == eres[N-1:0], "estimate");
    check(int'(stage) == st, $sformatf("stage %0d expected %0d", stage, st));
    check(int'(iterations) == tot, $sformatf("iterations %0d expected %0d", iterations, tot));
    check(cyc == cyc_exp, $sformatf("latency %0d expected %0d", cyc, cyc_exp));
    check(escalated == (st != 0), "escalated flag");
    if (st != 0) n_esc++;
    if (st != 0 && cvres) n_late++;
    if (!cvres) n_none++;
  endtask

  initial begin
    logic [N-1:0] e;
    set_code(L, MM);
    repeat (2) @(negedge clk);
    rst = 0;
    run('0, 40, 10);
    for (int t = 0; t < 150; t++) begin
      e = '0;
      for (int i = 0; i < 3 + t % 4; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, 35 + (t % 3) * 8, 2 + t % 5);
    end
    check(n_esc > 0, "escalation beyond the first decoder happened");
    check(n_late > 0, "a later decoder converged where the first failed");
    check(n_none > 0, "a frame no decoder could converge on");
    $display("escalated %0d, later success %0d, none %0d", n_esc, n_late, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
