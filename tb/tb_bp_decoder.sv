// tb_bp_decoder: checks two BP decoders on the (72,12,6) bivariate bicycle code, a q[7,3]
// min-sum decoder (alpha 0.75) and a q[8,4] sum-product decoder, against the bit-accurate
// reference model of ms_model_pkg: hard decision, convergence flag, iteration count and the
// 2*iterations+2 cycle latency, for zero syndromes, single errors, random errors of weight
// 2..5 with uniform and per-qubit priors, and iteration-limited (non-converging) runs.
module tb_bp_decoder;
  import qec_pkg::*;
  import ms_model_pkg::*;

  localparam int L = 6, MM = 6, N = 72, M = 36;
  localparam int W = 7, F = 3, AL = 24;

  logic clk = 0, rst = 1;
  logic start = 0;
  logic [M-1:0] syn = '0;
  logic signed [LLR_W-1:0] prior [N];
  logic [ITER_W-1:0] max_iter = '0;
  logic [1:0] ready, done, converged;
  logic [N-1:0] e_hat [2];
  logic [ITER_W-1:0] iterations [2];

  int checks = 0, failures = 0;
  int n_conv = 0, n_fail = 0;

  bit sel = 0;   // 0: min-sum q[7,3], 1: sum-product q[8,4]
  logic [1:0] start_v;
  assign start_v = {start & sel, start & ~sel};

  bp_decoder #(.BB_L(L), .BB_M(MM), .W(W), .F(F), .ALPHA_NUM(AL)) dut (
    .clk, .rst, .start(start_v[0]), .syndrome(syn), .prior, .max_iter,
    .ready(ready[0]), .done(done[0]), .converged(converged[0]), .e_hat(e_hat[0]),
    .iterations(iterations[0]));
  bp_decoder #(.BB_L(L), .BB_M(MM), .W(8), .F(4), .SUM_PRODUCT(1'b1)) dut_sp (
    .clk, .rst, .start(start_v[1]), .syndrome(syn), .prior, .max_iter,
    .ready(ready[1]), .done(done[1]), .converged(converged[1]), .e_hat(e_hat[1]),
    .iterations(iterations[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(logic [N-1:0] e, int llr4, int maxit, bit vary = 0);
    logic [NMAX-1:0] e_ref;
    logic [MMAX-1:0] s_full;
    int it_ref, cyc;
    bit conv_ref;
    s_full = syndrome(NMAX'(e));
    for (int v = 0; v < NMAX; v++) pri[v] = llr4;
    if (vary) for (int v = 0; v < N; v++) pri[v] = llr4 + $urandom_range(30) - 15;
    for (int v = 0; v < N; v++) prior[v] = LLR_W'(pri[v]);
    if (sel) decode_v(s_full, 8, 4, 0, 1, maxit, e_ref, it_ref, conv_ref);
    else     decode_v(s_full, W, F, AL, 0, maxit, e_ref, it_ref, conv_ref);
    @(negedge clk);
    check(ready[sel], "ready before start");
    syn = s_full[M-1:0];
    max_iter = ITER_W'(maxit);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done[sel]) begin @(negedge clk); cyc++; end
    check(converged[sel] == conv_ref, $sformatf("decoder %0d converged %0b ref %0b", sel, converged[sel], conv_ref));
    check(int'(iterations[sel]) == it_ref, $sformatf("decoder %0d iterations %0d ref %0d", sel, iterations[sel], it_ref));
    check(e_hat[sel] == e_ref[N-1:0], $sformatf("decoder %0d hard decision differs from reference", sel));
    check(cyc == 2 * it_ref + 2, $sformatf("latency %0d expected %0d", cyc, 2 * it_ref + 2));
    if (converged[sel]) check(syndrome(NMAX'(e_hat[sel])) == s_full, "converged but syndrome differs");
    if (converged[sel]) n_conv++; else n_fail++;
  endtask

  initial begin
    logic [N-1:0] e;
    set_code(L, MM);
    repeat (3) @(posedge clk);
    rst = 0;
    // zero syndrome: converges immediately
    run('0, 40, 10);
    check(iterations[0] == 0 && converged[0], "zero syndrome converges in 0 iterations");
    // every single-qubit error is corrected exactly
    for (int v = 0; v < N; v += 5) begin
      e = '0; e[v] = 1'b1;
      run(e, 40, 10);
      check(converged[0] && e_hat[0] == e, $sformatf("single error on qubit %0d", v));
    end
    // random errors of weight 2..5, several priors
    for (int t = 0; t < 60; t++) begin
      int wt = 2 + (t % 4);
      e = '0;
      for (int i = 0; i < wt; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, (t % 3 == 0) ? 24 : (t % 3 == 1) ? 40 : 55, 12, t % 2);
    end
    // the same with the sum-product decoder
    sel = 1;
    run('0, 40, 10);
    for (int t = 0; t < 60; t++) begin
      int wt = 2 + (t % 4);
      e = '0;
      for (int i = 0; i < wt; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, (t % 3 == 0) ? 24 : (t % 3 == 1) ? 40 : 55, 12, t % 2);
    end
    sel = 0;
    // iteration limit
    for (int t = 0; t < 10; t++) begin
      e = '0;
      for (int i = 0; i < 6; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, 40, 1 + (t % 2));
    end
    check(n_fail > 0, "some runs ended without convergence");
    check(n_conv > 0, "some runs converged");
    $display("converged %0d, not converged %0d at t=%0t", n_conv, n_fail, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
