// tb_bp_diversity_decoder: checks the five-decoder BP diversity tree on the (72,12,6)
// bivariate bicycle code against a reference built from the bit-accurate decoder model of
// ms_model_pkg: the same stage sequence, prior modification y' = g*e' + (1-g)*y (computed
// here in floating point and floored), priorities and fall-back.
//
// Random Z errors of weight 1..20 with per-qubit priors are decoded; for each frame the
// testbench compares converged, e_hat, winner, the iteration latency count, the number of
// post-processing requests and their prior / hard-decision outputs, and the cycle count from
// start to done (2*it+3 for stage A, 2*it+4 for the larger count of
// stage B and of stage C, plus 1). Each of the five possible winners and the
// post-processing request must occur at least once, otherwise a failure is counted. A second
// instance with ALPHA_B0 = ALPHA_C0 = 0 makes the alpha-0.75 and short decoders win more often,
// so that their selection paths are exercised.
module tb_bp_diversity_decoder;
  import qec_pkg::*;
  import ms_model_pkg::*;

  localparam int L = 6, MM = 6, N = 72, M = 36;
  localparam int W = 8, F = 4;

  logic clk = 0, rst = 1;
  logic start = 0;
  logic [M-1:0] syn = '0;
  logic signed [LLR_W-1:0] prior [N];
  logic ready, done, converged, pp_req;
  logic [N-1:0] e_hat, pp_e_hat;
  logic [2:0] winner;
  logic [ITER_W+1:0] iterations;
  logic signed [LLR_W-1:0] pp_prior [N];
  // second instance whose alpha-0.9 and alpha-0.5 decoders have alpha 0 (check messages
  // cleared), so that the results of the decoders behind them are selected more often
  bit sel = 0;
  int al_b0 = 29, al_c0 = 16;
  logic ready2, done2, converged2, pp_req2;
  logic [N-1:0] e_hat2, pp_e_hat2;
  logic [2:0] winner2;
  logic [ITER_W+1:0] iterations2;
  logic signed [LLR_W-1:0] pp_prior2 [N];

  int checks = 0, failures = 0;
  int n_win [6];
  int n_pp = 0;

  bp_diversity_decoder #(.BB_L(L), .BB_M(MM)) dut (
    .clk, .rst, .start(start1), .syndrome(syn), .prior, .ready, .done, .converged, .e_hat, .winner,
    .iterations, .pp_req, .pp_prior, .pp_e_hat);
  bp_diversity_decoder #(.BB_L(L), .BB_M(MM), .ALPHA_B0(0), .ALPHA_C0(0)) dut2 (
    .clk, .rst, .start(start && sel), .syndrome(syn), .prior, .ready(ready2), .done(done2),
    .converged(converged2), .e_hat(e_hat2), .winner(winner2), .iterations(iterations2),
    .pp_req(pp_req2), .pp_prior(pp_prior2), .pp_e_hat(pp_e_hat2));
  logic start1;
  assign start1 = start && !sel;

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && (pp_req || pp_req2)) n_pp++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int modify(int y, bit e, int g16);
    return int'($floor(real'(y) * (1.0 - real'(g16) / 16.0))) + (e ? g16 : 0);
  endfunction

  // Reference: runs the decoder tree on the model.
  task automatic model(input logic [MMAX-1:0] s, input int y [N],
                       output logic [NMAX-1:0] e_out, output bit conv, output int win,
                       output int its, output int cyc, output bit pp, output int ypp [N],
                       output logic [NMAX-1:0] epp);
    logic [NMAX-1:0] ea, eb0, eb1, ec0, ec1;
    int ia, ib0, ib1, ic0, ic1;
    bit ca, cb0, cb1, cc0, cc1;
    pp = 0;
    for (int v = 0; v < NMAX; v++) pri[v] = (v < N) ? y[v] : 0;
    decode_v(s, W, F, 0, 1, 10, ea, ia, ca);
    its = ia;
    cyc = 2 * ia + 3;
    if (ca) begin e_out = ea; conv = 1; win = 0; cyc++; return; end
    for (int v = 0; v < N; v++) pri[v] = modify(y[v], ea[v], 12);
    decode_v(s, W, F, al_b0, 0, 10, eb0, ib0, cb0);
    decode_v(s, W, F, 24, 0, 10, eb1, ib1, cb1);
    its += (ib0 > ib1) ? ib0 : ib1;
    cyc += 2 * ((ib0 > ib1) ? ib0 : ib1) + 4;
    if (cb0 || cb1) begin
      e_out = cb0 ? eb0 : eb1; conv = 1; win = cb0 ? 1 : 2; cyc++; return;
    end
    for (int v = 0; v < N; v++) pri[v] = modify(y[v], eb1[v], 8);
    decode_v(s, W, F, al_c0, 0, 10, ec0, ic0, cc0);
    decode_v(s, W, F, 24, 0, 2, ec1, ic1, cc1);
    for (int v = 0; v < N; v++) ypp[v] = pri[v];
    epp = ec1;
    pp = !cc1;
    its += (ic0 > ic1) ? ic0 : ic1;
    cyc += 2 * ((ic0 > ic1) ? ic0 : ic1) + 4 + 1;
    conv = cc0 || cc1;
    e_out = cc0 ? ec0 : ec1;
    win = cc0 ? 3 : 4;
  endtask

  task automatic run(logic [N-1:0] e, int llr4);
    logic [NMAX-1:0] e_ref, epp;
    logic [MMAX-1:0] s_full;
    int y [N], ypp [N];
    int win, its, cyc_ref, cyc, pp0;
    bit conv, pp;
    s_full = syndrome(NMAX'(e));
    for (int v = 0; v < N; v++) y[v] = llr4 + $urandom_range(24) - 12;
    model(s_full, y, e_ref, conv, win, its, cyc_ref, pp, ypp, epp);
    @(negedge clk);
    check(sel ? ready2 : ready, "ready before start");
    syn = s_full[M-1:0];
    for (int v = 0; v < N; v++) prior[v] = LLR_W'(y[v]);
    pp0 = n_pp;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!(sel ? done2 : done)) begin @(negedge clk); cyc++; end
    begin
      bit cv = sel ? converged2 : converged;
      logic [2:0] wn = sel ? winner2 : winner;
      logic [N-1:0] eh = sel ? e_hat2 : e_hat;
      logic [N-1:0] ppe = sel ? pp_e_hat2 : pp_e_hat;
      int itr = sel ? int'(iterations2) : int'(iterations);
      check(cv == conv, $sformatf("converged %0b ref %0b", cv, conv));
      check(int'(wn) == win, $sformatf("winner %0d ref %0d", wn, win));
      check(eh == e_ref[N-1:0], "hard decision differs from reference");
      check(itr == its, $sformatf("iterations %0d ref %0d", itr, its));
      check(cyc == cyc_ref, $sformatf("latency %0d expected %0d", cyc, cyc_ref));
      check(n_pp - pp0 == int'(pp), $sformatf("post-processing requests %0d expected %0b", n_pp - pp0, pp));
      if (conv) check(syndrome(NMAX'(eh)) == s_full, "converged but syndrome differs");
      if (win >= 3) begin
        bit ok = (ppe == epp[N-1:0]);
        for (int v = 0; v < N; v++)
          if (int'(sel ? pp_prior2[v] : pp_prior[v]) != ypp[v]) ok = 0;
        check(ok, "post-processing prior / hard decision differ from reference");
      end
    end
    n_win[(win == 4 && !conv) ? 5 : win]++;
  endtask

  initial begin
    logic [N-1:0] e;
    set_code(L, MM);
    for (int v = 0; v < N; v++) prior[v] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run('0, 40);
    check(winner == 0 && iterations == 0, "zero syndrome decoded by stage A in 0 iterations");
    for (int t = 0; t < 1500; t++) begin
      int wt = 1 + (t % 20);
      e = '0;
      for (int i = 0; i < wt; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, (t % 2) ? 24 : 14);
    end
    // the same with the second instance
    sel = 1;
    al_b0 = 0;
    al_c0 = 0;
    for (int t = 0; t < 300; t++) begin
      int wt = 1 + (t % 20);
      e = '0;
      for (int i = 0; i < wt; i++) e[$urandom_range(N - 1)] = 1'b1;
      run(e, (t % 2) ? 24 : 14);
    end
    $display("winners: A %0d, B0.9 %0d, B0.75 %0d, C0.5 %0d, short %0d, none %0d, pp %0d",
             n_win[0], n_win[1], n_win[2], n_win[3], n_win[4], n_win[5], n_pp);
    for (int i = 0; i < 6; i++) check(n_win[i] > 0, $sformatf("outcome %0d never happened", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
