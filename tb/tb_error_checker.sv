// tb_error_checker: checks the checker on the (144,12,12) code. The number of logical
// operators must be k = 12; every logical operator must lie in ker(H_Z); residuals that are
// stabilizers (sums of H_Z rows) must not count as logical errors, while residuals in ker(H_X)
// outside the row space of H_Z (found by rank test in the model) must; non-converged frames
// count as logical errors; the counters follow a model and the 16-bit counters saturate.
module tb_error_checker;
  import qec_pkg::*;
  import ms_model_pkg::*;
  localparam int N = 144;
  logic clk = 0, rst = 1, clear = 0, check = 0, converged = 1, escalated = 0;
  logic [N-1:0] e = '0, e_hat = '0;
  logic [ITER_W+3:0] iterations = '0;
  logic log_fail;
  logic [ERRC_W-1:0] phys_errors, log_errors;
  logic [FRAME_W-1:0] frames;
  logic [ITOT_W-1:0] iter_total;
  logic [31:0] escalations;
  int checks = 0, failures = 0;
  int m_phys = 0, m_log = 0, m_frames = 0, m_it = 0, m_esc = 0;

  error_checker dut (.clk, .rst, .clear, .check, .e, .e_hat, .converged, .iterations,
    .escalated, .log_fail, .phys_errors, .log_errors, .frames, .iter_total, .escalations);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  task automatic frame(logic [N-1:0] ee, logic [N-1:0] eh, bit cv, int it, bit esc, bit exp_log);
    e = ee; e_hat = eh; converged = cv; iterations = (ITER_W+4)'(it); escalated = esc;
    check = 1;
    #1;
    chk(log_fail == exp_log, $sformatf("log_fail %0b expected %0b", log_fail, exp_log));
    @(negedge clk); check = 0;
    m_frames++; m_it += it; if (ee != eh) m_phys++; if (exp_log) m_log++; if (esc) m_esc++;
    chk(frames == FRAME_W'(m_frames) && iter_total == ITOT_W'(m_it), "frame and iteration counters");
    chk(phys_errors == ERRC_W'(m_phys) && log_errors == ERRC_W'(m_log), "error counters");
    chk(escalations == m_esc, "escalation counter");
  endtask

  // a random vector in ker(H_X): random combination of a kernel basis found by elimination
  function automatic logic [N-1:0] kernel_hx_vector();
    logic [N-1:0] rows [72];
    int piv [72];
    int rk;
    logic [N-1:0] v;
    bit is_p [N];
    for (int c = 0; c < 72; c++) for (int q = 0; q < N; q++) rows[c][q] = hx[c][q];
    for (int q = 0; q < N; q++) is_p[q] = 0;
    rk = 0;
    for (int col = 0; col < N && rk < 72; col++) begin
      int p = -1;
      for (int i = rk; i < 72; i++) if (rows[i][col]) begin p = i; break; end
      if (p >= 0) begin
        logic [N-1:0] t = rows[p]; rows[p] = rows[rk]; rows[rk] = t;
        for (int i = 0; i < 72; i++) if (i != rk && rows[i][col]) rows[i] ^= rows[rk];
        piv[rk] = col; is_p[col] = 1; rk++;
      end
    end
    v = '0;
    for (int q = 0; q < N; q++) if (!is_p[q] && $urandom_range(1)) v[q] = 1;
    for (int i = 0; i < rk; i++) v[piv[i]] = ^(rows[i] & v & ~(N'(1) << piv[i]));
    return v;
  endfunction

  initial begin
    logic [N-1:0] a, b, r;
    int nlog;
    set_code(12, 6);
    repeat (2) @(negedge clk);
    rst = 0;
    chk(dut.K == 12, $sformatf("number of logical operators %0d, expected 12", dut.K));
    for (int i = 0; i < dut.K; i++) begin
      logic [MMAX-1:0] sz;
      bit ok = 1;
      for (int c = 0; c < 72; c++) begin
        bit p = 0;
        for (int q = 0; q < N; q++) if (hz[c][q]) p ^= dut.LOPS[i][q];
        if (p) ok = 0;
      end
      chk(ok, $sformatf("logical operator %0d commutes with H_Z", i));
    end
    // correct decoding
    for (int t = 0; t < 20; t++) begin
      a = '0; for (int i = 0; i < 5; i++) a[$urandom_range(N - 1)] = 1;
      frame(a, a, 1, t % 7, t % 3 == 0, 0);
    end
    // stabilizer residuals: physical but not logical errors
    for (int t = 0; t < 30; t++) begin
      r = '0;
      for (int c = 0; c < 72; c++) if ($urandom_range(1)) for (int q = 0; q < N; q++) r[q] ^= hz[c][q];
      a = '0; for (int i = 0; i < 4; i++) a[$urandom_range(N - 1)] = 1;
      frame(a, a ^ r, 1, 3, 0, 0);
    end
    // kernel vectors of H_X: logical error unless in the row space of H_Z
    nlog = 0;
    for (int t = 0; t < 40; t++) begin
      bit lg;
      r = kernel_hx_vector();
      lg = rank_hz(1, NMAX'(r)) > rank_hz(0, '0);
      if (lg) nlog++;
      a = '0; a[$urandom_range(N - 1)] = 1;
      frame(a, a ^ r, 1, 5, 0, lg);
    end
    chk(nlog > 0, "logical residuals were tested");
    // non-converged frame
    a = '0; a[3] = 1;
    frame(a, '0, 0, 10, 1, 1);
    // clear
    clear = 1; @(negedge clk); clear = 0;
    chk(frames == 0 && log_errors == 0 && phys_errors == 0 && iter_total == 0, "clear");
    m_phys = 0; m_log = 0; m_frames = 0; m_it = 0; m_esc = 0;
    // saturation of the logical error counter
    e = '0; e_hat = '0; e_hat[0] = 1; converged = 0; iterations = 1;
    check = 1;
    repeat (65540) @(negedge clk);
    check = 0;
    chk(log_errors == 16'hFFFF && phys_errors == 16'hFFFF, "16-bit counters saturate");
    chk(frames == 65540, "frame counter keeps counting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
