// error_checker: compares the decoder's estimate with the injected error and keeps the
// emulator's result counters.
//
// On 'check' (one cycle per decoded frame) it forms the residual r = e xor e_hat and its
// product with the logical-operator matrix L (K rows), all in parallel and in the same cycle:
//   physical error : e_hat != e                      -> phys_errors += 1
//   logical error  : L*r != 0, or the decoder did not converge  -> log_errors += 1
//   every frame    : frames += 1, iter_total += iterations of the frame
//   escalated      : escalations += 1 (the diversity chain went past its first decoder)
// 'log_fail' flags, in the same cycle as 'check', a frame that counts as a logical error, so
// the failing pattern can be stored. 'clear' zeroes all counters. The 16-bit error counters
// saturate; the 80-bit frame counter cannot overflow in practice.
//
// L is computed at elaboration from the code: the rows of H_X are put in echelon form, a
// kernel basis of H_Z is built, and every kernel vector that is independent of the row space
// of H_X is kept. These K = n - rank(H_X) - rank(H_Z) vectors are X-type logical operators;
// a Z-type residual with zero syndrome is a logical error exactly when it anticommutes with
// one of them.
//
// Follows the published design: the XOR with the real error, the product with the logical-operator matrix,
// the 16-bit physical and logical error counters, the 80-bit frame counter and the iteration
// accumulator. Design choices: counting a non-converged frame as a logical error, saturation,
// and deriving L from the matrices rather than storing it.
module error_checker
  import qec_pkg::*;
#(
  parameter int BB_L = 12,
  parameter int BB_M = 6,
  parameter int IT_W = ITER_W + 4,     // width of the per-frame iteration count
  localparam int N = 2 * BB_L * BB_M,
  localparam int M = BB_L * BB_M
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clear,
  input  logic               check,
  input  logic [N-1:0]       e,
  input  logic [N-1:0]       e_hat,
  input  logic               converged,
  input  logic [IT_W-1:0]    iterations,
  input  logic               escalated,
  output logic               log_fail,
  output logic [ERRC_W-1:0]  phys_errors,
  output logic [ERRC_W-1:0]  log_errors,
  output logic [FRAME_W-1:0] frames,
  output logic [ITOT_W-1:0]  iter_total,
  output logic [31:0]        escalations
);

  typedef logic [N-1:0] vec_t;
  typedef vec_t [N-1:0] mat_t;

  function automatic vec_t hx_row(input int c);
    vec_t v = '0;
    for (int k = 0; k < CHK_DEG; k++) v[bb_chk_var(BB_L, BB_M, c, k)] = 1'b1;
    return v;
  endfunction

  function automatic vec_t hz_row(input int c);
    vec_t v = '0;
    for (int k = 0; k < CHK_DEG; k++) v[bb_hz_var(BB_L, BB_M, c, k)] = 1'b1;
    return v;
  endfunction

  function automatic int lowest_one(input vec_t v);
    for (int i = 0; i < N; i++) if (v[i]) return i;
    return -1;
  endfunction

  // Returns the logical operators in the first rows of the result, the other rows zero.
  function automatic mat_t logicals();
    mat_t basis;       // independent vectors, each with a distinct pivot
    int   piv [N];
    int   nb;
    vec_t rz  [M];     // H_Z in reduced row echelon form
    int   pz  [M];
    int   nz;
    logic is_piv [N];
    mat_t logs;
    vec_t v;
    int   p;
    int   cnt;
    nb = 0; nz = 0; cnt = 0;
    for (int i = 0; i < N; i++) begin
      logs[i] = '0; basis[i] = '0; piv[i] = 0; is_piv[i] = 1'b0;
    end
    // echelon basis of the row space of H_X
    for (int c = 0; c < M; c++) begin
      v = hx_row(c);
      for (int b = 0; b < nb; b++) if (v[piv[b]]) v ^= basis[b];
      p = lowest_one(v);
      if (p >= 0) begin basis[nb] = v; piv[nb] = p; nb++; end
    end
    // reduced row echelon form of H_Z
    for (int c = 0; c < M; c++) begin
      v = hz_row(c);
      for (int b = 0; b < nz; b++) if (v[pz[b]]) v ^= rz[b];
      p = lowest_one(v);
      if (p >= 0) begin
        for (int b = 0; b < nz; b++) if (rz[b][p]) rz[b] ^= v;
        rz[nz] = v; pz[nz] = p; is_piv[p] = 1'b1; nz++;
      end
    end
    // kernel vectors of H_Z (one per free column), kept if independent of rowspace(H_X)
    for (int f = 0; f < N; f++) begin
      if (!is_piv[f]) begin
        v = '0;
        v[f] = 1'b1;
        for (int b = 0; b < nz; b++) if (rz[b][f]) v[pz[b]] = 1'b1;
        for (int b = 0; b < nb; b++) if (v[piv[b]]) v ^= basis[b];
        p = lowest_one(v);
        if (p >= 0) begin
          basis[nb] = v; piv[nb] = p; nb++;
          logs[cnt] = v; cnt++;
        end
      end
    end
    return logs;
  endfunction

  function automatic int num_logicals();
    mat_t l;
    int k;
    l = logicals();
    k = 0;
    for (int i = 0; i < N; i++) if (l[i] != '0) k++;
    return k;
  endfunction

  localparam int   K    = num_logicals();
  localparam mat_t LOPS = logicals();

  logic [N-1:0] resid;
  logic [K-1:0] lsyn;

  assign resid = e ^ e_hat;
  for (genvar i = 0; i < K; i++) begin : g_log
    assign lsyn[i] = ^(resid & LOPS[i]);
  end
  assign log_fail = check && ((lsyn != '0) || !converged);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      phys_errors <= '0;
      log_errors  <= '0;
      frames      <= '0;
      iter_total  <= '0;
      escalations <= '0;
    end else if (check) begin
      if (escalated) escalations <= escalations + 1'b1;
      frames     <= frames + 1'b1;
      iter_total <= iter_total + ITOT_W'(iterations);
      if (resid != '0 && phys_errors != '1) phys_errors <= phys_errors + 1'b1;
      if (log_fail && log_errors != '1)     log_errors  <= log_errors + 1'b1;
    end
  end

endmodule
