// bp_decoder: fully parallel, flooded, syndrome-based belief-propagation decoder for the H_X
// matrix of a bivariate bicycle code, with messages quantized to W bits, F of them fractional
// (scheme q[W,F]). The check-node rule is scaled min-sum (SUM_PRODUCT = 0) or sum-product
// (SUM_PRODUCT = 1).
//
// Every check node and every variable node has its own processing unit, so one iteration
// takes two clock cycles: in the CN cycle all check nodes compute their check-to-variable
// messages, in the VN cycle all variable nodes compute their variable-to-check messages and
// hard decisions.
//   Check node c, edge k:  R = (-1)^(s_c xor sign of the other inputs) * |R|
//     min-sum:     |R| = alpha * min|Q_other|
//     sum-product: |R| = phi(sum phi(|Q_other|)),  phi(x) = ln((e^x+1)/(e^x-1))
//   Variable node v:       L_v = y_v + sum_t R_t;  Q_t = sat(L_v - R_t);  e'_v = (L_v < 0)
// Messages are W-bit two's-complement values saturated to +/-(2^(W-1)-1). alpha =
// ALPHA_NUM/32 is applied to the minimum magnitude by a constant multiply (shifts and adds)
// followed by truncation, which is one of the quantization effects the design studies.
// For sum-product, phi is a 2^(W-1)-entry table over the message magnitudes, computed at
// elaboration from the formula above (phi(0) taken at half a step) and rounded to q[W,F];
// the sum of the phi values is kept 3 bits wider and saturated before the second lookup.
// The priors y_v (LLR log(P(e=0)/P(e=1)) per qubit) arrive with LLR_F fractional bits and are
// converted to q[W,F] by truncation and saturation.
//
// Early stop: at the start of every CN cycle the hard decision is checked against the
// syndrome; if all checks are satisfied (or max_iter iterations have run) decoding ends.
// Interface: 'ready' while idle; a 'start' pulse while ready latches syndrome, prior and
// max_iter. 'done' pulses once; e_hat, converged and iterations are valid from then until the
// next start. Latency: done comes 2*iterations+2 cycles after the start edge; a syndrome of
// all zeros converges with 0 iterations.
//
// The scaled min-sum rule, the fully parallel flooded schedule, two cycles per iteration,
// the start/ready/done interface and early stopping follow the emulator description; the
// sum-product variant is the high-accuracy first decoder of the BP-implementation diversity
// decoder. The two's-complement message format, truncation of the scaled minimum and the phi
// table are this design's choices.
module bp_decoder
  import qec_pkg::*;
#(
  parameter int BB_L      = 12,
  parameter int BB_M      = 6,
  parameter int W         = 7,    // message width
  parameter int F         = 3,    // fractional bits
  parameter int ALPHA_NUM = 24,   // alpha = ALPHA_NUM / 32 (min-sum only)
  parameter bit SUM_PRODUCT = 1'b0,
  localparam int N = 2 * BB_L * BB_M,
  localparam int M = BB_L * BB_M
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [M-1:0]             syndrome,
  input  logic signed [LLR_W-1:0]  prior [N],   // per-qubit prior LLR
  input  logic [ITER_W-1:0]        max_iter,
  output logic                     ready,
  output logic                     done,
  output logic                     converged,
  output logic [N-1:0]             e_hat,
  output logic [ITER_W-1:0]        iterations
);

  localparam int LW  = W + 3;          // width of the variable-node sum (y + 3 messages)
  localparam int MAXM = (1 << (W - 1)) - 1;

  typedef logic signed [W-1:0] msg_t;
  typedef enum logic [1:0] {S_IDLE, S_CN, S_VN, S_DONE} state_t;

  state_t        state;
  logic [M-1:0]  s_r;
  msg_t          y_r [N];
  logic [ITER_W-1:0] max_r;
  msg_t          q   [M][CHK_DEG];     // variable-to-check messages, stored per check edge
  msg_t          r   [M][CHK_DEG];     // check-to-variable messages
  msg_t          r_n [M][CHK_DEG];
  msg_t          q_n [N][VAR_DEG];     // next variable-to-check messages, per variable edge
  logic [N-1:0]  hd_n;
  logic [M-1:0]  unsat;

  // Prior conversion from LLR_F to F fractional bits, with saturation.
  function automatic msg_t conv_prior(input logic signed [LLR_W-1:0] v);
    int x;
    x = int'(v);
    if (F >= LLR_F) x = x * (1 << (F - LLR_F));
    else            x = x >>> (LLR_F - F);
    return msg_t'(sat_sym(x, W));
  endfunction

  typedef logic [W-2:0] mag_t;
  typedef mag_t phi_t [MAXM + 1];

  function automatic phi_t mk_phi();
    phi_t t;
    for (int i = 0; i <= MAXM; i++) begin
      real x, p;
      int  qv;
      x  = (i == 0) ? 0.5 / real'(1 << F) : real'(i) / real'(1 << F);
      p  = $ln(($exp(x) + 1.0) / ($exp(x) - 1.0));
      qv = int'(p * real'(1 << F));
      t[i] = (qv > MAXM) ? mag_t'(MAXM) : mag_t'(qv);
    end
    return t;
  endfunction

  localparam phi_t PHI = mk_phi();

  // ---------------- check-node units ----------------
  for (genvar c = 0; c < M; c++) begin : g_cnu
    logic [W-2:0] mag [CHK_DEG];
    logic [CHK_DEG-1:0] sgn;
    logic [W-2:0] min1, min2;
    logic [$clog2(CHK_DEG)-1:0] idx;
    logic par;

    always_comb begin
      for (int k = 0; k < CHK_DEG; k++) begin
        sgn[k] = q[c][k][W-1];
        mag[k] = sgn[k] ? (W-1)'(-q[c][k]) : q[c][k][W-2:0];
      end
      min1 = (W-1)'(MAXM);
      min2 = (W-1)'(MAXM);
      idx  = '0;
      for (int k = 0; k < CHK_DEG; k++) begin
        if (mag[k] < min1) begin
          min2 = min1;
          min1 = mag[k];
          idx  = ($clog2(CHK_DEG))'(k);
        end else if (mag[k] < min2) begin
          min2 = mag[k];
        end
      end
      par = s_r[c] ^ (^sgn);
    end

    // sum of phi over all edges (sum-product)
    logic [W+1:0] phsum;
    always_comb begin
      phsum = '0;
      for (int k = 0; k < CHK_DEG; k++) phsum = phsum + (W+2)'(PHI[mag[k]]);
    end

    for (genvar k = 0; k < CHK_DEG; k++) begin : g_out
      logic [W-2:0] m_out;
      if (SUM_PRODUCT) begin : g_sp
        logic [W+1:0] ext;
        assign ext   = phsum - (W+2)'(PHI[mag[k]]);
        assign m_out = PHI[(ext > (W+2)'(MAXM)) ? mag_t'(MAXM) : mag_t'(ext)];
      end else begin : g_ms
        logic [W-2:0] m_sel;
        logic [W+4:0] scaled;
        assign m_sel  = (idx == ($clog2(CHK_DEG))'(k)) ? min2 : min1;
        assign scaled = ((W+5)'(m_sel) * (W+5)'(ALPHA_NUM)) >> 5;
        assign m_out  = scaled[W-2:0];
      end
      assign r_n[c][k] = (par ^ sgn[k]) ? -msg_t'({1'b0, m_out}) : msg_t'({1'b0, m_out});
    end

    // Message registers of this check's edges: set to the prior on start, R written in the
    // CN cycle, Q written in the VN cycle.
    for (genvar k = 0; k < CHK_DEG; k++) begin : g_reg
      always_ff @(posedge clk) begin
        if (state == S_IDLE && start) begin
          q[c][k] <= conv_prior(prior[bb_chk_var(BB_L, BB_M, c, k)]);
          r[c][k] <= '0;
        end else if (state == S_CN) begin
          r[c][k] <= r_n[c][k];
        end else if (state == S_VN) begin
          q[c][k] <= q_n[bb_chk_var(BB_L, BB_M, c, k)][k % VAR_DEG];
        end
      end
    end

    // syndrome check of the current hard decision
    logic [CHK_DEG-1:0] hb;
    for (genvar k = 0; k < CHK_DEG; k++) begin : g_hb
      assign hb[k] = e_hat[bb_chk_var(BB_L, BB_M, c, k)];
    end
    assign unsat[c] = s_r[c] ^ (^hb);
  end

  // ---------------- variable-node units ----------------
  for (genvar v = 0; v < N; v++) begin : g_vnu
    logic signed [LW-1:0] total;
    logic signed [LW-1:0] rin [VAR_DEG];
    for (genvar t = 0; t < VAR_DEG; t++) begin : g_in
      assign rin[t] = LW'(r[bb_var_chk(BB_L, BB_M, v, t)][bb_var_pos(BB_L, BB_M, v, t)]);
    end
    always_comb begin
      total = LW'(y_r[v]);
      for (int t = 0; t < VAR_DEG; t++) total = total + rin[t];
    end
    for (genvar t = 0; t < VAR_DEG; t++) begin : g_out
      logic signed [LW-1:0] ext;
      assign ext = total - rin[t];
      assign q_n[v][t] = (ext > LW'(MAXM)) ? msg_t'(MAXM) :
                         (ext < -LW'(MAXM)) ? -msg_t'(MAXM) : msg_t'(ext);
    end
    assign hd_n[v] = total[LW-1];
  end

  // ---------------- control and message registers ----------------
  assign ready = (state == S_IDLE);
  assign done  = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      converged  <= 1'b0;
      iterations <= '0;
      e_hat      <= '0;
      s_r        <= '0;
      for (int v = 0; v < N; v++) y_r[v] <= '0;
      max_r      <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          s_r        <= syndrome;
          for (int v = 0; v < N; v++) y_r[v] <= conv_prior(prior[v]);
          max_r      <= max_iter;
          iterations <= '0;
          converged  <= 1'b0;
          for (int v = 0; v < N; v++) e_hat[v] <= conv_prior(prior[v]) < 0;
          state      <= S_CN;
        end
        S_CN: begin
          if (unsat == '0) begin
            converged <= 1'b1;
            state     <= S_DONE;
          end else if (iterations == max_r) begin
            state     <= S_DONE;
          end else begin
            state     <= S_VN;
          end
        end
        S_VN: begin
          e_hat      <= hd_n;
          iterations <= iterations + 1'b1;
          state      <= S_CN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle : assert property (@(posedge clk) disable iff (rst) start |-> ready)
    else $error("decoder started while busy");

endmodule
