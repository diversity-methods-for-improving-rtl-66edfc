// bp_diversity_decoder: tree of five BP decoders that differ in update rule, scaling factor
// and prior information (diversity based on BP implementations).
//
// Procedure (one decoding):
//   stage A  sum-product decoder, IT_A iterations, prior y.
//   stage B  if A fails: two scaled min-sum decoders in parallel, IT_B iterations each,
//            "accurate" alpha = ALPHA_B0/32 (0.9) and "diverse" alpha = ALPHA_B1/32 (0.75).
//            Both get the prior y' = g*e'_A + (1-g)*y built from A's hard decision e'_A,
//            with g = G_B0/16 and G_B1/16 (0.75 each).
//   stage C  if both B decoders fail: two min-sum decoders in parallel whose prior is built
//            from the hard decision of the diverse B decoder: alpha = ALPHA_C0/32 (0.5) for
//            IT_C iterations with g = G_C0/16 (0.5), and a short decoder of IT_D iterations
//            (alpha = ALPHA_C1/32 = 0.75) with g = G_C1/16 (0.5) that feeds a post-processor.
// The prior modification is computed without multipliers: (1-g)*y is y*(16-G)/16 formed by
// shifts and adds (arithmetic shift right by 4), and g*e' is G (in units of 1/16 LLR, i.e.
// g times the binary value e' with the LLR's 4 fractional bits) added where e' = 1.
// Result priority: A, then B alpha 0.9, then B alpha 0.75, then C alpha 0.5, then the short
// decoder. 'winner' gives the decoder (0..4) whose decision was taken. If no decoder
// converges, e_hat is the short decoder's decision, converged = 0, and the post-processing
// request pp_req has been raised: a one-cycle pulse as soon as the short decoder ends without
// converging, with pp_prior (its prior) and pp_e_hat (its hard decision) held until the next
// start. The post-processor itself (LSD or OSD) is not part of this block.
// 'iterations' is the latency in BP iterations: A's count plus, for every further stage, the
// larger count of its two decoders (worst case IT_A + IT_B + IT_C).
//
// Interface: ready / start (latches syndrome and prior) / done (one-cycle pulse); results
// held until the next start. Latency from the start edge to done: 2*it_A+3 cycles for stage A,
// 2*it+4 for stages B and C (it = the larger count of the stage's two decoders; one cycle more
// because the two done pulses are collected in a register), plus one cycle for the result.
//
// Follows the published procedure: the decoder tree, rules, alpha, gamma and iteration
// counts, and where each stage's hard decision comes from. Design choices: q[8,4] messages for
// all five decoders, alpha 0.75 for the short decoder, alpha 0.9 realised as 29/32, one
// hardware instance per decoder (no sharing), the priority order inside a stage, waiting for
// both decoders of a stage, and the e' term entering with the binary value of e'.
module bp_diversity_decoder
  import qec_pkg::*;
#(
  parameter int BB_L     = 12,
  parameter int BB_M     = 6,
  parameter int W        = 8,     // message width of all decoders
  parameter int F        = 4,     // fractional bits
  parameter int IT_A     = 10,    // sum-product iterations
  parameter int IT_B     = 10,    // iterations of both stage-B decoders
  parameter int IT_C     = 10,    // iterations of the stage-C BP decoder
  parameter int IT_D     = 2,     // iterations of the short decoder before post-processing
  parameter int ALPHA_B0 = 29,    // alpha = ALPHA/32
  parameter int ALPHA_B1 = 24,
  parameter int ALPHA_C0 = 16,
  parameter int ALPHA_C1 = 24,
  parameter int G_B0     = 12,    // gamma = G/16
  parameter int G_B1     = 12,
  parameter int G_C0     = 8,
  parameter int G_C1     = 8,
  localparam int N = 2 * BB_L * BB_M,
  localparam int M = BB_L * BB_M
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [M-1:0]            syndrome,
  input  logic signed [LLR_W-1:0] prior [N],
  output logic                    ready,
  output logic                    done,
  output logic                    converged,
  output logic [N-1:0]            e_hat,
  output logic [2:0]              winner,
  output logic [ITER_W+1:0]       iterations,
  output logic                    pp_req,
  output logic signed [LLR_W-1:0] pp_prior [N],
  output logic [N-1:0]            pp_e_hat
);

  localparam int ND = 5;
  localparam int ALPHA [ND] = '{24, ALPHA_B0, ALPHA_B1, ALPHA_C0, ALPHA_C1};  // [0] unused
  localparam int ITS   [ND] = '{IT_A, IT_B, IT_B, IT_C, IT_D};

  typedef enum logic [2:0] {S_IDLE, S_A, S_B, S_C, S_DONE} state_t;
  state_t state;

  typedef logic signed [LLR_W-1:0] llr_t;

  logic [M-1:0]      s_r;
  llr_t              y_r  [N];
  llr_t              y_in [ND][N];     // prior of each decoder
  logic [ND-1:0]     d_start, d_done, d_conv, got;
  logic [N-1:0]      d_e  [ND];
  logic [ITER_W-1:0] d_it [ND];
  logic [ITER_W-1:0] it_b, it_c;
  logic              kick;

  // y' = g*e' + (1-g)*y with g = G/16.
  function automatic llr_t modify(input llr_t y, input logic e, input int G);
    logic signed [LLR_W+4:0] p;
    p = (LLR_W+5)'(y) * (LLR_W+5)'(16 - G);
    return llr_t'((p >>> 4) + (e ? (LLR_W+5)'(G) : '0));
  endfunction

  always_comb for (int v = 0; v < N; v++) y_in[0][v] = y_r[v];

  for (genvar i = 0; i < ND; i++) begin : g_dec
    bp_decoder #(
      .BB_L(BB_L), .BB_M(BB_M), .W(W), .F(F), .ALPHA_NUM(ALPHA[i]), .SUM_PRODUCT(i == 0)
    ) u_dec (
      .clk, .rst,
      .start      (d_start[i]),
      .syndrome   (s_r),
      .prior      (y_in[i]),
      .max_iter   (ITER_W'(ITS[i])),
      .ready      (),
      .done       (d_done[i]),
      .converged  (d_conv[i]),
      .e_hat      (d_e[i]),
      .iterations (d_it[i])
    );
  end

  assign d_start[0] = kick && state == S_A;
  assign d_start[1] = kick && state == S_B;
  assign d_start[2] = kick && state == S_B;
  assign d_start[3] = kick && state == S_C;
  assign d_start[4] = kick && state == S_C;

  assign ready = (state == S_IDLE);
  assign it_b  = (d_it[1] > d_it[2]) ? d_it[1] : d_it[2];
  assign it_c  = (d_it[3] > d_it[4]) ? d_it[3] : d_it[4];
  assign pp_e_hat = d_e[4];
  always_comb for (int v = 0; v < N; v++) pp_prior[v] = y_in[4][v];

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      kick       <= 1'b0;
      got        <= '0;
      done       <= 1'b0;
      pp_req     <= 1'b0;
      converged  <= 1'b0;
      e_hat      <= '0;
      winner     <= '0;
      iterations <= '0;
      s_r        <= '0;
      for (int v = 0; v < N; v++) begin
        y_r[v] <= '0;
        for (int i = 1; i < ND; i++) y_in[i][v] <= '0;
      end
    end else begin
      kick   <= 1'b0;
      done   <= 1'b0;
      pp_req <= 1'b0;
      got    <= got | d_done;
      if (d_done[4] && !d_conv[4]) pp_req <= 1'b1;
      case (state)
        S_IDLE: if (start) begin
          s_r <= syndrome;
          for (int v = 0; v < N; v++) y_r[v] <= prior[v];
          got        <= '0;
          kick       <= 1'b1;
          iterations <= '0;
          state      <= S_A;
        end
        S_A: if (d_done[0]) begin
          iterations <= (ITER_W+2)'(d_it[0]);
          if (d_conv[0]) begin
            converged <= 1'b1; e_hat <= d_e[0]; winner <= 3'd0;
            done <= 1'b1; state <= S_IDLE;
          end else begin
            for (int v = 0; v < N; v++) begin
              y_in[1][v] <= modify(y_r[v], d_e[0][v], G_B0);
              y_in[2][v] <= modify(y_r[v], d_e[0][v], G_B1);
            end
            got <= '0; kick <= 1'b1; state <= S_B;
          end
        end
        S_B: if (got[2:1] == 2'b11) begin
          iterations <= iterations + (ITER_W+2)'(it_b);
          if (d_conv[1] || d_conv[2]) begin
            converged <= 1'b1;
            e_hat     <= d_conv[1] ? d_e[1] : d_e[2];
            winner    <= d_conv[1] ? 3'd1 : 3'd2;
            done <= 1'b1; state <= S_IDLE;
          end else begin
            for (int v = 0; v < N; v++) begin
              y_in[3][v] <= modify(y_r[v], d_e[2][v], G_C0);
              y_in[4][v] <= modify(y_r[v], d_e[2][v], G_C1);
            end
            got <= '0; kick <= 1'b1; state <= S_C;
          end
        end
        S_C: if (got[4:3] == 2'b11) begin
          iterations <= iterations + (ITER_W+2)'(it_c);
          converged  <= d_conv[3] || d_conv[4];
          e_hat      <= d_conv[3] ? d_e[3] : d_e[4];
          winner     <= d_conv[3] ? 3'd3 : 3'd4;
          done <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle : assert property (@(posedge clk) disable iff (rst) start |-> ready)
    else $error("BP diversity decoder started while busy");

endmodule
