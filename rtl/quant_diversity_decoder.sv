// quant_diversity_decoder: prioritised chain of scaled min-sum decoders that differ only in
// message quantization (diversity based on quantization noise).
//
// NSTAGE decoders are tried one after another, most accurate first; the chain stops at the
// first stage whose hard decision satisfies the syndrome. Each quantization scheme perturbs
// the messages differently (saturation, truncation of the scaled minimum), so a pattern one
// stage fails on is often corrected by another. With the default parameters the order is
// q[7,4], q[8,4], q[4,2], q[3,1].
//
// Result: e_hat of the first converging stage; if no stage converges, e_hat of stage 0 (the
// most accurate decoder) with converged = 0. 'iterations' is the sum of the iterations run by
// all activated stages, 'stage' the index of the last stage run, 'escalated' is high when more
// than stage 0 ran. Interface as for bp_decoder: ready / start / done (one-cycle pulse).
// Latency: for each stage run, 2*iterations+2 cycles, plus one cycle per hand-over and one
// cycle for the final result.
//
// Follows the published design: the decoder chain, its order, stopping at first convergence, and the
// schemes. Design choices: one decoder instance per stage (the published design notes that the four
// decoders could share hardware in pairs, without saying how), the same alpha and max_iter
// for every stage, and falling back to stage 0's decision when none converges.
module quant_diversity_decoder
  import qec_pkg::*;
#(
  parameter int BB_L   = 12,
  parameter int BB_M   = 6,
  parameter int NSTAGE = 4,
  parameter int QW     [NSTAGE] = '{7, 8, 4, 3},
  parameter int QF     [NSTAGE] = '{4, 4, 2, 1},
  parameter int ALPHA  [NSTAGE] = '{24, 24, 24, 24},   // alpha = ALPHA/32
  localparam int N = 2 * BB_L * BB_M,
  localparam int M = BB_L * BB_M,
  localparam int SW = (NSTAGE > 1) ? $clog2(NSTAGE) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [M-1:0]            syndrome,
  input  logic signed [LLR_W-1:0] prior_llr,
  input  logic [ITER_W-1:0]       max_iter,
  output logic                    ready,
  output logic                    done,
  output logic                    converged,
  output logic [N-1:0]            e_hat,
  output logic [ITER_W+3:0]       iterations,
  output logic [SW-1:0]           stage,
  output logic                    escalated
);

  typedef enum logic [1:0] {D_IDLE, D_RUN, D_DONE} state_t;
  state_t state;

  logic [NSTAGE-1:0] st_start, st_done, st_conv;
  logic [N-1:0]      st_e  [NSTAGE];
  logic [ITER_W-1:0] st_it [NSTAGE];
  logic [M-1:0]      s_r;
  logic signed [LLR_W-1:0] y_r;
  logic [ITER_W-1:0] max_r;
  logic [SW-1:0]     cur;
  logic signed [LLR_W-1:0] y_vec [N];
  logic              kick;     // start the current stage in this cycle

  always_comb for (int v = 0; v < N; v++) y_vec[v] = y_r;

  for (genvar i = 0; i < NSTAGE; i++) begin : g_st
    bp_decoder #(
      .BB_L(BB_L), .BB_M(BB_M), .W(QW[i]), .F(QF[i]), .ALPHA_NUM(ALPHA[i])
    ) u_dec (
      .clk, .rst,
      .start      (st_start[i]),
      .syndrome   (s_r),
      .prior      (y_vec),
      .max_iter   (max_r),
      .ready      (),
      .done       (st_done[i]),
      .converged  (st_conv[i]),
      .e_hat      (st_e[i]),
      .iterations (st_it[i])
    );
    assign st_start[i] = kick && (cur == SW'(i));
  end

  assign ready = (state == D_IDLE);
  assign done  = (state == D_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= D_IDLE;
      kick       <= 1'b0;
      cur        <= '0;
      converged  <= 1'b0;
      e_hat      <= '0;
      iterations <= '0;
      stage      <= '0;
      escalated  <= 1'b0;
      s_r        <= '0;
      y_r        <= '0;
      max_r      <= '0;
    end else begin
      kick <= 1'b0;
      case (state)
        D_IDLE: if (start) begin
          s_r        <= syndrome;
          y_r        <= prior_llr;
          max_r      <= max_iter;
          cur        <= '0;
          kick       <= 1'b1;
          iterations <= '0;
          state      <= D_RUN;
        end
        D_RUN: if (st_done[cur]) begin
          iterations <= iterations + (ITER_W+4)'(st_it[cur]);
          stage      <= cur;
          escalated  <= (cur != '0);
          if (st_conv[cur]) begin
            converged <= 1'b1;
            e_hat     <= st_e[cur];
            state     <= D_DONE;
          end else if (int'(cur) == NSTAGE - 1) begin
            converged <= 1'b0;
            e_hat     <= st_e[0];
            state     <= D_DONE;
          end else begin
            cur  <= cur + 1'b1;
            kick <= 1'b1;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  a_start_idle : assert property (@(posedge clk) disable iff (rst) start |-> ready)
    else $error("diversity decoder started while busy");

endmodule
