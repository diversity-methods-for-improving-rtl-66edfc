// qec_emulator: hardware emulator that measures the logical error rate of a quantum LDPC
// decoder by running it on random error patterns at full clock rate.
//
// Data path: noise_source draws an error pattern of n bits with NG comparators per cycle
// (ceil(n/NG) cycles per pattern) and holds it in the noisy sequence register;
// syndrome_unit forms s = H_X e; the decoder under test, here the quantization-diversity
// chain of min-sum decoders, estimates e from s; error_checker compares the estimate with e,
// multiplies the residual by the logical operators and updates the counters; a frame that
// ends in a logical error has its pattern written to failing_pattern_ram. control_layer runs
// noise generation and decoding as two overlapping state machines and stops the run when the
// target number of logical errors has been found. param_interface holds the run-time
// settings and exposes settings and results on a register bus.
//
// Ports: host register bus (we/waddr/wdata, raddr/rdata; map in param_interface), a read
// port of the failing-pattern memory, and running/ready. The network stack that would carry
// these to a host computer is not part of this RTL.
//
// Defaults: the (144,12,12) bivariate bicycle code, NG = 40 noise generators, and the
// diversity chain q[7,4], q[8,4], q[4,2], q[3,1] with alpha = 0.75.
module qec_emulator
  import qec_pkg::*;
#(
  parameter int BB_L      = 12,
  parameter int BB_M      = 6,
  parameter int NG        = 40,
  parameter int NSTAGE    = 4,
  parameter int QW    [NSTAGE] = '{7, 8, 4, 3},
  parameter int QF    [NSTAGE] = '{4, 4, 2, 1},
  parameter int ALPHA [NSTAGE] = '{24, 24, 24, 24},   // alpha = ALPHA/32
  parameter int RAM_DEPTH = 65536,
  localparam int N  = 2 * BB_L * BB_M,
  localparam int M  = BB_L * BB_M,
  localparam int AW = $clog2(RAM_DEPTH),
  localparam int SW = (NSTAGE > 1) ? $clog2(NSTAGE) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          we,
  input  logic [4:0]    waddr,
  input  logic [31:0]   wdata,
  input  logic [4:0]    raddr,
  output logic [31:0]   rdata,
  input  logic [AW-1:0] ram_raddr,
  output logic [N-1:0]  ram_rdata,
  output logic          running,
  output logic          ready
);

  logic [RATE_W-1:0]       rate;
  logic [ITER_W-1:0]       max_iter;
  logic [ERRC_W-1:0]       target;
  logic [31:0]             seed;
  logic signed [LLR_W-1:0] prior_llr;
  logic                    start, stop, clear, seed_load;
  logic                    gen_start, noise_full, load, synd_en, noise_ready;
  logic                    dec_start, dec_ready, dec_done, check;
  logic [N-1:0]            noisy, e_hat;
  logic [M-1:0]            syndrome;
  logic                    converged, escalated, log_fail;
  logic [ITER_W+3:0]       iterations;
  logic [SW-1:0]           stage;
  logic [ERRC_W-1:0]       phys_errors, log_errors;
  logic [FRAME_W-1:0]      frames;
  logic [ITOT_W-1:0]       iter_total;
  logic [63:0]             cycles;
  logic [31:0]             noise_wait, dec_wait, escalations;

  param_interface u_params (
    .clk, .rst, .we, .waddr, .wdata, .raddr, .rdata,
    .rate, .max_iter, .target, .seed, .prior_llr, .start, .stop,
    .running, .ready, .phys_errors, .log_errors, .frames, .iter_total,
    .cycles, .noise_wait, .dec_wait, .escalations
  );

  control_layer u_ctrl (
    .clk, .rst, .start, .stop, .target, .log_errors,
    .running, .ready, .clear, .seed_load,
    .gen_start, .noise_full, .load, .synd_en, .noise_ready,
    .dec_start, .dec_ready, .dec_done, .check,
    .cycles, .noise_wait, .dec_wait
  );

  noise_source #(.N(N), .NG(NG)) u_noise (
    .clk, .rst, .seed_load, .seed,
    .threshold (rate),
    .gen_start,
    .full      (noise_full),
    .load,
    .noisy
  );

  syndrome_unit #(.BB_L(BB_L), .BB_M(BB_M)) u_synd (
    .clk, .rst, .en(synd_en), .e(noisy), .s(syndrome)
  );

  quant_diversity_decoder #(
    .BB_L(BB_L), .BB_M(BB_M), .NSTAGE(NSTAGE), .QW(QW), .QF(QF), .ALPHA(ALPHA)
  ) u_dec (
    .clk, .rst,
    .start     (dec_start),
    .syndrome,
    .prior_llr,
    .max_iter,
    .ready     (dec_ready),
    .done      (dec_done),
    .converged,
    .e_hat,
    .iterations,
    .stage,
    .escalated
  );

  error_checker #(.BB_L(BB_L), .BB_M(BB_M)) u_check (
    .clk, .rst, .clear, .check,
    .e (noisy), .e_hat, .converged, .iterations, .escalated,
    .log_fail, .phys_errors, .log_errors, .frames, .iter_total, .escalations
  );

  failing_pattern_ram #(.WIDTH(N), .DEPTH(RAM_DEPTH)) u_ram (
    .clk,
    .we      (log_fail),
    .wr_addr (AW'(log_errors)),
    .wr_data (noisy),
    .rd_addr (ram_raddr),
    .rd_data (ram_rdata)
  );

endmodule
