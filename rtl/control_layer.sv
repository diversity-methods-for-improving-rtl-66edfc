// control_layer: the two state machines that run the emulator, one for noise generation and
// one for the decoder under test, plus the run start/stop logic.
//
// Noise machine: when a run starts it issues gen_start and waits for the noise source to
// report a full pattern. It then waits until the noisy sequence register is free (the
// previous frame has been decoded and checked), loads it (load, together with gen_start for
// the next pattern, so generation overlaps decoding), computes the syndrome (synd_en) and
// raises noise_ready. From gen_start to noise_ready: ceil(n/NG)+3 cycles.
// Decoder machine: on noise_ready it starts the decoder (dec_start), waits for end of
// decoding (dec_done), then pulses check for the error checker, which frees the noisy
// sequence register.
// Whichever side is faster waits: noise_wait counts cycles the finished pattern waits for the
// decoder (decoder slower, high noise), dec_wait counts cycles the idle decoder waits for
// noise (decoder faster, low noise).
// Run control: start clears the counters, loads the seed and sets running; the run ends
// (running low, ready high) when the logical error count reaches the target or on stop.
// Patterns in flight when the run ends are discarded.
//
// Follows the published design: two state machines exchanging "generate noise", "noise ready" and "end of
// decoding", the target-error stop rule and the running/ready outputs. State encoding,
// handshakes and the wait counters are this design's choices.
module control_layer
  import qec_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              stop,
  input  logic [ERRC_W-1:0] target,
  input  logic [ERRC_W-1:0] log_errors,
  output logic              running,
  output logic              ready,
  output logic              clear,
  output logic              seed_load,
  // noise source
  output logic              gen_start,
  input  logic              noise_full,
  output logic              load,
  output logic              synd_en,
  output logic              noise_ready,
  // decoder
  output logic              dec_start,
  input  logic              dec_ready,
  input  logic              dec_done,
  output logic              check,
  // statistics
  output logic [63:0]       cycles,
  output logic [31:0]       noise_wait,
  output logic [31:0]       dec_wait
);

  typedef enum logic [1:0] {N_IDLE, N_GEN, N_SYND} nstate_t;
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_CHECK} dstate_t;

  nstate_t ns;
  dstate_t ds;
  logic    slot_busy;   // noisy sequence register holds a frame not yet checked
  logic    finish;

  assign finish    = running && (stop || (log_errors >= target && ds == D_IDLE));
  assign clear     = start && !running;
  assign seed_load = clear;

  assign gen_start = running && !finish && ((ns == N_IDLE) || load);
  assign load      = running && (ns == N_GEN) && noise_full && !slot_busy;
  assign synd_en   = (ns == N_SYND);
  assign dec_start = running && !finish && (ds == D_IDLE) && noise_ready && dec_ready;
  assign check     = (ds == D_CHECK);

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      ready   <= 1'b0;
    end else if (clear) begin
      running <= 1'b1;
      ready   <= 1'b0;
    end else if (finish) begin
      running <= 1'b0;
      ready   <= 1'b1;
    end
  end

  // noise machine
  always_ff @(posedge clk) begin
    if (rst || !running || finish) begin
      ns          <= N_IDLE;
      noise_ready <= 1'b0;
      slot_busy   <= 1'b0;
    end else begin
      case (ns)
        N_IDLE:  ns <= N_GEN;
        N_GEN:   if (load) ns <= N_SYND;
        N_SYND: begin
          noise_ready <= 1'b1;
          ns          <= N_GEN;
        end
        default: ns <= N_IDLE;
      endcase
      if (load)      slot_busy   <= 1'b1;
      else if (check) slot_busy  <= 1'b0;
      if (dec_start) noise_ready <= 1'b0;
    end
  end

  // decoder machine
  always_ff @(posedge clk) begin
    if (rst || !running || finish) begin
      ds <= D_IDLE;
    end else begin
      case (ds)
        D_IDLE:  if (dec_start) ds <= D_RUN;
        D_RUN:   if (dec_done) ds <= D_CHECK;
        D_CHECK: ds <= D_IDLE;
        default: ds <= D_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      cycles     <= '0;
      noise_wait <= '0;
      dec_wait   <= '0;
    end else if (running) begin
      cycles <= cycles + 1'b1;
      if (ns == N_GEN && noise_full && slot_busy) noise_wait <= noise_wait + 1'b1;
      if (ds == D_IDLE && !noise_ready)           dec_wait   <= dec_wait + 1'b1;
    end
  end

  a_load_free : assert property (@(posedge clk) disable iff (rst) load |-> !slot_busy)
    else $error("noisy register overwritten before its frame was checked");

endmodule
