// param_interface: run-time parameter and result registers of the emulator, seen by the host
// through a simple word-wide register bus (the network stack would sit in front of it).
//
// Writable while no run is active (a running emulator ignores writes, so the settings of a
// run cannot change under it), readable at any time:
//   0x01 RATE      [17:0]  error threshold: P(error) * 2^18
//   0x02 MAX_ITER  [7:0]   maximum decoder iterations (per decoder stage)
//   0x03 TARGET    [15:0]  number of logical errors after which the run stops
//   0x04 SEED      [31:0]  seed of the noise generators
//   0x05 PRIOR     [11:0]  decoder prior LLR, signed, 4 fractional bits
// Control and results (read only except CTRL):
//   0x00 CTRL      write: bit0 start, bit1 stop (one-cycle pulses); read: bit0 running, bit1 ready
//   0x06 PHYS_ERR, 0x07 LOG_ERR (16 bit)
//   0x08..0x0A FRAMES (80-bit, low word first), 0x0B..0x0D ITER_TOTAL (88-bit)
//   0x0E..0x0F CYCLES (64-bit clock cycles of the run)
//   0x10 NOISE_WAIT, 0x11 DEC_WAIT (cycles each side of the pipeline waited for the other)
//   0x12 ESCALATIONS (frames on which the diversity chain ran more than its first decoder)
// Reads are combinational (rdata follows raddr in the same cycle). Reset loads defaults:
// RATE = 0, MAX_ITER = 10, TARGET = 100, SEED = 1, PRIOR = 0.
//
// The parameter set and widths (18-bit rate, 8-bit iterations, 16-bit target and error
// counters, 80-bit frame counter, read-back of the settings, running/ready, lock while
// running) follow the emulator description. The address map, bus and reset values are this
// design's own.
module param_interface
  import qec_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  // host bus
  input  logic                    we,
  input  logic [4:0]              waddr,
  input  logic [31:0]             wdata,
  input  logic [4:0]              raddr,
  output logic [31:0]             rdata,
  // settings
  output logic [RATE_W-1:0]       rate,
  output logic [ITER_W-1:0]       max_iter,
  output logic [ERRC_W-1:0]       target,
  output logic [31:0]             seed,
  output logic signed [LLR_W-1:0] prior_llr,
  output logic                    start,
  output logic                    stop,
  // status and results
  input  logic                    running,
  input  logic                    ready,
  input  logic [ERRC_W-1:0]       phys_errors,
  input  logic [ERRC_W-1:0]       log_errors,
  input  logic [FRAME_W-1:0]      frames,
  input  logic [ITOT_W-1:0]       iter_total,
  input  logic [63:0]             cycles,
  input  logic [31:0]             noise_wait,
  input  logic [31:0]             dec_wait,
  input  logic [31:0]             escalations
);

  logic cfg_we;
  assign cfg_we = we && !running;
  assign start  = we && (waddr == 5'h00) && wdata[0] && !running;
  assign stop   = we && (waddr == 5'h00) && wdata[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      rate      <= '0;
      max_iter  <= ITER_W'(10);
      target    <= ERRC_W'(100);
      seed      <= 32'd1;
      prior_llr <= '0;
    end else if (cfg_we) begin
      case (waddr)
        5'h01: rate      <= wdata[RATE_W-1:0];
        5'h02: max_iter  <= wdata[ITER_W-1:0];
        5'h03: target    <= wdata[ERRC_W-1:0];
        5'h04: seed      <= wdata;
        5'h05: prior_llr <= wdata[LLR_W-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (raddr)
      5'h00:   rdata = {30'd0, ready, running};
      5'h01:   rdata = 32'(rate);
      5'h02:   rdata = 32'(max_iter);
      5'h03:   rdata = 32'(target);
      5'h04:   rdata = seed;
      5'h05:   rdata = 32'(unsigned'(prior_llr));
      5'h06:   rdata = 32'(phys_errors);
      5'h07:   rdata = 32'(log_errors);
      5'h08:   rdata = frames[31:0];
      5'h09:   rdata = frames[63:32];
      5'h0A:   rdata = 32'(frames[79:64]);
      5'h0B:   rdata = iter_total[31:0];
      5'h0C:   rdata = iter_total[63:32];
      5'h0D:   rdata = 32'(iter_total[87:64]);
      5'h0E:   rdata = cycles[31:0];
      5'h0F:   rdata = cycles[63:32];
      5'h10:   rdata = noise_wait;
      5'h11:   rdata = dec_wait;
      5'h12:   rdata = escalations;
      default: rdata = 32'd0;
    endcase
  end

endmodule
