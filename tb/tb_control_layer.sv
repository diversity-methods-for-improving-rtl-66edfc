// tb_control_layer: drives the control layer with a timed stand-in for the noise source (full
// K+1 cycles after gen_start) and for the decoder (done a programmed number of cycles after
// start). Checks: ceil(n/NG)+3 cycles from gen_start to noise_ready; in the slow-decoder
// regime the next frame starts 3 cycles after the previous one is checked and noise waits;
// in the fast-decoder regime frames follow every K+2 cycles and the decoder waits; no pattern
// is loaded over an unchecked frame; the run ends at the target logical error count, and on
// stop.
module tb_control_layer;
  import qec_pkg::*;
  localparam int K = 6;
  logic clk = 0, rst = 1, start = 0, stop = 0;
  logic [ERRC_W-1:0] target = 16'd1000, log_errors = '0;
  logic running, ready, clear, seed_load, gen_start, load, synd_en, noise_ready;
  logic dec_start, check;
  logic noise_full = 0, dec_ready = 1, dec_done = 0;
  logic [63:0] cycles;
  logic [31:0] noise_wait, dec_wait;
  int checks = 0, failures = 0;
  int dec_lat = 40;
  int gcnt = -1, dcnt = -1;
  int cyc = 0, last_gen = -1, last_check = -1, last_dstart = -1;
  int n_gap_a = 0, n_per_b = 0, first_lat = -1, frames = 0;
  bit fail_next = 0;
  int switch_cyc = 1 << 30;

  control_layer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s (cycle %0d)", w, cyc); end
  endtask

  // stand-ins for the noise source and the decoder
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gen_start) begin gcnt <= 0; noise_full <= 0; end
    else if (gcnt >= 0) begin
      if (gcnt == K) begin noise_full <= 1; gcnt <= -1; end else gcnt <= gcnt + 1;
    end
    dec_done <= 0;
    if (dec_start) begin dcnt <= 0; dec_ready <= 0; end
    else if (dcnt >= 0) begin
      if (dcnt >= dec_lat - 1) begin dec_done <= 1; dec_ready <= 1; dcnt <= -1; end
      else dcnt <= dcnt + 1;
    end
    if (check) begin
      frames <= frames + 1;
      if (fail_next) log_errors <= log_errors + 1'b1;
    end
    if (clear) log_errors <= '0;
  end

  // timing observations
  always @(posedge clk) if (!rst) begin
    if (gen_start && last_gen < 0) last_gen <= cyc;
    if (noise_ready && first_lat < 0 && last_gen >= 0) first_lat <= cyc - last_gen;
    if (check) last_check <= cyc;
    if (dec_start) begin
      if (dec_lat > 2 * K && last_check >= 0) begin
        chk(cyc - last_check == 3, $sformatf("slow decoder: next start %0d cycles after check", cyc - last_check));
        n_gap_a++;
      end
      if (dec_lat < K && last_dstart > switch_cyc) begin
        chk(cyc - last_dstart == K + 2, $sformatf("fast decoder: frame period %0d", cyc - last_dstart));
        n_per_b++;
      end
      last_dstart <= cyc;
    end
  end

  initial begin
    int nw, dw;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    chk(running && !ready, "running after start");
    // slow decoder (scenario A)
    repeat (400) @(negedge clk);
    // noise_ready is set K+3 edges after the gen_start edge, so it is first sampled high one edge later
    chk(first_lat == K + 4, $sformatf("gen_start to noise_ready %0d cycles, expected %0d", first_lat - 1, K + 3));
    chk(noise_wait > 0, "noise waited for the slow decoder");
    chk(n_gap_a >= 5, "slow-decoder frames observed");
    // fast decoder (scenario B)
    nw = noise_wait;
    dec_lat = 2;
    switch_cyc = cyc + 60;
    repeat (400) @(negedge clk);
    dw = dec_wait;
    chk(n_per_b >= 20, "fast-decoder frames observed");
    repeat (100) @(negedge clk);
    chk(noise_wait - nw < 45, "noise no longer waits once the decoder is fast");
    chk(dec_wait > dw, "decoder waited for noise");
    chk(cycles > 850, "cycle counter runs");
    // target number of logical errors
    target = 16'd3; fail_next = 1;
    repeat (200) @(negedge clk);
    chk(!running && ready, "run ended at the target error count");
    chk(log_errors == 3, $sformatf("stopped with %0d logical errors", log_errors));
    begin int f; f = frames; repeat (50) @(negedge clk); chk(frames == f, "no frames after the run ended"); end
    // restart and stop command
    target = 16'd1000; fail_next = 0; switch_cyc = 1 << 30;
    start = 1; @(negedge clk); start = 0;
    chk(running && cycles < 3, "restart clears the counters");
    repeat (50) @(negedge clk);
    stop = 1; @(negedge clk); stop = 0;
    chk(!running && ready, "stop command ends the run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
