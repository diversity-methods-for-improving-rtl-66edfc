// tb_qec_full: end-to-end test of the emulator with every parameter at its default: the
// (144,12,12) code, NG = 40 noise generators, the four-stage quantization-diversity chain and a
// 2^16-word failing-pattern memory, driven only through the host register bus and the
// failing-pattern read port.
//
// Run 1, high error rate (p ~ 0.04): the decoder is slower than noise generation, frames
// escalate through the diversity chain, logical errors occur and the run stops by itself at
// the target count; every stored failing pattern is read back and compared. Settings written
// during the run must be ignored. Run 2, low error rate (p ~ 0.005): the decoder waits for
// noise and the run is ended with the stop command.
// Every frame is checked against independent models: the syndrome is H_X e, a converged
// estimate reproduces it, and the logical-error decision is recomputed by a rank test
// against H_Z. The counters read over the bus must equal the testbench's own counts.
module tb_qec_full;
  import qec_pkg::*;
  import ms_model_pkg::*;
  localparam int L = 12, MM = 6, N = 144, M = 72;

  logic clk = 0, rst = 1, we = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [15:0] ram_raddr = '0;
  logic [N-1:0] ram_rdata;
  logic running, ready;
  int checks = 0, failures = 0;
  int t_frames = 0, t_phys = 0, t_log = 0, t_iter = 0, t_esc = 0, t_nonconv = 0;
  logic [N-1:0] fails [$];

  qec_emulator dut (
    .clk, .rst, .we, .waddr, .wdata, .raddr, .rdata, .ram_raddr, .ram_rdata, .running, .ready);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  // per-frame monitor
  always @(posedge clk) if (!rst && dut.u_ctrl.check) begin
    logic [MMAX-1:0] s;
    logic [N-1:0] r;
    bit lg;
    s = syndrome(NMAX'(dut.noisy));
    chk(dut.syndrome == s[M-1:0], "syndrome equals H_X e");
    if (dut.converged) chk(syndrome(NMAX'(dut.e_hat)) == s, "converged estimate matches syndrome");
    r = dut.noisy ^ dut.e_hat;
    lg = !dut.converged || (rank_hz(1, NMAX'(r)) > rank_hz(0, '0));
    chk(dut.log_fail == lg, "logical error decision");
    t_frames++;
    t_iter += int'(dut.iterations);
    if (r != '0) t_phys++;
    if (lg) begin t_log++; fails.push_back(dut.noisy); end
    if (dut.escalated) t_esc++;
    if (!dut.converged) t_nonconv++;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); we = 1; waddr = 5'(a); wdata = d; @(negedge clk); we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); raddr = 5'(a); #1; d = rdata;
  endtask

  initial begin
    logic [31:0] v, nw, dw, esc, fr, cy;
    set_code(L, MM);
    repeat (3) @(negedge clk);
    rst = 0;
    // ---------------- run 1: high noise ----------------
    wr(1, 32'd10486);     // p = 0.04
    wr(2, 32'd8);         // max iterations per decoder
    wr(3, 32'd5);         // target logical errors
    wr(4, 32'h0BAD_5EED);
    wr(5, 32'd51);        // prior LLR log(0.96/0.04) = 3.18 -> 51/16
    wr(0, 32'h1);
    rd(0, v); chk(v[0] == 1'b1, "running after start");
    wr(2, 32'd99);        // must be ignored while running
    rd(2, v); chk(v == 8, "settings locked while running");
    while (!ready) @(negedge clk);
    rd(0, v); chk(v == 32'h2, "ready and not running at the end of run 1");
    rd(7, v); chk(v == 5 && t_log == 5, $sformatf("logical errors %0d (monitor %0d), target 5", v, t_log));
    rd(6, v); chk(v == t_phys, "physical error counter");
    rd(8, fr); chk(fr == t_frames, $sformatf("frame counter %0d vs %0d", fr, t_frames));
    rd(11, v); chk(v == t_iter, "iteration counter");
    rd(16, nw); chk(nw > 0, "noise waited for the decoder (slow decoder)");
    rd(18, esc); chk(esc == t_esc && esc > 0, "diversity chain escalated");
    rd(14, cy); chk(cy > fr * 4, "cycles cover at least one pattern time per frame");
    chk(t_nonconv > 0, "some frames did not converge");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); ram_raddr = 16'(i);
      @(negedge clk);
      chk(ram_rdata == fails[i], $sformatf("stored failing pattern %0d", i));
    end
    $display("run 1: frames %0d, logical %0d, escalations %0d, noise_wait %0d, cycles %0d", fr, t_log, esc, nw, cy);
    // ---------------- run 2: low noise, stop command ----------------
    t_frames = 0; t_phys = 0; t_log = 0; t_iter = 0; t_esc = 0; fails.delete();
    wr(1, 32'd1311);      // p = 0.005
    wr(3, 32'd1000);
    wr(5, 32'd85);        // log(0.995/0.005) = 5.3 -> 85/16
    wr(0, 32'h1);
    repeat (2000) @(negedge clk);
    wr(0, 32'h2);
    rd(0, v); chk(v == 32'h2, "stopped by command");
    rd(8, fr); chk(fr == t_frames && fr > 50, $sformatf("run 2 frames %0d", fr));
    rd(17, dw); chk(dw > 0, "decoder waited for noise (fast decoder)");
    rd(7, v); chk(v == t_log, "run 2 logical errors");
    $display("run 2: frames %0d, logical %0d, decoder wait %0d", fr, v, dw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
