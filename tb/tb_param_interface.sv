// tb_param_interface: writes and reads back every setting, checks reset values, the start and
// stop pulses, that settings are locked while running, and the read-back of every result word.
module tb_param_interface;
  import qec_pkg::*;
  logic clk = 0, rst = 1, we = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [RATE_W-1:0] rate;
  logic [ITER_W-1:0] max_iter;
  logic [ERRC_W-1:0] target;
  logic [31:0] seed;
  logic signed [LLR_W-1:0] prior_llr;
  logic start, stop;
  logic running = 0, ready = 0;
  logic [ERRC_W-1:0] phys_errors = 16'h1234, log_errors = 16'h0042;
  logic [FRAME_W-1:0] frames = 80'hABCD_0123_4567_89AB_CDEF;
  logic [ITOT_W-1:0] iter_total = 88'h12_3456_789A_BCDE_F012_3456;
  logic [63:0] cycles = 64'h0011_2233_4455_6677;
  logic [31:0] noise_wait = 32'd77, dec_wait = 32'd99, escalations = 32'd5;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0;

  param_interface dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (start) n_start++;
    if (stop) n_stop++;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask
  task automatic wr(int a, logic [31:0] d);
    we = 1; waddr = 5'(a); wdata = d; @(negedge clk); we = 0;
  endtask
  logic [31:0] rv [32];
  task automatic readall();
    for (int a = 0; a < 32; a++) begin raddr = 5'(a); #1; rv[a] = rdata; end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    chk(max_iter == 10 && target == 100 && rate == 0 && seed == 1, "reset values");
    wr(1, 32'h3_FFFF); wr(2, 32'd22); wr(3, 32'd500); wr(4, 32'hCAFE_F00D); wr(5, 32'hFA0);
    chk(rate == 18'h3FFFF && max_iter == 22 && target == 500, "settings written");
    chk(seed == 32'hCAFE_F00D && prior_llr == -12'sd96, "seed and prior written");
    readall();
    chk(rv[1] == 32'h3FFFF && rv[2] == 22 && rv[3] == 500 && rv[4] == 32'hCAFE_F00D, "settings read back");
    readall();
    chk(rv[5] == 32'hFA0, "prior read back");
    readall();
    chk(rv[6] == 32'h1234 && rv[7] == 32'h42, "error counters");
    readall();
    chk(rv[8] == 32'h89AB_CDEF && rv[9] == 32'h0123_4567 && rv[10] == 32'h0000_ABCD, "frame counter words");
    readall();
    chk(rv[11] == 32'hF012_3456 && rv[12] == 32'h789A_BCDE && rv[13] == 32'h12_3456, "iteration words");
    readall();
    chk(rv[14] == 32'h4455_6677 && rv[15] == 32'h0011_2233, "cycle words");
    readall();
    chk(rv[16] == 77 && rv[17] == 99 && rv[18] == 5 && rv[31] == 0, "wait and escalation counters");
    wr(0, 32'h1);
    chk(n_start == 1, "start pulse");
    running = 1;
    readall();
    chk(rv[0] == 32'h1, "running status");
    wr(2, 32'd3); wr(1, 32'd5);
    chk(max_iter == 22 && rate == 18'h3FFFF, "settings locked while running");
    wr(0, 32'h1);
    chk(n_start == 1, "no second start while running");
    wr(0, 32'h2);
    chk(n_stop == 1, "stop pulse");
    running = 0; ready = 1;
    readall();
    chk(rv[0] == 32'h2, "ready status");
    wr(2, 32'd3);
    chk(max_iter == 3, "writable again after the run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
