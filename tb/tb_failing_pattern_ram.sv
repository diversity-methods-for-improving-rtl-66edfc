// tb_failing_pattern_ram: writes random patterns to a 256-entry, 144-bit memory and reads
// them back, checking contents and the one-cycle read latency, and that a read of the address
// being written returns the old contents.
module tb_failing_pattern_ram;
  localparam int WD = 144, D = 256;
  logic clk = 0, we = 0;
  logic [7:0] wa = '0, ra = '0;
  logic [WD-1:0] wd = '0, rd;
  logic [WD-1:0] model [D];
  int checks = 0, failures = 0;

  failing_pattern_ram #(.WIDTH(WD), .DEPTH(D)) dut (.clk, .we, .wr_addr(wa), .wr_data(wd),
    .rd_addr(ra), .rd_data(rd));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  initial begin
    logic [WD-1:0] v;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      for (int i = 0; i < WD; i += 32) v[i +: 32] = $urandom;
      model[a] = v;
      we = 1; wa = 8'(a); wd = v;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 500; t++) begin
      int a = $urandom_range(D - 1);
      ra = 8'(a);
      @(negedge clk);
      chk(rd == model[a], $sformatf("read address %0d", a));
    end
    // read during write of the same address returns the old word
    ra = 8'd7; wa = 8'd7; wd = ~model[7]; we = 1;
    @(negedge clk);
    we = 0;
    chk(rd == model[7], "read-before-write");
    model[7] = ~model[7];
    @(negedge clk);
    chk(rd == model[7], "new word visible next cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
