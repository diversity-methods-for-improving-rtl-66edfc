// failing_pattern_ram: memory that keeps the error patterns the decoder failed on, for
// offline analysis.
//
// One write port, used by the emulator when a frame ends in a logical error: the injected
// error pattern is written at the address given by the logical error count before it is
// incremented, so patterns are stored in the order they were found. One synchronous read
// port for the host: rd_data is valid the cycle after rd_addr is presented.
// DEPTH defaults to 2^16, the largest number of failing patterns one run can collect with the
// 16-bit target-error setting; the width is the error-vector length n. Written as an array so
// that an FPGA flow maps it to block RAM.
//
// Follows the published design: storing the patterns that cause logical errors and reading them back through
// the communication interface. Design choices: depth, write addressing and the read latency.
module failing_pattern_ram #(
  parameter int WIDTH = 144,
  parameter int DEPTH = 65536,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
