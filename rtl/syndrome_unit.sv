// syndrome_unit: parallel binary product s = H_X * e of the parity-check matrix of a
// bivariate bicycle code with the noisy error pattern.
//
// Each of the M = l*m checks XORs the six error bits its edges reach (index formula in
// qec_pkg). All checks are computed in parallel and registered on 'en', so the syndrome is
// ready one cycle after the noisy sequence register is loaded.
//
// The parallel product follows the emulator description; the code family (H given by a formula
// instead of a stored matrix) is this design's choice.
module syndrome_unit
  import qec_pkg::*;
#(
  parameter int BB_L = 12,
  parameter int BB_M = 6,
  localparam int N = 2 * BB_L * BB_M,
  localparam int M = BB_L * BB_M
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [N-1:0] e,
  output logic [M-1:0] s
);

  logic [M-1:0] s_comb;

  for (genvar c = 0; c < M; c++) begin : g_chk
    logic [CHK_DEG-1:0] bits;
    for (genvar k = 0; k < CHK_DEG; k++) begin : g_edge
      assign bits[k] = e[bb_chk_var(BB_L, BB_M, c, k)];
    end
    assign s_comb[c] = ^bits;
  end

  always_ff @(posedge clk) begin
    if (rst)     s <= '0;
    else if (en) s <= s_comb;
  end

endmodule
