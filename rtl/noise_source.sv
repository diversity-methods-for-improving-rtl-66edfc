// noise_source: bank of NG random generators with threshold comparators, the NG-to-n
// collection register and the noisy sequence register.
//
// A gen_start pulse starts one error pattern. Every cycle the NG generators each draw an
// 18-bit number; a comparator per generator flags an error when the number is below the
// programmed threshold (registered, one pipeline stage). The NG flags are shifted into a
// register of K*NG bits, K = ceil(N/NG), so a full pattern of N bits is assembled after K
// shifts; 'full' is then raised. A load pulse copies the pattern into the noisy sequence
// register, which holds it for the decoder and the checker, and frees the collection
// register to assemble the next pattern at once (gen_start may come in the same cycle).
//
// Timing: gen_start at edge t0 -> full visible after edge t0+K+1. With load and the syndrome
// register that follow, the stimulus path takes K+3 cycles, as the emulator specifies.
//
// Follows the emulator description: NG generators, one comparator each against a threshold,
// an NG-bit-in / n-bit-out register, ceil(n/NG) cycles per pattern and a parallel register so
// noise generation overlaps decoding. Design choices: all comparators share the single 18-bit
// threshold, one binary error type per qubit (the decoder handles one Pauli type), and each
// generator's seed is the run seed plus a per-generator odd constant.
module noise_source
  import qec_pkg::*;
#(
  parameter int N  = 144,  // error-vector length (qubits)
  parameter int NG = 40    // number of noise generators
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              seed_load,
  input  logic [31:0]       seed,
  input  logic [RATE_W-1:0] threshold,
  input  logic              gen_start,
  output logic              full,
  input  logic              load,
  output logic [N-1:0]      noisy        // noisy sequence register
);

  localparam int K  = (N + NG - 1) / NG;   // cycles per error pattern
  localparam int SW = K * NG;
  localparam int CW = $clog2(K + 2);

  logic [RATE_W-1:0] rnd   [NG];
  logic [NG-1:0]     cmp_r;
  logic [SW-1:0]     sr;
  logic              collecting;
  logic [CW-1:0]     cnt;

  for (genvar g = 0; g < NG; g++) begin : g_gen
    random_generator u_rng (
      .clk,
      .rst,
      .seed_load,
      .seed (seed + 32'(g) * 32'h9E37_79B9),
      .en   (collecting),
      .rnd  (rnd[g])
    );
  end

  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) cmp_r[g] <= rnd[g] < threshold;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      collecting <= 1'b0;
      full       <= 1'b0;
      cnt        <= '0;
      sr         <= '0;
    end else if (gen_start) begin
      collecting <= 1'b1;
      full       <= 1'b0;
      cnt        <= '0;
    end else if (collecting) begin
      if (cnt != '0) sr <= {cmp_r, sr[SW-1:NG]};
      cnt <= cnt + 1'b1;
      if (cnt == CW'(K)) begin
        collecting <= 1'b0;
        full       <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst)       noisy <= '0;
    else if (load) noisy <= sr[N-1:0];
  end

  a_load_full : assert property (@(posedge clk) disable iff (rst) load |-> full)
    else $error("noisy register loaded before a pattern was complete");

endmodule
