// qsum -- global average pooling over the particles of a jet, registered.
//
// g[f] = floor( (x[0][f] + ... + x[N_PART-1][f]) / N_PART ) for every feature f. N_PART must
// be a power of two, so the division is an arithmetic right shift by log2(N_PART); the mean of
// 8-bit values always fits in 8 bits, so no saturation is needed. Jets with fewer particles
// than N_PART arrive zero-padded and are still divided by N_PART, as a fixed-size average pool
// does. The sum is written as a loop; synthesis builds it as an adder tree.
//
// Interface: x[N_PART][N_FEAT] with in_valid; g[N_FEAT] with out_valid one clock later;
// initiation interval 1. rst_n (active low, synchronous) clears the valid bit only.
module qsum
  import jedi_pkg::*;
#(
  parameter int N_PART = 64,
  parameter int N_FEAT = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x [N_PART][N_FEAT],
  output logic out_valid,
  output act_t g [N_FEAT]
);

  localparam int LOG2N = $clog2(N_PART);
  localparam int SUM_W = ACT_W + LOG2N;

  if ((1 << LOG2N) != N_PART) begin : g_check
    $error("qsum: N_PART must be a power of two");
  end

  act_t g_c [N_FEAT];

  always_comb begin
    logic signed [SUM_W-1:0] s;
    for (int f = 0; f < N_FEAT; f++) begin
      s = '0;
      for (int p = 0; p < N_PART; p++) s = s + SUM_W'(x[p][f]);
      g_c[f] = act_t'(s >>> LOG2N);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    g <= g_c;
  end

endmodule
