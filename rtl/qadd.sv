// qadd -- broadcast sum of the global term onto every particle, registered.
//
// e[p][f] = relu( sat8( s[p][f] + d[f] ) ): the per-particle term s (from Einsum Dense2) and
// the jet-wide term d (from Dense3) are added, the 9-bit sum is saturated to 8 bits and
// negative values are clamped to zero. The result is each particle's interaction-aware feature
// vector. Saturation and ReLU are this design's choices.
//
// Interface: s[N_PART][N_FEAT] and d[N_FEAT] with in_valid; e[N_PART][N_FEAT] with out_valid
// one clock later; initiation interval 1. rst_n (active low, synchronous) clears the valid bit.
module qadd
  import jedi_pkg::*;
#(
  parameter int N_PART = 64,
  parameter int N_FEAT = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t s [N_PART][N_FEAT],
  input  act_t d [N_FEAT],
  output logic out_valid,
  output act_t e [N_PART][N_FEAT]
);

  act_t e_c [N_PART][N_FEAT];

  always_comb begin
    logic signed [ACT_W:0] t;
    for (int p = 0; p < N_PART; p++) begin
      for (int f = 0; f < N_FEAT; f++) begin
        t = (ACT_W+1)'(s[p][f]) + (ACT_W+1)'(d[f]);
        if (t > (ACT_W+1)'(ACT_MAX)) e_c[p][f] = act_t'(ACT_MAX);
        else if (t < 0)               e_c[p][f] = '0;
        else                          e_c[p][f] = act_t'(t);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    e <= e_c;
  end

endmodule
