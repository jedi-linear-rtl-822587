// global_gather -- JEDI-linear's replacement for JEDI-net's all-pairs interaction step.
//
// JEDI-net sums an edge function f_R(x_i || x_j) over all ordered particle pairs, which costs
// O(N^2). If f_R is affine, f_R = W1 x_i + W2 x_j + C, the per-particle sum collapses (after
// scaling by 1/N and dropping O(1/N) terms) to
//     e_i = W1 x_i  +  W2 mean_j(x_j) + C,
// a per-particle dense layer plus one dense layer on the jet average: O(N). This block builds
// exactly that from the particle embeddings x (called X):
//   cycle 1: S = Einsum Dense2(X) on every particle (W1, no bias)   and   g = QSum(X) = mean
//   cycle 2: d = Dense3(g) (W2 and the bias C);   S is delayed one register to stay aligned
//   cycle 3: e = QAdd(S, d): d is broadcast and added to every particle, then ReLU.
// Interface: x[N_PART][D_E] with in_valid; e[N_PART][D_E] with out_valid three clocks later;
// initiation interval 1. The algebra and the block structure follow JEDI-linear; which branch
// carries the bias, the register placement and the formats are this design's choices.
module global_gather
  import jedi_pkg::*;
#(
  parameter int N_PART = 64,
  parameter int D_E    = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x [N_PART][D_E],
  output logic out_valid,
  output act_t e [N_PART][D_E]
);

  act_t s1 [N_PART][D_E];   // S, cycle 1
  act_t s2 [N_PART][D_E];   // S delayed, cycle 2
  act_t g  [D_E];           // global context, cycle 1
  act_t d  [D_E];           // transformed context, cycle 2
  logic v_s1, v_g, v_d, v_s2;

  einsum_dense #(.N_PART(N_PART), .N_IN(D_E), .N_OUT(D_E), .LAYER(L_DENSE2), .RELU(1'b0)) u_dense2 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(v_s1), .y(s1)
  );

  qsum #(.N_PART(N_PART), .N_FEAT(D_E)) u_qsum (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(v_g), .g(g)
  );

  dense_layer #(.N_IN(D_E), .N_OUT(D_E), .LAYER(L_DENSE3), .RELU(1'b0)) u_dense3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v_g), .x(g), .out_valid(v_d), .y(d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) v_s2 <= 1'b0;
    else        v_s2 <= v_s1;
    s2 <= s1;
  end

  qadd #(.N_PART(N_PART), .N_FEAT(D_E)) u_qadd (
    .clk(clk), .rst_n(rst_n), .in_valid(v_d & v_s2), .s(s2), .d(d), .out_valid(out_valid), .e(e)
  );

endmodule
