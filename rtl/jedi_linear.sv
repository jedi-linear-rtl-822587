// jedi_linear -- fully unrolled JEDI-linear graph-network jet tagger, one jet per clock.
//
// A jet is N_PART particles of N_FEAT features each (zero-padded when it has fewer). The
// network, every layer of it laid out in its own hardware, is
//   1. input projection  X = relu(Einsum Dense1(particles))             N_FEAT -> D_E   1 clk
//   2. global gathering  E = relu(Dense2(X) + Dense3(mean(X)))          D_E    -> D_E   3 clk
//   3. Einsum Dense      Y = relu(Einsum Dense(E))                      D_E    -> D_E2  1 clk
//   4. average pooling   h = mean over particles of Y                                   1 clk
//   5. MLP head          4 dense layers -> N_CLASS logits                               4 clk
// All multiplications by weights are shift-add/subtract networks (cmvm_da); there are no
// multipliers. Latency is a fixed LATENCY = 10 clocks and a new jet can enter every clock, so
// the tag can be lined up with other trigger logic by a plain delay.
//
// Interface: particles[N_PART][N_FEAT] (8-bit signed) with in_valid; logits[N_CLASS]
// (8-bit signed) with out_valid exactly LATENCY clocks after in_valid. rst_n is active low and
// synchronous and clears only the valid pipeline. The layer order, the linearized gathering, the
// fixed latency and the interval of one clock follow JEDI-linear; layer widths, number
// formats, activations, register placement and the weights themselves are this design's own.
module jedi_linear
  import jedi_pkg::*;
#(
  parameter int N_PART  = 64,
  parameter int N_FEAT  = 16,
  parameter int D_E     = 32,
  parameter int D_E2    = 32,
  parameter int N_HID   = 32,
  parameter int N_CLASS = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t particles [N_PART][N_FEAT],
  output logic out_valid,
  output act_t logits [N_CLASS]
);

  localparam int LATENCY = 10;

  act_t x [N_PART][D_E];
  act_t e [N_PART][D_E];
  act_t y [N_PART][D_E2];
  act_t h [D_E2];
  logic v_x, v_e, v_y, v_h;

  einsum_dense #(.N_PART(N_PART), .N_IN(N_FEAT), .N_OUT(D_E), .LAYER(L_IN_PROJ), .RELU(1'b1)) u_proj (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(particles), .out_valid(v_x), .y(x));

  global_gather #(.N_PART(N_PART), .D_E(D_E)) u_gather (
    .clk(clk), .rst_n(rst_n), .in_valid(v_x), .x(x), .out_valid(v_e), .e(e));

  einsum_dense #(.N_PART(N_PART), .N_IN(D_E), .N_OUT(D_E2), .LAYER(L_EINSUM4), .RELU(1'b1)) u_dense4 (
    .clk(clk), .rst_n(rst_n), .in_valid(v_e), .x(e), .out_valid(v_y), .y(y));

  qsum #(.N_PART(N_PART), .N_FEAT(D_E2)) u_pool (
    .clk(clk), .rst_n(rst_n), .in_valid(v_y), .x(y), .out_valid(v_h), .g(h));

  mlp_head #(.N_IN(D_E2), .N_HID(N_HID), .N_CLASS(N_CLASS)) u_head (
    .clk(clk), .rst_n(rst_n), .in_valid(v_h), .x(h), .out_valid(out_valid), .logits(logits));

  // Deterministic latency: out_valid is in_valid delayed by exactly LATENCY clocks.
  logic [LATENCY-1:0] v_pipe;
  always_ff @(posedge clk) begin
    if (!rst_n) v_pipe <= '0;
    else        v_pipe <= {v_pipe[LATENCY-2:0], in_valid};
  end
  a_latency: assert property (@(posedge clk) disable iff (!rst_n) out_valid == v_pipe[LATENCY-1])
    else $error("jedi_linear: out_valid does not follow in_valid by LATENCY clocks");

endmodule
