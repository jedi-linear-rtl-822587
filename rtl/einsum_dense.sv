// einsum_dense -- the same dense layer applied to every particle of a jet, then registered.
//
// An "Einsum Dense" layer maps each particle's N_IN-vector to an N_OUT-vector with one shared
// weight table (table LAYER of jedi_pkg). The layer is fully unrolled: N_PART copies of the
// multiplier-free CMVM (cmvm_da) work side by side, one per particle, so a whole jet passes in
// one clock. Sharing the weights across particles keeps the layer blind to particle order.
//
// Interface: x[N_PART][N_IN] with in_valid; y[N_PART][N_OUT] with out_valid one clock later.
// A new jet may enter every clock (initiation interval 1). rst_n (active low, synchronous)
// clears the valid bit only; data registers are not reset. One register per layer is this
// design's pipelining choice.
module einsum_dense
  import jedi_pkg::*;
#(
  parameter int N_PART = 64,
  parameter int N_IN   = 16,
  parameter int N_OUT  = 32,
  parameter int LAYER  = L_IN_PROJ,
  parameter bit RELU   = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x [N_PART][N_IN],
  output logic out_valid,
  output act_t y [N_PART][N_OUT]
);

  act_t y_c [N_PART][N_OUT];

  for (genvar p = 0; p < N_PART; p++) begin : g_part
    cmvm_da #(.N_IN(N_IN), .N_OUT(N_OUT), .LAYER(LAYER), .RELU(RELU)) u_cmvm (
      .x(x[p]),
      .y(y_c[p])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    y <= y_c;
  end

endmodule
