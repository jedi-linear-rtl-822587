// dense_layer -- one registered dense layer on a single vector.
//
// Wraps the multiplier-free CMVM (cmvm_da) with table LAYER and adds the pipeline register.
// It serves as Dense3 (the transform of the jet's global context vector, which also carries
// the bias of the global gathering) and as each of the four layers of the classification head.
//
// Interface: x[N_IN] with in_valid; y[N_OUT] with out_valid one clock later; initiation
// interval 1. rst_n (active low, synchronous) clears the valid bit only.
module dense_layer
  import jedi_pkg::*;
#(
  parameter int N_IN  = 32,
  parameter int N_OUT = 32,
  parameter int LAYER = L_DENSE3,
  parameter bit RELU  = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x [N_IN],
  output logic out_valid,
  output act_t y [N_OUT]
);

  act_t y_c [N_OUT];

  cmvm_da #(.N_IN(N_IN), .N_OUT(N_OUT), .LAYER(LAYER), .RELU(RELU)) u_cmvm (
    .x(x),
    .y(y_c)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    y <= y_c;
  end

endmodule
