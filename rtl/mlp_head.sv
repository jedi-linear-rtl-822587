// mlp_head -- the classification head: four registered dense layers, 5 class logits out.
//
// x (the jet's pooled feature vector) -> Dense(N_HID)+ReLU -> Dense(N_HID)+ReLU ->
// Dense(N_HID)+ReLU -> Dense(N_CLASS) -> logits. Layer k uses weight table L_MLP0+k. The
// number of layers and the 5 classes (gluon, light quark, W, Z, top) follow JEDI-linear; the
// hidden width and the activations are this design's choices.
//
// Interface: x[N_IN] with in_valid; logits[N_CLASS] with out_valid four clocks later;
// initiation interval 1.
module mlp_head
  import jedi_pkg::*;
#(
  parameter int N_IN    = 32,
  parameter int N_HID   = 32,
  parameter int N_CLASS = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x [N_IN],
  output logic out_valid,
  output act_t logits [N_CLASS]
);

  act_t h1 [N_HID];
  act_t h2 [N_HID];
  act_t h3 [N_HID];
  logic v1, v2, v3;

  dense_layer #(.N_IN(N_IN),  .N_OUT(N_HID), .LAYER(L_MLP0),   .RELU(1'b1)) u_l0 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(v1), .y(h1));
  dense_layer #(.N_IN(N_HID), .N_OUT(N_HID), .LAYER(L_MLP0+1), .RELU(1'b1)) u_l1 (
    .clk(clk), .rst_n(rst_n), .in_valid(v1), .x(h1), .out_valid(v2), .y(h2));
  dense_layer #(.N_IN(N_HID), .N_OUT(N_HID), .LAYER(L_MLP0+2), .RELU(1'b1)) u_l2 (
    .clk(clk), .rst_n(rst_n), .in_valid(v2), .x(h2), .out_valid(v3), .y(h3));
  dense_layer #(.N_IN(N_HID), .N_OUT(N_CLASS), .LAYER(L_MLP0+3), .RELU(1'b0)) u_l3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v3), .x(h3), .out_valid(out_valid), .y(logits));

endmodule
