// dense_layer_tb -- registered dense layer, table L_DENSE3 (32 -> 32, bias, no ReLU) and
// table L_MLP0 (32 -> 12, ReLU) side by side on the same input stream.
//
// 60 random vectors, mostly back to back; every output element is compared with the
// multiply-based reference, the one-clock latency is checked, and saturation must occur.
module dense_layer_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NI = 32, NO = 32, NO2 = 12, NJ = 60, LAT = 1;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [NI];
  act_t y [NO];
  act_t y2 [NO2];
  logic out_valid2;
  ivec_t exp2_q [$];
  ivec_t exp_q [$];
  int    t_q [$];

  dense_layer #(.N_IN(NI), .N_OUT(NO), .LAYER(L_DENSE3), .RELU(1'b0)) dut (.*);
  dense_layer #(.N_IN(NI), .N_OUT(NO2), .LAYER(L_MLP0), .RELU(1'b1)) dut2 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid2), .y(y2));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    ivec_t e;
    int t;
    e = exp_q.pop_front();
    t = t_q.pop_front();
    got++;
    checks++;
    if (cycle - t != LAT) begin failures++; $display("latency %0d", cycle - t); end
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (int'(y[o]) != e[o]) begin
        failures++;
        if (failures < 10) $display("item %0d o%0d got %0d exp %0d", got, o, y[o], e[o]);
      end
    end
    e = exp2_q.pop_front();
    checks++;
    if (!out_valid2) failures++;
    for (int o = 0; o < NO2; o++) begin
      checks++;
      if (int'(y2[o]) != e[o]) begin
        failures++;
        if (failures < 10) $display("item %0d o%0d got %0d exp %0d", got, o, y2[o], e[o]);
      end
    end
  end

  initial begin
    ivec_t v;
    v = new[NI];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 7 == 3 && in_valid) begin
        in_valid <= 0;
      end else begin
        foreach (v[i]) v[i] = rnd8();
        for (int i = 0; i < NI; i++) x[i] <= act_t'(v[i]);
        exp_q.push_back(dense(L_DENSE3, v, NO, 1'b0));
        exp2_q.push_back(dense(L_MLP0, v, NO2, 1'b1));
        t_q.push_back(cycle + 1);
        in_valid <= 1;
        sent++;
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    checks++;
    if (got != NJ) begin failures++; $display("got %0d of %0d", got, NJ); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
