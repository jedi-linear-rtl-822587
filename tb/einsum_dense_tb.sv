// einsum_dense_tb -- per-particle dense layer, 6 particles x 8 -> 5, table L_EINSUM4 + ReLU.
//
// Streams 40 random jets, mostly back to back with a few idle clocks, and compares every
// output element with the reference model. Checks that each result appears exactly one clock
// after its input and that no output is missing or extra.
module einsum_dense_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NP = 6, NI = 8, NO = 5, NJ = 40, LAT = 1;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [NP][NI];
  act_t y [NP][NO];
  ivec_t exp_q [$];
  int    t_q [$];

  einsum_dense #(.N_PART(NP), .N_IN(NI), .N_OUT(NO), .LAYER(L_EINSUM4), .RELU(1'b1)) dut (.*);

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
    for (int p = 0; p < NP; p++)
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'(y[p][o]) != e[p*NO + o]) begin
          failures++;
          if (failures < 10) $display("jet %0d p%0d o%0d got %0d exp %0d", got, p, o, y[p][o], e[p*NO+o]);
        end
      end
  end

  initial begin
    ivec_t v;
    v = new[NP*NI];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 7 == 3 && in_valid) begin
        in_valid <= 0;
      end else begin
        foreach (v[i]) v[i] = rnd8();
        for (int p = 0; p < NP; p++) for (int i = 0; i < NI; i++) x[p][i] <= act_t'(v[p*NI + i]);
        exp_q.push_back(einsum(L_EINSUM4, v, NP, NI, NO, 1'b1));
        t_q.push_back(cycle + 1);
        in_valid <= 1;
        sent++;
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (got != NJ) begin failures++; $display("got %0d of %0d", got, NJ); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
