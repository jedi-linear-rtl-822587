// qadd_tb -- broadcast add of a global vector onto 5 particles x 7 features.
//
// 50 random (s, d) pairs with many extremes, so both the saturation at +127 and the clamp of
// negative sums to zero occur (both are counted and required). Checks every element, the
// one-clock latency and the number of results.
module qadd_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NP = 5, NF = 7, NJ = 50, LAT = 1;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t s [NP][NF];
  act_t d [NF];
  act_t e [NP][NF];
  ivec_t exp_q [$];
  int    t_q [$];

  qadd #(.N_PART(NP), .N_FEAT(NF)) dut (.*);

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
    ivec_t ex;
    int t;
    ex = exp_q.pop_front();
    t = t_q.pop_front();
    got++;
    checks++;
    if (cycle - t != LAT) begin failures++; $display("latency %0d", cycle - t); end
    for (int p = 0; p < NP; p++)
      for (int o = 0; o < NF; o++) begin
        checks++;
        if (int'(e[p][o]) != ex[p*NF + o]) begin
          failures++;
          if (failures < 10) $display("item %0d p%0d o%0d got %0d exp %0d", got, p, o, e[p][o], ex[p*NF+o]);
        end
      end
  end

  initial begin
    ivec_t v, w;
    v = new[NP*NF];
    w = new[NF];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 7 == 3 && in_valid) begin
        in_valid <= 0;
      end else begin
        foreach (v[i]) v[i] = rnd8();
        foreach (w[i]) w[i] = rnd8();
        for (int p = 0; p < NP; p++) for (int i = 0; i < NF; i++) s[p][i] <= act_t'(v[p*NF + i]);
        for (int i = 0; i < NF; i++) d[i] <= act_t'(w[i]);
        exp_q.push_back(bcast_add(v, w, NP, NF));
        t_q.push_back(cycle + 1);
        in_valid <= 1;
        sent++;
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (n_sat == 0 || n_relu == 0) begin failures++; $display("saturation or clamp never exercised"); end
    checks++;
    if (got != NJ) begin failures++; $display("got %0d of %0d", got, NJ); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
