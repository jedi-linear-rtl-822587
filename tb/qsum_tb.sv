// qsum_tb -- global average pooling, 8 particles x 6 features.
//
// Streams 40 jets of random 8-bit values (with frequent -128/127 extremes, so sums are large
// and often negative) and compares each mean with a floor-division reference. Checks the
// one-clock latency and that every jet produces exactly one result.
module qsum_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NP = 8, NF = 6, NJ = 40, LAT = 1;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [NP][NF];
  act_t g [NF];
  ivec_t exp_q [$];
  int    t_q [$];

  qsum #(.N_PART(NP), .N_FEAT(NF)) dut (.*);

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
    for (int o = 0; o < NF; o++) begin
      checks++;
      if (int'(g[o]) != e[o]) begin
        failures++;
        if (failures < 10) $display("item %0d o%0d got %0d exp %0d", got, o, g[o], e[o]);
      end
    end
  end

  initial begin
    ivec_t v;
    v = new[NP*NF];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 7 == 3 && in_valid) begin
        in_valid <= 0;
      end else begin
        foreach (v[i]) v[i] = rnd8();
        for (int p = 0; p < NP; p++) for (int i = 0; i < NF; i++) x[p][i] <= act_t'(v[p*NF + i]);
        exp_q.push_back(mean(v, NP, NF));
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
