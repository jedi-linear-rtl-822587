// global_gather_tb -- the linearized interaction step, 8 particles x 12 features.
//
// 40 random jets of non-negative embeddings (as the ReLU of the input projection gives),
// mostly back to back. Each result must equal relu(sat(Dense2(x_p) + Dense3(mean(x)))) for
// every particle and arrive exactly three clocks after its jet.
module global_gather_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NP = 8, NF = 12, NJ = 40, LAT = 3;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [NP][NF];
  act_t e [NP][NF];
  ivec_t exp_q [$];
  int    t_q [$];

  global_gather #(.N_PART(NP), .D_E(NF)) dut (.*);

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
    ivec_t v;
    v = new[NP*NF];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 7 == 3 && in_valid) begin
        in_valid <= 0;
      end else begin
        foreach (v[i]) v[i] = rnd8() & 127;
        for (int p = 0; p < NP; p++) for (int i = 0; i < NF; i++) x[p][i] <= act_t'(v[p*NF + i]);
        exp_q.push_back(gather(v, NP, NF));
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
