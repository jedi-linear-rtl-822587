// mlp_head_tb -- the four-layer classification head at its default sizes (32 -> 32 -> 32 ->
// 32 -> 5).
//
// 60 random pooled vectors (non-negative, as after the ReLU layers), mostly back to back; the
// five logits are compared with the reference and must arrive exactly four clocks later.
module mlp_head_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NI = 32, NJ = 60, LAT = 4;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [NI];
  act_t logits [5];
  ivec_t exp_q [$];
  int    t_q [$];

  mlp_head dut (.*);

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
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (int'(logits[o]) != e[o]) begin
        failures++;
        if (failures < 10) $display("item %0d o%0d got %0d exp %0d", got, o, logits[o], e[o]);
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
        foreach (v[i]) v[i] = rnd8() & 127;
        for (int i = 0; i < NI; i++) x[i] <= act_t'(v[i]);
        exp_q.push_back(mlp(v, 32, 5));
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
