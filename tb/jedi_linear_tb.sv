// jedi_linear_tb -- end-to-end test of the whole tagger at a reduced size (8 particles x 16
// features, 16-wide hidden layers) that builds quickly; jedi_linear_full_tb runs the same test
// at the default size.
//
// Streams NJ jets: each has a random number of real particles (1..NP) with random 8-bit
// features, the rest zero-padded. Jets mostly enter on consecutive clocks (initiation
// interval 1), with some idle clocks between bursts. For each jet the five logits are compared
// with the integer reference model, and the result must appear exactly LATENCY = 10 clocks
// after the jet entered. The test also counts, and requires at least once each: back-to-back
// jets, idle clocks, zero-padded jets, a jet with all NP particles, saturation inside the network,
// ReLU clamping, and a jet whose logits are not all the same value.
module jedi_linear_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  localparam int NP = 8, NF = 16, NH = 16, NC = 5, NJ = 60, LAT = 10;

  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  int n_b2b = 0, n_idle = 0, n_padded = 0, n_full = 0, n_varied = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t particles [NP][NF];
  act_t logits [NC];
  ivec_t exp_q [$];
  int    t_q [$];

  jedi_linear #(.N_PART(NP), .N_FEAT(NF), .D_E(NH), .D_E2(NH), .N_HID(NH), .N_CLASS(NC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
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
    if (cycle - t != LAT) begin failures++; $display("jet %0d latency %0d", got, cycle - t); end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'(logits[c]) != ex[c]) begin
        failures++;
        if (failures < 10) $display("jet %0d class %0d got %0d exp %0d", got, c, logits[c], ex[c]);
      end
      if (ex[c] != ex[0]) n_varied++;
    end
  end

  initial begin
    ivec_t v;
    int n_real;
    logic prev_valid;
    v = new[NP*NF];
    prev_valid = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 9 == 4 && prev_valid) begin
        in_valid <= 0;
        prev_valid = 0;
        n_idle++;
      end else begin
        n_real = (sent % 6 == 0) ? NP : 1 + int'($urandom % NP);
        if (n_real < NP) n_padded++; else n_full++;
        for (int p = 0; p < NP; p++)
          for (int f = 0; f < NF; f++) v[p*NF + f] = (p < n_real) ? rnd8() : 0;
        for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) particles[p][f] <= act_t'(v[p*NF + f]);
        exp_q.push_back(model(v, NP, NF, NH, NH, NH, NC));
        t_q.push_back(cycle + 1);
        if (prev_valid) n_b2b++;
        in_valid <= 1;
        prev_valid = 1;
        sent++;
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    $display("jets=%0d back_to_back=%0d idle=%0d padded=%0d full=%0d saturations=%0d relu_clamps=%0d varied=%0d",
             got, n_b2b, n_idle, n_padded, n_full, n_sat, n_relu, n_varied);
    checks++;
    if (got != NJ) begin failures++; $display("got %0d of %0d", got, NJ); end
    checks++; if (n_b2b == 0)    begin failures++; $display("no back-to-back jets"); end
    checks++; if (n_idle == 0)   begin failures++; $display("no idle clocks"); end
    checks++; if (n_padded == 0) begin failures++; $display("no padded jets"); end
    checks++; if (n_full == 0)   begin failures++; $display("no full jets"); end
    checks++; if (n_sat == 0)    begin failures++; $display("no saturation"); end
    checks++; if (n_relu == 0)   begin failures++; $display("no ReLU clamp"); end
    checks++; if (n_varied == 0) begin failures++; $display("logits never differ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
