// jedi_config_run -- drives one jedi_linear of a given jet size and checks it against the
// reference model; used by jedi_linear_configs_tb to cover several published jet sizes.
//
// Sends NJ jets back to back (except one idle clock after every fourth), each with a random
// number of real particles and zero padding, and checks all logits and the 10-clock latency.
// Hidden widths stay at the top's defaults; only N_PART and N_FEAT change. Raises done when
// all results are in; checks and failures are its running totals.
module jedi_config_run
  import jedi_pkg::*;
  import jedi_ref_pkg::*;
#(
  parameter int NP = 8,
  parameter int NF = 3,
  parameter int NJ = 12
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);

  localparam int NC = 5, LAT = 10;

  int cycle = 0, sent = 0, got = 0;
  logic in_valid = 0, out_valid;
  act_t particles [NP][NF];
  act_t logits [NC];
  ivec_t exp_q [$];
  int    t_q [$];

  initial begin
    checks = 0;
    failures = 0;
    done = 0;
  end

  jedi_linear #(.N_PART(NP), .N_FEAT(NF)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    ivec_t ex;
    int t;
    ex = exp_q.pop_front();
    t = t_q.pop_front();
    got++;
    checks++;
    if (cycle - t != LAT) begin failures++; $display("N=%0d jet %0d latency %0d", NP, got, cycle - t); end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (int'(logits[c]) != ex[c]) begin
        failures++;
        if (failures < 5) $display("N=%0d F=%0d jet %0d class %0d got %0d exp %0d", NP, NF, got, c, logits[c], ex[c]);
      end
    end
    if (got == NJ) done <= 1;
  end

  initial begin
    ivec_t v;
    int n_real;
    v = new[NP*NF];
    wait (rst_n);
    while (sent < NJ) begin
      @(posedge clk);
      if (sent % 4 == 0 && sent > 0 && in_valid) begin
        in_valid <= 0;
      end else begin
        n_real = (sent == 1) ? NP : 1 + int'($urandom % NP);
        for (int p = 0; p < NP; p++)
          for (int f = 0; f < NF; f++) v[p*NF + f] = (p < n_real) ? rnd8() : 0;
        for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) particles[p][f] <= act_t'(v[p*NF + f]);
        exp_q.push_back(model(v, NP, NF, 32, 32, 32, NC));
        t_q.push_back(cycle + 1);
        in_valid <= 1;
        sent++;
      end
    end
    @(posedge clk) in_valid <= 0;
  end
endmodule
