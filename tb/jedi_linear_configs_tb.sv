// jedi_linear_configs_tb -- the tagger elaborated at other published jet sizes.
//
// The default build is 64 particles x 16 features. This test elaborates three further sizes
// from the evaluated set -- 8 particles x 3 features, 32 x 3 and 128 x 16 -- with the default
// hidden widths, streams random zero-padded jets through each, and checks every logit and the
// fixed 10-clock latency against the reference model. (Weights are the stand-in tables, so
// this shows the hardware is right at each size, not the accuracy of a trained model.)
module jedi_linear_configs_tb;
  logic clk = 0, rst_n = 0;
  int c0, f0, c1, f1, c2, f2;
  logic d0, d1, d2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  jedi_config_run #(.NP(8),   .NF(3),  .NJ(16)) r0 (.clk(clk), .rst_n(rst_n), .checks(c0), .failures(f0), .done(d0));
  jedi_config_run #(.NP(32),  .NF(3),  .NJ(16)) r1 (.clk(clk), .rst_n(rst_n), .checks(c1), .failures(f1), .done(d1));
  jedi_config_run #(.NP(128), .NF(16), .NJ(8))  r2 (.clk(clk), .rst_n(rst_n), .checks(c2), .failures(f2), .done(d2));

  initial begin
    repeat (2000) @(posedge clk);
    failures = failures + 1;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (d0 && d1 && d2);
    repeat (2) @(posedge clk);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("8x3: %0d checks, 32x3: %0d checks, 128x16: %0d checks", c0, c1, c2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
