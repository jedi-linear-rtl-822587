// cmvm_da_tb -- checks the shift-add dense layer against a multiply-based reference.
//
// Two instances: table L_IN_PROJ (16 -> 32, with ReLU) and table L_DENSE3 (32 -> 32, no ReLU,
// with bias). Each gets 300 vectors: random, all-extreme and all-zero (bias only). Every output
// element is one check. The saturation and ReLU paths must each have been hit.
module cmvm_da_tb;
  import jedi_pkg::*;
  import jedi_ref_pkg::*;

  int checks = 0, failures = 0;

  act_t xa [16];
  act_t ya [32];
  act_t xb [32];
  act_t yb [32];

  cmvm_da #(.N_IN(16), .N_OUT(32), .LAYER(L_IN_PROJ), .RELU(1'b1)) dut_a (.x(xa), .y(ya));
  cmvm_da #(.N_IN(32), .N_OUT(32), .LAYER(L_DENSE3),  .RELU(1'b0)) dut_b (.x(xb), .y(yb));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ivec_t va, vb, ra, rb;
    va = new[16];
    vb = new[32];
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < 16; i++) va[i] = (t == 0) ? 0 : (t == 1) ? 127 : (t == 2) ? -128 : rnd8();
      for (int i = 0; i < 32; i++) vb[i] = (t == 0) ? 0 : (t == 1) ? -128 : (t == 2) ? 127 : rnd8();
      foreach (va[i]) xa[i] = act_t'(va[i]);
      foreach (vb[i]) xb[i] = act_t'(vb[i]);
      #1;
      ra = dense(L_IN_PROJ, va, 32, 1'b1);
      rb = dense(L_DENSE3, vb, 32, 1'b0);
      for (int o = 0; o < 32; o++) begin
        checks += 2;
        if (int'(ya[o]) != ra[o]) begin
          failures++;
          if (failures < 10) $display("A t=%0d o=%0d got %0d exp %0d", t, o, ya[o], ra[o]);
        end
        if (int'(yb[o]) != rb[o]) begin
          failures++;
          if (failures < 10) $display("B t=%0d o=%0d got %0d exp %0d", t, o, yb[o], rb[o]);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_relu == 0) begin
      failures++;
      $display("saturation (%0d) or ReLU (%0d) never exercised", n_sat, n_relu);
    end
    $display("saturations=%0d relu_clamps=%0d", n_sat, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
