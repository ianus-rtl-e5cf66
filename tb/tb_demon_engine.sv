// tb_demon_engine: exhaustive check of the demon update rule.
//
// Every spin value, every neighbour/coupling pattern, every demon value and
// three demon limits are applied. The expected result is worked out from the
// energy U = -sum sigma_i J_ij sigma_j in plain integer arithmetic, with the
// demon holding 4 energy units per count. A flip that costs nothing is
// always made, even when the demon already sits above its limit.
module tb_demon_engine;
  import ianus_pkg::*;

  logic           spin, spin_new, flipped;
  logic [3:0]     demon, demon_new, demon_max;
  logic [5:0]     nb, coup;
  int checks = 0, failures = 0;
  int n_gain = 0, n_pay = 0, n_refuse = 0, n_cap = 0;

  demon_engine dut (.spin, .demon, .nb_spin(nb), .coup, .demon_max,
                    .spin_new, .demon_new, .flipped);

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int dmaxes [3] = '{15, 7, 3};
    for (int m = 0; m < 3; m++)
      for (int sp = 0; sp < 2; sp++)
        for (int d = 0; d < 16; d++)
          for (int p = 0; p < 4096; p++) begin
            int h, de, e_dem, exp_dem;
            bit exp_flip;
            spin = sp[0]; demon = 4'(d); demon_max = 4'(dmaxes[m]);
            nb = p[5:0]; coup = p[11:6];
            #1;
            h = 0;
            for (int k = 0; k < 6; k++)
              h += ((nb[k] ? 1 : -1) * (coup[k] ? 1 : -1));
            de    = 2 * ((sp != 0) ? 1 : -1) * h;     // energy change of a flip
            e_dem = 4 * d;
            exp_flip = 0; exp_dem = d;
            if (de == 0) begin
              exp_flip = 1; n_gain++;
            end else if (de < 0) begin
              if (e_dem - de <= 4 * dmaxes[m]) begin
                exp_flip = 1; exp_dem = (e_dem - de) / 4; n_gain++;
              end else n_cap++;
            end else if (e_dem >= de) begin
              exp_flip = 1; exp_dem = (e_dem - de) / 4; n_pay++;
            end else n_refuse++;
            checks++;
            if (spin_new !== (exp_flip ? ~spin : spin) || int'(demon_new) != exp_dem
                || flipped !== exp_flip) begin
              failures++;
              if (failures < 10)
                $display("FAIL s=%0d d=%0d max=%0d nb=%b J=%b: got %0d/%0d exp flip=%0d dem=%0d",
                         sp, d, dmaxes[m], nb, coup, spin_new, demon_new, exp_flip, exp_dem);
            end
          end
    $display("cases: gain=%0d pay=%0d refused=%0d capped=%0d", n_gain, n_pay, n_refuse, n_cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
