// tb_hb_engine: random check of the heat-bath spin choice.
//
// The probability table is filled with e^{h/T}/(e^{h/T}+e^{-h/T}) for
// T = 2 (h = 2a-6), scaled to 2^32. Random neighbours, couplings and random
// words are applied; the expected spin comes from recomputing h in integer
// arithmetic. A second pass checks that the fraction of +1 for each field
// value is close to the table's probability.
module tb_hb_engine;
  import ianus_pkg::*;

  logic [5:0]  nb, coup;
  logic [31:0] rnd;
  logic [31:0] prob [7];
  logic        spin_new;
  int checks = 0, failures = 0;
  int ups [7], tries [7];

  hb_engine dut (.nb_spin(nb), .coup, .rnd, .prob, .spin_new);

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 7; a++) begin
      real h, p;
      h = 2.0 * a - 6.0;
      p = $exp(h / 2.0) / ($exp(h / 2.0) + $exp(-h / 2.0));
      prob[a] = 32'($rtoi(p * 4294967295.0));
      ups[a] = 0; tries[a] = 0;
    end
    for (int t = 0; t < 200000; t++) begin
      int h, a;
      nb = 6'($urandom); coup = 6'($urandom); rnd = $urandom;
      #1;
      h = 0;
      for (int k = 0; k < 6; k++) h += (nb[k] == coup[k]) ? 1 : -1;
      a = (h + 6) / 2;
      tries[a]++;
      if (spin_new) ups[a]++;
      checks++;
      if (spin_new !== (rnd < prob[a])) begin
        failures++;
        if (failures < 10) $display("FAIL nb=%b J=%b rnd=%h", nb, coup, rnd);
      end
    end
    for (int a = 0; a < 7; a++) begin
      real f, p;
      f = real'(ups[a]) / real'(tries[a]);
      p = real'(prob[a]) / 4294967296.0;
      checks++;
      if (f - p > 0.05 || p - f > 0.05) begin
        failures++;
        $display("FAIL a=%0d frequency %f expected %f", a, f, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
