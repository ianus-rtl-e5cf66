// tb_sr_rng: compares the generator with a software model of
// I(k) = I(k-24) + I(k-55), R(k) = I(k) ^ I(k-61), started from the same 64
// xorshift32 words, over 3000 steps with enable toggled at random. It also
// checks that the output holds while enable is low and that the mean of the
// words is near 2^31.
module tb_sr_rng;
  logic        clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0, cycles = 0;
  localparam logic [31:0] SEED = 32'hCAFE_F00D;

  sr_rng #(.SEED(SEED)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] hist [$];
    logic [31:0] x, expv;
    static real mean = 0.0;
    static int steps = 0;
    x = SEED;
    for (int k = 0; k < 64; k++) begin
      x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
      hist.push_back(x);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (steps < 3000) begin
      logic [31:0] n;
      @(negedge clk);
      en = ($urandom % 4) != 0;
      #1;
      // The word on offer is R of the next step, whether or not it is taken.
      n = hist[hist.size() - 24] + hist[hist.size() - 55];
      expv = n ^ hist[hist.size() - 61];
      checks++;
      if (rnd !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d got %h exp %h", steps, rnd, expv);
      end
      if (en) begin
        hist.push_back(n);
        void'(hist.pop_front());
        steps++;
        mean += real'(rnd) / 3000.0;
      end
    end
    checks++;
    if (mean < 1.9e9 || mean > 2.4e9) begin
      failures++; $display("FAIL mean %f", mean);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
