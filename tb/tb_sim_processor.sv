// tb_sim_processor: one SP with its halo links looped back onto itself, so
// that its 4x4x4 piece is a complete periodic lattice.
//
// The host side loads random couplings (consistent per bond), spins and
// demons site by site, sets a demon limit of 5, runs two demon sweeps, reads
// every site back and compares it with the software reference. It then
// switches the SP to heat bath with a zero-temperature table, runs one
// sweep and compares again, then runs one sweep at T = 2 and predicts it
// with a software copy of every engine's generator. It checks the register read-back, the STATUS
// word, the flip counter, and that a half sweep takes exactly
// SZ * SX*SY/NE cycles (8 here: 2 cycles per plane with 8 engines).
module tb_sim_processor;
  import ianus_pkg::*;
  import ianus_ref_pkg::*;

  localparam int SX = 4, SY = 4, SZ = 4, NE = 8;
  localparam int NS = SX * SY;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [4:0] in_src, out_dest;
  msg_t in_msg, out_msg;
  logic [3:0] hv, hl;
  logic [3:0][3:0] hd;
  logic [3:0] rv, rl;
  logic [3:0][3:0] rd;
  logic busy;
  logic [15:0] sweeps_done;
  logic [31:0] flip_cnt, wait_cnt;
  int checks = 0, failures = 0, cycles = 0, sweep_cycles = 0;

  sim_processor #(.SX(SX), .SY(SY), .SZ(SZ), .NE(NE)) dut (
    .clk, .rst_n, .in_valid, .in_src, .in_msg, .in_ready,
    .out_valid, .out_dest, .out_msg, .out_ready,
    .hout_valid(hv), .hout_lat(hl), .hout_data(hd),
    .hin_valid(rv), .hin_lat(rl), .hin_data(rd),
    .busy, .sweeps_done, .flip_cnt, .wait_cnt
  );

  // Loop-back: what goes out towards +x comes back in from -x, and so on.
  assign rv = {hv[2], hv[3], hv[0], hv[1]};
  assign rl = {hl[2], hl[3], hl[0], hl[1]};
  assign rd = {hd[2], hd[3], hd[0], hd[1]};

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (int'(dut.st) == 3) sweep_cycles++;
  end

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic send(op_e op, logic [15:0] addr, logic [31:0] data);
    @(negedge clk);
    in_valid = 1; in_src = 5'd16; in_msg = '{op: op, addr: addr, data: data};
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic read(logic [15:0] addr, output logic [31:0] data);
    send(OP_READ, addr, 0);
    while (!(out_valid && out_ready)) @(posedge clk);
    check("response destination", 32'(out_dest), 32'd16);
    check("response address", 32'(out_msg.addr), 32'(addr));
    data = out_msg.data;
    @(posedge clk);
  endtask

  function automatic int lsite(lattice l, int x, int y, int z);
    return l.idx(x, y, z);
  endfunction

  task automatic load(lattice l);
    for (int z = 0; z < SZ; z++)
      for (int y = 0; y < SY; y++)
        for (int x = 0; x < SX; x++)
          send(OP_WRITE, 16'(z * NS + y * SX + x), l.site_word(l.idx(x, y, z)));
  endtask

  task automatic compare(lattice l, string tag);
    logic [31:0] w;
    for (int z = 0; z < SZ; z++)
      for (int y = 0; y < SY; y++)
        for (int x = 0; x < SX; x++) begin
          read(16'(z * NS + y * SX + x), w);
          check($sformatf("%s site %0d,%0d,%0d", tag, x, y, z), w, l.site_word(l.idx(x, y, z)));
        end
  endtask

  task automatic run(int n, output int took);
    logic [31:0] w;
    int t0;
    send(OP_WRITE, REG_RUN, 32'(n));
    t0 = cycles;
    @(posedge clk);
    while (busy) @(posedge clk);
    took = cycles - t0;
    read(REG_STATUS, w);
    check("status after run", w, 32'(n));
  endtask

  initial begin
    lattice l;
    logic [31:0] w;
    int took, f0;
    in_valid = 0; in_src = '0; in_msg = '{op: OP_NOP, addr: 0, data: 0}; out_ready = 1;
    l = new(SX, SY, SZ);
    l.fill_random(5);
    l.dmax = 5;
    repeat (3) @(posedge clk);
    rst_n = 1;

    load(l);
    send(OP_WRITE, REG_DMAX, 5);
    send(OP_WRITE, REG_ALG, 32'(ALG_DEMON));
    read(REG_DMAX, w); check("DMAX read-back", w, 5);
    compare(l, "loaded");

    // Two demon sweeps
    f0 = int'(flip_cnt);
    run(2, took);
    check("demon sweep cycles", 32'(sweep_cycles), 32'(2 * 2 * SZ * NS / NE));
    for (int s = 0; s < 2; s++) begin l.half_sweep(0, 0); l.half_sweep(1, 0); end
    compare(l, "demon");
    check("flip counter", flip_cnt - 32'(f0), 32'(l.n_flip));
    $display("demon: %0d flips, %0d capped by the limit, %0d paid, %0d refused, run took %0d cycles",
             l.n_flip, l.n_capped, l.n_paid, l.n_refused, took);
    checks++;
    if (l.n_capped == 0 || l.n_paid == 0) begin
      failures++; $display("FAIL demon limit or demon payment never exercised");
    end

    // Heat bath at zero temperature: P(+1) = 1 for h > 0, else 0.
    send(OP_WRITE, REG_ALG, 32'(ALG_HEATBATH));
    for (int a = 0; a < 7; a++)
      send(OP_WRITE, REG_LUT0 + 16'(a), (a >= 4) ? 32'hFFFF_FFFF : 32'h0);
    read(REG_LUT0 + 16'd4, w); check("LUT read-back", w, 32'hFFFF_FFFF);
    sweep_cycles = 0;
    run(1, took);
    check("heat-bath sweep cycles", 32'(sweep_cycles), 32'(2 * SZ * NS / NE));
    l.half_sweep(0, 1); l.half_sweep(1, 1);
    compare(l, "heat bath");

    // Heat bath at T = 2 with the SP's own generators: engine e draws one
    // word per cycle from generator e, sites taken in plane order, two
    // chunks of 8 per plane. Generators have not moved before (the demon
    // runs leave them alone; the zero-temperature run used one sweep).
    begin
      srgen g [NE];
      logic [31:0] pt [7];
      for (int e = 0; e < NE; e++) g[e] = new(32'h2545_F491 + 32'(e) * 32'h9E37_79B9);
      // replay the zero-temperature sweep's draws
      for (int k = 0; k < 2 * SZ * NS / NE; k++)
        for (int e = 0; e < NE; e++) void'(g[e].step());
      for (int a = 0; a < 7; a++) begin
        real h;
        h = 2.0 * a - 6.0;
        pt[a] = 32'($rtoi($exp(h / 2.0) / ($exp(h / 2.0) + $exp(-h / 2.0)) * 4294967295.0));
        send(OP_WRITE, REG_LUT0 + 16'(a), pt[a]);
      end
      f0 = int'(flip_cnt);
      l.n_flip = 0;
      run(1, took);
      for (int t = 0; t < 2; t++)
        for (int z = 0; z < SZ; z++)
          for (int c = 0; c < NS / NE; c++)
            for (int e = 0; e < NE; e++) begin
              int s;
              s = c * NE + e;
              l.hb_site(t[0], s % SX, s / SX, z, g[e].step(), pt);
            end
      compare(l, "heat bath T=2");
      check("heat-bath flip counter", flip_cnt - 32'(f0), 32'(l.n_flip));
      $display("heat bath T=2: %0d spins changed", l.n_flip);
    end

    // Writes are ignored while running
    send(OP_WRITE, REG_ALG, 32'(ALG_DEMON));
    send(OP_WRITE, REG_RUN, 32'd1);
    @(negedge clk);
    in_valid = 1; in_src = 5'd16; in_msg = '{op: OP_WRITE, addr: 16'd0, data: ~l.site_word(0)};
    @(posedge clk); @(negedge clk); in_valid = 0;
    while (busy) @(posedge clk);
    l.half_sweep(0, 0); l.half_sweep(1, 0);
    compare(l, "write while busy");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
