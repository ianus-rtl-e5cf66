// tb_ianus_board: end-to-end run of a reduced board, 2x2 SPs of 4x4x4 sites
// (an 8x8x4 periodic lattice), driven only through the host port.
//
// The host loads a random spin glass into all SPs, runs two demon sweeps,
// reads the whole lattice back and compares it with the software reference.
// It then switches every SP to zero-temperature heat bath, runs one sweep
// and compares again. Halo traffic crosses every SP boundary and wraps
// around the torus, so a wrong link shows as a wrong spin.
//
// Mechanisms counted (each must occur at least once): demon flips paid by
// the demon, flips refused for lack of demon energy, flips refused by the
// demon limit, halo words sent, cycles an SP waited for its neighbours,
// cycles with two or more SPs competing for the host output of the
// crossbar, host back-pressure, and the demon -> heat-bath mode switch.
module tb_ianus_board;
  import ianus_pkg::*;
  import ianus_ref_pkg::*;

  localparam int GX = 2, GY = 2, SX = 4, SY = 4, SZ = 4, NE = 8;
  localparam int NSP = GX * GY, NS = SX * SY, HOST = NSP;

  logic clk = 0, rst_n = 0;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  logic [4:0] host_in_dest, host_out_src;
  msg_t host_in_msg, host_out_msg;
  logic [NSP-1:0] sp_busy;
  logic [31:0] sp_flips [NSP];
  logic [31:0] sp_waits [NSP];
  int checks = 0, failures = 0, cycles = 0;
  int n_halo = 0, n_contend = 0, n_backpressure = 0, n_modeswitch = 0;

  ianus_board #(.GX(GX), .GY(GY), .SX(SX), .SY(SY), .SZ(SZ), .NE(NE)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    int nreq;
    cycles++;
    for (int k = 0; k < NSP; k++) n_halo += $countones(dut.h_valid[k]);
    nreq = 0;
    for (int k = 0; k < NSP; k++)
      if (dut.x_in_valid[k] && int'(dut.x_in_dest[k]) == HOST) nreq++;
    if (nreq > 1) n_contend++;
    if (host_out_valid && !host_out_ready) n_backpressure++;
  end

  initial begin
    wait (cycles == 200000);
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

  task automatic send(int sp, op_e op, logic [15:0] addr, logic [31:0] data);
    @(negedge clk);
    host_in_valid = 1; host_in_dest = 5'(sp);
    host_in_msg = '{op: op, addr: addr, data: data};
    do @(posedge clk); while (!host_in_ready);
    @(negedge clk);
    host_in_valid = 0;
  endtask

  task automatic read(int sp, logic [15:0] addr, output logic [31:0] data);
    send(sp, OP_READ, addr, 0);
    while (!(host_out_valid && host_out_ready)) @(posedge clk);
    check("response source", 32'(host_out_src), 32'(sp));
    data = host_out_msg.data;
    @(posedge clk);
  endtask

  // Global site (x,y,z) lives in SP (x/SX, y/SY) at local address
  // z*NS + (y%SY)*SX + x%SX.
  function automatic int sp_of(int x, int y);
    return (y / SY) * GX + x / SX;
  endfunction
  function automatic logic [15:0] addr_of(int x, int y, int z);
    return 16'(z * NS + (y % SY) * SX + x % SX);
  endfunction

  task automatic broadcast(logic [15:0] addr, logic [31:0] data);
    for (int k = 0; k < NSP; k++) send(k, OP_WRITE, addr, data);
  endtask

  task automatic compare(lattice l, string tag);
    logic [31:0] w;
    for (int z = 0; z < SZ; z++)
      for (int y = 0; y < GY * SY; y++)
        for (int x = 0; x < GX * SX; x++) begin
          read(sp_of(x, y), addr_of(x, y, z), w);
          check($sformatf("%s site %0d,%0d,%0d", tag, x, y, z), w, l.site_word(l.idx(x, y, z)));
        end
  endtask

  task automatic run_all(int n);
    logic [31:0] w;
    broadcast(REG_RUN, 32'(n));
    @(posedge clk);
    while (sp_busy != '0) @(posedge clk);
    // Poll every SP's status with the host output held: the SPs' answers
    // pile up in front of the crossbar's host port.
    @(negedge clk);
    host_out_ready = 0;
    for (int k = 0; k < NSP; k++) send(k, OP_READ, REG_STATUS, 0);
    repeat (3) @(posedge clk);
    @(negedge clk);
    host_out_ready = 1;
    for (int k = 0; k < NSP; k++) begin
      while (!(host_out_valid && host_out_ready)) @(posedge clk);
      check("status", host_out_msg.data, 32'(n));
      @(posedge clk);
    end
  endtask

  initial begin
    lattice l;
    host_in_valid = 0; host_in_dest = '0; host_out_ready = 1;
    host_in_msg = '{op: OP_NOP, addr: 0, data: 0};
    l = new(GX * SX, GY * SY, SZ);
    l.fill_random(4);
    l.dmax = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int z = 0; z < SZ; z++)
      for (int y = 0; y < GY * SY; y++)
        for (int x = 0; x < GX * SX; x++)
          send(sp_of(x, y), OP_WRITE, addr_of(x, y, z), l.site_word(l.idx(x, y, z)));
    broadcast(REG_DMAX, 4);
    broadcast(REG_ALG, 32'(ALG_DEMON));

    run_all(2);
    for (int s = 0; s < 2; s++) begin l.half_sweep(0, 0); l.half_sweep(1, 0); end
    compare(l, "demon");
    begin
      logic [31:0] tot;
      tot = 0;
      for (int k = 0; k < NSP; k++) tot += sp_flips[k];
      check("total flips", tot, 32'(l.n_flip));
    end

    broadcast(REG_ALG, 32'(ALG_HEATBATH));
    n_modeswitch++;
    for (int a = 0; a < 7; a++) broadcast(REG_LUT0 + 16'(a), (a >= 4) ? 32'hFFFF_FFFF : 32'h0);
    run_all(1);
    l.half_sweep(0, 1); l.half_sweep(1, 1);
    compare(l, "heat bath");

    begin
      int waits;
      waits = 0;
      for (int k = 0; k < NSP; k++) waits += sp_waits[k];
      $display("mechanisms: paid=%0d refused=%0d capped=%0d halo_words=%0d neighbour_waits=%0d contention=%0d backpressure=%0d mode_switches=%0d",
               l.n_paid, l.n_refused, l.n_capped, n_halo, waits, n_contend, n_backpressure, n_modeswitch);
      checks++; if (l.n_paid == 0)       begin failures++; $display("FAIL no paid flip"); end
      checks++; if (l.n_refused == 0)    begin failures++; $display("FAIL no refused flip"); end
      checks++; if (l.n_capped == 0)     begin failures++; $display("FAIL no capped flip"); end
      checks++; if (n_halo == 0)         begin failures++; $display("FAIL no halo traffic"); end
      checks++; if (waits == 0)          begin failures++; $display("FAIL no neighbour wait"); end
      checks++; if (n_contend == 0)      begin failures++; $display("FAIL no contention"); end
      checks++; if (n_backpressure == 0) begin failures++; $display("FAIL no back-pressure"); end
      checks++; if (n_modeswitch == 0)   begin failures++; $display("FAIL no mode switch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
