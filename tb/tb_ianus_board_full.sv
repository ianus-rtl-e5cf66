// tb_ianus_board_full: one demon sweep of the full-size board, every
// parameter at its default: 4x4 SPs of 16x16x64 sites, a 64x64x64 periodic
// lattice, 128 engines per SP.
//
// Loading 262144 sites one message at a time would take most of a million
// cycles, so the bulk of the lattice is placed straight into the SPs' site
// storage through hierarchical references, and read back the same way. The
// host port is still used for everything else: the demon limit, the
// algorithm, a spot check of 64 sites through the crossbar, the RUN command
// to all 16 SPs and the STATUS poll. The lattice after one sweep (P then Q)
// must match the software reference site by site. The time from the last
// RUN to the end of the sweep is checked against 2 half sweeps of
// 64 planes x 2 cycles plus the PRE pass and the barrier waits.
module tb_ianus_board_full;
  import ianus_pkg::*;
  import ianus_ref_pkg::*;

  localparam int GX = 4, GY = 4, SX = 16, SY = 16, SZ = 64;
  localparam int NSP = GX * GY, NS = SX * SY;

  logic clk = 0, rst_n = 0;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  logic [4:0] host_in_dest, host_out_src;
  msg_t host_in_msg, host_out_msg;
  logic [NSP-1:0] sp_busy;
  logic [31:0] sp_flips [NSP];
  logic [31:0] sp_waits [NSP];
  int checks = 0, failures = 0, cycles = 0;
  lattice l;
  bit load_go = 0, snap_go = 0;
  logic [31:0] snap [];

  ianus_board dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Direct access to each SP's site storage.
  for (genvar gj = 0; gj < GY; gj++) begin : g_j
    for (genvar gi = 0; gi < GX; gi++) begin : g_i
      always @(posedge load_go)
        for (int z = 0; z < SZ; z++)
          for (int y = 0; y < SY; y++)
            for (int x = 0; x < SX; x++) begin
              int i;
              i = l.idx(gi * SX + x, gj * SY + y, z);
              dut.g_row[gj].g_col[gi].u_sp.lat_mem[0][z][y * SX + x] = l.p[i];
              dut.g_row[gj].g_col[gi].u_sp.lat_mem[1][z][y * SX + x] = l.q[i];
              dut.g_row[gj].g_col[gi].u_sp.j_mem[z][y * SX + x] = l.j[i];
              dut.g_row[gj].g_col[gi].u_sp.d_mem[z][y * SX + x] = 4'(l.dem[i]);
            end
      always @(posedge snap_go)
        for (int z = 0; z < SZ; z++)
          for (int y = 0; y < SY; y++)
            for (int x = 0; x < SX; x++)
              snap[l.idx(gi * SX + x, gj * SY + y, z)] =
                {20'd0, dut.g_row[gj].g_col[gi].u_sp.d_mem[z][y * SX + x],
                 dut.g_row[gj].g_col[gi].u_sp.j_mem[z][y * SX + x],
                 dut.g_row[gj].g_col[gi].u_sp.lat_mem[1][z][y * SX + x],
                 dut.g_row[gj].g_col[gi].u_sp.lat_mem[0][z][y * SX + x]};
    end
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

  initial begin
    logic [31:0] w;
    int t0, took, waits;
    host_in_valid = 0; host_in_dest = '0; host_out_ready = 1;
    host_in_msg = '{op: OP_NOP, addr: 0, data: 0};
    l = new(GX * SX, GY * SY, SZ);
    l.fill_random(6);
    l.dmax = 6;
    snap = new[GX * SX * GY * SY * SZ];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load_go = 1;
    @(negedge clk);

    // Spot check through the host port: 4 sites in each SP.
    for (int k = 0; k < 64; k++) begin
      int x, y, z;
      x = $urandom % (GX * SX); y = $urandom % (GY * SY); z = $urandom % SZ;
      read((y / SY) * GX + x / SX, 16'(z * NS + (y % SY) * SX + x % SX), w);
      check("loaded site", w, l.site_word(l.idx(x, y, z)));
    end
    for (int k = 0; k < NSP; k++) begin
      send(k, OP_WRITE, REG_DMAX, 6);
      send(k, OP_WRITE, REG_ALG, 32'(ALG_DEMON));
    end
    for (int k = 0; k < NSP; k++) send(k, OP_WRITE, REG_RUN, 1);
    t0 = cycles;
    while (sp_busy != '0) @(posedge clk);
    took = cycles - t0;
    for (int k = 0; k < NSP; k++) begin
      read(k, REG_STATUS, w);
      check("status", w, 32'd1);
    end

    l.half_sweep(0, 0); l.half_sweep(1, 0);
    @(negedge clk);
    snap_go = 1;
    @(negedge clk);
    foreach (snap[i]) check($sformatf("site %0d", i), snap[i], l.site_word(i));
    begin
      logic [31:0] tot;
      tot = 0;
      for (int k = 0; k < NSP; k++) tot += sp_flips[k];
      check("total flips", tot, 32'(l.n_flip));
    end
    waits = 0;
    for (int k = 0; k < NSP; k++) waits += sp_waits[k];
    // 2 x 128 sweep cycles, 64 PRE cycles, a few barrier cycles.
    checks++;
    if (took < 2 * SZ * 2 || took > 2 * SZ * 2 + SZ + 40) begin
      failures++; $display("FAIL sweep took %0d cycles", took);
    end
    $display("full board: %0d flips (%0d paid, %0d refused, %0d capped), sweep %0d cycles, %0d wait cycles",
             l.n_flip, l.n_paid, l.n_refused, l.n_capped, took, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
