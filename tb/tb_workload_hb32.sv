// tb_workload_hb32: the 32^3 heat-bath test configuration, one SP holding a
// whole 32x32x32 periodic lattice (halo links looped back) with 128 engines
// and 128 generators, so that a 32x32 plane takes 8 cycles.
//
// The lattice is placed into the SP's storage through hierarchical
// references. One heat-bath sweep at T = 2 (P then Q) runs through the
// host-side RUN command. It is predicted site by site with a software copy
// of all 128 generators. The number of update cycles must be 2 x 32 x 8.
module tb_workload_hb32;
  import ianus_pkg::*;
  import ianus_ref_pkg::*;

  localparam int SX = 32, SY = 32, SZ = 32, NE = 128;
  localparam int NS = SX * SY;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [4:0] in_src, out_dest;
  msg_t in_msg, out_msg;
  logic [3:0] hv, hl, rv, rl;
  logic [3:0][31:0] hd, rd;
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

  assign rv = {hv[2], hv[3], hv[0], hv[1]};
  assign rl = {hl[2], hl[3], hl[0], hl[1]};
  assign rd = {hd[2], hd[3], hd[0], hd[1]};

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (int'(dut.st) == 3) sweep_cycles++;
  end

  initial begin
    wait (cycles == 20000);
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

  initial begin
    lattice l;
    srgen g [NE];
    logic [31:0] pt [7];
    int f0;
    in_valid = 0; in_src = '0; in_msg = '{op: OP_NOP, addr: 0, data: 0}; out_ready = 1;
    l = new(SX, SY, SZ);
    l.fill_random(0);
    for (int e = 0; e < NE; e++) g[e] = new(32'h2545_F491 + 32'(e) * 32'h9E37_79B9);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int z = 0; z < SZ; z++)
      for (int s = 0; s < NS; s++) begin
        int i;
        i = l.idx(s % SX, s / SX, z);
        dut.lat_mem[0][z][s] = l.p[i];
        dut.lat_mem[1][z][s] = l.q[i];
        dut.j_mem[z][s] = l.j[i];
        dut.d_mem[z][s] = 4'(l.dem[i]);
      end

    send(OP_WRITE, REG_ALG, 32'(ALG_HEATBATH));
    for (int a = 0; a < 7; a++) begin
      real h;
      h = 2.0 * a - 6.0;
      pt[a] = 32'($rtoi($exp(h / 2.0) / ($exp(h / 2.0) + $exp(-h / 2.0)) * 4294967295.0));
      send(OP_WRITE, REG_LUT0 + 16'(a), pt[a]);
    end
    f0 = int'(flip_cnt);
    send(OP_WRITE, REG_RUN, 1);
    @(posedge clk);
    while (busy) @(posedge clk);
    check("update cycles (8 per plane)", 32'(sweep_cycles), 32'(2 * SZ * NS / NE));

    for (int t = 0; t < 2; t++)
      for (int z = 0; z < SZ; z++)
        for (int c = 0; c < NS / NE; c++)
          for (int e = 0; e < NE; e++) begin
            int s;
            s = c * NE + e;
            l.hb_site(t[0], s % SX, s / SX, z, g[e].step(), pt);
          end
    for (int z = 0; z < SZ; z++)
      for (int s = 0; s < NS; s++) begin
        int i;
        i = l.idx(s % SX, s / SX, z);
        check("site", {dut.lat_mem[1][z][s], dut.lat_mem[0][z][s]}, {l.q[i], l.p[i]});
      end
    check("flip counter", flip_cnt - 32'(f0), 32'(l.n_flip));
    $display("32^3 heat bath: %0d spins changed, %0d update cycles", l.n_flip, sweep_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
