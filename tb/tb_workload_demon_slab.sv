// tb_workload_demon_slab: the demon slab configuration, in which each SP
// updates 256 spins a cycle and a whole half sweep of its 4x64x64 slab takes
// 64 cycles. One SP is built with SX=4, SY=64, SZ=64, NE=256, so a 4x64
// plane is one cycle. Its halo links are looped back, making the slab a
// periodic 4x64x64 lattice of its own.
//
// Couplings, spins and demons are placed into the SP's storage through
// hierarchical references. Two demon sweeps with a demon limit of 6 run
// through the host-side commands and are checked site by site (spins and
// demons) against the software reference. The update cycle count must be
// 2 sweeps x 2 half sweeps x 64.
module tb_workload_demon_slab;
  import ianus_pkg::*;
  import ianus_ref_pkg::*;

  localparam int SX = 4, SY = 64, SZ = 64, NE = 256;
  localparam int NS = SX * SY;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [4:0] in_src, out_dest;
  msg_t in_msg, out_msg;
  logic [3:0] hv, hl, rv, rl;
  logic [3:0][63:0] hd, rd;
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
    int f0;
    in_valid = 0; in_src = '0; in_msg = '{op: OP_NOP, addr: 0, data: 0}; out_ready = 1;
    l = new(SX, SY, SZ);
    l.fill_random(6);
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

    send(OP_WRITE, REG_ALG, 32'(ALG_DEMON));
    send(OP_WRITE, REG_DMAX, 6);
    l.dmax = 6;
    f0 = int'(flip_cnt);
    send(OP_WRITE, REG_RUN, 2);
    @(posedge clk);
    while (busy) @(posedge clk);
    check("update cycles (64 per half sweep)", 32'(sweep_cycles), 32'(2 * 2 * SZ));
    for (int k = 0; k < 2; k++) begin l.half_sweep(0, 0); l.half_sweep(1, 0); end
    for (int z = 0; z < SZ; z++)
      for (int s = 0; s < NS; s++) begin
        int i;
        i = l.idx(s % SX, s / SX, z);
        check("site", {dut.d_mem[z][s], dut.lat_mem[1][z][s], dut.lat_mem[0][z][s]},
              {4'(l.dem[i]), l.q[i], l.p[i]});
      end
    check("flip counter", flip_cnt - 32'(f0), 32'(l.n_flip));
    $display("demon slab: %0d flips (%0d paid, %0d refused, %0d capped), %0d update cycles",
             l.n_flip, l.n_paid, l.n_refused, l.n_capped, sweep_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
