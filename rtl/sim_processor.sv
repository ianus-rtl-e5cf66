// sim_processor: one Simulation Processor (SP) of an Ianus board.
//
// The SP holds an SX x SY x SZ piece of a three-dimensional spin glass in
// "P/Q" form. Two replicas of the system share the couplings J. Lattice P
// holds the black sites of replica 1 and the white sites of replica 2;
// lattice Q holds the rest. Every neighbour of a P site is then a Q site at
// the neighbouring position, so a whole lattice can be updated at once while
// the other one is only read. One sweep updates P, then Q.
//
// The update runs plane by plane along z. Each cycle NE engines update NE
// sites of the current plane, so a plane of SX*SY sites takes SX*SY/NE
// cycles. With the default 16x16x64 piece and 128 engines that is 2 cycles
// a plane, 128 cycles a half sweep and 128 spins a cycle. Each site has a
// demon engine and a heat-bath engine behind it; the ALG register chooses
// which one writes back. This stands in for loading a different
// configuration into the FPGA. The SP keeps one demon per site, shared by
// P and Q (K = N demons). It keeps one random generator per engine.
//
// Periodic boundaries along z are handled inside the SP. Along x and y the
// neighbours live in the four SPs around it on the 4x4 torus. Once a plane
// is final, its four boundary rows and columns go out on the halo links
// (hout). Halo words received on hin go into halo buffers, one per lattice
// and direction, filled in plane order. A half sweep of lattice T starts
// only when SZ planes of the other lattice have come in from all four
// neighbours. This is the only synchronisation between SPs. At the start of
// a run the SP first sends all its Q boundary planes (the PRE pass). The
// final Q half sweep of a run sends nothing. So every half sweep uses up
// exactly what the one before delivered.
//
// The host reaches the SP through its IOP link with msg_t messages. It can
// write and read one site at a time (the site word of ianus_pkg) and the
// control registers ALG, DMAX, LUT0..6, RUN and STATUS. Reads are answered
// with an OP_RESP message addressed to the sender. Site writes are ignored
// while a run is in progress.
//
// Timing: one engine cycle per chunk of NE sites; halo words leave two
// cycles after their plane's last chunk is written; a host request is
// answered one cycle after it is accepted.
//
// From the paper: the P/Q layout, plane-sequential update, K = N demons, one
// random generator per engine, the 16x16x64 piece, the 128 engines, the 4x4
// torus and sending boundary data while the update runs. This design's own
// choices: the site-by-site host interface, the register map, the halo
// protocol and its counting barrier, storing all six couplings at every site
// (a boundary coupling is stored in both SPs), and the reset values.
module sim_processor
  import ianus_pkg::*;
#(
  parameter int unsigned SX        = 16,
  parameter int unsigned SY        = 16,
  parameter int unsigned SZ        = 64,
  parameter int unsigned NE        = 128,
  parameter int unsigned ID_W      = 5,
  parameter logic [31:0] SEED_BASE = 32'h2545_F491
) (
  input  logic              clk,
  input  logic              rst_n,
  // IOP link, request side
  input  logic              in_valid,
  input  logic [ID_W-1:0]   in_src,
  input  msg_t              in_msg,
  output logic              in_ready,
  // IOP link, response side
  output logic              out_valid,
  output logic [ID_W-1:0]   out_dest,
  output msg_t              out_msg,
  input  logic              out_ready,
  // Halo links; index 0..3 = +x, -x, +y, -y neighbour
  output logic [3:0]        hout_valid,
  output logic [3:0]        hout_lat,
  output logic [3:0][((SX > SY) ? SX : SY)-1:0] hout_data,
  input  logic [3:0]        hin_valid,
  input  logic [3:0]        hin_lat,
  input  logic [3:0][((SX > SY) ? SX : SY)-1:0] hin_data,
  // Status and event counters
  output logic              busy,
  output logic [15:0]       sweeps_done,
  output logic [31:0]       flip_cnt,
  output logic [31:0]       wait_cnt
);

  localparam int unsigned NS   = SX * SY;          // sites per plane
  localparam int unsigned N    = NS * SZ;          // sites in the SP
  localparam int unsigned LW   = (SX > SY) ? SX : SY;
  localparam int unsigned NCH  = NS / NE;          // chunks per plane
  localparam int unsigned CW   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned ZW   = (SZ > 1) ? $clog2(SZ) : 1;
  localparam int unsigned SW   = (NS > 1) ? $clog2(NS) : 1;
  localparam int unsigned RW   = $clog2(SZ + 1);

  localparam int unsigned HXP = 0, HXM = 1, HYP = 2, HYM = 3;

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_WAIT, S_SWEEP} state_e;

  // ---------------------------------------------------------------- storage
  logic [NS-1:0]      lat_mem [2][SZ];        // [0] = P, [1] = Q
  logic [NNB-1:0]     j_mem   [SZ][NS];
  logic [DEMON_W-1:0] d_mem   [SZ][NS];
  logic [LW-1:0]      halo    [2][4][SZ];     // [lattice][from dir][z]
  logic [RW-1:0]      rx_cnt  [2][4];

  // ---------------------------------------------------------------- control
  alg_e               alg;
  logic [DEMON_W-1:0] dmax;
  logic [31:0]        prob [7];
  state_e             st;
  logic               tgt;                    // lattice being updated
  logic [ZW-1:0]      z;
  logic [CW-1:0]      c;
  logic [15:0]        sweeps_left;
  logic               send_pend, send_lat;
  logic [ZW-1:0]      send_z;

  logic src;
  assign src  = ~tgt;
  assign busy = (st != S_IDLE);

  logic last_chunk, last_plane;
  assign last_chunk = (NCH == 1) || (32'(c) == NCH - 1);
  assign last_plane = (32'(z) == SZ - 1);

  logic halos_ready;
  always_comb begin
    halos_ready = 1'b1;
    for (int d = 0; d < 4; d++)
      if (32'(rx_cnt[src][d]) != SZ) halos_ready = 1'b0;
  end

  // ---------------------------------------------------------------- engines
  logic [ZW-1:0] zp1, zm1;
  assign zp1 = (32'(z) == SZ - 1) ? '0 : z + 1'b1;
  assign zm1 = (z == '0) ? ZW'(SZ - 1) : z - 1'b1;

  logic [NE-1:0]      new_spin, old_spin, eng_flip;
  logic [DEMON_W-1:0] new_dem [NE];
  logic [SW-1:0]      site   [NE];
  logic               rng_en;

  assign rng_en = (st == S_SWEEP) && (alg == ALG_HEATBATH);

  for (genvar e = 0; e < NE; e++) begin : g_eng
    logic [NNB-1:0]     nb;
    logic [NNB-1:0]     jj;
    logic [DEMON_W-1:0] dem, dem_o;
    logic               s_dm, s_hb;
    logic [31:0]        rnd;
    int unsigned        s, x, y;

    always_comb begin
      s = 32'(c) * NE + e;
      x = s % SX;
      y = s / SX;
      site[e]     = SW'(s);
      old_spin[e] = lat_mem[tgt][z][s];
      nb[DIR_XP]  = (x == SX - 1) ? halo[src][HXP][z][y] : lat_mem[src][z][s + 1];
      nb[DIR_XM]  = (x == 0)      ? halo[src][HXM][z][y] : lat_mem[src][z][s - 1];
      nb[DIR_YP]  = (y == SY - 1) ? halo[src][HYP][z][x] : lat_mem[src][z][s + SX];
      nb[DIR_YM]  = (y == 0)      ? halo[src][HYM][z][x] : lat_mem[src][z][s - SX];
      nb[DIR_ZP]  = lat_mem[src][zp1][s];
      nb[DIR_ZM]  = lat_mem[src][zm1][s];
      jj          = j_mem[z][s];
      dem         = d_mem[z][s];
    end

    demon_engine #(.DW(DEMON_W)) u_dm (
      .spin(old_spin[e]), .demon(dem), .nb_spin(nb), .coup(jj),
      .demon_max(dmax), .spin_new(s_dm), .demon_new(dem_o), .flipped()
    );

    sr_rng #(.SEED(SEED_BASE + 32'(e) * 32'h9E37_79B9)) u_rng (
      .clk, .rst_n, .en(rng_en), .rnd
    );

    hb_engine u_hb (.nb_spin(nb), .coup(jj), .rnd, .prob, .spin_new(s_hb));

    always_comb begin
      new_spin[e] = (alg == ALG_DEMON) ? s_dm : s_hb;
      new_dem[e]  = (alg == ALG_DEMON) ? dem_o : dem;
      eng_flip[e] = new_spin[e] ^ old_spin[e];
    end
  end

  logic [$clog2(NE+1)-1:0] nflip;
  always_comb begin
    nflip = '0;
    for (int e = 0; e < NE; e++) nflip += ($clog2(NE+1))'(eng_flip[e]);
  end

  // ----------------------------------------------------------- host access
  logic        acc;
  logic        is_reg;
  logic [ZW-1:0] hz;
  logic [SW-1:0] hs;
  msg_t        resp;

  assign in_ready = !out_valid;   // one request in flight; no path from out_ready
  assign acc      = in_valid && in_ready;
  assign is_reg   = in_msg.addr[15];
  always_comb begin
    hz = ZW'(32'(in_msg.addr[14:0]) / NS);
    hs = SW'(32'(in_msg.addr[14:0]) % NS);
  end

  always_comb begin
    resp      = '{op: OP_RESP, addr: in_msg.addr, data: '0};
    if (!is_reg) begin
      resp.data[SITE_W-1:0] = {d_mem[hz][hs], j_mem[hz][hs],
                               lat_mem[1][hz][hs], lat_mem[0][hz][hs]};
    end else begin
      unique case (in_msg.addr)
        REG_ALG:    resp.data = 32'(alg);
        REG_DMAX:   resp.data = 32'(dmax);
        REG_STATUS: resp.data = {busy, 15'd0, sweeps_done};
        default:
          if (in_msg.addr >= REG_LUT0 && in_msg.addr < REG_LUT0 + 16'd7)
            resp.data = prob[3'(in_msg.addr - REG_LUT0)];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_dest  <= '0;
      out_msg   <= '{op: OP_NOP, addr: '0, data: '0};
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (acc && in_msg.op == OP_READ) begin
        out_valid <= 1'b1;
        out_dest  <= in_src;
        out_msg   <= resp;
      end
    end
  end

  // Site storage: host writes while idle, engine write-back while sweeping.
  always_ff @(posedge clk) begin
    if (acc && in_msg.op == OP_WRITE && !is_reg && st == S_IDLE) begin
      lat_mem[0][hz][hs] <= in_msg.data[0];
      lat_mem[1][hz][hs] <= in_msg.data[1];
      j_mem[hz][hs]      <= in_msg.data[2 +: NNB];
      d_mem[hz][hs]      <= in_msg.data[2 + NNB +: DEMON_W];
    end else if (st == S_SWEEP) begin
      for (int e = 0; e < NE; e++) begin
        lat_mem[tgt][z][site[e]] <= new_spin[e];
        d_mem[z][site[e]]        <= new_dem[e];
      end
    end
  end

  // ----------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alg         <= ALG_DEMON;
      dmax        <= '1;
      for (int k = 0; k < 7; k++) prob[k] <= 32'h8000_0000;
      st          <= S_IDLE;
      tgt         <= 1'b0;
      z           <= '0;
      c           <= '0;
      sweeps_left <= '0;
      sweeps_done <= '0;
      send_pend   <= 1'b0;
      send_lat    <= 1'b0;
      send_z      <= '0;
      flip_cnt    <= '0;
      wait_cnt    <= '0;
    end else begin
      send_pend <= 1'b0;
      if (acc && in_msg.op == OP_WRITE && is_reg && st == S_IDLE) begin
        if (in_msg.addr == REG_ALG)  alg  <= alg_e'(in_msg.data[0]);
        if (in_msg.addr == REG_DMAX) dmax <= in_msg.data[DEMON_W-1:0];
        if (in_msg.addr >= REG_LUT0 && in_msg.addr < REG_LUT0 + 16'd7)
          prob[3'(in_msg.addr - REG_LUT0)] <= in_msg.data;
        if (in_msg.addr == REG_RUN && in_msg.data[15:0] != 16'd0) begin
          sweeps_left <= in_msg.data[15:0];
          sweeps_done <= '0;
          st          <= S_PRE;
          z           <= '0;
        end
      end
      unique case (st)
        S_IDLE: ;
        S_PRE: begin
          send_pend <= 1'b1;
          send_lat  <= 1'b1;
          send_z    <= z;
          if (last_plane) begin
            z   <= '0;
            tgt <= 1'b0;
            st  <= S_WAIT;
          end else begin
            z <= z + 1'b1;
          end
        end
        S_WAIT: begin
          if (halos_ready) begin
            st <= S_SWEEP;
            z  <= '0;
            c  <= '0;
          end else begin
            wait_cnt <= wait_cnt + 32'd1;
          end
        end
        S_SWEEP: begin
          flip_cnt <= flip_cnt + 32'(nflip);
          if (last_chunk) begin
            c <= '0;
            if (!(tgt && sweeps_left == 16'd1)) begin
              send_pend <= 1'b1;
              send_lat  <= tgt;
              send_z    <= z;
            end
            if (last_plane) begin
              z <= '0;
              if (!tgt) begin
                tgt <= 1'b1;
                st  <= S_WAIT;
              end else begin
                sweeps_done <= sweeps_done + 16'd1;
                sweeps_left <= sweeps_left - 16'd1;
                tgt         <= 1'b0;
                st          <= (sweeps_left == 16'd1) ? S_IDLE : S_WAIT;
              end
            end else begin
              z <= z + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
      endcase
    end
  end

  // ----------------------------------------------------------- halo links
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hout_valid <= '0;
      hout_lat   <= '0;
      hout_data  <= '0;
    end else begin
      hout_valid <= {4{send_pend}};
      hout_lat   <= {4{send_lat}};
      hout_data  <= '0;
      for (int y = 0; y < SY; y++) begin
        hout_data[HXP][y] <= lat_mem[send_lat][send_z][y * SX + SX - 1];
        hout_data[HXM][y] <= lat_mem[send_lat][send_z][y * SX];
      end
      for (int x = 0; x < SX; x++) begin
        hout_data[HYP][x] <= lat_mem[send_lat][send_z][(SY - 1) * SX + x];
        hout_data[HYM][x] <= lat_mem[send_lat][send_z][x];
      end
    end
  end

  // Halo buffers are filled in plane order; a counter per lattice and
  // direction is the write index and, when it reaches SZ, the barrier.
  always_ff @(posedge clk) begin
    for (int d = 0; d < 4; d++)
      if (hin_valid[d])
        halo[hin_lat[d]][d][ZW'(rx_cnt[hin_lat[d]][d])] <= hin_data[d];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 2; l++)
        for (int d = 0; d < 4; d++) rx_cnt[l][d] <= '0;
    end else begin
      for (int d = 0; d < 4; d++)
        if (hin_valid[d]) rx_cnt[hin_lat[d]][d] <= rx_cnt[hin_lat[d]][d] + 1'b1;
      if (st == S_WAIT && halos_ready)
        for (int d = 0; d < 4; d++) rx_cnt[src][d] <= '0;
    end
  end

  // ----------------------------------------------------------- checks
  initial begin
    assert (NS % NE == 0) else $error("NE must divide SX*SY");
    assert (N <= 32768) else $error("sites must fit 15 address bits");
  end

  for (genvar d = 0; d < 4; d++) begin : g_chk
    // A neighbour may never deliver more than one half sweep of halo
    // planes ahead of this SP.
    assert property (@(posedge clk) disable iff (!rst_n)
                     hin_valid[d] |-> 32'(rx_cnt[hin_lat[d]][d]) < SZ)
      else $error("halo overflow on link %0d", d);
  end

endmodule
