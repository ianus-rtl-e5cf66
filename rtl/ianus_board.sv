// ianus_board: one Ianus board, 16 simulation processors and an IOP.
//
// A GX x GY array of simulation processors (SPs) holds a spin-glass lattice
// of (GX*SX) x (GY*SY) x SZ sites. SP (i,j), numbered j*GX+i, owns the
// sites with x in [i*SX, (i+1)*SX) and y in [j*SY, (j+1)*SY), along the
// whole z extent. Nearest-neighbour halo links join each SP to its four
// neighbours. They wrap around at the edges of the array, so the board's
// lattice has periodic boundaries in all three directions without help from
// the host. The Input/Output Processor (IOP) is a crossbar with one port per
// SP and one more, number GX*GY, for the host.
//
// Operation: the host writes the couplings, spins and demons site by site
// into every SP. It sets the algorithm, the demon limit or the heat-bath
// table, then writes RUN with a sweep count to each SP. The SPs start as the
// RUN message reaches them and then pace each other through the halo links.
// The host polls STATUS until no SP is busy and reads the sites back.
//
// The 4x4 array, the periodic boundaries in hardware, the 17th FPGA acting
// as crossbar and host interface, and the 16x16x64 piece per SP (a 64^3
// lattice per board) follow the paper. The halo link format and the
// numbering of SPs are this design's own. The IOP's links to other boards
// are not built; the host side of the IOP is brought out as ports.
module ianus_board
  import ianus_pkg::*;
#(
  parameter int unsigned GX = 4,
  parameter int unsigned GY = 4,
  parameter int unsigned SX = 16,
  parameter int unsigned SY = 16,
  parameter int unsigned SZ = 64,
  parameter int unsigned NE = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // Host port of the IOP
  input  logic        host_in_valid,
  input  logic [4:0]  host_in_dest,
  input  msg_t        host_in_msg,
  output logic        host_in_ready,
  output logic        host_out_valid,
  output logic [4:0]  host_out_src,
  output msg_t        host_out_msg,
  input  logic        host_out_ready,
  // Per-SP status
  output logic [GX*GY-1:0] sp_busy,
  output logic [31:0]      sp_flips [GX*GY],
  output logic [31:0]      sp_waits [GX*GY]
);

  localparam int unsigned NSP  = GX * GY;
  localparam int unsigned NP   = NSP + 1;
  localparam int unsigned HOST = NSP;
  localparam int unsigned LW   = (SX > SY) ? SX : SY;

  // crossbar ports
  logic [NP-1:0] x_in_valid, x_in_ready, x_out_valid, x_out_ready;
  logic [4:0]    x_in_dest [NP];
  logic [4:0]    x_out_src [NP];
  msg_t          x_in_msg  [NP];
  msg_t          x_out_msg [NP];

  // halo links
  logic [3:0]          h_valid [NSP];
  logic [3:0]          h_lat   [NSP];
  logic [3:0][LW-1:0]  h_data  [NSP];
  logic [3:0]          r_valid [NSP];
  logic [3:0]          r_lat   [NSP];
  logic [3:0][LW-1:0]  r_data  [NSP];

  iop_crossbar #(.NP(NP), .ID_W(5)) u_iop (
    .clk, .rst_n,
    .in_valid(x_in_valid), .in_dest(x_in_dest), .in_msg(x_in_msg),
    .in_ready(x_in_ready),
    .out_valid(x_out_valid), .out_src(x_out_src), .out_msg(x_out_msg),
    .out_ready(x_out_ready)
  );

  assign x_in_valid[HOST]  = host_in_valid;
  assign x_in_dest[HOST]   = host_in_dest;
  assign x_in_msg[HOST]    = host_in_msg;
  assign host_in_ready     = x_in_ready[HOST];
  assign host_out_valid    = x_out_valid[HOST];
  assign host_out_src      = x_out_src[HOST];
  assign host_out_msg      = x_out_msg[HOST];
  assign x_out_ready[HOST] = host_out_ready;

  for (genvar j = 0; j < GY; j++) begin : g_row
    for (genvar i = 0; i < GX; i++) begin : g_col
      localparam int unsigned ME  = j * GX + i;
      localparam int unsigned EXP = j * GX + (i + 1) % GX;
      localparam int unsigned EXM = j * GX + (i + GX - 1) % GX;
      localparam int unsigned EYP = ((j + 1) % GY) * GX + i;
      localparam int unsigned EYM = ((j + GY - 1) % GY) * GX + i;

      // Each SP hears from a neighbour what that neighbour sent towards it.
      assign r_valid[ME] = {h_valid[EYM][2], h_valid[EYP][3],
                            h_valid[EXM][0], h_valid[EXP][1]};
      assign r_lat[ME]   = {h_lat[EYM][2], h_lat[EYP][3],
                            h_lat[EXM][0], h_lat[EXP][1]};
      assign r_data[ME]  = {h_data[EYM][2], h_data[EYP][3],
                            h_data[EXM][0], h_data[EXP][1]};

      sim_processor #(
        .SX(SX), .SY(SY), .SZ(SZ), .NE(NE), .ID_W(5),
        .SEED_BASE(32'h2545_F491 + 32'(ME) * 32'h6C07_8965)
      ) u_sp (
        .clk, .rst_n,
        .in_valid(x_out_valid[ME]), .in_src(x_out_src[ME]),
        .in_msg(x_out_msg[ME]), .in_ready(x_out_ready[ME]),
        .out_valid(x_in_valid[ME]), .out_dest(x_in_dest[ME]),
        .out_msg(x_in_msg[ME]), .out_ready(x_in_ready[ME]),
        .hout_valid(h_valid[ME]), .hout_lat(h_lat[ME]), .hout_data(h_data[ME]),
        .hin_valid(r_valid[ME]), .hin_lat(r_lat[ME]), .hin_data(r_data[ME]),
        .busy(sp_busy[ME]), .sweeps_done(),
        .flip_cnt(sp_flips[ME]), .wait_cnt(sp_waits[ME])
      );
    end
  end

endmodule
