// ianus_pkg: types and constants shared by the Ianus spin-glass engine.
//
// Spins and couplings are single bits: 1 stands for +1 and 0 for -1, so the
// product J*s of a coupling and a neighbour spin is +1 exactly when the two
// bits are equal. Neighbour directions are numbered XP, XM, YP, YM, ZP, ZM.
// Host messages (IOP traffic) carry an opcode, a 16-bit address and 32 bits
// of data. The site word the host reads and writes packs everything stored
// for one lattice site. All encodings are this design's own choice; the
// paper gives the physics but no bit-level formats.
package ianus_pkg;

  // Number of neighbours of a site of the cubic lattice.
  localparam int unsigned NNB = 6;

  typedef enum logic [2:0] {
    DIR_XP = 3'd0,
    DIR_XM = 3'd1,
    DIR_YP = 3'd2,
    DIR_YM = 3'd3,
    DIR_ZP = 3'd4,
    DIR_ZM = 3'd5
  } dir_e;

  // Update algorithm currently loaded into a simulation processor.
  typedef enum logic {
    ALG_DEMON    = 1'b0,
    ALG_HEATBATH = 1'b1
  } alg_e;

  // Message opcodes on the IOP links.
  typedef enum logic [1:0] {
    OP_WRITE = 2'd0,
    OP_READ  = 2'd1,
    OP_RESP  = 2'd2,
    OP_NOP   = 2'd3
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [15:0] addr;
    logic [31:0] data;
  } msg_t;

  // Address map of a simulation processor. Addresses with bit 15 clear select
  // a lattice site; with bit 15 set they select a control register.
  localparam logic [15:0] REG_ALG    = 16'h8000; // algorithm (alg_e)
  localparam logic [15:0] REG_DMAX   = 16'h8001; // demon upper limit
  localparam logic [15:0] REG_LUT0   = 16'h8002; // heat-bath table, 7 words
  localparam logic [15:0] REG_RUN    = 16'h8010; // write: start N sweeps
  localparam logic [15:0] REG_STATUS = 16'h8011; // read: {busy, sweeps done}

  // Site word layout: {demon[3:0], J[5:0] (bit k = direction k), Q, P}.
  localparam int unsigned DEMON_W = 4;
  localparam int unsigned SITE_W  = 2 + NNB + DEMON_W;

  // Number of neighbours whose coupled spin agrees with the spin's +1 state,
  // i.e. how many of the six terms J_k*s_k equal +1.
  function automatic logic [2:0] count_agree(input logic [NNB-1:0] nb,
                                             input logic [NNB-1:0] j);
    logic [2:0] n;
    n = '0;
    for (int k = 0; k < NNB; k++) n += {2'b00, nb[k] ~^ j[k]};
    return n;
  endfunction

endpackage
