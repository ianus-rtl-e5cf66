// hb_engine: one heat-bath spin update, purely combinational.
//
// The new spin is drawn with P(sigma=+1) = e^{h/kT} / (e^{h/kT} + e^{-h/kT}),
// h = sum_k J_k s_k. Since h = 2a-6, where a counts the terms J_k s_k equal
// to +1, the probability depends only on a (0..6). A seven-entry table, loaded
// by the host for the chosen temperature, holds P(a) scaled to 32 bits; the
// spin becomes +1 when a 32-bit random number is below the table entry. The
// old value of the spin is not used.
//
// The probability formula, the single random number and the single table
// access per update follow the paper; the 7-entry table indexed by a and the
// 32-bit comparison are this design's own choice. An entry of 2^32-1 gives
// +1 with probability 1 - 2^-32, which is the resolution of the comparison.
//
// Interface: neighbour spins, couplings, one random word and the table in;
// new spin out, in the same cycle.
module hb_engine
  import ianus_pkg::*;
(
  input  logic [NNB-1:0] nb_spin,
  input  logic [NNB-1:0] coup,
  input  logic [31:0]    rnd,
  input  logic [31:0]    prob [7],
  output logic           spin_new
);

  logic [2:0] agree;

  always_comb begin
    agree    = count_agree(nb_spin, coup);
    spin_new = (rnd < prob[agree]);
  end

endmodule
