// demon_engine: one demon (microcanonical) spin update, purely combinational.
//
// The spin sigma sees the local field h = sum_k J_k s_k over its six
// neighbours. Flipping it changes the energy U = -sum sigma_i J_ij sigma_j by
// dE = 2*sigma*h, a multiple of 4 between -12 and +12. The demon energy is
// kept in units of 4, so dE/4 = sigma*(a-3) where a counts the terms J_k s_k
// equal to +1. If the flip lowers or keeps the energy, the demon absorbs -dE
// and the spin flips; otherwise the spin flips only if the demon can pay dE.
// The demon never goes below zero and never above demon_max: a flip that
// would push it past demon_max is refused.
//
// The update rule, the lower bound of zero and the existence of an upper
// limit follow the paper. The units-of-4 storage, the width DEMON_W and the
// choice that dE = 0 always flips are this design's own.
//
// Interface: spin, demon, six neighbour spins and six couplings in; new spin
// and new demon out, in the same cycle (no registers).
module demon_engine
  import ianus_pkg::*;
#(
  parameter int unsigned DW = DEMON_W
) (
  input  logic           spin,
  input  logic [DW-1:0]  demon,
  input  logic [NNB-1:0] nb_spin,
  input  logic [NNB-1:0] coup,
  input  logic [DW-1:0]  demon_max,
  output logic           spin_new,
  output logic [DW-1:0]  demon_new,
  output logic           flipped
);

  logic [2:0]    agree;
  logic [2:0]    cost;      // |dE|/4, 0..3
  logic          gain;      // flip lowers the energy (dE < 0)
  logic [DW:0]   dem_plus;

  always_comb begin
    agree = count_agree(nb_spin, coup);
    // sigma*(a-3): for sigma=+1 the cost is a-3, for sigma=-1 it is 3-a.
    if (spin) begin
      gain = (agree < 3'd3);
      cost = gain ? 3'd3 - agree : agree - 3'd3;
    end else begin
      gain = (agree > 3'd3);
      cost = gain ? agree - 3'd3 : 3'd3 - agree;
    end
    dem_plus  = {1'b0, demon} + (DW+1)'(cost);
    spin_new  = spin;
    demon_new = demon;
    flipped   = 1'b0;
    if (gain) begin
      if (dem_plus <= {1'b0, demon_max}) begin
        spin_new  = ~spin;
        demon_new = dem_plus[DW-1:0];
        flipped   = 1'b1;
      end
    end else if ({1'b0, demon} >= (DW+1)'(cost)) begin
      spin_new  = ~spin;
      demon_new = demon - DW'(cost);
      flipped   = 1'b1;
    end
  end

endmodule
