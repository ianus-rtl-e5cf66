// ianus_ref_pkg: software reference of the P/Q spin-glass update, used by
// the testbenches to predict what the hardware must produce.
//
// A lattice object holds the two replicas in P/Q form on an lx x ly x lz
// periodic lattice, one coupling per bond (stored as the six bond signs of
// every site, consistent between the two ends of a bond) and one demon per
// site. half_sweep() updates every site of P or of Q from the other lattice,
// either with the demon rule (energies computed from U = -sum s J s, the
// demon counting 4 energy units per step and bounded by [0, dmax]) or with
// the zero-temperature heat-bath rule (spin follows the sign of the local
// field, -1 when the field is zero). hb_site() applies the finite-temperature
// heat-bath rule to one site with a given random word; srgen models one
// shift-register generator.
package ianus_ref_pkg;

  // Shift-register generator I(k) = I(k-24) + I(k-55), R = I(k) ^ I(k-61),
  // started from 64 xorshift32 words of the seed.
  class srgen;
    logic [31:0] h [$];
    function new(logic [31:0] seed);
      logic [31:0] x;
      x = (seed == 0) ? 32'h9E37_79B9 : seed;
      for (int k = 0; k < 64; k++) begin
        x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
        h.push_back(x);
      end
    endfunction
    function logic [31:0] step();
      logic [31:0] n, r;
      n = h[h.size() - 24] + h[h.size() - 55];
      r = n ^ h[h.size() - 61];
      h.push_back(n);
      void'(h.pop_front());
      return r;
    endfunction
  endclass

  class lattice;
    int lx, ly, lz;
    bit p[], q[];
    bit [5:0] j[];
    int dem[];
    int dmax = 15;
    int n_flip = 0, n_capped = 0, n_paid = 0, n_refused = 0;

    function new(int lx_, int ly_, int lz_);
      lx = lx_; ly = ly_; lz = lz_;
      p = new[lx * ly * lz];
      q = new[lx * ly * lz];
      j = new[lx * ly * lz];
      dem = new[lx * ly * lz];
    endfunction

    function int idx(int x, int y, int z);
      x = (x + lx) % lx; y = (y + ly) % ly; z = (z + lz) % lz;
      return (z * ly + y) * lx + x;
    endfunction

    // Random spins and demons; one random coupling per bond, written at
    // both ends (direction k at a site equals direction k^1 at the
    // neighbour).
    function void fill_random(int max_dem);
      for (int z = 0; z < lz; z++)
        for (int y = 0; y < ly; y++)
          for (int x = 0; x < lx; x++) begin
            int i;
            i = idx(x, y, z);
            p[i] = 1'($urandom); q[i] = 1'($urandom);
            dem[i] = $urandom % (max_dem + 1);
          end
      for (int z = 0; z < lz; z++)
        for (int y = 0; y < ly; y++)
          for (int x = 0; x < lx; x++) begin
            bit bx, by, bz;
            bx = 1'($urandom); by = 1'($urandom); bz = 1'($urandom);
            j[idx(x, y, z)][0] = bx; j[idx(x + 1, y, z)][1] = bx;
            j[idx(x, y, z)][2] = by; j[idx(x, y + 1, z)][3] = by;
            j[idx(x, y, z)][4] = bz; j[idx(x, y, z + 1)][5] = bz;
          end
    endfunction

    function int field(bit src_q, int x, int y, int z);
      int nbr [6];
      int h;
      nbr[0] = idx(x + 1, y, z); nbr[1] = idx(x - 1, y, z);
      nbr[2] = idx(x, y + 1, z); nbr[3] = idx(x, y - 1, z);
      nbr[4] = idx(x, y, z + 1); nbr[5] = idx(x, y, z - 1);
      h = 0;
      for (int k = 0; k < 6; k++) begin
        bit s;
        s = src_q ? q[nbr[k]] : p[nbr[k]];
        h += (s ? 1 : -1) * (j[idx(x, y, z)][k] ? 1 : -1);
      end
      return h;
    endfunction

    function void half_sweep(bit tgt_q, bit heatbath);
      bit nt[];
      nt = new[lx * ly * lz];
      for (int z = 0; z < lz; z++)
        for (int y = 0; y < ly; y++)
          for (int x = 0; x < lx; x++) begin
            int i, h, sg, de;
            bit s;
            i = idx(x, y, z);
            s = tgt_q ? q[i] : p[i];
            h = field(!tgt_q, x, y, z);
            nt[i] = s;
            if (heatbath) nt[i] = (h > 0);
            else begin
              sg = s ? 1 : -1;
              de = 2 * sg * h;
              if (de == 0) nt[i] = !s;
              else if (de < 0) begin
                if (4 * dem[i] - de <= 4 * dmax) begin
                  nt[i] = !s; dem[i] -= de / 4;
                end else n_capped++;
              end else if (4 * dem[i] >= de) begin
                nt[i] = !s; dem[i] -= de / 4; n_paid++;
              end else n_refused++;
            end
            if (nt[i] != s) n_flip++;
          end
      if (tgt_q) q = nt; else p = nt;
    endfunction

    // Heat-bath update of one site with a given random word and table.
    function void hb_site(bit tgt_q, int x, int y, int z, logic [31:0] rnd,
                          logic [31:0] prob [7]);
      int i, a;
      bit ns;
      i = idx(x, y, z);
      a = (field(!tgt_q, x, y, z) + 6) / 2;
      ns = (rnd < prob[a]);
      if (ns != (tgt_q ? q[i] : p[i])) n_flip++;
      if (tgt_q) q[i] = ns; else p[i] = ns;
    endfunction

    // Site word as the hardware stores it: {demon, J[5:0], Q, P}.
    function logic [31:0] site_word(int i);
      return {20'd0, 4'(dem[i]), j[i], q[i], p[i]};
    endfunction
  endclass

endpackage
