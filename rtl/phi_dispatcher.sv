// phi_dispatcher: the L2 processor's dispatcher, one channel per pack unit (8 channels).
// Each channel uses the unit's label to pick a weight row (W0..W15 of the current weight
// tile, chosen by the unit's column index) or a partial-sum row (Psum0..Psum3 of the
// pack's rows, chosen by the unit's partial-sum index), sign-extends it to the partial-sum
// width, and negates it when the unit's value is -1. This follows the paper's Figure 5.
// Purely combinational.
module phi_dispatcher
  import phi_pkg::*;
(
  input  unit_t [UNITS-1:0]      units,
  input  wvec_t [K_TILE-1:0]     wtile,
  input  pvec_t                  psum [PSUM_BANKS],   // by pack row slot
  output pvec_t                  chan [UNITS]
);
  ps_t v;
  always_comb begin
    for (int c = 0; c < UNITS; c++) begin
      for (int l = 0; l < N_LANES; l++) begin
        if (units[c].is_psum) v = psum[units[c].idx[1:0]][l];
        else                  v = PSUM_W'(wtile[units[c].idx][l]);
        chan[c][l] = units[c].neg ? -v : v;
      end
    end
  end
endmodule
