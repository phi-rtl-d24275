// phi_reconfig_adder_tree: 8-input, 32-lane SIMD adder tree whose inputs are split into
// up to four consecutive groups, one per row of the pack; 'cnt[s]' gives the number of
// inputs of group s (the pack's units-per-row metadata) and 'n_rows' the number of
// groups. Output s is the lane-wise sum of group s. The paper builds this from a
// conventional 7-node tree plus four extra links; it does not list those links, so this
// implementation computes each group's sum as a masked sum over the 8 channels, which gives
// the same results. Combinational.
module phi_reconfig_adder_tree
  import phi_pkg::*;
(
  input  pvec_t                     in_data [UNITS],
  input  logic [PSUM_BANKS-1:0][3:0] cnt,
  input  logic [2:0]                n_rows,
  output pvec_t                     out_data [PSUM_BANKS]
);
  logic [3:0] start [PSUM_BANKS];
  ps_t        acc;
  always_comb begin
    start[0] = '0;
    for (int s = 1; s < PSUM_BANKS; s++) start[s] = start[s-1] + cnt[s-1];
    for (int s = 0; s < PSUM_BANKS; s++) begin
      for (int l = 0; l < N_LANES; l++) begin
        acc = '0;
        for (int c = 0; c < UNITS; c++)
          if (s < int'(n_rows) && 4'(c) >= start[s] && 4'(c) < start[s] + cnt[s])
            acc = acc + in_data[c][l];
        out_data[s][l] = acc;
      end
    end
  end
endmodule
