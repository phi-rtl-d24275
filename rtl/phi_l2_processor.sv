// phi_l2_processor: processes Level-2 element sparsity one pack per cycle.
// (1) A pack is taken from the pack buffer into the input register. (2) In the next cycle
// the weight tile of the pack's partition is read, (3) the pack's row IDs address the
// partial-sum buffer (each row in its own bank, row mod 4), (4) the dispatcher prepares
// the 8 channels, (5, 6) the reconfigurable adder tree sums each row's channels, and
// (7) the crossbar writes each row's sum back to its bank. Reading and writing happen in
// the same cycle, so consecutive packs may touch the same row without a hazard.
// Interface: valid/ready pack input (always ready), weight-tile read port, four-bank
// partial-sum read/write ports. Timing: one pack per cycle, two cycles from pack to write.
// The seven steps follow the paper's Figure 5; the single-cycle execute stage is this
// design's choice.
module phi_l2_processor
  import phi_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pack_t                in_pack,
  output logic [PART_W-1:0]    w_part,
  input  wvec_t [K_TILE-1:0]   w_tile,
  output logic [ROW_W-1:0]     ps_raddr [PSUM_BANKS],
  input  pvec_t                ps_rdata [PSUM_BANKS],
  output logic [PSUM_BANKS-1:0] ps_we,
  output logic [ROW_W-1:0]     ps_waddr [PSUM_BANKS],
  output pvec_t                ps_wdata [PSUM_BANKS],
  output logic                 busy,
  output logic [31:0]          packs_done
);
  logic  p_valid;
  pack_t p;
  pvec_t slot_ps [PSUM_BANKS];
  pvec_t chan    [UNITS];
  pvec_t sums    [PSUM_BANKS];

  assign in_ready = 1'b1;
  assign busy     = p_valid;
  assign w_part   = p.part;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid    <= 1'b0;
      p          <= '0;
      packs_done <= '0;
    end else begin
      p_valid <= in_valid;
      if (in_valid) p <= in_pack;
      if (p_valid) packs_done <= packs_done + 1;
    end
  end

  // Read side: bank b serves the row slot whose row ID falls in bank b.
  always_comb begin
    for (int b = 0; b < PSUM_BANKS; b++) ps_raddr[b] = ROW_W'(b);
    for (int s = 0; s < PSUM_BANKS; s++)
      if (s < int'(p.n_rows)) ps_raddr[p.row_id[s][1:0]] = p.row_id[s];
    for (int s = 0; s < PSUM_BANKS; s++) slot_ps[s] = ps_rdata[p.row_id[s][1:0]];
  end

  phi_dispatcher u_disp (.units(p.u), .wtile(w_tile), .psum(slot_ps), .chan(chan));

  phi_reconfig_adder_tree u_tree (.in_data(chan), .cnt(p.row_units), .n_rows(p.n_rows),
                                  .out_data(sums));

  // Write crossbar: row slot s -> bank row_id[s] mod 4.
  always_comb begin
    ps_we = '0;
    for (int b = 0; b < PSUM_BANKS; b++) begin
      ps_waddr[b] = ROW_W'(b);
      ps_wdata[b] = '0;
    end
    for (int s = 0; s < PSUM_BANKS; s++) begin
      if (p_valid && s < int'(p.n_rows)) begin
        ps_we[p.row_id[s][1:0]]    = 1'b1;
        ps_waddr[p.row_id[s][1:0]] = p.row_id[s];
        ps_wdata[p.row_id[s][1:0]] = sums[s];
      end
    end
  end
endmodule
