// phi_l1_processor: processes Level-1 vector sparsity for one group of 16 K partitions.
// For every row of the tile it reads the 16 pattern IDs of the group in one cycle.
// Nonzero IDs (pattern assigned) select the PWP of that pattern from the bank of its
// partition; a 16-to-8 crossbar routes up to 8 of them to an 8-channel, 32-lane adder
// tree, whose sum is added to the row's L1 partial sum. With more than 8 nonzero IDs
// the first 8 are taken in the first cycle and the rest in a second cycle; rows without
// any pattern still take one cycle (the simple zero skipping the paper describes).
// Interface: 'start' pulse with group and tile sizes; pattern-index read port, 16 PWP
// bank read ports, one L1 partial-sum read/write port; 'done' pulses at the end.
// Timing: 1 or 2 cycles per row. Structure and rates follow the paper.
module phi_l1_processor
  import phi_pkg::*;
#(
  parameter int NUM_P    = NUM_PAT,
  parameter int GROUPS   = 7,
  parameter int CHANNELS = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [$clog2(GROUPS)-1:0]          group,
  input  logic [ROW_W:0]                     num_rows,
  input  logic [PART_W:0]                    num_parts,
  output logic [ROW_W-1:0]                   pid_row,
  input  logic [K_TILE-1:0][PID_W-1:0]       pid_word,
  output logic [K_TILE-1:0][$clog2(NUM_P)-1:0] pwp_addr,
  input  wvec_t                              pwp_data [K_TILE],
  output logic [ROW_W-1:0]                   ps_addr,
  input  pvec_t                              ps_rdata,
  output logic                               ps_we,
  output pvec_t                              ps_wdata,
  output logic                               busy,
  output logic                               done,
  output logic [31:0]                        cycles,
  output logic [31:0]                        split_rows    // rows that needed 2 cycles
);
  localparam int PW = $clog2(NUM_P);
  logic             run, second;
  logic [ROW_W:0]   row;
  logic [PART_W:0]  part_base;
  logic [K_TILE-1:0] nz, first_mask, take;
  logic [3:0]       sel [CHANNELS];
  logic [CHANNELS-1:0] sel_v;
  logic             more;
  int unsigned      c;

  assign part_base = (PART_W+1)'(int'(group) * K_TILE);
  assign pid_row   = row[ROW_W-1:0];
  assign ps_addr   = row[ROW_W-1:0];
  assign busy      = run;

  always_comb begin
    for (int b = 0; b < K_TILE; b++) begin
      nz[b]       = pid_word[b] != '0 && (int'(part_base) + b) < int'(num_parts);
      pwp_addr[b] = PW'(pid_word[b] - 1'b1);
    end
    // first up-to-8 nonzero IDs of the row
    first_mask = '0;
    c = 0;
    for (int b = 0; b < K_TILE; b++)
      if (nz[b] && c < CHANNELS) begin
        first_mask[b] = 1'b1;
        c = c + 1;
      end
    take = second ? (nz & ~first_mask) : first_mask;
    more = !second && ((nz & ~first_mask) != '0);
    // 16-to-8 crossbar: channel k takes the k-th selected bank
    c = 0;
    sel_v = '0;
    for (int k = 0; k < CHANNELS; k++) sel[k] = '0;
    for (int b = 0; b < K_TILE; b++)
      if (take[b] && c < CHANNELS) begin
        sel[c]   = 4'(b);
        sel_v[c] = 1'b1;
        c = c + 1;
      end
    // adder tree plus partial-sum accumulation
    for (int l = 0; l < N_LANES; l++) begin
      ps_wdata[l] = ps_rdata[l];
      for (int k = 0; k < CHANNELS; k++)
        if (sel_v[k]) ps_wdata[l] = ps_wdata[l] + PSUM_W'(pwp_data[sel[k]][l]);
    end
  end

  assign ps_we = run && (take != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      second     <= 1'b0;
      row        <= '0;
      done       <= 1'b0;
      cycles     <= '0;
      split_rows <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run        <= 1'b1;
        second     <= 1'b0;
        row        <= '0;
        cycles     <= '0;
        split_rows <= '0;
      end else if (run) begin
        cycles <= cycles + 1;
        if (more) begin
          second     <= 1'b1;
          split_rows <= split_rows + 1;
        end else begin
          second <= 1'b0;
          row    <= row + 1'b1;
          if (row + 1'b1 == num_rows) begin
            run  <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
