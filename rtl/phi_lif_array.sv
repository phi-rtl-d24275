// phi_lif_array: the spiking neuron array, 32 leaky integrate-and-fire (LIF) neurons.
// Each cycle one output row arrives as the L1 and L2 partial sums of its 32 lanes; their
// sum (the adder in front of the array) is the input current I. For every lane:
//   V' = V - (V >>> leak_shift) + I   (leak_shift = 0: no leak)
//   spike = (V' >= vth);  V <= spike ? 0 : V'
// The membrane potentials of all ROWS x 32 neurons of the tile are kept in an array inside
// this block between time steps; 'clear' zeroes them for a new input sample.
// Interface: in_valid/in_row/l1/l2 in, registered out_valid/out_row/out_spk.
// Timing: one row per cycle, latency 1. The paper names the LIF model and 32 neurons;
// the update equation, hard reset, widths and the membrane store are this design's choices.
module phi_lif_array
  import phi_pkg::*;
#(
  parameter int ROWS = M_ROWS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [3:0]          leak_shift,
  input  ps_t                 vth,
  input  logic                in_valid,
  input  logic [ROW_W-1:0]    in_row,
  input  pvec_t               l1,
  input  pvec_t               l2,
  output logic                out_valid,
  output logic [ROW_W-1:0]    out_row,
  output logic [N_LANES-1:0]  out_spk
);
  localparam int AW = (ROWS > 1) ? $clog2(ROWS) : 1;
  pvec_t vmem [ROWS];
  pvec_t vnew;
  logic [N_LANES-1:0] spk;

  always_comb begin
    for (int l = 0; l < N_LANES; l++) begin
      ps_t v;
      v       = vmem[AW'(in_row)][l];
      vnew[l] = v - ((leak_shift == 0) ? ps_t'(0) : (v >>> leak_shift)) + l1[l] + l2[l];
      spk[l]  = vnew[l] >= vth;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) vmem[r] <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      out_spk   <= '0;
    end else begin
      out_valid <= in_valid;
      if (clear) begin
        for (int r = 0; r < ROWS; r++) vmem[r] <= '0;
      end else if (in_valid) begin
        for (int l = 0; l < N_LANES; l++)
          vmem[AW'(in_row)][l] <= spk[l] ? ps_t'(0) : vnew[l];
        out_row <= in_row;
        out_spk <= spk;
      end
    end
  end
endmodule
