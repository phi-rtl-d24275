// phi_pack_buffer: the Level-2 pack buffer, a FIFO of packs between the packer and the
// L2 processor. Its default capacity is the paper's 4 KB divided by the pack size
// (106 bits here, so 309 packs). Interface: valid/ready on both sides, first-word
// fall-through output; 'count' is the fill level. Timing: a written pack can be read the
// next cycle; one write and one read per cycle.
module phi_pack_buffer
  import phi_pkg::*;
#(
  parameter int BYTES = 4096,
  parameter int DEPTH = (BYTES * 8) / $bits(pack_t)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  pack_t in_pack,
  output logic  out_valid,
  input  logic  out_ready,
  output pack_t out_pack,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  pack_t          mem [DEPTH];
  logic [AW-1:0]  wp, rp;

  assign in_ready  = count != ($clog2(DEPTH+1))'(DEPTH);
  assign out_valid = count != '0;
  assign out_pack  = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp] <= in_pack;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (in_valid && in_ready) wp <= inc(wp);
      if (out_valid && out_ready) rp <= inc(rp);
      count <= count + ($bits(count))'(in_valid && in_ready)
                     - ($bits(count))'(out_valid && out_ready);
    end
  end
endmodule
