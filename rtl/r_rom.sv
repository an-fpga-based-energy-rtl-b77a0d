// r_rom: reciprocal look-up table (R_ROM), 4096 x 20 bit.
//
// Entry x holds floor(2^20 / x); entries 0 and 1 saturate to 2^20 - 1. Depth,
// width and scale follow the paper; the floor rounding and the saturation
// are this design's choices. Contents are computed at elaboration by
// pet_pkg::rc_entry.
//
// Interface: addr in, data out one clock later (registered output).
module r_rom
  import pet_pkg::*;
#(
  parameter int unsigned AW = TAB_AW,
  parameter int unsigned DW = RROM_W
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output logic [DW-1:0] data
);
  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int unsigned i = 0; i < 2**AW; i++) mem[i] = DW'(rc_entry(i));
  end

  always_ff @(posedge clk) data <= mem[addr];
endmodule
