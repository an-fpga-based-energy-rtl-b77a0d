// l_rom: logarithm look-up table (L_ROM), 4096 x 14 bit.
//
// Entry x holds round(2^12 * ln(x)). The full value needs 16 bits for x up
// to 4095, so only its low 14 bits are kept: the correction datapath uses the
// table only through the difference ln(n) - ln(n - b*k) of two entries, and
// that difference stays below 2^14 (ratio n/(n-b*k) below e^4 = 54.6), so a
// 14-bit wrap-around subtraction recovers it exactly. Depth and width follow
// the paper; keeping the low bits is this design's reading of "4096 x 14 bits
// to record 2^12 x ln(x)". Entry 0 holds 0 and is never used for a valid
// result. The contents are computed at elaboration by pet_pkg::ln_entry.
//
// Interface: addr in, data out one clock later (registered output, as a
// block RAM read).
module l_rom
  import pet_pkg::*;
#(
  parameter int unsigned AW = TAB_AW,
  parameter int unsigned DW = LROM_W
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output logic [DW-1:0] data
);
  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int unsigned i = 0; i < 2**AW; i++) mem[i] = DW'(ln_entry(i));
  end

  always_ff @(posedge clk) data <= mem[addr];
endmodule
