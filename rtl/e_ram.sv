// e_ram: per-crystal correction parameter memory (E_RAM), 64 x 32 bit.
//
// Word i holds the pair (n, b) of crystal i, n in bits 31:16 and b in bits
// 15:0. The host writes it through the wr_* port after calibration with two
// or more sources. Two read ports serve the two crystals of an inter-crystal
// scatter event in the same cycle; a single-crystal event uses port 0 only.
// Size and contents follow the paper; the second read port, the write port
// and the bit order are this design's choices.
//
// Timing: read data appears one clock after the address (registered read).
// A write becomes visible to reads issued on the following cycle. The memory
// is cleared at power-up.
module e_ram
  import pet_pkg::*;
#(
  parameter int unsigned DEPTH = NCRYSTAL
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  corr_param_t              wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr0,
  input  logic [$clog2(DEPTH)-1:0] rd_addr1,
  output corr_param_t              rd_data0,
  output corr_param_t              rd_data1
);
  corr_param_t mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data0 <= mem[rd_addr0];
    rd_data1 <= mem[rd_addr1];
  end
endmodule
