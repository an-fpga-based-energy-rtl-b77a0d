// tdc_channel: multi-phase clock TDC measuring the width of one
// discriminator (LED) pulse.
//
// The asynchronous pulse is sampled by eight flip-flops clocked by eight
// phases of a 400 MHz clock (0, 45, ..., 315 degrees), so each 2.5 ns period
// yields an 8-bit thermometer-like word with a bin of 312.5 ps. The words
// are collected in the phase-0 domain: at every phase-0 edge the eight
// samples taken during the previous period are read together. While the
// pulse is present the number of ones in each word is added to the width;
// the first all-zero word after the pulse ends the measurement. The width is
// therefore the time over threshold in 312.5 ps bins, saturating at
// 2^WIDTHW - 1 (about 1.28 us for 12 bits).
//
// Clock rate, phase count and bin size follow the paper; the popcount
// accumulation, the 12-bit width and the toggle hand-off are this design's
// choices. (A placed design adds a second stage for the late phases so the
// 312.5 ps transfer from phase 7 to phase 0 is not on one path; it does not
// change the function.)
//
// Outputs, all in the clk_ph[0] domain: active (a pulse is being measured),
// width (held stable from the end of one pulse to the start of the next) and
// done_tgl, which toggles once per finished pulse so a slower clock domain
// can pick it up through a synchroniser.
module tdc_channel
  import pet_pkg::*;
#(
  parameter int unsigned PHASES = TDC_PHASES,
  parameter int unsigned WW     = WIDTHW
) (
  input  logic [PHASES-1:0] clk_ph,
  input  logic              rst_n,
  input  logic              hit,
  output logic              active,
  output logic [WW-1:0]     width,
  output logic              done_tgl
);
  logic [PHASES-1:0] samp;
  logic [PHASES-1:0] word;
  logic [WW:0]       acc_c;
  logic [$clog2(PHASES+1)-1:0] ones;

  for (genvar i = 0; i < PHASES; i++) begin : g_phase
    logic s;
    always_ff @(posedge clk_ph[i]) s <= hit;
    assign samp[i] = s;
  end

  always_comb begin
    ones = '0;
    for (int i = 0; i < PHASES; i++) ones += $bits(ones)'(word[i]);
    acc_c = (active ? {1'b0, width} : '0) + (WW+1)'(ones);
  end

  always_ff @(posedge clk_ph[0] or negedge rst_n) begin
    if (!rst_n) begin
      word     <= '0;
      active   <= 1'b0;
      width    <= '0;
      done_tgl <= 1'b0;
    end else begin
      word <= samp;
      if (word != '0) begin
        active <= 1'b1;
        width  <= acc_c[WW] ? '1 : acc_c[WW-1:0];
      end else if (active) begin
        active   <= 1'b0;
        done_tgl <= ~done_tgl;
      end
    end
  end
endmodule
