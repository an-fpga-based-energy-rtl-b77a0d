// pet_frontend_fpga: the front-end FPGA of the PET detector readout, holding
// NMOD independent detector-module processors (12 on one front-end board,
// 16 TDC channels each, 192 TDCs in all).
//
// Each module gets its 16 discriminator pulses and its own ADC sample stream
// and produces a stream of 32-bit event packets (crystal index, ICS flag,
// corrected energy). All modules share the 100 MHz processing clock, the
// eight 400 MHz TDC clock phases (from an on-chip clock generator that is not
// part of this RTL) and one host write port for the correction parameters,
// steered by wr_module. The packet streams are brought out one per module;
// the fibre link to the data acquisition is outside this design.
//
// Module count and TDC count follow the paper; the shared write port and
// per-module outputs are this design's choices.
module pet_frontend_fpga
  import pet_pkg::*;
#(
  parameter int unsigned NMOD = 12,
  parameter int unsigned ADCW = 12
) (
  input  logic                  clk,
  input  logic [TDC_PHASES-1:0] clk_ph,
  input  logic                  rst_n,
  input  logic [NX-1:0]         led_x     [NMOD],
  input  logic [NY-1:0]         led_y     [NMOD],
  input  logic                  adc_valid,
  input  logic [ADCW-1:0]       adc_data  [NMOD],
  input  logic [ADCW-1:0]       baseline,
  input  logic                  wr_en,
  input  logic [3:0]            wr_module,
  input  crystal_idx_t          wr_addr,
  input  corr_param_t           wr_data,
  output logic [NMOD-1:0]       pkt_valid,
  output packet_t               pkt        [NMOD],
  output logic [15:0]           n_rejected [NMOD],
  output logic [15:0]           n_dropped  [NMOD]
);
  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    detector_channel #(.MODULE_ID(4'(m)), .ADCW(ADCW)) u_chan (
      .clk(clk), .clk_ph(clk_ph), .rst_n(rst_n),
      .led_x(led_x[m]), .led_y(led_y[m]),
      .adc_valid(adc_valid), .adc_data(adc_data[m]), .baseline(baseline),
      .wr_en(wr_en && wr_module == 4'(m)), .wr_addr(wr_addr), .wr_data(wr_data),
      .pkt_valid(pkt_valid[m]), .pkt(pkt[m]),
      .n_rejected(n_rejected[m]), .n_dropped(n_dropped[m])
    );
  end
endmodule
