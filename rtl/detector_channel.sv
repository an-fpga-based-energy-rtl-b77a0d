// detector_channel: the complete digital signal processor of one 8x8
// SiPM/LYSO detector module read out through the resistive multiplexer.
//
// Inputs are the 8 X and 8 Y discriminator (LED) pulses and the ADC samples
// of the summed module signal. Sixteen multi-phase TDCs measure the pulse
// widths in the 400 MHz phase-0 domain; their activity levels and done
// toggles are synchronised into the 100 MHz processing clock. The first
// activity of an event triggers the energy integration; the position
// decoder waits for the pulses to end and decides crystal position and ICS
// flag. A small join waits for both the decoder result and k, drops the
// event if the decoder rejected it, and hands it to the energy correction
// unit (E_RAM, non-ICS and ICS pipelines), while the crystal index goes
// directly to the packager, which emits one packet per corrected event.
//
// The chain TDC -> position decoder -> E_RAM index, energy integration ->
// correction selected by the ICS flag -> package follows the paper's
// processor diagram. The synchronisers, the join and the trigger derived from
// TDC activity are this design's choices. Counters report rejected events
// (not decodable as one or two crystals) and dropped events (the trigger
// came while the energy integration window of the previous event was still
// open, so the event has no energy of its own).
//
// Clocks: clk_ph[7:0] 400 MHz phases, clk 100 MHz. The host writes
// correction parameters through wr_* in the clk domain.
module detector_channel
  import pet_pkg::*;
#(
  parameter logic [3:0]  MODULE_ID = 4'd0,
  parameter int unsigned ADCW      = 12
) (
  input  logic                  clk,
  input  logic [TDC_PHASES-1:0] clk_ph,
  input  logic                  rst_n,
  input  logic [NX-1:0]         led_x,
  input  logic [NY-1:0]         led_y,
  input  logic                  adc_valid,
  input  logic [ADCW-1:0]       adc_data,
  input  logic [ADCW-1:0]       baseline,
  input  logic                  wr_en,
  input  crystal_idx_t          wr_addr,
  input  corr_param_t           wr_data,
  output logic                  pkt_valid,
  output packet_t               pkt,
  output logic [15:0]           n_rejected,
  output logic [15:0]           n_dropped
);
  // ---- TDCs (400 MHz phase domain) ---------------------------------------
  logic [NX+NY-1:0] tdc_act, tdc_tgl;
  logic [WIDTHW-1:0] tdc_w [NX+NY];

  for (genvar i = 0; i < NX + NY; i++) begin : g_tdc
    tdc_channel u_tdc (
      .clk_ph(clk_ph), .rst_n(rst_n),
      .hit(i < NX ? led_x[i % NX] : led_y[(i - NX) % NY]),
      .active(tdc_act[i]), .width(tdc_w[i]), .done_tgl(tdc_tgl[i])
    );
  end

  // ---- into the 100 MHz domain ----------------------------------------------
  logic [NX+NY-1:0] act_s, tgl_s, tgl_d, done_s;
  logic             trigger;
  logic             pd_idle;

  sync_2ff #(.W(2*(NX+NY))) u_sync (
    .clk(clk), .rst_n(rst_n), .d({tdc_act, tdc_tgl}), .q({act_s, tgl_s})
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tgl_d <= '0;
    else        tgl_d <= tgl_s;
  end
  assign done_s = tgl_s ^ tgl_d;
  // an event starts when a TDC becomes active while the decoder is idle;
  // pulses that follow before the decoder has decided belong to that event
  assign trigger = (act_s != '0) && pd_idle;

  // ---- position decoder ------------------------------------------------------
  logic [WIDTHW-1:0] wx [NX];
  logic [WIDTHW-1:0] wy [NY];
  for (genvar i = 0; i < NX; i++) begin : g_wx
    assign wx[i] = tdc_w[i];
  end
  for (genvar i = 0; i < NY; i++) begin : g_wy
    assign wy[i] = tdc_w[NX + i];
  end

  logic      pd_valid, pd_reject;
  position_t pd_pos;

  position_decoder u_pos (
    .clk(clk), .rst_n(rst_n),
    .act_x(act_s[NX-1:0]), .act_y(act_s[NX+NY-1:NX]),
    .done_x(done_s[NX-1:0]), .done_y(done_s[NX+NY-1:NX]),
    .width_x(wx), .width_y(wy),
    .idle(pd_idle), .out_valid(pd_valid), .reject(pd_reject), .pos(pd_pos)
  );

  // ---- energy integration ------------------------------------------------------
  logic          k_valid, ei_busy;
  logic [KW-1:0] k;

  energy_integration #(.ADCW(ADCW)) u_eint (
    .clk(clk), .rst_n(rst_n), .adc_valid(adc_valid), .adc_data(adc_data),
    .baseline(baseline), .trigger(trigger), .busy(ei_busy),
    .k_valid(k_valid), .k(k)
  );

  // ---- join: position and k of the same event --------------------------------
  // An event whose trigger found the integration still busy with the previous
  // window has no energy of its own; its position is discarded (ev_nok).
  logic          ev_nok;
  logic          j_pos_ok, j_k_ok, j_rej;
  position_t     j_pos;
  logic [KW-1:0] j_k;
  logic          ec_ready, pk_ready, j_fire;

  assign j_fire = j_pos_ok && j_k_ok && !j_rej && ec_ready && pk_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_pos_ok   <= 1'b0;
      j_k_ok     <= 1'b0;
      j_rej      <= 1'b0;
      j_pos      <= '0;
      j_k        <= '0;
      n_rejected <= '0;
      n_dropped  <= '0;
      ev_nok     <= 1'b0;
    end else begin
      if (trigger) ev_nok <= ei_busy;
      if (j_fire || (j_pos_ok && j_k_ok && j_rej)) begin
        j_pos_ok <= 1'b0;
        j_k_ok   <= 1'b0;
        if (j_rej) n_rejected <= n_rejected + 1'b1;
      end
      if (pd_valid) begin
        if (ev_nok || (j_pos_ok && !(j_fire || (j_k_ok && j_rej)))) begin
          n_dropped <= n_dropped + 1'b1;
        end else begin
          j_pos_ok <= 1'b1;
          j_rej    <= pd_reject;
          j_pos    <= pd_pos;
        end
      end
      if (k_valid) begin
        if (j_k_ok && !(j_fire || (j_pos_ok && j_rej))) begin
          n_dropped <= n_dropped + 1'b1;
        end else begin
          j_k_ok <= 1'b1;
          j_k    <= k;
        end
      end
    end
  end

  // ---- energy correction and packaging ------------------------------------------
  logic          ec_valid, ec_sat, ec_ics;
  logic [EW-1:0] ec_e;
  crystal_idx_t  ec_idx;

  energy_correction u_ecorr (
    .clk(clk), .rst_n(rst_n),
    .in_valid(j_fire), .in_ready(ec_ready), .pos(j_pos), .k(j_k),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .out_valid(ec_valid), .energy(ec_e), .sat(ec_sat),
    .out_ics(ec_ics), .out_crystal(ec_idx)
  );

  packager #(.MODULE_ID(MODULE_ID)) u_pkg (
    .clk(clk), .rst_n(rst_n),
    .idx_valid(j_fire), .idx_ready(pk_ready), .idx_ics(j_pos.ics), .idx(j_pos.idx0),
    .e_valid(ec_valid), .energy(ec_e), .e_sat(ec_sat),
    .pkt_valid(pkt_valid), .pkt(pkt)
  );

  // the packager's stored index and the tag carried through the correction
  // pipelines must agree
  a_same_event: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid |-> (pkt.crystal == $past(ec_idx) && pkt.ics == $past(ec_ics)));
endmodule
