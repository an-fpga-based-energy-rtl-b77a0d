// tb_na22_spectrum: the laboratory measurement of one 8x8 module under a
// 22Na point source, replayed through detector_channel at its default sizes.
//
// Every crystal gets its own saturation parameters (n between 800 and 1600
// keV, 511 keV mapped to an ADC integral between 3500 and 4500 codes), which
// gives the gain dispersion that spreads the uncorrected spectrum. The
// behavioural detector then plays a stream of events:
//   * 511 keV photopeak events in one crystal, with a Gaussian energy
//     resolution of 9 % FWHM;
//   * the intrinsic LYSO lines at 202 and 307 keV, used for calibration;
//   * two-crystal scatter events that share 511 keV.
// Every packet is compared bit for bit with the reference model. The test
// builds the single-crystal spectrum before correction (the integral
// normalised linearly so that the mean photopeak sits at 511) and after it.
// It then checks three things. The corrected photopeak mean must lie within
// 5 keV of the mean deposit. At least 97 % of the photopeak events must fall
// in the 425-650 keV energy window. Each LYSO line must be corrected within
// 2 % + 3 keV. The window fraction before correction, the ICS energies and
// the spectrum are printed. The ICS energies are checked only against the
// model of the two-crystal formula as printed, which for these parameters
// gives about 0 keV, not the 511 keV peak of the measured ICS spectrum; the
// notes of ics_correction explain the difference.
module tb_na22_spectrum;
  import pet_pkg::*;
  import corr_model_pkg::*;

  localparam int NPEAK = 160, NLYSO = 30, NICS = 40;

  logic       clk = 0, rst_n = 0, adc_valid = 0;
  logic [7:0] clk_ph = '0;
  logic [7:0] led_x, led_y;
  logic [11:0] adc_data;
  logic       wr_en = 0;
  crystal_idx_t wr_addr = 0;
  corr_param_t  wr_data = 0;
  logic       pkt_valid;
  packet_t    pkt;
  logic [15:0] n_rejected, n_dropped;
  int checks = 0, failures = 0;
  corr_param_t prm [64];
  packet_t got [$];

  detector_channel dut (
    .clk(clk), .clk_ph(clk_ph), .rst_n(rst_n), .led_x(led_x), .led_y(led_y),
    .adc_valid(adc_valid), .adc_data(adc_data), .baseline(12'd200),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .pkt_valid(pkt_valid), .pkt(pkt), .n_rejected(n_rejected), .n_dropped(n_dropped));

  module_stim stim (.clk(clk), .adc_valid(adc_valid), .led_x(led_x), .led_y(led_y), .adc_data(adc_data));

  always #5 clk = ~clk;
  always @(posedge clk) adc_valid <= ~adc_valid;
  for (genvar i = 0; i < 8; i++) begin : g_ph
    initial begin #(i * 0.3125); forever #1.25 clk_ph[i] = ~clk_ph[i]; end
  end
  always @(posedge clk) if (pkt_valid) got.push_back(pkt);

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ktarget(int idx, real e);
    real n = real'(prm[idx].n), b = real'(prm[idx].b) / 65536.0;
    return n * (1.0 - $exp(-e / n)) / b;
  endfunction

  // approximately normal, mean 0, standard deviation 1 (sum of 12 uniforms)
  function automatic real gauss();
    real s = -6.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s;
  endfunction

  // waits for one packet and compares it with the model; returns its energy
  task automatic take_packet(int idx0, bit ics_f, corr_t r, output int e_out);
    automatic int t = 0;
    while (got.size() == 0 && t < 400) begin @(posedge clk); t++; end
    checks++;
    e_out = -1;
    if (got.size() == 0) begin failures++; $display("no packet"); return; end
    begin
      packet_t p = got.pop_front();
      checks++;
      if (p.crystal != 6'(idx0) || p.ics != ics_f || p.energy != 10'(r.e) || p.sat != r.sat) begin
        failures++;
        $display("packet %0d/%0d/%0d/%0d, expected %0d/%0d/%0d/%0d",
                 p.crystal, p.ics, p.energy, p.sat, idx0, ics_f, r.e, r.sat);
      end
      e_out = int'(p.energy);
    end
  endtask

  initial begin
    automatic int xs[3], ys[3], k, i0, i1, eo;
    automatic real e[3];
    automatic real kraw [NPEAK];
    automatic real edep_sum = 0.0, ecor_sum = 0.0, kraw_sum = 0.0, eraw;
    automatic int  in_win_cor = 0, in_win_raw = 0, ics_sum = 0, ics_sat = 0, rej0, drop0;
    automatic int  hist [32];
    foreach (hist[i]) hist[i] = 0;

    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      real n, b;
      n = 800.0 + real'($urandom % 800);
      b = n * (1.0 - $exp(-511.0 / n)) / real'(3500 + $urandom % 1000);
      prm[i].n = 16'(int'(n));
      prm[i].b = 16'(int'(b * 65536.0));
      @(negedge clk); wr_en = 1; wr_addr = 6'(i); wr_data = prm[i];
    end
    @(negedge clk); wr_en = 0;
    repeat (200) @(posedge clk);
    got.delete();                                   // anything left from power-up
    rej0 = int'(n_rejected); drop0 = int'(n_dropped);

    // photopeak
    for (int t = 0; t < NPEAK; t++) begin
      xs[0] = $urandom % 8; ys[0] = $urandom % 8; i0 = ys[0] * 8 + xs[0];
      e[0] = 511.0 + gauss() * (0.09 * 511.0 / 2.355);
      stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
      take_packet(i0, 0, non_ics(prm[i0].n, prm[i0].b, k), eo);
      kraw[t] = real'(k);
      kraw_sum += real'(k);
      edep_sum += e[0];
      ecor_sum += real'(eo);
      if (eo >= 425 && eo <= 650) in_win_cor++;
      if (eo >= 0) hist[eo / 32]++;
      repeat (60) @(posedge clk);
    end

    // intrinsic LYSO lines
    for (int t = 0; t < NLYSO; t++) begin
      xs[0] = $urandom % 8; ys[0] = $urandom % 8; i0 = ys[0] * 8 + xs[0];
      e[0] = (t % 2 == 1) ? 307.0 : 202.0;
      stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
      take_packet(i0, 0, non_ics(prm[i0].n, prm[i0].b, k), eo);
      checks++;
      if (real'(eo) > e[0] * 1.02 + 3.0 || real'(eo) < e[0] * 0.98 - 3.0) begin
        failures++; $display("LYSO line %f keV corrected to %0d keV", e[0], eo);
      end
      repeat (60) @(posedge clk);
    end

    // two-crystal scatter sharing 511 keV
    for (int t = 0; t < NICS; t++) begin
      xs[0] = $urandom % 8; ys[0] = $urandom % 8;
      do begin xs[1] = $urandom % 8; ys[1] = $urandom % 8; end
      while (xs[1] == xs[0] || ys[1] == ys[0]);
      e[0] = 266.0 + real'($urandom % 140); e[1] = 511.0 - e[0];
      i0 = ys[0] * 8 + xs[0]; i1 = ys[1] * 8 + xs[1];
      stim.fire(2, xs, ys, e, ktarget(i0, e[0]) + ktarget(i1, e[1]), k);
      take_packet(i0, 1, ics(prm[i0].n, prm[i0].b, prm[i1].b, k), eo);
      if (eo >= 0) ics_sum += eo;
      if (eo >= 1023) ics_sat++;
      repeat (60) @(posedge clk);
    end

    foreach (kraw[t]) begin
      eraw = kraw[t] * real'(NPEAK) * 511.0 / kraw_sum;
      if (eraw >= 425.0 && eraw <= 650.0) in_win_raw++;
    end
    $display("photopeak: mean deposit %0.1f keV, mean corrected %0.1f keV", edep_sum / NPEAK, ecor_sum / NPEAK);
    $display("energy window 425-650 keV: %0d of %0d before correction, %0d after",
             in_win_raw, NPEAK, in_win_cor);
    $display("ICS events: mean output %0.1f keV, %0d saturated, of %0d", real'(ics_sum) / NICS, ics_sat, NICS);
    for (int i = 8; i < 24; i++) $display("  %4d keV %0d", i * 32, hist[i]);
    checks++;
    if (ecor_sum / NPEAK > edep_sum / NPEAK + 5.0 || ecor_sum / NPEAK < edep_sum / NPEAK - 5.0) begin
      failures++; $display("corrected photopeak off");
    end
    checks++;
    if (in_win_cor * 100 < NPEAK * 97) begin failures++; $display("too few events in the window"); end
    checks++;
    if (int'(n_rejected) != rej0 || int'(n_dropped) != drop0) begin failures++; $display("events lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
