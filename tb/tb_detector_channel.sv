// tb_detector_channel: end-to-end test of one detector module processor.
// Loads calibration parameters (n, b) for all 64 crystals, then plays
// events through the behavioural module model: single-crystal events at
// random energies, two-crystal scatter events across two X and two Y lines
// and along one shared line, two-crystal events with equal deposits (equal
// TDC widths, random pairing), three-crystal events (rejected) and a
// pile-up (second event inside the first one's integration window,
// dropped). Each packet is checked for crystal, ICS flag and energy
// (reference model on the expected k); single-crystal energies must also
// reproduce the deposited energy within 2 % + 3 keV, since the stimulus
// follows the SiPM saturation model the correction inverts.
module tb_detector_channel;
  import pet_pkg::*;
  import corr_model_pkg::*;

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
  int n_single = 0, n_ics2x2 = 0, n_icsline = 0, n_tie = 0, n_rej_ev = 0, n_pile = 0;
  corr_param_t prm [64];
  packet_t got [$];

  detector_channel #(.MODULE_ID(4'd3)) dut (
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
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ktarget(int idx, real e);
    real n = real'(prm[idx].n), b = real'(prm[idx].b) / 65536.0;
    return n * (1.0 - $exp(-e / n)) / b;
  endfunction

  task automatic expect_packet(int idx0, bit ics_f, corr_t r, real e_in, bit phys);
    automatic int t = 0;
    while (got.size() == 0 && t < 400) begin @(posedge clk); t++; end
    checks++;
    if (got.size() == 0) begin failures++; $display("no packet for crystal %0d", idx0); return; end
    begin
      packet_t p = got.pop_front();
      checks++;
      if (p.crystal != 6'(idx0) || p.ics != ics_f || p.module_id != 4'd3 || p.energy != 10'(r.e) || p.sat != r.sat) begin
        failures++;
        $display("packet crystal %0d ics %0d E %0d sat %0d, expected %0d %0d %0d %0d", p.crystal, p.ics, p.energy, p.sat, idx0, ics_f, r.e, r.sat);
      end
      if (phys) begin
        checks++;
        if (real'(p.energy) > e_in * 1.02 + 3.0 || real'(p.energy) < e_in * 0.98 - 3.0) begin
          failures++; $display("corrected %0d keV for %f keV deposited", p.energy, e_in);
        end
      end
    end
  endtask

  initial begin
    int xs[3], ys[3], k, i0, i1;
    real e[3];
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
    repeat (10) @(posedge clk);

    for (int t = 0; t < 120; t++) begin
      automatic int kind = t % 6;
      got.delete();
      if (kind <= 1) begin                                   // single crystal
        xs[0] = $urandom % 8; ys[0] = $urandom % 8; e[0] = 150.0 + real'($urandom % 500);
        i0 = ys[0] * 8 + xs[0];
        stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
        expect_packet(i0, 0, non_ics(prm[i0].n, prm[i0].b, k), e[0], 1);
        n_single++;
      end else if (kind <= 3) begin                          // two crystals
        xs[0] = $urandom % 8; ys[0] = $urandom % 8;
        do begin
          xs[1] = $urandom % 8; ys[1] = $urandom % 8;
          if (kind == 3) begin if ($urandom % 2) xs[1] = xs[0]; else ys[1] = ys[0]; end
        end while (xs[1] == xs[0] && ys[1] == ys[0]);
        e[0] = 266.0 + real'($urandom % 140); e[1] = 511.0 - e[0];
        i0 = ys[0] * 8 + xs[0]; i1 = ys[1] * 8 + xs[1];
        stim.fire(2, xs, ys, e, ktarget(i0, e[0]) + ktarget(i1, e[1]), k);
        expect_packet(i0, 1, ics(prm[i0].n, prm[i0].b, prm[i1].b, k), 511.0, 0);
        if (xs[0] != xs[1] && ys[0] != ys[1]) n_ics2x2++; else n_icsline++;
      end else if (kind == 4) begin                          // equal deposits
        xs[0] = $urandom % 7; ys[0] = $urandom % 7; xs[1] = xs[0] + 1; ys[1] = ys[0] + 1;
        e[0] = 255.5; e[1] = 255.5;
        i0 = ys[0] * 8 + xs[0]; i1 = ys[1] * 8 + xs[1];
        stim.fire(2, xs, ys, e, ktarget(i0, e[0]) + ktarget(i1, e[1]), k);
        begin
          automatic int t2 = 0;
          while (got.size() == 0 && t2 < 400) begin @(posedge clk); t2++; end
        end
        checks++;
        if (got.size() == 0) begin failures++; $display("no packet for tie"); end
        else begin
          // the reported crystal fixes the pairing; its partner is the other one
          automatic int c = got[0].crystal;
          automatic int cx = c % 8, cy = c / 8;
          int px, py;
          px = (cx == xs[0]) ? xs[1] : xs[0]; py = (cy == ys[0]) ? ys[1] : ys[0];
          if ((cx == xs[0] || cx == xs[1]) && (cy == ys[0] || cy == ys[1])) begin
            expect_packet(c, 1, ics(prm[c].n, prm[c].b, prm[py * 8 + px].b, k), 511.0, 0);
            n_tie++;
          end else begin
            failures++; $display("tie reported crystal %0d not a candidate", c);
          end
        end
      end else if (t % 12 == 5) begin                        // three crystals: rejected
        automatic int cnt0 = n_rejected;
        xs = '{1, 4, 6}; ys = '{2, 5, 7}; e = '{200.0, 150.0, 161.0};
        stim.fire(3, xs, ys, e, 3000.0, k);
        repeat (150) @(posedge clk);
        checks++;
        if (int'(n_rejected) != cnt0 + 1 || got.size() != 0) begin failures++; $display("reject not seen"); end
        n_rej_ev++;
      end else begin                                         // pile-up
        automatic int cnt0 = n_dropped;
        xs[0] = 2; ys[0] = 3; e[0] = 100.0; i0 = 3 * 8 + 2;
        stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
        #220;                                                // first event decided, window still open
        xs[0] = 5; ys[0] = 6; e[0] = 300.0;
        stim.fire(1, xs, ys, e, ktarget(6 * 8 + 5, e[0]), k);
        repeat (150) @(posedge clk);
        checks++;
        if (int'(n_dropped) != cnt0 + 1 || got.size() != 1 || got[0].crystal != 6'(i0)) begin
          failures++; $display("pile-up: dropped %0d->%0d, packets %0d", cnt0, n_dropped, got.size());
        end
        n_pile++;
      end
      repeat (100 + $urandom % 50) @(posedge clk);
    end
    $display("single %0d, ICS 2x2 %0d, ICS on one line %0d, ties %0d, rejected %0d, pile-ups %0d",
             n_single, n_ics2x2, n_icsline, n_tie, n_rej_ev, n_pile);
    checks++;
    if (n_single == 0 || n_ics2x2 == 0 || n_icsline == 0 || n_tie == 0 || n_rej_ev == 0 || n_pile == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
