// tb_pet_frontend_fpga: end-to-end test of the front-end FPGA with all 12
// detector-module processors at their default sizes. Every module gets its
// own calibration table through the shared host port and its own
// behavioural detector, and all modules run events at the same time:
// single-crystal events (corrected energy must reproduce the deposit within
// 2 % + 3 keV), two-crystal scatter events across two X and two Y lines and
// along one line, equal-deposit pairs (random pairing), three-crystal
// events (rejected) and pile-ups (dropped). Every packet is checked for
// module number, crystal, ICS flag and energy against the reference model;
// each mechanism must have occurred.
module tb_pet_frontend_fpga;
  import pet_pkg::*;
  import corr_model_pkg::*;
  localparam int NM = 12;

  logic        clk = 0, rst_n = 0, adc_valid = 0;
  logic [7:0]  clk_ph = '0;
  logic [7:0]  led_x [NM];
  logic [7:0]  led_y [NM];
  logic [11:0] adc_data [NM];
  logic        wr_en = 0;
  logic [3:0]  wr_module = 0;
  crystal_idx_t wr_addr = 0;
  corr_param_t  wr_data = 0;
  logic [NM-1:0] pkt_valid;
  packet_t     pkt [NM];
  logic [15:0] n_rejected [NM];
  logic [15:0] n_dropped [NM];
  int checks = 0, failures = 0, done_mods = 0;
  int n_single = 0, n_ics2x2 = 0, n_icsline = 0, n_tie = 0, n_rej_ev = 0, n_pile = 0;
  corr_param_t prm [NM][64];
  bit loaded = 0;

  pet_frontend_fpga dut (
    .clk(clk), .clk_ph(clk_ph), .rst_n(rst_n), .led_x(led_x), .led_y(led_y),
    .adc_valid(adc_valid), .adc_data(adc_data), .baseline(12'd200),
    .wr_en(wr_en), .wr_module(wr_module), .wr_addr(wr_addr), .wr_data(wr_data),
    .pkt_valid(pkt_valid), .pkt(pkt), .n_rejected(n_rejected), .n_dropped(n_dropped));

  always #5 clk = ~clk;
  always @(posedge clk) adc_valid <= ~adc_valid;
  for (genvar i = 0; i < 8; i++) begin : g_ph
    initial begin #(i * 0.3125); forever #1.25 clk_ph[i] = ~clk_ph[i]; end
  end

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // calibration of all modules through the shared write port
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < 64; i++) begin
        real n, b;
        n = 800.0 + real'($urandom % 800);
        b = n * (1.0 - $exp(-511.0 / n)) / real'(3500 + $urandom % 1000);
        prm[m][i].n = 16'(int'(n));
        prm[m][i].b = 16'(int'(b * 65536.0));
        @(negedge clk); wr_en = 1; wr_module = 4'(m); wr_addr = 6'(i); wr_data = prm[m][i];
      end
    @(negedge clk); wr_en = 0;
    loaded = 1;
  end

  for (genvar gm = 0; gm < NM; gm++) begin : g_m
    packet_t got [$];

    module_stim stim (.clk(clk), .adc_valid(adc_valid), .led_x(led_x[gm]), .led_y(led_y[gm]), .adc_data(adc_data[gm]));

    always @(posedge clk) if (pkt_valid[gm]) got.push_back(pkt[gm]);

    function automatic real ktarget(int idx, real e);
      real n = real'(prm[gm][idx].n), b = real'(prm[gm][idx].b) / 65536.0;
      return n * (1.0 - $exp(-e / n)) / b;
    endfunction

    task automatic wait_packet();
      automatic int t = 0;
      while (got.size() == 0 && t < 400) begin @(posedge clk); t++; end
    endtask

    task automatic check_packet(int idx0, bit ics_f, corr_t r, real e_in, bit phys);
      wait_packet();
      checks++;
      if (got.size() == 0) begin failures++; $display("module %0d: no packet", gm); return; end
      begin
        packet_t p = got.pop_front();
        checks++;
        if (p.module_id != 4'(gm) || p.crystal != 6'(idx0) || p.ics != ics_f || p.energy != 10'(r.e) || p.sat != r.sat) begin
          failures++;
          $display("module %0d: packet %0d/%0d/%0d/%0d/%0d, expected %0d/%0d/%0d/%0d/%0d", gm,
                   p.module_id, p.crystal, p.ics, p.energy, p.sat, gm, idx0, ics_f, r.e, r.sat);
        end
        if (phys) begin
          checks++;
          if (real'(p.energy) > e_in * 1.02 + 3.0 || real'(p.energy) < e_in * 0.98 - 3.0) begin
            failures++; $display("module %0d: corrected %0d keV for %f keV", gm, p.energy, e_in);
          end
        end
      end
    endtask

    initial begin
      int xs[3], ys[3], k, i0, i1, px, py;
      real e[3];
      wait (loaded);
      repeat (10 + gm * 37) @(posedge clk);                  // modules out of step
      for (int t = 0; t < 12; t++) begin
        automatic int kind = (t + gm) % 6;
        got.delete();
        if (kind <= 1) begin
          xs[0] = $urandom % 8; ys[0] = $urandom % 8; e[0] = 150.0 + real'($urandom % 500);
          i0 = ys[0] * 8 + xs[0];
          stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
          check_packet(i0, 0, non_ics(prm[gm][i0].n, prm[gm][i0].b, k), e[0], 1);
          n_single++;
        end else if (kind <= 3) begin
          xs[0] = $urandom % 8; ys[0] = $urandom % 8;
          do begin
            xs[1] = $urandom % 8; ys[1] = $urandom % 8;
            if (kind == 3) begin if ($urandom % 2) xs[1] = xs[0]; else ys[1] = ys[0]; end
          end while (xs[1] == xs[0] && ys[1] == ys[0]);
          e[0] = 266.0 + real'($urandom % 140); e[1] = 511.0 - e[0];
          i0 = ys[0] * 8 + xs[0]; i1 = ys[1] * 8 + xs[1];
          stim.fire(2, xs, ys, e, ktarget(i0, e[0]) + ktarget(i1, e[1]), k);
          check_packet(i0, 1, ics(prm[gm][i0].n, prm[gm][i0].b, prm[gm][i1].b, k), 511.0, 0);
          if (xs[0] != xs[1] && ys[0] != ys[1]) n_ics2x2++; else n_icsline++;
        end else if (kind == 4) begin
          xs[0] = $urandom % 7; ys[0] = $urandom % 7; xs[1] = xs[0] + 1; ys[1] = ys[0] + 1;
          e[0] = 255.5; e[1] = 255.5;
          i0 = ys[0] * 8 + xs[0]; i1 = ys[1] * 8 + xs[1];
          stim.fire(2, xs, ys, e, ktarget(i0, e[0]) + ktarget(i1, e[1]), k);
          wait_packet();
          checks++;
          if (got.size() == 0) begin failures++; $display("module %0d: no packet for tie", gm); end
          else begin
            automatic int c = got[0].crystal;
            automatic int cx = c % 8, cy = c / 8;
            px = (cx == xs[0]) ? xs[1] : xs[0]; py = (cy == ys[0]) ? ys[1] : ys[0];
            if ((cx == xs[0] || cx == xs[1]) && (cy == ys[0] || cy == ys[1])) begin
              check_packet(c, 1, ics(prm[gm][c].n, prm[gm][c].b, prm[gm][py * 8 + px].b, k), 511.0, 0);
              n_tie++;
            end else begin
              failures++; $display("module %0d: tie crystal %0d not a candidate", gm, c);
            end
          end
        end else if (t % 2 == 1) begin
          automatic int cnt0 = n_rejected[gm];
          xs = '{1, 4, 6}; ys = '{2, 5, 7}; e = '{200.0, 150.0, 161.0};
          stim.fire(3, xs, ys, e, 3000.0, k);
          repeat (150) @(posedge clk);
          checks++;
          if (int'(n_rejected[gm]) != cnt0 + 1 || got.size() != 0) begin failures++; $display("module %0d: reject not seen", gm); end
          n_rej_ev++;
        end else begin
          automatic int cnt0 = n_dropped[gm];
          xs[0] = 2; ys[0] = 3; e[0] = 100.0; i0 = 3 * 8 + 2;
          stim.fire(1, xs, ys, e, ktarget(i0, e[0]), k);
          #220;
          xs[0] = 5; ys[0] = 6; e[0] = 300.0;
          stim.fire(1, xs, ys, e, ktarget(6 * 8 + 5, e[0]), k);
          repeat (150) @(posedge clk);
          checks++;
          if (int'(n_dropped[gm]) != cnt0 + 1 || got.size() != 1 || got[0].crystal != 6'(i0)) begin
            failures++; $display("module %0d: pile-up not handled", gm);
          end
          n_pile++;
        end
        repeat (100 + $urandom % 50) @(posedge clk);
      end
      done_mods++;
    end
  end

  initial begin
    wait (done_mods == NM);
    $display("single %0d, ICS 2x2 %0d, ICS on one line %0d, ties %0d, rejected %0d, pile-ups %0d",
             n_single, n_ics2x2, n_icsline, n_tie, n_rej_ev, n_pile);
    checks++;
    if (n_single == 0 || n_ics2x2 == 0 || n_icsline == 0 || n_tie == 0 || n_rej_ev == 0 || n_pile == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
