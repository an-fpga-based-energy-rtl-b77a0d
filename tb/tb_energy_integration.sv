// tb_energy_integration: feeds a 50 Msps stream (one sample every second
// 100 MHz clock) of baseline noise with scintillation-like pulses and
// triggers, and checks each k against the sum, over the 16 samples that
// start 4 samples before the first sample after the trigger, of the
// baseline-subtracted (clipped at zero) samples, shifted right by 2 and
// saturated to 14 bits (with 16 samples of 12 bits the sum stays below
// the 14-bit limit). Also checks that k_valid comes one clock after the
// 16th sample and that a trigger during a window is ignored.
module tb_energy_integration;
  logic        clk = 0, rst_n = 0;
  logic        adc_valid = 0, trigger = 0;
  logic [11:0] adc_data = 0, baseline;
  logic        busy, k_valid;
  logic [13:0] k;
  int checks = 0, failures = 0, n_sat = 0;
  int samples [$];
  int cyc = 0;

  energy_integration dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int trig_at, j, expk, amp, t_k, ph;
    baseline = 12'd200;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 300; ev++) begin
      // a pulse with a 2-sample rise and exponential decay, on noisy baseline
      amp = (ev % 10 == 9) ? 3800 : 200 + $urandom % 2500;
      trig_at = 8 + $urandom % 2;          // trigger near sample 8
      ph = $urandom % 2;                    // on a strobe cycle or between two
      samples.delete();
      for (int i = 0; i < 40; i++) begin
        real v;
        v = 200.0 + real'($urandom % 21) - 10.0;
        if (i >= 6) v += real'(amp) * $exp(-real'(i - 6) / 8.0) * (i == 6 ? 0.5 : 1.0);
        samples.push_back(v > 4095.0 ? 4095 : int'(v));
      end
      t_k = -1;
      for (int c = 0; c < 80; c++) begin
        @(negedge clk);
        adc_valid = (c % 2 == 0);
        adc_data  = 12'(samples[c / 2]);
        trigger   = (c == 2 * trig_at + ph) || (c == 2 * trig_at + 6);   // second one is ignored
        if (k_valid && t_k < 0) t_k = c;
        @(posedge clk);
        #1;
        if (k_valid) t_k = c + 1;
      end
      @(negedge clk); adc_valid = 0; trigger = 0;
      // first strobe after the trigger cycle is sample trig_at+1 (trigger on a
      // strobe cycle) -> window covers samples j-4 .. j+11
      j = trig_at + 1;
      expk = 0;
      for (int i = j - 4; i < j + 12; i++) expk += (samples[i] > 200) ? samples[i] - 200 : 0;
      expk = expk >> 2;
      if (expk > 16383) begin expk = 16383; n_sat++; end
      checks++;
      if (int'(k) != expk) begin failures++; $display("ev %0d: k=%0d expected %0d", ev, k, expk); end
      checks++;
      if (t_k != 2 * (j + 15) + 1) begin failures++; $display("k_valid at cycle %0d, expected %0d", t_k, 2 * (j + 15) + 1); end
      repeat (4) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
