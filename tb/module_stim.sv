// module_stim: behavioural model of one multiplexed 8x8 detector module as
// seen by the FPGA: the eight X and eight Y discriminator outputs and the
// 50 Msps ADC stream of the summed signal.
//
// fire() plays one event: every crystal hit adds its deposit to its X line
// and its Y line; each hit line gives a discriminator pulse whose length
// grows with the line's energy (100 ns + 0.5 ns/keV, so 355 ns at 511 keV);
// all pulses start together. The summed signal is a 10-sample pulse of fixed
// shape on a flat baseline of 200 codes, scaled so that the integral
// (baseline removed, divided by 4) equals k_target; the integer k the
// integration must produce is returned. Equal line energies give pulses of
// identical length and therefore identical TDC widths.
module module_stim (
  input  logic        clk,
  input  logic        adc_valid,
  output logic [7:0]  led_x,
  output logic [7:0]  led_y,
  output logic [11:0] adc_data
);
  localparam int BASE = 200;
  real shape [10] = '{0.5, 1.0, 0.95, 0.9, 0.8, 0.7, 0.6, 0.5, 0.4, 0.3};
  int  pend [$];

  initial begin
    led_x = '0; led_y = '0; adc_data = 12'(BASE);
  end

  always @(posedge clk) if (adc_valid) adc_data <= 12'(BASE + ((pend.size() > 0) ? pend.pop_front() : 0));

  task automatic fire(input int nc, input int xs[3], input int ys[3], input real e[3],
                      input real k_target, output int k_exp);
    real ex[8], ey[8], ssum, a;
    int  s;
    for (int i = 0; i < 8; i++) begin ex[i] = 0.0; ey[i] = 0.0; end
    for (int c = 0; c < nc; c++) begin ex[xs[c]] += e[c]; ey[ys[c]] += e[c]; end
    ssum = 0.0;
    for (int i = 0; i < 10; i++) ssum += shape[i];
    a = 4.0 * k_target / ssum;
    k_exp = 0;
    @(posedge clk iff adc_valid);
    for (int i = 0; i < 10; i++) begin
      s = int'(a * shape[i]);
      if (s > 4095 - BASE) s = 4095 - BASE;
      pend.push_back(s);
      k_exp += s;
    end
    k_exp = k_exp >> 2;
    #(0.1 + real'($urandom % 2000) / 1000.0);
    for (int i = 0; i < 8; i++) begin
      if (ex[i] > 0.0) fork
        automatic int li = i;
        automatic real w = 100.0 + 0.5 * ex[i];
        begin led_x[li] = 1; #(w); led_x[li] = 0; end
      join_none
      if (ey[i] > 0.0) fork
        automatic int li = i;
        automatic real w = 100.0 + 0.5 * ey[i];
        begin led_y[li] = 1; #(w); led_y[li] = 0; end
      join_none
    end
  endtask
endmodule
