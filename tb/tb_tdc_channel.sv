// tb_tdc_channel: drives pulses of random width and random phase into the
// multi-phase TDC (eight 400 MHz phases, 312.5 ps apart) and checks that
// each measured width equals the pulse duration divided by 312.5 ps within
// one bin, that done_tgl toggles exactly once per pulse, that active is
// high during the measurement, and that a very long pulse saturates.
module tb_tdc_channel;
  logic [7:0]  clk_ph = '0;
  logic        rst_n = 0, hit = 0;
  logic        active, done_tgl;
  logic [11:0] width;
  int checks = 0, failures = 0;

  tdc_channel dut (.clk_ph(clk_ph), .rst_n(rst_n), .hit(hit),
                   .active(active), .width(width), .done_tgl(done_tgl));

  for (genvar i = 0; i < 8; i++) begin : g_clk
    initial begin
      #(1.0 + i * 0.3125);
      forever #1.25 clk_ph[i] = ~clk_ph[i];
    end
  end

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input real ns, input int exp_bins, input int tol);
    logic t0;
    bit   seen_active;
    t0 = done_tgl;
    seen_active = 0;
    #($urandom % 2500 * 0.001);
    hit = 1;
    fork
      begin #(ns); hit = 0; end
      begin
        repeat (8) @(posedge clk_ph[0]);
        seen_active = active;
      end
    join
    repeat (6) @(posedge clk_ph[0]);
    checks++;
    if (done_tgl == t0) begin failures++; $display("no done for %f ns", ns); end
    checks++;
    if (ns > 25.0 && !seen_active) begin failures++; $display("active not seen"); end
    checks++;
    if (width > exp_bins + tol || width + tol < exp_bins) begin
      failures++; $display("width %0d for %f ns, expected %0d", width, ns, exp_bins);
    end
    // no further toggle while idle
    repeat (10) @(posedge clk_ph[0]);
    checks++;
    if (done_tgl == t0 || active) begin failures++; $display("spurious activity"); end
  endtask

  initial begin
    repeat (4) @(posedge clk_ph[0]);
    #0.7 rst_n = 1;
    repeat (4) @(posedge clk_ph[0]);
    for (int t = 0; t < 200; t++) begin
      real ns;
      ns = 1.0 + real'($urandom % 1000000) / 1000.0;   // 1 ns .. 1 us
      pulse(ns, int'(ns / 0.3125), 1);
      #(real'($urandom % 50));
    end
    pulse(1500.0, 4095, 0);                           // beyond 12 bits
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
