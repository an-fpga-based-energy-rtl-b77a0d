// tb_non_ics_correction: streams random single-crystal events, one per
// clock with random gaps, through the non-ICS correction pipeline.
// Each result is checked three ways: bit-exact against a model of the
// fixed-point datapath built here from $ln and integer arithmetic; against
// the real-valued formula E = n*ln(n/(n-b*k)) within the table precision;
// and for arrival exactly 5 clocks after the event entered (via the tag).
module tb_non_ics_correction;
  localparam int LAT = 5;
  logic        clk = 0, rst_n = 0;
  logic        in_valid;
  logic [15:0] n, b;
  logic [13:0] k;
  logic [7:0]  in_tag, out_tag;
  logic        out_valid, sat;
  logic [9:0]  energy;
  int checks = 0, failures = 0, n_sat = 0, n_ok = 0;
  int cycle = 0;

  typedef struct { int unsigned e; bit sat; int cyc; logic [7:0] tag; real ereal; real tol; bit realok; } exp_t;
  exp_t q[$];

  non_ics_correction #(.TAGW(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned lt(int unsigned x);
    return int'($floor(4096.0 * $ln(real'(x)) + 0.5)) % 16384;
  endfunction

  function automatic exp_t model(int unsigned nn, int unsigned bb, int unsigned kk);
    exp_t r;
    longint unsigned bk, m, an, am, diff, e;
    int lam;
    r.realok = 0;
    bk = (longint'(bb) * kk) >> 16;
    if (bk >= nn) begin r.sat = 1; r.e = 1023; return r; end
    m = nn - bk;
    lam = 0;
    while ((nn >> lam) >= 4096) lam++;
    an = nn >> lam; am = m >> lam;
    if (am == 0 || am * 54 <= an) begin r.sat = 1; r.e = 1023; return r; end
    diff = (lt(int'(an)) - lt(int'(am)) + 16384) % 16384;
    e = (longint'(nn) * diff) >> 12;
    if (e >= 1024) begin r.sat = 1; r.e = 1023; return r; end
    r.sat = 0; r.e = int'(e);
    r.ereal = real'(nn) * $ln(real'(nn) / (real'(nn) - real'(longint'(bb) * kk) / 65536.0));
    r.tol = 2.0 + real'(nn) / 4096.0 + real'(nn) / real'(m);
    r.realok = (lam == 0);
    return r;
  endfunction

  // stimulus
  initial begin
    in_valid = 0; n = 0; b = 0; k = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      if (t % 5 == 0) begin
        n = 16'($urandom); b = 16'($urandom); k = 14'($urandom);
      end else if (t % 5 == 1) begin
        // n - b*k close to n/54: checks the guard on the log difference
        int unsigned m;
        n = 16'(1000 + $urandom % 3000);
        m = (n / (40 + $urandom % 30));
        k = 14'(8192 + $urandom % 8000);
        b = 16'((longint'(n - m) * 65536 + k - 1) / k);
      end else begin
        real r;
        n = 16'(300 + $urandom % 3700);
        k = 14'(1000 + $urandom % 15000);
        r = real'($urandom % 950) / 1000.0;
        b = 16'(int'(r * real'(n) * 65536.0 / real'(k)) > 65535 ? 65535 : int'(r * real'(n) * 65536.0 / real'(k)));
      end
      in_tag = 8'(t);
      if (in_valid) begin
        exp_t e;
        e = model(n, b, k);
        e.cyc = cycle + 1; e.tag = in_tag;  // sampled by the next edge
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_sat == 0 || n_ok == 0) failures++;
    $display("results: %0d in range, %0d saturated", n_ok, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (q.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      e = q.pop_front();
      checks++;
      if (out_tag != e.tag || cycle - e.cyc != LAT) begin
        failures++; $display("tag/latency: tag %0d exp %0d, latency %0d", out_tag, e.tag, cycle - e.cyc);
      end
      checks++;
      if (energy != 10'(e.e) || sat != e.sat) begin
        failures++; $display("value: got %0d/%0d exp %0d/%0d", energy, sat, e.e, e.sat);
      end
      if (e.sat) n_sat++; else n_ok++;
      if (!e.sat && e.realok) begin
        checks++;
        if (real'(energy) - e.ereal > e.tol || e.ereal - real'(energy) > e.tol) begin
          failures++; $display("real: got %0d exp %f", energy, e.ereal);
        end
      end
    end
  end
endmodule
