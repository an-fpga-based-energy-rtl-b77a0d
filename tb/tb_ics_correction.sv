// tb_ics_correction: streams random two-crystal events through the ICS
// correction pipeline and checks each result bit-exactly against a model of
// the fixed-point datapath written here, against the real-valued formula
//   E = 1/(k*(1/b0+1/b1) - 1/n0) + 1/(k*(1/b0+1/b1))
// within the precision of the normalised 4096-entry tables, and for
// arrival exactly 10 clocks after the event entered.
module tb_ics_correction;
  localparam int LAT = 10;
  logic        clk = 0, rst_n = 0;
  logic        in_valid;
  logic [15:0] n0, b0, b1;
  logic [13:0] k;
  logic [7:0]  in_tag, out_tag;
  logic        out_valid, sat;
  logic [9:0]  energy;
  int checks = 0, failures = 0, n_sat = 0, n_ok = 0;
  int cycle = 0;

  typedef struct { int unsigned e; bit sat; int cyc; logic [7:0] tag; real ereal; real tol; } exp_t;
  exp_t q[$];

  ics_correction #(.TAGW(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lam(longint unsigned x);
    int l = 0;
    while ((x >> l) >= 4096) l++;
    return l;
  endfunction
  function automatic longint unsigned rc(longint unsigned x);
    return (x <= 1) ? 64'd1048575 : (64'd1048576 / x);
  endfunction
  function automatic longint unsigned inv(longint unsigned x);   // (R[x>>l])>>l
    int l = lam(x);
    return rc(x >> l) >> l;
  endfunction

  function automatic exp_t model(longint unsigned nn, longint unsigned bb0, longint unsigned bb1, longint unsigned kk);
    exp_t r;
    longint unsigned s, p, tn, qq, e;
    real sr, xr;
    s  = inv(bb0) + inv(bb1);
    p  = kk * s;
    tn = inv(nn);
    if (p <= tn) begin r.sat = 1; r.e = 1023; return r; end
    qq = p - tn;
    e  = inv(qq) + inv(p);
    if (e >= 1024) begin r.sat = 1; r.e = 1023; return r; end
    r.sat = 0; r.e = int'(e);
    sr = real'(kk) * (1.0 / real'(bb0) + 1.0 / real'(bb1));
    xr = sr - 1.0 / real'(nn);
    r.ereal = 1.0 / xr + 1.0 / sr;
    // each (R[x>>l])>>l carries up to one unit of truncation in its own
    // result and 1/2048 from the shifted argument
    begin
      real rel_s, rel_n;
      rel_s = 2.0 / real'(s) + 2.0 / 2048.0;
      rel_n = 1.0 / real'(tn) + 1.0 / 2048.0;
      r.tol = 3.0 + (1.0 / xr) * (sr / xr) * rel_s + (1.0 / sr) * rel_s
                  + (1.0 / xr) * ((1.0 / real'(nn)) / xr) * rel_n + 0.002 * r.ereal;
    end
    return r;
  endfunction

  initial begin
    in_valid = 0; n0 = 0; b0 = 0; b1 = 0; k = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      n0 = 16'(1 + $urandom % 65535);
      b0 = 16'(1 + $urandom % 65535);
      b1 = 16'(1 + $urandom % 65535);
      k  = 14'(1 << ($urandom % 14)) | 14'($urandom % 64);
      if (t % 7 == 0) begin n0 = 16'($urandom); b0 = 16'($urandom); end
      in_tag = 8'(t);
      if (in_valid) begin
        exp_t e;
        e = model(n0, b0, b1, k);
        e.cyc = cycle + 1; e.tag = in_tag;   // sampled by the next edge
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_sat == 0 || n_ok == 0) failures++;
    $display("results: %0d in range, %0d saturated", n_ok, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
      if (e.sat) n_sat++;
      else begin
        n_ok++;
        checks++;
        if (real'(energy) - e.ereal > e.tol || e.ereal - real'(energy) > e.tol) begin
          failures++; $display("real: got %0d exp %f tol %f", energy, e.ereal, e.tol);
        end
      end
    end
  end
endmodule
