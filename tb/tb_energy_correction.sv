// tb_energy_correction: loads random correction parameters for all 64
// crystals, then offers a random mix of single-crystal and two-crystal
// events back to back. Checks every result against the reference models
// with the parameters of the right crystals, that results leave in input
// order with the right crystal and ICS flag, the latency from acceptance
// (11 clocks ICS; 6 clocks non-ICS unless an ICS event is still ahead, then
// at most 11), and that the ordering stall occurred.
module tb_energy_correction;
  import pet_pkg::*;
  import corr_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  position_t pos;
  logic [13:0] k;
  logic wr_en = 0;
  crystal_idx_t wr_addr;
  corr_param_t  wr_data;
  logic out_valid, sat, out_ics;
  logic [9:0] energy;
  crystal_idx_t out_crystal;
  corr_param_t  prm [64];
  int checks = 0, failures = 0, n_stall = 0, n_ics = 0, n_non = 0;
  int cyc = 0;

  typedef struct { corr_t r; bit ics; crystal_idx_t idx; int acc; bit free_run; } exp_t;
  int last_ics_acc = -100;
  exp_t q[$];

  energy_correction dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pos = '0; k = 0; wr_addr = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      prm[i].n = 16'(400 + $urandom % 3000);
      prm[i].b = 16'(500 + $urandom % 8000);
      wr_en = 1; wr_addr = 6'(i); wr_data = prm[i];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      pos.ics  = $urandom % 2;
      pos.idx0 = 6'($urandom);
      pos.idx1 = pos.ics ? 6'($urandom) : pos.idx0;
      k = 14'(1 + $urandom % 16383);
      #1;
      if (in_valid && !in_ready) n_stall++;
      while (in_valid && !in_ready) begin
        @(negedge clk); #1;
      end
      if (in_valid) begin
        exp_t e;
        e.ics = pos.ics; e.idx = pos.idx0; e.acc = cyc + 1;
        e.free_run = (e.acc - last_ics_acc > 6);      // no ICS event ahead
        if (pos.ics) last_ics_acc = e.acc;
        e.r = pos.ics ? ics(prm[pos.idx0].n, prm[pos.idx0].b, prm[pos.idx1].b, k)
                      : non_ics(prm[pos.idx0].n, prm[pos.idx0].b, k);
        q.push_back(e);
        if (pos.ics) n_ics++; else n_non++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_stall == 0) begin failures++; $display("ordering stall never happened"); end
    $display("non-ICS %0d, ICS %0d, stalls %0d", n_non, n_ics, n_stall);
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
      if (out_crystal != e.idx || out_ics != e.ics) begin
        failures++; $display("order: crystal %0d ics %0d, expected %0d %0d", out_crystal, out_ics, e.idx, e.ics);
      end
      checks++;
      if (e.ics ? (cyc - e.acc != 11)
                : (e.free_run ? (cyc - e.acc != 6) : (cyc - e.acc < 6 || cyc - e.acc > 11))) begin
        failures++; $display("latency %0d for ics=%0d", cyc - e.acc, e.ics);
      end
      checks++;
      if (energy != 10'(e.r.e) || sat != e.r.sat) begin
        failures++; $display("energy %0d/%0d expected %0d/%0d", energy, sat, e.r.e, e.r.sat);
      end
    end
  end
endmodule
