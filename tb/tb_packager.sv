// tb_packager: pushes crystal indices and delivers energies at random
// moments (never more energies than indices waiting), and checks that each
// packet pairs the oldest waiting index with the energy, carries the module
// number, ICS and saturation flags, appears one clock after the energy, and
// that idx_ready drops when the 4-entry FIFO is full.
module tb_packager;
  import pet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic idx_valid = 0, idx_ready, idx_ics = 0;
  crystal_idx_t idx = 0;
  logic e_valid = 0, e_sat = 0;
  logic [9:0] energy = 0;
  logic pkt_valid;
  packet_t pkt;
  int checks = 0, failures = 0, n_full = 0, n_pkt = 0;
  logic [6:0] waiting [$];
  typedef struct { logic [6:0] id; logic [9:0] e; logic s; } exp_t;
  exp_t expq [$];

  packager #(.MODULE_ID(4'd9)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (!idx_ready) n_full++;
      checks++;
      if (idx_ready != (waiting.size() < 4)) begin failures++; $display("idx_ready %0d with %0d waiting", idx_ready, waiting.size()); end
      idx_valid = idx_ready && ($urandom % 2);
      idx_ics   = $urandom % 2;
      idx       = 6'($urandom);
      e_valid   = (waiting.size() > 0) && ($urandom % 3 == 0);
      energy    = 10'($urandom);
      e_sat     = $urandom % 2;
      if (e_valid) begin
        exp_t x;
        x.id = waiting.pop_front(); x.e = energy; x.s = e_sat;
        expq.push_back(x);
      end
      if (idx_valid) waiting.push_back({idx_ics, idx});
    end
    @(negedge clk); idx_valid = 0; e_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0 || n_full == 0 || n_pkt == 0) begin failures++; $display("left %0d, full %0d", expq.size(), n_full); end
    $display("packets %0d, cycles full %0d", n_pkt, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a packet must follow every energy by exactly one clock
  logic e_d;
  always @(posedge clk) e_d <= rst_n && e_valid;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (pkt_valid != e_d) begin failures++; $display("pkt_valid %0d, energy one clock ago %0d", pkt_valid, e_d); end
    if (pkt_valid) begin
      exp_t x;
      n_pkt++;
      x = expq.pop_front();
      checks++;
      if (pkt.module_id != 4'd9 || {pkt.ics, pkt.crystal} != x.id || pkt.energy != x.e || pkt.sat != x.s || pkt.reserved != 0) begin
        failures++; $display("packet %h, expected id %h e %0d s %0d", pkt, x.id, x.e, x.s);
      end
    end
  end
endmodule
