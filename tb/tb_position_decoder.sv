// tb_position_decoder: plays events of 1..3 hits per axis with random TDC
// widths into the position decoder and checks the decision: single-crystal
// position, two-crystal ICS pairing (widest X with widest Y, reported
// crystal = widest pair), rejection of undecodable events, and that for
// equal widths both possible pairings occur. The Figure 3 example (X lines
// 3 and 5, Y lines 4 and 2, reported (3,4), second crystal (5,2)) is
// played first.
module tb_position_decoder;
  import pet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  act_x = 0, act_y = 0, done_x = 0, done_y = 0;
  logic [11:0] width_x [8];
  logic [11:0] width_y [8];
  logic        idle, out_valid, reject;
  position_t   pos;
  int checks = 0, failures = 0;
  int n_single = 0, n_ics = 0, n_rej = 0, n_tie_a = 0, n_tie_b = 0;

  position_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // plays one event and returns the decoder's answer
  task automatic play(input logic [7:0] hx, input logic [7:0] hy, output logic rej, output position_t p);
    @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("decoder not idle before an event"); end
    act_x = hx; act_y = hy;
    repeat (5 + $urandom % 20) @(negedge clk);
    checks++;
    if (idle) begin failures++; $display("decoder idle during an event"); end
    act_x = 0; act_y = 0;
    @(negedge clk);
    done_x = hx; done_y = hy;
    @(negedge clk);
    done_x = 0; done_y = 0;
    while (!out_valid) @(posedge clk);
    rej = reject; p = pos;
    @(negedge clk);
  endtask

  function automatic int pick(logic [7:0] h, int nth);  // nth set bit from 0
    int c = 0;
    for (int i = 0; i < 8; i++) if (h[i]) begin if (c == nth) return i; c++; end
    return -1;
  endfunction

  initial begin
    logic rej;
    position_t p;
    for (int i = 0; i < 8; i++) begin width_x[i] = 0; width_y[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Figure 3 example
    width_x[3] = 700; width_x[5] = 300; width_y[4] = 650; width_y[2] = 320;
    play(8'b0010_1000, 8'b0001_0100, rej, p);
    checks++;
    if (rej || !p.ics || p.idx0 != 6'(4*8+3) || p.idx1 != 6'(2*8+5)) begin
      failures++; $display("figure 3 example: rej=%0d ics=%0d idx0=%0d idx1=%0d", rej, p.ics, p.idx0, p.idx1);
    end

    for (int t = 0; t < 600; t++) begin
      int nxh, nyh, xa, xb, ya, yb, xhi, xlo, yhi, ylo;
      bit tie;
      logic [7:0] hx, hy;
      nxh = $urandom % 4; nyh = $urandom % 4;
      if (t % 3 != 0) begin nxh = 1 + $urandom % 2; nyh = 1 + $urandom % 2; end
      if (nxh == 0 && nyh == 0) nxh = 1;            // no pulse, no event
      hx = 0; hy = 0;
      while ($countones(hx) < nxh) hx[$urandom % 8] = 1;
      while ($countones(hy) < nyh) hy[$urandom % 8] = 1;
      for (int i = 0; i < 8; i++) begin
        width_x[i] = 12'(100 + $urandom % 1500);
        width_y[i] = 12'(100 + $urandom % 1500);
      end
      tie = (t % 10 == 5) && nxh == 2 && nyh == 2;
      xa = pick(hx, 0); xb = (nxh == 2) ? pick(hx, 1) : xa;
      ya = pick(hy, 0); yb = (nyh == 2) ? pick(hy, 1) : ya;
      if (tie && xa >= 0 && ya >= 0) begin width_x[xb] = width_x[xa]; width_y[yb] = width_y[ya]; end
      play(hx, hy, rej, p);
      checks++;
      if (nxh == 0 || nyh == 0 || nxh > 2 || nyh > 2) begin
        n_rej++;
        if (!rej) begin failures++; $display("expected reject %b %b", hx, hy); end
        continue;
      end
      if (rej) begin failures++; $display("unexpected reject %b %b", hx, hy); continue; end
      if (width_x[xa] >= width_x[xb]) begin xhi = xa; xlo = xb; end else begin xhi = xb; xlo = xa; end
      if (width_y[ya] >= width_y[yb]) begin yhi = ya; ylo = yb; end else begin yhi = yb; ylo = ya; end
      if (nxh == 1 && nyh == 1) begin
        n_single++;
        if (p.ics || p.idx0 != 6'(ya*8+xa)) begin failures++; $display("single: got %0d exp %0d", p.idx0, ya*8+xa); end
      end else if (!tie) begin
        n_ics++;
        if (!p.ics || p.idx0 != 6'(yhi*8+xhi) || p.idx1 != 6'(ylo*8+xlo)) begin
          failures++; $display("ics: got %0d,%0d exp %0d,%0d", p.idx0, p.idx1, yhi*8+xhi, ylo*8+xlo);
        end
      end else begin
        // either straight or crossed pairing of the two lines
        bit straight, crossed;
        straight = ({p.idx0, p.idx1} == {6'(ya*8+xa), 6'(yb*8+xb)}) || ({p.idx0, p.idx1} == {6'(yb*8+xb), 6'(ya*8+xa)});
        crossed  = ({p.idx0, p.idx1} == {6'(yb*8+xa), 6'(ya*8+xb)}) || ({p.idx0, p.idx1} == {6'(ya*8+xb), 6'(yb*8+xa)});
        if (straight) n_tie_a++;
        if (crossed)  n_tie_b++;
        if (!p.ics || !(straight || crossed)) begin failures++; $display("tie: got %0d,%0d", p.idx0, p.idx1); end
      end
    end
    checks++;
    if (n_tie_a == 0 || n_tie_b == 0) begin failures++; $display("random pairing never varied"); end
    $display("single %0d, ics %0d, rejected %0d, ties %0d/%0d", n_single, n_ics, n_rej, n_tie_a, n_tie_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
