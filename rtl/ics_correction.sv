// ics_correction: energy correction of a two-crystal inter-crystal scatter
// (ICS) event.
//
// Only the summed ADC integral k of the module is known, together with the
// non-ICS parameters (n0,b0) and (n1,b1) of the two hit crystals. The paper
// approximates exp(-x) by the mean of 1-x and 1/(1+x), assumes the photon
// energy is split evenly and n0 ~ n1, and arrives at
//     E = 1 / ( k*(1/b0 + 1/b1) - 1/n0 )  +  1 / ( k*(1/b0 + 1/b1) )
// Every reciprocal is an R_ROM look-up (2^20/x, 4096 entries) of an
// argument normalised below 4096 by a right shift lambda, whose result is
// shifted right by the same lambda:  1/x ~ (R[x >> lambda]) >> lambda.
// The scale 2^20 of the first three reciprocals cancels in the last two, so
// E comes out as an integer in the units of the formula. This module
// evaluates the formula exactly as the paper prints it, on the stored
// integer words n0, b0, b1 and on k.
//
// Structure (five R_ROMs, one multiplier) and the 10-cycle latency follow
// the paper's datapath figure, two clocks per stage:
//   1-2  shift b0, b1, R_ROM          6-7  subtract 1/n0, shift
//   3-4  shift back, add; n0 R_ROM    8    two R_ROMs
//   5    multiply by k                9-10 shift back, add, saturate
// sat is raised and E forced to 1023 when k*(1/b0+1/b1) <= 1/n0 or when
// the sum does not fit 10 bits.
//
// Caution: the printed formula is not what the saturation model gives.
// Solving k = n0(1-exp(-E0/n0))/b0 + n1(1-exp(-E1/n1))/b1 with the same
// approximations yields  E = 1/(S/k - 1/n0) + k/S,  S = 1/b0 + 1/b1, i.e. k
// divides S instead of multiplying it. On realistic parameters (n = 1200
// keV, b = 0.104 keV/code, 511 keV shared) the printed form returns 0 where
// the derived form returns about 515 keV. The printed form is kept because
// the equation and the datapath figure agree on it; replacing the k input
// of the multiplier by a sixth reciprocal R[k] turns it into the derived one.
//
// Interface: in_valid with n0, b0, b1, k and a tag; out_valid, E, sat and
// the tag exactly LATENCY = 10 clocks later, one event per clock.
module ics_correction
  import pet_pkg::*;
#(
  parameter int unsigned TAGW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [PW-1:0]   n0,
  input  logic [PW-1:0]   b0,
  input  logic [PW-1:0]   b1,
  input  logic [KW-1:0]   k,
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output logic [EW-1:0]   energy,
  output logic            sat,
  output logic [TAGW-1:0] out_tag
);
  localparam int unsigned LATENCY = 10;
  localparam int unsigned SW = RROM_W + 1;        // 1/b0 + 1/b1
  localparam int unsigned QW = SW + KW;           // k * S
  localparam int unsigned LW = 6;                 // shift amounts

  logic [LATENCY-1:0] v;
  logic [TAGW-1:0]    tag [LATENCY];
  logic [KW-1:0]      kd  [4];                    // k to the multiplier
  logic [PW-1:0]      n0d [2];                    // n0 to its shift

  // stage 1
  logic [TAB_AW-1:0] s1_ab0, s1_ab1;
  logic [LW-1:0]     s1_lb0, s1_lb1;
  // stage 2 (ROM outputs rb0, rb1)
  logic [LW-1:0]     s2_lb0, s2_lb1;
  logic [RROM_W-1:0] rb0, rb1;
  // stage 3
  logic [RROM_W-1:0] s3_tb0, s3_tb1;
  logic [TAB_AW-1:0] s3_an0;
  logic [LW-1:0]     s3_ln0;
  // stage 4 (ROM output rn0)
  logic [SW-1:0]     s4_s;
  logic [LW-1:0]     s4_ln0;
  logic [RROM_W-1:0] rn0;
  // stage 5
  logic [QW-1:0]     s5_p;
  logic [RROM_W-1:0] s5_tn0;
  // stage 6
  logic [QW-1:0]     s6_p, s6_q;
  logic              s6_bad;
  // stage 7
  logic [TAB_AW-1:0] s7_a1, s7_a2;
  logic [LW-1:0]     s7_l1, s7_l2;
  logic              s7_bad;
  // stage 8 (ROM outputs r1, r2)
  logic [LW-1:0]     s8_l1, s8_l2;
  logic              s8_bad;
  logic [RROM_W-1:0] r1, r2;
  // stage 9
  logic [RROM_W-1:0] s9_e1, s9_e2;
  logic              s9_bad;

  int unsigned lb0_c, lb1_c, ln0_c, l1_c, l2_c;
  logic [SW-1:0] esum_c;

  always_comb begin
    lb0_c  = norm_shift(64'(b0));
    lb1_c  = norm_shift(64'(b1));
    ln0_c  = norm_shift(64'(n0d[1]));
    l1_c   = norm_shift(64'(s6_q));
    l2_c   = norm_shift(64'(s6_p));
    esum_c = SW'(s9_e1) + SW'(s9_e2);
  end

  always_ff @(posedge clk) begin
    // 1: normalise b0, b1
    s1_ab0 <= TAB_AW'(b0 >> lb0_c);
    s1_ab1 <= TAB_AW'(b1 >> lb1_c);
    s1_lb0 <= LW'(lb0_c);
    s1_lb1 <= LW'(lb1_c);
    // 2: R_ROM(b0), R_ROM(b1)
    s2_lb0 <= s1_lb0;
    s2_lb1 <= s1_lb1;
    // 3: shift back; normalise n0
    s3_tb0 <= rb0 >> s2_lb0;
    s3_tb1 <= rb1 >> s2_lb1;
    s3_an0 <= TAB_AW'(n0d[1] >> ln0_c);
    s3_ln0 <= LW'(ln0_c);
    // 4: add; R_ROM(n0)
    s4_s   <= SW'(s3_tb0) + SW'(s3_tb1);
    s4_ln0 <= s3_ln0;
    // 5: multiply by k; shift back 1/n0
    s5_p   <= QW'(kd[3]) * QW'(s4_s);
    s5_tn0 <= rn0 >> s4_ln0;
    // 6: subtract
    s6_p   <= s5_p;
    s6_q   <= s5_p - QW'(s5_tn0);
    s6_bad <= s5_p <= QW'(s5_tn0);
    // 7: normalise both denominators
    s7_a1  <= TAB_AW'(s6_q >> l1_c);
    s7_a2  <= TAB_AW'(s6_p >> l2_c);
    s7_l1  <= LW'(l1_c);
    s7_l2  <= LW'(l2_c);
    s7_bad <= s6_bad;
    // 8: R_ROM(Q), R_ROM(P)
    s8_l1  <= s7_l1;
    s8_l2  <= s7_l2;
    s8_bad <= s7_bad;
    // 9: shift back
    s9_e1  <= r1 >> s8_l1;
    s9_e2  <= r2 >> s8_l2;
    s9_bad <= s8_bad;
    // 10: add and saturate
    if (s9_bad || esum_c >= SW'(2**EW)) begin
      energy <= '1;
      sat    <= 1'b1;
    end else begin
      energy <= esum_c[EW-1:0];
      sat    <= 1'b0;
    end

    kd[0] <= k;
    for (int i = 1; i < 4; i++) kd[i] <= kd[i-1];
    n0d[0] <= n0;
    n0d[1] <= n0d[0];
    tag[0] <= in_tag;
    for (int i = 1; i < LATENCY; i++) tag[i] <= tag[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[LATENCY-2:0], in_valid};
  end

  assign out_valid = v[LATENCY-1];
  assign out_tag   = tag[LATENCY-1];

  r_rom u_rrom_b0 (.clk(clk), .addr(s1_ab0), .data(rb0));
  r_rom u_rrom_b1 (.clk(clk), .addr(s1_ab1), .data(rb1));
  r_rom u_rrom_n0 (.clk(clk), .addr(s3_an0), .data(rn0));
  r_rom u_rrom_q  (.clk(clk), .addr(s7_a1),  .data(r1));
  r_rom u_rrom_p  (.clk(clk), .addr(s7_a2),  .data(r2));
endmodule
