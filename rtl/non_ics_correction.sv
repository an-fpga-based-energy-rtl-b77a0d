// non_ics_correction: energy correction of a single-crystal (non-ICS) event.
//
// Computes the inverted SiPM saturation model
//     E = n * [ ln(n) - ln(n - b*k) ]
// with the logarithm taken from two L_ROM look-ups. Both ROM arguments are
// brought below 4096 by the same right shift lambda, chosen from n, so the
// difference of the two logarithms is unchanged:
//     E = ( n * { L[n >> lambda] - L[(n - b*k) >> lambda] } ) >> 12
// Structure, table sizes and the 5-cycle latency follow the paper's datapath
// figure (2 cycles multiply/subtract, 2 cycles shift/L_ROM, 1 cycle
// subtract/multiply/shift).
//
// Number formats (this design's choice, the paper gives only the widths):
// n is an unsigned integer in keV, b is keV per ADC code in Q0.16, k is the
// 14-bit ADC integral, so b*k >> 16 is in keV like n. E is 10 bits (keV).
// sat is raised, and E forced to 1023, when b*k >= n (no logarithm), when
// the shifted argument of the second look-up is zero, when n/(n-b*k) >= 54
// (the 14-bit log difference could wrap) or when E does not fit 10 bits.
//
// Interface: in_valid with n, b, k and an opaque tag; out_valid, E, sat and
// the tag exactly LATENCY = 5 clocks later. Fully pipelined, one event per
// clock.
module non_ics_correction
  import pet_pkg::*;
#(
  parameter int unsigned TAGW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [PW-1:0]   n,
  input  logic [PW-1:0]   b,
  input  logic [KW-1:0]   k,
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output logic [EW-1:0]   energy,
  output logic            sat,
  output logic [TAGW-1:0] out_tag
);
  localparam int unsigned LATENCY = 5;

  logic [LATENCY-1:0] v;
  logic [TAGW-1:0]    tag [LATENCY];

  // stage 1: b*k
  logic [PW+KW-1:0] s1_prod;
  logic [PW-1:0]    s1_n;
  // stage 2: n - b*k
  logic [PW-1:0]    s2_n, s2_m;
  logic             s2_bad;
  // stage 3: normalising shift -> ROM addresses
  logic [PW-1:0]    s3_n;
  logic [TAB_AW-1:0] s3_an, s3_am;
  logic             s3_bad;
  // stage 4: ROM outputs (registered inside the ROMs)
  logic [PW-1:0]    s4_n;
  logic             s4_bad;
  logic [LROM_W-1:0] ln_n, ln_m;

  logic [PW+KW-1:0]  bk_full;
  logic [PW-1:0]     s2_m_c;
  logic              s2_bad_c;
  int unsigned       lam;
  logic [PW-1:0]     an_c, am_c;
  logic              ratio_bad_c;
  logic [LROM_W-1:0] diff;
  logic [PW+LROM_W-1:0] e_full;

  always_comb begin
    bk_full  = s1_prod >> B_FRAC;
    s2_bad_c = (bk_full >= (PW+KW)'(s1_n));
    s2_m_c   = s1_n - bk_full[PW-1:0];

    lam  = norm_shift(64'(s2_n));
    an_c = s2_n >> lam;
    am_c = s2_m >> lam;
    // n/(n-b*k) >= 54 keeps the log difference inside 14 bits
    ratio_bad_c = ((PW+6)'(am_c) * (PW+6)'(54)) <= (PW+6)'(an_c);

    diff   = ln_n - ln_m;                      // modulo 2^14
    e_full = ((PW+LROM_W)'(s4_n) * (PW+LROM_W)'(diff)) >> LN_FRAC;
  end

  always_ff @(posedge clk) begin
    s1_prod <= b * k;
    s1_n    <= n;

    s2_n    <= s1_n;
    s2_m    <= s2_m_c;
    s2_bad  <= s2_bad_c;

    s3_n    <= s2_n;
    s3_an   <= an_c[TAB_AW-1:0];
    s3_am   <= am_c[TAB_AW-1:0];
    s3_bad  <= s2_bad || ratio_bad_c || (am_c == '0);

    s4_n    <= s3_n;
    s4_bad  <= s3_bad;

    if (s4_bad || (e_full >= (PW+LROM_W)'(2**EW))) begin
      energy <= '1;
      sat    <= 1'b1;
    end else begin
      energy <= e_full[EW-1:0];
      sat    <= 1'b0;
    end

    tag[0] <= in_tag;
    for (int i = 1; i < LATENCY; i++) tag[i] <= tag[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[LATENCY-2:0], in_valid};
  end

  assign out_valid = v[LATENCY-1];
  assign out_tag   = tag[LATENCY-1];

  l_rom u_lrom_n (.clk(clk), .addr(s3_an), .data(ln_n));
  l_rom u_lrom_m (.clk(clk), .addr(s3_am), .data(ln_m));
endmodule
