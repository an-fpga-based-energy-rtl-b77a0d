// pet_pkg: constants, types and table functions shared by the energy
// correction processor of a multiplexed 8x8 one-to-one SiPM/LYSO PET module.
//
// The array size (8x8), the TDC structure (8 clock phases at 400 MHz), the
// parameter word (n,b) of 2x16 bits, the ADC code width k[13:0], the output
// energy E[9:0] and the two function tables (ln: 4096 x 14 bit holding
// 2^12*ln(x), reciprocal: 4096 x 20 bit holding 2^20/x) follow the paper.
// The fixed-point scale of b, the packet layout and the table-filling
// functions are this design's own choices.
package pet_pkg;

  // ---- detector geometry ------------------------------------------------
  localparam int unsigned NX = 8;               // X lines per module
  localparam int unsigned NY = 8;               // Y lines per module
  localparam int unsigned NCRYSTAL = NX * NY;   // 64 crystals
  localparam int unsigned IDXW = $clog2(NCRYSTAL);
  localparam int unsigned AXW  = $clog2(NX);

  // ---- TDC ---------------------------------------------------------------
  localparam int unsigned TDC_PHASES = 8;       // 0,45,...,315 degrees
  localparam int unsigned WIDTHW     = 12;      // pulse width in 312.5 ps bins

  // ---- energy path ---------------------------------------------------------
  localparam int unsigned KW    = 14;           // ADC code integral k[13:0]
  localparam int unsigned PW    = 16;           // n[15:0], b[15:0]
  localparam int unsigned EW    = 10;           // corrected energy E[9:0]
  localparam int unsigned B_FRAC = 16;          // b = keV per ADC code, Q0.16 in the non-ICS path

  // ---- function tables -------------------------------------------------------
  localparam int unsigned TAB_AW = 12;          // 4096 entries
  localparam int unsigned LROM_W = 14;          // 2^12*ln(x), kept modulo 2^14
  localparam int unsigned RROM_W = 20;          // 2^20/x
  localparam int unsigned LN_FRAC = 12;         // ln table scale 2^12
  localparam int unsigned RC_FRAC = 20;         // reciprocal table scale 2^20

  // Correction parameters of one crystal, one 32-bit E_RAM word.
  typedef struct packed {
    logic [PW-1:0] n;   // n = eps*N
    logic [PW-1:0] b;   // b = eps*B
  } corr_param_t;

  typedef logic [IDXW-1:0] crystal_idx_t;

  // Result of the position decoder for one event.
  typedef struct packed {
    logic         ics;     // two-crystal inter-crystal scatter event
    crystal_idx_t idx0;    // crystal with the larger deposit (the reported position)
    crystal_idx_t idx1;    // second crystal of an ICS event (equals idx0 otherwise)
  } position_t;

  // Output packet of one event (32 bits).
  typedef struct packed {
    logic [3:0]   module_id;
    logic [9:0]   reserved;
    logic         ics;
    logic         sat;      // energy saturated / out of table range
    crystal_idx_t crystal;
    logic [EW-1:0] energy;
  } packet_t;

  // Number of shifts that brings v below 2^TAB_AW (the lambda of the paper).
  function automatic int unsigned norm_shift(input logic [63:0] v);
    int unsigned msb;
    msb = 0;
    for (int i = 0; i < 64; i++) if (v[i]) msb = i;
    return (msb >= TAB_AW) ? msb - TAB_AW + 1 : 0;
  endfunction

  // round(2^12 * ln(x)) modulo 2^14. Evaluated once, when the table is
  // filled; the double-precision logarithm is far more exact than the 2^-12
  // step of the table, so the rounding is that of the exact value.
  function automatic logic [LROM_W-1:0] ln_entry(input int unsigned x);
    longint unsigned v;
    if (x == 0) return '0;
    v = longint'($rtoi($ln(real'(x)) * real'(1 << LN_FRAC) + 0.5));
    return v[LROM_W-1:0];
  endfunction

  // floor(2^20 / x), saturated to the 20-bit range (x = 0 and x = 1).
  function automatic logic [RROM_W-1:0] rc_entry(input int unsigned x);
    if (x <= 1) return '1;
    return RROM_W'((64'd1 << RC_FRAC) / 64'(x));
  endfunction

endpackage
