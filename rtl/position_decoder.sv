// position_decoder: finds the hit crystal(s) of an event from the eight X
// and eight Y discriminator pulses and their TDC widths.
//
// Event framing: an event opens when any of the 16 TDC channels becomes
// active and closes when all of them are idle again and SETTLE further clocks
// have passed; every channel that finished a pulse in between counts as a
// hit, with the width it measured. Then one decision is made:
//   * one X hit and one Y hit: a single-crystal (non-ICS) event at (x, y);
//   * one or two X hits with one or two Y hits, but not one of each: a
//     two-crystal inter-crystal scatter (ICS) event. The widest X pulse is
//     paired with the widest Y pulse and the narrower with the narrower,
//     since pulse width grows with deposited energy; the first pair is the
//     crystal with the larger deposit and is reported as the position. With
//     a single hit on one axis both crystals share that line.
//   * anything else (no hit on one axis, three or more on one axis): the
//     event is rejected; the design handles two-crystal ICS events only.
// When the two widths on an axis are exactly equal the order on that axis
// is picked by a free-running 16-bit LFSR, so the pairing is random.
//
// The decision rules, the widest-with-widest pairing and the random choice
// for equal hits follow the paper. The framing by activity, SETTLE, the
// LFSR and the crystal numbering idx = 8*y + x are this design's choices.
//
// Interface: inputs in the clk domain (already synchronised): act_x/act_y
// levels, done_x/done_y one-clock pulses, width_x/width_y stable when done
// pulses. Output: out_valid for one clock with pos and reject.
module position_decoder
  import pet_pkg::*;
#(
  parameter int unsigned WW     = WIDTHW,
  parameter int unsigned SETTLE = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NX-1:0]   act_x,
  input  logic [NY-1:0]   act_y,
  input  logic [NX-1:0]   done_x,
  input  logic [NY-1:0]   done_y,
  input  logic [WW-1:0]   width_x [NX],
  input  logic [WW-1:0]   width_y [NY],
  output logic            idle,
  output logic            out_valid,
  output logic            reject,
  output position_t       pos
);
  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_SETTLE} state_t;
  state_t state;

  assign idle = (state == S_IDLE);

  logic [NX-1:0] hit_x;
  logic [NY-1:0] hit_y;
  logic [WW-1:0] wx [NX];
  logic [WW-1:0] wy [NY];
  logic [$clog2(SETTLE+1)-1:0] settle_cnt;
  logic [15:0]   lfsr;

  // ---- decision, from the collected hits ---------------------------------
  logic [3:0]     nx_c, ny_c;
  logic [AXW-1:0] xa_c, xb_c, ya_c, yb_c;      // first and second hit line
  logic [AXW-1:0] xhi_c, xlo_c, yhi_c, ylo_c;  // ordered by width
  logic           ics_c, rej_c;
  position_t      pos_c;

  always_comb begin
    nx_c = '0; ny_c = '0;
    xa_c = '0; xb_c = '0; ya_c = '0; yb_c = '0;
    for (int i = NX-1; i >= 0; i--) if (hit_x[i]) begin
      xb_c = xa_c; xa_c = AXW'(i); nx_c++;
    end
    for (int i = NY-1; i >= 0; i--) if (hit_y[i]) begin
      yb_c = ya_c; ya_c = AXW'(i); ny_c++;
    end
    // xa_c is the lowest hit line, xb_c the next one
    if (nx_c == 1) xb_c = xa_c;
    if (ny_c == 1) yb_c = ya_c;

    if (wx[xa_c] > wx[xb_c] || (wx[xa_c] == wx[xb_c] && !lfsr[0])) begin
      xhi_c = xa_c; xlo_c = xb_c;
    end else begin
      xhi_c = xb_c; xlo_c = xa_c;
    end
    if (wy[ya_c] > wy[yb_c] || (wy[ya_c] == wy[yb_c] && !lfsr[1])) begin
      yhi_c = ya_c; ylo_c = yb_c;
    end else begin
      yhi_c = yb_c; ylo_c = ya_c;
    end

    rej_c = (nx_c == 0) || (ny_c == 0) || (nx_c > 2) || (ny_c > 2);
    ics_c = !rej_c && !(nx_c == 1 && ny_c == 1);
    pos_c.ics  = ics_c;
    pos_c.idx0 = {yhi_c, xhi_c};
    pos_c.idx1 = {ylo_c, xlo_c};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      hit_x      <= '0;
      hit_y      <= '0;
      settle_cnt <= '0;
      out_valid  <= 1'b0;
      reject     <= 1'b0;
      pos        <= '0;
      lfsr       <= 16'hACE1;
      for (int i = 0; i < NX; i++) wx[i] <= '0;
      for (int i = 0; i < NY; i++) wy[i] <= '0;
    end else begin
      lfsr      <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      out_valid <= 1'b0;

      for (int i = 0; i < NX; i++) if (done_x[i]) begin
        hit_x[i] <= 1'b1; wx[i] <= width_x[i];
      end
      for (int i = 0; i < NY; i++) if (done_y[i]) begin
        hit_y[i] <= 1'b1; wy[i] <= width_y[i];
      end

      unique case (state)
        S_IDLE:
          if (act_x != '0 || act_y != '0) state <= S_COLLECT;
        S_COLLECT:
          if (act_x == '0 && act_y == '0) begin
            state      <= S_SETTLE;
            settle_cnt <= '0;
          end
        S_SETTLE:
          if (act_x != '0 || act_y != '0) begin
            state <= S_COLLECT;             // a late pulse joins the event
          end else if (settle_cnt == ($bits(settle_cnt))'(SETTLE)) begin
            state     <= S_IDLE;
            out_valid <= 1'b1;
            reject    <= rej_c;
            pos       <= pos_c;
            hit_x     <= '0;
            hit_y     <= '0;
          end else begin
            settle_cnt <= settle_cnt + 1'b1;
          end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
