// packager: joins the crystal index of each event with its corrected energy
// and forms the 32-bit output packet.
//
// The crystal index and ICS flag are known as soon as the position decoder
// has decided, well before the energy leaves the correction pipelines, so
// they wait in a small FIFO (DEPTH entries). Each corrected energy pops the
// oldest entry; since the correction unit keeps events in order, the two
// belong to the same event. The packet carries the module number, the ICS
// flag, a saturation flag, the crystal index and the 10-bit energy (layout in
// pet_pkg::packet_t).
//
// That crystal index and corrected energy are combined into a packet follows
// the paper's block diagram; the FIFO and the packet layout are this design's
// choices. idx_valid must not be asserted when idx_ready is low, and every
// energy must have an index waiting (both checked by assertions).
//
// Timing: pkt_valid one clock after e_valid.
module packager
  import pet_pkg::*;
#(
  parameter int unsigned DEPTH     = 4,
  parameter logic [3:0]  MODULE_ID = 4'd0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          idx_valid,
  output logic          idx_ready,
  input  logic          idx_ics,
  input  crystal_idx_t  idx,
  input  logic          e_valid,
  input  logic [EW-1:0] energy,
  input  logic          e_sat,
  output logic          pkt_valid,
  output packet_t       pkt
);
  localparam int unsigned PTRW = $clog2(DEPTH);

  logic [IDXW:0]   fifo [DEPTH];   // {ics, crystal}
  logic [PTRW-1:0] wp, rp;
  logic [PTRW:0]   count;
  logic            push, pop;

  assign idx_ready = (count != (PTRW+1)'(DEPTH));
  assign push      = idx_valid && idx_ready;
  assign pop       = e_valid && (count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      rp        <= '0;
      count     <= '0;
      pkt_valid <= 1'b0;
      pkt       <= '0;
      for (int i = 0; i < DEPTH; i++) fifo[i] <= '0;
    end else begin
      pkt_valid <= pop;
      if (push) begin
        fifo[wp] <= {idx_ics, idx};
        wp       <= (wp == PTRW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        rp <= (rp == PTRW'(DEPTH-1)) ? '0 : rp + 1'b1;
        pkt.module_id <= MODULE_ID;
        pkt.reserved  <= '0;
        pkt.ics       <= fifo[rp][IDXW];
        pkt.sat       <= e_sat;
        pkt.crystal   <= fifo[rp][IDXW-1:0];
        pkt.energy    <= energy;
      end
      count <= count + (PTRW+1)'(push) - (PTRW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) idx_valid |-> idx_ready);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) e_valid |-> count != '0);
endmodule
