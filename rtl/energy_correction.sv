// energy_correction: the energy correction unit of one detector module:
// parameter memory E_RAM, the single-crystal (non-ICS) and the two-crystal
// (ICS) correction pipelines, and the selection between them by the ICS flag.
//
// An accepted event (crystal indices, ICS flag, energy code k) is held one
// clock in a register stage while E_RAM is read at both crystal indices.
// It then enters the pipeline chosen by its ICS flag: non-ICS with (n, b)
// of the hit crystal, 5 clocks; ICS with n0 of the larger-deposit crystal
// and b0, b1 of both, 10 clocks. Results leave in the order the events came
// in: a non-ICS event waits in the register stage while an ICS event that
// entered fewer than 5 clocks earlier is still ahead of it (in_ready is low
// then). This stall is this design's choice; the memory, the two pipelines
// and the selection by the ICS flag follow the paper. The formula needs no
// n1, so the upper half of the second read port's word is unused.
//
// Interface: in_valid/in_ready handshake with pos and k; out_valid pulses
// with energy, sat and the event's reported crystal and ICS flag. The host
// writes (n, b) of crystal wr_addr through wr_en/wr_data.
// Latency from acceptance: 6 clocks (non-ICS) or 11 clocks (ICS).
module energy_correction
  import pet_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  position_t     pos,
  input  logic [KW-1:0] k,
  input  logic          wr_en,
  input  crystal_idx_t  wr_addr,
  input  corr_param_t   wr_data,
  output logic          out_valid,
  output logic [EW-1:0] energy,
  output logic          sat,
  output logic          out_ics,
  output crystal_idx_t  out_crystal
);
  localparam int unsigned TAGW = 1 + IDXW;

  logic          r_valid;
  position_t     r_pos;
  logic [KW-1:0] r_k;
  logic [4:0]    ics_hist;          // ICS entries in the last 5 clocks
  logic          stall, issue, accept;
  corr_param_t   p0, p1;
  crystal_idx_t  rd0, rd1;

  assign stall    = r_valid && !r_pos.ics && (ics_hist != '0);
  assign issue    = r_valid && !stall;
  assign in_ready = !r_valid || issue;
  assign accept   = in_valid && in_ready;
  assign rd0      = accept ? pos.idx0 : r_pos.idx0;
  assign rd1      = accept ? pos.idx1 : r_pos.idx1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid  <= 1'b0;
      r_pos    <= '0;
      r_k      <= '0;
      ics_hist <= '0;
    end else begin
      ics_hist <= {ics_hist[3:0], issue && r_pos.ics};
      if (accept) begin
        r_valid <= 1'b1;
        r_pos   <= pos;
        r_k     <= k;
      end else if (issue) begin
        r_valid <= 1'b0;
      end
    end
  end

  e_ram u_eram (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr0(rd0), .rd_addr1(rd1), .rd_data0(p0), .rd_data1(p1)
  );

  logic            nv, iv;
  logic [EW-1:0]   ne, ie;
  logic            ns, is;
  logic [TAGW-1:0] nt, it;

  non_ics_correction #(.TAGW(TAGW)) u_non_ics (
    .clk(clk), .rst_n(rst_n),
    .in_valid(issue && !r_pos.ics), .n(p0.n), .b(p0.b), .k(r_k),
    .in_tag({1'b0, r_pos.idx0}),
    .out_valid(nv), .energy(ne), .sat(ns), .out_tag(nt)
  );

  ics_correction #(.TAGW(TAGW)) u_ics (
    .clk(clk), .rst_n(rst_n),
    .in_valid(issue && r_pos.ics), .n0(p0.n), .b0(p0.b), .b1(p1.b), .k(r_k),
    .in_tag({1'b1, r_pos.idx0}),
    .out_valid(iv), .energy(ie), .sat(is), .out_tag(it)
  );

  always_comb begin
    out_valid   = nv || iv;
    energy      = iv ? ie : ne;
    sat         = iv ? is : ns;
    {out_ics, out_crystal} = iv ? it : nt;
  end

  // the ordering rule above guarantees the two pipelines never finish together
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(nv && iv));
endmodule
