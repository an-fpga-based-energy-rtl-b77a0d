// sync_2ff: two flip-flop synchroniser for a bundle of independent level
// signals entering the clk domain. Each bit is delayed by two clocks; bits
// are not kept coherent with each other, so only single-bit levels and
// toggles may pass through it. Reset clears both stages.
module sync_2ff #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
