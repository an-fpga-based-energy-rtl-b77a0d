// energy_integration: integrates the summed module signal from the ADC into
// the energy code k of one event.
//
// The ADC delivers one 12-bit sample per adc_valid strobe (50 Msps, i.e. on
// every second 100 MHz clock). The samples pass a PRETRIG-sample delay line
// so that the integration, started by the event trigger, also covers the
// rising edge that preceded the discriminator firing and the synchronisation
// delay. From the trigger on, NSAMP delayed samples are summed after the
// baseline is subtracted (negative differences count as zero). The sum is
// shifted right by KSHIFT and saturated to the 14-bit k.
//
// The paper names this processor and its output k[13:0] and gives the ADC
// rate; the window, pre-trigger delay, baseline handling and scaling are this
// design's own simplest choices. A trigger that arrives while a window is
// open is ignored (pile-up is not handled).
//
// Timing: k_valid pulses for one clock after the NSAMP-th sample of the
// window has been added.
module energy_integration
  import pet_pkg::*;
#(
  parameter int unsigned ADCW    = 12,
  parameter int unsigned NSAMP   = 16,
  parameter int unsigned PRETRIG = 4,
  parameter int unsigned KSHIFT  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            adc_valid,
  input  logic [ADCW-1:0] adc_data,
  input  logic [ADCW-1:0] baseline,
  input  logic            trigger,
  output logic            busy,
  output logic            k_valid,
  output logic [KW-1:0]   k
);
  localparam int unsigned SUMW = ADCW + $clog2(NSAMP) + 1;

  logic [ADCW-1:0] dly [PRETRIG];
  logic [SUMW-1:0] sum;
  logic [$clog2(NSAMP+1)-1:0] cnt;
  logic [ADCW-1:0] net_c;
  logic [SUMW-1:0] sum_next_c, k_full_c;

  always_comb begin
    net_c      = (dly[PRETRIG-1] > baseline) ? dly[PRETRIG-1] - baseline : '0;
    sum_next_c = sum + SUMW'(net_c);
    k_full_c   = sum_next_c >> KSHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PRETRIG; i++) dly[i] <= '0;
      sum     <= '0;
      cnt     <= '0;
      busy    <= 1'b0;
      k_valid <= 1'b0;
      k       <= '0;
    end else begin
      k_valid <= 1'b0;
      if (adc_valid) begin
        dly[0] <= adc_data;
        for (int i = 1; i < PRETRIG; i++) dly[i] <= dly[i-1];
      end
      if (!busy && trigger) begin
        busy <= 1'b1;
        sum  <= '0;
        cnt  <= '0;
      end else if (busy && adc_valid) begin
        sum <= sum_next_c;
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(NSAMP - 1)) begin
          busy    <= 1'b0;
          k_valid <= 1'b1;
          k       <= (k_full_c >= SUMW'(2**KW)) ? '1 : k_full_c[KW-1:0];
        end
      end
    end
  end
endmodule
