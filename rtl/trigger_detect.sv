// trigger_detect: trigger detection of one channel.
//
// Each new ADC sample is compared with the channel's trigger level register;
// the sample is passed on, one cycle later, tagged with `over` = 1 when it is
// strictly above the level. The write state machine starts an event on a
// tagged sample; below-threshold samples are simply overwritten in the
// circular buffer, which is the board's zero suppression.
//
// The paper gives the function (comparison with a threshold); the strict
// "greater than" on unsigned codes (positive pulses on a mid-range baseline)
// is this design's choice. `threshold` comes from the CPU's clock domain and
// is treated as static while acquisition runs.
module trigger_detect
  import daq_pkg::*;
#(
  parameter int unsigned W = ADC_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] threshold,
  input  logic [W-1:0] in_sample,
  input  logic         in_valid,
  output logic [W-1:0] out_sample,
  output logic         out_over,
  output logic         out_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sample <= '0;
      out_over   <= 1'b0;
      out_valid  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_sample <= in_sample;
        out_over   <= in_sample > threshold;
      end
    end
  end
endmodule
