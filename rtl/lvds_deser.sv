// lvds_deser: LVDS receiver of one AD9212 channel.
//
// The ADC sends each conversion as a serial word, most significant bit
// first, together with a bit clock (DCO) and a frame clock (FCO) whose
// rising edge marks the first bit of a word. This receiver runs on the bit
// clock, taking one bit per rising edge (the ADC's double-data-rate lane is
// assumed already split by the FPGA's LVDS input cell), shifts it into a
// register, and presents the W-bit sample with a one-cycle `valid` when the
// last bit of a framed word has arrived. Words seen before the first frame
// edge are discarded.
//
// Timing: `sample` and `valid` are registered on the bit-clock edge that
// samples the LSB and are visible during the following bit-clock cycle.
//
// The paper names this block and its job (deserialise the ADC data); bit
// order, framing by FCO and the single-edge sampling are this design's own.
module lvds_deser #(
  parameter int unsigned W = 10           // bits per ADC word
) (
  input  logic         dco,               // bit clock from the ADC
  input  logic         rst_n,             // asynchronous, active low
  input  logic         fco,               // frame clock, high at the MSB
  input  logic         sdata,             // serial data
  output logic [W-1:0] sample,
  output logic         valid
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-2:0]  shreg;
  logic [CW-1:0] cnt;      // bits of the current word already received
  logic          framed;   // a frame edge has been seen
  logic          fco_q;

  always_ff @(posedge dco or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      cnt    <= '0;
      framed <= 1'b0;
      fco_q  <= 1'b0;
      sample <= '0;
      valid  <= 1'b0;
    end else begin
      fco_q <= fco;
      shreg <= {shreg[W-3:0], sdata};
      valid <= 1'b0;
      if (fco && !fco_q) begin
        // this bit is the MSB of a new word
        cnt    <= CW'(1);
        framed <= 1'b1;
      end else if (framed && cnt == CW'(W - 1)) begin
        sample <= {shreg, sdata};
        valid  <= 1'b1;
        cnt    <= '0;
      end else if (cnt != '0) begin
        cnt <= cnt + CW'(1);
      end
    end
  end
endmodule
