// read_fsm: read state machine of one channel, one station of the token ring.
//
// `event_flag` (the channel's bit of the bank status register) is high
// whenever the main state machine has a complete event in one of the two
// banks. Readout is serialised by a token that travels round the ring of
// all channels: the channel holding it presents its event to the CPU
// (`has_token` high while `event_flag` is high) and keeps the token until
// the CPU acknowledges the read with `read_done`; it then reports the bank
// read to its main state machine (`bank_read`) and passes the token on
// (`token_out`). A channel that holds the token without an event passes it
// on at once. `read_done` is broadcast to all channels; only the token
// holder reacts to it.
//
// Timing: receiving the token (`token_in`, one-cycle pulse) and passing it
// take one clock each, so an idle ring circulates the token at one channel
// per clock. `token_out` and `bank_read` are one-cycle pulses.
//
// The paper gives the behaviour (event flag, token passed once the read is
// acknowledged, channels without a readable bank pass it on). The single
// token pulse per hop and the choice of channel 0 as first holder after
// reset are this design's.
module read_fsm #(
  parameter bit FIRST = 1'b0      // holds the token after reset
) (
  input  logic clk,
  input  logic rst_n,
  input  logic rd_avail,          // from main_fsm
  input  logic read_done,         // CPU acknowledge (broadcast)
  input  logic token_in,
  output logic token_out,
  output logic has_token,
  output logic event_flag,
  output logic bank_read          // to main_fsm: the offered bank was read
);
  logic holding;

  assign has_token  = holding;
  assign event_flag = rd_avail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      holding   <= FIRST;
      token_out <= 1'b0;
      bank_read <= 1'b0;
    end else begin
      token_out <= 1'b0;
      bank_read <= 1'b0;
      if (token_in) holding <= 1'b1;
      if (holding) begin
        if (!rd_avail) begin
          holding   <= 1'b0;
          token_out <= 1'b1;
        end else if (read_done) begin
          holding   <= 1'b0;
          token_out <= 1'b1;
          bank_read <= 1'b1;
        end
      end
    end
  end

  // only one token exists: it cannot arrive while it is here
  a_single_token: assert property (@(posedge clk) disable iff (!rst_n)
                                   token_in |-> !holding);
endmodule
