// write_fsm: write state machine of one channel.
//
// Takes samples from the input FIFO (show-ahead: `in_valid`/`in_sample`,
// `in_pop`) and, while acquisition is enabled and the main state machine
// grants a bank (`bank_en`, `bank`), writes every sample with its address
// in the bank into that bank's output FIFO. The address counter wraps at
// the bank size, so the bank is a circular buffer: while no sample is over
// threshold the oldest samples are overwritten by the newest.
//
// A sample tagged over-threshold starts an event: its address is kept as
// the trigger address and the machine stores `post_samples` samples counted
// from the trigger sample (the TPC drift time), then stops, pulses `ready`
// with `trig_addr` to the main state machine, and waits for a bank grant.
// What is left of the buffer before the trigger address holds the
// pre-trigger samples. Samples that arrive while no bank is granted are
// dropped and signalled on `lost`. A trigger during the post-trigger window
// does not restart it.
//
// Timing: at most one sample per clock. `push`, `wr_addr` and `wr_sample`
// are combinational in the cycle the sample is consumed. `ready` is a
// one-cycle pulse in the cycle after the last sample is pushed; the machine
// then spends one cycle in S_DONE so that the main state machine's new
// grant is in place before it writes again.
//
// Follows the paper: circular buffer, trigger address, drift-time window,
// switch to the other bank granted by the main state machine. This design's
// own: samples are dropped while no bank is free, and the post-trigger
// length counts the trigger sample.
module write_fsm
  import daq_pkg::*;
#(
  parameter int unsigned AW = BANK_AW      // address bits inside a bank
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          acq_en,
  input  logic [AW:0]   post_samples,     // 1 .. 2**AW
  // from the input FIFO
  input  logic          in_valid,
  input  sample_t       in_sample,
  output logic          in_pop,
  // to the bank output FIFOs
  output logic [1:0]    push,             // one-hot, bank 0 / bank 1
  output logic [AW-1:0] wr_addr,
  output sample_t       wr_sample,
  // main state machine
  input  logic          bank_en,          // granted bank is free to write
  input  logic          bank,             // granted bank
  output logic          ready,            // event complete in `ready_bank`
  output logic          ready_bank,
  output logic [AW-1:0] trig_addr,
  output logic          lost              // a sample was dropped
);
  typedef enum logic [1:0] {S_ARMED, S_POST, S_DONE} state_t;
  state_t        state;
  logic [AW-1:0] addr;
  logic [AW:0]   remain;
  logic          cur_bank;
  logic          writing;

  // every sample is consumed, written or dropped, except in the one-cycle
  // S_DONE pause, where it waits for the new grant
  assign in_pop  = in_valid && state != S_DONE;
  assign writing = in_valid && acq_en && (state == S_POST ||
                   (state == S_ARMED && bank_en));

  always_comb begin
    push = '0;
    if (writing) push[state == S_POST ? cur_bank : bank] = 1'b1;
    wr_addr   = addr;
    wr_sample = in_sample;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_ARMED;
      addr       <= '0;
      remain     <= '0;
      cur_bank   <= 1'b0;
      trig_addr  <= '0;
      ready      <= 1'b0;
      ready_bank <= 1'b0;
      lost       <= 1'b0;
    end else begin
      ready <= 1'b0;
      lost  <= in_pop && acq_en && !writing;
      case (state)
        S_ARMED: if (writing) begin
          cur_bank <= bank;
          addr     <= addr + AW'(1);
          if (in_sample.over) begin
            trig_addr <= addr;
            if (post_samples <= (AW+1)'(1)) begin
              ready      <= 1'b1;
              ready_bank <= bank;
              state      <= S_DONE;
            end else begin
              remain <= post_samples - (AW+1)'(1);
              state  <= S_POST;
            end
          end
        end
        S_POST: if (writing) begin
          addr   <= addr + AW'(1);
          remain <= remain - (AW+1)'(1);
          if (remain == (AW+1)'(1)) begin
            ready      <= 1'b1;
            ready_bank <= cur_bank;
            state      <= S_DONE;
          end
        end
        default: state <= S_ARMED;
      endcase
    end
  end
endmodule
