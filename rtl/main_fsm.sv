// main_fsm: main state machine of one channel (ping-pong bank manager).
//
// Each channel owns two banks of the dual-port RAM, B0 and B1. This machine
// keeps one state per bank:
//   FREE   - may be written (the write state machine's circular buffer)
//   DRAIN  - holds a complete event, but some of its words are still in the
//            bank's output FIFO on their way to the memory
//   FULL   - the event is entirely in memory and may be read out
// When the write state machine reports an event (`wr_ready`), that bank
// goes to DRAIN, then to FULL once its output FIFO is empty. If the other
// bank is FREE it becomes the write bank at once; otherwise the writer is
// left without a grant (`wr_en` low) until the read state machine reports a
// bank read (`rd_done`), which frees that bank and hands it to the writer.
// The read side is offered the older FULL bank (`rd_avail`, `rd_bank`) with
// its trigger address.
//
// Timing: all outputs are registered state or decoded from it; a report in
// cycle t is visible on the outputs in cycle t+1.
//
// The paper gives the behaviour (two banks per channel in ping-pong, the
// main machine tells the writer to continue in the second bank if it has
// been read). The DRAIN state, which keeps an event from being offered
// before its last words reach the memory, is this design's own.
module main_fsm
  import daq_pkg::*;
#(
  parameter int unsigned AW = BANK_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  // write state machine
  input  logic          wr_ready,
  input  logic          wr_ready_bank,
  input  logic [AW-1:0] wr_trig_addr,
  output logic          wr_en,           // the granted bank is free
  output logic          wr_bank,
  // bank output FIFOs
  input  logic [1:0]    fifo_empty,
  // read state machine
  output logic          rd_avail,        // a bank holds a complete event
  output logic          rd_bank,
  output logic [AW-1:0] rd_trig_addr,
  input  logic          rd_done          // `rd_bank` has been read
);
  typedef enum logic [1:0] {B_FREE, B_DRAIN, B_FULL} bstate_t;
  bstate_t       bst [2];
  logic [AW-1:0] taddr [2];
  logic          last_filled;           // bank that completed most recently
  logic          older;

  assign older        = ~last_filled;
  assign rd_bank      = (bst[older] == B_FULL) ? older : last_filled;
  assign rd_avail     = bst[rd_bank] == B_FULL;
  assign rd_trig_addr = taddr[rd_bank];
  assign wr_en        = bst[wr_bank] == B_FREE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bst[0]      <= B_FREE;
      bst[1]      <= B_FREE;
      taddr[0]    <= '0;
      taddr[1]    <= '0;
      last_filled <= 1'b1;
      wr_bank     <= 1'b0;
    end else begin
      // drained banks become readable
      for (int b = 0; b < 2; b++)
        if (bst[b] == B_DRAIN && fifo_empty[b]) bst[b] <= B_FULL;

      if (rd_done && rd_avail) begin
        bst[rd_bank] <= B_FREE;
        // a writer without a bank continues in the freed one
        if (!wr_en && !wr_ready) wr_bank <= rd_bank;
      end

      if (wr_ready) begin
        bst[wr_ready_bank]   <= B_DRAIN;
        taddr[wr_ready_bank] <= wr_trig_addr;
        last_filled          <= wr_ready_bank;
        if (bst[~wr_ready_bank] == B_FREE ||
            (rd_done && rd_avail && rd_bank == ~wr_ready_bank))
          wr_bank <= ~wr_ready_bank;
        else
          wr_bank <= wr_ready_bank;     // no grant until a bank is read
      end
    end
  end
endmodule
