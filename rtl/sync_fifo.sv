// sync_fifo: single-clock FIFO, used as the per-bank output FIFO.
//
// Each channel has one for bank B0 and one for bank B1; they hold the words
// (address in bank + data) the write state machine produced until the
// common FIFO-out controller moves them to the dual-port RAM. The read port
// is registered (not show-ahead): `pop` in cycle t gives `dout` in cycle
// t+1, which is what lets the controller pipeline read and memory write.
// `empty`/`full` are registered and already reflect a push/pop of the
// previous cycle.
//
// The paper gives the FIFOs' role and content; depth and read timing are
// this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned AW    = 3      // depth = 2**AW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full
);
  logic [WIDTH-1:0] mem [2**AW];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic do_push, do_pop;

  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
      dout  <= '0;
    end else begin
      if (do_push) wptr <= wptr + AW'(1);
      if (do_pop) begin
        rptr <= rptr + AW'(1);
        dout <= mem[rptr];
      end
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assign empty = count == '0;
  assign full  = count == (AW+1)'(2**AW);
endmodule
