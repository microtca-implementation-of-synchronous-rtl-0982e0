// fifo_out_ctrl: FIFO-out controller, common to all channels.
//
// Moves the words waiting in the 2*N_CH bank output FIFOs into the external
// dual-port RAM, one word per clock. FIFO number f = 2*channel + bank is
// also the RAM bank number, so the RAM address is {f, address in bank}:
// the upper bits come from which FIFO was read, the lower ones from the
// word itself.
//
// Pipeline (one word per clock sustained):
//   cycle t   : a round-robin search over the FIFOs' empty flags picks the
//               first non-empty FIFO after the one served last and pops it;
//   cycle t+1 : the FIFO's registered output holds the word; the pop and
//               the FIFO number, delayed one stage, select it;
//   cycle t+2 : `dpram_we`, `dpram_addr`, `dpram_data` are registered
//               outputs to the RAM's write port.
// So the write enable is the pipelined read enable, as in the paper. With
// one word per clock and one sample per channel per ADC period, the memory
// clock must be at least N_CH times the ADC sample rate (32 x 2.5 MHz =
// 80 MHz on the board).
//
// The paper gives the function, the pipelining of empty/read-enable into
// the write enable, and the address composition; the round-robin polling
// order is this design's.
module fifo_out_ctrl
  import daq_pkg::*;
#(
  parameter int unsigned NCH = N_CH,
  parameter int unsigned AW  = BANK_AW,
  localparam int unsigned NF = 2 * NCH,
  localparam int unsigned FB = $clog2(NF),
  localparam int unsigned FW = AW + $bits(sample_t)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NF-1:0]        fifo_empty,
  input  logic [NF-1:0][FW-1:0] fifo_dout,
  output logic [NF-1:0]        fifo_pop,
  output logic                 dpram_we,
  output logic [FB+AW-1:0]     dpram_addr,
  output logic [MEM_W-1:0]     dpram_data
);
  logic [FB-1:0] last;        // FIFO served most recently
  logic [FB-1:0] pick;
  logic          found;
  logic          pop_q;
  logic [FB-1:0] sel_q;

  // round-robin: first non-empty FIFO after `last`
  always_comb begin
    found = 1'b0;
    pick  = last;
    for (int unsigned k = 1; k <= NF; k++) begin
      logic [FB-1:0] idx;
      idx = FB'((32'(last) + k) % NF);
      if (!found && !fifo_empty[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
    fifo_pop = '0;
    if (found) fifo_pop[pick] = 1'b1;
  end

  sample_t       word_s;
  logic [AW-1:0] word_a;
  assign {word_a, word_s} = fifo_dout[sel_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last       <= FB'(NF - 1);
      pop_q      <= 1'b0;
      sel_q      <= '0;
      dpram_we   <= 1'b0;
      dpram_addr <= '0;
      dpram_data <= '0;
    end else begin
      if (found) last <= pick;
      pop_q    <= found;
      sel_q    <= pick;
      dpram_we <= pop_q;
      if (pop_q) begin
        dpram_addr <= {sel_q, word_a};
        dpram_data <= mem_word(word_s);
      end
    end
  end
endmodule
