// ptp_clock: seconds/nanoseconds time-of-day clock of a PTP node.
//
// Runs on the 125 MHz Gigabit Ethernet clock, so the nanosecond field
// advances by 8 ns per cycle (the 8 ns resolution of this PTP scheme) and
// wraps at 10**9 into the seconds field. On a slave the clock is the one
// recovered by the Gigabit PHY, which makes the rate equal to the master's:
// there is no rate (drift) adjustment, only the offset is corrected. The
// CPU can load a complete time (`load`, `load_sec`, `load_ns`) or add a
// signed offset in ns once (`adj`, `adj_ns`, |adj_ns| < 10**9), applied
// together with that cycle's increment. `pps` is high for the first
// PPS_HIGH_NS of every second.
//
// Timing: `sec`/`ns` are registers; a load or adjustment in cycle t shows
// in cycle t+1. A load wins over an adjustment in the same cycle.
//
// The paper gives the 125 MHz clock, the 8 ns resolution, the PPS output
// and offset-only correction; the load/adjust interface and the PPS width
// are this design's.
module ptp_clock #(
  parameter int unsigned NS_INC      = 8,            // ns per clock
  parameter int unsigned PPS_HIGH_NS = 100_000_000   // PPS pulse width
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] load_sec,
  input  logic [29:0] load_ns,
  input  logic        adj,
  input  logic signed [31:0] adj_ns,
  output logic [31:0] sec,
  output logic [29:0] ns,
  output logic        pps
);
  localparam logic signed [32:0] BILLION = 33'sd1_000_000_000;

  logic signed [32:0] nxt;

  always_comb begin
    nxt = $signed({3'b000, ns}) + 33'(NS_INC);
    if (adj) nxt = nxt + 33'(adj_ns);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sec <= '0;
      ns  <= '0;
    end else if (load) begin
      sec <= load_sec;
      ns  <= load_ns;
    end else if (nxt >= BILLION) begin
      sec <= sec + 32'd1;
      ns  <= 30'(nxt - BILLION);
    end else if (nxt < 0) begin
      sec <= sec - 32'd1;
      ns  <= 30'(nxt + BILLION);
    end else begin
      ns  <= 30'(nxt);
    end
  end

  assign pps = ns < 30'(PPS_HIGH_NS);
endmodule
