// ptp_unit: the PTP hardware of a node: clock plus receive and transmit
// frame detectors, behind a small register bank for the CPU.
//
// All of it runs on the 125 MHz GMII clock (on a slave, the clock the PHY
// recovered from the master). The PTP software reads the receive and
// transmit timestamps of event frames, matches them by sequence id with
// the times carried in the protocol messages, computes the offset and
// corrects it through the OFFSET register; the rate needs no correction
// because the clocks are syntonised by the link.
//
// Register map (byte addresses, see daq_pkg), reads combinational:
//   0x00 SEC     R: seconds; the read latches the ns field for 0x04
//                W: seconds to load       0x04 NS  R: latched ns / W: ns to load
//   0x08 CTRL    W: bit0 load the time written, bit1 add OFFSET once
//   0x0C OFFSET  W: signed offset in ns
//   0x10 RX_STAT R: bit0 valid, bit1 overflow; W: release the timestamp
//   0x14/0x18/0x1C RX_SEC / RX_NS / RX_ID ({msg type, sequence id})
//   0x20..0x2C   the same for the transmit side
//
// The paper gives the parts (clock, Rx and Tx detector/timestamp, PPS, see
// its PTP block diagram); the register map is this design's.
module ptp_unit
  import daq_pkg::*;
#(
  parameter int unsigned NS_INC      = 8,
  parameter int unsigned PPS_HIGH_NS = 100_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // GMII, both directions, observed only
  input  logic        gmii_rx_dv,
  input  logic [7:0]  gmii_rxd,
  input  logic        gmii_tx_en,
  input  logic [7:0]  gmii_txd,
  // CPU bus
  input  logic [7:0]  addr,
  input  logic        wr,
  input  logic        rd,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  // time outputs
  output logic [31:0] sec,
  output logic [29:0] ns,
  output logic        pps,
  // one-cycle event pulses: {tx, rx}
  output logic [1:0]  sfd_seen,
  output logic [1:0]  kept,
  output logic [1:0]  cancelled
);
  logic [31:0] load_sec;
  logic [29:0] load_ns, ns_latch;
  logic signed [31:0] offset;
  logic        do_load, do_adj;
  logic [1:0]  release_ts, ts_valid, ts_ovf;
  ptp_ts_t     ts [2];

  ptp_clock #(.NS_INC(NS_INC), .PPS_HIGH_NS(PPS_HIGH_NS)) u_clock (
    .clk, .rst_n, .load(do_load), .load_sec, .load_ns,
    .adj(do_adj), .adj_ns(offset), .sec, .ns, .pps);

  ptp_frame_detector u_rx (
    .clk, .rst_n, .gmii_en(gmii_rx_dv), .gmii_d(gmii_rxd),
    .now_sec(sec), .now_ns(ns), .release_ts(release_ts[0]),
    .ts(ts[0]), .ts_valid(ts_valid[0]), .ts_ovf(ts_ovf[0]),
    .sfd_seen(sfd_seen[0]), .kept(kept[0]), .cancelled(cancelled[0]));

  ptp_frame_detector u_tx (
    .clk, .rst_n, .gmii_en(gmii_tx_en), .gmii_d(gmii_txd),
    .now_sec(sec), .now_ns(ns), .release_ts(release_ts[1]),
    .ts(ts[1]), .ts_valid(ts_valid[1]), .ts_ovf(ts_ovf[1]),
    .sfd_seen(sfd_seen[1]), .kept(kept[1]), .cancelled(cancelled[1]));

  assign do_load       = wr && addr == PTP_CTRL && wdata[0];
  assign do_adj        = wr && addr == PTP_CTRL && wdata[1];
  assign release_ts[0] = wr && addr == PTP_RX_STAT;
  assign release_ts[1] = wr && addr == PTP_TX_STAT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_sec <= '0;
      load_ns  <= '0;
      offset   <= '0;
      ns_latch <= '0;
    end else begin
      if (wr && addr == PTP_SEC)    load_sec <= wdata;
      if (wr && addr == PTP_NS)     load_ns  <= wdata[29:0];
      if (wr && addr == PTP_OFFSET) offset   <= wdata;
      if (rd && addr == PTP_SEC)    ns_latch <= ns;
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      PTP_SEC:     rdata = sec;
      PTP_NS:      rdata = {2'b00, ns_latch};
      PTP_RX_STAT: rdata = {30'd0, ts_ovf[0], ts_valid[0]};
      PTP_RX_SEC:  rdata = ts[0].sec;
      PTP_RX_NS:   rdata = {2'b00, ts[0].ns};
      PTP_RX_ID:   rdata = {12'd0, ts[0].msg_type, ts[0].seq_id};
      PTP_TX_STAT: rdata = {30'd0, ts_ovf[1], ts_valid[1]};
      PTP_TX_SEC:  rdata = ts[1].sec;
      PTP_TX_NS:   rdata = {2'b00, ts[1].ns};
      PTP_TX_ID:   rdata = {12'd0, ts[1].msg_type, ts[1].seq_id};
      default:     rdata = '0;
    endcase
  end
endmodule
