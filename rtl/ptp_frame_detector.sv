// ptp_frame_detector: PTP frame detector, identifier and timestamper.
//
// Watches one direction of the GMII bus (receive or transmit) byte by byte.
// When the start frame delimiter (0xD5 after at least one 0x55 preamble
// byte) is on the bus, the current time of the PTP clock is captured: this
// is the frame's timestamp, taken as close to the wire as the FPGA can. The
// rest of the frame is then parsed, counting bytes after the SFD:
//   12-13 EtherType 0x0800 (IPv4)   14 version/IHL 0x45 (no IP options)
//   23    IP protocol 17 (UDP)      36-37 UDP destination port = EVENT_PORT
//   42    PTP messageType (low nibble)     72-73 PTP sequenceId
// If all checks pass when byte 73 has been seen, the timestamp is kept with
// message type and sequence id (`ts`, `ts_valid`) until the CPU releases it
// (`release`); if the frame ends early or a check fails, the timestamp is
// cancelled. A frame kept while the previous timestamp is still unreleased
// is lost and sets `ts_ovf` (cleared by `release`).
//
// Event counters for the testbenches and the CPU: `sfd_seen`, `kept` and
// `cancelled` pulse once per frame.
//
// The paper gives the mechanism: SFD detection triggers the timestamp, UDP
// port and frame identifier validate it, non-PTP frames cancel it. Byte
// offsets follow IPv4/UDP and the PTP header (sequenceId sits at offset 30
// in both versions 1 and 2 of the protocol); the use of the version-2
// messageType, port 319 (event messages) and the one-entry holding register
// are this design's. VLAN-tagged frames are not recognised.
module ptp_frame_detector
  import daq_pkg::*;
#(
  parameter logic [15:0] EVENT_PORT = 16'd319
) (
  input  logic        clk,           // GMII clock, 125 MHz
  input  logic        rst_n,
  input  logic        gmii_en,       // RX_DV or TX_EN
  input  logic [7:0]  gmii_d,
  input  logic [31:0] now_sec,
  input  logic [29:0] now_ns,
  input  logic        release_ts,
  output ptp_ts_t     ts,
  output logic        ts_valid,
  output logic        ts_ovf,
  output logic        sfd_seen,
  output logic        kept,
  output logic        cancelled
);
  typedef enum logic [1:0] {S_IDLE, S_PREAMBLE, S_FRAME, S_TAIL} state_t;
  state_t      state;
  logic [6:0]  idx;          // byte index after the SFD
  logic        ok;           // all checks so far passed
  ptp_ts_t     cap;          // timestamp being validated

  logic        byte_ok;
  always_comb begin
    unique case (idx)
      7'd12:   byte_ok = gmii_d == 8'h08;
      7'd13:   byte_ok = gmii_d == 8'h00;
      7'd14:   byte_ok = gmii_d == 8'h45;
      7'd23:   byte_ok = gmii_d == 8'd17;
      7'd36:   byte_ok = gmii_d == EVENT_PORT[15:8];
      7'd37:   byte_ok = gmii_d == EVENT_PORT[7:0];
      default: byte_ok = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      ok        <= 1'b0;
      cap       <= '0;
      ts        <= '0;
      ts_valid  <= 1'b0;
      ts_ovf    <= 1'b0;
      sfd_seen  <= 1'b0;
      kept      <= 1'b0;
      cancelled <= 1'b0;
    end else begin
      sfd_seen  <= 1'b0;
      kept      <= 1'b0;
      cancelled <= 1'b0;
      if (release_ts) begin
        ts_valid <= 1'b0;
        ts_ovf   <= 1'b0;
      end

      unique case (state)
        S_IDLE:
          if (gmii_en && gmii_d == 8'h55) state <= S_PREAMBLE;
          else if (gmii_en)               state <= S_TAIL;
        S_PREAMBLE:
          if (!gmii_en)                   state <= S_IDLE;
          else if (gmii_d == 8'hD5) begin
            // start frame delimiter: take the timestamp now
            cap.sec  <= now_sec;
            cap.ns   <= now_ns;
            idx      <= '0;
            ok       <= 1'b1;
            sfd_seen <= 1'b1;
            state    <= S_FRAME;
          end else if (gmii_d != 8'h55)   state <= S_TAIL;
        S_FRAME:
          if (!gmii_en) begin
            cancelled <= 1'b1;            // frame too short for PTP
            state     <= S_IDLE;
          end else begin
            idx <= idx + 7'd1;
            if (!byte_ok) ok <= 1'b0;
            if (idx == 7'd42) cap.msg_type     <= gmii_d[3:0];
            if (idx == 7'd72) cap.seq_id[15:8] <= gmii_d;
            if (idx == 7'd73) begin
              if (ok) begin
                kept <= 1'b1;
                if (ts_valid && !release_ts) ts_ovf <= 1'b1;
                else begin
                  ts          <= cap;
                  ts.seq_id   <= {cap.seq_id[15:8], gmii_d};
                  ts_valid    <= 1'b1;
                end
              end else begin
                cancelled <= 1'b1;
              end
              state <= S_TAIL;
            end
          end
        default:                          // S_TAIL: wait for the frame end
          if (!gmii_en) state <= S_IDLE;
      endcase
    end
  end
endmodule
