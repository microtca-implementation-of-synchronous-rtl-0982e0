// daq_pkg: constants and types shared by the AMC acquisition logic.
//
// The sizes follow the board: 32 ADC channels of 10 bits, an external
// dual-port RAM of 64 banks x 8192 words x 18 bits, two banks (ping-pong)
// per channel. The dual-port RAM address is {channel, bank, address in
// bank}, 5 + 1 + 13 = 19 bits (512K words). The 18-bit memory word layout
// and the CPU register map are this design's own choices.
package daq_pkg;

  localparam int unsigned N_CH       = 32;    // ADC channels per board
  localparam int unsigned ADC_W      = 10;    // AD9212 resolution
  localparam int unsigned BANK_DEPTH = 8192;  // words per dual-port RAM bank
  localparam int unsigned BANK_AW    = 13;    // log2(BANK_DEPTH)
  localparam int unsigned MEM_W      = 18;    // dual-port RAM word width

  // Sample as it leaves the trigger detection: ADC code plus over-threshold flag.
  typedef struct packed {
    logic             over;  // sample above the channel threshold
    logic [ADC_W-1:0] adc;
  } sample_t;

  // 18-bit word stored in the dual-port RAM: ADC code in bits [9:0],
  // over-threshold flag in bit 10, bits [17:11] zero.
  function automatic logic [MEM_W-1:0] mem_word(sample_t s);
    return {{(MEM_W - ADC_W - 1){1'b0}}, s.over, s.adc};
  endfunction

  // CPU register map of daq_regs (byte addresses, 32-bit registers).
  localparam logic [7:0] REG_CTRL        = 8'h00;  // bit0: acquisition enable
  localparam logic [7:0] REG_POST        = 8'h04;  // samples stored after a trigger
  localparam logic [7:0] REG_BANK_STATUS = 8'h08;  // one event flag per channel (RO)
  localparam logic [7:0] REG_EVENT_INFO  = 8'h0C;  // token holder's event (RO)
  localparam logic [7:0] REG_READ_DONE   = 8'h10;  // write: bank has been read
  localparam logic [7:0] REG_LOST        = 8'h14;  // samples dropped, no free bank (RO)
  localparam logic [7:0] REG_THRESH0     = 8'h80;  // + 4*channel: trigger level

  // PTP unit register map (byte addresses).
  localparam logic [7:0] PTP_SEC      = 8'h00;  // R: seconds (latches ns) / W: seconds to load
  localparam logic [7:0] PTP_NS       = 8'h04;  // R: latched ns / W: ns to load
  localparam logic [7:0] PTP_CTRL     = 8'h08;  // W bit0: load time, bit1: apply offset
  localparam logic [7:0] PTP_OFFSET   = 8'h0C;  // W: signed offset in ns
  localparam logic [7:0] PTP_RX_STAT  = 8'h10;  // R: {ovf, valid}; W: release timestamp
  localparam logic [7:0] PTP_RX_SEC   = 8'h14;
  localparam logic [7:0] PTP_RX_NS    = 8'h18;
  localparam logic [7:0] PTP_RX_ID    = 8'h1C;  // {msg type[3:0], sequence id[15:0]}
  localparam logic [7:0] PTP_TX_STAT  = 8'h20;
  localparam logic [7:0] PTP_TX_SEC   = 8'h24;
  localparam logic [7:0] PTP_TX_NS    = 8'h28;
  localparam logic [7:0] PTP_TX_ID    = 8'h2C;

  // A timestamp kept for one PTP event frame.
  typedef struct packed {
    logic [31:0] sec;
    logic [29:0] ns;
    logic [3:0]  msg_type;
    logic [15:0] seq_id;
  } ptp_ts_t;

endpackage
