// daq_regs: registers through which the board's CPU runs the acquisition.
//
// The CPU's command server starts sampling, sets each channel's trigger
// level and the acquisition parameters here, and polls the bank status
// register, whose bit c is channel c's event flag. The channel holding the
// readout token is described in EVENT_INFO: valid bit, channel number,
// bank and trigger address, which together tell the CPU which RAM bank to
// send by DMA and where in its circular buffer the trigger sample lies.
// Writing 1 to READ_DONE tells the token holder that its bank has been
// read. LOST counts samples dropped because a channel had no free bank.
//
// Register map (byte addresses, see daq_pkg):
//   0x00 CTRL        RW  bit0 acquisition enable (reset 0)
//   0x04 POST        RW  samples stored from the trigger on (drift time)
//   0x08 BANK_STATUS R   event flag per channel
//   0x0C EVENT_INFO  R   bit31 valid, [24 +: 5] channel, bit16 bank,
//                        [AW-1:0] trigger address
//   0x10 READ_DONE   W   bit0: one-cycle `read_done` pulse
//   0x14 LOST        R   lost-sample counter (write clears)
//   0x80 + 4c THRESH RW  trigger level of channel c (reset all ones: no
//                        sample can exceed it, so nothing triggers)
// Reads are combinational from `addr`; writes take effect on the clock
// edge with `wr` high.
//
// The paper names the bank status register and lists what the commands
// set (start, thresholds, acquisition parameters); the map, the event-info
// register, the lost counter and the reset values are this design's.
module daq_regs
  import daq_pkg::*;
#(
  parameter int unsigned NCH          = N_CH,
  parameter int unsigned AW           = BANK_AW,
  parameter int unsigned POST_DEFAULT = 4096,
  localparam int unsigned CB          = $clog2(NCH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // CPU bus
  input  logic [7:0]                addr,
  input  logic                      wr,
  input  logic [31:0]               wdata,
  output logic [31:0]               rdata,
  // to the channels
  output logic                      acq_en,
  output logic [AW:0]               post_samples,
  output logic [NCH-1:0][ADC_W-1:0] threshold,
  output logic                      read_done,
  // from the channels
  input  logic [NCH-1:0]            event_flag,
  input  logic [NCH-1:0]            has_token,
  input  logic [NCH-1:0]            ev_bank,
  input  logic [NCH-1:0][AW-1:0]    ev_trig_addr,
  input  logic [NCH-1:0]            lost
);
  logic [31:0] lost_cnt;
  logic [31:0] event_info;
  logic [CB-1:0] holder;
  logic          is_thr;     // address inside the threshold table
  assign is_thr = {1'b0, addr} >= 9'(REG_THRESH0) &&
                  {1'b0, addr} <  9'(REG_THRESH0) + 9'(4 * NCH);

  // the token is one-hot over the channels
  always_comb begin
    holder = '0;
    for (int unsigned c = 0; c < NCH; c++)
      if (has_token[c]) holder = CB'(c);
    event_info = '0;
    event_info[31]        = |(has_token & event_flag);
    event_info[24 +: CB]  = holder;
    event_info[16]        = ev_bank[holder];
    event_info[AW-1:0]    = ev_trig_addr[holder];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acq_en       <= 1'b0;
      post_samples <= (AW+1)'(POST_DEFAULT);
      threshold    <= '1;
      read_done    <= 1'b0;
      lost_cnt     <= '0;
    end else begin
      read_done <= 1'b0;
      lost_cnt  <= lost_cnt + 32'($countones(lost));
      if (wr) begin
        unique case (addr) inside
          REG_CTRL:      acq_en       <= wdata[0];
          REG_POST:      post_samples <= wdata[AW:0];
          REG_READ_DONE: read_done    <= wdata[0];
          REG_LOST:      lost_cnt     <= '0;
          default:
            if (is_thr)
              threshold[(addr - REG_THRESH0) >> 2] <= wdata[ADC_W-1:0];
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr) inside
      REG_CTRL:        rdata[0]      = acq_en;
      REG_POST:        rdata[AW:0]   = post_samples;
      REG_BANK_STATUS: rdata[NCH-1:0] = event_flag;
      REG_EVENT_INFO:  rdata         = event_info;
      REG_LOST:        rdata         = lost_cnt;
      default:
        if (is_thr)
          rdata[ADC_W-1:0] = threshold[(addr - REG_THRESH0) >> 2];
    endcase
  end

  a_one_token: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0(has_token));
endmodule
