// amc_daq_top: FPGA logic of the 32-channel ADC Advanced Mezzanine Card.
//
// Acquisition: four octal ADCs deliver 32 serial LVDS lanes. Each lane has
// a channel receiver that keeps a circular buffer of its samples in two
// banks (ping-pong) of an external dual-port RAM, and freezes a bank when a
// sample exceeds the channel's threshold, after the post-trigger (drift
// time) samples. The channel receivers are joined in a token ring that lets
// the CPU read one event at a time. The FIFO-out controller is shared by
// all channels and writes one word per memory clock into the RAM at
// address {channel, bank, address in bank}. The CPU (outside this module)
// programs and polls the acquisition through `daq_regs` and sends each
// bank by DMA from the RAM's other port to the Gigabit MAC.
//
// Timing: PTP clock, frame detectors and their registers run on the 125 MHz
// GMII clock `clk_gmii`; everything else on the memory clock `clk_mem`,
// which must be at least N_CH times the ADC sample rate. Each ADC's lanes
// are deserialised on that ADC's bit clock.
//
// Interfaces brought out because the parts are outside the FPGA logic: the
// RAM's write port (`dpram_*`), the ADC lanes, the GMII bus between MAC and
// PCS (observed by the PTP detectors), and the two CPU register buses.
// `event_irq` is high while any channel has an event.
//
// Follows the paper: 32 channels in four groups of eight, two RAM banks per
// channel used as circular buffers in ping-pong, one FIFO-out controller
// for all channels, token-ring readout, PTP clock with Rx/Tx frame
// timestamping. This design's own: the clock-domain split, the register
// maps, and the default post-trigger length of 4096 samples.
module amc_daq_top
  import daq_pkg::*;
#(
  parameter int unsigned NCH          = N_CH,     // ADC channels
  parameter int unsigned CH_PER_ADC   = 8,        // channels per AD9212
  parameter int unsigned AW           = BANK_AW,  // address bits in a bank
  parameter int unsigned POST_DEFAULT = 4096,     // post-trigger samples
  parameter int unsigned IFIFO_AW     = 3,
  parameter int unsigned OFIFO_AW     = 3,
  localparam int unsigned NADC        = NCH / CH_PER_ADC,
  localparam int unsigned RAM_AW      = $clog2(2 * NCH) + AW
) (
  input  logic                 clk_mem,
  input  logic                 rst_n,
  // ADC mezzanine
  input  logic [NADC-1:0]      adc_dco,
  input  logic [NADC-1:0]      adc_fco,
  input  logic [NCH-1:0]       adc_sdata,
  // acquisition registers (CPU, memory clock domain)
  input  logic [7:0]           cpu_addr,
  input  logic                 cpu_wr,
  input  logic [31:0]          cpu_wdata,
  output logic [31:0]          cpu_rdata,
  output logic                 event_irq,
  // external dual-port RAM, write port
  output logic                 dpram_we,
  output logic [RAM_AW-1:0]    dpram_addr,
  output logic [MEM_W-1:0]     dpram_data,
  // GMII and PTP
  input  logic                 clk_gmii,
  input  logic                 rst_gmii_n,
  input  logic                 gmii_rx_dv,
  input  logic [7:0]           gmii_rxd,
  input  logic                 gmii_tx_en,
  input  logic [7:0]           gmii_txd,
  input  logic [7:0]           ptp_addr,
  input  logic                 ptp_wr,
  input  logic                 ptp_rd,
  input  logic [31:0]          ptp_wdata,
  output logic [31:0]          ptp_rdata,
  output logic [31:0]          ptp_sec,
  output logic [29:0]          ptp_ns,
  output logic                 pps
);
  localparam int unsigned FW = AW + $bits(sample_t);

  logic                      acq_en, read_done;
  logic [AW:0]               post_samples;
  logic [NCH-1:0][ADC_W-1:0] threshold;
  logic [NCH-1:0]            token, event_flag, has_token, ev_bank, lost;
  logic [NCH-1:0][AW-1:0]    ev_trig_addr;
  logic [2*NCH-1:0]          ofifo_pop, ofifo_empty;
  logic [2*NCH-1:0][FW-1:0]  ofifo_dout;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_receiver #(
      .AW(AW), .IFIFO_AW(IFIFO_AW), .OFIFO_AW(OFIFO_AW), .FIRST(c == 0)
    ) u_ch (
      .clk(clk_mem), .rst_n,
      .adc_dco(adc_dco[c / CH_PER_ADC]), .adc_fco(adc_fco[c / CH_PER_ADC]),
      .adc_sdata(adc_sdata[c]),
      .threshold(threshold[c]), .acq_en, .post_samples,
      .token_in(token[(c + NCH - 1) % NCH]), .token_out(token[c]),
      .read_done,
      .event_flag(event_flag[c]), .has_token(has_token[c]),
      .ev_bank(ev_bank[c]), .ev_trig_addr(ev_trig_addr[c]), .lost(lost[c]),
      .ofifo_pop(ofifo_pop[2*c +: 2]), .ofifo_empty(ofifo_empty[2*c +: 2]),
      .ofifo_dout(ofifo_dout[2*c +: 2]));
  end

  fifo_out_ctrl #(.NCH(NCH), .AW(AW)) u_fifo_out (
    .clk(clk_mem), .rst_n,
    .fifo_empty(ofifo_empty), .fifo_dout(ofifo_dout), .fifo_pop(ofifo_pop),
    .dpram_we, .dpram_addr, .dpram_data);

  daq_regs #(.NCH(NCH), .AW(AW), .POST_DEFAULT(POST_DEFAULT)) u_regs (
    .clk(clk_mem), .rst_n,
    .addr(cpu_addr), .wr(cpu_wr), .wdata(cpu_wdata), .rdata(cpu_rdata),
    .acq_en, .post_samples, .threshold, .read_done,
    .event_flag, .has_token, .ev_bank, .ev_trig_addr, .lost);

  assign event_irq = |event_flag;

  ptp_unit u_ptp (
    .clk(clk_gmii), .rst_n(rst_gmii_n),
    .gmii_rx_dv, .gmii_rxd, .gmii_tx_en, .gmii_txd,
    .addr(ptp_addr), .wr(ptp_wr), .rd(ptp_rd), .wdata(ptp_wdata),
    .rdata(ptp_rdata), .sec(ptp_sec), .ns(ptp_ns), .pps,
    .sfd_seen(), .kept(), .cancelled());   // event pulses: for monitoring only
endmodule
