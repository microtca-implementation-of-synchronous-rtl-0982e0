// channel_receiver: everything that belongs to one ADC channel.
//
// Data path: the LVDS receiver deserialises the ADC's serial words on the
// ADC bit clock; the trigger detection tags each sample that is above the
// channel's threshold; the input FIFO carries sample and tag into the
// memory clock domain; the write state machine writes them, with their
// address inside the bank, into the output FIFO of the active bank (B0 or
// B1), from which the common FIFO-out controller moves them to the
// dual-port RAM. Control: the main state machine switches the two banks in
// ping-pong, the read state machine raises the channel's event flag and
// takes part in the token ring that serialises readout by the CPU.
//
// Interface: serial ADC lane (`adc_dco`, `adc_fco`, `adc_sdata`); the
// channel's settings (`threshold`, `acq_en`, `post_samples`); the token
// ring (`token_in`, `token_out`, broadcast `read_done`); the event presented
// to the CPU (`event_flag`, `has_token`, `ev_bank`, `ev_trig_addr`); the two
// output FIFOs' read ports (`ofifo_*`, registered read: data one cycle
// after `ofifo_pop`), each word being {address in bank, over flag, ADC code}.
//
// Structure and names follow the paper's channel receiver diagram; FIFO
// depths and word layout are this design's choices.
module channel_receiver
  import daq_pkg::*;
#(
  parameter int unsigned AW       = BANK_AW,  // address bits inside a bank
  parameter int unsigned IFIFO_AW = 3,        // input FIFO depth 2**IFIFO_AW
  parameter int unsigned OFIFO_AW = 3,        // output FIFO depth 2**OFIFO_AW
  parameter bit          FIRST    = 1'b0,     // first token holder
  localparam int unsigned FW      = AW + $bits(sample_t)
) (
  input  logic                  clk,          // memory clock
  input  logic                  rst_n,
  // ADC lane
  input  logic                  adc_dco,
  input  logic                  adc_fco,
  input  logic                  adc_sdata,
  // settings
  input  logic [ADC_W-1:0]      threshold,
  input  logic                  acq_en,
  input  logic [AW:0]           post_samples,
  // token ring and CPU
  input  logic                  token_in,
  output logic                  token_out,
  input  logic                  read_done,
  output logic                  event_flag,
  output logic                  has_token,
  output logic                  ev_bank,
  output logic [AW-1:0]         ev_trig_addr,
  output logic                  lost,
  // bank output FIFOs towards the FIFO-out controller
  input  logic [1:0]            ofifo_pop,
  output logic [1:0]            ofifo_empty,
  output logic [1:0][FW-1:0]    ofifo_dout
);
  // ---- ADC bit-clock domain ----
  logic [ADC_W-1:0] des_sample, trg_sample;
  logic             des_valid, trg_valid, trg_over;
  logic             ififo_full;

  lvds_deser #(.W(ADC_W)) u_lvds (
    .dco(adc_dco), .rst_n, .fco(adc_fco), .sdata(adc_sdata),
    .sample(des_sample), .valid(des_valid));

  trigger_detect #(.W(ADC_W)) u_trig (
    .clk(adc_dco), .rst_n, .threshold,
    .in_sample(des_sample), .in_valid(des_valid),
    .out_sample(trg_sample), .out_over(trg_over), .out_valid(trg_valid));

  // ---- crossing ----
  sample_t ififo_wdata, ififo_rdata;
  logic    ififo_empty, ififo_rd;
  assign ififo_wdata = '{over: trg_over, adc: trg_sample};

  async_fifo #(.WIDTH($bits(sample_t)), .AW(IFIFO_AW)) u_ififo (
    .wclk(adc_dco), .rclk(clk), .rst_n,
    .wr(trg_valid), .wdata(ififo_wdata), .full(ififo_full),
    .rd(ififo_rd), .rdata(ififo_rdata), .empty(ififo_empty));

  // ---- memory clock domain ----
  logic [1:0]    push, ofifo_full;
  logic [AW-1:0] wr_addr, wr_trig_addr;
  sample_t       wr_sample;
  logic          bank_en, wbank, wr_ready, wr_ready_bank;
  logic          rd_avail, bank_read;

  write_fsm #(.AW(AW)) u_wsm (
    .clk, .rst_n, .acq_en, .post_samples,
    .in_valid(!ififo_empty), .in_sample(ififo_rdata), .in_pop(ififo_rd),
    .push, .wr_addr, .wr_sample,
    .bank_en, .bank(wbank), .ready(wr_ready), .ready_bank(wr_ready_bank),
    .trig_addr(wr_trig_addr), .lost);

  main_fsm #(.AW(AW)) u_msm (
    .clk, .rst_n,
    .wr_ready, .wr_ready_bank, .wr_trig_addr,
    .wr_en(bank_en), .wr_bank(wbank),
    .fifo_empty(ofifo_empty),
    .rd_avail, .rd_bank(ev_bank), .rd_trig_addr(ev_trig_addr),
    .rd_done(bank_read));

  read_fsm #(.FIRST(FIRST)) u_rsm (
    .clk, .rst_n, .rd_avail, .read_done,
    .token_in, .token_out, .has_token, .event_flag, .bank_read);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sync_fifo #(.WIDTH(FW), .AW(OFIFO_AW)) u_ofifo (
      .clk, .rst_n,
      .push(push[b]), .din({wr_addr, wr_sample}),
      .pop(ofifo_pop[b]), .dout(ofifo_dout[b]),
      .empty(ofifo_empty[b]), .full(ofifo_full[b]));

    // the FIFO-out controller must keep up with the ADC
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(push[b] && ofifo_full[b]));
  end

  a_ififo_no_overflow: assert property (@(posedge adc_dco) disable iff (!rst_n)
                                        !(trg_valid && ififo_full));
endmodule
