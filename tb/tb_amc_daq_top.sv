// tb_amc_daq_top: the whole board logic at its default size (32 channels,
// 8K-word banks), end to end.
//
// Four serial ADC models send 2.5 MS/s samples on a common 25 MHz bit
// clock; the memory clock is 80 MHz, exactly 32 times the sample rate, the
// minimum that lets the FIFO-out controller keep up. A CPU model programs
// thresholds and a 100-sample post-trigger window through the registers,
// starts acquisition, then polls EVENT_INFO: for each event it reads the
// bank from the RAM model and checks the trigger sample, the post-trigger
// samples and 50 pre-trigger samples against the ADC sequence, and writes
// READ_DONE. Each channel sends two pulses; channel 5 sends four, timed so
// that while the CPU is busy (samples 400-700) both its banks fill and
// samples are lost, including one pulse, which must produce no event.
// Meanwhile the PTP unit gets a Sync frame on receive, a Delay_Req on
// transmit and a non-PTP frame, has its time loaded just before a second
// boundary and an offset applied.
// Mechanisms counted, each must occur: events read, events in bank 1
// (ping-pong), banks waiting for their output FIFO to drain, token hops
// over channels without an event, lost samples, 32 RAM writes in a row,
// PTP timestamps kept and cancelled, PPS edge, offset correction.
module tb_amc_daq_top;
  import daq_pkg::*;
  localparam int NCH = 32, AW = 13, POST = 100, PRE_CHECK = 50;
  localparam int RAM_AW = 6 + AW;
  logic clk = 0, dco = 0, rst_n = 0, run = 0;
  logic clk_g = 0, rst_g_n = 0;
  logic [3:0] fco;
  logic [NCH-1:0] sdata;
  int idx [4];
  logic [3:0][7:0][ADC_W-1:0] samples;
  logic [7:0] cpu_addr = '0;
  logic cpu_wr = 0;
  logic [31:0] cpu_wdata = '0, cpu_rdata;
  logic event_irq, dpram_we;
  logic [RAM_AW-1:0] dpram_addr, raddr = '0;
  logic [MEM_W-1:0] dpram_data, rdata;
  logic rx_dv = 0, tx_en = 0, ptp_wr = 0, ptp_rd = 0;
  logic [7:0] rxd = '0, txd = '0, ptp_addr = '0;
  logic [31:0] ptp_wdata = '0, ptp_rdata, ptp_sec;
  logic [29:0] ptp_ns;
  logic pps;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_events = 0, n_bank1 = 0, n_drain = 0, n_skip = 0, n_lost = 0;
  int run_we = 0, max_run_we = 0, n_kept = 0, n_cancel = 0, n_pps = 0, n_offset = 0;
  int exp_ev [NCH][$];
  int prev_end [NCH];

  function automatic bit is_pulse(int ch, int n);
    if (ch == 5) return n == 385 || n == 500 || n == 650 || n == 1015;
    return n == 300 + 17 * ch || n == 900 + 23 * ch;
  endfunction
  function automatic logic [ADC_W-1:0] fsample(int ch, int n);
    if (is_pulse(ch, n)) return ADC_W'(700 + (n + ch) % 300);
    return ADC_W'((n * 37 + ch * 13 + 11) % 500);
  endfunction
  function automatic int thr(int ch);
    return 600 + ch;
  endfunction
  function automatic logic [MEM_W-1:0] expected_word(int ch, int n);
    logic [ADC_W-1:0] v;
    v = fsample(ch, n);
    return MEM_W'({v > ADC_W'(thr(ch)), v});
  endfunction

  for (genvar a = 0; a < 4; a++) begin : g_adc
    adc_model #(.NL(8), .W(ADC_W)) u_adc (.dco, .run, .samples(samples[a]),
      .fco(fco[a]), .sdata(sdata[8*a +: 8]), .idx(idx[a]));
    for (genvar l = 0; l < 8; l++) begin : g_l
      assign samples[a][l] = fsample(8 * a + l, idx[a] + 1);
    end
  end

  amc_daq_top dut (
    .clk_mem(clk), .rst_n, .adc_dco({4{dco}}), .adc_fco(fco), .adc_sdata(sdata),
    .cpu_addr, .cpu_wr, .cpu_wdata, .cpu_rdata, .event_irq,
    .dpram_we, .dpram_addr, .dpram_data,
    .clk_gmii(clk_g), .rst_gmii_n(rst_g_n), .gmii_rx_dv(rx_dv), .gmii_rxd(rxd),
    .gmii_tx_en(tx_en), .gmii_txd(txd), .ptp_addr, .ptp_wr, .ptp_rd, .ptp_wdata,
    .ptp_rdata, .ptp_sec, .ptp_ns, .pps);

  dpram_model #(.AW(RAM_AW), .DW(MEM_W)) u_ram (.clk, .we(dpram_we), .waddr(dpram_addr),
    .wdata(dpram_data), .raddr, .rdata);

  always #6.25 clk = ~clk;     // 80 MHz memory clock
  always #20 dco = ~dco;       // 25 MHz bit clock: 2.5 MS/s of 10 bits
  always #4 clk_g = ~clk_g;    // 125 MHz GMII clock

  // mechanism monitors
  logic pps_q = 0;
  int skip_c [NCH], drain_c [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_mon
    initial begin skip_c[c] = 0; drain_c[c] = 0; end
    always @(posedge clk) if (rst_n) begin
      if (dut.g_ch[c].u_ch.u_rsm.token_out && !dut.g_ch[c].u_ch.u_rsm.rd_avail) skip_c[c]++;
      // bank state 1 = complete, still draining from its output FIFO
      if (dut.g_ch[c].u_ch.u_msm.bst[0] == 2'd1 || dut.g_ch[c].u_ch.u_msm.bst[1] == 2'd1)
        drain_c[c]++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    run_we = dpram_we ? run_we + 1 : 0;
    if (run_we > max_run_we) max_run_we = run_we;
  end
  always @(posedge clk_g) if (rst_g_n) begin
    n_kept   += $countones(dut.u_ptp.kept);
    n_cancel += $countones(dut.u_ptp.cancelled);
    pps_q <= pps;
    if (pps && !pps_q) n_pps++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic wreg(logic [7:0] a, logic [31:0] d);
    cpu_addr = a; cpu_wdata = d; cpu_wr = 1; @(negedge clk); cpu_wr = 0;
  endtask
  task automatic rreg(logic [7:0] a, output logic [31:0] d);
    cpu_addr = a; @(negedge clk); d = cpu_rdata;
  endtask
  task automatic pwreg(logic [7:0] a, logic [31:0] d);
    ptp_addr = a; ptp_wdata = d; ptp_wr = 1; @(negedge clk_g); ptp_wr = 0;
  endtask
  task automatic prreg(logic [7:0] a, output logic [31:0] d);
    ptp_addr = a; ptp_rd = 1; #1 d = ptp_rdata; @(negedge clk_g); ptp_rd = 0;
  endtask

  // read and check the event the token holder presents
  task automatic read_event(logic [31:0] info);
    int ch, n_t, pre;
    logic bank;
    logic [AW-1:0] ta;
    ch = int'(info[28:24]); bank = info[16]; ta = info[AW-1:0];
    check(exp_ev[ch].size() != 0, $sformatf("unexpected event on channel %0d", ch));
    if (exp_ev[ch].size() == 0) return;
    n_t = exp_ev[ch].pop_front();
    // pre-trigger samples written into this bank since the previous event
    pre = PRE_CHECK;
    if (n_t - prev_end[ch] - 1 < pre) pre = n_t - prev_end[ch] - 1;
    prev_end[ch] = n_t + POST - 1;
    if (bank) n_bank1++;
    for (int i = -pre; i < POST; i++) begin
      raddr = {6'(2 * ch + int'(bank)), AW'(int'(ta) + i)};
      #1;
      check(rdata == expected_word(ch, n_t + i),
            $sformatf("ch %0d event %0d offset %0d: got %h exp %h", ch, n_t, i, rdata,
                      expected_word(ch, n_t + i)));
    end
    wreg(REG_READ_DONE, 1);
    @(negedge clk); @(negedge clk);
    n_events++;
  endtask

  // one GMII frame; a PTP event frame when `ptp` is set
  task automatic send_frame(bit tx, bit ptp, logic [3:0] mtype, logic [15:0] seq);
    logic [7:0] f [90];
    for (int i = 0; i < 90; i++) f[i] = 8'($urandom);
    {f[12], f[13]} = ptp ? 16'h0800 : 16'h0806; f[14] = 8'h45; f[23] = 8'd17;
    {f[36], f[37]} = 16'd319; f[42] = {4'h0, mtype}; {f[72], f[73]} = seq;
    for (int i = 0; i < 98; i++) begin
      logic [7:0] b;
      b = i < 7 ? 8'h55 : i == 7 ? 8'hD5 : f[i - 8];
      if (tx) begin tx_en = 1; txd = b; end else begin rx_dv = 1; rxd = b; end
      @(negedge clk_g);
    end
    rx_dv = 0; tx_en = 0;
    repeat (12) @(negedge clk_g);
  endtask

  // PTP activity, in parallel with the acquisition
  initial begin
    logic [31:0] d;
    longint t_before, t_after;
    repeat (4) @(negedge clk_g);
    rst_g_n = 1;
    pwreg(PTP_SEC, 5); pwreg(PTP_NS, 999_999_000); pwreg(PTP_CTRL, 1);
    repeat (200) @(negedge clk_g);     // past the second boundary
    send_frame(0, 1, 4'd0, 16'h0042);
    send_frame(1, 1, 4'd1, 16'h0043);
    send_frame(0, 0, 4'd0, 16'h0044);
    prreg(PTP_RX_ID, d); check(d == 32'h0000_0042, "rx sync identifier");
    prreg(PTP_TX_ID, d); check(d == 32'h0001_0043, "tx delay_req identifier");
    prreg(PTP_RX_SEC, d); check(d == 6, "rx timestamp after the second boundary");
    prreg(PTP_TX_SEC, d); check(d == 6, "tx timestamp seconds");
    pwreg(PTP_OFFSET, -32'sd2_000_000);
    t_before = longint'(ptp_sec) * 1_000_000_000 + longint'(ptp_ns);
    pwreg(PTP_CTRL, 2);
    t_after = longint'(ptp_sec) * 1_000_000_000 + longint'(ptp_ns);
    check(t_after == t_before + 8 - 2_000_000, "offset correction applied");
    if (t_after == t_before + 8 - 2_000_000) n_offset++;
  end

  initial begin
    logic [31:0] d;
    int last_idx;
    foreach (prev_end[c]) prev_end[c] = 5;
    for (int c = 0; c < NCH; c++)
      if (c == 5) exp_ev[c] = '{385, 500, 1015};
      else exp_ev[c] = '{300 + 17 * c, 900 + 23 * c};
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) wreg(REG_THRESH0 + 8'(4 * c), thr(c));
    wreg(REG_POST, POST);
    wreg(REG_CTRL, 1);
    run = 1;
    // CPU poll loop
    while (idx[0] < 1800) begin
      rreg(REG_EVENT_INFO, d);
      if (idx[0] >= 400 && idx[0] < 700) continue;      // CPU busy elsewhere
      if (d[31]) read_event(d);
    end
    rreg(REG_LOST, d);
    n_lost = int'(d);
    foreach (skip_c[c]) begin n_skip += skip_c[c]; n_drain += drain_c[c]; end
    rreg(REG_BANK_STATUS, d);
    check(d == 0 && !event_irq, "no event left pending");
    for (int c = 0; c < NCH; c++)
      check(exp_ev[c].size() == 0, $sformatf("channel %0d: %0d events missing", c, exp_ev[c].size()));
    // all samples accounted for: in the RAM or lost (a few in flight)
    last_idx = idx[0];
    check(32 * (last_idx + 1) - (u_ram.nwrites + n_lost) inside {[0:100]},
          $sformatf("RAM writes %0d + lost %0d vs %0d samples", u_ram.nwrites, n_lost, 32 * (last_idx + 1)));
    $display("mechanisms: events=%0d bank1=%0d drain=%0d token_skips=%0d lost=%0d max_we_run=%0d ptp_kept=%0d ptp_cancelled=%0d pps=%0d offset=%0d",
             n_events, n_bank1, n_drain, n_skip, n_lost, max_run_we, n_kept, n_cancel, n_pps, n_offset);
    check(n_events == 2 * NCH + 1, "events read");
    check(n_bank1 > 0, "ping-pong: events in bank 1");
    check(n_drain > 0, "banks draining before being offered");
    check(n_skip > 0, "token skips channels without events");
    check(n_lost > 0, "samples lost with both banks full");
    check(max_run_we >= 32, "FIFO-out controller writes every clock");
    check(n_kept == 2, "PTP timestamps kept");
    check(n_cancel >= 1, "PTP timestamp cancelled");
    check(n_pps >= 1, "PPS edge");
    check(n_offset == 1, "offset correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
