// tb_channel_receiver: one channel receiver, with the FIFO-out controller
// and a RAM model behind it, fed by the serial ADC model. Banks are shrunk
// to 64 words and the post-trigger window to 10 samples.
// The ADC sends a known sequence: baseline values below the threshold,
// with over-threshold pulses at chosen sample numbers. A CPU model waits
// for the event flag while the channel holds the token, reads the bank
// from the RAM and checks, around the trigger address, the trigger sample,
// the post-trigger samples and the pre-trigger samples still in the
// circular buffer, then acknowledges. Pulses: 100, 200, 300 (normal), 400
// with a second over-threshold sample at 405 inside its window (one
// event), 420 in the other bank while the CPU is stalled, 440 while both
// banks are full (lost, no event), 600 after the CPU has caught up.
module tb_channel_receiver;
  import daq_pkg::*;
  localparam int AW = 6, POST = 10, DEPTH = 2 ** AW;
  localparam int THR = 600;
  logic clk = 0, dco = 0, rst_n = 0, run = 0;
  logic fco, token;
  logic [0:0] sdata;
  int idx;
  logic [0:0][ADC_W-1:0] samples;
  logic event_flag, has_token, ev_bank, lost, read_done = 0;
  logic [AW-1:0] ev_trig_addr;
  logic [1:0] pop, empty;
  logic [1:0][AW+10:0] dout;
  logic we;
  logic [AW:0] waddr, raddr = '0;
  logic [MEM_W-1:0] wdata, rdata;
  int checks = 0, failures = 0, nlost = 0, nevents = 0, nbank1 = 0;
  int pulses [7] = '{100, 200, 300, 400, 420, 440, 600};
  int events [6] = '{100, 200, 300, 400, 420, 600};

  function automatic logic [ADC_W-1:0] fsample(int n);
    foreach (pulses[i]) if (n == pulses[i]) return ADC_W'(900 + n % 100);
    if (n == 405) return ADC_W'(1000);
    return ADC_W'((n * 37 + 11) % 500);
  endfunction

  adc_model #(.NL(1), .W(ADC_W)) u_adc (.dco, .run, .samples, .fco, .sdata, .idx);
  assign samples[0] = fsample(idx + 1);

  channel_receiver #(.AW(AW), .FIRST(1'b1)) dut (
    .clk, .rst_n, .adc_dco(dco), .adc_fco(fco), .adc_sdata(sdata[0]),
    .threshold(ADC_W'(THR)), .acq_en(1'b1), .post_samples((AW+1)'(POST)),
    .token_in(token), .token_out(token), .read_done,
    .event_flag, .has_token, .ev_bank, .ev_trig_addr, .lost,
    .ofifo_pop(pop), .ofifo_empty(empty), .ofifo_dout(dout));

  fifo_out_ctrl #(.NCH(1), .AW(AW)) u_out (.clk, .rst_n, .fifo_empty(empty),
    .fifo_dout(dout), .fifo_pop(pop), .dpram_we(we), .dpram_addr(waddr),
    .dpram_data(wdata));

  dpram_model #(.AW(AW + 1), .DW(MEM_W)) u_ram (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;
  always #4 dco = ~dco;
  always @(posedge clk) if (lost) nlost++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic logic [MEM_W-1:0] expected_word(int n);
    logic [ADC_W-1:0] v;
    v = fsample(n);
    return MEM_W'({v > ADC_W'(THR), v});
  endfunction

  task automatic read_event(int k);
    int n_t, pre, prev_end;
    n_t = events[k];
    prev_end = k == 0 ? 5 : events[k - 1] + POST - 1;
    pre = DEPTH - POST;
    if (n_t - prev_end - 1 < pre) pre = n_t - prev_end - 1;
    if (ev_bank) nbank1++;
    for (int i = -pre; i < POST; i++) begin
      raddr = {ev_bank, AW'(int'(ev_trig_addr) + i)};
      #1;
      check(rdata == expected_word(n_t + i),
            $sformatf("event %0d offset %0d: got %h exp %h", n_t, i, rdata, expected_word(n_t + i)));
    end
    @(negedge clk);
    read_done = 1; @(negedge clk); read_done = 0;
    repeat (3) @(negedge clk);
    nevents++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    run = 1;
    for (int k = 0; k < 6; k++) begin
      while (!(event_flag && has_token)) @(negedge clk);
      // the CPU is busy between samples 400 and 480
      if (k == 3) while (idx < 480) @(negedge clk);
      read_event(k);
    end
    while (idx < 700) @(negedge clk);
    check(nevents == 6 && !event_flag, "six events, none pending");
    check(nlost > 30, $sformatf("samples lost while both banks full: %0d", nlost));
    check(nbank1 >= 2, "both banks used");
    // every sample sent is either in the RAM or counted lost (a few may be
    // in flight between the ADC and the RAM)
    check(idx + 1 - (u_ram.nwrites + nlost) inside {[0:3]},
          $sformatf("RAM writes %0d + lost %0d vs %0d samples", u_ram.nwrites, nlost, idx + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
