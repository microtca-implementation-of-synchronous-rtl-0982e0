// tb_write_fsm: the testbench plays the input FIFO and the main state
// machine. Scenario (bank of 64 words so the circular buffer wraps):
//   1. 100 quiet samples, a trigger, more samples: 10 post-trigger samples
//      (trigger included) go to bank 0, addresses run on modulo 64, `ready`
//      reports bank 0 and the trigger address 100 % 64;
//   2. bank 1 is granted: the next samples go there, another trigger ends
//      the event after 10 samples;
//   3. no bank is granted for 20 samples: all are dropped and `lost`
//      pulses for each; then bank 0 is granted again and writing resumes;
//   4. acquisition disabled: samples are consumed and neither written nor
//      counted lost.
module tb_write_fsm;
  import daq_pkg::*;
  localparam int AW = 6, POST = 10;
  logic clk = 0, rst_n = 0;
  logic acq_en = 0, in_valid = 0, in_pop;
  sample_t in_sample = '0;
  logic [1:0] push;
  logic [AW-1:0] wr_addr, trig_addr;
  sample_t wr_sample;
  logic bank_en = 1, bank = 0, ready, ready_bank, lost;
  int checks = 0, failures = 0;
  int written = 0, nlost = 0, nready = 0, npush[2] = '{0, 0};
  logic [AW:0] post_samples = POST;
  logic [AW-1:0] last_trig;
  logic last_rbank;

  write_fsm #(.AW(AW)) dut (.clk, .rst_n, .acq_en, .post_samples, .in_valid,
    .in_sample, .in_pop, .push, .wr_addr, .wr_sample, .bank_en, .bank,
    .ready, .ready_bank, .trig_addr, .lost);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (push != 0) begin
      check($onehot(push), "push one-hot");
      check(wr_addr == AW'(written), $sformatf("address %0d exp %0d", wr_addr, AW'(written)));
      check(wr_sample == in_sample, "sample passed through");
      npush[push[1]]++;
      written++;
    end
    if (lost) nlost++;
    if (ready) begin nready++; last_trig = trig_addr; last_rbank = ready_bank; end
  end

  // present one sample and wait until it is consumed
  task automatic send(bit over);
    in_sample.adc  = ADC_W'($urandom);
    in_sample.over = over;
    in_valid = 1;
    do @(posedge clk); while (!in_pop);
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1; acq_en = 1;
    // 1. event in bank 0
    repeat (100) send(0);
    send(1);
    repeat (POST - 1) send(0);
    check(nready == 1 && last_rbank == 0, "ready for bank 0");
    check(last_trig == AW'(100), $sformatf("trigger address %0d", last_trig));
    check(npush[0] == 100 + POST && npush[1] == 0, "event samples in bank 0");
    // samples after the event while no bank is granted are lost
    bank_en = 0;
    // 2. bank 1 granted
    @(negedge clk); bank = 1; bank_en = 1;
    repeat (5) send(0);
    send(1);
    send(1);   // a trigger inside the window does not restart it
    repeat (POST - 2) send(0);
    check(nready == 2 && last_rbank == 1, "ready for bank 1");
    check(last_trig == AW'(100 + POST + 5), "second trigger address");
    check(npush[1] == 5 + POST, "event samples in bank 1");
    // 3. no bank free
    bank_en = 0;
    repeat (20) send(0);
    check(nlost == 20, $sformatf("lost %0d", nlost));
    check(npush[0] + npush[1] == 100 + 2 * POST + 5, "nothing written without a grant");
    bank = 0; bank_en = 1;
    repeat (3) send(0);
    check(npush[0] == 100 + POST + 3, "writing resumes in bank 0");
    // 4. acquisition disabled
    acq_en = 0;
    repeat (5) send(1);
    check(nlost == 20 && nready == 2 && npush[0] == 100 + POST + 3, "idle when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
