// tb_daq_regs: register access from the CPU side: control, post-trigger
// length, every threshold (write, read back, value on the output), bank
// status, event info of the token holder, read-done pulse, lost counter.
module tb_daq_regs;
  import daq_pkg::*;
  localparam int NCH = 32, AW = 13;
  logic clk = 0, rst_n = 0, wr = 0;
  logic [7:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic acq_en, read_done;
  logic [AW:0] post_samples;
  logic [NCH-1:0][ADC_W-1:0] threshold;
  logic [NCH-1:0] event_flag = '0, has_token = '0, ev_bank = '0, lost = '0;
  logic [NCH-1:0][AW-1:0] ev_trig_addr = '0;
  int checks = 0, failures = 0, ndone = 0;
  logic [ADC_W-1:0] thr_model [NCH];

  daq_regs #(.NCH(NCH), .AW(AW), .POST_DEFAULT(4096)) dut (.clk, .rst_n, .addr, .wr,
    .wdata, .rdata, .acq_en, .post_samples, .threshold, .read_done, .event_flag,
    .has_token, .ev_bank, .ev_trig_addr, .lost);
  always #5 clk = ~clk;

  always @(negedge clk) if (read_done) ndone++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s rdata=%h", what, rdata); end
  endtask
  task automatic wreg(logic [7:0] a, logic [31:0] d);
    addr = a; wdata = d; wr = 1; @(negedge clk); wr = 0;
  endtask
  task automatic rreg(logic [7:0] a);
    addr = a; @(negedge clk);   // rdata is combinational: valid now
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    rreg(REG_CTRL); check(rdata == 0 && !acq_en, "acq off after reset");
    rreg(REG_POST); check(rdata == 4096 && post_samples == 4096, "post default");
    check(threshold[5] == '1, "threshold reset all ones");
    wreg(REG_CTRL, 1); check(acq_en, "acq on");
    wreg(REG_POST, 700); rreg(REG_POST); check(rdata == 700 && post_samples == 700, "post write");
    for (int c = 0; c < NCH; c++) begin
      thr_model[c] = ADC_W'($urandom);
      wreg(REG_THRESH0 + 8'(4 * c), 32'(thr_model[c]) | 32'hFFFF_0000);
    end
    for (int c = 0; c < NCH; c++) begin
      rreg(REG_THRESH0 + 8'(4 * c));
      check(rdata == 32'(thr_model[c]) && threshold[c] == thr_model[c], $sformatf("threshold %0d", c));
    end
    // status and event info
    event_flag = 32'h8000_0411; has_token = 32'h0000_0400; ev_bank[10] = 1;
    ev_trig_addr[10] = 13'h1ABC;
    rreg(REG_BANK_STATUS); check(rdata == 32'h8000_0411, "bank status");
    rreg(REG_EVENT_INFO);
    check(rdata == {1'b1, 2'b00, 5'd10, 7'd0, 1'b1, 3'd0, 13'h1ABC}, "event info");
    has_token = 32'h0000_0002;
    rreg(REG_EVENT_INFO); check(rdata[31] == 0 && rdata[28:24] == 1, "holder without event");
    // read done pulse
    wreg(REG_READ_DONE, 1); @(negedge clk);
    check(ndone == 1 && !read_done, $sformatf("one read-done pulse (%0d)", ndone));
    // lost counter: three channels at once, twice
    lost = 32'h0000_0111; @(negedge clk); @(negedge clk); lost = '0;
    rreg(REG_LOST); check(rdata == 6, "lost count");
    wreg(REG_LOST, 0); rreg(REG_LOST); check(rdata == 0, "lost cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
