// tb_main_fsm: walks the bank manager through the ping-pong sequence:
// event in B0 (held back while its output FIFO drains, then offered to the
// reader), writer moved to B1, event in B1 while B0 is unread (writer left
// without a grant), B0 read (writer continues in B0, B1 offered), B1 read.
module tb_main_fsm;
  import daq_pkg::*;
  localparam int AW = 13;
  logic clk = 0, rst_n = 0;
  logic wr_ready = 0, wr_ready_bank = 0, rd_done = 0;
  logic [AW-1:0] wr_trig_addr = '0, rd_trig_addr;
  logic [1:0] fifo_empty = 2'b11;
  logic wr_en, wr_bank, rd_avail, rd_bank;
  int checks = 0, failures = 0;

  main_fsm #(.AW(AW)) dut (.clk, .rst_n, .wr_ready, .wr_ready_bank, .wr_trig_addr,
    .wr_en, .wr_bank, .fifo_empty, .rd_avail, .rd_bank, .rd_trig_addr, .rd_done);
  always #5 clk = ~clk;

  task automatic expect_state(bit en, bit wb, bit av, bit rb, logic [AW-1:0] ta, string what);
    checks++;
    if (wr_en !== en || wr_bank !== wb || rd_avail !== av || (av && (rd_bank !== rb || rd_trig_addr !== ta))) begin
      failures++;
      $display("FAIL %s: wr_en=%b wr_bank=%b rd_avail=%b rd_bank=%b ta=%0d", what, wr_en, wr_bank, rd_avail, rd_bank, rd_trig_addr);
    end
  endtask

  task automatic report(bit b, int ta);
    wr_ready = 1; wr_ready_bank = b; wr_trig_addr = AW'(ta);
    @(negedge clk);
    wr_ready = 0;
  endtask

  task automatic read_done();
    rd_done = 1;
    @(negedge clk);
    rd_done = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_state(1, 0, 0, 0, 0, "after reset");
    fifo_empty = 2'b10;               // B0 still has words in flight
    report(0, 1234);
    expect_state(1, 1, 0, 0, 0, "B0 draining, writer on B1");
    repeat (3) @(negedge clk);
    expect_state(1, 1, 0, 0, 0, "still draining");
    fifo_empty = 2'b11;
    @(negedge clk);
    expect_state(1, 1, 1, 0, 1234, "B0 offered");
    report(1, 77);
    @(negedge clk);
    expect_state(0, 1, 1, 0, 1234, "both full: no grant, older B0 offered");
    repeat (5) @(negedge clk);
    expect_state(0, 1, 1, 0, 1234, "writer keeps waiting");
    read_done();
    expect_state(1, 0, 1, 1, 77, "B0 freed and granted, B1 offered");
    read_done();
    expect_state(1, 0, 0, 0, 0, "all read");
    // a read done with nothing offered changes nothing
    read_done();
    expect_state(1, 0, 0, 0, 0, "spurious read done");
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
