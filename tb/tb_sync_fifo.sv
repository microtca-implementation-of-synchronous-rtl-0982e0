// tb_sync_fifo: random push/pop against a queue model; checks the
// registered read data (one cycle after pop), empty and full flags, and
// that a push into a full FIFO is refused.
module tb_sync_fifo;
  localparam int WIDTH = 24, AW = 3;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] din = '0, dout;
  logic empty, full;
  int checks = 0, failures = 0, nfull = 0;
  logic [WIDTH-1:0] q [$];
  logic pending = 0;
  logic [WIDTH-1:0] pend_val;

  sync_fifo #(.WIDTH(WIDTH), .AW(AW)) dut (.clk, .rst_n, .push, .din, .pop,
                                           .dout, .empty, .full);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      // check the flags and last pop's data
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 2**AW)) begin
        failures++; $display("FAIL flags size=%0d empty=%b full=%b", q.size(), empty, full);
      end
      if (pending) begin
        checks++;
        if (dout !== pend_val) begin failures++; $display("FAIL dout %h exp %h", dout, pend_val); end
      end
      if (full) nfull++;
      push = ($urandom % 100) < ((i / 500) % 2 ? 70 : 30);
      pop  = ($urandom % 100) < ((i / 500) % 2 ? 30 : 70);
      din  = WIDTH'($urandom);
      // a push into a full FIFO is refused even if a pop frees a place
      begin
        automatic int size_before = q.size();
        pending = pop && size_before != 0;
        if (pending) pend_val = q.pop_front();
        if (push && size_before < 2**AW) q.push_back(din);
      end
      @(negedge clk);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
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
