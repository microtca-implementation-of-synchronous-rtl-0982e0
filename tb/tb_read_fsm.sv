// tb_read_fsm: a ring of four read state machines. Channels 1 and 3 have
// events. Checks: the token skips channels without an event at one hop
// per clock, stops at a channel with one until `read_done`, which reaches
// only the holder (it reports `bank_read` and passes the token); event
// flags follow `rd_avail`; exactly one token at any time.
module tb_read_fsm;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, read_done = 0;
  logic [N-1:0] rd_avail = '0, token_out, has_token, event_flag, bank_read;
  int checks = 0, failures = 0;
  int nread [N];

  for (genvar i = 0; i < N; i++) begin : g
    read_fsm #(.FIRST(i == 0)) dut (.clk, .rst_n, .rd_avail(rd_avail[i]),
      .read_done, .token_in(token_out[(i + N - 1) % N]), .token_out(token_out[i]),
      .has_token(has_token[i]), .event_flag(event_flag[i]), .bank_read(bank_read[i]));
  end
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t) tok=%b", what, $time, has_token); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (bank_read[i]) nread[i]++;
    checks++;
    if ((has_token | token_out) == 0 || $countones(has_token) + $countones(token_out) != 1) begin
      failures++; $display("FAIL token count tok=%b out=%b", has_token, token_out);
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(has_token == 4'b0001, "channel 0 holds first");
    rd_avail = 4'b1010;
    @(negedge clk);
    check(event_flag == 4'b1010, "event flags");
    // token leaves 0 (no event) and reaches 1 within two clocks
    repeat (2) @(negedge clk);
    check(has_token == 4'b0010, "token stops at channel 1");
    repeat (10) @(negedge clk);
    check(has_token == 4'b0010 && nread[1] == 0, "held until read done");
    read_done = 1; @(negedge clk); read_done = 0;
    rd_avail[1] = 0;
    @(negedge clk);
    check(nread[1] == 1 && nread[3] == 0, "only the holder reports the read");
    repeat (3) @(negedge clk);
    check(has_token == 4'b1000, "token at channel 3");
    read_done = 1; @(negedge clk); read_done = 0;
    rd_avail[3] = 0;
    @(negedge clk);
    check(nread[3] == 1, "channel 3 read");
    repeat (20) @(negedge clk);
    check(nread[0] == 0 && nread[1] == 1 && nread[2] == 0 && nread[3] == 1, "read counts");
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
