// tb_async_fifo: writer at one clock, reader at an unrelated faster or
// slower clock, random stalls on both sides; checks data order, that full
// and empty stop the transfer, and that nothing is lost or duplicated.
module tb_async_fifo;
  localparam int WIDTH = 11, AW = 3, N = 3000;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic wr = 0, rd = 0, full, empty;
  logic [WIDTH-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  int nw = 0, nr = 0, saw_full = 0;
  logic [WIDTH-1:0] exp_q [$];

  async_fifo #(.WIDTH(WIDTH), .AW(AW)) dut (.wclk, .rclk, .rst_n, .wr, .wdata,
                                            .full, .rd, .rdata, .empty);
  always #7 wclk = ~wclk;
  always #3 rclk = ~rclk;

  // writer: bursts, so the FIFO fills while the reader pauses
  always @(posedge wclk) if (rst_n) begin
    if (wr && !full) begin exp_q.push_back(wdata); nw++; end
    if (full) saw_full++;
  end
  always @(negedge wclk) if (rst_n) begin
    wr    <= (nw < N) && ($urandom % 4 != 0);
    wdata <= WIDTH'($urandom);
  end

  always @(posedge rclk) if (rst_n && rd && !empty) begin
    checks++;
    if (exp_q.size() == 0 || rdata !== exp_q[0]) begin
      failures++; $display("FAIL read %0d got %h", nr, rdata);
    end
    if (exp_q.size() != 0) void'(exp_q.pop_front());
    nr++;
  end
  // reader pauses for long stretches in the first half
  always @(negedge rclk) rd <= (nr > N / 2) ? ($urandom % 2 == 0) : ($urandom % 16 == 0);

  initial begin
    repeat (3) @(negedge wclk);
    rst_n = 1;
    wait (nr == N);
    repeat (20) @(negedge rclk);
    checks++;
    if (!empty || nw != N || saw_full == 0) begin
      failures++; $display("FAIL end: empty=%b nw=%0d saw_full=%0d", empty, nw, saw_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
