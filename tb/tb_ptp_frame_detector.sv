// tb_ptp_frame_detector: sends GMII frames byte by byte (preamble, SFD,
// Ethernet/IPv4/UDP headers, PTP header) and checks the detector's
// decision and the timestamp, which must be the clock value on the cycle
// the SFD was on the bus. Frames: PTP Sync on UDP port 319 (kept), PTP on
// port 320 (cancelled), ARP (cancelled), a truncated frame (cancelled),
// a second event frame before release (overflow, first timestamp kept),
// and a Delay_Req after release (kept).
module tb_ptp_frame_detector;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, gmii_en = 0, release_ts = 0;
  logic [7:0] gmii_d = '0;
  logic [31:0] now_sec = 32'd7;
  logic [29:0] now_ns = '0;
  ptp_ts_t ts;
  logic ts_valid, ts_ovf, sfd_seen, kept, cancelled;
  int checks = 0, failures = 0, nsfd = 0, nkept = 0, ncanc = 0;
  logic [29:0] sfd_time;

  ptp_frame_detector dut (.clk, .rst_n, .gmii_en, .gmii_d, .now_sec, .now_ns,
    .release_ts, .ts, .ts_valid, .ts_ovf, .sfd_seen, .kept, .cancelled);
  always #4 clk = ~clk;
  always @(posedge clk) now_ns <= now_ns + 30'd8;
  always @(negedge clk) begin
    if (sfd_seen) nsfd++;
    if (kept) nkept++;
    if (cancelled) ncanc++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one frame; `len` bytes after the SFD are sent (frame may be truncated)
  task automatic send(logic [15:0] ethertype, logic [7:0] proto, logic [15:0] port,
                      logic [3:0] mtype, logic [15:0] seq, int len);
    logic [7:0] f [100];
    for (int i = 0; i < 100; i++) f[i] = 8'($urandom);
    {f[12], f[13]} = ethertype;
    f[14] = 8'h45;
    f[23] = proto;
    {f[34], f[35]} = 16'd319;
    {f[36], f[37]} = port;
    f[42] = {4'h0, mtype};
    {f[72], f[73]} = seq;
    @(negedge clk);
    for (int i = 0; i < 7; i++) begin gmii_en = 1; gmii_d = 8'h55; @(negedge clk); end
    gmii_d = 8'hD5;
    sfd_time = now_ns;   // the value the next clock edge samples
    @(negedge clk);
    for (int i = 0; i < len; i++) begin gmii_d = f[i]; @(negedge clk); end
    gmii_en = 0; gmii_d = '0;
    repeat (12) @(negedge clk);   // inter-frame gap
  endtask

  initial begin
    logic [29:0] t1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    send(16'h0800, 8'd17, 16'd319, 4'd0, 16'h1234, 90);
    t1 = sfd_time;
    check(nsfd == 1 && nkept == 1 && ncanc == 0, "sync kept");
    check(ts_valid && !ts_ovf, "timestamp valid");
    check(ts.sec == 7 && ts.ns == t1 && ts.seq_id == 16'h1234 && ts.msg_type == 0,
          $sformatf("timestamp %0d.%0d seq %h (exp ns %0d)", ts.sec, ts.ns, ts.seq_id, t1));
    send(16'h0800, 8'd17, 16'd320, 4'd8, 16'h1235, 90);
    check(nkept == 1 && ncanc == 1, "general port cancelled");
    send(16'h0806, 8'd17, 16'd319, 4'd0, 16'h1236, 90);
    check(nkept == 1 && ncanc == 2, "ARP cancelled");
    send(16'h0800, 8'd6, 16'd319, 4'd0, 16'h1237, 90);
    check(nkept == 1 && ncanc == 3, "TCP cancelled");
    send(16'h0800, 8'd17, 16'd319, 4'd0, 16'h1238, 50);
    check(nkept == 1 && ncanc == 4, "truncated frame cancelled");
    check(ts.ns == t1 && ts.seq_id == 16'h1234, "kept timestamp untouched");
    send(16'h0800, 8'd17, 16'd319, 4'd0, 16'h1239, 90);
    check(nkept == 2 && ts_ovf && ts.seq_id == 16'h1234, "overflow keeps the first");
    @(negedge clk); release_ts = 1; @(negedge clk); release_ts = 0;
    check(!ts_valid && !ts_ovf, "released");
    send(16'h0800, 8'd17, 16'd319, 4'd1, 16'hBEEF, 90);
    check(ts_valid && ts.msg_type == 1 && ts.seq_id == 16'hBEEF && ts.ns == sfd_time,
          "delay_req kept");
    check(nsfd == 7, $sformatf("SFD count %0d", nsfd));
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
