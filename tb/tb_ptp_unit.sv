// tb_ptp_unit: through the register bus, loads the time, reads it back,
// applies an offset, then sends a PTP event frame on the receive side and
// another on the transmit side and reads both timestamps and identifiers,
// which must match the time read from the clock outputs when each SFD was
// on the bus; releases them and checks the status registers.
module tb_ptp_unit;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_dv = 0, tx_en = 0, wr = 0, rd = 0;
  logic [7:0] rxd = '0, txd = '0, addr = '0;
  logic [31:0] wdata = '0, rdata, sec;
  logic [29:0] ns;
  logic pps;
  logic [1:0] sfd_seen, kept, cancelled;
  int checks = 0, failures = 0;
  logic [31:0] sfd_sec [2];
  logic [29:0] sfd_ns [2];

  ptp_unit #(.PPS_HIGH_NS(1000)) dut (.clk, .rst_n, .gmii_rx_dv(rx_dv), .gmii_rxd(rxd),
    .gmii_tx_en(tx_en), .gmii_txd(txd), .addr, .wr, .rd, .wdata, .rdata,
    .sec, .ns, .pps, .sfd_seen, .kept, .cancelled);
  always #4 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (rdata=%h)", what, rdata); end
  endtask
  task automatic wreg(logic [7:0] a, logic [31:0] d);
    addr = a; wdata = d; wr = 1; @(negedge clk); wr = 0;
  endtask
  task automatic rreg(logic [7:0] a, output logic [31:0] d);
    addr = a; rd = 1; #1 d = rdata; @(negedge clk); rd = 0;
  endtask

  task automatic send(bit tx, logic [3:0] mtype, logic [15:0] seq);
    logic [7:0] f [90];
    for (int i = 0; i < 90; i++) f[i] = 8'($urandom);
    {f[12], f[13]} = 16'h0800; f[14] = 8'h45; f[23] = 8'd17;
    {f[36], f[37]} = 16'd319; f[42] = {4'h0, mtype}; {f[72], f[73]} = seq;
    for (int i = 0; i < 8 + 90; i++) begin
      logic [7:0] b;
      b = i < 7 ? 8'h55 : i == 7 ? 8'hD5 : f[i - 8];
      if (tx) begin tx_en = 1; txd = b; end else begin rx_dv = 1; rxd = b; end
      if (i == 7) begin sfd_sec[tx] = sec; sfd_ns[tx] = ns; end
      @(negedge clk);
    end
    rx_dv = 0; tx_en = 0;
    repeat (12) @(negedge clk);
  endtask

  initial begin
    logic [31:0] d, d2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wreg(PTP_SEC, 1000); wreg(PTP_NS, 500); wreg(PTP_CTRL, 1);
    check(sec == 1000 && ns == 500, "time loaded");
    rreg(PTP_SEC, d); rreg(PTP_NS, d2);
    check(d == 1000 && d2 == 500, $sformatf("read back %0d.%0d", d, d2));
    wreg(PTP_OFFSET, -32'sd400);
    d2 = 32'(ns);
    wreg(PTP_CTRL, 2);
    check(sec == 1000 && 32'(ns) == d2 + 8 - 400, $sformatf("offset applied %0d.%0d", sec, ns));
    send(0, 4'd0, 16'h0101);
    send(1, 4'd1, 16'h0202);
    rreg(PTP_RX_STAT, d); check(d == 1, "rx valid");
    rreg(PTP_RX_SEC, d); check(d == sfd_sec[0], "rx sec");
    rreg(PTP_RX_NS, d); check(d == 32'(sfd_ns[0]), $sformatf("rx ns %0d exp %0d", d, sfd_ns[0]));
    rreg(PTP_RX_ID, d); check(d == 32'h0000_0101, "rx id");
    rreg(PTP_TX_STAT, d); check(d == 1, "tx valid");
    rreg(PTP_TX_NS, d); check(d == 32'(sfd_ns[1]), "tx ns");
    rreg(PTP_TX_ID, d); check(d == 32'h0001_0202, "tx id");
    wreg(PTP_RX_STAT, 0); wreg(PTP_TX_STAT, 0);
    rreg(PTP_RX_STAT, d); check(d == 0, "rx released");
    rreg(PTP_TX_STAT, d); check(d == 0, "tx released");
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
