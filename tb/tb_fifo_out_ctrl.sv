// tb_fifo_out_ctrl: eight bank output FIFOs (four channels) feed the
// controller. Phase 1 fills every FIFO and checks that they drain at one
// RAM write per clock, every word reaching address {fifo number, address
// in bank} with the right data; phase 2 pushes sparse random traffic and
// checks that nothing is lost, duplicated or misrouted, and the latency
// from pop to write is two clocks.
module tb_fifo_out_ctrl;
  import daq_pkg::*;
  localparam int NCH = 4, AW = 13, NF = 2 * NCH, FB = $clog2(NF);
  localparam int FW = AW + $bits(sample_t);
  logic clk = 0, rst_n = 0;
  logic [NF-1:0] push = '0, empty, full, pop;
  logic [NF-1:0][FW-1:0] din, dout;
  logic dpram_we;
  logic [FB+AW-1:0] dpram_addr;
  logic [MEM_W-1:0] dpram_data;
  int checks = 0, failures = 0, nwr = 0, nexp = 0;
  // expected words, keyed by RAM address (each address written once)
  logic [MEM_W-1:0] expect_mem [int];
  logic [NF-1:0] pop_d1 = '0, pop_d2 = '0;

  for (genvar f = 0; f < NF; f++) begin : g_f
    sync_fifo #(.WIDTH(FW), .AW(3)) u_f (.clk, .rst_n, .push(push[f]), .din(din[f]),
      .pop(pop[f]), .dout(dout[f]), .empty(empty[f]), .full(full[f]));
  end

  fifo_out_ctrl #(.NCH(NCH), .AW(AW)) dut (.clk, .rst_n, .fifo_empty(empty),
    .fifo_dout(dout), .fifo_pop(pop), .dpram_we, .dpram_addr, .dpram_data);
  always #5 clk = ~clk;

  int next_a [NF];
  always @(posedge clk) if (rst_n) begin
    pop_d1 <= pop; pop_d2 <= pop_d1;
    checks++;
    if (dpram_we !== (pop_d2 != 0)) begin failures++; $display("FAIL latency"); end
    if (dpram_we) begin
      nwr++;
      checks++;
      if (!expect_mem.exists(int'(dpram_addr)) || expect_mem[int'(dpram_addr)] !== dpram_data) begin
        failures++; $display("FAIL write addr %h data %h", dpram_addr, dpram_data);
      end else expect_mem.delete(int'(dpram_addr));
    end
  end

  // push one random word into FIFO f (address in bank runs on per FIFO)
  task automatic load(int f);
    sample_t s;
    s.adc = ADC_W'($urandom); s.over = 1'($urandom);
    din[f] = {AW'(next_a[f]), s};
    expect_mem[int'({FB'(f), AW'(next_a[f])})] = mem_word(s);
    next_a[f]++;
    nexp++;
    push[f] = 1;
  endtask

  initial begin
    int w0;
    for (int f = 0; f < NF; f++) next_a[f] = f * 1000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: fill all FIFOs (the controller drains them meanwhile), then
    // count writes: with words waiting, one write per clock
    for (int k = 0; k < 10; k++) begin
      for (int f = 0; f < NF; f++) if (!full[f]) load(f);
      @(negedge clk); push = '0;
    end
    checks++;
    if (empty != '0) begin failures++; $display("FAIL not all FIFOs filled"); end
    w0 = nwr;
    repeat (20) @(negedge clk);
    checks++;
    if (nwr - w0 != 20) begin failures++; $display("FAIL rate: %0d writes in 20 clocks", nwr - w0); end
    wait (empty == '1);
    repeat (4) @(negedge clk);
    // phase 2: sparse random traffic
    for (int k = 0; k < 3000; k++) begin
      for (int f = 0; f < NF; f++) if (!full[f] && $urandom % 10 == 0) load(f);
      @(negedge clk); push = '0;
    end
    repeat (40) @(negedge clk);
    checks++;
    if (nwr != nexp || expect_mem.num() != 0) begin
      failures++; $display("FAIL totals: %0d written, %0d expected", nwr, nexp);
    end
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
