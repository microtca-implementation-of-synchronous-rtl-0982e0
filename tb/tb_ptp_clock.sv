// tb_ptp_clock: the clock is loaded just before a second boundary and
// checked cycle by cycle against a model: +8 ns per clock, carry into
// seconds at 10**9 ns, PPS high for the first PPS_HIGH_NS of each second;
// positive and negative offset corrections, including ones that cross a
// second boundary in both directions.
module tb_ptp_clock;
  localparam int PPS_HIGH = 1000;
  logic clk = 0, rst_n = 0, load = 0, adj = 0;
  logic [31:0] load_sec = '0, sec;
  logic [29:0] load_ns = '0, ns;
  logic signed [31:0] adj_ns = '0;
  logic pps;
  longint t_model;    // model time in ns
  int checks = 0, failures = 0, npps = 0;
  logic pps_q = 0;
  int offs [5] = '{1000, -24000, 3 * 8, -999_990_000, 999_000_000};

  ptp_clock #(.NS_INC(8), .PPS_HIGH_NS(PPS_HIGH)) dut (.clk, .rst_n, .load, .load_sec,
    .load_ns, .adj, .adj_ns, .sec, .ns, .pps);
  always #4 clk = ~clk;

  task automatic compare(string what);
    checks++;
    if (longint'(sec) * 1000000000 + longint'(ns) != t_model ||
        pps !== ((t_model % 1000000000) < PPS_HIGH)) begin
      failures++;
      $display("FAIL %s: %0d.%09d model %0d pps=%b", what, sec, ns, t_model, pps);
    end
  endtask

  always @(posedge clk) if (rst_n) begin pps_q <= pps; if (pps && !pps_q) npps++; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_sec = 41; load_ns = 999_999_800; load = 1;
    @(negedge clk); load = 0;
    t_model = 41 * 64'd1000000000 + 999_999_800;
    compare("load");
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); t_model += 8; compare("run");
    end
    // offset corrections: +1000, -24000, and one across the second boundary
    for (int k = 0; k < 5; k++) begin
      adj_ns = offs[k]; adj = 1;
      @(negedge clk); adj = 0;
      t_model += 8 + offs[k];
      compare($sformatf("offset %0d", offs[k]));
      repeat (50) begin @(negedge clk); t_model += 8; compare("after offset"); end
    end
    checks++;
    if (npps < 2) begin failures++; $display("FAIL pps rising edges %0d", npps); end
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
