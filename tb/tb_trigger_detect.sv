// tb_trigger_detect: random samples against several thresholds, including
// the samples equal to and one above the threshold; checks the tag, the
// sample and the one-cycle latency.
module tb_trigger_detect;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [ADC_W-1:0] threshold = '0, in_sample = '0;
  logic [ADC_W-1:0] out_sample;
  logic out_over, out_valid;
  int checks = 0, failures = 0;

  trigger_detect dut (.clk, .rst_n, .threshold, .in_sample, .in_valid,
                      .out_sample, .out_over, .out_valid);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [ADC_W-1:0] s, t;
      t = ADC_W'($urandom);
      case (i % 4)
        0: s = t;
        1: s = t + 1'b1;
        default: s = ADC_W'($urandom);
      endcase
      threshold = t; in_sample = s; in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_sample !== s || out_over !== (32'(s) > 32'(t))) begin
        failures++;
        $display("FAIL s=%0d t=%0d over=%b valid=%b", s, t, out_over, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid held"); end
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
