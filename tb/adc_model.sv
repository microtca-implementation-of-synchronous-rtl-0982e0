// adc_model: behavioural model of the serial output of an octal ADC
// (AD9212-like) for testbenches; not synthesisable logic.
//
// On every falling edge of the bit clock `dco` it puts the next bit of
// each lane's current word on `sdata`, most significant bit first, with
// the frame clock `fco` high during the first half of the word, so data
// and frame change half a bit away from the receiver's sampling edge. At
// the start of each word it takes the lane values from `samples` and
// advances `idx`, the index of the word now being sent (the testbench
// computes `samples` from `idx`). Sending starts when `run` is high.
module adc_model #(
  parameter int NL = 8,
  parameter int W  = 10
) (
  input  logic                 dco,
  input  logic                 run,
  input  logic [NL-1:0][W-1:0] samples,   // values for word number idx + 1
  output logic                 fco,
  output logic [NL-1:0]        sdata,
  output int                   idx
);
  int bitn = 0;
  logic [NL-1:0][W-1:0] cur;

  initial begin
    fco = 0; sdata = '0; idx = -1; cur = '0;
  end

  always @(negedge dco) if (run) begin
    if (bitn == 0) begin
      cur = samples;
      idx = idx + 1;
    end
    for (int l = 0; l < NL; l++) sdata[l] = cur[l][W - 1 - bitn];
    fco  = bitn < W / 2;
    bitn = (bitn + 1) % W;
  end
endmodule
