// tb_lvds_deser: serialises random 10-bit words MSB first, framed by a
// frame clock high during the first half of each word, after some unframed
// noise bits, and checks that the receiver returns the same words in order,
// one `valid` per word, and nothing before the first frame edge.
module tb_lvds_deser;
  localparam int W = 10;
  localparam int NWORDS = 200;
  logic dco = 0, rst_n = 0, fco = 0, sdata = 0;
  logic [W-1:0] sample;
  logic valid;
  int checks = 0, failures = 0;
  logic [W-1:0] words [NWORDS];
  int rx = 0;

  lvds_deser #(.W(W)) dut (.dco, .rst_n, .fco, .sdata, .sample, .valid);

  always #5 dco = ~dco;

  always @(posedge dco) if (rst_n && valid) begin
    checks++;
    if (rx >= NWORDS || sample !== words[rx]) begin
      failures++;
      $display("FAIL word %0d: got %h exp %h", rx, sample, rx < NWORDS ? words[rx] : '0);
    end
    rx++;
  end

  initial begin
    for (int i = 0; i < NWORDS; i++) words[i] = W'($urandom);
    words[0] = '1; words[1] = '0; words[2] = 10'h2AA;
    repeat (3) @(negedge dco);
    rst_n = 1;
    // unframed noise: no word may come out of it
    repeat (7) begin @(negedge dco); sdata = 1'($urandom); fco = 0; end
    for (int i = 0; i < NWORDS; i++)
      for (int b = W - 1; b >= 0; b--) begin
        @(negedge dco);
        sdata = words[i][b];
        fco   = (b >= W / 2);
      end
    repeat (4) @(negedge dco);
    checks++;
    if (rx != NWORDS) begin failures++; $display("FAIL %0d words received", rx); end
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
