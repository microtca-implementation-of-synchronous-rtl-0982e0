// async_fifo: dual-clock FIFO (the channel's input FIFO).
//
// Carries words from the ADC bit-clock domain (write side) into the memory
// clock domain (read side). Classic design: binary pointers one bit wider
// than the address, Gray-coded copies crossed through two-flop
// synchronisers, full/empty from Gray-pointer comparison. The read side is
// show-ahead: `rdata` is the oldest word whenever `empty` is low, and `rd`
// removes it. Full and empty are pessimistic by the synchroniser delay.
//
// The paper names an input FIFO between the LVDS receiver and the write
// state machine; that it is a clock-domain crossing and its depth are this
// design's choices. Writes while full are dropped and counted nowhere: at
// one word per ADC period against a much faster reader it cannot fill.
module async_fifo #(
  parameter int unsigned WIDTH = 11,
  parameter int unsigned AW    = 3      // depth = 2**AW
) (
  input  logic             wclk,
  input  logic             rclk,
  input  logic             rst_n,       // asynchronous, both domains
  input  logic             wr,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  logic [WIDTH-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  logic [AW:0] wbin_nx, rbin_nx;
  assign wbin_nx = wbin + (AW+1)'(wr && !full);
  assign rbin_nx = rbin + (AW+1)'(rd && !empty);

  always_ff @(posedge wclk) begin
    if (wr && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign full  = wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]};
  assign empty = rgray == wgray_r2;
  assign rdata = mem[rbin[AW-1:0]];
endmodule
