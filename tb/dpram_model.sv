// dpram_model: behavioural model of the external dual-port RAM (64 banks
// of 8K x 18 bits, 512K words) for testbenches; not synthesisable logic.
// Port A is the write port driven by the FIFO-out controller; port B is an
// asynchronous read port standing in for the CPU/DMA side. Words never
// written read as zero.
module dpram_model #(
  parameter int AW = 19,
  parameter int DW = 18
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];
  int nwrites = 0;

  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;

  always @(posedge clk) if (we) begin
    mem[waddr] <= wdata;
    nwrites <= nwrites + 1;
  end

  assign rdata = mem[raddr];
endmodule
