// sram_buffer: on-chip buffer (activation, weight or mask buffer of the paper, Fig. 4), a
// single-port synchronous RAM of DEPTH words of WIDTH bits written as an array so that a
// memory compiler macro can replace it. The paper sizes the buffers (AccelTran-Edge: 4 MB
// activation, 8 MB weight, 1 MB mask) and models them with a cache tool; the single port and
// one-cycle read latency are this design's choices.
//
// Timing: en with we writes wdata at addr on the rising edge; en without we reads, and rdata
// holds mem[addr] from the following cycle until the next read.
module sram_buffer #(
  parameter int unsigned WIDTH = 336,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = 20
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && int'(addr) < DEPTH) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
