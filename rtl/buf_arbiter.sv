// buf_arbiter: grants the single port of the on-chip buffers to one of two requesters per
// cycle (requester 0: the control block's PE feed and drain path; requester 1: the DMA
// controller), round-robin when both ask. A requester that is refused waits: that is the
// paper's memory stall "if the buffer is not ready to load/store more data as some data are
// already being written or read". The round-robin policy is this design's choice.
//
// Timing: gnt is combinational from req in the same cycle; the granted request's fields are
// driven onto the buffer port in that cycle, read data returns the next cycle.
module buf_arbiter
  import acceltran_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [1:0]      req,
  output logic [1:0]      gnt,
  input  logic [1:0]      we,
  input  bufsel_e [1:0]   sel,
  input  logic [1:0][BADW-1:0] addr,
  input  sword_t [1:0]    wdata,
  // buffer port
  output logic            b_en,
  output logic            b_we,
  output bufsel_e         b_sel,
  output logic [BADW-1:0] b_addr,
  output sword_t          b_wdata
);

  logic last;   // requester granted most recently when both asked

  always_comb begin
    gnt = 2'b00;
    if (req == 2'b11) gnt = last ? 2'b01 : 2'b10;
    else              gnt = req;
    b_en    = |gnt;
    b_we    = gnt[1] ? we[1]    : we[0];
    b_sel   = gnt[1] ? sel[1]   : sel[0];
    b_addr  = gnt[1] ? addr[1]  : addr[0];
    b_wdata = gnt[1] ? wdata[1] : wdata[0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)             last <= 1'b0;
    else if (req == 2'b11)  last <= gnt[1];

  // The assertions' disable iff reads rst_n synchronously, so lint reports rst_n as both a
  // synchronous and an asynchronous net (SYNCASYNCNET); the flops use it only asynchronously.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
