// sync_fifo: single-clock first-in first-out queue of WIDTH-bit entries, used for the PE's
// activation and weight FIFO registers (paper, Fig. 5), for the PE's output queue and for the
// control block's instruction queue. The paper names these FIFOs but gives no depth or
// handshake: a valid/ready handshake on both sides and the depths are this design's choices.
//
// Timing: a push (in_valid & in_ready) and a pop (out_valid & out_ready) take effect at the
// rising edge; out_data shows the head entry combinationally (first-word fall-through).
// almost_full is high when at most one entry is free.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                     almost_full
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  logic push, pop;
  assign in_ready    = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid   = (count != '0);
  assign push        = in_valid && in_ready;
  assign pop         = out_valid && out_ready;
  assign out_data    = mem[rd_ptr];
  assign almost_full = (count >= ($clog2(DEPTH+1))'(DEPTH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wr_ptr] <= in_data;

  // a pop is only ever requested on a valid head
  // The assertions' disable iff reads rst_n synchronously, so lint reports rst_n as both a
  // synchronous and an asynchronous net (SYNCASYNCNET); the flops use it only asynchronously.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
