// mac_lane: M multipliers feeding a log2(M)-deep adder tree, an output register and a GeLU
// unit (paper, Fig. 6). Each valid cycle it takes up to M (activation, weight) pairs, which
// the pre-compute sparsity module has already reduced to matched non-zero pairs packed at the
// low slots, and forms their dot product: one output element per cycle, so a tile product of
// n_o multiplications takes n_o / M lane-cycles.
//
// Widths follow the paper: operands IL+FL = 20 bits, products and accumulation 2(IL+FL) = 40
// bits. Partial sums across k tiles: the lane adds acc_in (the partial sum of the same output
// element from the previous k tile, kept by the PE) unless first is set; acc_out is the
// registered 40-bit sum. That way of accumulating across tiles is this design's choice.
//
// Output: y = acc_out rescaled to FL fractional bits and saturated to IL+FL bits. With ff
// (feed-forward) set, the figure's two multiplexers route the sum through GeLU; with ff clear
// the GeLU input is held at 0 and the registered sum goes out. The GeLU circuit itself is not
// given by the paper (see acceltran_pkg::gelu_fx).
//
// Timing: inputs sampled at a rising edge with valid; acc_out/y/out_valid one cycle later.
module mac_lane
  import acceltran_pkg::*;
#(
  parameter int unsigned M = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  logic                 first,
  input  logic                 ff,
  input  elem_t [M-1:0]        a,
  input  elem_t [M-1:0]        w,
  input  logic [CW-1:0]        count,     // pairs present; slots >= count are gated to zero
  input  acc_t                 acc_in,
  output logic                 out_valid,
  output acc_t                 acc_out,
  output elem_t                y
);

  localparam int unsigned DEPTH = $clog2(M);

  // multipliers (operand isolation on unused slots)
  acc_t prod [M];
  always_comb
    for (int m = 0; m < M; m++)
      prod[m] = (m < int'(count)) ? acc_t'(a[m]) * acc_t'(w[m]) : '0;

  // adder tree, DEPTH levels
  acc_t tree [DEPTH+1][M];
  always_comb begin
    for (int m = 0; m < M; m++) tree[0][m] = prod[m];
    for (int l = 1; l <= DEPTH; l++)
      for (int m = 0; m < M; m++)
        tree[l][m] = (m < (M >> l)) ? tree[l-1][2*m] + tree[l-1][2*m+1] : '0;
  end

  acc_t sum;
  assign sum = tree[DEPTH][0] + (first ? acc_t'(0) : acc_in);

  logic ff_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_out   <= '0;
      out_valid <= 1'b0;
      ff_q      <= 1'b0;
    end else begin
      out_valid <= valid;
      if (valid) begin
        acc_out <= sum;
        ff_q    <= ff;
      end
    end
  end

  acc_t scaled, gelu_in, gelu_out;
  always_comb begin
    scaled   = acc_out >>> FL;
    gelu_in  = ff_q ? scaled : '0;        // mux "0 / 1" before GeLU
    gelu_out = gelu_fx(gelu_in);
    y        = ff_q ? sat_elem((PW+1)'(gelu_out)) : sat_elem((PW+1)'(scaled));  // output mux
  end

endmodule
