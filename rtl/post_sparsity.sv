// post_sparsity: post-compute sparsity module, the inverse of the pre-compute module. It
// turns a position-aligned output word from a MAC lane row, a softmax unit or the layer-norm
// unit into the stored sparse format: mask bit 1 where the element is zero, and the non-zero
// elements zero-collapsed towards slot 0.
//
// The paper says only that this module inverts the pre-compute operation on the outputs; the
// zero test and the single-cycle registered form are this design's choices.
//
// Timing: in_valid/in_data sampled at a rising edge, out_valid/out_word one cycle later.
module post_sparsity
  import acceltran_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  vec_t   in_data,
  output logic   out_valid,
  output sword_t out_word
);

  mask_t keep;
  always_comb
    for (int p = 0; p < VEC; p++) keep[p] = (in_data[p] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_word.mask <= ~keep;
        out_word.data <= collapse(in_data, keep);
      end
    end
  end

endmodule
