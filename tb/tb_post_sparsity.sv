// tb_post_sparsity: random position-aligned words with about half the elements zero; checks
// the mask (1 where zero), the packed order of the non-zero elements and the one-cycle latency.
module tb_post_sparsity;
  import acceltran_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec_t in_data;
  sword_t out_word;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  post_sparsity dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_word);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      vec_t v;
      elem_t exp_d [VEC];
      logic [VEC-1:0] exp_m;
      int k;
      k = 0;
      for (int p = 0; p < VEC; p++) begin
        v[p] = ($urandom_range(0, 1) == 1) ? elem_t'($urandom) : '0;
        exp_d[p] = '0;
      end
      for (int p = 0; p < VEC; p++) begin
        exp_m[p] = (v[p] == 0);
        if (v[p] != 0) begin exp_d[k] = v[p]; k++; end
      end
      @(negedge clk); in_valid = 1; in_data = v;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      checks++;
      if (out_word.mask != exp_m) failures++;
      for (int j = 0; j < k; j++) begin
        checks++;
        if (out_word.data[j] != exp_d[j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
