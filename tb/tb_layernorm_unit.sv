// tb_layernorm_unit: random rows of random length (1..MAXB words, including the full 48
// words = 768 elements of BERT-Base), with and without a residual word, random output
// back-pressure. Each output is compared with (x - mean) / sqrt(var) computed here in real
// arithmetic; the allowed error is 0.01 absolute plus 0.5 % (fixed-point mean, square root
// and reciprocal each truncate).
module tb_layernorm_unit;
  import acceltran_pkg::*;
  localparam int MAXB = 48;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, out_valid, out_ready, busy;
  logic [$clog2(MAXB+1)-1:0] len;
  vec_t in_data, in_res, out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  layernorm_unit #(.MAXB(MAXB)) dut (.clk, .rst_n, .start, .len, .in_valid, .in_ready,
    .in_data, .in_res, .out_valid, .out_ready, .out_data, .busy);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vec_t xa [MAXB], ra [MAXB];
  real  ref_v [MAXB*VEC];
  initial begin
    start = 0; len = 0; in_valid = 0; in_data = '0; in_res = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int n;
      bit use_res;
      real mean, var_s;
      n = (it == 0) ? MAXB : (it == 1 ? 1 : $urandom_range(1, MAXB));
      use_res = (it % 2 == 1);
      mean = 0.0;
      for (int b = 0; b < n; b++)
        for (int p = 0; p < VEC; p++) begin
          xa[b][p] = elem_t'($signed($urandom_range(0, 4 * 65536)) - 2 * 65536 + 20000);
          ra[b][p] = use_res ? elem_t'($signed($urandom_range(0, 2 * 65536)) - 65536) : '0;
          begin
            elem_t xe, re;
            int xi;
            xe = xa[b][p]; re = ra[b][p];
            xi = int'(xe) + int'(re);
            ref_v[b*VEC+p] = $itor(xi) / 65536.0;
          end
          mean += ref_v[b*VEC+p];
        end
      mean = mean / (n * VEC);
      var_s = 0.0;
      for (int i = 0; i < n * VEC; i++) var_s += (ref_v[i] - mean) * (ref_v[i] - mean);
      var_s = var_s / (n * VEC);
      for (int i = 0; i < n * VEC; i++) ref_v[i] = (ref_v[i] - mean) / $sqrt(var_s);
      @(negedge clk);
      start = 1; len = ($clog2(MAXB+1))'(n);
      @(negedge clk);
      start = 0;
      for (int b = 0; b < n; b++) begin
        in_valid = 1; in_data = xa[b]; in_res = ra[b];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      for (int b = 0; b < n; b++) begin
        out_ready = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        while (!(out_valid && out_ready)) begin
          @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); @(posedge clk);
        end
        for (int p = 0; p < VEC; p++) begin
          real g, e, tol;
          elem_t ov;
          int oi;
          ov = out_data[p];
          oi = int'(ov);
          g = $itor(oi) / 65536.0;
          e = ref_v[b*VEC+p];
          tol = 0.01 + 0.005 * (e < 0 ? -e : e);
          checks++;
          if (g - e > tol || e - g > tol) begin
            failures++;
            if (failures < 6) $display("row %0d word %0d pos %0d: got %f exp %f", it, b, p, g, e);
          end
        end
        @(negedge clk);
      end
      out_ready = 0;
      @(posedge clk); #1;
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
