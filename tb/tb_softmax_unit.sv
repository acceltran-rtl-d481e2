// tb_softmax_unit: random rows of random length (1..MAXB words), random scale (1 or
// 1/sqrt(h) for h = 64), random output back-pressure. Each output element is compared with
// the exact softmax computed here in real arithmetic; the allowed error is 0.004 absolute plus
// 1 % of the exact value (the exponential is a second-order approximation and results are
// truncated to 16 fraction bits). The sum of each row must be within 2 % of 1.
module tb_softmax_unit;
  import acceltran_pkg::*;
  localparam int MAXB = 32;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, out_valid, out_ready, busy;
  logic [$clog2(MAXB+1)-1:0] len;
  logic [DW-1:0] scale;
  vec_t in_data, out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  softmax_unit #(.MAXB(MAXB)) dut (.clk, .rst_n, .start, .len, .scale, .in_valid, .in_ready,
    .in_data, .out_valid, .out_ready, .out_data, .busy);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vec_t row [MAXB];
  real  ref_v [MAXB*VEC];
  initial begin
    start = 0; len = 0; scale = 0; in_valid = 0; in_data = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int n;
      real mx, s, sc, got_sum;
      n  = (it < 3) ? (it == 0 ? 1 : MAXB) : $urandom_range(1, MAXB);
      sc = (it % 2 == 0) ? 1.0 : 0.125;
      for (int b = 0; b < n; b++)
        for (int p = 0; p < VEC; p++)
          row[b][p] = elem_t'($signed($urandom_range(0, 8 * 65536)) - 4 * 65536);   // [-4, 4]
      // reference on the same rounded scaled inputs the hardware uses
      mx = -1.0e9;
      for (int b = 0; b < n; b++)
        for (int p = 0; p < VEC; p++) begin
          real x;
          longint xi, si;
          elem_t  ev;
          ev = row[b][p];
          xi = longint'(ev);
          si = longint'(sc * 65536.0);
          xi = (xi * si) >>> 16;
          x = $itor(xi) / 65536.0;
          ref_v[b*VEC+p] = x;
          if (x > mx) mx = x;
        end
      s = 0.0;
      for (int i = 0; i < n * VEC; i++) begin ref_v[i] = $exp(ref_v[i] - mx); s += ref_v[i]; end
      for (int i = 0; i < n * VEC; i++) ref_v[i] = ref_v[i] / s;
      @(negedge clk);
      start = 1; len = ($clog2(MAXB+1))'(n); scale = DW'(int'(sc * 65536.0));
      @(negedge clk);
      start = 0;
      for (int b = 0; b < n; b++) begin
        in_valid = 1; in_data = row[b];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      got_sum = 0.0;
      for (int b = 0; b < n; b++) begin
        out_ready = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        while (!(out_valid && out_ready)) begin
          @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); @(posedge clk);
        end
        for (int p = 0; p < VEC; p++) begin
          real g, e;
          elem_t ov;
          int oi;
          ov = out_data[p];
          oi = int'(ov);
          g = $itor(oi) / 65536.0;
          e = ref_v[b*VEC+p];
          got_sum += g;
          checks++;
          if (g - e > 0.004 + 0.01 * e || e - g > 0.004 + 0.01 * e) begin
            failures++;
            if (failures < 6) $display("row %0d word %0d pos %0d: got %f exp %f", it, b, p, g, e);
          end
        end
        @(negedge clk);
      end
      out_ready = 0;
      checks++;
      if (got_sum < 0.98 || got_sum > 1.02) begin
        failures++;
        $display("row %0d sum %f", it, got_sum);
      end
      @(posedge clk); #1;
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
