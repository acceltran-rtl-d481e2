// tb_mac_lane: streams one random set of 16 operand pairs per cycle (random pair counts,
// random first flags, feed-forward on and off) and checks every registered sum, the rescaled
// and saturated output element, GeLU, and that one result appears per cycle (n_o / M cycles
// for a tile). The reference arithmetic is done here on 64-bit integers.
module tb_mac_lane;
  import acceltran_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic valid, first, ff, out_valid;
  elem_t [M-1:0] a, w;
  logic [CW-1:0] count;
  acc_t acc_in, acc_out;
  elem_t y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mac_lane #(.M(M)) dut (.clk, .rst_n, .valid, .first, .ff, .a, .w, .count, .acc_in,
                         .out_valid, .acc_out, .y);

  function automatic longint sat20(longint v);
    if (v > 524287) return 524287;
    if (v < -524288) return -524288;
    return v;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_acc, exp_y, prev_acc;
  int n_out;
  initial begin
    valid = 0; first = 0; ff = 0; a = '0; w = '0; count = '0; acc_in = '0;
    prev_acc = 0; n_out = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      longint s;
      @(negedge clk);
      valid = 1;
      first = ($urandom_range(0, 1) == 1);
      ff    = ($urandom_range(0, 1) == 1);
      count = CW'($urandom_range(0, M));
      s = 0;
      for (int m = 0; m < M; m++) begin
        a[m] = elem_t'($signed($urandom_range(0, 2 * 65536)) - 65536);   // [-1, 1]
        w[m] = elem_t'($signed($urandom_range(0, 2 * 65536)) - 65536);
        if (m < int'(count)) s += longint'(a[m]) * longint'(w[m]);
      end
      acc_in = acc_t'(longint'($signed($urandom_range(0, 1 << 20))) * 4096 - (longint'(1) << 31));
      exp_acc = s + (first ? 0 : longint'(acc_in));
      begin
        longint sc, g;
        sc = exp_acc >>> 16;
        if (ff) begin
          g = 32768 + (sc >>> 2) + (sc >>> 3);
          if (g < 0) g = 0;
          if (g > 65536) g = 65536;
          exp_y = sat20((sc * g) >>> 16);
        end else exp_y = sat20(sc);
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || acc_out != acc_t'(exp_acc) || longint'(y) != exp_y) begin
        failures++;
        if (failures < 5) $display("it %0d: acc %0d exp %0d y %0d exp %0d ff %0d", it, acc_out, exp_acc, y, exp_y, ff);
      end
      n_out++;
    end
    // throughput: 3000 inputs on 3000 consecutive cycles gave 3000 results
    checks++;
    if (n_out != 3000) failures++;
    @(negedge clk); valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
