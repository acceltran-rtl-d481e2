// tb_sync_fifo: random pushes and pops against a queue kept here; checks order, full/empty
// flags and the count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, almost_full;
  logic [31:0] in_data, out_data;
  logic [4:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count, .almost_full);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < ((it / 500) % 2 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < 50);
      in_data   = $urandom;
      checks++;
      if (int'(count) != q.size() || in_ready != (q.size() < 16) || out_valid != (q.size() > 0) ||
          almost_full != (q.size() >= 15)) failures++;
      if (out_valid && q.size() > 0) begin
        checks++;
        if (out_data != q[0]) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
