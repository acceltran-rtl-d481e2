// tb_sram_buffer: writes random words to random addresses of a small buffer, reads them back
// and checks the data and the one-cycle read latency against a copy kept here.
module tb_sram_buffer;
  logic clk = 0, en = 0, we = 0;
  logic [19:0] addr;
  logic [335:0] wdata, rdata;
  logic [335:0] ref_mem [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sram_buffer #(.WIDTH(336), .DEPTH(256), .AW(20)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = 0; wdata = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 20'(a);
      wdata = {11{$urandom}};
      ref_mem[a] = wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      int a;
      a = $urandom_range(0, 255);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        en = 1; we = 1; addr = 20'(a); wdata = {11{$urandom}}; ref_mem[a] = wdata;
      end else begin
        en = 1; we = 0; addr = 20'(a);
        @(negedge clk); en = 0;
        checks++;
        if (rdata != ref_mem[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
