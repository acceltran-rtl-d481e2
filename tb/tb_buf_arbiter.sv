// tb_buf_arbiter: random requests from the two requesters; checks that at most one is
// granted, that a lone requester is always granted, that contention alternates, and that
// the granted requester's fields reach the buffer port.
module tb_buf_arbiter;
  import acceltran_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] req, gnt, we;
  bufsel_e [1:0] sel;
  logic [1:0][BADW-1:0] addr;
  sword_t [1:0] wdata;
  logic b_en, b_we; bufsel_e b_sel; logic [BADW-1:0] b_addr; sword_t b_wdata;
  int checks = 0, failures = 0, last = -1;
  always #5 clk = ~clk;

  buf_arbiter dut (.clk, .rst_n, .req, .gnt, .we, .sel, .addr, .wdata, .b_en, .b_we, .b_sel,
                   .b_addr, .b_wdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; sel = '0; addr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      req = 2'($urandom); we = 2'($urandom);
      addr[0] = BADW'($urandom); addr[1] = BADW'($urandom);
      #1;
      checks++;
      if (gnt[0] && gnt[1]) failures++;
      if (req == 2'b01 || req == 2'b10) begin
        checks++; if (gnt != req) failures++;
      end
      if (req == 2'b11) begin
        checks++;
        if (last >= 0 && gnt[last]) failures++;     // the other one's turn
        last = gnt[1] ? 1 : 0;
      end
      if (|gnt) begin
        int g;
        g = gnt[1] ? 1 : 0;
        checks++;
        if (b_addr != addr[g] || b_we != we[g] || !b_en) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
