// tb_dma_controller: random LOAD and STORE commands between the main memory model and a
// model of the buffer port that refuses the port at random (as the buffer arbiter does when
// the control block holds the buffers). Every word loaded must land at o_addr + i of the
// chosen buffer with the content of main memory word m_addr + i; every stored word must reach
// main memory unchanged. Counts memory stalls seen (rd_ready low while a read was wanted) and
// refused buffer requests; both must happen.
module tb_dma_controller;
  import acceltran_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  instr_t cmd;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [MADW-1:0] mem_rd_addr, mem_wr_addr;
  sword_t mem_rsp_data, mem_wr_data;
  logic buf_req, buf_gnt, buf_we;
  bufsel_e buf_sel;
  logic [BADW-1:0] buf_addr;
  sword_t buf_wdata, buf_rdata;
  int checks = 0, failures = 0, n_mem_stall = 0, n_buf_refused = 0;
  always #5 clk = ~clk;

  dma_controller #(.QDEP(8)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .buf_req, .buf_gnt, .buf_we, .buf_sel, .buf_addr, .buf_wdata, .buf_rdata);

  main_memory_model #(.LAT(7), .STALL_PCT(25)) u_mem (.clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid),
    .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  // buffer port model
  sword_t bufm [logic [BADW+1:0]];
  always @(posedge clk) begin
    if (buf_req && buf_gnt) begin
      if (buf_we) bufm[{buf_sel, buf_addr}] = buf_wdata;
      else buf_rdata <= bufm.exists({buf_sel, buf_addr}) ? bufm[{buf_sel, buf_addr}] : '0;
    end
    if (buf_req && !buf_gnt) n_buf_refused++;
    if (mem_rd_valid && !mem_rd_ready) n_mem_stall++;
    #1 buf_gnt = ($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sword_t rand_word();
    sword_t w;
    for (int p = 0; p < VEC; p++) begin
      w.data[p] = elem_t'($urandom());
      w.mask[p] = $urandom_range(0, 1);
    end
    return w;
  endfunction

  initial begin
    cmd_valid = 0; cmd = '0; buf_gnt = 0; buf_rdata = '0;
    // main memory holds random words at 0..4095
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = rand_word();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      instr_t c;
      int len;
      len = (it == 0) ? 1 : $urandom_range(1, 64);
      c = '0;
      c.len = 16'(len);
      c.m_addr = (it % 2 == 0) ? MADW'($urandom_range(0, 4000)) : MADW'(10000 + it * 100);
      c.o_addr = BADW'($urandom_range(0, 100000));
      c.a_addr = c.o_addr;
      if (it % 2 == 0) begin
        c.op = OP_LOAD;
        c.buf_sel = ($urandom_range(0, 1) == 1) ? BUF_WGT : BUF_ACT;
        if (it % 4 == 2) c.buf_sel = BUF_ACT;   // the next STORE reads it back
      end else c.op = OP_STORE;
      @(negedge clk);
      cmd = c; cmd_valid = 1;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 0;
      @(posedge clk);
      while (!done) @(posedge clk);
      for (int i = 0; i < len; i++) begin
        checks++;
        if (c.op == OP_LOAD) begin
          if (!bufm.exists({c.buf_sel, c.o_addr + BADW'(i)}) ||
              bufm[{c.buf_sel, c.o_addr + BADW'(i)}] != u_mem.peek(c.m_addr + MADW'(i))) begin
            failures++;
            if (failures < 5) $display("load %0d word %0d wrong", it, i);
          end
        end else begin
          sword_t bw;
          bw = bufm.exists({BUF_ACT, c.a_addr + BADW'(i)}) ? bufm[{BUF_ACT, c.a_addr + BADW'(i)}] : '0;
          if (u_mem.peek(c.m_addr + MADW'(i)) != bw) begin
            failures++;
            if (failures < 5) $display("store %0d word %0d wrong", it, i);
          end
        end
      end
    end
    checks += 2;
    if (n_mem_stall == 0) failures++;
    if (n_buf_refused == 0) failures++;
    $display("memory stalls %0d, refused buffer requests %0d", n_mem_stall, n_buf_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
