// tb_control_block: the control block with two behavioural PE models, a DMA model and a
// buffer-port model whose read data encode the address read, so every fed word can be traced.
// Program: three attention heads, interleaved by the host, each with LOADs, a two-k-tile MAC
// chain, a second MAC on the same weight tile (a weight-reuse candidate), softmax, layer-norm
// with residual and a STORE; two rounds in normal mode and one in low-power mode.
// Checks: no instruction issues before the producers of its source tags have finished (DMA
// done, or PE done with all result words written); instructions of one head issue in program
// order; a MAC chain stays on one PE; each PE receives exactly the words of its command from
// the right addresses (activation buffer at a_addr, weight or residual stream at w_addr, none
// for a reused weight tile); result words are written at o_addr onwards; in low-power mode
// only PE 0 works; every instruction issues once and the block ends idle. Compute stalls,
// memory stalls, staggered issue and weight reuse must each be counted at least once.
module tb_control_block;
  import acceltran_pkg::*;
  localparam int NPE = 2;
  logic clk = 0, rst_n = 0;
  logic lp_mode, instr_valid, instr_ready, idle;
  instr_t instr;
  logic dma_cmd_valid, dma_cmd_ready, dma_done;
  instr_t dma_cmd;
  logic buf_req, buf_gnt, buf_we;
  bufsel_e buf_sel;
  logic [BADW-1:0] buf_addr;
  sword_t buf_wdata, buf_rdata;
  logic [NPE-1:0] pe_cmd_valid, pe_done, pe_act_valid, pe_act_afull, pe_wgt_valid, pe_wgt_afull,
                  pe_out_valid, pe_out_ready, pe_gate;
  pe_cmd_t pe_cmd;
  sword_t pe_feed_word;
  sword_t [NPE-1:0] pe_out_word;
  logic curve_we;
  logic [3:0] curve_idx;
  logic [DW-1:0] curve_rho, curve_tau;
  logic [31:0] n_compute_stall, n_memory_stall, n_stagger, n_reuse, n_overlap, n_issued;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  control_block #(.NPE(NPE), .WIN(4), .IQD(16), .NPTS(16)) dut (.clk, .rst_n, .lp_mode,
    .instr_valid, .instr_ready, .instr, .idle, .dma_cmd_valid, .dma_cmd_ready, .dma_cmd,
    .dma_done, .buf_req, .buf_gnt, .buf_we, .buf_sel, .buf_addr, .buf_wdata, .buf_rdata,
    .pe_cmd_valid, .pe_cmd, .pe_done, .pe_act_valid, .pe_act_afull, .pe_wgt_valid,
    .pe_wgt_afull, .pe_feed_word, .pe_out_valid, .pe_out_ready, .pe_out_word, .pe_gate,
    .curve_we, .curve_idx, .curve_rho, .curve_tau, .n_compute_stall, .n_memory_stall,
    .n_stagger, .n_reuse, .n_overlap, .n_issued);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void fail(input string s);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, s);
  endfunction

  // ---------------------------------------------------------------- program bookkeeping
  instr_t prog [$];
  instr_t by_id [int];
  bit     issued [int], completed [int];
  int     producer_of [int];   // tag -> id of its latest producer

  // every instruction carries its id in arg (arg is not interpreted by the control block
  // except as rho / scale, which the PE models ignore)
  function automatic int id_of(input instr_t i);
    return int'(i.arg);
  endfunction

  function automatic void on_issue(input instr_t i);
    int id;
    id = id_of(i);
    checks++;
    if (issued.exists(id)) fail($sformatf("id %0d issued twice", id));
    issued[id] = 1;
    for (int k = 0; k < 2; k++) begin
      int t;
      t = (k == 0) ? int'(i.src0) : int'(i.src1);
      if (t != 0) begin
        int pid;
        pid = -1;
        for (int j = 0; j < id; j++) if (int'(by_id[j].dst) == t) pid = j;
        checks++;
        if (pid >= 0 && !completed.exists(pid))
          fail($sformatf("id %0d issued before its producer %0d finished", id, pid));
      end
    end
    for (int j = 0; j < id; j++) begin   // program order within a head
      if (by_id[j].head == i.head && !issued.exists(j)) fail($sformatf("id %0d passed %0d of its head", id, j));
    end
  endfunction

  // ---------------------------------------------------------------- DMA model
  int dma_left;
  int dma_id;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dma_cmd_ready <= 1'b1; dma_done <= 1'b0; dma_left = 0; end
    else begin
      dma_done <= 1'b0;
      if (dma_cmd_valid && dma_cmd_ready) begin
        on_issue(dma_cmd);
        dma_id = id_of(dma_cmd);
        dma_left = int'(dma_cmd.len) + $urandom_range(2, 30);
        dma_cmd_ready <= 1'b0;
      end else if (!dma_cmd_ready) begin
        dma_left--;
        if (dma_left == 0) begin
          dma_done <= 1'b1;
          dma_cmd_ready <= 1'b1;
          completed[dma_id] = 1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- buffer port model
  // read data: data[0] = address, data[1] = buffer select; writes are checked by the PE side
  always @(posedge clk) begin
    if (buf_req && buf_gnt && !buf_we) begin
      buf_rdata <= '0;
      buf_rdata.data[0] <= elem_t'(buf_addr);
      buf_rdata.data[1] <= elem_t'(buf_sel);
    end
    #1 buf_gnt = ($urandom_range(0, 4) != 0);
  end

  // ---------------------------------------------------------------- PE models
  int  pe_id [NPE];
  bit  pe_busy [NPE];
  int  na [NPE], nb [NPE], ga [NPE], gb [NPE], nout [NPE], sent [NPE], wait_c [NPE];
  int  chain_pe [int];    // o_addr of an open chain -> PE
  int  n_lp_bad = 0, n_reuse_seen = 0;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    assign pe_out_valid[p] = pe_busy[p] && ga[p] == na[p] && gb[p] == nb[p] &&
                             wait_c[p] == 0 && sent[p] < nout[p];
    always_comb begin
      pe_out_word[p] = '0;
      pe_out_word[p].data[0] = elem_t'(sent[p]);
      pe_out_word[p].data[1] = elem_t'(pe_id[p]);
    end
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pe_busy[p] = 0; pe_done[p] <= 1'b0; na[p] = 0; nb[p] = 0; ga[p] = 0; gb[p] = 0;
        nout[p] = 0; sent[p] = 0; wait_c[p] = 0; pe_id[p] = 0;
        pe_act_afull[p] <= 1'b0; pe_wgt_afull[p] <= 1'b0;
      end else begin
        pe_done[p] <= 1'b0;
        if (pe_cmd_valid[p]) begin
          instr_t i;
          int id;
          id = int'(pe_cmd.arg);
          i = by_id[id];
          on_issue(i);
          checks++;
          if (pe_busy[p]) fail($sformatf("command to busy PE %0d", p));
          if (lp_mode && p != 0) n_lp_bad++;
          if (i.op == OP_MAC) begin
            checks++;
            if (!i.acc_first && (!chain_pe.exists(int'(i.o_addr)) || chain_pe[int'(i.o_addr)] != p))
              fail($sformatf("MAC chain id %0d moved PE", id));
            if (i.acc_first) chain_pe[int'(i.o_addr)] = p;
            if (pe_cmd.reuse_w) n_reuse_seen++;
          end
          pe_busy[p] = 1; pe_id[p] = id; ga[p] = 0; gb[p] = 0; sent[p] = 0;
          wait_c[p] = $urandom_range(1, 20);
          case (i.op)
            OP_MAC: begin
              na[p] = 16; nb[p] = pe_cmd.reuse_w ? 0 : 16; nout[p] = i.acc_last ? 16 : 0;
            end
            OP_SMX: begin na[p] = int'(i.len) * int'(i.rows); nb[p] = 0; nout[p] = na[p]; end
            default: begin
              na[p] = int'(i.len) * int'(i.rows); nb[p] = i.residual ? na[p] : 0; nout[p] = na[p];
            end
          endcase
        end else if (pe_busy[p]) begin
          instr_t i;
          i = by_id[pe_id[p]];
          if (pe_act_valid[p]) begin
            checks++;
            if (int'(pe_feed_word.data[0]) != int'(i.a_addr) + ga[p] ||
                int'(pe_feed_word.data[1]) != int'(BUF_ACT))
              fail($sformatf("PE %0d id %0d act word %0d from wrong address", p, pe_id[p], ga[p]));
            ga[p]++;
          end
          if (pe_wgt_valid[p]) begin
            checks++;
            if (int'(pe_feed_word.data[0]) != int'(i.w_addr) + gb[p] ||
                int'(pe_feed_word.data[1]) != int'(i.op == OP_MAC ? BUF_WGT : BUF_ACT))
              fail($sformatf("PE %0d id %0d weight word %0d from wrong address", p, pe_id[p], gb[p]));
            gb[p]++;
          end
          checks++;
          if (ga[p] > na[p] || gb[p] > nb[p]) fail("too many words fed");
          if (ga[p] == na[p] && gb[p] == nb[p] && wait_c[p] > 0) wait_c[p]--;
          if (pe_out_valid[p] && pe_out_ready[p]) begin
            checks++;
            if (!buf_we || buf_sel != BUF_ACT || int'(buf_addr) != int'(i.o_addr) + sent[p])
              fail($sformatf("PE %0d id %0d result word %0d written wrongly", p, pe_id[p], sent[p]));
            sent[p]++;
          end
          if (ga[p] == na[p] && gb[p] == nb[p] && wait_c[p] == 0 && sent[p] == nout[p]) begin
            pe_done[p] <= 1'b1;
            pe_busy[p] = 0;
            completed[pe_id[p]] = 1;
          end
        end
        pe_act_afull[p] <= ($urandom_range(0, 5) == 0);
        pe_wgt_afull[p] <= ($urandom_range(0, 5) == 0);
      end
    end
  end

  // ---------------------------------------------------------------- program
  int next_tag = 1;
  instr_t hq [3][$];
  function automatic instr_t mk(input opcode_e op, input int head, input int s0, input int s1,
                                input int dst);
    instr_t i;
    i = '0;
    i.op = op; i.head = 4'(head); i.src0 = TAGW'(s0); i.src1 = TAGW'(s1); i.dst = TAGW'(dst);
    return i;
  endfunction

  task automatic head_prog(input int round, input int h);
    int tw, ta, to1, to2, ts, tl, ab, wb;
    instr_t i;
    tw = next_tag; ta = next_tag + 1; to1 = next_tag + 2; to2 = next_tag + 3;
    ts = next_tag + 4; tl = next_tag + 5;
    next_tag += 7;
    ab = (round * 3 + h) * 256; wb = (round * 3 + h) * 64;
    i = mk(OP_LOAD, h, 0, 0, tw); i.len = 32; i.buf_sel = BUF_WGT; i.o_addr = BADW'(wb); hq[h].push_back(i);
    i = mk(OP_LOAD, h, 0, 0, ta); i.len = 48; i.o_addr = BADW'(ab); hq[h].push_back(i);
    i = mk(OP_MAC, h, tw, ta, 0); i.w_addr = BADW'(wb); i.a_addr = BADW'(ab);
    i.o_addr = BADW'(ab + 64); i.acc_first = 1; hq[h].push_back(i);
    i = mk(OP_MAC, h, tw, ta, to1); i.w_addr = BADW'(wb + 16); i.a_addr = BADW'(ab + 16);
    i.o_addr = BADW'(ab + 64); i.acc_last = 1; hq[h].push_back(i);
    i = mk(OP_MAC, h, ta, to1, to2); i.w_addr = BADW'(wb + 16); i.a_addr = BADW'(ab + 32);
    i.o_addr = BADW'(ab + 80); i.acc_first = 1; i.acc_last = 1; i.gelu = 1; hq[h].push_back(i);
    i = mk(OP_SMX, h, to1, 0, ts); i.a_addr = BADW'(ab + 64); i.o_addr = BADW'(ab + 96);
    i.len = 2; i.rows = 4; hq[h].push_back(i);
    i = mk(OP_LN, h, to2, ta, tl); i.a_addr = BADW'(ab + 80); i.w_addr = BADW'(ab);
    i.o_addr = BADW'(ab + 112); i.len = 3; i.rows = 1; i.residual = 1; hq[h].push_back(i);
    i = mk(OP_STORE, h, ts, tl, 0); i.a_addr = BADW'(ab + 96); i.len = 8; hq[h].push_back(i);
  endtask

  task automatic run_round(input int round);
    for (int h = 0; h < 3; h++) head_prog(round, h);
    for (int n = 0; n < 8; n++)
      for (int h = 0; h < 3; h++) begin
        instr_t i;
        i = hq[h].pop_front();
        i.arg = DW'(by_id.num());
        by_id[by_id.num()] = i;
        prog.push_back(i);
      end
  endtask

  task automatic send_all();
    while (prog.size() > 0) begin
      @(negedge clk);
      instr = prog.pop_front(); instr_valid = 1;
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
      #1 instr_valid = 0;
    end
    repeat (3) @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  initial begin
    lp_mode = 0; instr_valid = 0; instr = '0; buf_gnt = 0; buf_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_round(0);
    run_round(1);
    send_all();
    @(negedge clk) lp_mode = 1;
    run_round(2);
    send_all();
    @(negedge clk) lp_mode = 0;
    checks++;
    if (issued.num() != by_id.num() || completed.num() != by_id.num())
      fail($sformatf("issued %0d completed %0d of %0d", issued.num(), completed.num(), by_id.num()));
    checks++;
    if (n_issued != 32'(by_id.num())) fail("issue counter");
    checks++;
    if (n_lp_bad != 0) fail("PE 1 used in low-power mode");
    checks++;
    if (n_reuse != 32'(n_reuse_seen)) fail("reuse counter");
    $display("compute stalls %0d, memory stalls %0d, staggered %0d, reuse %0d, overlap %0d",
             n_compute_stall, n_memory_stall, n_stagger, n_reuse, n_overlap);
    checks += 4;
    if (n_compute_stall == 0) fail("no compute stall");
    if (n_memory_stall == 0) fail("no memory stall");
    if (n_stagger == 0) fail("no staggered issue");
    if (n_reuse == 0) fail("no weight reuse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
