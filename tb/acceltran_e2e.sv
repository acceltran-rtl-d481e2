// acceltran_e2e: end-to-end test body for acceltran_top, shared by the reduced-size and the
// full-size testbench (tb_acceltran_top, tb_acceltran_full). FULL = 1 instantiates the top
// with no parameter list (every size at its default); FULL = 0 uses 4 PEs and small buffers.
//
// The program, built here as a host CPU would, runs a small slice of two attention heads and
// then one head again in low-power mode:
//   16 OP_CURVE points of the DynaTran transfer curve;
//   per head: LOAD two weight tiles W0, W1, three activation tiles A0..A2 and a residual
//   tile R; MAC chain O1 = W0 A0 (pruned with DynaTran) + W1 A1 (two k tiles, one PE);
//   MAC O2 = GeLU(W1 A2), issued after O1 (so its PE still holds W1: weight reuse);
//   four SMX ops on the rows of O1 (scale 1/4); four LN ops on the rows of O2 + R;
//   STOREs of O1, O2, the softmax and the layer-norm results to main memory.
// Tags are unique; the host interleaves the two heads' instructions, and head 1's MACs
// may run ahead while head 0 waits for its softmax operands (staggered issue).
// The results in main memory are compared with a reference computed here: O1 and O2
// exactly, softmax and layer-norm within the tolerances of their unit tests.
//
// Mechanisms counted, each must occur at least once: compute stalls, memory stalls,
// staggered (out of program order) issue across heads, weight reuse, MAC work overlapping
// softmax work, DynaTran pruning of a non-zero operand, GeLU changing a value, power gating
// (a PE gated while another works) and low-power mode (upper half of the PEs never used).
module acceltran_e2e
  import acceltran_pkg::*;
#(
  parameter bit FULL = 1'b0
);
  localparam int T = 16;
  localparam int NPE_R = 4;
  localparam int NPE = FULL ? 64 : NPE_R;
  logic clk = 0, rst_n = 0;
  logic lp_mode, instr_valid, instr_ready, idle;
  instr_t instr;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [MADW-1:0] mem_rd_addr, mem_wr_addr;
  sword_t mem_rsp_data, mem_wr_data;
  logic [NPE-1:0] pe_gate;
  logic [31:0] n_compute_stall, n_memory_stall, n_stagger, n_reuse, n_overlap, n_issued;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  if (FULL) begin : g_full
    acceltran_top dut (.clk, .rst_n, .lp_mode, .instr_valid, .instr_ready, .instr, .idle,
      .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
      .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data, .pe_gate,
      .n_compute_stall, .n_memory_stall, .n_stagger, .n_reuse, .n_overlap, .n_issued);
  end else begin : g_small
    acceltran_top #(.NPE(NPE_R), .ACT_BYTES(40960), .WGT_BYTES(40960), .MASK_BYTES(4096))
      dut (.clk, .rst_n, .lp_mode, .instr_valid, .instr_ready, .instr, .idle,
      .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
      .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data, .pe_gate,
      .n_compute_stall, .n_memory_stall, .n_stagger, .n_reuse, .n_overlap, .n_issued);
  end

  main_memory_model #(.LAT(8), .STALL_PCT(15)) u_mem (.clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .wr_valid(mem_wr_valid),
    .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- observation
  int n_gated_while_busy = 0, n_lp_upper_used = 0, n_lp_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (pe_gate != '0 && pe_gate != '1) n_gated_while_busy++;
    if (lp_mode) begin
      n_lp_cycles++;
      for (int p = (NPE + 1) / 2; p < NPE; p++) if (!pe_gate[p]) n_lp_upper_used++;
    end
  end

  // ---------------------------------------------------------------- helpers
  int c_rho [16], c_tau [16];
  int n_pruned = 0, n_gelu_changed = 0;

  function automatic sword_t compress(input int v [T]);
    sword_t w;
    int k;
    w = '0; k = 0;
    for (int p = 0; p < T; p++)
      if (v[p] == 0) w.mask[p] = 1'b1;
      else begin w.data[k] = elem_t'(v[p]); k++; end
    return w;
  endfunction

  function automatic int dense_at(input sword_t w, input int p);
    vec_t d;
    elem_t e;
    d = expand(w.data, w.mask);
    e = d[p];
    return int'(e);
  endfunction

  function automatic int tau_of(input int rho);
    int t;
    t = c_tau[15];
    for (int n = 15; n >= 0; n--) if (c_rho[n] >= rho) t = c_tau[n];
    return t;
  endfunction

  function automatic longint sat20(input longint v);
    if (v > 524287) return 524287;
    if (v < -524288) return -524288;
    return v;
  endfunction

  instr_t prog [$];

  function automatic instr_t mk(input opcode_e op, input int head, input int src0,
                                input int src1, input int dst);
    instr_t i;
    i = '0;
    i.op = op; i.head = 4'(head);
    i.src0 = TAGW'(src0); i.src1 = TAGW'(src1); i.dst = TAGW'(dst);
    return i;
  endfunction

  // operand tiles per instance (inst = 0, 1: heads 0 and 1; inst = 2: low-power run)
  int w0 [3][T][T], w1 [3][T][T], a0 [3][T][T], a1 [3][T][T], a2 [3][T][T], rr [3][T][T];
  int rho_x [3];
  localparam int SMX_SCALE = 16384;   // 1/sqrt(16)

  function automatic int rnd_elem();
    return ($urandom_range(0, 9) < 3) ? 0 : $signed($urandom_range(0, 65536)) - 32768;
  endfunction

  task automatic build(input int inst, input int head);
    int mb, ab, wb, tg;
    instr_t i;
    mb = inst * 1024; ab = inst * 128; wb = inst * 32; tg = 1 + inst * 16;
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) begin
        w0[inst][r][c] = rnd_elem(); w1[inst][r][c] = rnd_elem();
        a0[inst][r][c] = rnd_elem(); a1[inst][r][c] = rnd_elem(); a2[inst][r][c] = rnd_elem();
        rr[inst][r][c] = rnd_elem();
      end
    // main memory image: W tiles as row words, A tiles as column words, R as row words
    for (int r = 0; r < T; r++) begin
      int v0 [T], v1 [T], c0 [T], c1 [T], c2 [T], vr [T];
      for (int c = 0; c < T; c++) begin
        v0[c] = w0[inst][r][c]; v1[c] = w1[inst][r][c]; vr[c] = rr[inst][r][c];
        c0[c] = a0[inst][c][r]; c1[c] = a1[inst][c][r]; c2[c] = a2[inst][c][r];
      end
      u_mem.mem[mb + 0 + r]  = compress(v0);
      u_mem.mem[mb + 16 + r] = compress(v1);
      u_mem.mem[mb + 32 + r] = compress(c0);
      u_mem.mem[mb + 48 + r] = compress(c1);
      u_mem.mem[mb + 64 + r] = compress(c2);
      u_mem.mem[mb + 80 + r] = compress(vr);
    end
    // tags: tg+0 W0, +1 W1, +2 A0, +3 A1, +4 A2, +5 R, +6 O1, +7 O2, +8..11 S, +12..15 L
    for (int t = 0; t < 6; t++) begin
      i = mk(OP_LOAD, head, 0, 0, tg + t);
      i.len = 16;
      i.m_addr = MADW'(mb + 16 * t);
      i.buf_sel = (t < 2) ? BUF_WGT : BUF_ACT;
      i.o_addr = (t < 2) ? BADW'(wb + 16 * t) : BADW'(ab + 16 * (t - 2));
      prog.push_back(i);
    end
    rho_x[inst] = $urandom_range(20000, 50000);
    i = mk(OP_MAC, head, tg + 0, tg + 2, 0);      // O1 k tile 0, pruned
    i.w_addr = BADW'(wb); i.a_addr = BADW'(ab); i.o_addr = BADW'(ab + 64);
    i.acc_first = 1; i.prune = 1; i.arg = DW'(rho_x[inst]);
    prog.push_back(i);
    i = mk(OP_MAC, head, tg + 1, tg + 3, tg + 6); // O1 k tile 1
    i.w_addr = BADW'(wb + 16); i.a_addr = BADW'(ab + 16); i.o_addr = BADW'(ab + 64);
    i.acc_last = 1;
    prog.push_back(i);
    i = mk(OP_MAC, head, tg + 4, tg + 6, tg + 7); // O2 = GeLU(W1 A2), after O1
    i.w_addr = BADW'(wb + 16); i.a_addr = BADW'(ab + 32); i.o_addr = BADW'(ab + 80);
    i.acc_first = 1; i.acc_last = 1; i.gelu = 1;
    prog.push_back(i);
    for (int q = 0; q < 4; q++) begin
      i = mk(OP_SMX, head, tg + 6, 0, tg + 8 + q);
      i.a_addr = BADW'(ab + 64 + 4 * q); i.o_addr = BADW'(ab + 96 + 4 * q);
      i.len = 1; i.rows = 4; i.arg = DW'(SMX_SCALE);
      prog.push_back(i);
    end
    for (int q = 0; q < 4; q++) begin
      i = mk(OP_LN, head, tg + 7, tg + 5, tg + 12 + q);
      i.a_addr = BADW'(ab + 80 + 4 * q); i.w_addr = BADW'(ab + 48 + 4 * q);
      i.o_addr = BADW'(ab + 112 + 4 * q); i.len = 1; i.rows = 4; i.residual = 1;
      prog.push_back(i);
    end
    i = mk(OP_STORE, head, tg + 6, tg + 7, 0);
    i.a_addr = BADW'(ab + 64); i.m_addr = MADW'(mb + 512); i.len = 32;   // O1, O2
    prog.push_back(i);
    for (int q = 0; q < 4; q++) begin
      i = mk(OP_STORE, head, tg + 8 + q, tg + 12 + q, 0);
      i.a_addr = BADW'(ab + 96 + 4 * q); i.m_addr = MADW'(mb + 544 + 4 * q); i.len = 4;
      prog.push_back(i);
      i.a_addr = BADW'(ab + 112 + 4 * q); i.m_addr = MADW'(mb + 560 + 4 * q);
      prog.push_back(i);
    end
  endtask

  task automatic run_prog();
    while (prog.size() > 0) begin
      @(negedge clk);
      instr = prog.pop_front(); instr_valid = 1;
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
      #1 instr_valid = 0;
    end
    repeat (4) @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  // ---------------------------------------------------------------- checking
  task automatic check(input int inst);
    int mb, tau;
    longint o1 [T][T], o2 [T][T];
    mb = inst * 1024;
    tau = tau_of(rho_x[inst]);
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) begin
        longint s1, s2, sc, g;
        s1 = 0; s2 = 0;
        for (int k = 0; k < T; k++) begin
          int wv, av, am, wmg;
          wv = w0[inst][r][k]; av = a0[inst][k][c];
          wmg = wv < 0 ? -wv : wv; am = av < 0 ? -av : av;
          if (wmg < tau) wv = 0;
          if (am < tau) av = 0;
          s1 += longint'(wv) * longint'(av);
          s1 += longint'(w1[inst][r][k]) * longint'(a1[inst][k][c]);
          s2 += longint'(w1[inst][r][k]) * longint'(a2[inst][k][c]);
        end
        o1[r][c] = sat20(s1 >>> 16);
        sc = s2 >>> 16;
        g = 32768 + (sc >>> 2) + (sc >>> 3);
        if (g < 0) g = 0;
        if (g > 65536) g = 65536;
        o2[r][c] = sat20((sc * g) >>> 16);
        if (o2[r][c] != sat20(sc)) n_gelu_changed++;
      end
    if (inst == 0)
      for (int r = 0; r < T; r++)
        for (int k = 0; k < T; k++) begin
          if (w0[inst][r][k] != 0 && (w0[inst][r][k] < tau && w0[inst][r][k] > -tau)) n_pruned++;
          if (a0[inst][k][r] != 0 && (a0[inst][k][r] < tau && a0[inst][k][r] > -tau)) n_pruned++;
        end
    for (int r = 0; r < T; r++) begin
      real mx, s, mean, vr;
      real xs [T], xl [T];
      mx = -1.0e9; s = 0.0; mean = 0.0; vr = 0.0;
      for (int c = 0; c < T; c++) begin
        int g1, g2, gs, gl;
        g1 = dense_at(u_mem.peek(MADW'(mb + 512 + r)), c);
        g2 = dense_at(u_mem.peek(MADW'(mb + 528 + r)), c);
        checks += 2;
        if (longint'(g1) != o1[r][c]) begin
          failures++;
          if (failures < 6) $display("inst %0d O1[%0d][%0d] got %0d exp %0d", inst, r, c, g1, o1[r][c]);
        end
        if (longint'(g2) != o2[r][c]) begin
          failures++;
          if (failures < 6) $display("inst %0d O2[%0d][%0d] got %0d exp %0d", inst, r, c, g2, o2[r][c]);
        end
        begin
          longint t1, t2;
          int rv;
          rv = rr[inst][r][c];
          t1 = (o1[r][c] * SMX_SCALE) >>> 16;
          t2 = o2[r][c] + longint'(rv);
          xs[c] = $itor(t1) / 65536.0;
          xl[c] = $itor(t2) / 65536.0;
        end
        if (xs[c] > mx) mx = xs[c];
        mean += xl[c];
      end
      mean = mean / T;
      for (int c = 0; c < T; c++) begin
        s += $exp(xs[c] - mx);
        vr += (xl[c] - mean) * (xl[c] - mean);
      end
      vr = vr / T;
      for (int c = 0; c < T; c++) begin
        real es, el, gs, gl;
        int is, il;
        is = dense_at(u_mem.peek(MADW'(mb + 544 + r)), c);
        il = dense_at(u_mem.peek(MADW'(mb + 560 + r)), c);
        es = $exp(xs[c] - mx) / s;
        el = (xl[c] - mean) / $sqrt(vr);
        gs = $itor(is) / 65536.0;
        gl = $itor(il) / 65536.0;
        checks += 2;
        if (gs - es > 0.004 + 0.01 * es || es - gs > 0.004 + 0.01 * es) begin
          failures++;
          if (failures < 6) $display("inst %0d softmax[%0d][%0d] got %f exp %f", inst, r, c, gs, es);
        end
        if (gl - el > 0.01 + 0.005 * (el < 0 ? -el : el) ||
            el - gl > 0.01 + 0.005 * (el < 0 ? -el : el)) begin
          failures++;
          if (failures < 6) $display("inst %0d layernorm[%0d][%0d] got %f exp %f", inst, r, c, gl, el);
        end
      end
    end
  endtask

  task automatic need(input string what, input longint n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("  never happened: %s", what);
    end
  endtask

  int issued_exp;
  initial begin
    lp_mode = 0; instr_valid = 0; instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      instr_t i;
      c_rho[n] = n * 4096; c_tau[n] = n * 1000;
      i = mk(OP_CURVE, 0, 0, 0, 0);
      i.len = 16'(n); i.arg = DW'(c_rho[n]); i.m_addr = MADW'(c_tau[n]);
      prog.push_back(i);
    end
    begin   // the host interleaves the two heads' instruction streams
      instr_t q0 [$], q1 [$];
      q0 = prog; prog = {};
      build(0, 0);
      q1 = prog; prog = {};
      build(1, 1);
      q0 = {q0, q1};   // curve points, then head 0
      q1 = prog; prog = {};
      for (int n = 0; n < 16; n++) prog.push_back(q0.pop_front());
      while (q0.size() > 0 || q1.size() > 0) begin
        if (q0.size() > 0) prog.push_back(q0.pop_front());
        if (q1.size() > 0) prog.push_back(q1.pop_front());
      end
    end
    issued_exp = prog.size();
    run_prog();
    check(0);
    check(1);
    // low-power mode: the same work for one head on half of the PEs
    @(negedge clk) lp_mode = 1;
    build(2, 0);
    issued_exp += prog.size();
    run_prog();
    check(2);
    @(negedge clk) lp_mode = 0;
    checks++;
    if (n_issued != 32'(issued_exp)) begin
      failures++;
      $display("issued %0d of %0d", n_issued, issued_exp);
    end
    need("compute stalls", n_compute_stall);
    need("memory stalls", n_memory_stall);
    need("staggered issues", n_stagger);
    need("weight reuse", n_reuse);
    need("MAC/softmax overlap cycles", n_overlap);
    need("DynaTran pruned operands", n_pruned);
    need("GeLU changed outputs", n_gelu_changed);
    need("power-gated cycles", n_gated_while_busy);
    need("low-power mode cycles", n_lp_cycles);
    checks++;
    if (n_lp_upper_used != 0) begin
      failures++;
      $display("upper-half PEs used in low-power mode: %0d", n_lp_upper_used);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
