// tb_pe: drives one processing element through random command sequences and checks every
// result word against a reference computed here.
//   MAC chains of 1..3 k tiles (16x16 W times 16x16 A, operands in the zero-free word format
//   with random zeros), with and without DynaTran pruning (tau looked up here from the same
//   transfer curve), with GeLU on some chains and weight reuse (no weight words sent, held
//   tile used) on others. The expected output tile is exact: integer products, the same
//   rescaling, saturation and GeLU formula.
//   SMX with 1..4 rows of 1..4 words: compared with real softmax, tolerance 0.004 + 1 %.
//   LN with 1..2 rows, with and without residual words: compared with real layer-norm.
// Input words are offered with random gaps and the output FIFO is drained with random
// back-pressure. Every output word's mask must mark exactly its zero positions. The test
// also counts done pulses and weight-reuse hits.
module tb_pe;
  import acceltran_pkg::*;
  localparam int T = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done, busy;
  pe_cmd_t cmd;
  logic curve_we;
  logic [3:0] curve_idx;
  logic [DW-1:0] curve_rho, curve_tau;
  logic act_valid, act_ready, act_afull, wgt_valid, wgt_ready, wgt_afull;
  sword_t act_word, wgt_word, out_word;
  logic out_valid, out_ready, reuse_hit;
  int checks = 0, failures = 0;
  int n_done = 0, n_reuse = 0, n_out = 0;
  always #5 clk = ~clk;

  pe dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .busy, .curve_we, .curve_idx,
    .curve_rho, .curve_tau, .act_valid, .act_ready, .act_afull, .act_word, .wgt_valid,
    .wgt_ready, .wgt_afull, .wgt_word, .out_valid, .out_ready, .out_word, .reuse_hit);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin   // flops hold random values until reset
    if (done) n_done++;
    if (reuse_hit) n_reuse++;
  end

  // ------------------------------------------------------------------ helpers
  int c_rho [16], c_tau [16];

  function automatic sword_t compress(input int v [T]);
    sword_t w;
    int k;
    w = '0; k = 0;
    for (int p = 0; p < T; p++)
      if (v[p] == 0) w.mask[p] = 1'b1;
      else begin w.data[k] = elem_t'(v[p]); k++; end
    return w;
  endfunction

  function automatic int tau_of(input int rho);
    int t;
    t = c_tau[15];
    for (int n = 15; n >= 0; n--) if (c_rho[n] >= rho) t = c_tau[n];
    return t;
  endfunction

  function automatic int prune_v(input int v, input int tau);
    int m;
    m = (v < 0) ? -v : v;
    return (m >= tau) ? v : 0;
  endfunction

  function automatic longint sat20(input longint v);
    if (v > 524287) return 524287;
    if (v < -524288) return -524288;
    return v;
  endfunction

  // stimulus and expectation queues
  sword_t act_q [$], wgt_q [$];
  real    exp_q [$];     // expected dense values, one per element of each result word
  real    tol_q [$];     // absolute tolerance per word (0 = exact)
  real    rel_q [$];

  // input drivers with random gaps
  initial begin
    act_valid = 0; act_word = '0;
    forever begin
      bit fire;
      @(posedge clk);
      fire = act_valid && act_ready;
      #1;
      if (fire) act_valid = 0;
      if (!act_valid && act_q.size() > 0 && $urandom_range(0, 3) != 0) begin
        act_word = act_q.pop_front(); act_valid = 1;
      end
    end
  end
  initial begin
    wgt_valid = 0; wgt_word = '0;
    forever begin
      bit fire;
      @(posedge clk);
      fire = wgt_valid && wgt_ready;
      #1;
      if (fire) wgt_valid = 0;
      if (!wgt_valid && wgt_q.size() > 0 && $urandom_range(0, 3) != 0) begin
        wgt_word = wgt_q.pop_front(); wgt_valid = 1;
      end
    end
  end

  // output checker
  initial begin
    out_ready = 0;
    forever begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        vec_t d;
        real tol, rel;
        n_out++;
        d = expand(out_word.data, out_word.mask);
        if (exp_q.size() < T) begin
          failures++;
          $display("unexpected output word");
        end else begin
          tol = tol_q.pop_front();
          rel = rel_q.pop_front();
          for (int p = 0; p < T; p++) begin
            real e, g;
            elem_t dv;
            int di;
            dv = d[p]; di = int'(dv);
            g = $itor(di);
            e = exp_q.pop_front();
            checks++;
            if (g - e > tol + rel * (e < 0 ? -e : e) || e - g > tol + rel * (e < 0 ? -e : e)) begin
              failures++;
              if (failures < 8) $display("out word %0d pos %0d: got %0f exp %0f", n_out, p, g, e);
            end
            checks++;
            if (!out_word.mask[p] && di == 0) failures++;
          end
        end
      end
      #1 out_ready = ($urandom_range(0, 3) != 0);
    end
  end

  task automatic issue(input pe_cmd_t cm);
    @(negedge clk);
    cmd = cm; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_done();
    @(posedge clk);
    while (!done) @(posedge clk);
  endtask

  // ------------------------------------------------------------------ MAC chains
  int     held_w [T][T];     // weight tile held by the PE (after its last pruning)
  bit     have_w = 0;
  longint acc [T][T];
  int     n_reuse_exp = 0, n_cmds = 0;

  task automatic mac_chain(input int kt, input bit gelu, input bit prune, input bit reuse);
    int rho, tau;
    int wm [T][T], am [T][T];
    for (int k = 0; k < kt; k++) begin
      pe_cmd_t cm;
      bit use_reuse;
      use_reuse = reuse && have_w && k == 0;
      rho = $urandom_range(0, 65535);
      tau = prune ? tau_of(rho) : 0;
      // operands: W row words, A column words, values in [-0.5, 0.5], ~30 % zeros
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          am[i][j] = ($urandom_range(0, 9) < 3) ? 0 : $signed($urandom_range(0, 65536)) - 32768;
          if (!use_reuse)
            wm[i][j] = ($urandom_range(0, 9) < 3) ? 0 : $signed($urandom_range(0, 65536)) - 32768;
          else wm[i][j] = held_w[i][j];
        end
      for (int j = 0; j < T; j++) begin   // A column j: elements A[0..15][j]
        int col [T];
        for (int i = 0; i < T; i++) col[i] = am[i][j];
        act_q.push_back(compress(col));
      end
      if (!use_reuse)
        for (int i = 0; i < T; i++) begin
          int r [T];
          for (int j = 0; j < T; j++) r[j] = wm[i][j];
          wgt_q.push_back(compress(r));
        end
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          if (prune) begin
            wm[i][j] = prune_v(wm[i][j], tau);
            am[i][j] = prune_v(am[i][j], tau);
          end
          held_w[i][j] = wm[i][j];
        end
      have_w = 1;
      // reference accumulation: O[i][j] += sum_k W[i][k] A[k][j]
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          longint s;
          s = 0;
          for (int q = 0; q < T; q++) s += longint'(wm[i][q]) * longint'(am[q][j]);
          acc[i][j] = (k == 0) ? s : acc[i][j] + s;
        end
      if (k == kt - 1)
        for (int i = 0; i < T; i++) begin
          for (int j = 0; j < T; j++) begin
            longint sc, g, y;
            sc = acc[i][j] >>> 16;
            if (gelu) begin
              g = 32768 + (sc >>> 2) + (sc >>> 3);
              if (g < 0) g = 0;
              if (g > 65536) g = 65536;
              y = sat20((sc * g) >>> 16);
            end else y = sat20(sc);
            exp_q.push_back($itor(y));
          end
          tol_q.push_back(0.0); rel_q.push_back(0.0);
        end
      cm = '0;
      cm.op = OP_MAC; cm.gelu = gelu; cm.acc_first = (k == 0); cm.acc_last = (k == kt - 1);
      cm.prune = prune; cm.reuse_w = use_reuse; cm.arg = DW'(rho);
      if (use_reuse) n_reuse_exp++;
      n_cmds++;
      issue(cm);
      wait_done();
    end
  endtask

  // ------------------------------------------------------------------ softmax
  task automatic smx_op(input int rows, input int len, input bit small_scale);
    pe_cmd_t cm;
    int sc;
    sc = small_scale ? 8192 : 65536;
    for (int r = 0; r < rows; r++) begin
      real x [$];
      real mx, s;
      mx = -1.0e9;
      for (int b = 0; b < len; b++) begin
        int v [T];
        for (int p = 0; p < T; p++) begin
          longint xs;
          v[p] = ($urandom_range(0, 7) == 0) ? 0 : $signed($urandom_range(0, 6 * 65536)) - 3 * 65536;
          xs = (longint'(v[p]) * longint'(sc)) >>> 16;
          x.push_back($itor(xs) / 65536.0);
          if (x[x.size()-1] > mx) mx = x[x.size()-1];
        end
        act_q.push_back(compress(v));
      end
      s = 0.0;
      foreach (x[i]) s += $exp(x[i] - mx);
      foreach (x[i]) begin
        exp_q.push_back($exp(x[i] - mx) / s * 65536.0);
        if (i % T == 0) begin tol_q.push_back(0.004 * 65536.0); rel_q.push_back(0.01); end
      end
    end
    cm = '0;
    cm.op = OP_SMX; cm.len = 16'(len); cm.rows = 3'(rows); cm.arg = DW'(sc);
    n_cmds++;
    issue(cm);
    wait_done();
  endtask

  // ------------------------------------------------------------------ layer-norm
  task automatic ln_op(input int rows, input int len, input bit res);
    pe_cmd_t cm;
    for (int r = 0; r < rows; r++) begin
      real x [$];
      real mean, vr;
      mean = 0.0;
      for (int b = 0; b < len; b++) begin
        int v [T], rv [T];
        for (int p = 0; p < T; p++) begin
          v[p]  = ($urandom_range(0, 7) == 0) ? 0 : $signed($urandom_range(0, 4 * 65536)) - 2 * 65536;
          rv[p] = res ? $signed($urandom_range(0, 65536)) - 32768 : 0;
          x.push_back($itor(v[p] + rv[p]) / 65536.0);
          mean += x[x.size()-1];
        end
        act_q.push_back(compress(v));
        if (res) wgt_q.push_back(compress(rv));
      end
      mean = mean / x.size();
      vr = 0.0;
      foreach (x[i]) vr += (x[i] - mean) * (x[i] - mean);
      vr = vr / x.size();
      foreach (x[i]) begin
        exp_q.push_back((x[i] - mean) / $sqrt(vr) * 65536.0);
        if (i % T == 0) begin tol_q.push_back(0.01 * 65536.0); rel_q.push_back(0.005); end
      end
    end
    cm = '0;
    cm.op = OP_LN; cm.len = 16'(len); cm.rows = 3'(rows); cm.residual = res;
    n_cmds++;
    issue(cm);
    wait_done();
  endtask

  // ------------------------------------------------------------------ sequence
  initial begin
    cmd_valid = 0; cmd = '0; curve_we = 0; curve_idx = 0; curve_rho = 0; curve_tau = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      c_rho[n] = n * 4096; c_tau[n] = n * 1200;
      @(negedge clk);
      curve_we = 1; curve_idx = 4'(n); curve_rho = DW'(c_rho[n]); curve_tau = DW'(c_tau[n]);
    end
    @(negedge clk) curve_we = 0;
    for (int it = 0; it < 24; it++) begin
      case (it % 4)
        0, 1: mac_chain($urandom_range(1, 3), $urandom_range(0, 1), (it % 3 != 0), (it % 4 == 1));
        2:    smx_op($urandom_range(1, 4), $urandom_range(1, 4), $urandom_range(0, 1));
        default: ln_op($urandom_range(1, 2), $urandom_range(1, 4), $urandom_range(0, 1));
      endcase
    end
    mac_chain(1, 1, 0, 1);   // reuse straight after a chain
    // drain
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d expected values never came", exp_q.size()); end
    checks++;
    if (n_done != n_cmds) begin failures++; $display("done %0d cmds %0d", n_done, n_cmds); end
    checks++;
    if (n_reuse != n_reuse_exp || n_reuse == 0) begin failures++; $display("reuse %0d exp %0d", n_reuse, n_reuse_exp); end
    checks++;
    if (act_q.size() != 0 || wgt_q.size() != 0) failures++;
    $display("commands %0d, output words %0d, weight reuse %0d", n_cmds, n_out, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
