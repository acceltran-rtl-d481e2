// pe: processing element (paper, Fig. 5), the basic compute block of the accelerator.
//
// Inside: an activation FIFO and a weight FIFO that receive zero-free words from the
// buffers, the DynaTran module, one pre-compute sparsity module per MAC lane, NLANE MAC lanes,
// NSMX softmax units, one layer-norm unit, the post-compute sparsity module, and an output
// FIFO (the outgoing side of the paper's bidirectional activation FIFO) that holds result
// words until the control block writes them to the activation buffer.
//
// Operations (one command at a time, cmd_valid/cmd_ready):
//   OP_MAC  W (16x16, sent as 16 row words W[i,:]) times A (16x16, sent as 16 column words
//           A[:,j]); reuse_w skips the weight words and keeps the tile held from the last
//           MAC. Both tiles are pruned together by DynaTran in one cycle (if prune), then for
//           16 cycles row i of W meets all 16 columns: lane j gets pre_sparsity(W[i], A[:,j])
//           and adds the partial sum of O[i,j] kept from the previous k tile unless
//           acc_first. On acc_last the 16 output rows (GeLU applied if gelu) go through the
//           post-compute sparsity module into the output FIFO. The PE holds the 16x16
//           partial sums between the k tiles of one output tile (dataflow [b,i,j,k], k
//           innermost), so a chain of k tiles must be sent to the same PE.
//   OP_SMX  rows (1..NSMX) rows of len words each; row r goes to softmax unit r, the units
//           run in parallel; results leave in row order.
//   OP_LN   rows rows of len words; each word is added to a residual word taken from the
//           weight FIFO when residual is set, then normalised by the layer-norm unit.
// done pulses when the command has finished (for a MAC without acc_last: after its 16
// compute cycles; otherwise when the last result word has entered the output FIFO).
//
// Paper vs. this design: the block list and their order are the paper's; the word formats,
// the handshakes, the partial-sum storage, the MAC schedule (one output row per cycle over
// the 16 lanes) and the output FIFO are this design's choices. The MAC lanes multiply only
// matched non-zero pairs (the rest are gated), but a lane still takes one cycle per output
// element, so sparsity saves energy here, not cycles.
module pe
  import acceltran_pkg::*;
#(
  parameter int unsigned NLANE = 16,   // MAC lanes per PE (AccelTran-Edge: 16)
  parameter int unsigned NSMX  = 4,    // softmax units per PE (AccelTran-Edge: 4)
  parameter int unsigned M     = 16,   // multipliers per MAC lane
  parameter int unsigned SMXB  = 32,   // words per softmax row (512 tokens)
  parameter int unsigned LNB   = 48,   // words per layer-norm row (768 hidden)
  parameter int unsigned NPTS  = 16,   // DynaTran curve points
  parameter int unsigned FDEP  = 16,   // activation / weight FIFO depth
  parameter int unsigned ODEP  = 32    // output FIFO depth
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  pe_cmd_t                  cmd,
  output logic                     done,
  output logic                     busy,
  // DynaTran curve (broadcast)
  input  logic                     curve_we,
  input  logic [$clog2(NPTS)-1:0]  curve_idx,
  input  logic [DW-1:0]            curve_rho,
  input  logic [DW-1:0]            curve_tau,
  // activation FIFO in
  input  logic                     act_valid,
  output logic                     act_ready,
  output logic                     act_afull,
  input  sword_t                   act_word,
  // weight FIFO in
  input  logic                     wgt_valid,
  output logic                     wgt_ready,
  output logic                     wgt_afull,
  input  sword_t                   wgt_word,
  // results
  output logic                     out_valid,
  input  logic                     out_ready,
  output sword_t                   out_word,
  // statistics
  output logic                     reuse_hit
);

  localparam int unsigned T = VEC;   // tile edge

  // ---------------------------------------------------------------- FIFOs
  logic   af_valid, af_pop, wf_valid, wf_pop;
  sword_t af_data, wf_data;
  logic [$clog2(FDEP+1)-1:0] af_cnt, wf_cnt;
  logic [$clog2(ODEP+1)-1:0] of_cnt;
  logic   of_push, of_ready, of_afull;
  sword_t of_data;

  sync_fifo #(.WIDTH(SWW), .DEPTH(FDEP)) u_act_fifo (
    .clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready), .in_data(act_word),
    .out_valid(af_valid), .out_ready(af_pop), .out_data(af_data), .count(af_cnt),
    .almost_full(act_afull));
  sync_fifo #(.WIDTH(SWW), .DEPTH(FDEP)) u_wgt_fifo (
    .clk, .rst_n, .in_valid(wgt_valid), .in_ready(wgt_ready), .in_data(wgt_word),
    .out_valid(wf_valid), .out_ready(wf_pop), .out_data(wf_data), .count(wf_cnt),
    .almost_full(wgt_afull));
  sync_fifo #(.WIDTH(SWW), .DEPTH(ODEP)) u_out_fifo (
    .clk, .rst_n, .in_valid(of_push), .in_ready(of_ready), .in_data(of_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_word), .count(of_cnt),
    .almost_full(of_afull));

  // ---------------------------------------------------------------- state
  typedef enum logic [3:0] {P_IDLE, P_LOAD, P_PRUNE, P_PWAIT, P_SPACE, P_COMP, P_DRAIN,
                            P_SFEED, P_SOUT, P_LFEED, P_LOUT, P_FIN} pstate_e;
  pstate_e state;
  pe_cmd_t c;

  sword_t [T-1:0] wreg, areg;
  acc_t   psum [T][NLANE];
  logic [$clog2(T+1)-1:0] wcnt, acnt;
  logic [$clog2(T)-1:0]   irow;
  logic [15:0]            beat;
  logic [2:0]             row;
  logic                   held_w;
  pe_cmd_t                cc;
  logic                   ln_restart, ln_start_q;
  assign cc = (state == P_IDLE) ? cmd : c;

  // ---------------------------------------------------------------- DynaTran
  sword_t [2*T-1:0] dt_in, dt_out;
  logic             dt_ovalid;
  logic [DW-1:0]    tau_used;
  assign dt_in = {areg, wreg};
  dynatran #(.ROWS(2*T), .NPTS(NPTS)) u_dynatran (
    .clk, .rst_n, .curve_we, .curve_idx, .curve_rho, .curve_tau,
    .in_valid(state == P_PRUNE), .prune(c.prune), .rho(c.arg), .in_tile(dt_in),
    .out_valid(dt_ovalid), .out_tile(dt_out), .tau_used(tau_used));

  // ---------------------------------------------------------------- MAC lanes
  logic           lane_valid;
  logic [NLANE-1:0] lane_ovalid;
  elem_t          lane_y [NLANE];
  acc_t           lane_acc [NLANE];
  logic [$clog2(T)-1:0] irow_q;
  logic           last_q;

  assign lane_valid = (state == P_COMP);

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    sword_t pa, pw;
    mask_t  pm;
    logic [CW-1:0] pc;
    pre_sparsity u_pre (
      .act(areg[l % T]), .wgt(wreg[irow]), .act_o(pa), .wgt_o(pw), .mask_o(pm), .count(pc));
    mac_lane #(.M(M)) u_lane (
      .clk, .rst_n, .valid(lane_valid), .first(c.acc_first), .ff(c.gelu && c.acc_last),
      .a(pa.data[M-1:0]), .w(pw.data[M-1:0]), .count(pc), .acc_in(psum[irow][l]),
      .out_valid(lane_ovalid[l]), .acc_out(lane_acc[l]), .y(lane_y[l]));
  end

  always_ff @(posedge clk) begin
    if (lane_ovalid[0])
      for (int l = 0; l < NLANE; l++) psum[irow_q][l] <= lane_acc[l];
  end

  // ---------------------------------------------------------------- softmax units
  logic [NSMX-1:0] sm_in_ready, sm_out_valid, sm_busy, sm_start, sm_in_valid, sm_out_ready;
  vec_t            sm_out [NSMX];
  vec_t            af_dense, wf_dense;
  assign af_dense = expand(af_data.data, af_data.mask);
  assign wf_dense = expand(wf_data.data, wf_data.mask);

  for (genvar s = 0; s < NSMX; s++) begin : g_smx
    softmax_unit #(.MAXB(SMXB)) u_smx (
      .clk, .rst_n, .start(sm_start[s]), .len(($clog2(SMXB+1))'(cc.len)), .scale(cc.arg),
      .in_valid(sm_in_valid[s]), .in_ready(sm_in_ready[s]), .in_data(af_dense),
      .out_valid(sm_out_valid[s]), .out_ready(sm_out_ready[s]), .out_data(sm_out[s]),
      .busy(sm_busy[s]));
  end

  // ---------------------------------------------------------------- layer-norm unit
  logic ln_start, ln_in_valid, ln_in_ready, ln_out_valid, ln_out_ready, ln_busy;
  vec_t ln_out;
  layernorm_unit #(.MAXB(LNB)) u_ln (
    .clk, .rst_n, .start(ln_start), .len(($clog2(LNB+1))'(cc.len)),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_data(af_dense),
    .in_res(c.residual ? wf_dense : '0),
    .out_valid(ln_out_valid), .out_ready(ln_out_ready), .out_data(ln_out), .busy(ln_busy));

  // ---------------------------------------------------------------- post-compute sparsity
  logic ps_valid;
  vec_t ps_data;
  post_sparsity u_post (
    .clk, .rst_n, .in_valid(ps_valid), .in_data(ps_data), .out_valid(of_push),
    .out_word(of_data));

  // room for one more word through the one-cycle post-compute stage
  logic of_room;
  assign of_room = (of_cnt <= ($clog2(ODEP+1))'(ODEP - 2)) && !(of_push && of_cnt == ($clog2(ODEP+1))'(ODEP - 2));

  // ---------------------------------------------------------------- control
  // the units sample length and scale with their start, which for the first row is the
  // cycle the command is accepted

  // LN rows after the first restart the unit one cycle after it returns to idle
  assign ln_restart = (state == P_LOUT) && ps_valid && beat == c.len - 1 &&
                      {13'd0, row} != {13'd0, c.rows} - 16'd1;
  logic [NSMX-1:0] row_sel;
  always_comb begin
    af_pop = 1'b0; wf_pop = 1'b0;
    sm_start = '0; sm_in_valid = '0; sm_out_ready = '0;
    ln_start = 1'b0; ln_in_valid = 1'b0; ln_out_ready = 1'b0;
    ps_valid = 1'b0; ps_data = '0;
    for (int s = 0; s < NSMX; s++) row_sel[s] = (int'(row) == s);
    case (state)
      P_LOAD: begin
        af_pop = af_valid && (acnt < T);
        wf_pop = wf_valid && (wcnt < T) && !c.reuse_w;
      end
      P_DRAIN: begin   // lane results of the last compute cycle leave through post-sparsity
        ps_valid = 1'b0;
      end
      P_SFEED: begin
        sm_in_valid = row_sel & {NSMX{af_valid}};
        af_pop      = af_valid && |(sm_in_ready & row_sel);
      end
      P_SOUT: begin
        sm_out_ready = row_sel & {NSMX{of_room}};
        ps_valid     = |(sm_out_valid & row_sel) && of_room;
        for (int s = 0; s < NSMX; s++) if (row_sel[s]) ps_data = sm_out[s];
      end
      P_LFEED: begin
        ln_in_valid = af_valid && (!c.residual || wf_valid);
        af_pop      = ln_in_valid && ln_in_ready;
        wf_pop      = af_pop && c.residual;
      end
      P_LOUT: begin
        ln_out_ready = of_room;
        ps_valid     = ln_out_valid && of_room;
        ps_data      = ln_out;
      end
      default: ;
    endcase
    if (state == P_IDLE && cmd_valid && cmd.op == OP_SMX)
      for (int s = 0; s < NSMX; s++) sm_start[s] = (s < int'(cmd.rows));
    if ((state == P_IDLE && cmd_valid && cmd.op == OP_LN) || ln_start_q) ln_start = 1'b1;
    // MAC results: one output row per cycle, one cycle after the lanes
    if (last_q) begin
      ps_valid = 1'b1;
      for (int l = 0; l < NLANE; l++) ps_data[l % T] = lane_y[l];
    end
  end

  assign cmd_ready = (state == P_IDLE);
  assign busy      = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; c <= '0; wcnt <= '0; acnt <= '0; irow <= '0; irow_q <= '0;
      last_q <= 1'b0; beat <= '0; row <= '0; done <= 1'b0; held_w <= 1'b0; reuse_hit <= 1'b0;
      wreg <= '0; areg <= '0;
    end else begin
      done      <= 1'b0;
      reuse_hit <= 1'b0;
      irow_q    <= irow;
      last_q    <= (state == P_COMP) && c.acc_last;
      case (state)
        P_IDLE: if (cmd_valid) begin
          c <= cmd;
          c.reuse_w <= cmd.reuse_w && held_w;
          beat <= '0; row <= '0;
          case (cmd.op)
            OP_MAC: begin
              state <= P_LOAD; acnt <= '0;
              wcnt  <= (cmd.reuse_w && held_w) ? ($clog2(T+1))'(T) : '0;
              reuse_hit <= cmd.reuse_w && held_w;
            end
            OP_SMX:  state <= P_SFEED;
            OP_LN:   state <= P_LFEED;
            default: state <= P_FIN;
          endcase
        end
        P_LOAD: begin
          if (af_pop) begin areg[acnt[$clog2(T)-1:0]] <= af_data; acnt <= acnt + 1'b1; end
          if (wf_pop) begin wreg[wcnt[$clog2(T)-1:0]] <= wf_data; wcnt <= wcnt + 1'b1; end
          if ((acnt + (af_pop ? 1 : 0)) == T && (wcnt + (wf_pop ? 1 : 0)) == T) begin
            state  <= P_PRUNE;
            held_w <= 1'b1;
          end
        end
        P_PRUNE: state <= P_PWAIT;
        P_PWAIT: if (dt_ovalid) begin
          wreg  <= dt_out[T-1:0];
          areg  <= dt_out[2*T-1:T];
          state <= P_SPACE;
        end
        P_SPACE: if (!c.acc_last || of_cnt == '0) begin   // room for the 16 result rows
          irow  <= '0;
          state <= P_COMP;
        end
        P_COMP: begin
          if (irow == ($clog2(T))'(T - 1)) state <= P_DRAIN;
          else irow <= irow + 1'b1;
        end
        P_DRAIN: state <= P_FIN;   // wait for the last lane result / post-sparsity stage
        P_SFEED: if (af_pop) begin
          if (beat == c.len - 1) begin
            beat <= '0;
            if (row == c.rows - 1) begin row <= '0; state <= P_SOUT; end
            else row <= row + 1'b1;
          end else beat <= beat + 1'b1;
        end
        P_SOUT: if (ps_valid) begin
          if (beat == c.len - 1) begin
            beat <= '0;
            if (row == c.rows - 1) begin row <= '0; state <= P_FIN; end
            else row <= row + 1'b1;
          end else beat <= beat + 1'b1;
        end
        P_LFEED: if (af_pop) begin
          if (beat == c.len - 1) begin
            beat <= '0; state <= P_LOUT;
          end else beat <= beat + 1'b1;
        end
        P_LOUT: if (ps_valid) begin
          if (beat == c.len - 1) begin
            beat <= '0;
            if (row == c.rows - 1) begin row <= '0; state <= P_FIN; end
            else begin
              row <= row + 1'b1;
              state <= P_LFEED;
            end
          end else beat <= beat + 1'b1;
        end
        P_FIN: if (!of_push && !last_q) begin
          done  <= 1'b1;
          state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ln_start_q <= 1'b0;
    else        ln_start_q <= ln_restart;

  // the output FIFO never overflows: space is checked before every push
  // The assertions' disable iff reads rst_n synchronously, so lint reports rst_n as both a
  // synchronous and an asynchronous net (SYNCASYNCNET); the flops use it only asynchronously.
  assert property (@(posedge clk) disable iff (!rst_n) of_push |-> of_ready);

endmodule
