// control_block: takes the stream of tiled operations from the host CPU, schedules them onto
// the DMA controller and the PEs, moves operand words from the buffers into the PEs and
// result words back into the activation buffer (paper, Fig. 4 and Section "Smart Scheduling
// of Tiled Operations").
//
// Scheduling. Instructions enter a queue, then a window of WIN slots. Each cycle at most one
// slot is issued: one whose source tags are ready (scoreboard of tiles present in the
// buffers; a tag is cleared when its producer enters the window and set when the producer
// has finished, so a tag may be reused only once the consumers of its previous tile have
// issued), that is the oldest of its attention head in the window, and whose resource is
// free. Among those the lowest head number wins, so the operations of one head run ahead and
// the next head's MAC work fills the MAC lanes while the first head is in softmax: the
// paper's staggered scheduling (Fig. 10). Issue out of program order across heads is counted
// (stagger count).
//   - compute stall: a compute instruction waits for a source tile not yet loaded or
//     computed, or all PEs that could take it are busy;
//   - memory stall: a load/store waits for the busy DMA controller or for a tile that is not
//     computed yet (store), a compute instruction waits for the busy feed path, or the feed
//     path waits for the buffer port.
// Resources: a MAC chain (the k tiles of one output tile) stays on one PE, which holds the
// partial sums. A first MAC prefers an idle PE that already holds its weight tile (weight
// reuse under the [b,i,j,k] dataflow; no weight words are then sent); otherwise the lowest
// idle PE. SMX and LN go to any idle PE without an open chain. In low-power mode only the
// lower half of the PEs is used (paper: LP mode runs half of the compute hardware). An idle
// PE's pe_gate output is high: the power-gating enable of the paper's unused modules.
//
// Feed and drain share the control block's buffer port, drain first. Feeding sends stream A
// (activation buffer, a_addr) into the PE's activation FIFO and stream B (w_addr, from the
// weight buffer for MAC or the activation buffer for the LN residual) into its weight FIFO.
// Draining writes PE result words to the activation buffer from o_addr on; the destination
// tag becomes ready when the PE has finished and all its words are written.
//
// The paper describes the control block's duties (mapping tiled operations, stalls, staggered
// heads, dataflow, power-gating) but not its circuit; the queue, window, tag scoreboard,
// policies and encodings here are this design's own.
module control_block
  import acceltran_pkg::*;
#(
  parameter int unsigned NPE  = 64,
  parameter int unsigned WIN  = 4,
  parameter int unsigned IQD  = 16,
  parameter int unsigned NPTS = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    lp_mode,
  // host instruction stream
  input  logic                    instr_valid,
  output logic                    instr_ready,
  input  instr_t                  instr,
  output logic                    idle,
  // DMA
  output logic                    dma_cmd_valid,
  input  logic                    dma_cmd_ready,
  output instr_t                  dma_cmd,
  input  logic                    dma_done,
  // buffer port
  output logic                    buf_req,
  input  logic                    buf_gnt,
  output logic                    buf_we,
  output bufsel_e                 buf_sel,
  output logic [BADW-1:0]         buf_addr,
  output sword_t                  buf_wdata,
  input  sword_t                  buf_rdata,
  // PEs
  output logic [NPE-1:0]          pe_cmd_valid,
  output pe_cmd_t                 pe_cmd,
  input  logic [NPE-1:0]          pe_done,
  output logic [NPE-1:0]          pe_act_valid,
  input  logic [NPE-1:0]          pe_act_afull,
  output logic [NPE-1:0]          pe_wgt_valid,
  input  logic [NPE-1:0]          pe_wgt_afull,
  output sword_t                  pe_feed_word,
  input  logic [NPE-1:0]          pe_out_valid,
  output logic [NPE-1:0]          pe_out_ready,
  input  sword_t [NPE-1:0]        pe_out_word,
  output logic [NPE-1:0]          pe_gate,
  // DynaTran curve broadcast
  output logic                    curve_we,
  output logic [$clog2(NPTS)-1:0] curve_idx,
  output logic [DW-1:0]           curve_rho,
  output logic [DW-1:0]           curve_tau,
  // statistics
  output logic [31:0]             n_compute_stall,
  output logic [31:0]             n_memory_stall,
  output logic [31:0]             n_stagger,
  output logic [31:0]             n_reuse,
  output logic [31:0]             n_overlap,
  output logic [31:0]             n_issued
);

  localparam int unsigned PIW = (NPE > 1) ? $clog2(NPE) : 1;
  localparam int unsigned NT  = 1 << TAGW;

  // ------------------------------------------------------------ instruction queue
  logic   iq_valid, iq_pop;
  instr_t iq_data;
  logic [$clog2(IQD+1)-1:0] iq_cnt;
  logic   iq_afull;
  sync_fifo #(.WIDTH($bits(instr_t)), .DEPTH(IQD)) u_iq (
    .clk, .rst_n, .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr),
    .out_valid(iq_valid), .out_ready(iq_pop), .out_data(iq_data), .count(iq_cnt),
    .almost_full(iq_afull));

  // ------------------------------------------------------------ window and scoreboard
  instr_t      slot     [WIN];
  logic [WIN-1:0] slot_v;
  logic [7:0]  slot_age [WIN];
  logic [7:0]  age_ctr;
  logic [NT-1:0] tag_rdy;

  // PE bookkeeping
  logic [NPE-1:0] pe_active, pe_donef, chain_open, held_v;
  logic [BADW-1:0] chain_o [NPE];
  logic [BADW-1:0] held_w  [NPE];
  logic [TAGW-1:0] pe_dst  [NPE];
  logic [BADW-1:0] pe_obase[NPE];
  logic [15:0]     pe_oexp [NPE];
  logic [15:0]     pe_ocnt [NPE];
  logic [1:0]      pe_kind [NPE];   // 1 MAC, 2 SMX, 3 LN
  logic [TAGW-1:0] dma_dst;
  logic            dma_busy_q;

  // feeder
  logic            fd_busy;
  logic [PIW-1:0]  fd_pe;
  logic [BADW-1:0] fd_a_base, fd_b_base;
  logic [15:0]     fd_na, fd_nb, fd_ia, fd_ib;
  bufsel_e         fd_b_sel;
  logic            fd_pend, fd_pend_b;
  logic [PIW-1:0]  fd_pend_pe;

  // ------------------------------------------------------------ eligibility
  logic [NPE-1:0] pe_allowed;
  always_comb
    for (int p = 0; p < NPE; p++)
      pe_allowed[p] = !lp_mode || (p < int'((NPE + 1) / 2));

  logic [WIN-1:0] cand, blocked_mem, blocked_cmp;
  logic [PIW-1:0] cand_pe [WIN];
  logic [WIN-1:0] cand_reuse;

  always_comb begin
    for (int s = 0; s < WIN; s++) begin
      logic older, src_ok, found;
      instr_t in;
      in = slot[s];
      older = 1'b0;
      for (int t = 0; t < WIN; t++)
        if (t != s && slot_v[t] && slot[t].head == in.head && slot_age[t] - age_ctr < slot_age[s] - age_ctr)
          older = 1'b1;
      src_ok = tag_rdy[in.src0] && tag_rdy[in.src1];
      cand[s] = 1'b0; blocked_mem[s] = 1'b0; blocked_cmp[s] = 1'b0;
      cand_pe[s] = '0; cand_reuse[s] = 1'b0;
      found = 1'b0;
      if (slot_v[s] && !older) begin
        if (!src_ok) begin
          // a halted memory operation is a memory stall (e.g. a STORE whose data are not
          // computed yet), a halted compute operation a compute stall
          if (in.op == OP_LOAD || in.op == OP_STORE) blocked_mem[s] = 1'b1;
          else                                       blocked_cmp[s] = 1'b1;
        end else case (in.op)
          OP_LOAD, OP_STORE: begin
            if (dma_cmd_ready) cand[s] = 1'b1; else blocked_mem[s] = 1'b1;
          end
          OP_CURVE, OP_NOP: cand[s] = 1'b1;
          OP_MAC: begin
            if (!in.acc_first) begin
              for (int p = NPE - 1; p >= 0; p--)
                if (chain_open[p] && chain_o[p] == in.o_addr && !pe_active[p]) begin
                  found = 1'b1; cand_pe[s] = PIW'(p);
                end
              if (found) cand_reuse[s] = held_v[cand_pe[s]] && held_w[cand_pe[s]] == in.w_addr;
            end else begin
              for (int p = NPE - 1; p >= 0; p--)
                if (!pe_active[p] && !chain_open[p] && pe_allowed[p]) begin
                  found = 1'b1; cand_pe[s] = PIW'(p);
                end
              for (int p = NPE - 1; p >= 0; p--)
                if (!pe_active[p] && !chain_open[p] && pe_allowed[p] && held_v[p] &&
                    held_w[p] == in.w_addr) begin
                  cand_pe[s] = PIW'(p); cand_reuse[s] = 1'b1;
                end
            end
            if (!found) blocked_cmp[s] = 1'b1;
            else if (fd_busy) blocked_mem[s] = 1'b1;
            else cand[s] = 1'b1;
          end
          default: begin   // OP_SMX, OP_LN
            for (int p = NPE - 1; p >= 0; p--)
              if (!pe_active[p] && !chain_open[p] && pe_allowed[p]) begin
                found = 1'b1; cand_pe[s] = PIW'(p);
              end
            if (!found) blocked_cmp[s] = 1'b1;
            else if (fd_busy) blocked_mem[s] = 1'b1;
            else cand[s] = 1'b1;
          end
        endcase
      end
    end
  end

  // pick: lowest head, then oldest
  logic            do_issue;
  logic [$clog2(WIN)-1:0] pick;
  logic            pick_is_oldest;
  always_comb begin
    do_issue = 1'b0;
    pick = '0;
    for (int s = 0; s < WIN; s++)
      if (cand[s]) begin
        if (!do_issue || slot[s].head < slot[pick].head ||
            (slot[s].head == slot[pick].head &&
             slot_age[s] - age_ctr < slot_age[pick] - age_ctr)) begin
          do_issue = 1'b1;
          pick = ($clog2(WIN))'(s);
        end
      end
    pick_is_oldest = 1'b1;
    for (int s = 0; s < WIN; s++)
      if (slot_v[s] && s != int'(pick) && slot_age[s] - age_ctr < slot_age[pick] - age_ctr)
        pick_is_oldest = 1'b0;
  end

  instr_t         iss;
  logic [PIW-1:0] iss_pe;
  logic           iss_reuse;
  assign iss       = slot[pick];
  assign iss_pe    = cand_pe[pick];
  assign iss_reuse = cand_reuse[pick];

  // outputs to DMA / PEs / curve
  assign dma_cmd_valid = do_issue && (iss.op == OP_LOAD || iss.op == OP_STORE);
  assign dma_cmd       = iss;
  assign curve_we      = do_issue && iss.op == OP_CURVE;
  assign curve_idx     = iss.len[$clog2(NPTS)-1:0];
  assign curve_rho     = iss.arg;
  assign curve_tau     = iss.m_addr[DW-1:0];

  logic iss_pe_op;
  assign iss_pe_op = do_issue && (iss.op == OP_MAC || iss.op == OP_SMX || iss.op == OP_LN);
  always_comb begin
    pe_cmd_valid = '0;
    if (iss_pe_op) pe_cmd_valid[iss_pe] = 1'b1;
    pe_cmd.op        = iss.op;
    pe_cmd.gelu      = iss.gelu;
    pe_cmd.acc_first = iss.acc_first;
    pe_cmd.acc_last  = iss.acc_last;
    pe_cmd.prune     = iss.prune;
    pe_cmd.reuse_w   = iss_reuse;
    pe_cmd.residual  = iss.residual;
    pe_cmd.len       = iss.len;
    pe_cmd.rows      = iss.rows;
    pe_cmd.arg       = iss.arg;
  end

  // ------------------------------------------------------------ drain and feed (buffer port)
  logic           dr_any;
  logic [PIW-1:0] dr_pe;
  always_comb begin
    dr_any = 1'b0; dr_pe = '0;
    for (int p = NPE - 1; p >= 0; p--)
      if (pe_out_valid[p]) begin dr_any = 1'b1; dr_pe = PIW'(p); end
  end

  logic fd_want, fd_take_b, fd_go;
  always_comb begin
    fd_take_b = 1'b0;
    fd_want   = 1'b0;
    if (fd_busy) begin
      if (fd_ia < fd_na && !pe_act_afull[fd_pe] && (fd_ib >= fd_nb || fd_ia <= fd_ib || pe_wgt_afull[fd_pe]))
        fd_want = 1'b1;
      else if (fd_ib < fd_nb && !pe_wgt_afull[fd_pe]) begin
        fd_want = 1'b1; fd_take_b = 1'b1;
      end
    end
  end

  always_comb begin
    buf_req   = dr_any || fd_want;
    buf_we    = dr_any;
    buf_wdata = pe_out_word[dr_pe];
    if (dr_any) begin
      buf_sel  = BUF_ACT;
      buf_addr = pe_obase[dr_pe] + BADW'(pe_ocnt[dr_pe]);
    end else begin
      buf_sel  = fd_take_b ? fd_b_sel : BUF_ACT;
      buf_addr = fd_take_b ? fd_b_base + BADW'(fd_ib) : fd_a_base + BADW'(fd_ia);
    end
    pe_out_ready = '0;
    if (dr_any && buf_gnt) pe_out_ready[dr_pe] = 1'b1;
    fd_go = fd_want && !dr_any && buf_gnt;
  end

  assign pe_feed_word = buf_rdata;
  always_comb begin
    pe_act_valid = '0;
    pe_wgt_valid = '0;
    if (fd_pend) begin
      if (fd_pend_b) pe_wgt_valid[fd_pend_pe] = 1'b1;
      else           pe_act_valid[fd_pend_pe] = 1'b1;
    end
  end

  // ------------------------------------------------------------ completion
  logic [NPE-1:0] pe_complete;
  always_comb
    for (int p = 0; p < NPE; p++)
      pe_complete[p] = pe_active[p] && (pe_donef[p] || pe_done[p]) &&
                       (pe_ocnt[p] + ((pe_out_ready[p]) ? 16'd1 : 16'd0) == pe_oexp[p]);

  // ------------------------------------------------------------ sequential
  logic win_free_any;
  logic [$clog2(WIN)-1:0] win_free;
  always_comb begin
    win_free_any = 1'b0; win_free = '0;
    for (int s = WIN - 1; s >= 0; s--)
      if (!slot_v[s] && !(do_issue && int'(pick) == s)) begin
        win_free_any = 1'b1; win_free = ($clog2(WIN))'(s);
      end
  end
  assign iq_pop = iq_valid && win_free_any;

  logic any_mac, any_smx;
  always_comb begin
    any_mac = 1'b0; any_smx = 1'b0;
    for (int p = 0; p < NPE; p++) begin
      if (pe_active[p] && pe_kind[p] == 2'd1) any_mac = 1'b1;
      if (pe_active[p] && pe_kind[p] == 2'd2) any_smx = 1'b1;
    end
  end

  assign pe_gate = ~pe_active;
  assign idle    = !iq_valid && slot_v == '0 && pe_active == '0 && !fd_busy && !fd_pend &&
                   dma_cmd_ready && !dma_busy_q;

  // Lint reports rst_n as SYNCASYNCNET here because the sub-modules' assertions read it
  // synchronously in disable iff; every flop uses it only as an asynchronous reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v <= '0; age_ctr <= '0; tag_rdy <= '1;
      pe_active <= '0; pe_donef <= '0; chain_open <= '0; held_v <= '0;
      fd_busy <= 1'b0; fd_pend <= 1'b0; fd_pend_b <= 1'b0; fd_pend_pe <= '0;
      fd_pe <= '0; fd_a_base <= '0; fd_b_base <= '0; fd_na <= '0; fd_nb <= '0;
      fd_ia <= '0; fd_ib <= '0; fd_b_sel <= BUF_WGT; dma_dst <= '0; dma_busy_q <= 1'b0;
      n_compute_stall <= '0; n_memory_stall <= '0; n_stagger <= '0; n_reuse <= '0;
      n_overlap <= '0; n_issued <= '0;
      for (int s = 0; s < WIN; s++) begin slot[s] <= '0; slot_age[s] <= '0; end
      for (int p = 0; p < NPE; p++) begin
        chain_o[p] <= '0; held_w[p] <= '0; pe_dst[p] <= '0; pe_obase[p] <= '0;
        pe_oexp[p] <= '0; pe_ocnt[p] <= '0; pe_kind[p] <= '0;
      end
    end else begin
      // window fill
      if (iq_pop) begin
        slot[win_free]     <= iq_data;
        slot_v[win_free]   <= 1'b1;
        slot_age[win_free] <= age_ctr;
        age_ctr            <= age_ctr + 1'b1;
      end

      // statistics
      if (!do_issue && |slot_v) begin
        if (|blocked_mem) n_memory_stall  <= n_memory_stall + 1;
        else              n_compute_stall <= n_compute_stall + 1;
      end else if (fd_want && !fd_go) n_memory_stall <= n_memory_stall + 1;
      if (any_mac && any_smx) n_overlap <= n_overlap + 1;

      // DMA completion (before issue: a new DMA op may be issued in the same cycle)
      if (dma_done) begin
        dma_busy_q <= 1'b0;
        if (dma_dst != '0) tag_rdy[dma_dst] <= 1'b1;
      end

      // issue
      if (do_issue) begin
        slot_v[pick] <= 1'b0;
        n_issued <= n_issued + 1;
        if (!pick_is_oldest) n_stagger <= n_stagger + 1;
        case (iss.op)
          OP_LOAD, OP_STORE: begin dma_dst <= iss.dst; dma_busy_q <= 1'b1; end
          OP_CURVE, OP_NOP: if (iss.dst != '0) tag_rdy[iss.dst] <= 1'b1;
          default: begin
            pe_active[iss_pe] <= 1'b1;
            pe_donef[iss_pe]  <= 1'b0;
            pe_dst[iss_pe]    <= iss.dst;
            pe_obase[iss_pe]  <= iss.o_addr;
            pe_ocnt[iss_pe]   <= '0;
            fd_busy   <= 1'b1;
            fd_pe     <= iss_pe;
            fd_a_base <= iss.a_addr;
            fd_b_base <= iss.w_addr;
            fd_ia     <= '0;
            fd_ib     <= '0;
            if (iss.op == OP_MAC) begin
              pe_kind[iss_pe]    <= 2'd1;
              pe_oexp[iss_pe]    <= iss.acc_last ? 16'(VEC) : 16'd0;
              chain_open[iss_pe] <= !iss.acc_last;
              chain_o[iss_pe]    <= iss.o_addr;
              held_v[iss_pe]     <= 1'b1;
              held_w[iss_pe]     <= iss.w_addr;
              fd_na    <= 16'(VEC);
              fd_nb    <= iss_reuse ? 16'd0 : 16'(VEC);
              fd_b_sel <= BUF_WGT;
              if (iss_reuse) n_reuse <= n_reuse + 1;
            end else begin
              pe_kind[iss_pe] <= (iss.op == OP_SMX) ? 2'd2 : 2'd3;
              pe_oexp[iss_pe] <= iss.len * 16'(iss.rows);
              fd_na    <= iss.len * 16'(iss.rows);
              fd_nb    <= (iss.op == OP_LN && iss.residual) ? iss.len * 16'(iss.rows) : 16'd0;
              fd_b_sel <= BUF_ACT;
            end
          end
        endcase
      end

      // feed
      fd_pend <= fd_go;
      if (fd_go) begin
        fd_pend_b  <= fd_take_b;
        fd_pend_pe <= fd_pe;
        if (fd_take_b) fd_ib <= fd_ib + 1'b1;
        else           fd_ia <= fd_ia + 1'b1;
      end
      if (fd_busy && !(do_issue && iss_pe_op) &&
          fd_ia + (fd_go && !fd_take_b ? 16'd1 : 16'd0) >= fd_na &&
          fd_ib + (fd_go && fd_take_b ? 16'd1 : 16'd0) >= fd_nb)
        fd_busy <= 1'b0;

      // drain
      if (dr_any && buf_gnt) pe_ocnt[dr_pe] <= pe_ocnt[dr_pe] + 1'b1;

      // completion
      for (int p = 0; p < NPE; p++) begin
        if (pe_done[p]) pe_donef[p] <= 1'b1;
        if (pe_complete[p]) begin
          pe_active[p] <= 1'b0;
          pe_donef[p]  <= 1'b0;
          if (pe_dst[p] != '0) tag_rdy[pe_dst[p]] <= 1'b1;
        end
      end
      // a destination tag turns not-ready when its producer enters the window, in program
      // order, so no later consumer (of any head) can see the stale tile
      if (iq_pop && iq_data.dst != '0) tag_rdy[iq_data.dst] <= 1'b0;
      tag_rdy[0] <= 1'b1;
    end
  end

endmodule
