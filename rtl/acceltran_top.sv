// acceltran_top: the accelerator tier of AccelTran (paper, Fig. 4) in its AccelTran-Edge
// configuration (Table: 64 PEs, 16 MAC lanes and 4 softmax modules per PE, 4 MB activation,
// 8 MB weight and 1 MB mask buffers).
//
// Blocks: the control block, which receives tiled operations from the host CPU and schedules
// them; the DMA controller, which moves words between main memory and the buffers; the
// activation, weight and mask buffers; and NPE processing elements. The host CPU and the main
// memory (LP-DDR3 or monolithic-3D RRAM) are outside this module: their signals are ports.
//
// Buffers: data words are 16 elements of 20 bits (320 bits), masks 16 bits. The depth of
// each buffer follows from its byte size. The mask of activation word a sits at mask address
// a, the mask of weight word w at ACT_WORDS + w, so the mask buffer (1 MB = 524,288 masks)
// covers both data buffers (104,857 + 209,715 words). A single buffer port, shared by the
// control block (feed/drain) and the DMA controller through a round-robin arbiter, reads or
// writes one data word and its mask per cycle; read data arrive one cycle after the grant.
//
// Clocking: one clock (the paper's 700 MHz), active-low asynchronous reset.
module acceltran_top
  import acceltran_pkg::*;
#(
  parameter int unsigned NPE        = 64,
  parameter int unsigned NLANE      = 16,
  parameter int unsigned NSMX       = 4,
  parameter int unsigned ACT_BYTES  = 4 * 1024 * 1024,
  parameter int unsigned WGT_BYTES  = 8 * 1024 * 1024,
  parameter int unsigned MASK_BYTES = 1 * 1024 * 1024,
  parameter int unsigned SMXB       = 32,
  parameter int unsigned LNB        = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lp_mode,
  // host CPU instruction stream
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  output logic              idle,
  // main memory
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [MADW-1:0]   mem_rd_addr,
  input  logic              mem_rsp_valid,
  input  sword_t            mem_rsp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [MADW-1:0]   mem_wr_addr,
  output sword_t            mem_wr_data,
  // power gating enables and statistics
  output logic [NPE-1:0]    pe_gate,
  output logic [31:0]       n_compute_stall,
  output logic [31:0]       n_memory_stall,
  output logic [31:0]       n_stagger,
  output logic [31:0]       n_reuse,
  output logic [31:0]       n_overlap,
  output logic [31:0]       n_issued
);

  localparam int unsigned DWW        = VEC * DW;
  localparam int unsigned ACT_WORDS  = int'((64'(ACT_BYTES) * 8) / DWW);
  localparam int unsigned WGT_WORDS  = int'((64'(WGT_BYTES) * 8) / DWW);
  localparam int unsigned MASK_WORDS = int'((64'(MASK_BYTES) * 8) / VEC);

  // ------------------------------------------------------------ control block
  logic    dma_cmd_valid, dma_cmd_ready, dma_done;
  instr_t  dma_cmd;
  logic [1:0] a_req, a_gnt, a_we;
  bufsel_e [1:0] a_sel;
  logic [1:0][BADW-1:0] a_addr;
  sword_t [1:0] a_wdata;
  sword_t  b_rdata;

  logic [NPE-1:0] pe_cmd_valid, pe_done, pe_act_valid, pe_act_afull, pe_wgt_valid,
                  pe_wgt_afull, pe_out_valid, pe_out_ready;
  pe_cmd_t        pe_cmd;
  sword_t         pe_feed_word;
  sword_t [NPE-1:0] pe_out_word;
  logic           curve_we;
  logic [3:0]     curve_idx;
  logic [DW-1:0]  curve_rho, curve_tau;

  control_block #(.NPE(NPE)) u_ctrl (
    .clk, .rst_n, .lp_mode, .instr_valid, .instr_ready, .instr, .idle,
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd, .dma_done,
    .buf_req(a_req[0]), .buf_gnt(a_gnt[0]), .buf_we(a_we[0]), .buf_sel(a_sel[0]),
    .buf_addr(a_addr[0]), .buf_wdata(a_wdata[0]), .buf_rdata(b_rdata),
    .pe_cmd_valid, .pe_cmd, .pe_done, .pe_act_valid, .pe_act_afull, .pe_wgt_valid,
    .pe_wgt_afull, .pe_feed_word, .pe_out_valid, .pe_out_ready, .pe_out_word, .pe_gate,
    .curve_we, .curve_idx, .curve_rho, .curve_tau,
    .n_compute_stall, .n_memory_stall, .n_stagger, .n_reuse, .n_overlap, .n_issued);

  // ------------------------------------------------------------ DMA controller
  dma_controller u_dma (
    .clk, .rst_n, .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd(dma_cmd),
    .done(dma_done), .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid,
    .mem_rsp_data, .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .buf_req(a_req[1]), .buf_gnt(a_gnt[1]), .buf_we(a_we[1]), .buf_sel(a_sel[1]),
    .buf_addr(a_addr[1]), .buf_wdata(a_wdata[1]), .buf_rdata(b_rdata));

  // ------------------------------------------------------------ buffers
  logic            b_en, b_we;
  bufsel_e         b_sel, b_sel_q;
  logic [BADW-1:0] b_addr;
  sword_t          b_wdata;
  logic [DWW-1:0]  act_rdata, wgt_rdata;
  logic [VEC-1:0]  mask_rdata;

  buf_arbiter u_arb (
    .clk, .rst_n, .req(a_req), .gnt(a_gnt), .we(a_we), .sel(a_sel), .addr(a_addr),
    .wdata(a_wdata), .b_en, .b_we, .b_sel, .b_addr, .b_wdata);

  sram_buffer #(.WIDTH(DWW), .DEPTH(ACT_WORDS), .AW(BADW)) u_act_buf (
    .clk, .en(b_en && b_sel == BUF_ACT), .we(b_we), .addr(b_addr), .wdata(b_wdata.data),
    .rdata(act_rdata));
  sram_buffer #(.WIDTH(DWW), .DEPTH(WGT_WORDS), .AW(BADW)) u_wgt_buf (
    .clk, .en(b_en && b_sel == BUF_WGT), .we(b_we), .addr(b_addr), .wdata(b_wdata.data),
    .rdata(wgt_rdata));
  sram_buffer #(.WIDTH(VEC), .DEPTH(MASK_WORDS), .AW(BADW)) u_mask_buf (
    .clk, .en(b_en), .we(b_we),
    .addr(b_sel == BUF_WGT ? b_addr + BADW'(ACT_WORDS) : b_addr), .wdata(b_wdata.mask),
    .rdata(mask_rdata));

  // Lint reports rst_n as SYNCASYNCNET because sub-module assertions read it synchronously in
  // disable iff; every flop uses it only as an asynchronous reset.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    b_sel_q <= BUF_ACT;
    else if (b_en) b_sel_q <= b_sel;

  assign b_rdata.mask = mask_rdata;
  assign b_rdata.data = (b_sel_q == BUF_WGT) ? wgt_rdata : act_rdata;

  // ------------------------------------------------------------ processing elements
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic act_ready, wgt_ready, cmd_ready, busy, reuse_hit;
    pe #(.NLANE(NLANE), .NSMX(NSMX), .SMXB(SMXB), .LNB(LNB)) u_pe (
      .clk, .rst_n, .cmd_valid(pe_cmd_valid[p]), .cmd_ready(cmd_ready), .cmd(pe_cmd),
      .done(pe_done[p]), .busy(busy), .curve_we, .curve_idx, .curve_rho, .curve_tau,
      .act_valid(pe_act_valid[p]), .act_ready(act_ready), .act_afull(pe_act_afull[p]),
      .act_word(pe_feed_word),
      .wgt_valid(pe_wgt_valid[p]), .wgt_ready(wgt_ready), .wgt_afull(pe_wgt_afull[p]),
      .wgt_word(pe_feed_word),
      .out_valid(pe_out_valid[p]), .out_ready(pe_out_ready[p]), .out_word(pe_out_word[p]),
      .reuse_hit(reuse_hit));
  end

endmodule
