// dma_controller: moves words between main memory (off-chip LP-DDR3 or monolithic-3D RRAM)
// and the on-chip buffers (paper, Fig. 4). A LOAD (the paper's M-OPs: embeddings and weight
// matrices) copies len words from main memory address m_addr to buffer buf_sel at o_addr; a
// STORE copies len words from the activation buffer at a_addr to main memory at m_addr.
//
// Main memory words are already in the sparse format (zero-free data plus mask); the buffer
// side writes the data into the activation or weight buffer and the mask into the mask
// buffer through one shared buffer port (buf_req/buf_gnt), which the buffer arbiter may
// refuse while another requester holds the buffers.
//
// The paper names the DMA controller and its role only. The handshakes below are this
// design's own: the read port takes one request per cycle (mem_rd_valid/mem_rd_ready) and
// returns data in order some cycles later (mem_rsp_valid, no back-pressure), so up to
// QDEP reads are kept in flight and their data queue here until the buffer port is granted.
// The write port is valid/ready. done pulses one cycle after the last word has moved.
module dma_controller
  import acceltran_pkg::*;
#(
  parameter int unsigned QDEP = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  instr_t            cmd,
  output logic              done,
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
  // buffer port
  output logic              buf_req,
  input  logic              buf_gnt,
  output logic              buf_we,
  output bufsel_e           buf_sel,
  output logic [BADW-1:0]   buf_addr,
  output sword_t            buf_wdata,
  input  sword_t            buf_rdata
);

  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_SREQ, D_SDATA, D_SWR, D_DONE} dstate_e;
  dstate_e state;
  instr_t  c;
  logic [15:0] n_issued, n_done;
  logic [$clog2(QDEP+1)-1:0] inflight;

  // response queue
  logic   q_valid, q_pop, q_ready;
  sword_t q_data;
  logic [$clog2(QDEP+1)-1:0] q_cnt;
  logic   q_afull;
  sync_fifo #(.WIDTH(SWW), .DEPTH(QDEP)) u_rspq (
    .clk, .rst_n, .in_valid(mem_rsp_valid), .in_ready(q_ready), .in_data(mem_rsp_data),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_data), .count(q_cnt),
    .almost_full(q_afull));

  assign cmd_ready    = (state == D_IDLE);
  assign mem_rd_valid = (state == D_LOAD) && (n_issued < c.len) &&
                        (32'(inflight) + 32'(q_cnt) < QDEP);
  assign mem_rd_addr  = c.m_addr + MADW'(n_issued);

  always_comb begin
    buf_req   = 1'b0;
    buf_we    = 1'b0;
    buf_sel   = c.buf_sel;
    buf_addr  = '0;
    buf_wdata = q_data;
    q_pop     = 1'b0;
    case (state)
      D_LOAD: begin
        buf_req  = q_valid;
        buf_we   = 1'b1;
        buf_addr = c.o_addr + BADW'(n_done);
        q_pop    = q_valid && buf_gnt;
      end
      D_SREQ: begin
        buf_req  = 1'b1;
        buf_sel  = BUF_ACT;
        buf_addr = c.a_addr + BADW'(n_done);
      end
      default: ;
    endcase
  end

  assign mem_wr_valid = (state == D_SWR);
  assign mem_wr_addr  = c.m_addr + MADW'(n_done);

  logic rd_fire, rsp;
  assign rd_fire = mem_rd_valid && mem_rd_ready;
  assign rsp     = mem_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; c <= '0; n_issued <= '0; n_done <= '0; inflight <= '0;
      done <= 1'b0; mem_wr_data <= '0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + (rd_fire ? 1'b1 : 1'b0) - (rsp ? 1'b1 : 1'b0);
      case (state)
        D_IDLE: if (cmd_valid) begin
          c <= cmd;
          n_issued <= '0;
          n_done <= '0;
          if (cmd.len == 0)            state <= D_DONE;
          else if (cmd.op == OP_STORE) state <= D_SREQ;
          else                         state <= D_LOAD;
        end
        D_LOAD: begin
          if (rd_fire) n_issued <= n_issued + 1'b1;
          if (q_pop) begin
            n_done <= n_done + 1'b1;
            if (n_done == c.len - 1) state <= D_DONE;
          end
        end
        D_SREQ:  if (buf_gnt) state <= D_SDATA;
        D_SDATA: begin mem_wr_data <= buf_rdata; state <= D_SWR; end
        D_SWR: if (mem_wr_ready) begin
          n_done <= n_done + 1'b1;
          state  <= (n_done == c.len - 1) ? D_DONE : D_SREQ;
        end
        D_DONE: begin done <= 1'b1; state <= D_IDLE; end
        default: state <= D_IDLE;
      endcase
    end
  end

  // the response queue has room for every read in flight
  // The assertions' disable iff reads rst_n synchronously, so lint reports rst_n as both a
  // synchronous and an asynchronous net (SYNCASYNCNET); the flops use it only asynchronously.
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> q_ready);

endmodule
