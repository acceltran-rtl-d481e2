// acceltran_pkg: types, constants and helper functions shared by the AccelTran blocks.
//
// Number format: every activation and weight is a signed fixed-point value of IL integer bits
// and FL fractional bits (IL = 4, FL = 16 as in the paper); products and accumulations use
// twice that width. A "word" is one tile row of VEC = 16 elements (the paper's tile size along
// i and j and its multiplier count M are both 16) together with a 16-bit mask.
//
// Sparse format (paper: binary-mask scheme taken from SPRING): a word is held zero-free, i.e.
// its effectual elements are packed towards slot 0 in order of position, and the mask has one
// bit per position, 1 = ineffectual (zero). The helper functions expand and collapse between
// the packed and the position-aligned view; they are what the filter and the zero-collapsing
// shifter of the sparsity modules are built from.
//
// Instruction format (the control block's tiled operations) is this design's own: the paper
// names the operation classes (memory loads M-OP, matrix multiplication, softmax, layer-norm)
// but gives no encoding.
package acceltran_pkg;

  localparam int unsigned IL  = 4;
  localparam int unsigned FL  = 16;
  localparam int unsigned DW  = IL + FL;       // element width, 20 bits
  localparam int unsigned PW  = 2 * DW;        // product / accumulator width, 40 bits
  localparam int unsigned VEC = 16;            // elements per word (tile edge, M)
  localparam int unsigned CW  = $clog2(VEC + 1);

  typedef logic signed [DW-1:0] elem_t;
  typedef logic signed [PW-1:0] acc_t;
  typedef elem_t [VEC-1:0]      vec_t;
  typedef logic [VEC-1:0]       mask_t;

  // One compressed word: packed effectual elements plus the mask (1 = ineffectual).
  typedef struct packed {
    mask_t mask;
    vec_t  data;
  } sword_t;

  localparam int unsigned SWW = $bits(sword_t);

  // Operation classes of the tiled instruction stream.
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_LOAD  = 3'd1,   // M-OP: main memory -> buffer (DMA)
    OP_STORE = 3'd2,   // activation buffer -> main memory (DMA)
    OP_MAC   = 3'd3,   // one W x A tile multiplication (16x16 by 16x16), optional GeLU
    OP_SMX   = 3'd4,   // softmax over rows of a tile
    OP_LN    = 3'd5,   // (residual add and) layer-norm over rows
    OP_CURVE = 3'd6    // write one point of the DynaTran transfer curve
  } opcode_e;

  typedef enum logic [1:0] {
    BUF_ACT = 2'd0,
    BUF_WGT = 2'd1
  } bufsel_e;

  localparam int unsigned TAGW  = 6;    // scoreboard tags (tiles in flight)
  localparam int unsigned BADW  = 20;   // buffer word address width
  localparam int unsigned MADW  = 32;   // main memory word address width

  // One tiled instruction from the host.
  typedef struct packed {
    opcode_e          op;
    logic [3:0]       head;      // attention head (scheduling priority, lower first)
    logic [TAGW-1:0]  src0;      // tag that must be ready (0 = none)
    logic [TAGW-1:0]  src1;      // second source tag (0 = none)
    logic [TAGW-1:0]  dst;       // tag made ready on completion (0 = none)
    logic [BADW-1:0]  a_addr;    // activation operand base word address
    logic [BADW-1:0]  w_addr;    // weight operand base word address (residual for OP_LN)
    logic [BADW-1:0]  o_addr;    // result base word address (activation buffer)
    logic [MADW-1:0]  m_addr;    // main memory word address (LOAD / STORE)
    logic [15:0]      len;       // words to move (LOAD / STORE), or beats per row (SMX / LN)
    logic [2:0]       rows;      // rows per SMX / LN op (1..4)
    bufsel_e          buf_sel;   // LOAD target buffer
    logic             gelu;      // MAC: feed-forward op, apply GeLU
    logic             acc_first; // MAC: first k tile of an output tile
    logic             acc_last;  // MAC: last k tile, write the output tile
    logic             prune;     // run DynaTran on the operands
    logic             residual;  // LN: add the residual operand first
    logic [DW-1:0]    arg;       // rho for MAC/SMX/LN, softmax scale, or curve point value
  } instr_t;

  // Command from the control block to one PE.
  typedef struct packed {
    opcode_e          op;        // OP_MAC, OP_SMX or OP_LN
    logic             gelu;
    logic             acc_first;
    logic             acc_last;
    logic             prune;
    logic             reuse_w;   // MAC: weight tile already held, none is sent
    logic             residual;
    logic [15:0]      len;       // SMX / LN: words per row
    logic [2:0]       rows;      // SMX / LN: rows
    logic [DW-1:0]    arg;       // rho (MAC) or softmax scale (SMX)
  } pe_cmd_t;

  // Unpack a zero-free word into position-aligned order.
  function automatic vec_t expand(input vec_t packed_d, input mask_t mask);
    vec_t r;
    int unsigned k;
    k = 0;
    for (int p = 0; p < VEC; p++) begin
      r[p] = '0;
      if (!mask[p]) begin
        r[p] = packed_d[k];
        k++;
      end
    end
    return r;
  endfunction

  // Pack the positions whose keep bit is set towards slot 0 (zero-collapsing shifter).
  function automatic vec_t collapse(input vec_t dense, input mask_t keep);
    vec_t r;
    int unsigned k;
    r = '0;
    k = 0;
    for (int p = 0; p < VEC; p++) begin
      if (keep[p]) begin
        r[k] = dense[p];
        k++;
      end
    end
    return r;
  endfunction

  function automatic logic [CW-1:0] popcount(input mask_t m);
    logic [CW-1:0] c;
    c = '0;
    for (int p = 0; p < VEC; p++) c = c + CW'(m[p]);
    return c;
  endfunction

  // Saturate a wide value to the element width.
  function automatic elem_t sat_elem(input logic signed [PW:0] v);
    if (v > (PW+1)'($signed({1'b0, {(DW-1){1'b1}}})))
      return {1'b0, {(DW-1){1'b1}}};
    else if (v < -(PW+1)'($signed({1'b0, {(DW-1){1'b1}}})) - 1)
      return {1'b1, {(DW-1){1'b0}}};
    else
      return v[DW-1:0];
  endfunction

  // GeLU, piecewise: x * clamp(1/2 + 3x/8, 0, 1) on a FL-fraction accumulator value.
  // The paper gives no GeLU circuit; this hard-sigmoid form is this design's choice.
  function automatic acc_t gelu_fx(input acc_t x);
    logic signed [PW+1:0] g;
    logic signed [2*PW+3:0] pr;
    g = (PW+2)'($signed(1 <<< (FL-1))) + ((PW+2)'(x) >>> 2) + ((PW+2)'(x) >>> 3);
    if (g < 0) g = '0;
    if (g > (PW+2)'($signed(1 <<< FL))) g = (PW+2)'($signed(1 <<< FL));
    pr = (2*PW+4)'(x) * (2*PW+4)'(g);
    return acc_t'(pr >>> FL);
  endfunction

endpackage
