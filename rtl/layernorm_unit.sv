// layernorm_unit: (optional residual add and) layer normalisation of one token row,
// y = (x - mean(x)) / sqrt(var(x) + eps), over len words of 16 elements (up to MAXB words, so
// hidden dimensions up to 16*MAXB; 48 words covers BERT-Base's 768).
//
// The paper gives the function (C-OP-8: layer-norm(H_MHA + H); C-OP-11: layer-norm(H_F2)) and
// one layer-norm module per PE, but not its insides. This design's choices:
//   LOAD  one word per cycle: x + r (r is the residual word, 0 when not used), stored; sum.
//   MEAN  sum / n with the iterative divider (n = 16 * len).
//   VAR   one word per cycle: sum of (x - mean)^2, 2*FL fraction bits.
//   VDIV  variance = that sum / n.
//   SQRT  bit-serial integer square root, 21 cycles: std with FL fraction bits.
//   RECIP 1 / (std + eps) with the divider, eps = 2^-FL.
//   OUT   one word per cycle while out_ready: (x - mean) / std, saturated.
// No learned scale and shift (gamma, beta) are applied: the paper lists no load for them.
//
// Interface: start with len; in_valid/in_ready for len words (in_res alongside); then
// out_valid/out_ready for len words; busy from start to the last output word.
module layernorm_unit
  import acceltran_pkg::*;
#(
  parameter int unsigned MAXB = 48
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(MAXB+1)-1:0] len,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  vec_t                      in_data,
  input  vec_t                      in_res,
  output logic                      out_valid,
  input  logic                      out_ready,
  output vec_t                      out_data,
  output logic                      busy
);

  localparam int unsigned BW = $clog2(MAXB+1);
  localparam int unsigned SW  = PW + 16;      // squared-deviation sums and divider width
  localparam int unsigned SQB = PW / 2 + 2;   // result bits of the square root

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_MEAN, S_MWAIT, S_VAR, S_VDIV, S_VWAIT,
                            S_SQRT, S_RECIP, S_RWAIT, S_OUT} state_e;
  state_e state;

  vec_t                 row [MAXB];
  logic [BW-1:0]        n_beats, beat;
  logic signed [PW-1:0] sum;
  logic                 neg;
  elem_t                mean;
  logic [SW-1:0]        sq;
  logic [SW-1:0]        var_q;
  logic [SQB-1:0]       root;
  logic [$clog2(SQB+1)-1:0] bitn;
  logic [PW-1:0]        recip;

  // residual add
  vec_t xr;
  logic signed [PW-1:0] wsum;
  always_comb begin
    wsum = '0;
    for (int p = 0; p < VEC; p++) begin
      xr[p] = sat_elem((PW+1)'(in_data[p]) + (PW+1)'(in_res[p]));
      wsum  = wsum + PW'(xr[p]);
    end
  end

  // squared deviations of the word being revisited
  logic [SW-1:0] wsq;
  always_comb begin
    wsq = '0;
    for (int p = 0; p < VEC; p++) begin
      logic signed [DW:0]   d;
      logic signed [PW+1:0] s;
      d = (DW+1)'(row[beat][p]) - (DW+1)'(mean);
      s = (PW+2)'(d) * (PW+2)'(d);
      wsq = wsq + SW'(s);
    end
  end

  logic          div_start, div_busy, div_done;
  logic [SW-1:0] div_a, div_b, div_q;
  seq_div #(.W(SW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  logic [SW-1:0] count;
  assign count = SW'(n_beats) * SW'(VEC);

  always_comb begin
    div_start = 1'b0;
    div_a     = '0;
    div_b     = count;
    case (state)
      S_MEAN:  begin div_start = 1'b1; div_a = neg ? SW'(-sum) : SW'(sum); end
      S_VDIV:  begin div_start = 1'b1; div_a = sq; end
      S_RECIP: begin div_start = 1'b1; div_a = SW'(64'd1 << (2*FL)); div_b = SW'(root) + 1'b1; end
      default: ;
    endcase
  end

  // square root trial
  logic [SQB-1:0] cand;
  logic [2*SQB-1:0] cand_sq;
  assign cand    = root | (SQB'(1) << (bitn - 1'b1));
  assign cand_sq = cand * cand;

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  always_comb
    for (int p = 0; p < VEC; p++) begin
      logic signed [DW:0]     d;
      logic signed [2*PW:0]   t;
      d = (DW+1)'(row[beat][p]) - (DW+1)'(mean);
      t = ((2*PW+1)'(d) * (2*PW+1)'($signed({1'b0, recip}))) >>> FL;
      out_data[p] = sat_elem((PW+1)'(t));
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_beats <= '0; beat <= '0; sum <= '0; neg <= 1'b0; mean <= '0;
      sq <= '0; var_q <= '0; root <= '0; bitn <= '0; recip <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          n_beats <= (len == '0) ? BW'(1) : len;
          beat <= '0; sum <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          row[beat] <= xr;
          sum <= sum + wsum;
          if (beat == n_beats - 1'b1) begin
            beat <= '0; state <= S_MEAN;
            neg  <= (sum + wsum) < 0;
          end else beat <= beat + 1'b1;
        end
        S_MEAN: state <= S_MWAIT;
        S_MWAIT: if (div_done) begin
          mean <= neg ? elem_t'(-div_q) : elem_t'(div_q);
          sq   <= '0;
          state <= S_VAR;
        end
        S_VAR: begin
          sq <= sq + wsq;
          if (beat == n_beats - 1'b1) begin
            beat <= '0; state <= S_VDIV;
          end else beat <= beat + 1'b1;
        end
        S_VDIV: state <= S_VWAIT;
        S_VWAIT: if (div_done) begin
          var_q <= div_q;
          root  <= '0;
          bitn  <= ($clog2(SQB+1))'(SQB);
          state <= S_SQRT;
        end
        S_SQRT: begin
          if (SW'(cand_sq) <= var_q) root <= cand;
          bitn <= bitn - 1'b1;
          if (bitn == 1) state <= S_RECIP;
        end
        S_RECIP: state <= S_RWAIT;
        S_RWAIT: if (div_done) begin
          recip <= PW'(div_q);
          state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (beat == n_beats - 1'b1) begin
            beat <= '0; state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
