// softmax_unit: softmax of one row of attention scores, S = softmax(A / sqrt(h)), over a row
// of len words (16 elements each, up to MAXB words, so rows up to 16*MAXB tokens).
//
// The paper gives the function of its softmax modules and notes that they sum the
// exponentials over the tile in parallel; the insides below are this design's choices:
//   LOAD  one word per cycle: x' = x * scale (scale = 1/sqrt(h), FL fraction bits), stored,
//         running maximum kept.
//   EXP   one word per cycle: e = 2^((x' - max) * log2 e), sixteen in parallel; 2^f for the
//         fraction f is 1 + f(0.6565 + 0.3435 f) (error below 0.2 %), the integer part a shift.
//         The row sum is accumulated.
//   DIV   reciprocal of the sum with the iterative divider (41 cycles).
//   OUT   one word per cycle while out_ready: e * (1 / sum).
// Subtracting the maximum keeps every exponential in (0, 1].
//
// Interface: start with len/scale; then in_valid/in_ready for len words; then out_valid/
// out_ready for len words; busy is high from start to the last output word.
// Latency from the last input word to the first output word: len + 43 cycles.
module softmax_unit
  import acceltran_pkg::*;
#(
  parameter int unsigned MAXB = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(MAXB+1)-1:0] len,
  input  logic [DW-1:0]             scale,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  vec_t                      in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output vec_t                      out_data,
  output logic                      busy
);

  localparam int unsigned BW = $clog2(MAXB+1);
  localparam logic [DW-1:0] LOG2E = DW'(94548);   // log2(e) with 16 fraction bits

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXP, S_DIV, S_WAIT, S_OUT} state_e;
  state_e state;

  vec_t              row [MAXB];
  logic [BW-1:0]     n_beats, beat;
  logic [DW-1:0]     scale_q;
  elem_t             mx;
  logic [PW-1:0]     sum;
  logic [PW-1:0]     recip;

  // scaled input word and its maximum
  vec_t  xs;
  elem_t wmax;
  always_comb begin
    for (int p = 0; p < VEC; p++) begin
      logic signed [PW-1:0] t;
      t = PW'(in_data[p]) * $signed({{(PW-DW){1'b0}}, scale_q});
      xs[p] = elem_t'(t >>> FL);
    end
    wmax = xs[0];
    for (int p = 1; p < VEC; p++) if (xs[p] > wmax) wmax = xs[p];
  end

  // exponentials of the word being revisited
  vec_t          ex;
  logic [PW-1:0] wsum;
  always_comb begin
    wsum = '0;
    for (int p = 0; p < VEC; p++) begin
      logic signed [DW:0]   d;
      logic signed [PW-1:0] t;
      logic signed [PW-1:0] ip;
      logic [FL-1:0]        f;
      logic [PW-1:0]        inner, pw2;
      int                   sh;
      d  = (DW+1)'(row[beat][p]) - (DW+1)'(mx);            // <= 0
      t  = (PW'(d) * $signed(PW'(LOG2E))) >>> FL;                    // (x - max) log2 e, FL fraction
      ip = t >>> FL;                                        // floor, <= 0
      f  = t[FL-1:0];
      inner = PW'(43024) + ((PW'(22511) * PW'(f)) >> FL);
      pw2   = PW'(1 << FL) + ((PW'(f) * inner) >> FL);
      sh    = -int'(ip);
      ex[p] = (sh > FL) ? '0 : elem_t'(pw2 >> sh);
      wsum  = wsum + PW'(ex[p]);
    end
  end

  logic div_start, div_busy, div_done;
  logic [PW-1:0] div_q;
  seq_div #(.W(PW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(PW'(64'd1 << (2*FL))), .divisor(sum),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);
  assign div_start = (state == S_DIV);

  always_comb
    for (int p = 0; p < VEC; p++) begin
      logic [PW-1:0] t;
      t = (PW'(row[beat][p]) * recip) >> FL;
      out_data[p] = (t > PW'(1 << FL)) ? elem_t'(1 << FL) : elem_t'(t);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_beats <= '0; beat <= '0; scale_q <= '0;
      mx <= '0; sum <= '0; recip <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          n_beats <= (len == '0) ? BW'(1) : len;
          scale_q <= scale;
          beat    <= '0;
          mx      <= {1'b1, {(DW-1){1'b0}}};
          state   <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          row[beat] <= xs;
          if (wmax > mx) mx <= wmax;
          if (beat == n_beats - 1'b1) begin
            beat <= '0; sum <= '0; state <= S_EXP;
          end else beat <= beat + 1'b1;
        end
        S_EXP: begin
          row[beat] <= ex;
          sum <= sum + wsum;
          if (beat == n_beats - 1'b1) begin
            beat <= '0; state <= S_DIV;
          end else beat <= beat + 1'b1;
        end
        S_DIV: state <= S_WAIT;
        S_WAIT: if (div_done) begin
          recip <= div_q;
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
