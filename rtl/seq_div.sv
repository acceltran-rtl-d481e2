// seq_div: unsigned restoring divider, one quotient bit per cycle. Shared helper of the
// softmax and layer-norm units (their reciprocal and mean steps); the paper does not describe
// how those units divide, so this iterative form is this design's choice.
//
// Timing: start with dividend/divisor sampled at a rising edge; done pulses W cycles later
// with quotient valid (held until the next start). Divisor 0 gives an all-ones quotient.
module seq_div #(
  parameter int unsigned W = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);

  logic [W-1:0]          q;
  logic [W:0]            rem;
  logic [W-1:0]          dvs;
  logic [$clog2(W+1)-1:0] n;

  logic [W:0] rem_sh, rem_sub;
  assign rem_sh  = {rem[W-1:0], q[W-1]};
  assign rem_sub = rem_sh - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; dvs <= '0; n <= '0;
      busy <= 1'b0; done <= 1'b0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q <= dividend; rem <= '0; dvs <= divisor;
        n <= ($clog2(W+1))'(W); busy <= 1'b1;
      end else if (busy) begin
        if (!rem_sub[W]) begin
          rem <= rem_sub;
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[W-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quotient <= (dvs == '0) ? '1 : (!rem_sub[W] ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0});
        end
      end
    end
  end

endmodule
