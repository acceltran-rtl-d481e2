// dynatran: run-time magnitude pruning of a whole tile in one clock cycle (DynaTran).
//
// Every element whose magnitude is below the threshold tau is made ineffectual: it is removed
// from the zero-free word and its mask bit is set to 1. Elements already marked ineffectual
// stay so. There is one comparator per element of the tile (ROWS words of 16 elements), as in
// the paper, so the whole tile is pruned in the single cycle between in_valid and out_valid.
//
// Threshold calculator: the internal register holds NPTS points of a pre-profiled transfer
// curve, point n being (rho_n, tau_n) with rho_n rising with n. They are written before
// inference through curve_we/curve_idx/curve_rho/curve_tau. For a desired sparsity rho the
// calculator returns tau of the first point with rho_n >= rho (the last point if none), a
// plain look-up. The paper states the look-up but not its rule; the rule, the number of
// points and the port names are this design's choices.
//
// The pruning rule follows the paper's equation (keep when |x| >= tau). The figure draws a
// ">" comparator; the equation was followed.
//
// Timing: in_* sampled at a rising edge with in_valid, result in out_* one cycle later.
// Setting prune = 0 passes the tile through unchanged (same latency).
module dynatran
  import acceltran_pkg::*;
#(
  parameter int unsigned ROWS = 32,   // words per call (a 16x16 weight plus a 16x16 activation tile)
  parameter int unsigned NPTS = 16    // points of the stored transfer curve
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // curve loading
  input  logic                     curve_we,
  input  logic [$clog2(NPTS)-1:0]  curve_idx,
  input  logic [DW-1:0]            curve_rho,   // unsigned fraction, FL fractional bits
  input  logic [DW-1:0]            curve_tau,   // unsigned, FL fractional bits
  // tile
  input  logic                     in_valid,
  input  logic                     prune,
  input  logic [DW-1:0]            rho,
  input  sword_t [ROWS-1:0]        in_tile,
  output logic                     out_valid,
  output sword_t [ROWS-1:0]        out_tile,
  output logic [DW-1:0]            tau_used
);

  logic [DW-1:0] rho_reg [NPTS];
  logic [DW-1:0] tau_reg [NPTS];
  logic [DW-1:0] tau;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NPTS; n++) begin
        rho_reg[n] <= '1;
        tau_reg[n] <= '0;
      end
    end else if (curve_we) begin
      rho_reg[curve_idx] <= curve_rho;
      tau_reg[curve_idx] <= curve_tau;
    end
  end

  // threshold calculator
  always_comb begin
    tau = tau_reg[NPTS-1];
    for (int n = NPTS - 1; n >= 0; n--)
      if (rho_reg[n] >= rho) tau = tau_reg[n];
  end

  // comparators
  sword_t [ROWS-1:0] pruned;
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      vec_t  dense;
      mask_t keep;
      dense = expand(in_tile[r].data, in_tile[r].mask);
      for (int p = 0; p < VEC; p++) begin
        logic [DW-1:0] mag;
        mag = dense[p][DW-1] ? DW'(-dense[p]) : DW'(dense[p]);
        keep[p] = !in_tile[r].mask[p] && (!prune || mag >= tau);
      end
      pruned[r].mask = ~keep;
      pruned[r].data = collapse(dense, keep);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tile  <= '0;
      tau_used  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tile <= pruned;
        tau_used <= prune ? tau : '0;
      end
    end
  end

endmodule
