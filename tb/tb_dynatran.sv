// tb_dynatran: loads a transfer curve, then sends random tiles with random desired sparsity.
// For each, tau is looked up here from the same curve points, every element is compared with
// it, and the expected zero-free words and masks are built here; the result must appear
// exactly one cycle after the tile. Also checks prune = 0 (pass-through).
module tb_dynatran;
  import acceltran_pkg::*;
  localparam int ROWS = 4, NPTS = 16;
  logic clk = 0, rst_n = 0;
  logic curve_we, in_valid, prune, out_valid;
  logic [3:0] curve_idx;
  logic [DW-1:0] curve_rho, curve_tau, rho, tau_used;
  sword_t [ROWS-1:0] in_tile, out_tile;
  int checks = 0, failures = 0;
  int c_rho [NPTS], c_tau [NPTS];
  always #5 clk = ~clk;

  dynatran #(.ROWS(ROWS), .NPTS(NPTS)) dut (.clk, .rst_n, .curve_we, .curve_idx, .curve_rho,
    .curve_tau, .in_valid, .prune, .rho, .in_tile, .out_valid, .out_tile, .tau_used);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    curve_we = 0; curve_idx = 0; curve_rho = 0; curve_tau = 0; in_valid = 0; prune = 0;
    rho = 0; in_tile = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // curve: rho_n = n/16, tau_n = (n * 0.0125) in FL=16 fixed point (tau from 0 to ~0.19)
    for (int n = 0; n < NPTS; n++) begin
      c_rho[n] = (n * 65536) / NPTS;
      c_tau[n] = n * 819;
      @(negedge clk); curve_we = 1; curve_idx = 4'(n);
      curve_rho = DW'(c_rho[n]); curve_tau = DW'(c_tau[n]);
    end
    @(negedge clk); curve_we = 0;
    for (int it = 0; it < 600; it++) begin
      int tau;
      sword_t exp_t [ROWS];
      @(negedge clk);
      rho   = DW'($urandom_range(0, 65535));
      prune = (it % 5 != 0);
      tau = c_tau[NPTS-1];
      for (int n = NPTS - 1; n >= 0; n--) if (c_rho[n] >= int'(rho)) tau = c_tau[n];
      for (int r = 0; r < ROWS; r++) begin
        int k, ko;
        k = 0; ko = 0;
        in_tile[r] = '0; exp_t[r] = '0;
        for (int p = 0; p < VEC; p++) begin
          elem_t v;
          int mag;
          v = elem_t'($signed($urandom_range(0, 40000)) - 20000);
          if (v == 0) v = 1;
          in_tile[r].mask[p] = ($urandom_range(0, 3) == 0);
          if (!in_tile[r].mask[p]) begin
            in_tile[r].data[k] = v; k++;
            mag = (v < 0) ? -int'(v) : int'(v);
            if (!prune || mag >= tau) begin exp_t[r].data[ko] = v; ko++; end
            else exp_t[r].mask[p] = 1'b1;
          end else exp_t[r].mask[p] = 1'b1;
        end
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (out_tile[r] != exp_t[r]) begin
          failures++;
          if (failures < 5) $display("it %0d row %0d tau %0d mismatch mask %h exp %h", it, r, tau, out_tile[r].mask, exp_t[r].mask);
        end
      end
      checks++;
      if (prune && int'(tau_used) != tau) failures++;
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
