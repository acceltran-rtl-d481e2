// tb_pre_sparsity: random zero-free activation/weight words with random masks; the expected
// matched pairs are worked out here from position-aligned copies built alongside the
// inputs: for every position effectual in both, the pair goes out in position order.
module tb_pre_sparsity;
  import acceltran_pkg::*;
  sword_t act, wgt, act_o, wgt_o;
  mask_t  mask_o;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  pre_sparsity dut (.act, .wgt, .act_o, .wgt_o, .mask_o, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the example of the paper's figure: activation mask 1,0,1 (1 = ineffectual), weight 0,1,1
    for (int it = 0; it < 2000; it++) begin
      elem_t da [VEC], dw [VEC];
      int ka, kw, ke;
      elem_t ea [VEC], ew [VEC];
      act = '0; wgt = '0;
      ka = 0; kw = 0;
      for (int p = 0; p < VEC; p++) begin
        da[p] = elem_t'($urandom_range(1, 1000));
        dw[p] = -elem_t'($urandom_range(1, 1000));
        act.mask[p] = ($urandom_range(0, 99) < (it % 4) * 25);
        wgt.mask[p] = ($urandom_range(0, 99) < 40);
        if (!act.mask[p]) begin act.data[ka] = da[p]; ka++; end
        if (!wgt.mask[p]) begin wgt.data[kw] = dw[p]; kw++; end
      end
      ke = 0;
      for (int p = 0; p < VEC; p++) begin ea[p] = '0; ew[p] = '0; end
      for (int p = 0; p < VEC; p++)
        if (!act.mask[p] && !wgt.mask[p]) begin ea[ke] = da[p]; ew[ke] = dw[p]; ke++; end
      #1;
      checks++;
      if (int'(count) != ke) begin
        failures++;
        if (failures < 5) $display("count %0d expected %0d", count, ke);
      end
      for (int k = 0; k < ke; k++) begin
        checks++;
        if (act_o.data[k] != ea[k] || wgt_o.data[k] != ew[k]) begin
          failures++;
          if (failures < 5) $display("pair %0d: %0d,%0d expected %0d,%0d", k, act_o.data[k], wgt_o.data[k], ea[k], ew[k]);
        end
      end
      for (int p = 0; p < VEC; p++) begin
        checks++;
        if (mask_o[p] != (act.mask[p] || wgt.mask[p])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
