// pre_sparsity: pre-compute sparsity module. Takes a zero-free activation word and a
// zero-free weight word with their masks, and gives both back zero-free over only the
// positions where both are effectual, so that a MAC lane multiplies matched pairs only.
//
// Structure (paper, Fig. 8): a bit-wise AND of the two "effectual" masks gives the common
// non-zero positions; two XORs, each of one input's effectual mask with the AND, give the
// filter masks (positions effectual in that input but not in the other); the filter drops
// those elements and the zero-collapsing shifter packs the rest. The paper defines a mask
// bit of 1 as "ineffectual" and also says the AND yields the common non-zero positions; these
// agree only if the AND is taken over the inverted (effectual) masks, which is what is built.
//
// Output mask uses the same convention (1 = ineffectual); count is the number of pairs.
// Purely combinational; the MAC lane registers the result.
module pre_sparsity
  import acceltran_pkg::*;
(
  input  sword_t         act,
  input  sword_t         wgt,
  output sword_t         act_o,
  output sword_t         wgt_o,
  output mask_t          mask_o,
  output logic [CW-1:0]  count
);

  mask_t nz_a, nz_w, common, filt_a, filt_w;
  vec_t  dense_a, dense_w;

  always_comb begin
    nz_a    = ~act.mask;
    nz_w    = ~wgt.mask;
    common  = nz_a & nz_w;          // AND gate
    filt_a  = nz_a ^ common;        // XOR gates: filter masks
    filt_w  = nz_w ^ common;
    dense_a = expand(act.data, act.mask);
    dense_w = expand(wgt.data, wgt.mask);
    // filter (drop positions named by the filter mask) then zero-collapse
    act_o.data = collapse(dense_a, nz_a & ~filt_a);
    wgt_o.data = collapse(dense_w, nz_w & ~filt_w);
    act_o.mask = ~common;
    wgt_o.mask = ~common;
    mask_o     = ~common;
    count      = popcount(common);
  end

endmodule
