// scu -- Sparse Computing Unit: index-selected Hadamard products with compressed weights.
//
// Holds 64*rho = 32 multipliers (rho = 50% sparsity). A non-zero element selector
// picks, for each multiplier j, the transform-domain input h[idx[j]] out of the 64
// inputs H[0..63]; the multiplier forms m[j] = h[idx[j]] * w[j], where w[j] is the
// j-th non-zero transform-domain weight. One SCU thus performs one sparse
// T3(6x6,4x4) DeConv patch (32 of 64 products) or four sparse F(2x2,3x3) Conv
// patches (8 of 16 products each); the Conv/DeConv difference is only in how
// indices and weights are laid out, which the SCU array prepares.
// Selector, 32 multipliers and their port names follow the published SCU
// diagram. Purely combinational.
module scu
  import nvca_pkg::*;
(
  input  tin_t  [NPOS-1:0] h,
  input  idx_t  [NNZ-1:0]  idx,
  input  wgt_t  [NNZ-1:0]  w,
  output prod_t [NNZ-1:0]  m
);
  tin_t [NNZ-1:0] sel;

  always_comb begin
    for (int j = 0; j < NNZ; j++) begin
      sel[j] = h[idx[j]];                                   // non-zero element selector
      m[j]   = PROD_W'($signed(sel[j])) * PROD_W'($signed(w[j]));
    end
  end
endmodule
