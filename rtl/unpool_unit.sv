// unpool_unit: gradient routing through a 2x2 max-pool in the backward pass.
//
// Combinational. The gradient g of one pooled output goes to the window position that held the
// maximum in the forward pass, given by the stored 2-bit index (2 * row + column, raster
// order); the three other positions get zero. y[0..3] are the window in raster order. This
// is the paper's unpooling rule.
module unpool_unit
  import xai_pkg::*;
(
  input  data_t      g,
  input  logic [1:0] idx,
  output data_t      y [4]
);
  always_comb
    for (int i = 0; i < 4; i++) y[i] = (idx == 2'(i)) ? g : '0;
endmodule
