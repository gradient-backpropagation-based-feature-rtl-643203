// maxpool_unit: 2x2 max-pooling window with the index of the maximum.
//
// Combinational. The four inputs are the window in raster order, x[0] top-left, x[1]
// top-right, x[2] bottom-left, x[3] bottom-right. 'y' is the largest and 'idx' its position,
// 2 * row + column, which is the 2-bit code shown for the index mask in the paper's pooling
// example (for instance index 3 for a maximum in the bottom-right corner). On equal values the
// earliest position in raster order wins, a choice the paper does not make.
module maxpool_unit
  import xai_pkg::*;
(
  input  data_t      x [4],
  output data_t      y,
  output logic [1:0] idx
);
  always_comb begin
    y = x[0]; idx = 2'd0;
    for (int i = 1; i < 4; i++)
      if (x[i] > y) begin
        y = x[i]; idx = 2'(i);
      end
  end
endmodule
