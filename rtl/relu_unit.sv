// relu_unit: ReLU for the forward pass and its three backward rules.
//
// Combinational. In the forward pass (phase = PH_FP) the output is max(x, 0) and 'mask_out'
// is (x > 0), the 1-bit value kept on chip for the backward pass. In the backward pass x is a
// gradient R and mask_in the stored forward bit f > 0; the output follows the attribution
// method, fixed at design time:
//   SALIENCY   R' = (f > 0) * R            (vanilla gradient)
//   DECONVNET  R' = (R > 0) * R            (ReLU applied to the gradient, no mask needed)
//   GUIDED     R' = (f > 0) * (R > 0) * R  (both)
// These rules and the 1-bit mask are the paper's; the port layout is this design's.
module relu_unit
  import xai_pkg::*;
#(
  parameter method_e METHOD = GUIDED
) (
  input  phase_e phase,
  input  data_t  x,
  input  logic   mask_in,
  output data_t  y,
  output logic   mask_out
);
  logic pos;
  assign pos      = (x > 0);
  assign mask_out = pos;

  always_comb begin
    if (phase == PH_FP) y = pos ? x : '0;
    else begin
      unique case (METHOD)
        SALIENCY:  y = mask_in ? x : '0;
        DECONVNET: y = pos ? x : '0;
        default:   y = (mask_in && pos) ? x : '0;
      endcase
    end
  end
endmodule
