// rll_unit: output stage of a convolutional or fully-connected layer.
//
// Takes the accumulated dot product (ACC_W bits, 2*FRAC fractional bits),
// shifts it back to the FRAC-bit data format (arithmetic shift, rounding toward
// minus infinity), saturates it to the DW-bit range and, when relu_en is set,
// applies the rectified linear unit max(0, x). This is the network's RLL
// layer fused into the layer that feeds it, so a rectified feature map needs no
// memory of its own; the paper lists RLL as a layer type, and the fusion, the
// truncation and the saturation are this design's choices.
// Purely combinational. sat flags a saturated result, clipped a negative value
// set to zero by the ReLU.
module rll_unit
  import rflearn_pkg::*;
(
  input  acc_t  acc,
  input  logic  relu_en,
  output data_t y,
  output logic  sat,
  output logic  clipped
);
  acc_t  shifted;
  data_t q;

  always_comb begin
    shifted = acc >>> FRAC;
    sat     = 1'b0;
    if (shifted > acc_t'(DATA_MAX)) begin
      q   = DATA_MAX;
      sat = 1'b1;
    end else if (shifted < acc_t'(DATA_MIN)) begin
      q   = DATA_MIN;
      sat = 1'b1;
    end else begin
      q = shifted[DW-1:0];
    end
    clipped = relu_en && q[DW-1];
    y       = clipped ? '0 : q;
  end
endmodule
