// relu_requant: output stage of a network layer.
//
// Rounds a MAC result (MAC_FRAC fractional bits) to the activation format
// (ACT_FRAC fractional bits, ACT_W bits) with round-half-away-from-zero and
// saturation, then applies ReLU when RELU=1. Purely combinational.
// The paper fuses the ReLU into the preceding pointwise convolution; this
// module is that fused stage and is instantiated inside pw_conv1d. With
// RELU=0 it is the plain requantiser used after the depthwise step.
module relu_requant
  import afd_pkg::*;
#(
  parameter bit RELU = 1'b1
) (
  input  mac_t acc,
  output act_t y
);
  act_t q;
  always_comb begin
    q = mac_to_act(acc);
    y = (RELU && q < 0) ? '0 : q;
  end
endmodule
