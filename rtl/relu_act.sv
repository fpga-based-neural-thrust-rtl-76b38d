// relu_act: the activation function of the network, ReLU, on one
// fixed-point word.
//
// y = max(0, x) when enable is high; y = x when it is low, which is how the
// output layer of H, which has no activation, passes through the same path.
// Purely combinational. The use of ReLU after every hidden layer and none
// after the output layer follows the paper; the enable input is this
// design's way of sharing one datapath between both cases.
module relu_act
  import nn_pkg::*;
(
  input  logic enable,
  input  fxp_t x,
  output fxp_t y
);
  always_comb begin
    if (enable && x < 0) y = '0;
    else                 y = x;
  end
endmodule
