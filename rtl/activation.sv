// activation: combinational nonlinearity unit for one lane.
//
// mode selects sigmoid, tanh, ReLU or pass-through on a Q16.16 value. Sigmoid
// is a four-segment piecewise linear approximation (absolute error below
// 0.02); tanh is computed as 2*sigmoid(2x) - 1 on the same segments. The
// paper names sigmoid and tanh for the GRU gates and ReLU for the dense layer;
// the piecewise linear approximation is this design's choice (see merinda_pkg).
// No clock: y follows x and mode in the same cycle.
module activation
  import merinda_pkg::*;
(
  input  act_e mode,
  input  fx_t  x,
  output fx_t  y
);

  always_comb begin
    unique case (mode)
      ACT_SIGMOID: y = fx_sigmoid(x);
      ACT_TANH:    y = fx_tanh(x);
      ACT_RELU:    y = fx_relu(x);
      default:     y = x;
    endcase
  end

endmodule
