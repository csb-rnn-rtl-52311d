// act_tanh: the Tanh unit (theta in the dataflow architecture).
//
// Combinational tanh on Q8.8 numbers through the identity
// tanh(x) = 2*sigmoid(2x) - 1, reusing the piecewise-linear sigmoid of
// act_sigmoid. 2x saturates to the Q8.8 range, which is harmless because the
// sigmoid is already flat there. The paper only says that the unit computes
// tanh; the identity and the approximation are this design's choice.
module act_tanh
  import csb_pkg::*;
(
  input  data_t x,
  output data_t y
);
  localparam data_t ONE = data_t'(1 << FRAC);
  data_t x2, s;

  assign x2 = sat16(48'(x) * 48'sd2);
  act_sigmoid u_sig (.x(x2), .y(s));
  assign y = data_t'((s <<< 1) - ONE);
endmodule
