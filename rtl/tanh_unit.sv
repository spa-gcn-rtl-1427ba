// tanh_unit: y = tanh(x) in Q15.16, registered output (latency 1).
//
// Uses tanh(x) = 2*sigmoid(2x) - 1 with the same shift-and-add piecewise
// linear sigmoid as sigmoid_unit (the original design took tanh from a vendor
// math library). Maximum error is about 0.04.
module tanh_unit import spa_pkg::*; (
  input  logic  clk,
  input  data_t x,
  output data_t y
);
  data_t s;
  sigmoid_unit u_sig (.clk, .x(x <<< 1), .y(s));
  assign y = (s <<< 1) - data_t'(1 <<< FRAC);
endmodule
