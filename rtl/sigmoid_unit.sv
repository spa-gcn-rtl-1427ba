// sigmoid_unit: y = 1 / (1 + exp(-x)) in Q15.16, one result per cycle,
// registered output (latency 1).
//
// The original design took sigmoid from a vendor math library; here it is the
// piecewise-linear "PLAN" approximation, which needs only shifts and adds:
//   |x| >= 5            : 1
//   2.375 <= |x| < 5    : |x|/32 + 0.84375
//   1     <= |x| < 2.375: |x|/8  + 0.625
//   0     <= |x| < 1    : |x|/4  + 0.5
// and y(x) = 1 - y(|x|) for negative x. Maximum error is about 0.019.
module sigmoid_unit import spa_pkg::*; (
  input  logic  clk,
  input  data_t x,
  output data_t y
);
  always_ff @(posedge clk) y <= sigmoid_pwl(x);

  function automatic data_t sigmoid_pwl(data_t v);
    data_t a, r;
    a = v[DW-1] ? -v : v;
    if (a >= data_t'(5 <<< FRAC))                      r = data_t'(1 <<< FRAC);
    else if (a >= data_t'((19 <<< FRAC) / 8))          r = (a >>> 5) + data_t'((27 <<< FRAC) / 32);
    else if (a >= data_t'(1 <<< FRAC))                 r = (a >>> 3) + data_t'((5 <<< FRAC) / 8);
    else                                               r = (a >>> 2) + data_t'((1 <<< FRAC) / 2);
    return v[DW-1] ? data_t'(1 <<< FRAC) - r : r;
  endfunction
endmodule
