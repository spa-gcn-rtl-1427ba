// spa_ref_pkg: reference arithmetic for the testbenches, written separately
// from the RTL: Q15.16 products, the piecewise-linear sigmoid/tanh written as
// the published breakpoint table, and the normalized-adjacency weight
// 1/sqrt(d_i * d_j) computed in floating point.
package spa_ref_pkg;
  import spa_pkg::*;

  function automatic data_t r_mul(data_t a, data_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return data_t'(p >>> 16);
  endfunction

  function automatic data_t r_relu(data_t a);
    return (a < 0) ? 0 : a;
  endfunction

  // PLAN sigmoid, evaluated on the magnitude in units of 1/65536
  function automatic data_t r_sigmoid(data_t x);
    int ax;
    int r;
    ax = (x < 0) ? -x : x;
    if (ax >= 5 * 65536)            r = 65536;
    else if (ax >= 155648)          r = (ax >>> 5) + 55296;    // 2.375, 0.84375
    else if (ax >= 65536)           r = (ax >>> 3) + 40960;    // 1.0,   0.625
    else                            r = (ax >>> 2) + 32768;    //        0.5
    return (x < 0) ? 65536 - r : r;
  endfunction

  function automatic data_t r_tanh(data_t x);
    return (r_sigmoid(x * 2) * 2) - 65536;
  endfunction

  function automatic data_t r_fix(real v);
    return data_t'($rtoi(v * 65536.0));
  endfunction

  function automatic data_t r_adj_weight(int di, int dj);
    return r_fix(1.0 / $sqrt(real'(di) * real'(dj)));
  endfunction

  // small random value in (-range/2, range/2), range in Q15.16 units
  function automatic data_t r_rand(int range);
    return data_t'(int'($urandom % 32'(range)) - range / 2);
  endfunction
endpackage
